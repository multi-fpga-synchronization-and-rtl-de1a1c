// short_fifo: small single-clock FIFO in the Aurora user clock domain.
//
// The Aurora 64B/66B core cannot take data in every user clock cycle: its
// gearbox needs a pause cycle after every 32 cycles and it inserts up to eight
// clock-compensation characters every 4992 cycles. During those cycles the
// TX FSM sees tready low; this FIFO sits between the clock-crossing FIFO and
// the TX FSM and absorbs the stall so the data path upstream never sees it.
// 16 entries cover a pause plus a full compensation burst with margin (depth
// is this design's choice; the role is the paper's).
//
// First-word-fall-through: rdata is the head entry while empty is low and
// rd_en pops it. Simultaneous read and write on a full FIFO is allowed.
module short_fifo #(
  parameter int unsigned WIDTH      = 64,
  parameter int unsigned DEPTH_LOG2 = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                wr_en,
  input  logic [WIDTH-1:0]    wdata,
  output logic                full,
  input  logic                rd_en,
  output logic [WIDTH-1:0]    rdata,
  output logic                empty,
  output logic [DEPTH_LOG2:0] count
);

  localparam int unsigned DEPTH = 1 << DEPTH_LOG2;

  logic [WIDTH-1:0]      mem [DEPTH];
  logic [DEPTH_LOG2-1:0] wptr, rptr;
  logic                  do_wr, do_rd;

  assign empty = (count == '0);
  assign full  = (count == (DEPTH_LOG2+1)'(DEPTH));
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && (!full || do_rd);
  assign rdata = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      count <= count + (DEPTH_LOG2+1)'(do_wr) - (DEPTH_LOG2+1)'(do_rd);
    end
  end

  a_no_read_when_empty: assert property (@(posedge clk) disable iff (rst)
    !(rd_en && empty));

endmodule
