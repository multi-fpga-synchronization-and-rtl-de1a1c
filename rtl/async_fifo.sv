// async_fifo: the "regular FIFO" that carries frames between the control
// clock (500 MHz) and an Aurora user clock (161.1328125 MHz), used once on the
// transmit side (control -> user clock) and once on the receive side
// (user -> control clock).
//
// Classic dual-clock FIFO: binary read and write pointers one bit wider than
// the address, exchanged between domains in Gray code through two-flop
// synchronizers. Full and empty are therefore pessimistic by the
// synchronizer delay but never wrong. The read side is first-word-fall-
// through: rdata shows the head entry whenever rempty is low and rd_en pops
// it. Writes to a full FIFO and reads from an empty one are ignored (and
// flagged by assertions). The clock-domain-crossing role comes from the
// paper; the structure and depth are this design's choice.
module async_fifo #(
  parameter int unsigned WIDTH      = 64,
  parameter int unsigned DEPTH_LOG2 = 4
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);

  localparam int unsigned DEPTH = 1 << DEPTH_LOG2;
  localparam int unsigned PW    = DEPTH_LOG2 + 1;

  logic [WIDTH-1:0] mem [DEPTH];

  logic [PW-1:0] wbin, wgray, rbin, rgray;
  logic [PW-1:0] rgray_w1, rgray_w2;   // read pointer seen by write side
  logic [PW-1:0] wgray_r1, wgray_r2;   // write pointer seen by read side

  function automatic logic [PW-1:0] bin2gray(logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write domain ----
  logic          do_wr;
  logic [PW-1:0] wbin_next;
  assign do_wr     = wr_en && !wfull;
  assign wbin_next = wbin + PW'(do_wr);

  always_ff @(posedge wclk) begin
    if (do_wr) mem[wbin[DEPTH_LOG2-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // Full when the Gray pointers differ only in their two top bits.
  assign wfull = (wgray == {~rgray_w2[PW-1:PW-2], rgray_w2[PW-3:0]});

  // ---- read domain ----
  logic          do_rd;
  logic [PW-1:0] rbin_next;
  assign do_rd     = rd_en && !rempty;
  assign rbin_next = rbin + PW'(do_rd);

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assign rempty = (rgray == wgray_r2);
  assign rdata  = mem[rbin[DEPTH_LOG2-1:0]];

  // ---- protocol checks ----
  a_no_write_when_full: assert property (@(posedge wclk) disable iff (wrst)
    !(wr_en && wfull));
  a_no_read_when_empty: assert property (@(posedge rclk) disable iff (rrst)
    !(rd_en && rempty));

endmodule
