// tx_fsm: feeds the Aurora 64B/66B framing TX port (AXI4-Stream).
//
// Every frame is a single 64-bit beat with tlast set and all tkeep bits on.
// The FSM pops the short FIFO into its output register whenever the register
// is empty or being accepted in this cycle, so frames go out back to back
// while tready stays high. When the core deasserts tready (gearbox pause,
// clock compensation) the beat is held unchanged, as AXI4-Stream requires,
// and `stall` reports the lost cycle. Nothing is popped while the Aurora
// channel is down. The block is only named by the paper; this behaviour is
// the simplest one matching the framing interface it describes.
//
// Timing: a frame at the FIFO head appears on tx_tdata one cycle after it is
// popped.
module tx_fsm
  import mfc_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               channel_up,
  // short FIFO read side
  input  logic               fifo_empty,
  input  frame_t             fifo_rdata,
  output logic               fifo_rd_en,
  // Aurora AXI4-Stream TX
  output logic               tx_tvalid,
  output frame_t             tx_tdata,
  output logic               tx_tlast,
  output logic [KEEP_W-1:0]  tx_tkeep,
  input  logic               tx_tready,
  // status
  output logic               sent,
  output logic               stall
);

  typedef enum logic {TX_IDLE, TX_SEND} tx_state_t;
  tx_state_t state;

  logic load;
  assign load       = (state == TX_IDLE || tx_tready) && channel_up && !fifo_empty;
  assign fifo_rd_en = load;
  assign tx_tvalid  = (state == TX_SEND);
  assign tx_tlast   = 1'b1;
  assign tx_tkeep   = '1;
  assign sent       = tx_tvalid && tx_tready;
  assign stall      = tx_tvalid && !tx_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= TX_IDLE;
      tx_tdata <= '0;
    end else if (load) begin
      state    <= TX_SEND;
      tx_tdata <= fifo_rdata;
    end else if (tx_tready) begin
      state    <= TX_IDLE;
    end
  end

  // AXI4-Stream: a beat that was not accepted stays valid and unchanged.
  a_axis_hold: assert property (@(posedge clk) disable iff (rst)
    (tx_tvalid && !tx_tready) |=> (tx_tvalid && $stable(tx_tdata)));

endmodule
