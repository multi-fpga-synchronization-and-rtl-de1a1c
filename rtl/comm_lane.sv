// comm_lane: the data path of one single-lane Aurora 64B/66B link.
//
// Transmit: readout_fsm (control clock) -> regular FIFO (control -> user
// clock) -> short FIFO (user clock) -> tx_fsm -> Aurora TX AXI4-Stream.
// Receive:  Aurora RX AXI4-Stream -> rx_fsm -> regular FIFO (user ->
// control clock) -> feedforward_fsm -> distributed processor.
// Frames move from the transmit regular FIFO into the short FIFO whenever the
// first holds one and the second has room; the receive FIFO is drained into
// the feed-forward FSM whenever it holds a frame. The chain follows the
// paper's lane diagram; the transfer rules are this design's.
//
// Clocks: clk is the 500 MHz control clock, user_clk the lane's Aurora user
// clock (161.1328125 MHz); rst and user_rst are synchronous to them.
module comm_lane
  import mfc_pkg::*;
#(
  parameter int unsigned NUM_FRAMES       = 1,
  parameter int unsigned GAP_CYCLES       = 16,
  parameter int unsigned FIFO_DEPTH_LOG2  = 4,
  parameter int unsigned SHORT_DEPTH_LOG2 = 4,
  parameter bit          USE_CRC          = 1'b1,
  localparam int unsigned NQ   = NUM_FRAMES * qubits_per_frame(NUM_FRAMES),
  localparam int unsigned ID_W = $clog2(NQ)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                user_clk,
  input  logic                user_rst,
  input  logic                channel_up,
  // control system: readout chain and distributed processor
  input  logic                clear,
  input  logic    [NQ-1:0]    meas_valid,
  input  qstate_t [NQ-1:0]    meas_state,
  input  logic                ff_req,
  input  logic [ID_W-1:0]     ff_req_id,
  output logic                ff_resp_valid,
  output qstate_t             ff_resp_state,
  output logic                ff_waiting,
  output logic    [NQ-1:0]    res_valid,
  output qstate_t [NQ-1:0]    res_state,
  // Aurora TX
  output logic                tx_tvalid,
  output frame_t              tx_tdata,
  output logic                tx_tlast,
  output logic [KEEP_W-1:0]   tx_tkeep,
  input  logic                tx_tready,
  // Aurora RX
  input  logic                rx_tvalid,
  input  frame_t              rx_tdata,
  input  logic                rx_tlast,
  input  logic                crc_valid,
  input  logic                crc_pass_fail_n,
  // status pulses
  output logic                ro_held,
  output logic                ro_dropped,
  output logic                ro_frame,
  output logic                tx_sent,
  output logic                tx_stall,
  output logic                rx_frame_ok,
  output logic                rx_crc_err,
  output logic                rx_fmt_err,
  output logic                rx_ovf_err
);

  // ---------------- transmit ----------------
  logic   ro_valid, txf_full, txf_empty, txf_rd, sf_full, sf_empty, sf_rd;
  frame_t ro_data, txf_rdata, sf_rdata;

  readout_fsm #(.NUM_FRAMES(NUM_FRAMES), .GAP_CYCLES(GAP_CYCLES)) u_readout (
    .clk, .rst, .clear, .meas_valid, .meas_state,
    .frame_valid (ro_valid),
    .frame_data  (ro_data),
    .frame_ready (!txf_full),
    .held        (ro_held),
    .dropped     (ro_dropped)
  );
  assign ro_frame = ro_valid;

  async_fifo #(.WIDTH(FRAME_W), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_tx_fifo (
    .wclk (clk),      .wrst (rst),      .wr_en (ro_valid), .wdata (ro_data), .wfull (txf_full),
    .rclk (user_clk), .rrst (user_rst), .rd_en (txf_rd),   .rdata (txf_rdata), .rempty (txf_empty)
  );

  assign txf_rd = !txf_empty && !sf_full;

  short_fifo #(.WIDTH(FRAME_W), .DEPTH_LOG2(SHORT_DEPTH_LOG2)) u_short_fifo (
    .clk (user_clk), .rst (user_rst),
    .wr_en (txf_rd), .wdata (txf_rdata), .full (sf_full),
    .rd_en (sf_rd),  .rdata (sf_rdata),  .empty (sf_empty),
    .count ()
  );

  tx_fsm u_tx_fsm (
    .clk (user_clk), .rst (user_rst), .channel_up,
    .fifo_empty (sf_empty), .fifo_rdata (sf_rdata), .fifo_rd_en (sf_rd),
    .tx_tvalid, .tx_tdata, .tx_tlast, .tx_tkeep, .tx_tready,
    .sent  (tx_sent),
    .stall (tx_stall)
  );

  // ---------------- receive ----------------
  logic   rxf_wr, rxf_full, rxf_empty;
  frame_t rxf_wdata, rxf_rdata;

  rx_fsm #(.USE_CRC(USE_CRC)) u_rx_fsm (
    .clk (user_clk), .rst (user_rst),
    .rx_tvalid, .rx_tdata, .rx_tlast, .crc_valid, .crc_pass_fail_n,
    .fifo_wr_en (rxf_wr), .fifo_wdata (rxf_wdata), .fifo_full (rxf_full),
    .frame_ok (rx_frame_ok), .crc_err (rx_crc_err), .fmt_err (rx_fmt_err), .ovf_err (rx_ovf_err)
  );

  async_fifo #(.WIDTH(FRAME_W), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_rx_fifo (
    .wclk (user_clk), .wrst (user_rst), .wr_en (rxf_wr),     .wdata (rxf_wdata), .wfull (rxf_full),
    .rclk (clk),      .rrst (rst),      .rd_en (!rxf_empty), .rdata (rxf_rdata), .rempty (rxf_empty)
  );

  feedforward_fsm #(.NUM_FRAMES(NUM_FRAMES)) u_feedforward (
    .clk, .rst, .clear,
    .in_valid   (!rxf_empty),
    .in_data    (rxf_rdata),
    .req        (ff_req),
    .req_id     (ff_req_id),
    .resp_valid (ff_resp_valid),
    .resp_state (ff_resp_state),
    .waiting    (ff_waiting),
    .res_valid,
    .res_state
  );

endmodule
