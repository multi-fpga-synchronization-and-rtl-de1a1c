// mfpga_top: one board's multi-FPGA synchronization and data-communication
// logic, the same bitstream on every board.
//
// clock_sync holds the board time counter, the primary and secondary
// minimal-PTP sync ports (ring over copper GPIO) and the synchronized-start
// trigger. NUM_LANES comm_lane instances (four: one per SFP, each a
// single-lane Aurora core, so each link can talk to a different board at its
// own time) carry readout frames out and feed-forward results in. The Aurora
// cores, transceivers, PLLs and the host software sit outside this module;
// their signals are ports. Per-lane arrays are indexed by lane.
//
// Clocks: clk is the 500 MHz control clock derived from the distributed
// reference; user_clk[l] is lane l's Aurora user clock. Following the paper,
// offsets are computed and corrections written by host software.
module mfpga_top
  import mfc_pkg::*;
#(
  parameter int unsigned NUM_LANES        = 4,
  parameter int unsigned NUM_FRAMES       = 1,
  parameter int unsigned GAP_CYCLES       = 16,
  parameter int unsigned TIME_W           = 64,
  parameter int unsigned PULSE_W          = 4,
  parameter int unsigned REPLY_DELAY      = 16,
  parameter int unsigned FIFO_DEPTH_LOG2  = 4,
  parameter int unsigned SHORT_DEPTH_LOG2 = 4,
  localparam int unsigned NQ   = NUM_FRAMES * qubits_per_frame(NUM_FRAMES),
  localparam int unsigned ID_W = $clog2(NQ)
) (
  input  logic                              clk,
  input  logic                              rst,
  // ---- clock synchronization (host registers and GPIO pins) ----
  input  logic                              adj_valid,
  input  logic [TIME_W-1:0]                 adj_value,
  output logic [TIME_W-1:0]                 now,
  input  logic                              pri_tx_start,
  input  logic                              pri_clear,
  input  logic                              pri_gpio_in,
  output logic                              pri_gpio_out,
  output logic [TIME_W-1:0]                 pri_t1,
  output logic [TIME_W-1:0]                 pri_t4,
  output logic                              pri_t1_valid,
  output logic                              pri_t4_valid,
  output logic                              pri_busy,
  input  logic                              sec_clear,
  input  logic                              sec_gpio_in,
  output logic                              sec_gpio_out,
  output logic [TIME_W-1:0]                 sec_t2,
  output logic [TIME_W-1:0]                 sec_t3,
  output logic                              sec_t2_valid,
  output logic                              sec_t3_valid,
  output logic                              sec_busy,
  input  logic                              start_arm,
  input  logic [TIME_W-1:0]                 start_time,
  output logic                              start,
  output logic                              start_armed,
  output logic                              start_late,
  // ---- data communication, per lane ----
  input  logic [NUM_LANES-1:0]              user_clk,
  input  logic [NUM_LANES-1:0]              user_rst,
  input  logic [NUM_LANES-1:0]              channel_up,
  input  logic [NUM_LANES-1:0]              clear,
  input  logic [NUM_LANES-1:0][NQ-1:0]      meas_valid,
  input  qstate_t [NUM_LANES-1:0][NQ-1:0]   meas_state,
  input  logic [NUM_LANES-1:0]              ff_req,
  input  logic [NUM_LANES-1:0][ID_W-1:0]    ff_req_id,
  output logic [NUM_LANES-1:0]              ff_resp_valid,
  output qstate_t [NUM_LANES-1:0]           ff_resp_state,
  output logic [NUM_LANES-1:0]              ff_waiting,
  output logic [NUM_LANES-1:0][NQ-1:0]      res_valid,
  output qstate_t [NUM_LANES-1:0][NQ-1:0]   res_state,
  output logic [NUM_LANES-1:0]              tx_tvalid,
  output frame_t [NUM_LANES-1:0]            tx_tdata,
  output logic [NUM_LANES-1:0]              tx_tlast,
  output logic [NUM_LANES-1:0][KEEP_W-1:0]  tx_tkeep,
  input  logic [NUM_LANES-1:0]              tx_tready,
  input  logic [NUM_LANES-1:0]              rx_tvalid,
  input  frame_t [NUM_LANES-1:0]            rx_tdata,
  input  logic [NUM_LANES-1:0]              rx_tlast,
  input  logic [NUM_LANES-1:0]              crc_valid,
  input  logic [NUM_LANES-1:0]              crc_pass_fail_n,
  // ---- per-lane status pulses ----
  output logic [NUM_LANES-1:0]              ro_held,
  output logic [NUM_LANES-1:0]              ro_dropped,
  output logic [NUM_LANES-1:0]              ro_frame,
  output logic [NUM_LANES-1:0]              tx_sent,
  output logic [NUM_LANES-1:0]              tx_stall,
  output logic [NUM_LANES-1:0]              rx_frame_ok,
  output logic [NUM_LANES-1:0]              rx_crc_err,
  output logic [NUM_LANES-1:0]              rx_fmt_err,
  output logic [NUM_LANES-1:0]              rx_ovf_err
);

  clock_sync #(.TIME_W(TIME_W), .PULSE_W(PULSE_W), .REPLY_DELAY(REPLY_DELAY)) u_clock_sync (
    .clk, .rst, .adj_valid, .adj_value, .now,
    .pri_tx_start, .pri_clear, .pri_gpio_in, .pri_gpio_out,
    .pri_t1, .pri_t4, .pri_t1_valid, .pri_t4_valid, .pri_busy,
    .sec_clear, .sec_gpio_in, .sec_gpio_out,
    .sec_t2, .sec_t3, .sec_t2_valid, .sec_t3_valid, .sec_busy,
    .start_arm, .start_time, .start, .start_armed, .start_late
  );

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    comm_lane #(
      .NUM_FRAMES      (NUM_FRAMES),
      .GAP_CYCLES      (GAP_CYCLES),
      .FIFO_DEPTH_LOG2 (FIFO_DEPTH_LOG2),
      .SHORT_DEPTH_LOG2(SHORT_DEPTH_LOG2)
    ) u_lane (
      .clk, .rst,
      .user_clk        (user_clk[l]),
      .user_rst        (user_rst[l]),
      .channel_up      (channel_up[l]),
      .clear           (clear[l]),
      .meas_valid      (meas_valid[l]),
      .meas_state      (meas_state[l]),
      .ff_req          (ff_req[l]),
      .ff_req_id       (ff_req_id[l]),
      .ff_resp_valid   (ff_resp_valid[l]),
      .ff_resp_state   (ff_resp_state[l]),
      .ff_waiting      (ff_waiting[l]),
      .res_valid       (res_valid[l]),
      .res_state       (res_state[l]),
      .tx_tvalid       (tx_tvalid[l]),
      .tx_tdata        (tx_tdata[l]),
      .tx_tlast        (tx_tlast[l]),
      .tx_tkeep        (tx_tkeep[l]),
      .tx_tready       (tx_tready[l]),
      .rx_tvalid       (rx_tvalid[l]),
      .rx_tdata        (rx_tdata[l]),
      .rx_tlast        (rx_tlast[l]),
      .crc_valid       (crc_valid[l]),
      .crc_pass_fail_n (crc_pass_fail_n[l]),
      .ro_held         (ro_held[l]),
      .ro_dropped      (ro_dropped[l]),
      .ro_frame        (ro_frame[l]),
      .tx_sent         (tx_sent[l]),
      .tx_stall        (tx_stall[l]),
      .rx_frame_ok     (rx_frame_ok[l]),
      .rx_crc_err      (rx_crc_err[l]),
      .rx_fmt_err      (rx_fmt_err[l]),
      .rx_ovf_err      (rx_ovf_err[l])
    );
  end

endmodule
