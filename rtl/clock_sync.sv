// clock_sync: one board's clock-synchronization logic.
//
// Holds the board time counter, the two identical minimal-PTP sync ports and
// the synchronized-start trigger. In the ring, the primary port talks to the
// downstream board's secondary port; the last board's primary port closes the
// ring on the first board's secondary port. The primary port starts an
// exchange when software asks (pri_tx_start -> t1, reply -> t4); the
// secondary port answers every received pulse on its own (t2, t3). Software
// reads the four stamps, computes the offset and writes the correction
// through adj_valid/adj_value; then it arms the start trigger with the
// broadcast start time. The port roles follow the port names and the
// t1..t4 sequence of the paper; the fixed role wiring is this design's.
module clock_sync #(
  parameter int unsigned TIME_W      = 64,
  parameter int unsigned PULSE_W     = 4,
  parameter int unsigned REPLY_DELAY = 16
) (
  input  logic              clk,
  input  logic              rst,
  // time counter
  input  logic              adj_valid,
  input  logic [TIME_W-1:0] adj_value,
  output logic [TIME_W-1:0] now,
  // primary sync port (towards downstream board)
  input  logic              pri_tx_start,
  input  logic              pri_clear,
  input  logic              pri_gpio_in,
  output logic              pri_gpio_out,
  output logic [TIME_W-1:0] pri_t1,
  output logic [TIME_W-1:0] pri_t4,
  output logic              pri_t1_valid,
  output logic              pri_t4_valid,
  output logic              pri_busy,
  // secondary sync port (towards upstream board)
  input  logic              sec_clear,
  input  logic              sec_gpio_in,
  output logic              sec_gpio_out,
  output logic [TIME_W-1:0] sec_t2,
  output logic [TIME_W-1:0] sec_t3,
  output logic              sec_t2_valid,
  output logic              sec_t3_valid,
  output logic              sec_busy,
  // synchronized start
  input  logic              start_arm,
  input  logic [TIME_W-1:0] start_time,
  output logic              start,
  output logic              start_armed,
  output logic              start_late
);

  sync_time_counter #(.TIME_W(TIME_W)) u_counter (
    .clk, .rst, .adj_valid, .adj_value, .now
  );

  ptp_sync_port #(.TIME_W(TIME_W), .PULSE_W(PULSE_W), .REPLY_DELAY(REPLY_DELAY)) u_primary (
    .clk, .rst, .now,
    .tx_start   (pri_tx_start),
    .auto_reply (1'b0),
    .clear      (pri_clear),
    .gpio_in    (pri_gpio_in),
    .gpio_out   (pri_gpio_out),
    .tx_ts      (pri_t1),
    .tx_ts_valid(pri_t1_valid),
    .rx_ts      (pri_t4),
    .rx_ts_valid(pri_t4_valid),
    .rx_pulse   (),
    .busy       (pri_busy)
  );

  ptp_sync_port #(.TIME_W(TIME_W), .PULSE_W(PULSE_W), .REPLY_DELAY(REPLY_DELAY)) u_secondary (
    .clk, .rst, .now,
    .tx_start   (1'b0),
    .auto_reply (1'b1),
    .clear      (sec_clear),
    .gpio_in    (sec_gpio_in),
    .gpio_out   (sec_gpio_out),
    .tx_ts      (sec_t3),
    .tx_ts_valid(sec_t3_valid),
    .rx_ts      (sec_t2),
    .rx_ts_valid(sec_t2_valid),
    .rx_pulse   (),
    .busy       (sec_busy)
  );

  sync_start_trigger #(.TIME_W(TIME_W)) u_start (
    .clk, .rst, .now,
    .arm        (start_arm),
    .start_time (start_time),
    .start      (start),
    .armed      (start_armed),
    .late       (start_late)
  );

endmodule
