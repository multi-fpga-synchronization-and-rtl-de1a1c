// ptp_sync_port: one synchronization port of the minimal-PTP scheme.
//
// Each board carries two identical instances, one towards the upstream and
// one towards the downstream neighbour of the ring, so all boards run the same
// bitstream. A port can
//   * send a pulse on gpio_out (tx_start, from software, or automatically as
//     a reply) and record the board time at launch in tx_ts  (t1 or t3),
//   * detect a pulse on gpio_in and record the board time in rx_ts (t2 or t4).
// With auto_reply set (secondary role) every received pulse is answered after
// REPLY_DELAY cycles, producing t3. Software reads the four timestamps from
// the two boards and computes offset = ((t2-t1)-(t4-t3))/2 and transit time
// = ((t4-t1)-(t3-t2))/2; that arithmetic is not done here, as in the paper.
//
// gpio_in is asynchronous: it passes a two-flop synchronizer and a rising edge
// detector, so t2/t4 are taken 3 cycles after the pulse reaches the pin. This
// latency is the same in both directions and therefore cancels in the offset.
// The wire split (one output and one input per port), pulse width, reply
// delay and synchronizer are this design's choices.
//
// Timing: tx_ts is the value of now in the cycle gpio_out is set (it rises at
// the following clock edge); pulses arriving while a reply is pending are
// timestamped but not answered again.
module ptp_sync_port #(
  parameter int unsigned TIME_W      = 64,
  parameter int unsigned PULSE_W     = 4,
  parameter int unsigned REPLY_DELAY = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [TIME_W-1:0] now,
  input  logic              tx_start,
  input  logic              auto_reply,
  input  logic              clear,
  input  logic              gpio_in,
  output logic              gpio_out,
  output logic [TIME_W-1:0] tx_ts,
  output logic              tx_ts_valid,
  output logic [TIME_W-1:0] rx_ts,
  output logic              rx_ts_valid,
  output logic              rx_pulse,
  output logic              busy
);

  localparam int unsigned PW_W = $clog2(PULSE_W + 1);
  localparam int unsigned RD_W = $clog2(REPLY_DELAY + 1);

  logic [2:0]      sync_q;
  logic [PW_W-1:0] pulse_cnt;
  logic [RD_W-1:0] reply_cnt;
  logic            reply_pend;
  logic            launch;

  // Input synchronizer and edge detector.
  always_ff @(posedge clk) begin
    if (rst) sync_q <= '0;
    else     sync_q <= {sync_q[1:0], gpio_in};
  end
  assign rx_pulse = sync_q[1] & ~sync_q[2];

  // A launch happens when software asks or a pending reply matures, and only
  // when no pulse is being driven.
  assign launch = (pulse_cnt == '0) &&
                  (tx_start || (reply_pend && reply_cnt == '0));
  assign busy   = (pulse_cnt != '0) || reply_pend;

  always_ff @(posedge clk) begin
    if (rst) begin
      pulse_cnt  <= '0;
      gpio_out   <= 1'b0;
      reply_pend <= 1'b0;
      reply_cnt  <= '0;
    end else begin
      if (launch) begin
        pulse_cnt <= PW_W'(PULSE_W);
        gpio_out  <= 1'b1;
      end else if (pulse_cnt != '0) begin
        pulse_cnt <= pulse_cnt - 1'b1;
        gpio_out  <= (pulse_cnt != PW_W'(1));
      end
      if (launch && reply_pend) begin
        reply_pend <= 1'b0;
      end else if (rx_pulse && auto_reply && !reply_pend) begin
        reply_pend <= 1'b1;
        reply_cnt  <= RD_W'(REPLY_DELAY);
      end else if (reply_pend && reply_cnt != '0) begin
        reply_cnt <= reply_cnt - 1'b1;
      end
    end
  end

  // Timestamp capture.
  always_ff @(posedge clk) begin
    if (rst) begin
      tx_ts <= '0; tx_ts_valid <= 1'b0;
      rx_ts <= '0; rx_ts_valid <= 1'b0;
    end else begin
      if (clear) begin
        tx_ts_valid <= 1'b0;
        rx_ts_valid <= 1'b0;
      end
      if (launch) begin
        tx_ts       <= now;
        tx_ts_valid <= 1'b1;
      end
      if (rx_pulse) begin
        rx_ts       <= now;
        rx_ts_valid <= 1'b1;
      end
    end
  end

endmodule
