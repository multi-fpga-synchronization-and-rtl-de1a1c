// tb_ptp_sync_port: two ports, a primary on board A and a secondary on board
// B whose clock counter runs OFFSET ahead, joined by a link of DELAY cycles in
// each direction. The primary sends, the secondary answers on its own; the
// offset and transit time computed from t1..t4 must equal the ones built
// into the bench (transit includes the 3-cycle input synchronizer and edge
// detector). Also checks pulse width, reply delay, that the primary does not
// answer, and clear.
module tb_ptp_sync_port;
  localparam int OFFSET = 1234, DELAY = 7, PW = 4, RD = 16;
  logic clk = 1'b0, rst = 1'b1;
  logic [63:0] now_a = '0, now_b = '0;
  logic a_start = 1'b0, a_clear = 1'b0;
  logic a_out, b_out, a_in, b_in, a_txv, a_rxv, b_txv, b_rxv, a_rxp, b_rxp, a_busy, b_busy;
  logic [63:0] t1, t4, t3, t2;
  logic [DELAY-1:0] ab = '0, ba = '0;
  int checks = 0, failures = 0, a_rx_cnt = 0, b_rx_cnt = 0, a_high = 0;
  longint signed offset, transit;

  ptp_sync_port #(.PULSE_W(PW), .REPLY_DELAY(RD)) u_a (
    .clk, .rst, .now(now_a), .tx_start(a_start), .auto_reply(1'b0), .clear(a_clear),
    .gpio_in(a_in), .gpio_out(a_out), .tx_ts(t1), .tx_ts_valid(a_txv), .rx_ts(t4), .rx_ts_valid(a_rxv),
    .rx_pulse(a_rxp), .busy(a_busy));
  ptp_sync_port #(.PULSE_W(PW), .REPLY_DELAY(RD)) u_b (
    .clk, .rst, .now(now_b), .tx_start(1'b0), .auto_reply(1'b1), .clear(1'b0),
    .gpio_in(b_in), .gpio_out(b_out), .tx_ts(t3), .tx_ts_valid(b_txv), .rx_ts(t2), .rx_ts_valid(b_rxv),
    .rx_pulse(b_rxp), .busy(b_busy));

  always #1 clk = ~clk;
  always @(posedge clk) begin
    now_a <= rst ? 64'd5000 : now_a + 1;
    now_b <= rst ? 64'd5000 + OFFSET : now_b + 1;
    ab <= {ab[DELAY-2:0], a_out};
    ba <= {ba[DELAY-2:0], b_out};
    if (a_rxp && !rst) a_rx_cnt++;
    if (b_rxp && !rst) b_rx_cnt++;
    if (a_out && !rst) a_high++;
  end
  assign b_in = ab[DELAY-1];
  assign a_in = ba[DELAY-1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (10) @(negedge clk);
    check(!a_txv && !a_rxv && !b_txv && !b_rxv, "no timestamps before exchange");
    a_start = 1'b1; @(negedge clk); a_start = 1'b0;
    repeat (100) @(negedge clk);
    check(a_txv && a_rxv && b_txv && b_rxv, "all four timestamps captured");
    offset  = ((longint'(t2) - longint'(t1)) - (longint'(t4) - longint'(t3))) / 2;
    transit = ((longint'(t4) - longint'(t1)) - (longint'(t3) - longint'(t2))) / 2;
    check(offset == OFFSET, $sformatf("offset %0d expected %0d", offset, OFFSET));
    check(transit == DELAY + 3, $sformatf("transit %0d expected %0d", transit, DELAY + 3));
    check(t3 - t2 == RD + 1, "reply launched RD+1 cycles after reception");
    check(a_high == PW, "pulse is PULSE_W cycles wide");
    check(a_rx_cnt == 1 && b_rx_cnt == 1, $sformatf("one pulse each way, primary does not answer: %0d %0d", a_rx_cnt, b_rx_cnt));
    check(!a_busy && !b_busy, "both ports idle");
    a_clear = 1'b1; @(negedge clk); a_clear = 1'b0;
    check(!a_txv && !a_rxv, "clear drops primary timestamps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
