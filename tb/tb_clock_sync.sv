// tb_clock_sync: two boards in a ring of two. Board B leaves reset LAG
// cycles after board A, so its counter is LAG behind. The host sequence of
// the minimal-PTP scheme is played by the bench: A's primary port measures
// against B's secondary port, the bench computes ((t2-t1)-(t4-t3))/2 and
// writes the correction into B; then the exchange from B's primary port to
// A's secondary port (closing the ring) must measure zero, both counters
// must agree, and a shared start timestamp must fire on both in one cycle.
module tb_clock_sync;
  localparam int LAG = 321, DA = 5, DB = 5;
  logic clk = 1'b0, rst_a = 1'b1, rst_b = 1'b1;
  logic [63:0] adj_value = '0, start_time = '0;
  logic adj_b = 1'b0, pri_start_a = 1'b0, pri_start_b = 1'b0, arm = 1'b0, clr = 1'b0;
  logic [63:0] now_a, now_b, a_t1, a_t4, a_t2, a_t3, b_t1, b_t4, b_t2, b_t3;
  logic a_po, a_so, b_po, b_so, a_pi, a_si, b_pi, b_si;
  logic a_t1v, a_t4v, a_t2v, a_t3v, b_t1v, b_t4v, b_t2v, b_t3v, a_pb, a_sb, b_pb, b_sb;
  logic start_a, start_b, late_a, late_b, armed_a, armed_b;
  logic [DA-1:0] ab = '0;
  logic [DB-1:0] ba = '0;
  int checks = 0, failures = 0, starts_a = 0, starts_b = 0, start_mismatch = 0;
  longint signed off;

  clock_sync u_a (.clk, .rst(rst_a), .adj_valid(1'b0), .adj_value, .now(now_a),
    .pri_tx_start(pri_start_a), .pri_clear(clr), .pri_gpio_in(a_pi), .pri_gpio_out(a_po),
    .pri_t1(a_t1), .pri_t4(a_t4), .pri_t1_valid(a_t1v), .pri_t4_valid(a_t4v), .pri_busy(a_pb),
    .sec_clear(clr), .sec_gpio_in(a_si), .sec_gpio_out(a_so),
    .sec_t2(a_t2), .sec_t3(a_t3), .sec_t2_valid(a_t2v), .sec_t3_valid(a_t3v), .sec_busy(a_sb),
    .start_arm(arm), .start_time, .start(start_a), .start_armed(armed_a), .start_late(late_a));
  clock_sync u_b (.clk, .rst(rst_b), .adj_valid(adj_b), .adj_value, .now(now_b),
    .pri_tx_start(pri_start_b), .pri_clear(clr), .pri_gpio_in(b_pi), .pri_gpio_out(b_po),
    .pri_t1(b_t1), .pri_t4(b_t4), .pri_t1_valid(b_t1v), .pri_t4_valid(b_t4v), .pri_busy(b_pb),
    .sec_clear(clr), .sec_gpio_in(b_si), .sec_gpio_out(b_so),
    .sec_t2(b_t2), .sec_t3(b_t3), .sec_t2_valid(b_t2v), .sec_t3_valid(b_t3v), .sec_busy(b_sb),
    .start_arm(arm), .start_time, .start(start_b), .start_armed(armed_b), .start_late(late_b));

  // A.primary <-> B.secondary and B.primary <-> A.secondary, DA/DB cycles each way
  logic [DA-1:0] ab_r = '0;
  logic [DB-1:0] ba_r = '0;
  always @(posedge clk) begin
    ab   <= {ab[DA-2:0], a_po};    ab_r <= {ab_r[DA-2:0], b_so};
    ba   <= {ba[DB-2:0], b_po};    ba_r <= {ba_r[DB-2:0], a_so};
    if (!rst_a && start_a) starts_a++;
    if (!rst_b && start_b) starts_b++;
    if (!rst_a && !rst_b && start_a != start_b) start_mismatch++;
  end
  assign b_si = ab[DA-1];
  assign a_pi = ab_r[DA-1];
  assign a_si = ba[DB-1];
  assign b_pi = ba_r[DB-1];

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_a = 1'b0;
    repeat (LAG) @(negedge clk);
    rst_b = 1'b0;
    repeat (5) @(negedge clk);
    check(longint'(now_a) - longint'(now_b) == LAG, "counters differ by the reset lag");
    // exchange A -> B
    pri_start_a = 1'b1; @(negedge clk); pri_start_a = 1'b0;
    repeat (80) @(negedge clk);
    check(a_t1v && a_t4v && b_t2v && b_t3v, "A->B timestamps captured");
    off = ((longint'(b_t2) - longint'(a_t1)) - (longint'(a_t4) - longint'(b_t3))) / 2;
    check(off == -LAG, $sformatf("measured offset %0d expected %0d", off, -LAG));
    adj_value = 64'(-off); adj_b = 1'b1; @(negedge clk); adj_b = 1'b0;
    check(now_a == now_b, "counters agree after correction");
    // ring closure B -> A
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    pri_start_b = 1'b1; @(negedge clk); pri_start_b = 1'b0;
    repeat (80) @(negedge clk);
    check(b_t1v && b_t4v && a_t2v && a_t3v, "B->A timestamps captured");
    off = ((longint'(a_t2) - longint'(b_t1)) - (longint'(b_t4) - longint'(a_t3))) / 2;
    check(off == 0, $sformatf("ring closure offset %0d expected 0", off));
    // synchronized start
    start_time = now_a + 100; arm = 1'b1; @(negedge clk); arm = 1'b0;
    repeat (150) @(negedge clk);
    check(starts_a == 1 && starts_b == 1, "one start on each board");
    check(start_mismatch == 0, "starts in the same cycle");
    check(!late_a && !late_b, "not late");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
