// tb_sync_time_counter: checks that the board time counter counts one per
// clock from reset and that positive and negative corrections land exactly.
module tb_sync_time_counter;
  logic clk = 1'b0, rst = 1'b1, adj_valid = 1'b0;
  logic [63:0] adj_value = '0, now;
  int checks = 0, failures = 0;
  longint unsigned expect_now;

  sync_time_counter dut (.*);
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (now=%0d expected=%0d)", what, now, expect_now); end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    check(now == 0, "zero after reset");
    repeat (10) @(negedge clk);
    check(now == 10, "counts 10 cycles");
    expect_now = 10;
    adj_value = 64'd1000; adj_valid = 1'b1;   // add 1000
    @(negedge clk); adj_valid = 1'b0;
    expect_now = 10 + 1 + 1000;
    check(now == expect_now, "positive correction");
    adj_value = -64'sd600; adj_valid = 1'b1;  // subtract 600
    @(negedge clk); adj_valid = 1'b0;
    expect_now = expect_now + 1 - 600;
    check(now == expect_now, "negative correction");
    repeat (5) @(negedge clk);
    expect_now += 5;
    check(now == expect_now, "keeps counting after correction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
