// tb_sync_start_trigger: arms the trigger with a future timestamp and checks
// the start pulse comes once, in the cycle after the time is reached; then
// arms it with a past timestamp and checks it fires at once with late set.
module tb_sync_start_trigger;
  logic clk = 1'b0, rst = 1'b1, arm = 1'b0;
  logic [63:0] now = '0, start_time = '0;
  logic start, armed, late;
  int checks = 0, failures = 0, pulses = 0;
  longint unsigned pulse_time;

  sync_start_trigger dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) now <= rst ? 64'd0 : now + 1;
  always @(posedge clk) if (start && !rst) begin pulses++; pulse_time = now; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (20) @(negedge clk);
    start_time = now + 100; arm = 1'b1;
    @(negedge clk); arm = 1'b0;
    check(armed && !late, "armed, not late");
    repeat (150) @(negedge clk);
    check(pulses == 1, $sformatf("exactly one start pulse, got %0d", pulses));
    check(pulse_time == start_time + 1, "pulse in the cycle after now reaches start_time");
    check(!armed, "disarmed after firing");
    // past timestamp
    start_time = now - 5; arm = 1'b1;
    @(negedge clk); arm = 1'b0;
    check(late, "late flag for a past timestamp");
    repeat (3) @(negedge clk);
    check(pulses == 2, $sformatf("late arm fires at once, got %0d", pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
