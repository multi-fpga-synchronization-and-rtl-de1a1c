// tb_short_fifo: random pushes and pops against a queue model; checks data
// order, count, full and empty every cycle and that both limits are hit.
module tb_short_fifo;
  logic clk = 1'b0, rst = 1'b1, wr_en = 1'b0, rd_en = 1'b0, full, empty;
  logic [63:0] wdata = '0, rdata;
  logic [4:0] count;
  logic [63:0] model[$];
  int checks = 0, failures = 0, nfull = 0, nempty = 0;

  short_fifo dut (.*);
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

  always @(posedge clk) if (!rst) begin
    check(count == model.size(), "count");
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == 16), "full flag");
    if (full) nfull++;
    if (empty) nempty++;
    if (rd_en && !empty) check(rdata == model.pop_front(), "data order");
    if (wr_en && (!full || (rd_en && !empty))) model.push_back(wdata);
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // phases that fill, drain and mix
      wr_en = $urandom_range(0, 9) < ((i / 300) % 2 ? 8 : 2);
      rd_en = $urandom_range(0, 9) < ((i / 300) % 2 ? 2 : 8);
      wdata = {$urandom, $urandom};
      rd_en = rd_en && !empty;
    end
    check(nfull > 0 && nempty > 0, "reached full and empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
