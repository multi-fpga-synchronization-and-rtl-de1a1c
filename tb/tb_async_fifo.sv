// tb_async_fifo: writes 400 random words at 500 MHz and reads them at
// 161.13 MHz with random gaps on both sides; every word must come out once,
// in order, and the FIFO must report full and empty along the way.
module tb_async_fifo;
  logic wclk = 1'b0, rclk = 1'b0, wrst = 1'b1, rrst = 1'b1;
  logic wr_en = 1'b0, rd_en = 1'b0, wfull, rempty;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model[$];
  int checks = 0, failures = 0, nwr = 0, nrd = 0, saw_full = 0, saw_empty = 0;
  localparam int N = 400;

  async_fifo dut (.*);
  always #1 wclk = ~wclk;
  always #3.103 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #40000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  always @(posedge wclk) begin
    if (!wrst) begin
      if (wr_en && !wfull) begin model.push_back(wdata); nwr++; end
      if (wfull) saw_full++;
    end
  end
  always @(negedge wclk) begin
    // bursty: mostly write during the first half, then slowly
    wr_en <= !wrst && nwr < N && !wfull &&
             ($urandom_range(0, 9) < ((nwr < N/2) ? 9 : 2));
    wdata <= {$urandom, $urandom};
  end
  // reader
  always @(posedge rclk) begin
    if (!rrst) begin
      if (rempty) saw_empty++;
      if (rd_en && !rempty) begin
        check(model.size() > 0, "read with empty model");
        if (model.size() > 0) check(rdata == model.pop_front(), $sformatf("data word %0d", nrd));
        nrd++;
      end
    end
  end
  always @(negedge rclk) rd_en <= !rrst && !rempty && ($urandom_range(0, 3) != 0);

  initial begin
    #20; wrst = 1'b0; rrst = 1'b0;
    wait (nrd == N);
    #100;
    check(saw_full > 0, "FIFO became full");
    check(saw_empty > 0, "FIFO became empty");
    check(rempty && model.size() == 0, "all words drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
