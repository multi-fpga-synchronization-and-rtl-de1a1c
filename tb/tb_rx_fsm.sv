// tb_rx_fsm: random single-beat frames arrive with CRC verdicts in the same
// cycle or 1-3 cycles later; some fail CRC, some beats lack tlast, and the
// FIFO is sometimes full. The written words must be exactly the good frames
// that met a FIFO with room, and each error output must count its cases.
module tb_rx_fsm;
  import mfc_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic rx_tvalid = 1'b0, rx_tlast = 1'b0, crc_valid = 1'b0, crc_pass_fail_n = 1'b1, fifo_full = 1'b0;
  frame_t rx_tdata = '0, fifo_wdata;
  logic fifo_wr_en, frame_ok, crc_err, fmt_err, ovf_err;
  frame_t exp_q[$];
  int checks = 0, failures = 0;
  int n_ok = 0, n_crc = 0, n_fmt = 0, n_ovf = 0, e_crc = 0, e_fmt = 0, e_ovf = 0;

  rx_fsm dut (.*);
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (fifo_wr_en) begin
      check(exp_q.size() > 0 && fifo_wdata == exp_q.pop_front(), "written frame");
      n_ok++;
    end
    if (crc_err) n_crc++;
    if (fmt_err) n_fmt++;
    if (ovf_err) n_ovf++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 600; i++) begin
      automatic int kind = $urandom_range(0, 9);     // 0: no tlast, 1: bad CRC, 2: FIFO full
      automatic int lag  = $urandom_range(0, 3);     // verdict delay
      automatic frame_t f = {$urandom, $urandom};
      @(negedge clk);
      rx_tvalid = 1'b1; rx_tdata = f; rx_tlast = (kind != 0);
      if (kind >= 3) exp_q.push_back(f);
      if (kind == 0) begin
        e_fmt++;
        @(negedge clk); rx_tvalid = 1'b0;
        continue;
      end
      fifo_full = (kind == 2);
      if (lag == 0) begin
        crc_valid = 1'b1; crc_pass_fail_n = (kind != 1);
        @(negedge clk); rx_tvalid = 1'b0; crc_valid = 1'b0;
      end else begin
        @(negedge clk); rx_tvalid = 1'b0;
        repeat (lag - 1) @(negedge clk);
        crc_valid = 1'b1; crc_pass_fail_n = (kind != 1);
        @(negedge clk); crc_valid = 1'b0;
      end
      fifo_full = 1'b0;
      if (kind == 1) e_crc++;
      else if (kind == 2) e_ovf++;
    end
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "all good frames written");
    check(n_crc == e_crc && e_crc > 0, $sformatf("crc errors %0d vs %0d", n_crc, e_crc));
    check(n_fmt == e_fmt && e_fmt > 0, $sformatf("format errors %0d vs %0d", n_fmt, e_fmt));
    check(n_ovf == e_ovf && e_ovf > 0, $sformatf("overflows %0d vs %0d", n_ovf, e_ovf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
