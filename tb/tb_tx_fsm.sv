// tb_tx_fsm: a queue stands in for the short FIFO and an Aurora-like sink
// drops tready with the gearbox pause pattern plus random gaps. Every frame
// must arrive once, in order, as a single beat with tlast and full tkeep;
// the stall output must match the cycles the sink refused a valid beat;
// nothing may be popped while the channel is down; with tready high the
// frames must go out back to back (one per cycle).
module tb_tx_fsm;
  import mfc_pkg::*;
  logic clk = 1'b0, rst = 1'b1, channel_up = 1'b0, tx_tready = 1'b0;
  logic fifo_empty, fifo_rd_en, tx_tvalid, tx_tlast, sent, stall;
  frame_t fifo_rdata, tx_tdata;
  logic [KEEP_W-1:0] tx_tkeep;
  frame_t src[$], exp_q[$];
  int checks = 0, failures = 0, nstall_seen = 0, nstall_ref = 0, nrecv = 0, cyc = 0;
  int first_beat = -1, last_beat = -1;
  bit random_ready = 1'b1;

  tx_fsm dut (.*);
  always #1 clk = ~clk;

  // the queue's head is presented between clock edges, like a FIFO output
  always @(negedge clk) begin
    fifo_empty <= (src.size() == 0);
    fifo_rdata <= (src.size() == 0) ? '0 : src[0];
  end

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
    cyc++;
    if (fifo_rd_en) begin
      check(channel_up, "pop only while channel up");
      void'(src.pop_front());
    end
    if (tx_tvalid && !tx_tready) nstall_ref++;
    if (stall) nstall_seen++;
    if (tx_tvalid && tx_tready) begin
      check(tx_tlast && tx_tkeep == '1, "single-beat frame");
      check(exp_q.size() > 0 && tx_tdata == exp_q.pop_front(), $sformatf("frame %0d data", nrecv));
      nrecv++;
      if (!random_ready) begin
        if (first_beat < 0) first_beat = cyc;
        last_beat = cyc;
      end
    end
  end
  always @(negedge clk)
    tx_tready <= random_ready ? ((cyc % 32 != 31) && ($urandom_range(0, 4) != 0)) : 1'b1;

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 200; i++) begin
      automatic frame_t f = {$urandom, $urandom};
      src.push_back(f); exp_q.push_back(f);
    end
    repeat (20) @(negedge clk);
    check(src.size() == 200 && !tx_tvalid, "nothing sent while channel down");
    channel_up = 1'b1;
    wait (nrecv == 200);
    @(negedge clk);
    check(nstall_seen == nstall_ref && nstall_ref > 0, $sformatf("stall count %0d vs %0d", nstall_seen, nstall_ref));
    // back-to-back throughput with tready always high
    random_ready = 1'b0;
    @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      automatic frame_t f = {$urandom, $urandom};
      src.push_back(f); exp_q.push_back(f);
    end
    wait (nrecv == 220);
    check(last_beat - first_beat == 19, $sformatf("20 frames in 20 cycles (%0d)", last_beat - first_beat + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
