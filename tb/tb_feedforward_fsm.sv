// tb_feedforward_fsm: frames with random valid fields are merged into the
// result register (checked against a model after every frame, for one and
// for four frames); processor requests for stored results must be answered
// exactly one cycle later with the right state; a request for a missing
// result must wait, then be answered once the result arrives; clear must
// forget everything.
module tb_feedforward_fsm;
  import mfc_pkg::*;
  logic clk = 1'b0, rst = 1'b1, clear = 1'b0;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int NF    = (g == 0) ? 1 : 4;
    localparam int QPF   = qubits_per_frame(NF);
    localparam int NQ    = NF * QPF;
    localparam int IDX_W = frame_idx_bits(NF);
    localparam int ID_W  = $clog2(NQ);

    logic in_valid = 1'b0, req = 1'b0, resp_valid, waiting;
    frame_t in_data = '0;
    logic [ID_W-1:0] req_id = '0;
    qstate_t resp_state;
    logic    [NQ-1:0] res_valid;
    qstate_t [NQ-1:0] res_state;
    bit      mvalid[NQ];
    qstate_t mstate[NQ];
    int n_wait = 0, n_imm = 0;
    bit done = 0;

    feedforward_fsm #(.NUM_FRAMES(NF)) dut (.clk, .rst, .clear, .in_valid, .in_data,
      .req, .req_id, .resp_valid, .resp_state, .waiting, .res_valid, .res_state);

    task automatic send_frame(input int f, input int density);
      frame_t d = '0;
      for (int i = 0; i < QPF; i++) begin
        automatic qfield_t fld;
        fld.valid = ($urandom_range(0, 99) < density);
        fld.state = qstate_t'($urandom_range(0, 3));
        d[i*FIELD_W +: FIELD_W] = fld;
        if (fld.valid) begin mvalid[f*QPF+i] = 1; mstate[f*QPF+i] = fld.state; end
      end
      if (IDX_W > 0) d[63 -: (IDX_W > 0 ? IDX_W : 1)] = f;
      in_valid = 1'b1; in_data = d;
      @(negedge clk); in_valid = 1'b0;
      for (int q = 0; q < NQ; q++) begin
        check(res_valid[q] == mvalid[q], $sformatf("cfg%0d valid %0d", g, q));
        if (mvalid[q]) check(res_state[q] == mstate[q], $sformatf("cfg%0d state %0d", g, q));
      end
    endtask

    initial begin
      for (int q = 0; q < NQ; q++) begin mvalid[q] = 0; mstate[q] = '0; end
      wait (!rst);
      @(negedge clk);
      for (int k = 0; k < 40; k++) send_frame($urandom_range(0, NF - 1), 30);
      // requests for stored results: answered one cycle later
      for (int k = 0; k < 60; k++) begin
        automatic int q = $urandom_range(0, NQ - 1);
        if (!mvalid[q]) continue;
        req = 1'b1; req_id = ID_W'(q);
        @(negedge clk); req = 1'b0;
        check(resp_valid && resp_state == mstate[q], $sformatf("cfg%0d immediate answer q%0d", g, q));
        n_imm++;
        @(negedge clk);
      end
      // clear, then a request that has to wait for its result
      clear = 1'b1; @(negedge clk); clear = 1'b0;
      for (int q = 0; q < NQ; q++) mvalid[q] = 0;
      check(res_valid == '0, "clear forgets results");
      req = 1'b1; req_id = ID_W'(NQ - 1);
      @(negedge clk); req = 1'b0;
      repeat (10) begin
        check(waiting && !resp_valid, "request waits for a missing result");
        @(negedge clk);
      end
      n_wait++;
      send_frame(NF - 1, 100);
      @(negedge clk);
      check(resp_valid && resp_state == mstate[NQ - 1], "waiting request answered after arrival");
      @(negedge clk);
      check(!waiting, "back to idle");
      done = 1;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    wait (g_cfg[0].done && g_cfg[1].done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
