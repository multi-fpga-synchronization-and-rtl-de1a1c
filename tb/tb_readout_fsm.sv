// tb_readout_fsm: two configurations side by side, the default one (one
// frame of 21 qubits, 16-cycle gap) and one with four frames of 20 qubits and
// a 4-cycle gap. Random readout strobes and random FIFO back-pressure drive
// both; a per-qubit queue model (at most one pending and one parked result)
// predicts every frame field, the held and dropped pulses, and clear. Frame
// spacing must never be below the gap and, under steady traffic with no
// back-pressure, must equal it. All results must be sent at the end.
module tb_readout_fsm;
  import mfc_pkg::*;
  logic clk = 1'b0, rst = 1'b1, clear = 1'b0;
  int checks = 0, failures = 0, phase = 0;

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int NF    = (g == 0) ? 1 : 4;
    localparam int GAP   = (g == 0) ? 16 : 4;
    localparam int QPF   = qubits_per_frame(NF);
    localparam int NQ    = NF * QPF;
    localparam int IDX_W = frame_idx_bits(NF);

    logic    [NQ-1:0] mv = '0;
    qstate_t [NQ-1:0] ms = '0;
    logic   fv, fr = 1'b0, held, dropped;
    frame_t fd;
    qstate_t mq[NQ][$];
    bit exp_held = 0, exp_drop = 0;
    int last_frame = -1000, cyc = 0, min_gap = 1 << 30, max_gap_p1 = 0;
    int n_frames = 0, n_held = 0, n_drop = 0;

    readout_fsm #(.NUM_FRAMES(NF), .GAP_CYCLES(GAP)) dut (
      .clk, .rst, .clear, .meas_valid(mv), .meas_state(ms),
      .frame_valid(fv), .frame_data(fd), .frame_ready(fr), .held, .dropped);

    always @(posedge clk) if (!rst) begin
      automatic bit nh = 0, nd = 0;
      cyc++;
      check(held == exp_held, $sformatf("cfg%0d held pulse", g));
      check(dropped == exp_drop, $sformatf("cfg%0d dropped pulse", g));
      if (held) n_held++;
      if (dropped) n_drop++;
      if (clear) begin
        check(!fv, "no frame during clear");
        for (int q = 0; q < NQ; q++) mq[q].delete();
      end else begin
        if (fv) begin
          automatic int f = (IDX_W > 0) ? int'(fd[63 -: (IDX_W > 0 ? IDX_W : 1)]) : 0;
          check(fr, "frame only when FIFO ready");
          check(cyc - last_frame >= GAP, $sformatf("cfg%0d gap %0d", g, cyc - last_frame));
          if (phase == 1 && last_frame > 0) begin
            if (cyc - last_frame < min_gap) min_gap = cyc - last_frame;
            if (cyc - last_frame > max_gap_p1) max_gap_p1 = cyc - last_frame;
          end
          last_frame = cyc;
          n_frames++;
          check(f < NF, "frame index in range");
          for (int i = 0; i < QPF; i++) begin
            automatic int q = f * QPF + i;
            automatic qfield_t fld = qfield_t'(fd[i*FIELD_W +: FIELD_W]);
            if (mq[q].size() > 0) begin
              automatic qstate_t e = mq[q].pop_front();
              check(fld.valid && fld.state == e, $sformatf("cfg%0d qubit %0d field", g, q));
            end else begin
              check(!fld.valid, $sformatf("cfg%0d qubit %0d should be empty", g, q));
            end
          end
          if (IDX_W == 0) check(fd[63] == 1'b0, "spare bit zero");
        end
        for (int q = 0; q < NQ; q++) if (mv[q]) begin
          if (mq[q].size() == 0) mq[q].push_back(ms[q]);
          else if (mq[q].size() == 1) begin mq[q].push_back(ms[q]); nh = 1; end
          else nd = 1;
        end
      end
      exp_held = nh;
      exp_drop = nd;
    end

    always @(negedge clk) begin
      automatic int p = (phase == 0) ? 60 : (phase == 1) ? 3 : 0;   // 1-in-p strobe rate
      for (int q = 0; q < NQ; q++) begin
        mv[q] <= (p != 0) && !rst && ($urandom_range(0, p - 1) == 0);
        ms[q] <= qstate_t'($urandom_range(0, 3));
      end
      fr <= (phase == 0) ? ($urandom_range(0, 4) != 0) : 1'b1;
    end

  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (3000) @(negedge clk);
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    repeat (3000) @(negedge clk);
    phase = 1;
    repeat (1000) @(negedge clk);
    phase = 2;
    repeat (2000) @(negedge clk);
    for (int q = 0; q < 21; q++) check(g_cfg[0].mq[q].size() == 0, "cfg0 all sent");
    for (int q = 0; q < 80; q++) check(g_cfg[1].mq[q].size() == 0, "cfg1 all sent");
    check(g_cfg[0].n_held > 0 && g_cfg[0].n_drop > 0, "cfg0 held and dropped occurred");
    check(g_cfg[0].min_gap == 16 && g_cfg[0].max_gap_p1 == 16,
          $sformatf("cfg0 steady gap %0d..%0d, expected 16 (32 ns)", g_cfg[0].min_gap, g_cfg[0].max_gap_p1));
    check(g_cfg[1].min_gap == 4, "cfg1 steady gap 4");
    $display("frames sent: cfg0 %0d cfg1 %0d", g_cfg[0].n_frames, g_cfg[1].n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
