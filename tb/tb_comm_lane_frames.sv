// tb_comm_lane_frames: the larger-system configuration of one lane: four
// frames per lane (4 x 20 = 80 qubits, frame index in bits 63:62) and an
// 8-cycle (16 ns) frame gap, looped back through the Aurora link model.
// Random readout traffic on all 80 qubits for 20 000 control cycles; every
// frame the link accepts must be received, the feed-forward register must
// equal the merge of all frames sent (so every frame index was routed to
// the right qubits), all four frame indices must have been sent, and
// processor requests across all frames must return the stored states.
module tb_comm_lane_frames;
  import mfc_pkg::*;
  localparam int NF = 4, QPF = qubits_per_frame(NF), NQ = NF * QPF;
  logic clk = 1'b0, rst = 1'b1, user_clk = 1'b0, user_rst = 1'b1;
  logic clear = 1'b0, ff_req = 1'b0;
  logic [6:0] ff_req_id = '0;
  logic    [NQ-1:0] meas_valid = '0;
  qstate_t [NQ-1:0] meas_state = '0;
  logic ff_resp_valid, ff_waiting, channel_up;
  qstate_t ff_resp_state;
  logic    [NQ-1:0] res_valid;
  qstate_t [NQ-1:0] res_state;
  logic tx_tvalid, tx_tlast, tx_tready, rx_tvalid, rx_tlast, crc_valid, crc_pass_fail_n;
  frame_t tx_tdata, rx_tdata;
  logic [7:0] tx_tkeep;
  logic ro_held, ro_dropped, ro_frame, tx_sent, tx_stall, rx_frame_ok, rx_crc_err, rx_fmt_err, rx_ovf_err;
  int unsigned pauses, cc_cycles;
  int checks = 0, failures = 0, n_sent = 0, n_ok = 0, n_err = 0;
  bit      mvalid[NQ];
  qstate_t mstate[NQ];
  bit      seen_idx[NF];

  comm_lane #(.NUM_FRAMES(NF), .GAP_CYCLES(8)) dut (.*);
  aurora_model u_link (.user_clk, .rx_clk(user_clk), .rst(user_rst), .channel_up,
    .s_tvalid(tx_tvalid), .s_tdata(tx_tdata), .s_tlast(tx_tlast), .s_tready(tx_tready), .corrupt(1'b0),
    .m_tvalid(rx_tvalid), .m_tdata(rx_tdata), .m_tlast(rx_tlast), .crc_valid, .crc_pass_fail_n,
    .pauses, .cc_cycles);

  always #1 clk = ~clk;
  initial begin #0.37; forever #3.103 user_clk = ~user_clk; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge user_clk) if (!user_rst) begin
    if (tx_sent) begin
      automatic int f = int'(tx_tdata[63:62]);
      n_sent++;
      seen_idx[f] = 1;
      for (int i = 0; i < QPF; i++) begin
        automatic qfield_t fld = qfield_t'(tx_tdata[i*FIELD_W +: FIELD_W]);
        if (fld.valid) begin mvalid[f*QPF+i] = 1; mstate[f*QPF+i] = fld.state; end
      end
    end
    if (rx_frame_ok) n_ok++;
    if (rx_crc_err || rx_fmt_err || rx_ovf_err) n_err++;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < NQ; q++) begin mvalid[q] = 0; mstate[q] = '0; end
    for (int f = 0; f < NF; f++) seen_idx[f] = 0;
    #30; rst = 1'b0; user_rst = 1'b0;
    wait (channel_up);
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        meas_valid[q] = ($urandom_range(0, 599) == 0);
        meas_state[q] = qstate_t'($urandom_range(0, 3));
      end
    end
    meas_valid = '0;
    repeat (600) @(negedge clk);
    check(n_ok == n_sent && n_sent > 0, $sformatf("frames received %0d of %0d", n_ok, n_sent));
    check(n_err == 0, "no receive errors");
    for (int f = 0; f < NF; f++) check(seen_idx[f], $sformatf("frame index %0d used", f));
    for (int q = 0; q < NQ; q++) begin
      check(res_valid[q] == mvalid[q] && (!mvalid[q] || res_state[q] == mstate[q]), $sformatf("register q%0d", q));
      if (mvalid[q]) begin
        ff_req = 1'b1; ff_req_id = 7'(q);
        @(negedge clk); ff_req = 1'b0;
        check(ff_resp_valid && ff_resp_state == mstate[q], $sformatf("request q%0d", q));
      end
    end
    $display("frames %0d over 4 frame indices, 80 qubits", n_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
