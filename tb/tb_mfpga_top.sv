// tb_mfpga_top: three boards, each one mfpga_top at its default parameters
// (four lanes, one 21-qubit frame, 16-cycle frame gap, 64-bit time), run end
// to end the way the bench setup of the design is used.
//
// Clocking: one 500 MHz control clock for all boards (the distributed,
// zero-delay reference); each board's lanes run on that board's own
// 161.13 MHz user clock, the three differing by about 320 ppm. The
// boards leave reset at different times, so their counters start apart.
//
// Synchronization: copper GPIO ring 0 -> 1 -> 2 -> 0 (primary port to the
// next board's secondary port, 6 cycles each way). The bench plays the job
// server: minimal-PTP exchange 0->1, correction of board 1, exchange 1->2,
// correction of board 2, then the closing exchange 2->0 must measure zero
// and all counters must agree, also 20 000 cycles later.
//
// Data: a star of Aurora links (behavioural model) from board 0 lane 0 to
// board 1 lane 0 and from board 0 lane 1 to board 2 lane 0, each duplex.
// The mid-circuit-measurement program: all boards start on one broadcast
// timestamp; board 0 measures q0 and q1 (1 us readout + 150 ns
// demodulation); board 1 plays a 20 ns start pulse, holds until 1600 ns
// after start, asks its feed-forward FSM for c0 and c1, and plays 0..3
// conditional pulses (00: none, 01: one, 10: two, 11: three). All four
// outcomes are run; the results must already be there at the request. A
// fifth shot asks too early and must wait. Then a corrupted frame, a double
// readout of one qubit and a burst of traffic exercise CRC drop, the held
// path, TX stalls and clock compensation. Every mechanism is counted and a
// failure is counted for any that never occurred.
module tb_mfpga_top;
  import mfc_pkg::*;
  localparam int NB = 3, NL = 4, NQ = 21, GD = 6;
  localparam int READOUT_CYC = 500;   // 1 us readout pulse
  localparam int DEMOD_CYC   = 75;    // 150 ns demodulation
  localparam int HOLD_CYC    = 800;   // 1 us readout + 600 ns hold, from start

  logic clk = 1'b0;
  logic [NB-1:0] uclk = '0;
  logic [NB-1:0] rst = '1, adj_valid = '0, pri_tx_start = '0, pri_clear = '0, sec_clear = '0;
  logic [NB-1:0] start_arm = '0;
  logic [63:0]   adj_value [NB];
  logic [63:0]   start_time = '0;
  logic [63:0]   now [NB], t1 [NB], t4 [NB], t2 [NB], t3 [NB];
  logic [NB-1:0] pri_in, pri_out, sec_in, sec_out, t1v, t4v, t2v, t3v, pbusy, sbusy;
  logic [NB-1:0] start, start_armed, start_late;
  logic [NL-1:0] user_rst [NB], channel_up [NB], clear [NB], ff_req [NB];
  logic [NL-1:0][NQ-1:0] meas_valid [NB];
  qstate_t [NL-1:0][NQ-1:0] meas_state [NB];
  logic [NL-1:0][4:0] ff_req_id [NB];
  logic [NL-1:0] ff_resp_valid [NB], ff_waiting [NB];
  qstate_t [NL-1:0] ff_resp_state [NB];
  logic [NL-1:0][NQ-1:0] res_valid [NB];
  qstate_t [NL-1:0][NQ-1:0] res_state [NB];
  logic [NL-1:0] tx_tvalid [NB], tx_tlast [NB], tx_tready [NB], rx_tvalid [NB], rx_tlast [NB];
  logic [NL-1:0] crc_valid [NB], crc_pf [NB];
  frame_t [NL-1:0] tx_tdata [NB], rx_tdata [NB];
  logic [NL-1:0][7:0] tx_tkeep [NB];
  logic [NL-1:0] ro_held [NB], ro_dropped [NB], ro_frame [NB], tx_sent [NB], tx_stall [NB];
  logic [NL-1:0] rx_ok [NB], rx_crc [NB], rx_fmt [NB], rx_ovf [NB];

  always #1 clk = ~clk;
  // each board's transceiver clocks come from its own free-running synthesizer:
  // nominal 161.13 MHz, boards 1 and 2 about 320 ppm slow and fast
  initial begin #0.37; forever #3.103 uclk[0] = ~uclk[0]; end
  initial begin #1.91; forever #3.104 uclk[1] = ~uclk[1]; end
  initial begin #2.53; forever #3.102 uclk[2] = ~uclk[2]; end

  for (genvar b = 0; b < NB; b++) begin : g_board
    mfpga_top u_board (
      .clk, .rst(rst[b]),
      .adj_valid(adj_valid[b]), .adj_value(adj_value[b]), .now(now[b]),
      .pri_tx_start(pri_tx_start[b]), .pri_clear(pri_clear[b]), .pri_gpio_in(pri_in[b]), .pri_gpio_out(pri_out[b]),
      .pri_t1(t1[b]), .pri_t4(t4[b]), .pri_t1_valid(t1v[b]), .pri_t4_valid(t4v[b]), .pri_busy(pbusy[b]),
      .sec_clear(sec_clear[b]), .sec_gpio_in(sec_in[b]), .sec_gpio_out(sec_out[b]),
      .sec_t2(t2[b]), .sec_t3(t3[b]), .sec_t2_valid(t2v[b]), .sec_t3_valid(t3v[b]), .sec_busy(sbusy[b]),
      .start_arm(start_arm[b]), .start_time, .start(start[b]), .start_armed(start_armed[b]), .start_late(start_late[b]),
      .user_clk({NL{uclk[b]}}), .user_rst(user_rst[b]), .channel_up(channel_up[b]), .clear(clear[b]),
      .meas_valid(meas_valid[b]), .meas_state(meas_state[b]),
      .ff_req(ff_req[b]), .ff_req_id(ff_req_id[b]), .ff_resp_valid(ff_resp_valid[b]),
      .ff_resp_state(ff_resp_state[b]), .ff_waiting(ff_waiting[b]),
      .res_valid(res_valid[b]), .res_state(res_state[b]),
      .tx_tvalid(tx_tvalid[b]), .tx_tdata(tx_tdata[b]), .tx_tlast(tx_tlast[b]), .tx_tkeep(tx_tkeep[b]),
      .tx_tready(tx_tready[b]),
      .rx_tvalid(rx_tvalid[b]), .rx_tdata(rx_tdata[b]), .rx_tlast(rx_tlast[b]),
      .crc_valid(crc_valid[b]), .crc_pass_fail_n(crc_pf[b]),
      .ro_held(ro_held[b]), .ro_dropped(ro_dropped[b]), .ro_frame(ro_frame[b]), .tx_sent(tx_sent[b]),
      .tx_stall(tx_stall[b]), .rx_frame_ok(rx_ok[b]), .rx_crc_err(rx_crc[b]), .rx_fmt_err(rx_fmt[b]),
      .rx_ovf_err(rx_ovf[b]));

    // GPIO ring: this board's primary port <-> next board's secondary port
    logic [GD-1:0] fwd = '0, back = '0;
    always @(posedge clk) begin
      fwd  <= {fwd[GD-2:0],  pri_out[b]};
      back <= {back[GD-2:0], sec_out[(b + 1) % NB]};
    end
    assign sec_in[(b + 1) % NB] = fwd[GD-1];
    assign pri_in[b]            = back[GD-1];
  end

  // ---- Aurora links of the star: link k goes from (sb,sl) to (db,dl) ----
  localparam int NK = 4;
  localparam int SB [NK] = '{0, 1, 0, 2};
  localparam int SL [NK] = '{0, 0, 1, 0};
  localparam int DB [NK] = '{1, 0, 2, 0};
  localparam int DL [NK] = '{0, 0, 0, 1};
  logic [NK-1:0] k_up, k_ready, k_valid, k_last, k_crcv, k_crcpf, k_corrupt = '0;
  frame_t [NK-1:0] k_data;
  int unsigned k_pauses [NK], k_cc [NK];
  logic link_rst = 1'b1;

  for (genvar k = 0; k < NK; k++) begin : g_link
    aurora_model u_link (.user_clk(uclk[SB[k]]), .rx_clk(uclk[DB[k]]), .rst(link_rst), .channel_up(k_up[k]),
      .s_tvalid(tx_tvalid[SB[k]][SL[k]]), .s_tdata(tx_tdata[SB[k]][SL[k]]), .s_tlast(tx_tlast[SB[k]][SL[k]]),
      .s_tready(k_ready[k]), .corrupt(k_corrupt[k]),
      .m_tvalid(k_valid[k]), .m_tdata(k_data[k]), .m_tlast(k_last[k]),
      .crc_valid(k_crcv[k]), .crc_pass_fail_n(k_crcpf[k]),
      .pauses(k_pauses[k]), .cc_cycles(k_cc[k]));
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      channel_up[b] = '0; tx_tready[b] = '0; rx_tvalid[b] = '0; rx_tdata[b] = '0;
      rx_tlast[b] = '0; crc_valid[b] = '0; crc_pf[b] = '1;
    end
    for (int k = 0; k < NK; k++) begin
      channel_up[SB[k]][SL[k]] = k_up[k];
      tx_tready[SB[k]][SL[k]]  = k_ready[k];
      rx_tvalid[DB[k]][DL[k]]  = k_valid[k];
      rx_tdata[DB[k]][DL[k]]   = k_data[k];
      rx_tlast[DB[k]][DL[k]]   = k_last[k];
      crc_valid[DB[k]][DL[k]]  = k_crcv[k];
      crc_pf[DB[k]][DL[k]]     = k_crcpf[k];
    end
  end

  // ---- bookkeeping ----
  int checks = 0, failures = 0;
  int n_ptp = 0, n_corr = 0, n_closure = 0, n_start = 0, start_skew = 0;
  int n_frames = 0, n_stall = 0, n_held = 0, n_crc = 0, n_ff_imm = 0, n_ff_wait = 0, n_ovf = 0, n_fmt = 0;
  int n_pulses_ok = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst == '0) begin
    if (start != '0) begin
      n_start++;
      if (start != '1) start_skew++;
    end
    for (int b = 0; b < NB; b++) begin
      n_frames += $countones(ro_frame[b]);
      n_held   += $countones(ro_held[b]);
    end
  end
  for (genvar b = 0; b < NB; b++) begin : g_count
    always @(posedge uclk[b]) if (!link_rst) begin
      n_stall += $countones(tx_stall[b]);
      n_crc   += $countones(rx_crc[b]);
      n_ovf   += $countones(rx_ovf[b]);
      n_fmt   += $countones(rx_fmt[b]);
    end
  end

  // host: one minimal-PTP exchange from board b's primary port
  task automatic ptp(input int b, output longint signed off);
    int n = (b + 1) % NB;
    pri_clear[b] = 1'b1; sec_clear[n] = 1'b1; @(negedge clk);
    pri_clear[b] = 1'b0; sec_clear[n] = 1'b0;
    pri_tx_start[b] = 1'b1; @(negedge clk); pri_tx_start[b] = 1'b0;
    repeat (100) @(negedge clk);
    check(t1v[b] && t4v[b] && t2v[n] && t3v[n], $sformatf("PTP %0d->%0d timestamps", b, n));
    off = ((longint'(t2[n]) - longint'(t1[b])) - (longint'(t4[b]) - longint'(t3[n]))) / 2;
    n_ptp++;
  endtask

  // processor request on board b, lane l
  task automatic ask(input int b, input int l, input int q, output qstate_t s, output int wait_cyc);
    ff_req[b][l] = 1'b1; ff_req_id[b][l] = 5'(q);
    @(negedge clk); ff_req[b][l] = 1'b0;
    wait_cyc = 0;
    while (!ff_resp_valid[b][l] && wait_cyc < 2000) begin @(negedge clk); wait_cyc++; end
    s = ff_resp_state[b][l];
    if (wait_cyc == 0) n_ff_imm++; else n_ff_wait++;
  endtask

  // one shot of the mid-circuit measurement program
  task automatic shot(input bit c0, input bit c1, input int hold);
    qstate_t r0, r1;
    int w0, w1, exp_pulses, pulses, t_start, t_cond;
    for (int b = 0; b < NB; b++) clear[b] = '1;
    @(negedge clk);
    for (int b = 0; b < NB; b++) clear[b] = '0;
    start_time = now[0] + 64'd100;
    start_arm = '1; @(negedge clk); start_arm = '0;
    while (!start[1]) @(negedge clk);
    t_start = 0;
    fork
      begin // board 0: readout, then results to both lanes
        repeat (READOUT_CYC + DEMOD_CYC - 1) @(negedge clk);
        meas_valid[0][0][0] = 1'b1; meas_state[0][0][0] = {1'b0, c0};
        meas_valid[0][0][1] = 1'b1; meas_state[0][0][1] = {1'b0, c1};
        meas_valid[0][1] = meas_valid[0][0]; meas_state[0][1] = meas_state[0][0];
        @(negedge clk);
        meas_valid[0] = '0;
      end
      begin // board 1: start pulse, hold, feed-forward
        repeat (hold - 1) @(negedge clk);
        t_cond = hold;
        ask(1, 0, 0, r0, w0);
        ask(1, 0, 1, r1, w1);
        exp_pulses = c0 ? (c1 ? 3 : 2) : (c1 ? 1 : 0);
        pulses     = r0[0] ? (r1[0] ? 3 : 2) : (r1[0] ? 1 : 0);
        check(r0 == {1'b0, c0} && r1 == {1'b0, c1}, $sformatf("shot %0d%0d: results received", c0, c1));
        check(pulses == exp_pulses, $sformatf("shot %0d%0d: %0d conditional pulses", c0, c1, pulses));
        if (pulses == exp_pulses) n_pulses_ok++;
        if (hold == HOLD_CYC) begin
          check(w0 == 0 && w1 == 0, "results present when the 600 ns hold ends");
          check(2 * t_cond == 1600, "conditional pulses start 1600 ns after the start pulse");
        end else begin
          check(w0 > 0, "early request waits for its result");
        end
      end
    join
    repeat (50) @(negedge clk);
    check(res_valid[2][0][0] && res_valid[2][0][1] &&
          res_state[2][0][0] == {1'b0, c0} && res_state[2][0][1] == {1'b0, c1},
          "board 2 received the broadcast too");
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint signed off;
    int lag1 = 137, lag2 = 59;
    for (int b = 0; b < NB; b++) begin
      adj_value[b] = '0; user_rst[b] = '1; clear[b] = '0; ff_req[b] = '0; ff_req_id[b] = '0;
      meas_valid[b] = '0; meas_state[b] = '0;
    end
    repeat (5) @(negedge clk);
    rst[0] = 1'b0;
    repeat (lag2) @(negedge clk);
    rst[2] = 1'b0;
    repeat (lag1 - lag2) @(negedge clk);
    rst[1] = 1'b0;
    link_rst = 1'b0;
    for (int b = 0; b < NB; b++) user_rst[b] = '0;
    check(now[0] != now[1] && now[0] != now[2] && now[1] != now[2], "boards start unsynchronized");
    // -- ring synchronization
    for (int b = 0; b < NB - 1; b++) begin
      ptp(b, off);
      $display("PTP %0d->%0d: offset %0d cycles", b, b + 1, off);
      check(off != 0, "an offset to correct");
      adj_value[b + 1] = 64'(-off); adj_valid[b + 1] = 1'b1; @(negedge clk); adj_valid[b + 1] = 1'b0;
      n_corr++;
    end
    check(now[0] == now[1] && now[1] == now[2], "all counters agree after the ring setup");
    ptp(NB - 1, off);
    check(off == 0, $sformatf("ring closure measures %0d, expected 0", off));
    if (off == 0) n_closure++;
    repeat (20000) @(negedge clk);
    check(now[0] == now[1] && now[1] == now[2], "counters still agree 20000 cycles later");
    // -- links up
    while (k_up != '1) @(negedge clk);
    // -- the four outcomes, then one early request
    shot(0, 0, HOLD_CYC);
    shot(0, 1, HOLD_CYC);
    shot(1, 0, HOLD_CYC);
    shot(1, 1, HOLD_CYC);
    shot(1, 0, READOUT_CYC + 20);
    // -- corrupted frame on link 0 is dropped
    clear[1] = '1; @(negedge clk); clear[1] = '0;
    @(negedge uclk[0]) k_corrupt[0] = 1'b1;
    @(negedge clk);
    meas_valid[0][0][5] = 1'b1; meas_state[0][0][5] = 2'd3;
    @(negedge clk); meas_valid[0] = '0;
    wait (n_crc == 1);
    @(negedge uclk[0]) k_corrupt[0] = 1'b0;
    repeat (100) @(negedge clk);
    check(!res_valid[1][0][5], "corrupted result not stored");
    // -- two readouts of one qubit close together: neither is lost
    meas_valid[0][0][7] = 1'b1; meas_state[0][0][7] = 2'd1;
    @(negedge clk); meas_state[0][0][7] = 2'd2;
    @(negedge clk); meas_valid[0] = '0;
    repeat (200) @(negedge clk);
    check(res_valid[1][0][7] && res_state[1][0][7] == 2'd2, "second readout of q7 delivered last");
    // -- traffic burst on link 0 and link 2
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        meas_valid[0][0][q] = ($urandom_range(0, 99) == 0);
        meas_state[0][0][q] = qstate_t'($urandom_range(0, 3));
      end
      meas_valid[0][1] = meas_valid[0][0]; meas_state[0][1] = meas_state[0][0];
    end
    meas_valid[0] = '0;
    repeat (500) @(negedge clk);
    check(res_state[1][0] == res_state[2][0] && res_valid[1][0] == res_valid[2][0],
          "boards 1 and 2 hold the same broadcast results");
    // -- mechanisms
    $display("PTP exchanges %0d, corrections %0d, ring closures at zero %0d, starts %0d",
             n_ptp, n_corr, n_closure, n_start);
    $display("frames %0d, TX stalls %0d, pauses %0d, clock-comp cycles %0d, held %0d, CRC drops %0d",
             n_frames, n_stall, k_pauses[0], k_cc[0], n_held, n_crc);
    $display("feed-forward answers: immediate %0d, after waiting %0d; correct pulse counts %0d",
             n_ff_imm, n_ff_wait, n_pulses_ok);
    check(n_ptp == 3 && n_corr == 2 && n_closure == 1, "ring synchronization ran");
    check(n_start == 5 && start_skew == 0, "five synchronized starts, all boards in one cycle");
    check(n_frames > 0, "frames sent");
    check(n_stall > 0, "TX stall on Aurora pause or clock compensation");
    check(k_cc[0] > 0, "clock compensation occurred");
    check(n_held > 0, "result held behind an unsent one");
    check(n_crc == 1, "CRC drop occurred once");
    check(n_ff_imm > 0 && n_ff_wait > 0, "feed-forward answered at once and after waiting");
    check(n_pulses_ok == 5, "all shots produced the expected pulse count");
    check(n_ovf == 0 && n_fmt == 0, "no receive overflow or format error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
