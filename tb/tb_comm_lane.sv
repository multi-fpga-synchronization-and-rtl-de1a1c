// tb_comm_lane: one lane looped back on itself through the Aurora model
// (gearbox pause every 32 user cycles, 8 clock-compensation cycles every
// 4992, 24-cycle link latency), with the 500 MHz control clock and the
// 161.13 MHz user clock unrelated in phase.
//  1. Single results: each strobe must reach the feed-forward register with
//     the right state; the strobe-to-stored latency is measured and bounded.
//  2. A frame corrupted on the link must be dropped by its CRC verdict.
//  3. Random traffic for ~40 us: every frame accepted by the link must be
//     received, the feed-forward register must equal the merge of all
//     frames sent, pauses, clock compensation, TX stalls and held results
//     must all occur; processor requests must return the stored states.
module tb_comm_lane;
  import mfc_pkg::*;
  localparam int NQ = 21;
  logic clk = 1'b0, rst = 1'b1, user_clk = 1'b0, user_rst = 1'b1;
  logic clear = 1'b0, ff_req = 1'b0, corrupt = 1'b0;
  logic [4:0] ff_req_id = '0;
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
  int checks = 0, failures = 0;
  int n_sent = 0, n_ok = 0, n_crc = 0, n_stall = 0, n_held = 0, n_ovf = 0, n_fmt = 0;
  bit      mvalid[NQ];
  qstate_t mstate[NQ];

  comm_lane dut (.*);
  aurora_model u_link (.user_clk, .rx_clk(user_clk), .rst(user_rst), .channel_up,
    .s_tvalid(tx_tvalid), .s_tdata(tx_tdata), .s_tlast(tx_tlast), .s_tready(tx_tready), .corrupt,
    .m_tvalid(rx_tvalid), .m_tdata(rx_tdata), .m_tlast(rx_tlast), .crc_valid, .crc_pass_fail_n,
    .pauses, .cc_cycles);

  always #1 clk = ~clk;
  initial begin #0.37; forever #3.103 user_clk = ~user_clk; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model of the receive register: merge of every frame the link accepted
  // without corruption
  always @(posedge user_clk) if (!user_rst) begin
    if (tx_sent) begin
      n_sent++;
      if (!corrupt)
        for (int i = 0; i < NQ; i++) begin
          automatic qfield_t f = qfield_t'(tx_tdata[i*FIELD_W +: FIELD_W]);
          if (f.valid) begin mvalid[i] = 1; mstate[i] = f.state; end
        end
    end
    if (tx_stall) n_stall++;
    if (rx_frame_ok) n_ok++;
    if (rx_crc_err) n_crc++;
    if (rx_ovf_err) n_ovf++;
    if (rx_fmt_err) n_fmt++;
  end
  always @(posedge clk) if (!rst && ro_held) n_held++;

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat, max_lat;
    for (int q = 0; q < NQ; q++) begin mvalid[q] = 0; mstate[q] = '0; end
    #30; rst = 1'b0; user_rst = 1'b0;
    wait (channel_up);
    repeat (10) @(negedge clk);
    // 1. single results and latency
    max_lat = 0;
    for (int k = 0; k < 8; k++) begin
      automatic int q = $urandom_range(0, NQ - 1);
      automatic qstate_t s = qstate_t'($urandom_range(0, 3));
      clear = 1'b1; @(negedge clk); clear = 1'b0;
      repeat (20) @(negedge clk);
      meas_valid[q] = 1'b1; meas_state[q] = s;
      @(negedge clk); meas_valid = '0;
      lat = 1;
      while (!res_valid[q] && lat < 1000) begin @(negedge clk); lat++; end
      check(res_valid[q] && res_state[q] == s, $sformatf("single result q%0d", q));
      if (lat > max_lat) max_lat = lat;
    end
    $display("worst strobe-to-register latency: %0d control cycles (%0d ns)", max_lat, 2 * max_lat);
    // about 31 user cycles (FIFO synchronizers, short FIFO, TX FSM, 24-cycle link,
    // CRC verdict) plus a few control cycles, and possibly one pause cycle
    check(max_lat < 120, "latency under 240 ns with a 24-cycle link");
    // 2. corrupted frame
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int q = 0; q < NQ; q++) mvalid[q] = 0;
    repeat (20) @(negedge clk);
    @(negedge user_clk) corrupt = 1'b1;
    @(negedge clk);
    meas_valid[3] = 1'b1; meas_state[3] = 2'd2;
    @(negedge clk); meas_valid = '0;
    wait (n_crc == 1);
    @(negedge user_clk) corrupt = 1'b0;
    repeat (50) @(negedge clk);
    check(!res_valid[3], "corrupted frame not stored");
    // 3. random traffic
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        meas_valid[q] = ($urandom_range(0, 199) == 0);
        meas_state[q] = qstate_t'($urandom_range(0, 3));
      end
    end
    meas_valid = '0;
    repeat (500) @(negedge clk);
    check(n_ok == n_sent - 1, $sformatf("frames received %0d of %0d good", n_ok, n_sent - 1));
    check(n_crc == 1 && n_ovf == 0 && n_fmt == 0, "one CRC error, no overflow or format error");
    for (int q = 0; q < NQ; q++) begin
      check(res_valid[q] == mvalid[q] && (!mvalid[q] || res_state[q] == mstate[q]), $sformatf("register q%0d", q));
      if (mvalid[q]) begin
        ff_req = 1'b1; ff_req_id = 5'(q);
        @(negedge clk); ff_req = 1'b0;
        check(ff_resp_valid && ff_resp_state == mstate[q], $sformatf("request q%0d", q));
      end
    end
    $display("frames %0d, tx stalls %0d, pauses %0d, cc cycles %0d, held %0d",
             n_sent, n_stall, pauses, cc_cycles, n_held);
    check(n_stall > 0, "TX stalled on pause or clock compensation");
    check(cc_cycles >= 8, "clock compensation happened");
    check(n_held > 0, "a result was held behind an unsent one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
