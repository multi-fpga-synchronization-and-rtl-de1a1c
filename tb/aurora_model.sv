// aurora_model: behavioural model of one direction of a single-lane Aurora
// 64B/66B link (TX user interface of one core, fibre, RX user interface of
// the core at the other end), for simulation only; it is not synthesizable
// logic and does not model 64B/66B coding, the transceivers or the CRC
// arithmetic.
//
// What it reproduces is what the user logic sees:
//   * channel_up rises UP_DELAY TX-side cycles after reset;
//   * s_tready drops for one cycle after every PAUSE_PERIOD cycles (the
//     gearbox pause) and for CC_LEN cycles every CC_PERIOD cycles (clock
//     compensation);
//   * each accepted beat appears on the RX side LATENCY TX-clock periods
//     later, re-timed to the receiving board's user clock (rx_clk), which may
//     run at a slightly different frequency, as on boards whose transceiver
//     reference clocks come from separate synthesizers;
//   * a frame's CRC verdict (crc_valid, crc_pass_fail_n) follows its tlast
//     beat by one rx_clk cycle; corrupt = 1 while a beat is accepted makes its
//     frame's verdict a failure.
module aurora_model #(
  parameter int unsigned PAUSE_PERIOD = 32,
  parameter int unsigned CC_PERIOD    = 4992,
  parameter int unsigned CC_LEN       = 8,
  parameter int unsigned LATENCY      = 24,
  parameter int unsigned UP_DELAY     = 20
) (
  input  logic        user_clk,
  input  logic        rx_clk,
  input  logic        rst,
  output logic        channel_up,
  input  logic        s_tvalid,
  input  logic [63:0] s_tdata,
  input  logic        s_tlast,
  output logic        s_tready,
  input  logic        corrupt,
  output logic        m_tvalid,
  output logic [63:0] m_tdata,
  output logic        m_tlast,
  output logic        crc_valid,
  output logic        crc_pass_fail_n,
  output int unsigned pauses,
  output int unsigned cc_cycles
);

  typedef struct {
    logic [63:0] data;
    logic        last;
    logic        bad;
    realtime     due;
  } beat_t;

  beat_t       flight[$];
  int unsigned cyc, up_cnt;
  logic        pause, cc;
  realtime     t_prev, period;

  assign pause    = (cyc % PAUSE_PERIOD) == PAUSE_PERIOD - 1;
  assign cc       = (cyc % CC_PERIOD) >= CC_PERIOD - CC_LEN;
  assign s_tready = channel_up && !pause && !cc;

  // TX side
  always @(posedge user_clk) begin
    period = $realtime - t_prev;
    t_prev = $realtime;
    if (rst) begin
      cyc <= 0; up_cnt <= 0; channel_up <= 1'b0;
      pauses <= 0; cc_cycles <= 0;
      flight.delete();
    end else begin
      cyc <= cyc + 1;
      if (up_cnt < UP_DELAY) up_cnt <= up_cnt + 1;
      channel_up <= (up_cnt >= UP_DELAY);
      if (channel_up && pause) pauses <= pauses + 1;
      if (channel_up && cc)    cc_cycles <= cc_cycles + 1;
      if (s_tvalid && s_tready)
        flight.push_back('{data: s_tdata, last: s_tlast, bad: corrupt,
                           due: $realtime + LATENCY * period});
    end
  end

  // RX side
  logic acc_bad, prev_last;
  always @(posedge rx_clk) begin
    if (rst) begin
      m_tvalid <= 1'b0; m_tdata <= '0; m_tlast <= 1'b0;
      crc_valid <= 1'b0; crc_pass_fail_n <= 1'b1;
      acc_bad <= 1'b0; prev_last <= 1'b1;
    end else begin
      // verdict for the frame whose last beat was presented last cycle
      crc_valid <= m_tvalid && m_tlast;
      if (m_tvalid && m_tlast) crc_pass_fail_n <= !acc_bad;
      m_tvalid <= 1'b0;
      if (flight.size() > 0 && flight[0].due <= $realtime) begin
        automatic beat_t b = flight.pop_front();
        m_tvalid  <= 1'b1;
        m_tdata   <= b.data;
        m_tlast   <= b.last;
        acc_bad   <= (prev_last ? 1'b0 : acc_bad) || b.bad;
        prev_last <= b.last;
      end
    end
  end

endmodule
