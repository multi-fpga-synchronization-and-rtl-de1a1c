// rx_fsm: takes frames from the Aurora 64B/66B framing RX port and writes
// the good ones into the receive-side clock-crossing FIFO.
//
// Aurora's RX AXI4-Stream has no back-pressure, and with the 32-bit CRC
// enabled the core reports a verdict (crc_valid, crc_pass_fail_n) for each
// frame, either with its last beat or a few cycles after it. The FSM keeps
// the received word in RX_WAIT_CRC until the verdict arrives; a passing frame
// is written, a failing one is dropped and reported on crc_err. Frames are
// single 64-bit beats; a beat without tlast is dropped and reported on
// fmt_err, as is a frame whose verdict never came before the next one. A
// good frame that meets a full FIFO is dropped and reported on ovf_err.
// With USE_CRC = 0 every tlast beat is written directly. The block is only
// named by the paper; the CRC handling follows its statement that a 32-bit
// CRC detects user-data errors, the rest is this design's choice.
//
// Timing: the FIFO write is combinational in the cycle of the verdict.
module rx_fsm
  import mfc_pkg::*;
#(
  parameter bit USE_CRC = 1'b1
) (
  input  logic   clk,
  input  logic   rst,
  // Aurora AXI4-Stream RX and CRC status
  input  logic   rx_tvalid,
  input  frame_t rx_tdata,
  input  logic   rx_tlast,
  input  logic   crc_valid,
  input  logic   crc_pass_fail_n,
  // receive FIFO write side
  output logic   fifo_wr_en,
  output frame_t fifo_wdata,
  input  logic   fifo_full,
  // status pulses
  output logic   frame_ok,
  output logic   crc_err,
  output logic   fmt_err,
  output logic   ovf_err
);

  typedef enum logic {RX_IDLE, RX_WAIT_CRC} rx_state_t;
  rx_state_t state, state_n;
  frame_t    held_q, held_n;

  logic   decide, pass;
  frame_t decide_data;

  always_comb begin
    state_n     = state;
    held_n      = held_q;
    decide      = 1'b0;
    decide_data = rx_tdata;
    pass        = 1'b1;
    fmt_err     = 1'b0;
    if (!USE_CRC) begin
      if (rx_tvalid) begin
        if (rx_tlast) decide = 1'b1;
        else          fmt_err = 1'b1;
      end
    end else begin
      // verdict for the frame already waiting
      if (state == RX_WAIT_CRC && crc_valid) begin
        decide      = 1'b1;
        decide_data = held_q;
        pass        = crc_pass_fail_n;
        state_n     = RX_IDLE;
      end else if (state == RX_WAIT_CRC && rx_tvalid) begin
        fmt_err     = 1'b1;          // previous frame never got its verdict
      end
      // new beat
      if (rx_tvalid) begin
        if (!rx_tlast) begin
          fmt_err = 1'b1;
        end else if (crc_valid && state == RX_IDLE) begin
          decide      = 1'b1;
          decide_data = rx_tdata;
          pass        = crc_pass_fail_n;
        end else begin
          held_n  = rx_tdata;
          state_n = RX_WAIT_CRC;
        end
      end
    end
  end

  assign fifo_wr_en = decide && pass && !fifo_full;
  assign fifo_wdata = decide_data;
  assign frame_ok   = fifo_wr_en;
  assign crc_err    = decide && !pass;
  assign ovf_err    = decide && pass && fifo_full;

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= RX_IDLE;
      held_q <= '0;
    end else begin
      state  <= state_n;
      held_q <= held_n;
    end
  end

endmodule
