// readout_fsm: collects measurement results from the control system's
// readout chain and broadcasts them over one Aurora lane.
//
// Qubits finish their readout at different times, so results are tracked per
// qubit and never overwritten before they have been sent:
//   * pend[q]  holds the result waiting to be sent,
//   * park[q]  holds a second result that arrived while pend[q] was still
//     unsent (reported on `held`); it moves into pend[q] when the frame that
//     carried pend[q] leaves. A third result for the same unsent qubit is
//     dropped and reported on `dropped`.
// When any qubit of a frame has a pending result, the FSM writes one 64-bit
// frame into the transmit FIFO: every field of the frame carries
// {valid, state}, valid set only for results that are new. After each frame
// it waits GAP_CYCLES control-clock cycles before the next (16 cycles = 32 ns
// at 500 MHz), which paces the traffic to what the Aurora link accepts.
// With NUM_FRAMES > 1 the qubits are split into frames of
// (64 - clog2(NUM_FRAMES)) / 3 qubits, the frame index rides in the top bits,
// and frames with pending results are served round-robin. clear (start of a
// new shot) forgets everything not yet sent.
//
// From the paper: 64-bit frame of 2-bit results with valid bits, 21 qubits,
// one frame at a time, 32 ns between frames, both customizable, results not
// overwritten. This design's choice: the bit layout, the pend/park scheme,
// the frame index field and round-robin order.
//
// Timing: a result strobed in cycle n can be written as a frame in cycle n+1
// (frame_valid is combinational from registered state and frame_ready);
// frames are at least GAP_CYCLES cycles apart.
module readout_fsm
  import mfc_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 1,
  parameter int unsigned GAP_CYCLES = 16,
  localparam int unsigned QPF = qubits_per_frame(NUM_FRAMES),
  localparam int unsigned NQ  = NUM_FRAMES * QPF
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 clear,
  input  logic    [NQ-1:0]     meas_valid,
  input  qstate_t [NQ-1:0]     meas_state,
  output logic                 frame_valid,
  output frame_t               frame_data,
  input  logic                 frame_ready,
  output logic                 held,
  output logic                 dropped
);

  localparam int unsigned IDX_W = frame_idx_bits(NUM_FRAMES);
  localparam int unsigned FI_W  = (NUM_FRAMES > 1) ? $clog2(NUM_FRAMES) : 1;
  localparam int unsigned GC_W  = (GAP_CYCLES > 1) ? $clog2(GAP_CYCLES) : 1;

  typedef enum logic {RO_IDLE, RO_GAP} ro_state_t;
  ro_state_t state;
  logic [GC_W-1:0] gap_cnt;
  logic [FI_W-1:0] rr;           // frame examined first

  logic    [NQ-1:0] pend, park, pend_n, park_n;
  qstate_t [NQ-1:0] pend_st, park_st, pend_st_n, park_st_n;
  logic             held_n, dropped_n;

  // ---- pick the frame to send ----
  logic            sel_found;
  logic [FI_W-1:0] sel;
  always_comb begin
    sel_found = 1'b0;
    sel       = rr;
    for (int unsigned k = 0; k < NUM_FRAMES; k++) begin
      automatic int unsigned f = (int'(rr) + k) % NUM_FRAMES;
      if (!sel_found && (|pend[f*QPF +: QPF])) begin
        sel_found = 1'b1;
        sel       = FI_W'(f);
      end
    end
  end

  logic emit;
  assign emit        = (state == RO_IDLE) && sel_found && frame_ready && !clear;
  assign frame_valid = emit;

  always_comb begin
    frame_data = '0;
    for (int unsigned q = 0; q < QPF; q++) begin
      frame_data[q*FIELD_W +: FIELD_W] =
        {pend[int'(sel)*QPF + q], pend_st[int'(sel)*QPF + q]};
    end
    if (IDX_W > 0) frame_data[FRAME_W-1 -: FI_W] = sel;
  end

  // ---- per-qubit tracking ----
  always_comb begin
    pend_n    = pend;
    park_n    = park;
    pend_st_n = pend_st;
    park_st_n = park_st;
    held_n    = 1'b0;
    dropped_n = 1'b0;
    for (int unsigned q = 0; q < NQ; q++) begin
      if (emit && (q / QPF) == int'(sel)) begin
        pend_n[q]    = park[q];
        pend_st_n[q] = park_st[q];
        park_n[q]    = 1'b0;
      end
      if (meas_valid[q]) begin
        if (!pend_n[q]) begin
          pend_n[q]    = 1'b1;
          pend_st_n[q] = meas_state[q];
        end else if (!park_n[q]) begin
          park_n[q]    = 1'b1;
          park_st_n[q] = meas_state[q];
          held_n       = 1'b1;
        end else begin
          dropped_n    = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      pend    <= '0;
      park    <= '0;
      held    <= 1'b0;
      dropped <= 1'b0;
    end else begin
      pend    <= pend_n;
      park    <= park_n;
      held    <= held_n;
      dropped <= dropped_n;
    end
    pend_st <= pend_st_n;
    park_st <= park_st_n;
  end

  // ---- pacing ----
  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= RO_IDLE;
      gap_cnt <= '0;
      rr      <= '0;
    end else begin
      unique case (state)
        RO_IDLE: if (emit) begin
          rr <= (NUM_FRAMES > 1) ? FI_W'((int'(sel) + 1) % NUM_FRAMES) : '0;
          if (GAP_CYCLES > 1) begin
            state   <= RO_GAP;
            gap_cnt <= GC_W'(GAP_CYCLES - 1);
          end
        end
        RO_GAP: begin
          if (gap_cnt <= GC_W'(1)) state <= RO_IDLE;
          gap_cnt <= gap_cnt - 1'b1;
        end
        default: state <= RO_IDLE;
      endcase
    end
  end

  a_write_only_when_ready: assert property (@(posedge clk) disable iff (rst)
    frame_valid |-> frame_ready);

endmodule
