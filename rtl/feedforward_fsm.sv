// feedforward_fsm: keeps the measurement results received over one Aurora
// lane and hands them to the distributed processor for conditional
// (feed-forward) operations.
//
// Each frame read from the receive FIFO is merged into a result register:
// only fields whose valid bit is set update the stored state of their qubit,
// so results of other qubits, sent earlier in other frames, are kept. The
// processor asks for one qubit with req/req_id. If that qubit already has a
// result, resp_valid and resp_state follow one cycle later; otherwise the
// request waits (`waiting` high) until the result arrives and is answered one
// cycle after it is stored. clear (start of a new shot) forgets all stored
// results. Frame layout and index field as in mfc_pkg.
//
// From the paper: results are stored in a register and provided on the
// processor's request. This design's choice: the request/response handshake,
// waiting for a missing result, and clear.
module feedforward_fsm
  import mfc_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 1,
  localparam int unsigned QPF  = qubits_per_frame(NUM_FRAMES),
  localparam int unsigned NQ   = NUM_FRAMES * QPF,
  localparam int unsigned ID_W = $clog2(NQ)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                clear,
  // frames from the receive FIFO
  input  logic                in_valid,
  input  frame_t              in_data,
  // distributed processor
  input  logic                req,
  input  logic [ID_W-1:0]     req_id,
  output logic                resp_valid,
  output qstate_t             resp_state,
  output logic                waiting,
  // stored results, for observation
  output logic    [NQ-1:0]    res_valid,
  output qstate_t [NQ-1:0]    res_state
);

  localparam int unsigned IDX_W = frame_idx_bits(NUM_FRAMES);
  localparam int unsigned FI_W  = (NUM_FRAMES > 1) ? $clog2(NUM_FRAMES) : 1;

  typedef enum logic {FF_IDLE, FF_WAIT} ff_state_t;
  ff_state_t       state;
  logic [ID_W-1:0] id_q;

  logic [FI_W-1:0] in_frame;
  assign in_frame = (IDX_W > 0) ? in_data[FRAME_W-1 -: FI_W] : '0;

  // ---- result register ----
  always_ff @(posedge clk) begin
    if (rst) begin
      res_valid <= '0;
      res_state <= '0;
    end else begin
      if (clear) res_valid <= '0;
      if (in_valid) begin
        for (int unsigned q = 0; q < NQ; q++) begin
          automatic qfield_t fld = qfield_t'(in_data[(q % QPF)*FIELD_W +: FIELD_W]);
          if ((q / QPF) == int'(in_frame) && fld.valid) begin
            res_valid[q] <= 1'b1;
            res_state[q] <= fld.state;
          end
        end
      end
    end
  end

  // ---- processor requests ----
  assign waiting = (state == FF_WAIT);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= FF_IDLE;
      id_q       <= '0;
      resp_valid <= 1'b0;
      resp_state <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        FF_IDLE: if (req) begin
          id_q <= req_id;
          if (res_valid[req_id]) begin
            resp_valid <= 1'b1;
            resp_state <= res_state[req_id];
          end else begin
            state <= FF_WAIT;
          end
        end
        FF_WAIT: if (res_valid[id_q]) begin
          resp_valid <= 1'b1;
          resp_state <= res_state[id_q];
          state      <= FF_IDLE;
        end
        default: state <= FF_IDLE;
      endcase
    end
  end

  a_id_in_range: assert property (@(posedge clk) disable iff (rst)
    req |-> (int'(req_id) < NQ));

endmodule
