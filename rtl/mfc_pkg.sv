// mfc_pkg: types and constants shared by the multi-board synchronization and
// data-communication logic.
//
// A readout frame is one 64-bit word. Each qubit occupies a 3-bit field
// {valid, state[1:0]}: a 2-bit measured state (up to four levels, so qubits,
// qutrits and ququarts fit) and a valid bit meaning "this field carries a new
// result". With a single frame 21 qubits fit (63 bits) and bit 63 is spare;
// the frame size, the 2-bit state and the valid bit follow the paper. When
// more than one frame is configured, the top clog2(NUM_FRAMES) bits carry the
// frame index; that index field and the bit layout are this design's choice.
package mfc_pkg;

  localparam int unsigned FRAME_W = 64;   // Aurora user data width
  localparam int unsigned STATE_W = 2;    // measured state per qubit
  localparam int unsigned FIELD_W = STATE_W + 1;
  localparam int unsigned KEEP_W  = FRAME_W / 8;

  typedef logic [FRAME_W-1:0] frame_t;
  typedef logic [STATE_W-1:0] qstate_t;

  typedef struct packed {
    logic    valid;
    qstate_t state;
  } qfield_t;

  // Bits used for the frame index.
  function automatic int unsigned frame_idx_bits(int unsigned num_frames);
    return (num_frames > 1) ? $clog2(num_frames) : 0;
  endfunction

  // Qubits carried by one frame: 21 for a single frame.
  function automatic int unsigned qubits_per_frame(int unsigned num_frames);
    return (FRAME_W - frame_idx_bits(num_frames)) / FIELD_W;
  endfunction

endpackage
