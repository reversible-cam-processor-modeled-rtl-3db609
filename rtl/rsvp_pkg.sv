// rsvp_pkg -- constants and types shared by the RSVP (Reversible State
// Vector Parallel) processor.
//
// A word of the processor holds NBITS address cells A0..A(NBITS-1)
// (NBITS is n+1 in the usual notation), then a REF cell and a LOCK cell.
// Every per-cell vector in the design (FM lines, TO lines, load values,
// stored bits) uses the same layout:
//   [NBITS-1:0]  address cells A(NBITS-1)..A0, A0 being the flag bit f
//   [NBITS]      REF cell
//   [NBITS+1]    LOCK cell
// The defaults (three address bits Num1, Num0, f and four words) are the
// sizes of the worked examples that accompany the architecture; a real part
// would use many more words and bits. The program depth and the width of a
// state value register are this design's own choices.
package rsvp_pkg;

  localparam int unsigned NBITS_DEFAULT  = 3;   // Num1, Num0, f
  localparam int unsigned NWORDS_DEFAULT = 4;   // 2^2 states of two qubits
  localparam int unsigned DEPTH_DEFAULT  = 16;  // steps in the address diagram store
  localparam int unsigned DATA_W_DEFAULT = 8;   // width of a state value register

  localparam int unsigned FLAG_IDX = 0;         // A0 serves as the flag bit

  // Index of the REF and LOCK cells and the number of cells in a word.
  function automatic int unsigned ref_idx(input int unsigned nbits);
    return nbits;
  endfunction

  function automatic int unsigned lock_idx(input int unsigned nbits);
    return nbits + 1;
  endfunction

  function automatic int unsigned ncells(input int unsigned nbits);
    return nbits + 2;
  endfunction

  // Sequencer of the control unit.
  typedef enum logic {
    CU_IDLE = 1'b0,
    CU_RUN  = 1'b1
  } cu_state_e;

  // Flag locator.
  typedef enum logic [1:0] {
    FL_IDLE  = 2'd0,
    FL_SHIFT = 2'd1,
    FL_HOLD  = 2'd2
  } fl_state_e;

endpackage
