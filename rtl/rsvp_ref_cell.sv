// rsvp_ref_cell -- REF cell of an RSVP word.
//
// The REF cell supplies an unconditional true on the FMbus, so that an
// unconditional NOT (UCN) can be run as a controlled NOT whose only control
// is the REF cell: the control unit raises FM on REF and TO on every bit to
// be complemented. Any number of UCNs fit in one step.
//
// The cell stores one bit, written from the Data input like any other cell,
// and is reset to 1. It drives the FMbus like a Q cell (pull low when
// selected, bit 0 and word not locked), so a REF cell loaded with 0 would
// block UCNs in its word. It has no TO line in use: it is never a
// destination, so it has no toggle. Having a stored, loadable bit rather
// than a hard-wired 1 is this design's choice; the architecture only states
// the cell's purpose.
//
// Timing: pull_down is combinational from the stored bit; the bit changes
// only on load, at a rising clock edge.
module rsvp_ref_cell (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  logic load_val,
  input  logic fm,
  input  logic lock_n,
  output logic pull_down,
  output logic q
);

  always_comb pull_down = fm & ~q & lock_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= 1'b1;
    else if (load)  q <= load_val;
  end

endmodule
