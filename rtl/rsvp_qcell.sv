// rsvp_qcell -- Q cell: one address bit of an RSVP word.
//
// The bit lives in a T flip-flop. The word's FMbus is a wired-AND line held
// high by a pull-up; each cell may pull it low through a three-state buffer.
// The buffer is enabled (pull_down = 1) when the cell is selected as a
// control bit (fm = 1), its stored bit is 0, and the word is not locked
// (lock_n = 1). The FMbus therefore stays high only when every selected
// control bit of the word is 1. A cell selected as destination (to = 1)
// toggles when the FMbus is high. This is the cell logic drawn for the Q cell
// (AND of FMbus and TO into the T input; FM, D-bar and LOCK-bar enabling the
// buffer that drives the bus to 0).
//
// Interface: fm/to are the cell's two control lines, shared by this cell
// position in every word. fmbus is the resolved bus level, formed in the word
// from the pull_down outputs of all its cells. load/load_val write the bit
// from the Data input and take priority over a toggle.
//
// Timing: the bus is resolved combinationally from the stored bits, and the
// toggle is taken at the next rising clock edge, so one controlled NOT
// completes in one clock cycle. The paper's cell toggles asynchronously as the
// signals cross the word; clocking the toggle is this design's choice and
// also removes the race a cell that is both control and target would have.
// Reset (asynchronous, active low) clears the bit; this is also a choice.
module rsvp_qcell (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  logic load_val,
  input  logic fm,
  input  logic to,
  input  logic lock_n,
  input  logic fmbus,
  output logic pull_down,
  output logic q
);

  always_comb pull_down = fm & ~q & lock_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            q <= 1'b0;
    else if (load)         q <= load_val;
    else if (to && fmbus)  q <= ~q;
  end

endmodule
