// rsvp_lock_cell -- LOCK cell of an RSVP word.
//
// The LOCK cell lets words that are known not to hold the sought information
// drop out of further bus activity, which saves power in a long sequence of
// address operations. It is a T flip-flop like a Q cell, so an address
// diagram can set or clear it (for example a DCN with the LOCK cell as
// destination marks the words where both controls are true).
//
// When the control unit raises FM on the LOCK cell, a word whose LOCK bit is
// 0 is locked out: the LOCK cell alone holds the FMbus low and raises the
// word's Lockbus, and the Lockbus (LOCK-bar at each other cell) turns off the
// bus drivers of all other cells. A locked word performs no toggle, exactly
// as if the LOCK bit were one more control bit, but only one driver of the
// word is active. Words whose LOCK bit is 1 run normally.
// That polarity, and the LOCK cell driving both buses, are this design's
// reading of the word structure (the LOCK cell sits on both the FMbus and the
// Lockbus); the architecture gives only the purpose of the cell.
//
// Interface: lockbus is both the LOCK signal to the word's other cells and
// this cell's pull-down on the FMbus.
//
// Timing: lockbus is combinational from the stored bit and
// FM; toggle and load happen at the rising clock edge, load first. Reset
// (asynchronous, active low) clears the bit.
module rsvp_lock_cell (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  logic load_val,
  input  logic fm,
  input  logic to,
  input  logic fmbus,
  output logic lockbus,
  output logic q
);

  // The Lockbus level is also this cell's pull-down on the FMbus.
  always_comb lockbus = fm & ~q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            q <= 1'b0;
    else if (load)         q <= load_val;
    else if (to && fmbus)  q <= ~q;
  end

endmodule
