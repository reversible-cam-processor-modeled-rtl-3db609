// rsvp_word -- one word (address register) of the RSVP processor.
//
// A word is NBITS Q cells A(NBITS-1)..A0, a REF cell and a LOCK cell, all
// hanging on two horizontal lines: the FMbus and the Lockbus. The FMbus is
// a wired-AND with a pull-up: it is high unless some cell pulls it low, which
// a cell does when it is selected as a control (FM high) and holds 0. Every
// cell with TO high then toggles if the FMbus is high. One step of an address
// diagram, given by the FM and TO vectors from the control unit, is thus
// performed by every word in parallel: a NOT with any number of controls
// (REF selected alone gives an unconditional NOT) and any number of
// destinations. The Lockbus, raised by the LOCK cell (see rsvp_lock_cell),
// switches off the FMbus drivers of the other cells of a locked word.
//
// Interface: all per-cell vectors use the layout of rsvp_pkg
// ([NBITS-1:0] address bits, [NBITS] REF, [NBITS+1] LOCK). load writes the
// whole word from load_val (Data input). q is the stored word, fmbus the bus
// level (high = the current step matches in this word), lockbus the Lockbus.
// The TO line of the REF cell is not connected: REF is never a destination.
//
// Timing: fmbus and lockbus are combinational from the stored bits and the
// FM lines; the toggles take effect at the next rising clock edge, so a word
// completes one step per cycle. The FMbus is modelled as the NOR of the
// cells' pull-downs instead of as a three-state net.
module rsvp_word #(
  parameter int unsigned NBITS = rsvp_pkg::NBITS_DEFAULT,
  localparam int unsigned NC   = rsvp_pkg::ncells(NBITS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [NC-1:0] load_val,
  input  logic [NC-1:0] fm,
  input  logic [NC-1:0] to,
  output logic [NC-1:0] q,
  output logic          fmbus,
  output logic          lockbus
);

  localparam int unsigned REF  = rsvp_pkg::ref_idx(NBITS);
  localparam int unsigned LOCK = rsvp_pkg::lock_idx(NBITS);

  logic [NC-1:0] pull_down;

  // Wired-AND FMbus: the pull-up wins unless a driver pulls the line low.
  always_comb fmbus = ~|pull_down;

  for (genvar i = 0; i < NBITS; i++) begin : g_a
    rsvp_qcell u_cell (
      .clk       (clk),
      .rst_n     (rst_n),
      .load      (load),
      .load_val  (load_val[i]),
      .fm        (fm[i]),
      .to        (to[i]),
      .lock_n    (~lockbus),
      .fmbus     (fmbus),
      .pull_down (pull_down[i]),
      .q         (q[i])
    );
  end

  rsvp_ref_cell u_ref (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (load),
    .load_val  (load_val[REF]),
    .fm        (fm[REF]),
    .lock_n    (~lockbus),
    .pull_down (pull_down[REF]),
    .q         (q[REF])
  );

  rsvp_lock_cell u_lock (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (load),
    .load_val (load_val[LOCK]),
    .fm       (fm[LOCK]),
    .to       (to[LOCK]),
    .fmbus    (fmbus),
    .lockbus  (lockbus),
    .q        (q[LOCK])
  );

  always_comb pull_down[LOCK] = lockbus;

endmodule
