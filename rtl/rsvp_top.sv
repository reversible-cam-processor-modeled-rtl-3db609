// rsvp_top -- Reversible State Vector Parallel (RSVP) processor.
//
// The processor holds a state vector the way a memory would: NWORDS words,
// each an address register of NBITS bits (plus a REF and a LOCK cell) with a
// state value register beside it. A reversible transformation of the state
// vector is an address diagram, a sequence of NOT gates with any number of
// controls. The control unit broadcasts each gate as FM (controls) and TO
// (destinations) lines to all words, and every word applies it to its own
// address in the same clock cycle, so a gate costs one cycle however many
// words there are. Values stay where they are; only their addresses change.
// Typical use: load keywords (or a binary count), run a diagram that flips
// the flag bit A0 in the words that satisfy a condition, then locate or read
// out the flags.
//
// Blocks: rsvp_control_unit (step store and sequencer), NWORDS x rsvp_word
// (Q cells, REF, LOCK, FMbus, Lockbus), rsvp_data_in (initialise and read
// words), rsvp_state_values (D registers), rsvp_flag_locator (shift flags
// out until a true one is found).
//
// Interface, all synchronous to clk, active-low asynchronous reset rst_n:
//   word load/read   wr_en, wr_addr, wr_data (cell vector), init_count,
//                    rd_addr -> rd_data
//   diagram store    prog_we, prog_addr, prog_fm, prog_to
//   run              start, reverse, len -> busy, done (one step per cycle)
//   state values     d_we, d_addr, d_wdata, d_raddr -> d_rdata
//   flag locate      loc_start, loc_next -> loc_busy, loc_serial, loc_found,
//                    loc_index, loc_done
//   observation      flags (A0 of every word, for a post-processor),
//                    match (FMbus of every word in the current step),
//                    locked (Lockbus of every word in the current step)
// Words must not be written while a diagram runs (assertion).
module rsvp_top #(
  parameter int unsigned NBITS  = rsvp_pkg::NBITS_DEFAULT,
  parameter int unsigned NWORDS = rsvp_pkg::NWORDS_DEFAULT,
  parameter int unsigned DEPTH  = rsvp_pkg::DEPTH_DEFAULT,
  parameter int unsigned DATA_W = rsvp_pkg::DATA_W_DEFAULT,
  localparam int unsigned NC    = rsvp_pkg::ncells(NBITS),
  localparam int unsigned WAW   = (NWORDS > 1) ? $clog2(NWORDS) : 1,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // Data In
  input  logic              wr_en,
  input  logic [WAW-1:0]    wr_addr,
  input  logic [NC-1:0]     wr_data,
  input  logic              init_count,
  input  logic [WAW-1:0]    rd_addr,
  output logic [NC-1:0]     rd_data,
  // address diagram store
  input  logic              prog_we,
  input  logic [AW-1:0]     prog_addr,
  input  logic [NC-1:0]     prog_fm,
  input  logic [NC-1:0]     prog_to,
  // run control
  input  logic              start,
  input  logic              reverse,
  input  logic [LW-1:0]     len,
  output logic              busy,
  output logic              done,
  // state value registers
  input  logic              d_we,
  input  logic [WAW-1:0]    d_addr,
  input  logic [DATA_W-1:0] d_wdata,
  input  logic [WAW-1:0]    d_raddr,
  output logic [DATA_W-1:0] d_rdata,
  // flag locator
  input  logic              loc_start,
  input  logic              loc_next,
  output logic              loc_busy,
  output logic              loc_serial,
  output logic              loc_found,
  output logic [WAW-1:0]    loc_index,
  output logic              loc_done,
  // observation
  output logic [NWORDS-1:0] flags,
  output logic [NWORDS-1:0] match,
  output logic [NWORDS-1:0] locked
);

  logic [NC-1:0]             fm, to;
  logic [NWORDS-1:0]         load;
  logic [NWORDS-1:0][NC-1:0] load_val;
  logic [NWORDS-1:0][NC-1:0] word_q;

  rsvp_control_unit #(.NBITS(NBITS), .DEPTH(DEPTH)) u_cu (
    .clk       (clk),
    .rst_n     (rst_n),
    .prog_we   (prog_we),
    .prog_addr (prog_addr),
    .prog_fm   (prog_fm),
    .prog_to   (prog_to),
    .start     (start),
    .reverse   (reverse),
    .len       (len),
    .busy      (busy),
    .done      (done),
    .fm        (fm),
    .to        (to)
  );

  rsvp_data_in #(.NBITS(NBITS), .NWORDS(NWORDS)) u_data_in (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .init_count (init_count),
    .rd_addr    (rd_addr),
    .rd_data    (rd_data),
    .load       (load),
    .load_val   (load_val),
    .word_q     (word_q)
  );

  for (genvar w = 0; w < NWORDS; w++) begin : g_word
    rsvp_word #(.NBITS(NBITS)) u_word (
      .clk      (clk),
      .rst_n    (rst_n),
      .load     (load[w]),
      .load_val (load_val[w]),
      .fm       (fm),
      .to       (to),
      .q        (word_q[w]),
      .fmbus    (match[w]),
      .lockbus  (locked[w])
    );
    always_comb flags[w] = word_q[w][rsvp_pkg::FLAG_IDX];
  end

  rsvp_state_values #(.NWORDS(NWORDS), .DATA_W(DATA_W)) u_state_values (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (d_we),
    .waddr (d_addr),
    .wdata (d_wdata),
    .raddr (d_raddr),
    .rdata (d_rdata)
  );

  rsvp_flag_locator #(.NWORDS(NWORDS)) u_locator (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (loc_start),
    .next       (loc_next),
    .flags      (flags),
    .busy       (loc_busy),
    .serial_out (loc_serial),
    .found      (loc_found),
    .index      (loc_index),
    .done       (loc_done)
  );

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(wr_en || init_count));

endmodule
