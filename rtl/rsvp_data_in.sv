// rsvp_data_in -- Data In block of the RSVP processor.
//
// Data In initialises the words and reads them back (the two-way path
// between Data In and every word). Two ways of initialising are offered:
//   * wr_en writes the full cell vector wr_data (address bits, REF, LOCK)
//     into word wr_addr, e.g. to load unstructured keywords;
//   * init_count writes every word at once with its own index in the
//     address field A(NBITS-1)..A1, flag A0 = 0, REF = 1 and LOCK = 0, which
//     is the binary count of all basis states used for state vector work.
// rd_addr selects a word whose stored cells appear on rd_data.
// The architecture states only that every cell is initialised through a
// Data input; the two modes, the word-parallel load (rather than entering
// the bits serially at the top cell) and the field layout are this
// design's choice. When NWORDS exceeds 2^(NBITS-1) the index is truncated to
// the address field.
//
// Timing: load/load_val are combinational from the request and are taken by
// the words at the next rising edge; rd_data is combinational from rd_addr.
module rsvp_data_in #(
  parameter int unsigned NBITS  = rsvp_pkg::NBITS_DEFAULT,
  parameter int unsigned NWORDS = rsvp_pkg::NWORDS_DEFAULT,
  localparam int unsigned NC    = rsvp_pkg::ncells(NBITS),
  localparam int unsigned WAW   = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // host side
  input  logic           wr_en,
  input  logic [WAW-1:0] wr_addr,
  input  logic [NC-1:0]  wr_data,
  input  logic           init_count,
  input  logic [WAW-1:0] rd_addr,
  output logic [NC-1:0]  rd_data,
  // word side
  output logic [NWORDS-1:0]         load,
  output logic [NWORDS-1:0][NC-1:0] load_val,
  input  logic [NWORDS-1:0][NC-1:0] word_q
);

  import rsvp_pkg::*;

  localparam int unsigned REF  = ref_idx(NBITS);
  localparam int unsigned LOCK = lock_idx(NBITS);

  always_comb begin
    for (int unsigned w = 0; w < NWORDS; w++) begin
      load[w]     = init_count || (wr_en && (wr_addr == WAW'(w)));
      load_val[w] = wr_data;
      if (init_count) begin
        load_val[w]       = '0;
        load_val[w][REF]  = 1'b1;
        load_val[w][LOCK] = 1'b0;
        for (int unsigned b = 1; b < NBITS; b++)
          load_val[w][b] = ((w >> (b - 1)) & 1) != 0;
      end
    end
    rd_data = word_q[rd_addr];
  end

  a_one_mode: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_en && init_count));
  a_wr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (int'(wr_addr) < NWORDS));

endmodule
