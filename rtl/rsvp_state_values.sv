// rsvp_state_values -- state value registers D0..D(L-1) of the RSVP processor.
//
// Every word has beside it a data register holding the value of its state
// (an integer stand-in for a quantum amplitude). The address in the word is
// transformed in place by the address diagram while the state value stays
// where it is, so the register of word w always belongs to whatever address
// word w now holds. In the search, SAT and truth-table uses the registers are
// left empty; they are provided for applications that need state values.
//
// Interface: one write port (we, waddr, wdata) and one combinational read
// port (raddr, rdata). Width DATA_W is this design's choice; the
// architecture gives none. Reset clears all registers.
//
// Timing: writes at the rising clock edge; reads are combinational.
module rsvp_state_values #(
  parameter int unsigned NWORDS = rsvp_pkg::NWORDS_DEFAULT,
  parameter int unsigned DATA_W = rsvp_pkg::DATA_W_DEFAULT,
  localparam int unsigned WAW   = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [WAW-1:0]    waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [WAW-1:0]    raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] d [NWORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned w = 0; w < NWORDS; w++) d[w] <= '0;
    end else if (we) begin
      d[waddr] <= wdata;
    end
  end

  always_comb rdata = d[raddr];

  a_wr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (int'(waddr) < NWORDS));

endmodule
