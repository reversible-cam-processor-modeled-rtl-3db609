// rsvp_flag_locator -- finds the word whose flag went true.
//
// After a search the flag bit A0 of the matching word(s) is 1. To know where
// a true flag is, the flags are shifted out, one word per clock cycle
// starting at word 0, until a true one is found. start captures the flag
// bits of all words into a shift register. Each cycle in the SHIFT state
// presents one flag on serial_out; when it is 1, found pulses with its word
// index on index and the locator waits. next resumes shifting from the
// following word, so every true flag can be visited in turn (as when a SAT
// problem has several solutions). When the last word has been shifted out,
// done pulses and the locator goes idle. The index is the pointer into the
// separate storage the keywords refer to.
//
// Shifting flags out is the method the architecture suggests; a decoder
// that locates a flag directly is mentioned only as an alternative and is
// not built. The start/next/found/done handshake is this design's choice.
//
// Timing: start (while idle) at edge 0; the flag of word k is on serial_out
// in the (k+1)-th cycle after start, and found for it is registered at the
// end of that cycle, i.e. found rises k+1 cycles after start. A found word
// does not itself stop shifting of later flags until next (HOLD state).
module rsvp_flag_locator #(
  parameter int unsigned NWORDS = rsvp_pkg::NWORDS_DEFAULT,
  localparam int unsigned WAW   = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              next,
  input  logic [NWORDS-1:0] flags,
  output logic              busy,
  output logic              serial_out,
  output logic              found,
  output logic [WAW-1:0]    index,
  output logic              done
);

  import rsvp_pkg::*;

  fl_state_e         state;
  logic [NWORDS-1:0] sh;
  logic [WAW-1:0]    pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= FL_IDLE;
      sh    <= '0;
      pos   <= '0;
      index <= '0;
      found <= 1'b0;
      done  <= 1'b0;
    end else begin
      found <= 1'b0;
      done  <= 1'b0;
      unique case (state)
        FL_IDLE: begin
          if (start) begin
            sh    <= flags;
            pos   <= '0;
            state <= FL_SHIFT;
          end
        end
        FL_SHIFT: begin
          sh  <= sh >> 1;
          pos <= pos + WAW'(1);
          if (sh[0]) begin
            found <= 1'b1;
            index <= pos;
          end
          if (int'(pos) == NWORDS - 1) begin
            state <= FL_IDLE;
            done  <= 1'b1;
          end else if (sh[0]) begin
            state <= FL_HOLD;
          end
        end
        FL_HOLD: begin
          if (next) state <= FL_SHIFT;
        end
        default: state <= FL_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != FL_IDLE);
    serial_out = (state == FL_SHIFT) && sh[0];
  end

endmodule
