// rsvp_control_unit -- control unit of the RSVP processor.
//
// The control unit holds an address diagram and plays it to the words. Each
// step of the diagram is a pair of vectors, one FM bit and one TO bit per
// cell position (layout of rsvp_pkg): FM selects the control bits, TO the
// destination bits. A step with FM on REF only is an unconditional NOT (UCN),
// one control gives an SCN, two a DCN, more an MCN; several TO bits give that
// many NOTs in one step. The same FM/TO lines run to every word, so every
// word performs the step at once.
//
// The diagram is written into a step store of DEPTH entries through the
// prog_* port. start runs steps 0..len-1 in order, or, with reverse set,
// steps len-1..0. Because every step is its own inverse, running a diagram in
// reverse undoes it: the outputs applied on the right give back the inputs on
// the left. Running in reverse is this design's way of offering that property;
// the store, its depth and the port are also this design's choice, as the
// architecture shows only a block that drives FM and TO.
//
// Timing: after start (sampled while idle) busy rises at the next edge and
// stays high for exactly len cycles; in each busy cycle fm/to carry one step
// and the words apply it at the end of the cycle. done pulses for one cycle
// after the last step. start while busy is ignored; len = 0 gives done
// without any step. fm and to are all zero while idle, so the words hold.
//
// Rules checked by assertions: a step never selects one cell as both
// control and destination (the asynchronous cell would race), never names
// the REF cell as a destination, and has at least one control when it has a
// destination (an unconditional NOT goes through REF, as intended; with no
// FM line raised the pulled-up FMbus would match in every word anyway).
module rsvp_control_unit #(
  parameter int unsigned NBITS = rsvp_pkg::NBITS_DEFAULT,
  parameter int unsigned DEPTH = rsvp_pkg::DEPTH_DEFAULT,
  localparam int unsigned NC   = rsvp_pkg::ncells(NBITS),
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // step store write port
  input  logic          prog_we,
  input  logic [AW-1:0] prog_addr,
  input  logic [NC-1:0] prog_fm,
  input  logic [NC-1:0] prog_to,
  // run control
  input  logic          start,
  input  logic          reverse,
  input  logic [LW-1:0] len,
  output logic          busy,
  output logic          done,
  // to the words
  output logic [NC-1:0] fm,
  output logic [NC-1:0] to
);

  import rsvp_pkg::*;

  localparam int unsigned REF = ref_idx(NBITS);

  logic [NC-1:0] fm_mem [DEPTH];
  logic [NC-1:0] to_mem [DEPTH];

  cu_state_e     state;
  logic [AW-1:0] pc;
  logic [LW-1:0] remaining;
  logic          dir_rev;

  always_ff @(posedge clk) begin
    if (prog_we) begin
      fm_mem[prog_addr] <= prog_fm;
      to_mem[prog_addr] <= prog_to;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= CU_IDLE;
      pc        <= '0;
      remaining <= '0;
      dir_rev   <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        CU_IDLE: begin
          if (start) begin
            if (len == '0) begin
              done <= 1'b1;
            end else begin
              state     <= CU_RUN;
              remaining <= len;
              dir_rev   <= reverse;
              pc        <= reverse ? AW'(len - LW'(1)) : '0;
            end
          end
        end
        CU_RUN: begin
          remaining <= remaining - LW'(1);
          pc        <= dir_rev ? pc - AW'(1) : pc + AW'(1);
          if (remaining == LW'(1)) begin
            state <= CU_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= CU_IDLE;
      endcase
    end
  end

  always_comb begin
    busy = (state == CU_RUN);
    fm   = busy ? fm_mem[pc] : '0;
    to   = busy ? to_mem[pc] : '0;
  end

  // A cell may not be control and destination of the same step.
  a_no_self_control: assert property (@(posedge clk) disable iff (!rst_n)
    prog_we |-> ((prog_fm & prog_to) == '0));
  // REF is never a destination.
  a_ref_not_target: assert property (@(posedge clk) disable iff (!rst_n)
    prog_we |-> !prog_to[REF]);
  // A step with destinations has at least one control; an unconditional NOT
  // selects the REF cell.
  a_has_control: assert property (@(posedge clk) disable iff (!rst_n)
    (prog_we && prog_to != '0) |-> (prog_fm != '0));
  // A run never exceeds the step store.
  a_len_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == CU_IDLE) |-> (len <= LW'(DEPTH)));

endmodule
