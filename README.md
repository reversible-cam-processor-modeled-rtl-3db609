# RSVP: a reversible state vector parallel processor in SystemVerilog

A quantum register of n qubits is described by a state vector of 2^n
amplitudes, one for each basis state. A reversible gate on the register only
permutes those basis states, and it acts on all of them at once. The RSVP
processor (Reversible State Vector Parallel processor) copies this behaviour
in an ordinary memory. Each basis state is one **word** of the memory. The word
holds the state's *address* (its basis code, such as `01`) and sits next to a
register for the state's *value*. A reversible gate is then a rule of the form
"complement bit t wherever bits c1, c2, ... are all 1". Every word applies the
rule to its own address at the same moment. The values never move: only the
addresses attached to them change.

The result works like a content-addressable memory turned inside out. A CAM
finds matching rows and then reads, modifies and writes each match in turn. In
RSVP every word does the modification itself in one broadcast step. One gate
therefore costs one step whether one word matches or half the memory does.
With this, a keyword search ("needle in a haystack"), a satisfiability (SAT)
check and the global properties of a truth table each take a number of steps
that grows with the number of address bits, not with the number of words.

This RTL implements the processor as described by J. R. Burger in "Reversible
CAM Processor Modeled After Quantum Computer Behavior". That description gives the
cell and word structure and the purpose of each block. Sizes, the control
unit's program store, the handshakes and the clocking are choices of this
implementation. They are marked as such below and in the header comment of
every file.

## Address diagrams: the instruction set

A program is an **address diagram**: a list of steps, each a NOT gate with
any number of controls.

| gate | controls | meaning |
|------|----------|---------|
| UCN  | none (the REF cell) | complement the destination in every word |
| SCN  | one bit | complement where that bit is 1 |
| DCN  | two bits | complement where both are 1 |
| MCN  | many bits | complement where all are 1 |

A control on a 0 is written by wrapping the gate in UCNs on that bit.
Take the example diagram on the bits Num1, Num0 and the flag f. It applies
NOT Num1, then NOT f controlled by Num1 and Num0, then NOT Num1 again. This
sets f in exactly the word holding `Num1 Num0 = 01` and restores the address.

Every gate is its own inverse. A diagram run backwards, from the last step to
the first, therefore undoes itself. The control unit supports this directly
(`reverse`).

In hardware a step is two vectors with one bit per cell position:

* **FM** (from): the cells that act as controls;
* **TO**: the cells to complement.

A step may have several TO bits, so any number of NOTs that share the same
controls run in the same cycle. Several UCNs in one step are the common case.

## The word: Q cells on a wired-AND bus

This is the part of the design that needs the most care.

```
 FM,TO columns:  A(n)   ...   A1    A0    REF   LOCK     (one pair per cell position,
                  |            |     |     |     |        shared by all words)
 FMbus  ====+=====+=====...====+=====+=====+=====+====  pulled up: high = "match"
            |     |            |     |     |     |
          [Q]   [Q]   ...    [Q]   [Q]  [REF] [LOCK]
            |     |            |     |     |     |
 Lockbus ---+-----+-----...----+-----+-----+-----'     driven by the LOCK cell
```

**Q cell** (`rsvp_qcell`). This is one address bit, held in a T flip-flop.
The word's FMbus is a wired-AND line with a pull-up. A cell pulls the line low
when three things hold at once:

* it is a control of the current step (FM = 1);
* its bit is 0;
* the word is not locked (LOCK-bar = 1).

The bus therefore stays high exactly when every selected control bit of the
word is 1. A cell with TO = 1 toggles when the bus is high. The cell's logic
is `pull_down = FM & ~D & ~LOCK` and `T = TO & FMbus`. Unlike a CAM cell, which
is written through a D input, the Q cell only ever toggles in place.

**REF cell** (`rsvp_ref_cell`). This cell provides an unconditional true. A
UCN raises FM on REF alone. REF holds 1, so it never pulls the bus low, and
every word toggles its TO bits. Here REF is a stored bit that resets to 1 and
can be loaded like the other cells. Loading 0 into a word's REF cell blocks
UCNs in that word. REF is never a destination. The control unit asserts that
every step with a destination has at least one control, so UCNs really do go
through REF.

**LOCK cell and Lockbus** (`rsvp_lock_cell`). Power in this architecture is
spent charging the horizontal FMbus of each word. Once a search has shown
that some words cannot hold the answer, those words should stop taking part.
The LOCK cell is a T flip-flop like a Q cell, so a diagram step can set it.
For example, a DCN from x and y to LOCK marks the words where x = y = 1.
Later steps that raise FM on LOCK lock out every word whose LOCK bit is 0:

* the LOCK cell alone holds that word's FMbus low, so the word cannot toggle;
* the LOCK cell raises the Lockbus, which turns off the bus drivers of all the
  other cells.

The logical effect is that of one more control bit. The physical effect is
that a locked word has one active bus driver instead of one per control. The
polarity chosen here is "LOCK = 1 means the word stays active". That polarity,
and the LOCK cell driving both lines, are this implementation's reading of the
word diagram. The original only states the purpose of the cell.

**Word** (`rsvp_word`). The word joins NBITS Q cells, the REF cell and the
LOCK cell. It forms the FMbus as the NOR of the cells' pull-down outputs,
which is a two-state model of the three-state wired-AND. It brings out the
stored cells, the bus level (`fmbus`, high when the step matches) and the
Lockbus.

### Clocking

In the original concept the cells toggle asynchronously as FM and TO
propagate across the word. Here the bus is resolved combinationally from the
stored bits, and the toggles are taken at the next rising clock edge.
A step, however many words and NOTs it contains, takes exactly one clock
cycle. This also removes the race a cell would have if it were both control
and destination of the same step. The control unit rejects such steps by
assertion anyway. All state has an asynchronous active-low reset.

## Cell vector layout and parameters

Every per-cell vector in the design uses the same layout. This covers the FM
and TO lines, load values, stored words and program steps.

| bits | cell |
|------|------|
| `[NBITS-1:0]` | address cells A(NBITS-1) .. A0. A0 is the flag bit f |
| `[NBITS]`     | REF |
| `[NBITS+1]`   | LOCK |

| parameter | default | meaning | origin |
|-----------|---------|---------|--------|
| `NBITS`   | 3  | address cells per word (n+1) | size of the worked examples (Num1, Num0, f) |
| `NWORDS`  | 4  | words (L) | the 2-bit truth table example (00..11) |
| `DEPTH`   | 16 | steps in the program store | this implementation |
| `DATA_W`  | 8  | width of a state value register | this implementation |

The original gives no size for a built processor, only these small examples.
The defaults reproduce the examples exactly. Raise `NBITS` and `NWORDS` for
real use: the logic is linear in NBITS x NWORDS. The shared constants and the
index helpers `ref_idx`, `lock_idx` and `ncells` live in `rsvp_pkg`.

## Blocks around the words

**Control unit** (`rsvp_control_unit`). This is a program store of `DEPTH`
steps, each an FM vector and a TO vector, written through
`prog_we/prog_addr/prog_fm/prog_to`. It also holds a sequencer:

* `start` with `len` runs steps 0..len-1;
* with `reverse` set it runs steps len-1..0.

`busy` is high for exactly `len` cycles. Each of those cycles carries one step
on `fm`/`to`, and the words apply it at the end of the cycle. `done` pulses
once afterwards. `len = 0` gives `done` at once. `start` while busy is
ignored. While idle, FM and TO are all zero and the words hold. Assertions
check three rules for every stored step:

* no cell is both control and destination;
* REF is never a destination;
* a step with a destination has at least one control.

**Data In** (`rsvp_data_in`). This block initialises and reads the words.

* `wr_en` writes one full cell vector into word `wr_addr`, for example to
  load unstructured keywords.
* `init_count` writes every word at once. Each word gets its own index in the
  address field A(NBITS-1)..A1, with f = 0, REF = 1 and LOCK = 0. This is the
  binary count of basis states used for truth-table and SAT work.
* `rd_addr`/`rd_data` read a word back.

The original shows data entering at the top cell of a word. Loading a whole
word in parallel is this implementation's choice. Words must not be written
while a diagram runs (assertion in the top).

**State value registers** (`rsvp_state_values`). These are registers D0..D(L-1),
one per word, with a write port and a read port. They stay put while the
addresses change. The search, SAT and truth-table uses leave them empty. They
are provided for applications that attach integer values to the states.

**Flag locator** (`rsvp_flag_locator`). After a search the matching word has
f = 1. `loc_start` captures the flags of all words. The locator then shifts
them out one word per cycle, starting at word 0, on `loc_serial`. When a true
flag comes out, `loc_found` pulses with its word number on `loc_index`, and
the locator waits. `loc_next` resumes with the following word, so every match
can be visited in turn. `loc_done` pulses after the last word. A flag in word
k is reported k+1 cycles after the capturing edge (not counting time spent
waiting for `loc_next`). The word number is the pointer into the external
store that the keywords index. The original also mentions a decoder that
finds a flag directly as an alternative; it is not built.

**Top** (`rsvp_top`). The top connects the blocks above. It also brings out
three observation vectors for an external post-processor and for debugging:

* `flags`: A0 of every word;
* `match`: FMbus of every word in the current step;
* `locked`: Lockbus of every word.

## Programming the three applications

The processor runs three applications. In each case the words are first
loaded through Data In, as a binary count or as keywords.

**Keyword search.** The keywords sit in the address bits with f = 0. For a
target K the diagram has three steps:

1. a UCN on every bit where K has a 0 (one step, several TO bits);
2. an MCN from all keyword bits to f;
3. the first step again.

Only the word equal to K gets f = 1. The count of three steps does not depend
on the number of words. The flag locator then gives the word number.
Running the same diagram in reverse clears the flag.

**SAT.** Load every assignment of the variables (binary count) and give each
clause an ancilla bit set to 0. To compute a clause into its ancilla:

1. UCN the ancilla, and every variable that appears un-negated in the clause,
   in one step;
2. MCN from the clause's variables to the ancilla, which clears it where every
   literal is false;
3. UCN the un-negated variables back.

Then run an MCN from all ancillas to f. Finally repeat the clause steps in
reverse order to return the ancillas to 0. Words with f = 1 hold the
satisfying assignments. The step count is linear in the size of the formula.
The number of words needed grows as 2^(number of variables).

**Global properties of a truth table.** Load a binary count and build f with
SCN/DCN/MCN steps (f = Num1 xor Num0 is two SCNs). Then read the flags out of
`flags`. The processor only produces the truth table. Judging balance,
symmetry or the anti-symmetry code, such as `11` for xor of two bits, is left
to a post-processor outside the design.

## Departures and open points

* **Clocked cells.** As described above, cells toggle on a clock edge rather
  than asynchronously.
* **Word count.** The original figure numbers the words WORD 0 .. WORD L
  (L+1 words) but titles itself "for L words". This RTL has `NWORDS` words,
  numbered 0 .. NWORDS-1.
* **Own choices.** The REF and LOCK cells, the program store, the reverse
  mode, the loading modes, the read port and the flag locator's handshake
  follow the stated purpose of each block. Their insides are this
  implementation's.
* **Reading words out.** The original says keywords would not normally be
  read out. The read port is there for testing and for applications that
  need it.
* **Power and delay.** The power and delay comparison with a CAM is
  analytical. The RTL shows the property it rests on: one step per cycle,
  and locked words with their bus drivers off. It does not model power.
* **Not built:**
  * the post-processor for truth-table properties;
  * the mass storage that the keyword pointers address;
  * the decoder alternative to shifting flags out;
  * the CAM that serves only as the comparison baseline.

## Verification

Each module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench.

| testbench | what it checks |
|-----------|----------------|
| `rsvp_qcell_tb` | all 64 combinations of bit, FM, TO, LOCK-bar, bus and load |
| `rsvp_ref_cell_tb` | reset to true, no pull-down while true, reload |
| `rsvp_lock_cell_tb` | Lockbus polarity, toggling, load priority |
| `rsvp_word_tb` | the NOT/DCN/NOT example on all four addresses, then 2000 random steps against a model, including locked steps |
| `rsvp_control_unit_tb` | random programs run forward and reversed; exactly `len` busy cycles; correct step order; one `done` pulse |
| `rsvp_data_in_tb` | binary-count initialisation, single-word writes, read-back |
| `rsvp_state_values_tb` | reset and random writes |
| `rsvp_flag_locator_tb` | random, empty and full flag patterns; every true flag in order; k+1-cycle latency |
| `rsvp_top_tb` | the whole processor at the default size (below) |
| `rsvp_workloads_tb` | the three applications at 64 words of 9 bits (below) |

`rsvp_top_tb` runs at the default parameters. It covers:

* the keyword example and its reverse;
* the xor truth table and its property code `11`;
* a lock-out, checked on the Lockbus and by its effect;
* state values staying in place;
* 200 random diagrams that must be restored exactly by running them in
  reverse.

It counts each mechanism and fails if one never occurs. The mechanisms are
UCN, SCN, DCN, MCN, multi-destination steps, forward and reverse runs,
restores, locked words, non-matching words, found and absent flags, both load
modes, and state values.

`rsvp_workloads_tb` runs the three applications at 64 words of 9 bits:

* 24 keyword searches, a third of them for absent keys;
* 30 random four-clause SAT formulas, checked by brute force;
* 6 truth tables with their anti-symmetry codes.

Simulation with Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wall -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/rsvp_pkg.sv tb/rsvp_top_tb.sv --top-module rsvp_top_tb -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. Each testbench ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog that ends the run with a
failure. Lint with `verilator --lint-only -Wall rtl/rsvp_pkg.sv rtl/<module>.sv -y rtl`.
The remaining lint warnings are of two kinds:

* constants of `rsvp_pkg` that a given module does not use;
* `rst_n` used both as the asynchronous reset and in the `disable iff` of
  the assertions.
