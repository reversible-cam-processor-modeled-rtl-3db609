// rsvp_word_tb -- self-checking test of one RSVP word.
//
// First the address diagram of the worked example (NOT Num1; NOT f controlled
// by Num1 and Num0; NOT Num1) is run on every 2-bit address with f = 0: only
// address 01 must end with f = 1 and the address must be restored. Then
// random words receive random steps (random controls including REF and LOCK,
// random destinations, never a cell that is both); the expected bus level,
// Lockbus and next word are computed by a reference model in this file.
// Each step must complete in one clock cycle.
module rsvp_word_tb;
  localparam int unsigned NBITS = 3;
  localparam int unsigned NC    = NBITS + 2;
  localparam int unsigned REF   = NBITS;
  localparam int unsigned LOCK  = NBITS + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic          load;
  logic [NC-1:0] load_val, fm, to, q;
  logic          fmbus, lockbus;
  int checks = 0, failures = 0;
  int n_locked = 0, n_match = 0;

  rsvp_word #(.NBITS(NBITS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [NC-1:0] got, input logic [NC-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic set_word(input logic [NC-1:0] v);
    load = 1'b1; load_val = v; fm = '0; to = '0;
    @(negedge clk);
    load = 1'b0;
  endtask

  // one step: drive fm/to, check bus, clock once, check word
  task automatic step(input logic [NC-1:0] f, input logic [NC-1:0] t);
    logic [NC-1:0] prev, expq;
    logic exp_bus, exp_lock;
    prev = q;
    fm = f; to = t;
    exp_lock = f[LOCK] && !prev[LOCK];
    exp_bus  = ((f & ~prev) == '0);
    #1;
    check(NC'(fmbus),   NC'(exp_bus),  "fmbus");
    check(NC'(lockbus), NC'(exp_lock), "lockbus");
    if (exp_lock) n_locked++;
    if (exp_bus)  n_match++;
    expq = exp_bus ? (prev ^ (t & ~(NC'(1) << REF))) : prev;
    @(negedge clk);
    fm = '0; to = '0;
    check(q, expq, $sformatf("word after step fm=%b to=%b from %b", f, t, prev));
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 1'b0; load_val = '0; fm = '0; to = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1 check(q, NC'(1) << REF, "reset: REF=1, others 0");
    // worked example: Num1 = A2, Num0 = A1, f = A0
    for (int a = 0; a < 4; a++) begin
      set_word({1'b0, 1'b1, 2'(a), 1'b0});
      step(NC'(1) << REF, NC'(1) << 2);           // UCN on Num1
      step(NC'(3'b110), NC'(3'b001));             // DCN Num1,Num0 -> f
      step(NC'(1) << REF, NC'(1) << 2);           // UCN on Num1
      check(q, {1'b0, 1'b1, 2'(a), (a == 1)}, $sformatf("example, address %0d", a));
    end
    // random steps
    for (int i = 0; i < 2000; i++) begin
      logic [NC-1:0] f, t, v;
      if (i % 16 == 0) begin
        v = NC'($urandom);
        set_word(v);
      end
      f = NC'($urandom) & NC'($urandom);
      t = NC'($urandom) & ~f & ~(NC'(1) << REF);
      step(f, t);
    end
    if (n_locked == 0) begin failures++; $display("FAIL lock never seen"); end
    if (n_match == 0)  begin failures++; $display("FAIL match never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
