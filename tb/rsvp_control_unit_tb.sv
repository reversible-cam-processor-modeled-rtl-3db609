// rsvp_control_unit_tb -- self-checking test of the control unit.
//
// Random diagrams of random length are written into the step store and run
// forward and in reverse. A scoreboard in this file holds its own copy of
// the diagram and checks, cycle by cycle, that busy lasts exactly len cycles
// (one step per cycle), that the FM/TO lines carry the steps in the expected
// order and are zero while idle, that done pulses once after the last step,
// and that len = 0 gives done without a step.
module rsvp_control_unit_tb;
  localparam int unsigned NBITS = 3;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned NC    = NBITS + 2;
  localparam int unsigned AW    = 4;
  localparam int unsigned LW    = 5;
  localparam int unsigned REF   = NBITS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic          prog_we, start, reverse, busy, done;
  logic [AW-1:0] prog_addr;
  logic [NC-1:0] prog_fm, prog_to, fm, to;
  logic [LW-1:0] len;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_rev = 0;

  logic [NC-1:0] ref_fm [DEPTH];
  logic [NC-1:0] ref_to [DEPTH];

  rsvp_control_unit #(.NBITS(NBITS), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input int n, input logic rev);
    int cyc;
    start = 1'b1; reverse = rev; len = LW'(n);
    @(negedge clk);
    start = 1'b0;
    for (cyc = 0; cyc < n; cyc++) begin
      int k;
      k = rev ? n - 1 - cyc : cyc;
      check(int'(busy), 1, $sformatf("busy in step %0d", cyc));
      check(int'(fm), int'(ref_fm[k]), $sformatf("fm step %0d of %0d rev=%0b", cyc, n, rev));
      check(int'(to), int'(ref_to[k]), $sformatf("to step %0d of %0d rev=%0b", cyc, n, rev));
      check(int'(done), 0, "no done while running");
      @(negedge clk);
    end
    check(int'(busy), 0, "busy ends after len cycles");
    check(int'(done), 1, "done after last step");
    check(int'(fm | to), 0, "lines idle");
    @(negedge clk);
    check(int'(done), 0, "done is one pulse");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_we = 1'b0; prog_addr = '0; prog_fm = '0; prog_to = '0;
    start = 1'b0; reverse = 1'b0; len = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(int'(busy), 0, "idle after reset");
    for (int r = 0; r < 20; r++) begin
      int n;
      n = (r == 0) ? DEPTH : 1 + int'($urandom_range(0, DEPTH - 1));
      for (int k = 0; k < n; k++) begin
        logic [NC-1:0] f, t;
        f = NC'($urandom);
        if (f == '0) f = NC'(1) << REF;
        t = NC'($urandom) & ~f & ~(NC'(1) << REF);
        ref_fm[k] = f; ref_to[k] = t;
        prog_we = 1'b1; prog_addr = AW'(k); prog_fm = f; prog_to = t;
        @(negedge clk);
      end
      prog_we = 1'b0;
      run(n, 1'b0); n_fwd++;
      run(n, 1'b1); n_rev++;
    end
    // len = 0
    start = 1'b1; len = '0; @(negedge clk); start = 1'b0;
    check(int'(busy), 0, "len 0: not busy");
    check(int'(done), 1, "len 0: done");
    // start while busy is ignored
    start = 1'b1; len = LW'(3); reverse = 1'b0; @(negedge clk);
    len = LW'(9); @(negedge clk); @(negedge clk); start = 1'b0;
    @(negedge clk);
    check(int'(busy), 0, "start while busy ignored: run of 3 ended");
    check(int'(done), 1, "start while busy ignored: done");
    check(n_fwd, 20, "forward runs");
    check(n_rev, 20, "reverse runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
