// rsvp_qcell_tb -- self-checking test of the Q cell.
//
// For every combination of stored bit, FM, TO, LOCK-bar and FMbus level the
// test checks the bus pull-down (FM and bit 0 and not locked) and the bit
// after one clock edge (toggled when TO and FMbus are both high), and that a
// load wins over a toggle. Expected values come from the truth table of the
// cell, written out here independently of the RTL.
module rsvp_qcell_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load, load_val, fm, to, lock_n, fmbus;
  logic pull_down, q;
  int checks = 0, failures = 0;

  rsvp_qcell dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {load, load_val, fm, to, lock_n, fmbus} = '0;
    repeat (2) @(negedge clk);
    check(q, 1'b0, "reset value");
    rst_n = 1'b1;
    for (int v = 0; v < 64; v++) begin
      logic d0, f, t, ln, b, ld, expq;
      {ld, d0, f, t, ln, b} = 6'(v);
      // set the stored bit
      load = 1'b1; load_val = d0; {fm, to} = '0;
      @(negedge clk);
      check(q, d0, "load");
      load = ld; load_val = ~d0;
      fm = f; to = t; lock_n = ln; fmbus = b;
      #1;
      check(pull_down, f && !d0 && ln, $sformatf("pull_down v=%0d", v));
      @(negedge clk);
      if (ld)          expq = ~d0;
      else if (t && b) expq = ~d0;
      else             expq = d0;
      check(q, expq, $sformatf("next q v=%0d", v));
      load = 1'b0; {fm, to} = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
