// rsvp_lock_cell_tb -- self-checking test of the LOCK cell.
//
// Checks that the Lockbus is raised exactly when FM selects the cell and its
// bit is 0, that the cell toggles like a Q cell (TO and FMbus high), and that
// load has priority, over every input combination.
module rsvp_lock_cell_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load, load_val, fm, to, fmbus;
  logic lockbus, q;
  int checks = 0, failures = 0;

  rsvp_lock_cell dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {load, load_val, fm, to, fmbus} = '0;
    repeat (2) @(negedge clk);
    check(q, 1'b0, "reset value");
    rst_n = 1'b1;
    for (int v = 0; v < 32; v++) begin
      logic d0, f, t, b, ld, expq;
      {ld, d0, f, t, b} = 5'(v);
      load = 1'b1; load_val = d0; {fm, to} = '0;
      @(negedge clk);
      check(q, d0, "load");
      load = ld; load_val = ~d0; fm = f; to = t; fmbus = b;
      #1 check(lockbus, f && !d0, $sformatf("lockbus v=%0d", v));
      @(negedge clk);
      expq = (ld || (t && b)) ? ~d0 : d0;
      check(q, expq, $sformatf("next q v=%0d", v));
      load = 1'b0; {fm, to} = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
