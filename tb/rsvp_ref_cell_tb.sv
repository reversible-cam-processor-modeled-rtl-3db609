// rsvp_ref_cell_tb -- self-checking test of the REF cell.
//
// Checks that the cell comes out of reset holding 1 (the unconditional true),
// that it never pulls the FMbus low while it holds 1, that it does pull it
// low when loaded with 0, selected and not locked, and that it can be
// reloaded.
module rsvp_ref_cell_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load, load_val, fm, lock_n;
  logic pull_down, q;
  int checks = 0, failures = 0;

  rsvp_ref_cell dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #5000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {load, load_val, fm, lock_n} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(q, 1'b1, "reset value is true");
    for (int v = 0; v < 4; v++) begin
      {fm, lock_n} = 2'(v);
      #1 check(pull_down, 1'b0, "REF=1 never pulls the bus low");
      @(negedge clk);
      check(q, 1'b1, "REF holds without load");
    end
    load = 1'b1; load_val = 1'b0; @(negedge clk); load = 1'b0;
    check(q, 1'b0, "load 0");
    for (int v = 0; v < 4; v++) begin
      {fm, lock_n} = 2'(v);
      #1 check(pull_down, fm && lock_n, "REF=0 pull-down");
    end
    load = 1'b1; load_val = 1'b1; @(negedge clk); load = 1'b0;
    check(q, 1'b1, "reload 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
