// rsvp_flag_locator_tb -- self-checking test of the flag locator.
//
// For random flag patterns (and all-zero and all-one patterns) the locator is
// started and resumed with next after every find. The test expects the true
// flags in increasing word order, each found exactly k+1 cycles after start
// for word k (one word shifted out per cycle, counting the cycles spent
// waiting for next), the serial output to match the flag being shifted, and
// done once after the last word.
module rsvp_flag_locator_tb;
  localparam int unsigned NWORDS = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic              start, next, busy, serial_out, found, done;
  logic [NWORDS-1:0] flags;
  logic [2:0]        index;
  int checks = 0, failures = 0;

  rsvp_flag_locator #(.NWORDS(NWORDS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0; next = 1'b0; flags = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 60; r++) begin
      logic [NWORDS-1:0] pat;
      int shifted, cycles, held;
      pat = (r == 0) ? '0 : (r == 1) ? '1 : NWORDS'($urandom);
      flags = pat;
      start = 1'b1; @(negedge clk); start = 1'b0;
      flags = ~pat;   // later changes must not matter
      shifted = 0; cycles = 0; held = 0;
      while (shifted < NWORDS) begin
        check(int'(busy), 1, "busy while shifting");
        check(int'(serial_out), int'(pat[shifted]), $sformatf("serial word %0d", shifted));
        @(negedge clk);
        cycles++;
        shifted++;
        if (pat[shifted - 1]) begin
          check(int'(found), 1, $sformatf("found word %0d pat=%b", shifted - 1, pat));
          check(int'(index), shifted - 1, "index");
          check(cycles - held, shifted, "cycles to find");
          if (shifted < NWORDS) begin
            // wait a random time before asking for the next flag
            repeat ($urandom_range(0, 2)) begin
              @(negedge clk); cycles++; held++;
              check(int'(found), 0, "found is one pulse");
            end
            next = 1'b1; @(negedge clk); next = 1'b0; cycles++; held++;
          end
        end else begin
          check(int'(found), 0, "no find on a false flag");
        end
      end
      check(int'(done), 1, "done after last word");
      check(int'(busy), 0, "idle after done");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
