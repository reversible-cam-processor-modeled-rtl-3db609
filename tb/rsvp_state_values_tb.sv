// rsvp_state_values_tb -- self-checking test of the state value registers.
//
// Checks that every register reads 0 after reset, then makes random writes
// and compares every register with a model array after each one.
module rsvp_state_values_tb;
  localparam int unsigned NWORDS = 4;
  localparam int unsigned DATA_W = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic              we;
  logic [1:0]        waddr, raddr;
  logic [DATA_W-1:0] wdata, rdata;
  logic [DATA_W-1:0] model [NWORDS];
  int checks = 0, failures = 0;

  rsvp_state_values dut (.*);

  always #5 clk = ~clk;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #50000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < NWORDS; w++) begin
      model[w] = '0;
      raddr = 2'(w); #1 check(int'(rdata), 0, "reset value");
    end
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      int a;
      a = int'($urandom_range(0, NWORDS - 1));
      we = ($urandom_range(0, 3) != 0); waddr = 2'(a); wdata = DATA_W'($urandom);
      if (we) model[a] = wdata;
      @(negedge clk);
      we = 1'b0;
      for (int w = 0; w < NWORDS; w++) begin
        raddr = 2'(w); #1 check(int'(rdata), int'(model[w]), $sformatf("register %0d", w));
      end
      @(negedge clk);  // realign to the falling edge after the reads
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
