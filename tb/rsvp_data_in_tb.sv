// rsvp_data_in_tb -- self-checking test of Data In.
//
// A behavioural array of words stands for the words: it takes load/load_val
// at the clock edge and feeds its contents back on word_q. The test checks
// that init_count writes every word with its own index in the address field,
// flag 0, REF 1 and LOCK 0; that a write reaches only the addressed word;
// and that the read port returns the addressed word.
module rsvp_data_in_tb;
  localparam int unsigned NBITS  = 4;
  localparam int unsigned NWORDS = 8;
  localparam int unsigned NC     = NBITS + 2;
  localparam int unsigned WAW    = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic           wr_en, init_count;
  logic [WAW-1:0] wr_addr, rd_addr;
  logic [NC-1:0]  wr_data, rd_data;
  logic [NWORDS-1:0]         load;
  logic [NWORDS-1:0][NC-1:0] load_val, word_q;
  logic [NC-1:0] model [NWORDS];
  int checks = 0, failures = 0;

  rsvp_data_in #(.NBITS(NBITS), .NWORDS(NWORDS)) dut (.*);

  always #5 clk = ~clk;

  // stand-in for the words
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) word_q <= '0;
    else
      for (int w = 0; w < NWORDS; w++)
        if (load[w]) word_q[w] <= load_val[w];

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
    wr_en = 1'b0; init_count = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    init_count = 1'b1; @(negedge clk); init_count = 1'b0;
    for (int w = 0; w < NWORDS; w++) begin
      // LOCK=0, REF=1, address field = w, flag = 0
      model[w] = {1'b0, 1'b1, 3'(w), 1'b0};
      rd_addr = WAW'(w); #1;
      check(int'(rd_data), int'(model[w]), $sformatf("init_count word %0d", w));
    end
    @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      int a;
      a = int'($urandom_range(0, NWORDS - 1));
      wr_en = 1'b1; wr_addr = WAW'(a); wr_data = NC'($urandom);
      model[a] = wr_data;
      @(negedge clk);
      wr_en = 1'b0;
      for (int w = 0; w < NWORDS; w++) begin
        rd_addr = WAW'(w); #1;
        check(int'(rd_data), int'(model[w]), $sformatf("after write %0d, word %0d", i, w));
      end
      @(negedge clk);  // realign to the falling edge after the reads
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
