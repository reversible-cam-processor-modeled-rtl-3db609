// rsvp_top_tb -- end-to-end test of the RSVP processor at its default size
// (three address bits Num1, Num0, f and four words).
//
// A reference model in this file keeps its own copy of every word and
// applies each step of an address diagram to it (a step toggles the TO bits
// of every word whose FM-selected bits are all 1; a word whose LOCK bit is 0
// is locked out when FM selects LOCK). After every run the model and the
// processor are compared word by word through the Data In read port, and
// every run must keep busy high for exactly len cycles.
// Scenarios:
//   1. keyword search on the keywords 01, 00, 10 (+ 11): the diagram NOT Num1,
//      NOT f controlled by Num1 and Num0, NOT Num1 flags keyword 01 only; the
//      flag locator finds word 0 in one cycle; the reverse run clears it.
//   2. truth table: every word loaded with its own address, f = Num1 xor Num0
//      built from two single-control NOTs; the flags must read 0110, which a
//      small post-processor here recognises as anti-symmetric at both levels
//      (property code 11).
//   3. lock-out: the LOCK bit is set where Num1 = Num0 = 1, then a step with
//      LOCK among its controls must lock the other three words out and toggle
//      f only in the unlocked word.
//   4. state values stay with their word while the addresses change.
//   5. random diagrams with unconditional, single, double and multiple
//      controlled NOTs and multi-destination steps, run forward then in
//      reverse: the reverse run must restore the words exactly.
// Each mechanism is counted; one that never occurred is a failure.
module rsvp_top_tb;
  import rsvp_pkg::*;

  localparam int unsigned NBITS  = NBITS_DEFAULT;
  localparam int unsigned NWORDS = NWORDS_DEFAULT;
  localparam int unsigned DEPTH  = DEPTH_DEFAULT;
  localparam int unsigned DATA_W = DATA_W_DEFAULT;
  localparam int unsigned NC     = NBITS + 2;
  localparam int unsigned WAW    = $clog2(NWORDS);
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned LW     = $clog2(DEPTH + 1);
  localparam int unsigned REF    = NBITS;
  localparam int unsigned LOCK   = NBITS + 1;
  localparam int unsigned NUM1   = 2, NUM0 = 1, F = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic              wr_en, init_count, prog_we, start, reverse, busy, done;
  logic [WAW-1:0]    wr_addr, rd_addr, d_addr, d_raddr, loc_index;
  logic [NC-1:0]     wr_data, rd_data, prog_fm, prog_to;
  logic [AW-1:0]     prog_addr;
  logic [LW-1:0]     len;
  logic              d_we;
  logic [DATA_W-1:0] d_wdata, d_rdata;
  logic              loc_start, loc_next, loc_busy, loc_serial, loc_found, loc_done;
  logic [NWORDS-1:0] flags, match, locked;

  rsvp_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [NC-1:0] model [NWORDS];
  logic [NC-1:0] pfm [$], pto [$];

  // mechanism counters
  int n_ucn = 0, n_scn = 0, n_dcn = 0, n_mcn = 0, n_multi_to = 0;
  int n_fwd = 0, n_rev = 0, n_restore = 0, n_locked = 0, n_found = 0;
  int n_none = 0, n_init = 0, n_write = 0, n_dval = 0, n_nomatch = 0;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [NC-1:0] ucn(input int unsigned b);
    return NC'(1) << b;
  endfunction

  task automatic add_step(input logic [NC-1:0] f, input logic [NC-1:0] t);
    pfm.push_back(f); pto.push_back(t);
  endtask

  // model of one step on every word
  task automatic model_step(input logic [NC-1:0] f, input logic [NC-1:0] t);
    int nctl;
    nctl = $countones(f & ~ucn(REF));
    if (f == ucn(REF))       n_ucn++;
    else if (nctl == 1)      n_scn++;
    else if (nctl == 2)      n_dcn++;
    else if (nctl > 2)       n_mcn++;
    if ($countones(t) > 1)   n_multi_to++;
    for (int w = 0; w < NWORDS; w++)
      if ((f & ~model[w]) == '0) model[w] = model[w] ^ t;
  endtask

  task automatic compare_words(input string what);
    for (int w = 0; w < NWORDS; w++) begin
      rd_addr = WAW'(w); #1;
      check(int'(rd_data), int'(model[w]), $sformatf("%s: word %0d", what, w));
    end
    @(negedge clk);
  endtask

  task automatic load_program();
    foreach (pfm[k]) begin
      prog_we = 1'b1; prog_addr = AW'(k); prog_fm = pfm[k]; prog_to = pto[k];
      @(negedge clk);
    end
    prog_we = 1'b0;
  endtask

  // run the stored diagram, check one step per cycle, update the model
  task automatic run(input logic rev);
    int n, cyc;
    n = pfm.size();
    start = 1'b1; reverse = rev; len = LW'(n);
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (busy) begin
      int k;
      k = rev ? n - 1 - cyc : cyc;
      // the step on the lines is the expected one; watch the Lockbus
      for (int w = 0; w < NWORDS; w++) begin
        logic exp_lock;
        exp_lock = pfm[k][LOCK] && !model[w][LOCK];
        check(int'(locked[w]), int'(exp_lock), $sformatf("lockbus word %0d step %0d", w, k));
        if (locked[w]) n_locked++;
        check(int'(match[w]), int'((pfm[k] & ~model[w]) == '0), $sformatf("match word %0d step %0d", w, k));
        if (!match[w]) n_nomatch++;
      end
      model_step(pfm[k], pto[k]);
      @(negedge clk);
      cyc++;
      if (cyc > DEPTH + 2) break;
    end
    check(cyc, n, "one step per clock cycle");
    check(int'(done), 1, "done after the last step");
    if (rev) n_rev++; else n_fwd++;
  endtask

  task automatic write_word(input int w, input logic [NC-1:0] v);
    wr_en = 1'b1; wr_addr = WAW'(w); wr_data = v;
    @(negedge clk);
    wr_en = 1'b0;
    model[w] = v;
    n_write++;
  endtask

  task automatic do_init_count();
    init_count = 1'b1; @(negedge clk); init_count = 1'b0;
    for (int w = 0; w < NWORDS; w++) model[w] = {1'b0, 1'b1, 2'(w), 1'b0};
    n_init++;
  endtask

  // shift the flags out; return the words found, in order
  task automatic locate(output int found_list [$], output int cycles_to_first);
    int cyc;
    found_list = {};
    cycles_to_first = -1;
    loc_start = 1'b1; @(negedge clk); loc_start = 1'b0;
    cyc = 0;
    while (loc_busy || loc_found || loc_done) begin
      cyc++;
      if (loc_found) begin
        found_list.push_back(int'(loc_index));
        if (cycles_to_first < 0) cycles_to_first = cyc - 1;  // cycles after the capturing edge
        n_found++;
      end
      if (loc_done) break;
      loc_next = loc_found;
      @(negedge clk);
      loc_next = 1'b0;
      if (cyc > 4 * NWORDS) break;
    end
    loc_next = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fl [$];
    int c1;
    logic [DATA_W-1:0] dvals [NWORDS];
    {wr_en, init_count, prog_we, start, reverse, d_we, loc_start, loc_next} = '0;
    wr_addr = '0; rd_addr = '0; d_addr = '0; d_raddr = '0; wr_data = '0;
    prog_fm = '0; prog_to = '0; prog_addr = '0; len = '0; d_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // 1. keyword search
    write_word(0, {1'b0, 1'b1, 1'b0, 1'b1, 1'b0});   // 01, f = 0
    write_word(1, {1'b0, 1'b1, 1'b0, 1'b0, 1'b0});   // 00
    write_word(2, {1'b0, 1'b1, 1'b1, 1'b0, 1'b0});   // 10
    write_word(3, {1'b0, 1'b1, 1'b1, 1'b1, 1'b0});   // 11
    compare_words("keywords loaded");
    pfm = {}; pto = {};
    add_step(ucn(REF), ucn(NUM1));
    add_step(ucn(NUM1) | ucn(NUM0), ucn(F));
    add_step(ucn(REF), ucn(NUM1));
    load_program();
    run(1'b0);
    compare_words("keyword search");
    check(int'(flags), 4'b0001, "only keyword 01 flagged");
    locate(fl, c1);
    check(fl.size(), 1, "one flag found");
    if (fl.size() > 0) check(fl[0], 0, "flag in word 0");
    check(c1, 1, "word 0 found in one cycle");
    run(1'b1);
    compare_words("keyword search undone");
    check(int'(flags), 0, "flags cleared by the reverse run");
    locate(fl, c1);
    check(fl.size(), 0, "no flag left");
    if (fl.size() == 0) n_none++;

    // 2. truth table, f = Num1 xor Num0
    do_init_count();
    compare_words("binary count");
    pfm = {}; pto = {};
    add_step(ucn(NUM1), ucn(F));
    add_step(ucn(NUM0), ucn(F));
    load_program();
    run(1'b0);
    compare_words("truth table");
    check(int'(flags), 4'b0110, "truth table 0 1 1 0");
    begin
      // post-processor: anti-symmetry of the whole table and of each half
      logic [3:0] t;
      logic top, sub;
      t = flags;
      top = (t[3:2] == ~t[1:0]);
      sub = (t[1] == ~t[0]) && (t[3] == ~t[2]);
      check(int'({top, sub}), 2'b11, "global property code 11");
    end
    locate(fl, c1);
    check(fl.size(), 2, "two flags");
    if (fl.size() == 2) begin
      check(fl[0], 1, "first flag word 1");
      check(fl[1], 2, "second flag word 2");
    end
    check(c1, 2, "word 1 found in two cycles");

    // 3. lock-out
    do_init_count();
    pfm = {}; pto = {};
    add_step(ucn(NUM1) | ucn(NUM0), ucn(LOCK));       // LOCK = Num1 and Num0
    add_step(ucn(REF) | ucn(LOCK), ucn(F));           // only unlocked words
    add_step(ucn(REF) | ucn(LOCK), ucn(NUM0));
    load_program();
    begin
      int before_locked;
      before_locked = n_locked;
      run(1'b0);
      check(n_locked - before_locked, 2 * (NWORDS - 1), "three words locked in two steps");
    end
    compare_words("lock-out");
    check(int'(flags), 4'b1000, "only the unlocked word toggled");

    // 4. state values stay put
    for (int w = 0; w < NWORDS; w++) begin
      dvals[w] = DATA_W'($urandom);
      d_we = 1'b1; d_addr = WAW'(w); d_wdata = dvals[w];
      @(negedge clk);
    end
    d_we = 1'b0;
    run(1'b1);
    compare_words("lock-out undone");
    for (int w = 0; w < NWORDS; w++) begin
      d_raddr = WAW'(w); #1;
      check(int'(d_rdata), int'(dvals[w]), $sformatf("state value %0d", w));
      n_dval++;
    end
    @(negedge clk);

    // 5. random diagrams, forward and reverse
    for (int r = 0; r < 200; r++) begin
      logic [NC-1:0] saved [NWORDS];
      int n;
      for (int w = 0; w < NWORDS; w++)
        if (r % 10 == 0) write_word(w, NC'($urandom));
      for (int w = 0; w < NWORDS; w++) saved[w] = model[w];
      pfm = {}; pto = {};
      n = 1 + int'($urandom_range(0, DEPTH - 1));
      for (int k = 0; k < n; k++) begin
        logic [NC-1:0] f, t;
        f = NC'($urandom) & NC'($urandom);
        if (f == '0 || $urandom_range(0, 3) == 0) f = ucn(REF);
        t = NC'($urandom) & ~f & ~ucn(REF);
        if (t == '0) t = ucn(F) & ~f;
        add_step(f, t);
      end
      load_program();
      run(1'b0);
      compare_words($sformatf("random diagram %0d", r));
      run(1'b1);
      compare_words($sformatf("random diagram %0d reversed", r));
      begin
        bit same;
        same = 1'b1;
        for (int w = 0; w < NWORDS; w++) if (model[w] != saved[w]) same = 1'b0;
        check(int'(same), 1, "reverse run restores the words");
        if (same) n_restore++;
      end
    end

    $display("mechanisms: UCN %0d SCN %0d DCN %0d MCN %0d multi-TO %0d forward %0d reverse %0d",
             n_ucn, n_scn, n_dcn, n_mcn, n_multi_to, n_fwd, n_rev);
    $display("            restored %0d locked %0d no-match %0d found %0d none %0d init %0d write %0d dval %0d",
             n_restore, n_locked, n_nomatch, n_found, n_none, n_init, n_write, n_dval);
    check(int'(n_ucn > 0), 1, "UCN happened");
    check(int'(n_scn > 0), 1, "SCN happened");
    check(int'(n_dcn > 0), 1, "DCN happened");
    check(int'(n_mcn > 0), 1, "MCN happened");
    check(int'(n_multi_to > 0), 1, "multi-destination step happened");
    check(int'(n_fwd > 0 && n_rev > 0), 1, "forward and reverse runs happened");
    check(int'(n_restore > 0), 1, "restore happened");
    check(int'(n_locked > 0), 1, "lock-out happened");
    check(int'(n_nomatch > 0), 1, "non-matching word happened");
    check(int'(n_found > 0), 1, "flag found");
    check(int'(n_none > 0), 1, "search without a flag happened");
    check(int'(n_init > 0 && n_write > 0), 1, "both load modes happened");
    check(int'(n_dval > 0), 1, "state values checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
