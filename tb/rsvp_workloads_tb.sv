// rsvp_workloads_tb -- the three applications of the RSVP processor, run on a
// 64-word processor with 9-bit addresses (A8..A1 data, A0 flag).
//
//   keyword search  64 distinct random 8-bit keywords are loaded in random
//                   order. For a target keyword the diagram is: NOT every bit
//                   where the target has a 0 (one step), NOT f controlled by
//                   all eight bits (one step), undo the first step. The flag
//                   must rise in exactly the word holding the target, the
//                   locator must report it in index+1 cycles, and an absent
//                   keyword must flag nothing. Three steps for any number of
//                   words: the search time does not grow with the database.
//   SAT             random 3-variable CNF formulas with four clauses. Each
//                   clause is computed into its own ancilla bit (set it, NOT
//                   the positive variables, NOT the ancilla controlled by the
//                   clause's variables, undo), f is set by a NOT controlled by
//                   all ancillas, and the clause steps are then repeated in
//                   reverse order to return the ancillas to 0. f must equal
//                   the formula, checked by brute force here; the locator
//                   visits every satisfying word.
//   global properties  every word is loaded with its own 6-bit index, f is
//                   built from single- and double-controlled NOTs, and the
//                   flags are read out; a post-processor in this file
//                   derives the anti-symmetry code (bit k set when every
//                   block of 2^k entries has its second half equal to the
//                   complement of its first half) and compares it with the
//                   code of the same function computed in software.
module rsvp_workloads_tb;
  localparam int unsigned NBITS  = 9;
  localparam int unsigned NWORDS = 64;
  localparam int unsigned DEPTH  = 32;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned NC     = NBITS + 2;
  localparam int unsigned WAW    = 6;
  localparam int unsigned AW     = 5;
  localparam int unsigned LW     = 6;
  localparam int unsigned REF    = NBITS;
  localparam int unsigned F      = 0;

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

  rsvp_top #(.NBITS(NBITS), .NWORDS(NWORDS), .DEPTH(DEPTH), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_kw_hit = 0, n_kw_miss = 0, n_sat = 0, n_unsat = 0, n_gp = 0;
  logic [NC-1:0] pfm [$], pto [$];

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [NC-1:0] bitv(input int unsigned b);
    return NC'(1) << b;
  endfunction

  task automatic add_step(input logic [NC-1:0] f, input logic [NC-1:0] t);
    pfm.push_back(f); pto.push_back(t);
  endtask

  // load the diagram, run it, check one step per cycle
  task automatic run_program(input logic rev);
    int n, cyc;
    n = pfm.size();
    foreach (pfm[k]) begin
      prog_we = 1'b1; prog_addr = AW'(k); prog_fm = pfm[k]; prog_to = pto[k];
      @(negedge clk);
    end
    prog_we = 1'b0;
    start = 1'b1; reverse = rev; len = LW'(n);
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (busy && cyc <= DEPTH) begin @(negedge clk); cyc++; end
    check(cyc, n, "steps take one cycle each");
  endtask

  task automatic write_word(input int w, input logic [NC-1:0] v);
    wr_en = 1'b1; wr_addr = WAW'(w); wr_data = v;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  // shift all flags out; list of words found and cycles from capture to first find
  task automatic locate_all(output int found_list [$], output int first_cycles);
    int cyc;
    found_list = {};
    first_cycles = -1;
    loc_start = 1'b1; @(negedge clk); loc_start = 1'b0;
    cyc = 0;
    forever begin
      @(negedge clk); cyc++;
      loc_next = 1'b0;
      if (loc_found) begin
        found_list.push_back(int'(loc_index));
        if (first_cycles < 0) first_cycles = cyc;
        loc_next = 1'b1;
      end
      if (loc_done || cyc > 4 * NWORDS) break;
    end
    loc_next = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] keys [NWORDS];
    int fl [$];
    int c1;
    {wr_en, init_count, prog_we, start, reverse, d_we, loc_start, loc_next} = '0;
    wr_addr = '0; rd_addr = '0; d_addr = '0; d_raddr = '0; wr_data = '0;
    prog_fm = '0; prog_to = '0; prog_addr = '0; len = '0; d_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---------------- keyword search ----------------
    begin
      bit used [256];
      for (int w = 0; w < NWORDS; w++) begin
        logic [7:0] k;
        do k = 8'($urandom); while (used[k]);
        used[k] = 1'b1;
        keys[w] = k;
        write_word(w, {1'b0, 1'b1, k, 1'b0});
      end
      for (int s = 0; s < 24; s++) begin
        logic [7:0] target;
        logic [NC-1:0] zeros, all;
        int expect_w;
        if (s % 3 == 2) begin
          do target = 8'($urandom); while (used[target]);
          expect_w = -1;
        end else begin
          expect_w = int'($urandom_range(0, NWORDS - 1));
          target = keys[expect_w];
        end
        zeros = {2'b00, ~target, 1'b0};
        all   = {2'b00, 8'hff, 1'b0};
        pfm = {}; pto = {};
        if (zeros != '0) add_step(bitv(REF), zeros);
        add_step(all, bitv(F));
        if (zeros != '0) add_step(bitv(REF), zeros);
        run_program(1'b0);
        for (int w = 0; w < NWORDS; w++) begin
          check(int'(flags[w]), int'(w == expect_w), $sformatf("keyword %0h flag of word %0d", target, w));
          rd_addr = WAW'(w); #1;
          check(int'(rd_data[8:1]), int'(keys[w]), "keywords unchanged by the search");
        end
        @(negedge clk);
        locate_all(fl, c1);
        if (expect_w >= 0) begin
          check(fl.size(), 1, "one word found");
          if (fl.size() == 1) check(fl[0], expect_w, "found the keyword's word");
          check(c1, expect_w + 1, "located after index+1 cycles");
          n_kw_hit++;
        end else begin
          check(fl.size(), 0, "absent keyword not found");
          n_kw_miss++;
        end
        run_program(1'b1);   // clear the flag again
        check(int'(flags != '0), 0, "flags cleared by running the search in reverse");
      end
    end

    // ---------------- SAT ----------------
    // x2, x1, x0 = A8, A7, A6; clause ancillas c3..c0 = A5..A2; f = A0
    for (int s = 0; s < 30; s++) begin
      logic [2:0] lit_use [4];   // variable appears in the clause
      logic [2:0] lit_pos [4];   // ... and appears un-negated
      logic [NC-1:0] cfm [$], cto [$];
      int nsol;
      for (int j = 0; j < 4; j++) begin
        do lit_use[j] = 3'($urandom); while (lit_use[j] == 0);
        lit_pos[j] = 3'($urandom) & lit_use[j];
      end
      for (int w = 0; w < NWORDS; w++)
        write_word(w, {1'b0, 1'b1, 3'(w % 8), 4'b0000, 1'b0, 1'b0});
      cfm = {}; cto = {};
      for (int j = 0; j < 4; j++) begin
        logic [NC-1:0] posv, usev, anc;
        posv = NC'(lit_pos[j]) << 6;
        usev = NC'(lit_use[j]) << 6;
        anc  = bitv(2 + j);
        cfm.push_back(bitv(REF)); cto.push_back(posv | anc);   // c = 1, negate positive literals
        cfm.push_back(usev);      cto.push_back(anc);          // c = 0 if every literal false
        if (posv != '0) begin
          cfm.push_back(bitv(REF)); cto.push_back(posv);       // restore the variables
        end
      end
      pfm = {}; pto = {};
      foreach (cfm[k]) add_step(cfm[k], cto[k]);
      add_step(NC'(4'hf) << 2, bitv(F));                       // f = c3 & c2 & c1 & c0
      for (int k = cfm.size() - 1; k >= 0; k--) add_step(cfm[k], cto[k]);  // uncompute
      run_program(1'b0);
      nsol = 0;
      for (int w = 0; w < NWORDS; w++) begin
        logic [2:0] x;
        bit sat;
        x = 3'(w % 8);
        sat = 1'b1;
        for (int j = 0; j < 4; j++)
          if (((x & lit_pos[j]) | (~x & lit_use[j] & ~lit_pos[j])) == 0) sat = 1'b0;
        if (sat) nsol++;
        rd_addr = WAW'(w); #1;
        check(int'(rd_data), int'({1'b0, 1'b1, x, 4'b0000, 1'b0, sat}),
              $sformatf("SAT %0d word %0d", s, w));
      end
      @(negedge clk);
      locate_all(fl, c1);
      check(fl.size(), nsol, "every satisfying word visited");
      if (nsol > 0) n_sat++; else n_unsat++;
    end

    // ---------------- global properties ----------------
    for (int g = 0; g < 6; g++) begin
      logic [NWORDS-1:0] sw;
      int unsigned code_hw, code_sw;
      init_count = 1'b1; @(negedge clk); init_count = 1'b0;
      pfm = {}; pto = {};
      sw = '0;
      if (g < 5) begin
        // f = parity of the lowest (6 - g) index bits (A1..A(6-g))
        for (int b = 1; b <= 6 - g; b++) add_step(bitv(b), bitv(F));
        for (int w = 0; w < NWORDS; w++) sw[w] = ^(6'(w) & 6'((1 << (6 - g)) - 1));
      end else begin
        // f = i5 & i4 xor i0
        add_step(bitv(6) | bitv(5), bitv(F));
        add_step(bitv(1), bitv(F));
        for (int w = 0; w < NWORDS; w++) sw[w] = (((w >> 5) & (w >> 4)) & 1) != ((w & 1) != 0);
      end
      run_program(1'b0);
      check(longint'(flags), longint'(sw), $sformatf("truth table %0d", g));
      code_hw = 0; code_sw = 0;
      for (int k = 1; k <= 6; k++) begin
        bit hw_anti, sw_anti;
        int half;
        half = 1 << (k - 1);
        hw_anti = 1'b1; sw_anti = 1'b1;
        for (int base = 0; base < NWORDS; base += 2 * half)
          for (int i = 0; i < half; i++) begin
            if (flags[base + i] == flags[base + half + i]) hw_anti = 1'b0;
            if (sw[base + i] == sw[base + half + i])       sw_anti = 1'b0;
          end
        code_hw |= int'(hw_anti) << (k - 1);
        code_sw |= int'(sw_anti) << (k - 1);
      end
      check(code_hw, code_sw, $sformatf("anti-symmetry code of function %0d", g));
      if (g == 0) check(code_hw, 6'b111111, "parity is anti-symmetric at every level");
      n_gp++;
    end

    $display("workloads: keyword hits %0d misses %0d, SAT satisfiable %0d unsatisfiable %0d, truth tables %0d",
             n_kw_hit, n_kw_miss, n_sat, n_unsat, n_gp);
    check(int'(n_kw_hit > 0 && n_kw_miss > 0), 1, "keyword hit and miss both seen");
    check(int'(n_sat > 0), 1, "satisfiable formula seen");
    check(int'(n_gp > 0), 1, "truth tables analysed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
