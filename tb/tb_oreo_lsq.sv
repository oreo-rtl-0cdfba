// tb_oreo_lsq: inserts load and store addresses with a TLB answer supplied
// by the testbench and checks the stored check bit (extracted protected
// bits equal to the correct offset), translation faults, that two
// addresses differing only in protected bits share one masked address in
// the dependence search (youngest older store wins, younger stores and
// other words do not match), squash and pop; then randomized rounds, up
// to a full queue, against a reference model of the dependence search and
// the check bit.
module tb_oreo_lsq;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  region_t regions [2];
  logic al_valid = 0, al_is_store = 0, al_ready;
  logic [5:0] al_idx;
  logic ad_valid = 0;
  logic [5:0] ad_idx = '0;
  va_t ad_va = '0, ad_wa;
  logic ad_is_store, ad_xlat_done = 0, ad_xlat_fault = 0, ad_accept;
  oreo_off_t ad_xlat_off = '0;
  logic fwd_hit;
  logic [5:0] fwd_idx;
  logic cm_valid, cm_addr_done, cm_check_ok, cm_fault, cm_pop = 0;
  logic [5:0] cm_idx;
  logic squash = 0, flush = 0;
  logic [5:0] squash_tail = '0;
  logic [6:0] count;

  oreo_lsq #(.N(2), .DEPTH(64)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [5:0] e [8];
  task automatic alloc(int k, logic st);
    @(negedge clk); al_valid = 1; al_is_store = st; #1 e[k] = al_idx;
    @(negedge clk); al_valid = 0;
  endtask

  // Present an address; the "TLB" returns offset 8'h0c for every page.
  task automatic addr(int k, va_t va, logic flt, output logic hit, output logic [5:0] fi);
    @(negedge clk); ad_valid = 1; ad_idx = e[k]; ad_va = va; ad_xlat_done = 1;
    ad_xlat_fault = flt; ad_xlat_off = 8'h0c;
    #1 hit = fwd_hit; fi = fwd_idx;
    check("accepted", ad_accept);
    @(negedge clk); ad_valid = 0; ad_xlat_done = 0;
  endtask

  // Randomized rounds against a reference model. Each round allocates a
  // random number of entries (up to a full queue, so the indices wrap),
  // presents their addresses in random order, and checks for every load the
  // youngest older store to the same masked word among those already
  // presented, then pops everything checking the stored check bit.
  task automatic random_rounds(int rounds);
    for (int r = 0; r < rounds; r++) begin
      int n;
      logic [5:0] idx [64];
      logic       st [64], done [64], ok [64];
      logic [1:0] word [64];
      int         order [64];
      n = 1 + int'($urandom_range(63));
      if (r % 5 == 4) n = 64;
      for (int k = 0; k < n; k++) begin
        @(negedge clk); al_valid = 1; al_is_store = 1'($urandom_range(1)); st[k] = al_is_store;
        #1 idx[k] = al_idx; check("room to allocate", al_ready);
        @(negedge clk); al_valid = 0;
        done[k] = 0;
        order[k] = k;
      end
      if (n == 64) begin #1 check("full queue refuses allocation", !al_ready && count == 64); end
      for (int k = n - 1; k > 0; k--) begin
        int j, t;
        j = int'($urandom_range(k)); t = order[k]; order[k] = order[j]; order[j] = t;
      end
      for (int o = 0; o < n; o++) begin
        int k, best;
        logic [7:0] bits, off;
        va_t va;
        k = order[o];
        word[k] = 2'($urandom_range(3));
        bits = 8'($urandom_range(221));            // stays below the region end
        off  = ($urandom_range(1) == 1) ? bits : 8'($urandom);
        ok[k] = (bits == off);
        va = 64'hffffff80_00100000 | (va_t'(word[k]) << 3) | va_t'($urandom_range(7))
             | (va_t'(bits) << 31);
        best = -1;
        for (int m = 0; m < k; m++) if (st[m] && done[m] && word[m] == word[k]) best = m;
        @(negedge clk); ad_valid = 1; ad_idx = idx[k]; ad_va = va; ad_xlat_done = 1;
        ad_xlat_fault = 0; ad_xlat_off = off;
        #1;
        if (!st[k]) check($sformatf("round %0d: dependence search for entry %0d", r, k),
                          best < 0 ? !fwd_hit : (fwd_hit && fwd_idx == idx[best]));
        @(negedge clk); ad_valid = 0; ad_xlat_done = 0;
        done[k] = 1;
      end
      for (int k = 0; k < n; k++) begin
        #1 check($sformatf("round %0d: head %0d check bit", r, k),
                 cm_valid && cm_idx == idx[k] && cm_addr_done && cm_check_ok == ok[k]);
        @(negedge clk); cm_pop = 1; @(negedge clk); cm_pop = 0;
      end
      check("empty after round", count == 0);
    end
  endtask

  logic h; logic [5:0] fi;
  initial begin
    regions[0] = '{start: 64'hffffff80_00000000, end_: 64'hffffffef_00000000, mask: 64'h7f_80000000};
    regions[1] = '{start: 64'h0, end_: 64'h0020_0000_0000_0000, mask: 64'h001f_0000_0000_0000};
    repeat (2) @(negedge clk);
    rst_n = 1;
    alloc(0, 1); alloc(1, 1); alloc(2, 0); alloc(3, 1); alloc(4, 0);
    check("count", count == 5);
    addr(0, 64'hffffff86_00100008, 0, h, fi);          // valid store
    addr(1, 64'hffffffa2_00100008, 0, h, fi);          // store, wrong protected bits
    addr(3, 64'hffffff86_00100008, 0, h, fi);          // younger store, same word
    // load with yet other protected bits: same masked word as stores 0 and 1
    @(negedge clk); ad_valid = 1; ad_idx = e[2]; ad_va = 64'hffffffee_0010000c; ad_xlat_done = 0;
    #1 check("held while TLB misses", !ad_accept);
    check("masked address to TLB", ad_wa == 64'hffffff80_0010000c);
    check("forward from youngest older store", fwd_hit && fwd_idx == e[1]);
    @(negedge clk); ad_xlat_done = 1; ad_xlat_off = 8'h0c; #1 check("accepted after fill", ad_accept);
    @(negedge clk); ad_valid = 0; ad_xlat_done = 0;
    addr(4, 64'hffffff86_00100010, 1, h, fi);           // other word, page fault
    check("no forward across words", !h);
    // commit side: entry 0 valid, entry 1 invalid, entry 2 invalid
    check("head 0 ok", cm_valid && cm_idx == e[0] && cm_addr_done && cm_check_ok && !cm_fault);
    @(negedge clk); cm_pop = 1; @(negedge clk); cm_pop = 0;
    check("head 1 bad bits", cm_addr_done && !cm_check_ok);
    @(negedge clk); cm_pop = 1; @(negedge clk); cm_pop = 0;
    check("head 2 bad bits", !cm_check_ok);
    // squash entries 3 and 4
    @(negedge clk); squash = 1; squash_tail = e[3]; @(negedge clk); squash = 0;
    check("squash count", count == 1);
    alloc(5, 0);
    check("slot reused", e[5] == e[3] && count == 2);
    addr(5, 64'h0000_0000_0040_0000, 0, h, fi);           // user, bits 48..52 zero; offset 0x0c -> bad
    @(negedge clk); cm_pop = 1; @(negedge clk); cm_pop = 0;
    check("user check fails with wrong offset", cm_idx == e[5] && !cm_check_ok);
    @(negedge clk); ad_valid = 1; ad_idx = e[5]; ad_va = 64'h000c_0000_0040_0000; ad_xlat_done = 1;
    ad_xlat_off = 8'h0c; @(negedge clk); ad_valid = 0;
    check("user check passes", cm_check_ok && cm_addr_done && !cm_fault);
    @(negedge clk); cm_pop = 1; @(negedge clk); cm_pop = 0;
    check("empty", count == 0 && !cm_valid);
    // page fault recorded
    alloc(6, 0);
    addr(6, 64'hffffff86_00200000, 1, h, fi);
    check("fault recorded", cm_fault);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    check("flush", count == 0);
    random_rounds(30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
