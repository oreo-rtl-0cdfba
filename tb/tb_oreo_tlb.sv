// tb_oreo_tlb: fills a small TLB and checks hits, the returned physical
// address and offset, 2 MiB entries, permission faults, round-robin
// eviction and flush. The Oreo property checked: two virtual addresses
// that differ only in protected bits hit the same entry once masked.
module tb_oreo_tlb;
  import oreo_pkg::*;

  localparam int E = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, flush = 0;
  va_t lk_wa = '0;
  acc_e lk_acc = ACC_READ;
  logic lk_user = 0, lk_hit, lk_fault;
  pa_t lk_pa;
  oreo_off_t lk_off;
  logic fill_valid = 0, fill_is2m = 0;
  va_t fill_wa = '0;
  ppn_t fill_ppn = '0;
  perm_t fill_perm = '0;
  oreo_off_t fill_off = '0;

  oreo_tlb #(.ENTRIES(E)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s hit=%b pa=%h off=%h f=%b", what, lk_hit, lk_pa, lk_off, lk_fault); end
  endtask

  task automatic fill(va_t wa, logic l, ppn_t ppn, perm_t p, oreo_off_t off);
    @(negedge clk);
    fill_valid = 1; fill_wa = wa; fill_is2m = l; fill_ppn = ppn; fill_perm = p; fill_off = off;
    @(negedge clk);
    fill_valid = 0;
  endtask

  localparam va_t K_MASK = 64'h7f_80000000;
  perm_t rx, rw, rwxu;

  initial begin
    rx   = '{w: 0, u: 0, x: 1};
    rw   = '{w: 1, u: 0, x: 0};
    rwxu = '{w: 1, u: 1, x: 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    lk_wa = 64'hffffff80_01800040; #1;
    check("empty misses", !lk_hit);
    fill(64'hffffff80_01800000, 0, 34'h1_2345, rx, 8'h0c);
    // two virtual addresses differing in protected bits, masked
    lk_wa = 64'hffffff86_01800040 & ~K_MASK; lk_acc = ACC_EXEC; #1;
    check("valid va hits", lk_hit && lk_pa == {34'h1_2345, 12'h040} && lk_off == 8'h0c && !lk_fault);
    lk_wa = 64'hffffffa2_01800abc & ~K_MASK; #1;
    check("invalid va hits same entry", lk_hit && lk_pa == {34'h1_2345, 12'habc} && lk_off == 8'h0c);
    lk_acc = ACC_WRITE; #1;
    check("write to read-only faults", lk_hit && lk_fault);
    lk_acc = ACC_READ; lk_user = 1; #1;
    check("user access to kernel page faults", lk_fault);
    lk_user = 0; lk_wa = 64'hffffff80_01801000; #1;
    check("neighbouring page misses", !lk_hit);
    // 2 MiB page
    fill(64'hffffff80_02000000, 1, 34'h0_0400, rw, 8'h33);
    lk_wa = 64'hffffff80_021abcde; lk_acc = ACC_READ; #1;
    check("2M page hit", lk_hit && lk_pa == {25'h0_0002, 21'h1abcde} && lk_off == 8'h33);
    lk_acc = ACC_EXEC; #1;
    check("2M page no-exec faults", lk_fault);
    lk_wa = 64'hffffff80_02200000; #1;
    check("past 2M page misses", !lk_hit);
    fill(64'h00000000_00400000, 0, 34'h0_0077, rwxu, 8'h00);
    fill(64'h00000000_00401000, 0, 34'h0_0078, rwxu, 8'h00);
    lk_wa = 64'h00000000_00401008; lk_user = 1; lk_acc = ACC_WRITE; #1;
    check("user page", lk_hit && !lk_fault && lk_pa == {34'h0_0078, 12'h008});
    // fifth fill evicts the first one (round robin)
    fill(64'h00000000_00402000, 0, 34'h0_0079, rwxu, 8'h01);
    lk_wa = 64'hffffff80_01800040; lk_user = 0; lk_acc = ACC_EXEC; #1;
    check("oldest entry evicted", !lk_hit);
    lk_wa = 64'hffffff80_02000040; lk_acc = ACC_READ; #1;
    check("second entry kept", lk_hit && lk_off == 8'h33);
    lk_wa = 64'h00000000_00402000; #1;
    check("new entry", lk_hit && lk_off == 8'h01);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0; #1;
    check("flush", !lk_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
