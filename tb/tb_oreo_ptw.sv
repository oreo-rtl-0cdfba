// tb_oreo_ptw: a behavioural page-table memory answers the walker's reads
// one cycle after each request. The test builds a four-level table for a
// masked kernel address (4 KiB leaf with an offset in bits 58..51), a
// 2 MiB leaf and a hole, and checks the returned translation, the offset,
// the permissions, the PTE addresses read, the number of reads (4, 3, and
// up to the missing level) and the cycle count of a walk (2 per level + 1).
module tb_oreo_ptw;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  pa_t cr3 = 46'h1000;
  logic req_valid = 0, req_ready;
  va_t req_wa = '0;
  logic resp_valid, resp_fault, resp_is2m;
  va_t resp_wa;
  ppn_t resp_ppn;
  perm_t resp_perm;
  oreo_off_t resp_off;
  logic mem_req_valid, mem_req_ready, mem_resp_valid = 0;
  pa_t mem_req_addr;
  logic [63:0] mem_resp_data = '0;

  oreo_ptw dut (.*);

  always #5 clk = ~clk;

  logic [63:0] mem [pa_t];
  int reads;
  pa_t last_addr [4];

  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    mem_resp_valid <= mem_req_valid;
    if (mem_req_valid) begin
      mem_resp_data <= mem.exists(mem_req_addr) ? mem[mem_req_addr] : 64'h0;
      if (reads < 4) last_addr[reads] = mem_req_addr;
      reads++;
    end
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] pte(pa_t base, logic [7:0] off, logic w, logic u, logic nx, logic ps);
    return {nx, 4'b0, off, 5'b0, base[PA_W-1:12], 12'b0} | {56'b0, ps, 4'b0, u, w, 1'b1};
  endfunction

  task automatic walk(va_t wa, output int cycles);
    reads = 0;
    @(negedge clk); req_valid = 1; req_wa = wa;
    cycles = 0;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) begin @(negedge clk); cycles++; end
  endtask

  va_t kva;
  int cyc;
  initial begin
    // masked kernel address ffffff80_01800040: indices 511, 0, 12, 0
    kva = 64'hffffff80_01800040;
    mem[46'h1000 + 511 * 8] = pte(46'h2000, 8'h0, 1, 0, 0, 0);
    mem[46'h2000 + 0 * 8]   = pte(46'h3000, 8'h0, 1, 0, 0, 0);
    mem[46'h3000 + 12 * 8]  = pte(46'h4000, 8'h0, 1, 0, 0, 0);
    mem[46'h4000 + 0 * 8]   = pte(46'h12345000, 8'h0c, 0, 0, 0, 0);
    // 2 MiB leaf at level 2 index 13
    mem[46'h3000 + 13 * 8]  = pte(46'h40000000, 8'h5a, 1, 0, 1, 1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("ready after reset", req_ready);
    walk(kva, cyc);
    check("4K leaf found", !resp_fault && !resp_is2m && resp_ppn == 34'h12345);
    check("offset from PTE", resp_off == 8'h0c);
    check("permissions ANDed", resp_perm == '{w: 0, u: 0, x: 1});
    check("4 reads", reads == 4);
    check("PTE addresses", last_addr[0] == 46'h1000 + 511 * 8 && last_addr[1] == 46'h2000
                           && last_addr[2] == 46'h3000 + 96 && last_addr[3] == 46'h4000);
    check("walk latency", cyc == 8);
    check("masked address returned", resp_wa == kva);
    @(negedge clk);
    check("back to idle", req_ready && !resp_valid);
    walk(64'hffffff80_01a12345, cyc);
    check("2M leaf", !resp_fault && resp_is2m && resp_ppn[PPN_W-1:9] == 25'h200 && resp_off == 8'h5a);
    check("2M perms", resp_perm == '{w: 1, u: 0, x: 0});
    check("3 reads", reads == 3 && cyc == 6);
    walk(64'hffffff80_01c00000, cyc);
    check("hole faults", resp_fault && reads == 3);
    walk(64'h00000000_00400000, cyc);
    check("empty root entry faults", resp_fault && reads == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
