// tb_oreo_aslr_probe: the three ASLR-bypass experiments, run on the whole
// core at its default sizes, checking that the protected bits leave no
// trace in the structures an attacker can time.
//
//  1. Prefetch scan. A user program probes the kernel randomization region
//     0xffffff8000000000..0xffffffef00000000 with a 2 GiB stride (222
//     probes), each probe issuing the same load twice under a branch that
//     later squashes it, and timing the second one. On a core without Oreo
//     only the mapped slot would hit in the D-TLB. Here every probe folds
//     onto one masked address: after the very first probe all 2 x 222
//     translations hit, take the same number of cycles, return the same
//     physical address and the same permission result, and the scan starts
//     exactly one page walk.
//  2. Transient jump to a kernel function pointer (BlindSide-style code
//     probing). Inside the kernel a mispredicted branch is followed by an
//     indirect call whose resolved target is the pointer; fetch runs there
//     until the branch squashes it. The run is done twice from reset, once
//     with the correct protected bits in the pointer and once with wrong
//     ones, and a per-cycle trace of every input to the I-TLB, D-TLB, the
//     walker's memory port and the fetch physical address is recorded. The
//     two traces must be identical.
//  3. System call. A user program traps into the kernel, the kernel loads
//     from its data, and returns. The run is done from reset with two
//     different kernel offsets (page tables identical except for the
//     offset field of the leaf PTEs). The per-cycle traces must again be
//     identical: no walker address and no TLB lookup depends on the
//     offset. Architecturally the two runs differ (ArchPC does).
//  4. Page-granularity randomization. Two kernel data pages carry
//     different offsets in their PTEs; loads with each page's own bits
//     commit, and a load using the other page's bits gets the same
//     translation but fails the check at commit.
// Throughout, a monitor checks that no address presented to a TLB or to
// the walker carries a protected bit inside its region.
//
// The probe sizes (444 GiB region, 2 GiB stride, bits 31..38) are the
// ones of the published prefetch experiment; everything about the program
// driving the core is this testbench's own.
module tb_oreo_aslr_probe;
  import oreo_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  pa_t  cr3 = 46'h1000;
  logic user_mode = 0, tlb_flush = 0;
  va_t  trap_vec = '0;
  logic cfg_we = 0;
  logic [0:0] cfg_idx = '0;
  region_t cfg_data = '0;
  logic [3:0] if_size = '0;
  logic bp_taken = 0, dec_redirect = 0;
  va_t bp_target = '0, dec_pc = '0, dec_imm = '0;
  va_t if_pc;
  logic if_valid, if_stall, if_fault;
  pa_t if_pa;
  oreo_off_t if_off;
  logic disp_valid = 0, disp_is_mem = 0, disp_is_store = 0, disp_ready;
  oreo_off_t disp_pc_off = '0;
  npc_e disp_npc = NPC_SEQ;
  logic [3:0] disp_size = '0;
  va_t disp_imm = '0;
  logic [7:0] disp_rob_idx;
  logic [5:0] disp_lsq_idx;
  logic ad_valid = 0, ad_accept, ad_fault, fwd_hit;
  logic [5:0] ad_idx = '0, fwd_idx;
  va_t ad_va = '0, ad_wa;
  pa_t ad_pa;
  logic cmp_valid = 0, cmp_other_exc = 0, cmp_taken = 0, ex_redirect = 0;
  logic [7:0] cmp_idx = '0, ex_squash_rob_idx = '0;
  va_t cmp_target = '0, ex_target = '0;
  logic [5:0] ex_squash_lsq_tail = '0;
  logic commit_valid, exc_valid;
  va_t archpc, exc_pc;
  exc_e exc_cause;
  logic mem_req_valid, mem_req_ready, mem_resp_valid = 0;
  pa_t mem_req_addr;
  logic [63:0] mem_resp_data = '0;

  oreo_core dut (.*);

  always #5 clk = ~clk;

  localparam va_t K_START = 64'hffffff80_00000000;
  localparam va_t K_END   = 64'hffffffef_00000000;
  localparam va_t K_MASK  = 64'h0000007f_80000000;
  localparam va_t U_END   = 64'h00200000_00000000;
  localparam va_t U_MASK  = 64'h001f0000_00000000;
  // masked kernel addresses (protected bits 31..38 clear)
  localparam va_t KW_TEXT  = 64'hffffff80_01800000;  // kernel text page
  localparam va_t KW_ENTRY = 64'hffffff80_01800800;  // system-call entry
  localparam va_t KW_FUNC  = 64'hffffff80_01a00000;  // probed function
  localparam va_t KW_DATA  = 64'hffffff80_01c00040;  // kernel data word
  localparam va_t KW_DATA2 = 64'hffffff80_01c01040;  // next data page
  localparam va_t UT       = 64'h0005_0000_0040_0000; // user text, bits 48..52 = 5

  function automatic va_t kva(va_t wa, logic [7:0] off);
    return wa | (va_t'(off) << 31);
  endfunction

  // ---------------------------------------------------------------- memory
  logic [63:0] mem [pa_t];
  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    mem_resp_valid <= mem_req_valid;
    if (mem_req_valid) mem_resp_data <= mem.exists(mem_req_addr) ? mem[mem_req_addr] : 64'h0;
  end

  function automatic logic [63:0] pte(pa_t base, logic [7:0] off, logic w, logic u, logic nx);
    return {nx, 4'b0, off, 5'b0, base[PA_W-1:12], 12'b0} | {61'b0, u, w, 1'b1};
  endfunction

  pa_t next_table;
  task automatic map(va_t wa, pa_t pa, logic [7:0] off, logic w, logic u, logic nx);
    pa_t t;
    logic [8:0] ix [4];
    ix[3] = wa[47:39]; ix[2] = wa[38:30]; ix[1] = wa[29:21]; ix[0] = wa[20:12];
    t = cr3;
    for (int l = 3; l >= 1; l--) begin
      pa_t a;
      a = t + pa_t'(ix[l]) * 8;
      if (!mem.exists(a)) begin
        mem[a] = pte(next_table, 8'h0, 1, 1, 0);
        next_table += 46'h1000;
      end
      t = {mem[a][PA_W-1:12], 12'b0};
    end
    mem[t + pa_t'(ix[0]) * 8] = pte(pa, off, w, u, nx);
  endtask

  // ---------------------------------------------------------------- monitors
  typedef struct packed {
    va_t  if_pc;
    logic if_valid, if_stall;
    pa_t  if_pa;
    logic ad_valid;
    va_t  ad_wa;
    logic ad_accept, ad_fault;
    pa_t  ad_pa;
    logic mem_req_valid;
    pa_t  mem_req_addr;
  } trace_t;

  logic   trace_on = 0;
  trace_t trace [$];
  int n_commit, n_exc, n_walk, n_obs, n_leak;
  exc_e last_cause;

  function automatic logic leaks(va_t a);
    if (a >= K_START && a < K_END) return (a & K_MASK) != 0;
    if (a < U_END)                 return (a & U_MASK) != 0;
    return 1'b0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (commit_valid) n_commit++;
    if (exc_valid) begin n_exc++; last_cause = exc_cause; end
    if (dut.ptw_resp_valid) n_walk++;
    n_obs++;
    if (leaks(if_pc) || (ad_valid && leaks(ad_wa)) || leaks(dut.ptw_req_wa)) begin
      n_leak++;
      if (n_leak <= 5) $display("FAIL protected bits visible: if_pc=%h ad_wa=%h", if_pc, ad_wa);
    end
    if (trace_on)
      trace.push_back('{if_pc, if_valid, if_stall, if_valid ? if_pa : '0, ad_valid,
                        ad_valid ? ad_wa : '0, ad_accept, ad_accept && ad_fault,
                        ad_accept ? ad_pa : '0, mem_req_valid,
                        mem_req_valid ? mem_req_addr : '0});
  end

  // ---------------------------------------------------------------- driver
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (archpc=%h if_pc=%h)", what, archpc, if_pc); end
  endtask

  logic [5:0] lsq_tail;

  task automatic fetch(output oreo_off_t off);
    int guard = 0;
    while (!(if_valid || if_fault) && guard < 100) begin @(negedge clk); guard++; end
    check("fetch completes", if_valid);
    off = if_off;
  endtask

  task automatic dispatch(oreo_off_t off, npc_e npc, logic [3:0] sz, va_t imm, logic m,
                          output logic [7:0] ri, output logic [5:0] li);
    disp_valid = 1; disp_pc_off = off; disp_npc = npc; disp_size = sz; disp_imm = imm;
    disp_is_mem = m; disp_is_store = 0;
    #1 while (!disp_ready) begin @(negedge clk); #1; end
    ri = disp_rob_idx; li = disp_lsq_idx;
    @(negedge clk); disp_valid = 0;
    if (m) lsq_tail = li + 1'b1;
  endtask

  // Present a load address; returns the cycles spent waiting for the D-TLB.
  task automatic address(logic [5:0] li, va_t va, output pa_t pa, output logic flt,
                         output int waited);
    waited = 0;
    ad_valid = 1; ad_idx = li; ad_va = va;
    #1 while (!ad_accept && waited < 100) begin @(negedge clk); #1; waited++; end
    pa = ad_pa; flt = ad_fault;
    @(negedge clk); ad_valid = 0;
  endtask

  task automatic complete(logic [7:0] ri, logic oexc, logic tk, va_t tgt);
    cmp_valid = 1; cmp_idx = ri; cmp_other_exc = oexc; cmp_taken = tk; cmp_target = tgt;
    @(negedge clk); cmp_valid = 0; cmp_other_exc = 0;
  endtask

  task automatic redirect(va_t tgt, logic [7:0] keep_ri, logic [5:0] keep_tail);
    ex_redirect = 1; ex_target = tgt; ex_squash_rob_idx = keep_ri; ex_squash_lsq_tail = keep_tail;
    @(negedge clk); ex_redirect = 0;
    lsq_tail = keep_tail;
  endtask

  // Reset the core and build page tables for kernel offset `koff`.
  task automatic boot(logic [7:0] koff, logic usr);
    rst_n = 0; user_mode = usr; lsq_tail = '0;
    mem.delete(); next_table = 46'h2000;
    trap_vec = kva(KW_ENTRY, koff);
    map('0,       46'h100000, 8'h00, 0, 1, 0);
    map(KW_TEXT,  46'h200000, koff,  0, 0, 0);
    map(KW_FUNC,  46'h210000, koff,  0, 0, 0);
    map(KW_DATA & ~64'hfff, 46'h220000, koff, 1, 0, 1);
    map(UT & ~U_MASK, 46'h300000, 8'h05, 0, 1, 0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    cfg_we = 1; cfg_idx = 0; cfg_data = '{start: K_START, end_: K_END, mask: K_MASK};
    @(negedge clk); cfg_idx = 1; cfg_data = '{start: '0, end_: U_END, mask: U_MASK};
    @(negedge clk); cfg_we = 0;
    n_commit = 0; n_exc = 0; n_walk = 0;
  endtask

  // Boot stub at VA 0 jumps to `tgt` and the jump commits.
  task automatic jump_from_stub(va_t tgt);
    oreo_off_t off; logic [7:0] r; logic [5:0] l;
    fetch(off);
    dispatch(off, NPC_INDIR, 4'd5, '0, 0, r, l);
    complete(r, 0, 1, tgt);
    redirect(tgt, r, lsq_tail);
  endtask

  // ---------------------------------------------------------------- experiments
  trace_t tr_a [$], tr_b [$];

  function automatic logic same_trace();
    if (tr_a.size() != tr_b.size()) return 1'b0;
    foreach (tr_a[i]) if (tr_a[i] !== tr_b[i]) return 1'b0;
    return 1'b1;
  endfunction

  // System call from user space, kernel load, return.
  task automatic syscall_run(logic [7:0] koff);
    oreo_off_t off; logic [7:0] r0, r1; logic [5:0] l0, l1; pa_t pa; logic flt; int w;
    boot(koff, 0);
    jump_from_stub(UT);
    trace.delete(); trace_on = 1;
    fetch(off);
    dispatch(off, NPC_SEQ, 4'd2, '0, 0, r0, l0);          // syscall instruction
    complete(r0, 1, 0, '0);                           // traps at commit
    repeat (2) @(negedge clk);
    check("syscall entered the kernel", n_exc == 1 && last_cause == EXC_OTHER
          && archpc == kva(KW_ENTRY, koff));
    fetch(off);
    check("kernel entry offset from I-TLB", off == koff);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, r0, l0);          // load kernel data
    address(l0, kva(KW_DATA, koff), pa, flt, w);
    check("kernel load translated", pa == 46'h220040 && !flt);
    complete(r0, 0, 0, '0);
    if_size = 4'd4; @(negedge clk); if_size = '0;
    fetch(off);
    dispatch(off, NPC_INDIR, 4'd3, '0, 0, r1, l1);        // sysret
    complete(r1, 0, 1, UT + 64'h10);
    redirect(UT + 64'h10, r1, lsq_tail);
    fetch(off);
    repeat (3) @(negedge clk);
    trace_on = 0;
    check("returned to user space", archpc == UT + 64'h10 && n_exc == 1 && n_commit >= 3);
  endtask

  // Transient indirect call to `ptr` under a mispredicted branch, in the kernel.
  task automatic transient_run(va_t ptr);
    oreo_off_t off; logic [7:0] rb, rc, rx; logic [5:0] l;
    boot(8'h0c, 0);
    jump_from_stub(kva(KW_TEXT, 8'h0c));
    trace.delete(); trace_on = 1;
    fetch(off);
    dispatch(off, NPC_DIRECT, 4'd2, 64'h80, 0, rb, l);        // branch, predicted not taken
    if_size = 4'd2; @(negedge clk); if_size = '0;
    fetch(off);
    dispatch(off, NPC_INDIR, 4'd3, '0, 0, rc, l);         // call through the pointer
    complete(rc, 0, 1, ptr);
    redirect(ptr, rc, lsq_tail);                      // transient jump
    fetch(off);
    dispatch(off, NPC_SEQ, 4'd4, '0, 0, rx, l);           // gadget's first instruction
    if_size = 4'd4; @(negedge clk); if_size = '0;
    complete(rb, 0, 1, kva(KW_TEXT, 8'h0c) + 64'h80);
    redirect(kva(KW_TEXT, 8'h0c) + 64'h80, rb, lsq_tail); // branch was taken: squash
    fetch(off);
    repeat (3) @(negedge clk);
    trace_on = 0;
    check("transient path squashed without exception",
          n_exc == 0 && n_commit == 2 && archpc == kva(KW_TEXT, 8'h0c) + 64'h80);
  endtask

  // Prefetch-style scan of the kernel region from user space.
  int  n_probe, n_probe_hit, n_first_walk;
  task automatic prefetch_scan();
    oreo_off_t off; logic [7:0] rb, rx; logic [5:0] l1, l2, keep; pa_t pa1, pa2, pa_ref;
    logic f1, f2, f_ref; int w1, w2, walks0;
    va_t base;
    boot(8'h0c, 1);
    jump_from_stub(UT);
    fetch(off);
    walks0 = n_walk;
    base = K_START + 64'h0180_0040;
    for (int i = 0; base + (va_t'(i) << 31) < K_END; i++) begin
      va_t a;
      a = base + (va_t'(i) << 31);
      keep = lsq_tail;
      dispatch(off, NPC_DIRECT, 4'd2, '0, 0, rb, l1); // branch, resolved later
      dispatch(off, NPC_SEQ, 4'd4, '0, 1, rx, l1);    // first prefetch
      dispatch(off, NPC_SEQ, 4'd4, '0, 1, rx, l2);    // second prefetch
      address(l1, a, pa1, f1, w1);
      address(l2, a, pa2, f2, w2);
      if (i == 0) begin
        pa_ref = pa2; f_ref = f2;
        n_first_walk = n_walk - walks0;
        check("first probe needed a walk", w1 > 0);
      end
      n_probe++;
      if (w2 == 0) n_probe_hit++;
      check($sformatf("probe %0d: second access hits", i), w2 == 0);
      check($sformatf("probe %0d: first access hits after probe 0", i), i == 0 || w1 == 0);
      check($sformatf("probe %0d: same translation and permission result", i),
            pa2 == pa_ref && f2 == f_ref && pa1 == pa2);
      // the branch resolves and squashes both probes
      complete(rb, 0, 1, UT);
      redirect(UT, rb, keep);
      fetch(off);
    end
    check("scan covered the region with 222 probes", n_probe == 222);
    check("whole scan started exactly one data walk", n_walk - walks0 == 1);
    check("no probe reached commit", n_exc == 0);
  endtask

  // Page-granularity randomization: two kernel data pages with different
  // offsets; each commits with its own bits, and not with the other's.
  task automatic per_page_run();
    oreo_off_t off; logic [7:0] r; logic [5:0] l; pa_t pa, pa_bad; logic flt; int w;
    boot(8'h0c, 0);
    map(KW_DATA2 & ~64'hfff, 46'h230000, 8'h3e, 1, 0, 1);
    jump_from_stub(kva(KW_TEXT, 8'h0c));
    fetch(off);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, r, l);
    address(l, kva(KW_DATA, 8'h0c), pa, flt, w);
    complete(r, 0, 0, '0);
    if_size = 4'd4; @(negedge clk); if_size = '0;
    fetch(off);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, r, l);
    address(l, kva(KW_DATA2, 8'h3e), pa, flt, w);
    check("second page translated with its own offset", pa == 46'h230040 && !flt);
    complete(r, 0, 0, '0);
    repeat (2) @(negedge clk);
    check("both pages commit with their own offsets", n_exc == 0 && n_commit == 3);
    if_size = 4'd4; @(negedge clk); if_size = '0;
    fetch(off);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, r, l);
    address(l, kva(KW_DATA2, 8'h0c), pa_bad, flt, w);
    check("first page's offset on the second page: same translation", pa_bad == pa && !flt);
    complete(r, 0, 0, '0);
    repeat (2) @(negedge clk);
    check("first page's offset on the second page fails at commit",
          n_exc == 1 && last_cause == EXC_LS_CHECK);
  endtask

  initial begin
    // 1. prefetch scan
    prefetch_scan();

    // 2. transient jump, valid vs invalid protected bits in the pointer
    transient_run(kva(KW_FUNC, 8'h0c));
    tr_a = trace;
    transient_run(kva(KW_FUNC, 8'h0d));
    tr_b = trace;
    check("transient jump traces identical for valid and invalid pointer", same_trace());
    check("transient trace shows the walk to the probed page",
          tr_a.size() > 10 && tr_a.find_first with (item.mem_req_valid).size() > 0);

    // 3. system call with two kernel offsets
    syscall_run(8'h0c);
    tr_a = trace;
    syscall_run(8'h5a);
    tr_b = trace;
    check("system call traces identical for two kernel offsets", same_trace());
    check("system call trace shows walks", tr_a.find_first with (item.mem_req_valid).size() > 0);

    // 4. per-page offsets
    per_page_run();

    check("no protected bit reached a TLB or the walker", n_leak == 0 && n_obs > 1000);
    $display("probes=%0d hits_on_second=%0d walks_on_first=%0d trace_len=%0d observed_cycles=%0d",
             n_probe, n_probe_hit, n_first_walk, tr_a.size(), n_obs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
