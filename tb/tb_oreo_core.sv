// tb_oreo_core: end-to-end run of the Oreo address path at its default
// sizes (192-entry ROB, 64-entry LSQ, 64-entry TLBs, two regions).
//
// A behavioural page-table memory answers walker reads after one cycle.
// The page tables map masked addresses only; every leaf PTE holds the
// correct offset. The testbench plays the part of the front end and the
// execution core: it fetches one instruction at a time (if_size = 0 holds
// the fetch PC, a non-zero size advances it), dispatches it with the offset
// the I-TLB returned, presents load/store addresses, completes
// instructions and resolves branches. The scripted program walks through:
//   boot stub in user space jumping to kernel text; a store and a load to
//   the same word in flight (dependence found on masked addresses); a
//   mispredicted branch under which a load with wrong protected bits
//   executes, gets the same physical address as the valid one and is
//   squashed without any exception; a committed load with wrong protected
//   bits (load/store check exception); a jump to a PC with wrong protected
//   bits (PC check exception); a baseline exception on such a PC (baseline
//   exception wins); a load to an unmapped page (walker page fault); and a
//   return to a valid user page.
// Each mechanism is counted; one that never happened is a failure.
module tb_oreo_core;
  import oreo_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  pa_t  cr3 = 46'h1000;
  logic user_mode = 0, tlb_flush = 0;
  va_t  trap_vec;
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

  // ---------------------------------------------------------------- memory
  logic [63:0] mem [pa_t];
  int walks_reads;
  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    mem_resp_valid <= mem_req_valid;
    if (mem_req_valid) begin
      mem_resp_data <= mem.exists(mem_req_addr) ? mem[mem_req_addr] : 64'h0;
      walks_reads++;
    end
  end

  function automatic logic [63:0] pte(pa_t base, logic [7:0] off, logic w, logic u, logic nx, logic ps);
    return {nx, 4'b0, off, 5'b0, base[PA_W-1:12], 12'b0} | {56'b0, ps, 4'b0, u, w, 1'b1};
  endfunction

  pa_t next_table = 46'h2000;
  // Map masked address wa (4 KiB, or 2 MiB if ps) to physical page pa.
  task automatic map(va_t wa, pa_t pa, logic [7:0] off, logic w, logic u, logic nx, logic ps);
    pa_t t;
    logic [8:0] ix [4];
    ix[3] = wa[47:39]; ix[2] = wa[38:30]; ix[1] = wa[29:21]; ix[0] = wa[20:12];
    t = cr3;
    for (int l = 3; l >= (ps ? 2 : 1); l--) begin
      pa_t a;
      a = t + pa_t'(ix[l]) * 8;
      if (!mem.exists(a)) begin
        mem[a] = pte(next_table, 8'h0, 1, 1, 0, 0);
        next_table += 46'h1000;
      end
      t = {mem[a][PA_W-1:12], 12'b0};
    end
    mem[t + pa_t'(ix[ps ? 1 : 0]) * 8] = pte(pa, off, w, u, nx, ps);
  endtask

  logic [5:0] lsq_tail = '0;             // LSQ tail as the front end sees it

  // ---------------------------------------------------------------- checks
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (archpc=%h if_pc=%h)", what, archpc, if_pc); end
  endtask

  int n_commit, n_exc_pc, n_exc_ls, n_exc_other, n_itlb_stall, n_dtlb_stall,
      n_walk, n_fault_walk, n_squash, n_fwd, n_masked_redirect, n_same_pa, n_2m;
  exc_e last_cause;
  va_t  last_epc;
  always @(posedge clk) if (rst_n) begin
    if (commit_valid) n_commit++;
    if (exc_valid) begin
      last_cause = exc_cause; last_epc = exc_pc;
      lsq_tail = '0;                     // the exception empties the LSQ
      unique case (exc_cause)
        EXC_PC_CHECK: n_exc_pc++;
        EXC_LS_CHECK: n_exc_ls++;
        default:      n_exc_other++;
      endcase
    end
    if (if_stall) n_itlb_stall++;
    if (ad_valid && !ad_accept) n_dtlb_stall++;
    if (dut.ptw_resp_valid) begin
      n_walk++;
      if (dut.ptw_resp_fault) n_fault_walk++;
      if (dut.ptw_resp_is2m) n_2m++;
    end
  end

  // ---------------------------------------------------------------- driver

  task automatic fetch(output oreo_off_t off, output va_t pc);
    int guard = 0;
    while (!(if_valid || if_fault) && guard < 100) begin @(negedge clk); guard++; end
    check("fetch completes", if_valid);
    off = if_off; pc = if_pc;
  endtask

  task automatic advance(logic [3:0] sz);
    if_size = sz; @(negedge clk); if_size = '0;
  endtask

  task automatic dispatch(oreo_off_t off, npc_e npc, logic [3:0] sz, va_t imm, logic m, logic st,
                          output logic [7:0] ri, output logic [5:0] li);
    disp_valid = 1; disp_pc_off = off; disp_npc = npc; disp_size = sz; disp_imm = imm;
    disp_is_mem = m; disp_is_store = st;
    #1 while (!disp_ready) begin @(negedge clk); #1; end
    ri = disp_rob_idx; li = disp_lsq_idx;
    @(negedge clk); disp_valid = 0;
    if (m) lsq_tail = li + 1'b1;
  endtask

  task automatic address(logic [5:0] li, va_t va, output pa_t pa, output logic fh, output logic [5:0] fi,
                         output logic flt);
    int guard = 0;
    ad_valid = 1; ad_idx = li; ad_va = va;
    #1 while (!ad_accept && guard < 100) begin @(negedge clk); #1; guard++; end
    pa = ad_pa; fh = fwd_hit; fi = fwd_idx; flt = ad_fault;
    @(negedge clk); ad_valid = 0;
  endtask

  task automatic complete(logic [7:0] ri, logic oexc, logic tk, va_t tgt);
    cmp_valid = 1; cmp_idx = ri; cmp_other_exc = oexc; cmp_taken = tk; cmp_target = tgt;
    @(negedge clk); cmp_valid = 0; cmp_other_exc = 0;
  endtask

  task automatic redirect(va_t tgt, logic [7:0] keep_ri);
    ex_redirect = 1; ex_target = tgt; ex_squash_rob_idx = keep_ri; ex_squash_lsq_tail = lsq_tail;
    if (dut.u_fetch.ex_target_in_region && (tgt & ~64'h001f_007f_8000_0000) != tgt) n_masked_redirect++;
    @(negedge clk); ex_redirect = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- program
  localparam va_t K_START = 64'hffffff80_00000000;
  localparam va_t K_END   = 64'hffffffef_00000000;
  localparam va_t K_MASK  = 64'h0000007f_80000000;
  localparam va_t U_END   = 64'h00200000_00000000;
  localparam va_t U_MASK  = 64'h001f0000_00000000;
  localparam va_t KT      = 64'hffffff86_01000000;   // kernel text, bits 31..38 = 0x0c
  localparam va_t KTRAP   = 64'hffffff86_01000800;
  localparam va_t KD      = 64'hffffff86_02000100;   // kernel data (2 MiB page)
  localparam va_t KD_BAD  = 64'hffffffa2_02000100;   // same masked address, wrong bits
  localparam va_t KT_BAD  = 64'hffffffa2_01000000;
  localparam va_t UT      = 64'h0005_0000_0040_0000; // user text, bits 48..52 = 0x05

  oreo_off_t off; va_t pc; logic [7:0] r0, r1, r2, r3; logic [5:0] l0, l1, l2;
  pa_t pa_valid, pa_bad, pa_x; logic fh, flt; logic [5:0] fi;
  int c0;

  initial begin
    trap_vec = KTRAP;
    map(64'h0, 46'h100000, 8'h00, 0, 1, 0, 0);                      // boot stub
    map(KT & ~K_MASK, 46'h200000, 8'h0c, 0, 0, 0, 0);               // kernel text
    map(KD & ~K_MASK & ~64'h1fffff, 46'h400000, 8'h0c, 1, 0, 1, 1); // kernel data, 2 MiB
    map(UT & ~U_MASK, 46'h300000, 8'h05, 1, 1, 0, 0);               // user text
    repeat (2) @(negedge clk);
    rst_n = 1;
    // region table
    cfg_we = 1; cfg_idx = 0; cfg_data = '{start: K_START, end_: K_END, mask: K_MASK};
    @(negedge clk); cfg_idx = 1; cfg_data = '{start: '0, end_: U_END, mask: U_MASK};
    @(negedge clk); cfg_we = 0;

    // --- boot stub at VA 0: indirect jump to kernel text
    fetch(off, pc);
    check("boot fetch", pc == 0 && if_pa == 46'h100000 && off == 8'h00);
    dispatch(off, NPC_INDIR, 4'd5, '0, 0, 0, r0, l0);
    complete(r0, 0, 1, KT);
    redirect(KT, r0);
    idle(1);
    check("boot committed", archpc == KT && n_commit == 1);

    // --- store then load to the same word while both are in flight
    fetch(off, pc);
    check("kernel fetch masked", pc == (KT & ~K_MASK) && off == 8'h0c && if_pa == 46'h200000);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, 1, r0, l0);
    advance(4);
    address(l0, KD, pa_valid, fh, fi, flt);
    check("store translated", pa_valid == 46'h400100 && !flt);
    fetch(off, pc);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, 0, r1, l1);
    advance(4);
    address(l1, KD + 4, pa_x, fh, fi, flt);
    check("load finds older store by masked address", fh && fi == l0);
    if (fh) n_fwd++;
    complete(r0, 0, 0, '0);
    complete(r1, 0, 0, '0);
    idle(2);
    check("store and load committed", archpc == KT + 8 && n_commit == 3);

    // --- mispredicted branch; a load with wrong protected bits runs under it
    fetch(off, pc);
    dispatch(off, NPC_DIRECT, 4'd2, 64'h40, 0, 0, r0, l0);   // predicted not taken
    advance(2);
    fetch(off, pc);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, 0, r1, l1);
    address(l1, KD_BAD, pa_bad, fh, fi, flt);
    check("probe with wrong bits gets the valid translation", pa_bad == pa_valid && !flt);
    if (pa_bad == pa_valid) n_same_pa++;
    complete(r1, 0, 0, '0);
    idle(2);
    check("probe not committed while branch pending", n_commit == 3 && n_exc_ls == 0);
    complete(r0, 0, 1, '0);
    lsq_tail = l1;                       // squash the probe
    redirect(KT + 8 + 64'h40, r0);
    n_squash++;
    idle(3);
    check("branch committed, probe squashed silently", archpc == KT + 8 + 64'h40 && n_commit == 4
          && n_exc_ls == 0 && n_exc_pc == 0);

    // --- committed load with wrong protected bits
    fetch(off, pc);
    check("fetch after redirect", pc == ((KT + 8 + 64'h40) & ~K_MASK));
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, 0, r0, l0);
    address(l0, KD_BAD, pa_x, fh, fi, flt);
    complete(r0, 0, 0, '0);
    idle(2);
    check("load/store check exception", n_exc_ls == 1 && last_cause == EXC_LS_CHECK
          && last_epc == KT + 8 + 64'h40 && archpc == KTRAP);

    // --- jump to a PC with wrong protected bits
    fetch(off, pc);
    check("trap handler fetched", pc == (KTRAP & ~K_MASK) && off == 8'h0c);
    dispatch(off, NPC_INDIR, 4'd5, '0, 0, 0, r0, l0);
    complete(r0, 0, 1, KT_BAD);
    redirect(KT_BAD, r0);
    fetch(off, pc);
    check("bad target masked to valid text", pc == (KT & ~K_MASK) && off == 8'h0c);
    dispatch(off, NPC_SEQ, 4'd4, '0, 0, 0, r1, l1);
    complete(r1, 0, 0, '0);
    idle(2);
    check("pc check exception", n_exc_pc == 1 && last_cause == EXC_PC_CHECK && last_epc == KT_BAD);

    // --- same again, but the instruction also raises a baseline exception
    fetch(off, pc);
    dispatch(off, NPC_INDIR, 4'd5, '0, 0, 0, r0, l0);
    complete(r0, 0, 1, KT_BAD);
    redirect(KT_BAD, r0);
    fetch(off, pc);
    dispatch(off, NPC_SEQ, 4'd4, '0, 0, 0, r1, l1);
    complete(r1, 1, 0, '0);
    idle(2);
    check("baseline exception wins", n_exc_other == 1 && last_cause == EXC_OTHER && n_exc_pc == 1);

    // --- load to an unmapped page: page fault from the walker
    fetch(off, pc);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, 0, r0, l0);
    c0 = n_fault_walk;
    address(l0, 64'hffffff86_05000000, pa_x, fh, fi, flt);
    check("page fault reported", flt && n_fault_walk == c0 + 1);
    complete(r0, 0, 0, '0);
    idle(2);
    check("page fault at commit", n_exc_other == 2);

    // --- return to user space
    fetch(off, pc);
    dispatch(off, NPC_INDIR, 4'd5, '0, 0, 0, r0, l0);
    complete(r0, 0, 1, UT);
    redirect(UT, r0);
    fetch(off, pc);
    check("user fetch", pc == (UT & ~U_MASK) && off == 8'h05 && if_pa == 46'h300000);
    dispatch(off, NPC_SEQ, 4'd4, '0, 1, 1, r1, l1);
    address(l1, UT + 64'h100, pa_x, fh, fi, flt);
    check("user store translated", pa_x == 46'h300100 && !flt);
    complete(r1, 0, 0, '0);
    idle(3);
    check("user code committed", archpc == UT + 4 && last_cause == EXC_OTHER);

    // --- every mechanism happened
    check("commits",            n_commit >= 8);
    check("pc check",           n_exc_pc > 0);
    check("load/store check",   n_exc_ls > 0);
    check("baseline exception", n_exc_other > 0);
    check("I-TLB miss stall",   n_itlb_stall > 0);
    check("D-TLB miss stall",   n_dtlb_stall > 0);
    check("walks",              n_walk > 0);
    check("walk page fault",    n_fault_walk > 0);
    check("2 MiB walk",         n_2m > 0);
    check("squash",             n_squash > 0);
    check("forwarding",         n_fwd > 0);
    check("masked redirect",    n_masked_redirect > 0);
    check("same pa for probe",  n_same_pa > 0);
    $display("mechanisms: commit=%0d exc_pc=%0d exc_ls=%0d exc_other=%0d itlb_stall=%0d dtlb_stall=%0d walks=%0d faults=%0d 2m=%0d squash=%0d fwd=%0d masked_redirect=%0d same_pa=%0d",
             n_commit, n_exc_pc, n_exc_ls, n_exc_other, n_itlb_stall, n_dtlb_stall, n_walk,
             n_fault_walk, n_2m, n_squash, n_fwd, n_masked_redirect, n_same_pa);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
