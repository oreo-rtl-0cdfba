// oreo_core: the Oreo address path of an out-of-order core.
//
// This top level connects every structure Oreo adds or changes, following
// the paper's microarchitecture figure:
//   * one region table, shared by all Virt2Mask / Extract Bits units;
//   * the fetch PC, kept masked, with Virt2Mask on the redirect path from
//     execute (and from exception entry);
//   * an instruction TLB and a data TLB looked up with masked addresses,
//     both returning the correct offset, and one page-table walker that
//     fills them from leaf PTEs carrying the offset;
//   * a ROB whose entries keep the correct offset of each PC;
//   * an LSQ that masks load/store addresses, extracts their protected bits
//     and stores the precomputed check bit;
//   * the commit stage with ArchPC and the two commit-time checks.
// The branch predictor, caches, main memory and the execution core are
// baseline parts and stay outside: their signals are ports of this module.
//
// Flow of one instruction: the front end fetches at `if_pc` (masked); on an
// I-TLB hit `if_pa` and `if_off` are valid in the same cycle and the
// front end dispatches the instruction with that offset (disp_pc_off). On a
// miss `if_stall` holds the PC while the walker runs. A load or store
// allocates an LSQ entry at dispatch and later presents its virtual address
// (ad_valid); the LSQ masks it, the D-TLB translates it in the same cycle
// (ad_accept, ad_pa) or the walker is started and the request must be held.
// Execute reports completion by ROB index; a misprediction (ex_redirect)
// squashes younger ROB/LSQ entries and redirects fetch. The commit stage
// retires the ROB head or raises an exception, which flushes the ROB and
// LSQ and sends fetch to trap_vec.
//
// Walker arbitration (data side first), the one-cycle TLB lookups, the
// exception redirect and the port bundle are this design's choices.
//
// Lint: the ROB and LSQ occupancy counts, the ROB head index and the fetch
// unit's region flag are left open because nothing at this level needs
// them; the page-offset bits of the remembered fault address are not
// compared. The rst_n note comes from the assertions' disable iff.
module oreo_core
  import oreo_pkg::*;
#(
  parameter int  N           = NREGIONS,
  parameter int  ITLB_ENTRIES = 64,
  parameter int  DTLB_ENTRIES = 64,
  parameter int  ROB_DEPTH   = 192,
  parameter int  LSQ_DEPTH   = 64,
  parameter va_t RESET_PC    = '0,
  localparam int RW          = $clog2(ROB_DEPTH),
  localparam int LW          = $clog2(LSQ_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // system state
  input  pa_t           cr3,
  input  logic          user_mode,
  input  va_t           trap_vec,
  input  logic          tlb_flush,
  // region table configuration
  input  logic          cfg_we,
  input  logic [$clog2(N)-1:0] cfg_idx,
  input  region_t       cfg_data,
  // fetch
  input  logic [3:0]    if_size,
  input  logic          bp_taken,
  input  va_t           bp_target,
  input  logic          dec_redirect,
  input  va_t           dec_pc,
  input  va_t           dec_imm,
  output va_t           if_pc,
  output logic          if_valid,
  output logic          if_stall,
  output logic          if_fault,
  output pa_t           if_pa,
  output oreo_off_t     if_off,
  // dispatch
  input  logic          disp_valid,
  input  oreo_off_t     disp_pc_off,
  input  npc_e          disp_npc,
  input  logic [3:0]    disp_size,
  input  va_t           disp_imm,
  input  logic          disp_is_mem,
  input  logic          disp_is_store,
  output logic          disp_ready,
  output logic [RW-1:0] disp_rob_idx,
  output logic [LW-1:0] disp_lsq_idx,
  // load/store address
  input  logic          ad_valid,
  input  logic [LW-1:0] ad_idx,
  input  va_t           ad_va,
  output logic          ad_accept,
  output logic          ad_fault,
  output va_t           ad_wa,
  output pa_t           ad_pa,
  output logic          fwd_hit,
  output logic [LW-1:0] fwd_idx,
  // completion and branch resolution
  input  logic          cmp_valid,
  input  logic [RW-1:0] cmp_idx,
  input  logic          cmp_other_exc,
  input  logic          cmp_taken,
  input  va_t           cmp_target,
  input  logic          ex_redirect,
  input  va_t           ex_target,
  input  logic [RW-1:0] ex_squash_rob_idx,
  input  logic [LW-1:0] ex_squash_lsq_tail,
  // commit
  output logic          commit_valid,
  output va_t           archpc,
  output logic          exc_valid,
  output exc_e          exc_cause,
  output va_t           exc_pc,
  // page-table memory port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output pa_t           mem_req_addr,
  input  logic          mem_resp_valid,
  input  logic [63:0]   mem_resp_data
);

  region_t regions [N];

  oreo_region_table #(.N(N)) u_regions (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_data, .regions
  );

  // ------------------------------------------------------------ commit side
  logic      flush;
  logic      rob_head_valid, rob_pop, lsq_pop;
  oreo_off_t rob_pc_off;
  npc_e      rob_npc;
  logic [3:0] rob_size;
  va_t       rob_imm, rob_target;
  logic      rob_is_mem, rob_other_exc, rob_taken;
  logic [LW-1:0] rob_lsq_idx;
  logic [RW-1:0] rob_head_idx;
  logic      lsq_cm_valid, lsq_cm_addr_done, lsq_cm_check_ok, lsq_cm_fault;
  logic [LW-1:0] lsq_cm_idx;

  // ------------------------------------------------------------ fetch
  logic itlb_hit, itlb_fault;
  logic fetch_redirect;
  va_t  fetch_target;

  assign fetch_redirect = flush || ex_redirect;
  assign fetch_target   = flush ? trap_vec : ex_target;

  logic ptw_fault_i;  // last instruction-side walk faulted for if_pc

  oreo_fetch_pc #(.N(N), .RESET_PC(RESET_PC)) u_fetch (
    .clk, .rst_n, .regions,
    .stall       (if_stall),
    .size        (if_size),
    .bp_taken, .bp_target,
    .dec_redirect, .dec_pc, .dec_imm,
    .ex_redirect (fetch_redirect),
    .ex_target   (fetch_target),
    .pc          (if_pc),
    .ex_target_in_region()
  );

  // I-TLB fill / D-TLB fill come from the shared walker.
  logic       ptw_req_valid, ptw_req_ready, ptw_resp_valid, ptw_resp_fault;
  logic       ptw_resp_is2m;
  va_t        ptw_req_wa, ptw_resp_wa;
  ppn_t       ptw_resp_ppn;
  perm_t      ptw_resp_perm;
  oreo_off_t  ptw_resp_off;
  logic       ptw_owner_d_q;   // 1: walk belongs to the data side
  logic       walk_q;          // a walk is outstanding

  oreo_tlb #(.ENTRIES(ITLB_ENTRIES)) u_itlb (
    .clk, .rst_n, .flush(tlb_flush),
    .lk_wa   (if_pc),
    .lk_acc  (ACC_EXEC),
    .lk_user (user_mode),
    .lk_hit  (itlb_hit),
    .lk_pa   (if_pa),
    .lk_off  (if_off),
    .lk_fault(itlb_fault),
    .fill_valid(ptw_resp_valid && !ptw_owner_d_q && !ptw_resp_fault),
    .fill_wa   (ptw_resp_wa),
    .fill_is2m(ptw_resp_is2m),
    .fill_ppn  (ptw_resp_ppn),
    .fill_perm (ptw_resp_perm),
    .fill_off  (ptw_resp_off)
  );

  // An instruction-side page fault is reported once the walk ends; it is
  // remembered until fetch moves to another page.
  logic        ifault_q;
  logic [VPN_W-1:0] ifault_vpn_q;
  assign ptw_fault_i = ifault_q && (ifault_vpn_q == if_pc[VA_W-1:PG_SHIFT]);

  assign if_fault = itlb_fault || ptw_fault_i;
  assign if_valid = itlb_hit && !itlb_fault;
  assign if_stall = !itlb_hit && !ptw_fault_i;

  // ------------------------------------------------------------ ROB / LSQ
  logic rob_ready, lsq_ready;
  logic [LW-1:0] lsq_al_idx;

  assign disp_ready   = rob_ready && (!disp_is_mem || lsq_ready);
  assign disp_lsq_idx = lsq_al_idx;

  oreo_rob #(.DEPTH(ROB_DEPTH), .LSQ_IDX(LW)) u_rob (
    .clk, .rst_n,
    .disp_valid  (disp_valid && disp_ready),
    .disp_ready  (rob_ready),
    .disp_idx    (disp_rob_idx),
    .disp_pc_off, .disp_npc, .disp_size, .disp_imm, .disp_is_mem,
    .disp_lsq_idx(lsq_al_idx),
    .cmp_valid, .cmp_idx, .cmp_other_exc, .cmp_taken, .cmp_target,
    .head_valid  (rob_head_valid),
    .head_idx    (rob_head_idx),
    .head_pc_off (rob_pc_off),
    .head_npc    (rob_npc),
    .head_size   (rob_size),
    .head_imm    (rob_imm),
    .head_is_mem (rob_is_mem),
    .head_lsq_idx(rob_lsq_idx),
    .head_other_exc(rob_other_exc),
    .head_taken  (rob_taken),
    .head_target (rob_target),
    .commit      (rob_pop),
    .squash      (ex_redirect && !flush),
    .squash_idx  (ex_squash_rob_idx),
    .flush       (flush),
    .count       ()
  );

  // D-TLB lookup of the masked load/store address.
  logic dtlb_hit, dtlb_fault, ad_is_store, ad_xlat_done, ad_xlat_fault;
  oreo_off_t dtlb_off;
  logic dfault_q;   // data-side walk ended in a page fault for ad_wa
  va_t  dfault_wa_q;
  logic dfault_match;

  assign dfault_match = dfault_q && (dfault_wa_q[VA_W-1:PG_SHIFT] == ad_wa[VA_W-1:PG_SHIFT]);

  oreo_tlb #(.ENTRIES(DTLB_ENTRIES)) u_dtlb (
    .clk, .rst_n, .flush(tlb_flush),
    .lk_wa   (ad_wa),
    .lk_acc  (ad_is_store ? ACC_WRITE : ACC_READ),
    .lk_user (user_mode),
    .lk_hit  (dtlb_hit),
    .lk_pa   (ad_pa),
    .lk_off  (dtlb_off),
    .lk_fault(dtlb_fault),
    .fill_valid(ptw_resp_valid && ptw_owner_d_q && !ptw_resp_fault),
    .fill_wa   (ptw_resp_wa),
    .fill_is2m(ptw_resp_is2m),
    .fill_ppn  (ptw_resp_ppn),
    .fill_perm (ptw_resp_perm),
    .fill_off  (ptw_resp_off)
  );

  assign ad_xlat_done  = dtlb_hit || dfault_match;
  assign ad_xlat_fault = dtlb_fault || (!dtlb_hit && dfault_match);
  assign ad_fault      = ad_accept && ad_xlat_fault;

  oreo_lsq #(.N(N), .DEPTH(LSQ_DEPTH)) u_lsq (
    .clk, .rst_n, .regions,
    .al_valid    (disp_valid && disp_ready && disp_is_mem),
    .al_is_store (disp_is_store),
    .al_ready    (lsq_ready),
    .al_idx      (lsq_al_idx),
    .ad_valid, .ad_idx, .ad_va, .ad_wa,
    .ad_is_store (ad_is_store),
    .ad_xlat_done(ad_xlat_done),
    .ad_xlat_fault(ad_xlat_fault),
    .ad_xlat_off (dtlb_off),
    .ad_accept,
    .fwd_hit, .fwd_idx,
    .cm_valid    (lsq_cm_valid),
    .cm_idx      (lsq_cm_idx),
    .cm_addr_done(lsq_cm_addr_done),
    .cm_check_ok (lsq_cm_check_ok),
    .cm_fault    (lsq_cm_fault),
    .cm_pop      (lsq_pop),
    .squash      (ex_redirect && !flush),
    .squash_tail (ex_squash_lsq_tail),
    .flush       (flush),
    .count       ()
  );

  // ------------------------------------------------------------ walker
  // Data-side misses go first; a request is raised only while the matching
  // lookup misses and no walk is outstanding.
  logic need_d, need_i;
  assign need_d = ad_valid && !dtlb_hit && !dfault_match;
  assign need_i = !itlb_hit && !ptw_fault_i;

  assign ptw_req_valid = !walk_q && (need_d || need_i);
  assign ptw_req_wa    = need_d ? ad_wa : if_pc;

  oreo_ptw u_ptw (
    .clk, .rst_n, .cr3,
    .req_valid (ptw_req_valid),
    .req_ready (ptw_req_ready),
    .req_wa    (ptw_req_wa),
    .resp_valid(ptw_resp_valid),
    .resp_fault(ptw_resp_fault),
    .resp_wa   (ptw_resp_wa),
    .resp_is2m(ptw_resp_is2m),
    .resp_ppn  (ptw_resp_ppn),
    .resp_perm (ptw_resp_perm),
    .resp_off  (ptw_resp_off),
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_resp_valid, .mem_resp_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      walk_q        <= 1'b0;
      ptw_owner_d_q <= 1'b0;
      ifault_q      <= 1'b0;
      ifault_vpn_q  <= '0;
      dfault_q      <= 1'b0;
      dfault_wa_q   <= '0;
    end else begin
      if (ptw_req_valid && ptw_req_ready) begin
        walk_q        <= 1'b1;
        ptw_owner_d_q <= need_d;
      end else if (ptw_resp_valid) begin
        walk_q <= 1'b0;
      end
      if (ptw_resp_valid && ptw_resp_fault) begin
        if (ptw_owner_d_q) begin
          dfault_q    <= 1'b1;
          dfault_wa_q <= ptw_resp_wa;
        end else begin
          ifault_q     <= 1'b1;
          ifault_vpn_q <= ptw_resp_wa[VA_W-1:PG_SHIFT];
        end
      end else begin
        if (ad_accept) dfault_q <= 1'b0;
        if (fetch_redirect) ifault_q <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ commit
  oreo_commit #(.N(N), .RESET_PC(RESET_PC)) u_commit (
    .clk, .rst_n, .regions, .trap_vec,
    .rob_head_valid, .rob_pc_off, .rob_npc, .rob_size, .rob_imm,
    .rob_is_mem, .rob_other_exc, .rob_taken, .rob_target,
    .rob_pop,
    .lsq_check_ok(lsq_cm_check_ok),
    .lsq_fault   (lsq_cm_fault),
    .lsq_pop,
    .exc_valid, .exc_cause, .exc_pc,
    .flush,
    .archpc
  );

  assign commit_valid = rob_pop;

  // The LSQ head must be the entry of the committing memory instruction.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (rob_head_valid && rob_is_mem) |->
                     (lsq_cm_valid && lsq_cm_idx == rob_lsq_idx && lsq_cm_addr_done))
    else $error("ROB head and LSQ head disagree");

endmodule
