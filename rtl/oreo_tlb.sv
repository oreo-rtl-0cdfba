// oreo_tlb: fully associative TLB tagged by masked page numbers.
//
// Oreo's change to the TLB is twofold: it is looked up with the masked
// address (so two virtual addresses that differ only in protected bits hit
// the same entry), and each entry carries the OFFSET_W-bit correct offset
// read from the leaf PTE, which the TLB returns with every hit so that the
// core can check the protected bits at commit. The permission check done
// here (user/write/execute) is the baseline check, applied to the masked
// address during speculation.
//
// Lookup is combinational: lk_hit, lk_pa, lk_off and lk_fault are valid in
// the same cycle as lk_wa. A fill (from the page-table walker) writes the
// entry picked by a round-robin pointer at the next clock edge; flush
// invalidates everything. Entries map either a 4 KiB or a 2 MiB page.
// Entry count, replacement policy and single-cycle lookup are this design's
// choices; the paper only adds the offset field (8 bits per entry).
//
// Lint: page-offset bits of the fill address, and entry fields a given
// path does not need, are reported unused.
module oreo_tlb
  import oreo_pkg::*;
#(
  parameter int ENTRIES = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      flush,
  // lookup
  input  va_t       lk_wa,
  input  acc_e      lk_acc,
  input  logic      lk_user,
  output logic      lk_hit,
  output pa_t       lk_pa,
  output oreo_off_t lk_off,
  output logic      lk_fault,
  // fill
  input  logic      fill_valid,
  input  va_t       fill_wa,
  input  logic      fill_is2m,
  input  ppn_t      fill_ppn,
  input  perm_t     fill_perm,
  input  oreo_off_t fill_off
);

  typedef struct packed {
    logic                 valid;
    logic                 is2m;
    logic [VPN_W-1:0]     vpn;
    ppn_t                 ppn;
    perm_t                perm;
    oreo_off_t            off;
  } entry_t;

  entry_t                       tlb_q [ENTRIES];
  logic [$clog2(ENTRIES)-1:0]   rr_q;

  logic [VPN_W-1:0] lk_vpn;
  assign lk_vpn = lk_wa[VA_W-1:PG_SHIFT];

  function automatic logic match(entry_t e, logic [VPN_W-1:0] vpn);
    if (!e.valid) return 1'b0;
    if (e.is2m)
      return e.vpn[VPN_W-1:LG_SHIFT-PG_SHIFT] == vpn[VPN_W-1:LG_SHIFT-PG_SHIFT];
    return e.vpn == vpn;
  endfunction

  always_comb begin
    entry_t sel;
    lk_hit = 1'b0;
    sel    = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (!lk_hit && match(tlb_q[i], lk_vpn)) begin
        lk_hit = 1'b1;
        sel    = tlb_q[i];
      end
    end
    if (sel.is2m)
      lk_pa = {sel.ppn[PPN_W-1:LG_SHIFT-PG_SHIFT], lk_wa[LG_SHIFT-1:0]};
    else
      lk_pa = {sel.ppn, lk_wa[PG_SHIFT-1:0]};
    lk_off   = sel.off;
    lk_fault = lk_hit && perm_fault(sel.perm, lk_acc, lk_user);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tlb_q[i] <= '0;
      rr_q <= '0;
    end else if (flush) begin
      for (int i = 0; i < ENTRIES; i++) tlb_q[i].valid <= 1'b0;
    end else if (fill_valid) begin
      tlb_q[rr_q] <= '{valid: 1'b1, is2m: fill_is2m,
                       vpn: fill_wa[VA_W-1:PG_SHIFT], ppn: fill_ppn,
                       perm: fill_perm, off: fill_off};
      rr_q <= (rr_q == $clog2(ENTRIES)'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
    end
  end

endmodule
