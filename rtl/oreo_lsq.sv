// oreo_lsq: load/store queue over masked addresses with the precomputed
// protected-bit check.
//
// When a load or store address enters the queue, the queue converts it to
// a masked address (Virt2Mask) and extracts its protected bits (Extract
// Bits); both units are instantiated here. Only the masked address is kept
// for microarchitectural use: it goes to the data TLB and is the key of the
// memory-dependence search (a load looks for the youngest older store to
// the same masked 8-byte word). The extracted bits are compared with the
// correct offset the TLB returns for the masked address, and the one-bit
// result is stored in the entry; it is read only at commit, so it changes
// no other state.
//
// Interface. Allocation (al_valid & al_ready, in program order) returns
// the entry index al_idx. Address insertion (ad_valid) names an entry and
// gives its virtual address; ad_wa is the masked address for the TLB, which
// answers in the same cycle on ad_xlat_*; the entry is written when
// ad_xlat_done is high (ad_accept), otherwise the producer holds the request
// (TLB miss). For a load, fwd_hit/fwd_idx report the matching older store in
// the same cycle. The commit stage reads the head entry (cm_*) and pops it.
// `squash` drops the entries from squash_tail onward (squash_tail equal to
// the current tail drops nothing); `flush` empties the queue. DEPTH is 64 (the 32-entry load queue plus the 32-entry store queue
// of the evaluated core, unified here) and must be a power of two. The
// unified queue and the 8-byte forwarding granule are this design's
// choices.
//
// Lint: the Virt2Mask hit flag is unused (outside every region the mask
// is zero and the masked address equals the virtual one); the rst_n note
// comes from the assertion's disable iff.
module oreo_lsq
  import oreo_pkg::*;
#(
  parameter int N     = NREGIONS,
  parameter int DEPTH = 64,
  localparam int IW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  region_t       regions [N],
  // allocation at dispatch
  input  logic          al_valid,
  input  logic          al_is_store,
  output logic          al_ready,
  output logic [IW-1:0] al_idx,
  // address insertion
  input  logic          ad_valid,
  input  logic [IW-1:0] ad_idx,
  input  va_t           ad_va,
  output va_t           ad_wa,
  output logic          ad_is_store,
  input  logic          ad_xlat_done,
  input  logic          ad_xlat_fault,
  input  oreo_off_t     ad_xlat_off,
  output logic          ad_accept,
  output logic          fwd_hit,
  output logic [IW-1:0] fwd_idx,
  // commit
  output logic          cm_valid,
  output logic [IW-1:0] cm_idx,
  output logic          cm_addr_done,
  output logic          cm_check_ok,
  output logic          cm_fault,
  input  logic          cm_pop,
  // recovery
  input  logic          squash,
  input  logic [IW-1:0] squash_tail,
  input  logic          flush,
  output logic [IW:0]   count
);

  typedef struct packed {
    logic      is_store;
    logic      addr_done;
    va_t       wa;
    oreo_off_t ext;
    logic      check_ok;
    logic      fault;
  } entry_t;

  entry_t        q [DEPTH];
  logic [IW-1:0] head_q, tail_q;
  logic [IW:0]   count_q;

  // Virt2Mask and Extract Bits on the incoming address.
  va_t       oreo_mask;
  oreo_off_t ext_bits;
  logic      in_region;

  oreo_virt2mask #(.N(N)) u_v2m (
    .regions  (regions),
    .va       (ad_va),
    .wa       (ad_wa),
    .hit      (in_region),
    .oreo_mask(oreo_mask)
  );

  oreo_extract_bits u_ext (
    .va       (ad_va),
    .oreo_mask(oreo_mask),
    .bits     (ext_bits)
  );

  assign al_ready    = (count_q != (IW + 1)'(DEPTH));
  assign al_idx      = tail_q;
  assign ad_is_store = q[ad_idx].is_store;
  assign ad_accept   = ad_valid && ad_xlat_done;
  assign count       = count_q;

  // Memory-dependence search on masked addresses.
  always_comb begin
    logic [IW-1:0] age_ld, age_i;
    logic [IW-1:0] best_age;
    fwd_hit  = 1'b0;
    fwd_idx  = '0;
    best_age = '0;
    age_ld   = ad_idx - head_q;
    for (int i = 0; i < DEPTH; i++) begin
      age_i = IW'(i) - head_q;
      // every entry younger than the head and older than the load is occupied
      if (ad_valid && !ad_is_store && age_i < age_ld
          && q[i].is_store && q[i].addr_done
          && q[i].wa[VA_W-1:3] == ad_wa[VA_W-1:3]
          && (!fwd_hit || age_i > best_age)) begin
        fwd_hit  = 1'b1;
        fwd_idx  = IW'(i);
        best_age = age_i;
      end
    end
  end

  assign cm_valid     = (count_q != '0);
  assign cm_idx       = head_q;
  assign cm_addr_done = q[head_q].addr_done;
  assign cm_check_ok  = q[head_q].check_ok;
  assign cm_fault     = q[head_q].fault;

  logic do_al, do_pop;
  assign do_al  = al_valid && al_ready;
  assign do_pop = cm_pop && cm_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else if (flush) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      if (ad_accept) begin
        q[ad_idx].addr_done <= 1'b1;
        q[ad_idx].wa        <= ad_wa;
        q[ad_idx].ext       <= ext_bits;
        q[ad_idx].fault     <= ad_xlat_fault;
        q[ad_idx].check_ok  <= (ext_bits == ad_xlat_off);
      end
      if (do_pop) head_q <= head_q + 1'b1;
      if (squash && squash_tail != tail_q) begin
        tail_q  <= squash_tail;
        count_q <= (IW + 1)'(IW'(squash_tail - head_q)) - (IW + 1)'(do_pop);
      end else begin
        if (do_al && !squash) begin
          q[tail_q] <= '{is_store: al_is_store, addr_done: 1'b0, wa: '0,
                         ext: '0, check_ok: 1'b0, fault: 1'b0};
          tail_q <= tail_q + 1'b1;
        end
        count_q <= count_q + (IW + 1)'(do_al && !squash) - (IW + 1)'(do_pop);
      end
    end
  end

  // A popped entry must have its address and check result.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cm_pop |-> cm_valid && cm_addr_done)
    else $error("LSQ entry committed before its address was translated");

endmodule
