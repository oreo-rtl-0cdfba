// oreo_commit: ArchPC tracking and the commit-time protected-bit checks.
//
// Oreo moves the "is this virtual address really mapped" decision from the
// MMU to commit. This stage keeps ArchPC, the true virtual PC of the
// instruction at the head of the ROB, and recomputes it after every commit
// with a copy of the fetch next-PC logic: ArchPC + size, ArchPC + immediate
// for a taken direct branch, or the resolved target forwarded from execute.
// For the head instruction it
//   1. extracts the protected bits of ArchPC (Virt2Mask picks the region,
//      Extract Bits packs the bits) and compares them with the correct
//      offset stored in the ROB entry;
//   2. for a load or store, reads the check bit precomputed in the LSQ.
// Any baseline exception (reported by execute, or a translation fault of a
// load/store) takes priority over both checks, so a replayed faulting
// access never reveals whether its protected bits were right. Then the PC
// check is reported before the load/store check (this order is this
// design's choice).
//
// Interface and timing: when rob_head_valid is high the head is committed
// in the same cycle (rob_pop, and lsq_pop for a memory instruction) or, on
// a failed check, exc_valid is raised with the cause and the faulting
// ArchPC; the stage then asserts `flush` and loads ArchPC from trap_vec at
// the clock edge. One instruction commits per cycle at most (the width is
// this design's choice). A Mask2Valid unit rebuilds the valid PC from the
// masked PC and the stored offset; an assertion checks that every PC the
// bit-compare accepts satisfies the paper's defining formula
// v == Mask2Valid(w).
//
// Lint: `pc_in_region` is not needed (outside every region the mask is
// zero and the compare is against offset 0); rst_n is reported as both
// synchronous and asynchronous only because the assertion's disable iff
// samples it.
module oreo_commit
  import oreo_pkg::*;
#(
  parameter int  N        = NREGIONS,
  parameter va_t RESET_PC = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  region_t    regions [N],
  input  va_t        trap_vec,
  // ROB head
  input  logic       rob_head_valid,
  input  oreo_off_t  rob_pc_off,
  input  npc_e       rob_npc,
  input  logic [3:0] rob_size,
  input  va_t        rob_imm,
  input  logic       rob_is_mem,
  input  logic       rob_other_exc,
  input  logic       rob_taken,
  input  va_t        rob_target,
  output logic       rob_pop,
  // LSQ head
  input  logic       lsq_check_ok,
  input  logic       lsq_fault,
  output logic       lsq_pop,
  // results
  output logic       exc_valid,
  output exc_e       exc_cause,
  output va_t        exc_pc,
  output logic       flush,
  output va_t        archpc
);

  va_t archpc_q, archpc_next;
  va_t pc_wa, pc_mask, pc_rebuilt;
  logic pc_in_region, pc_ok;
  oreo_off_t pc_bits;

  oreo_virt2mask #(.N(N)) u_v2m (
    .regions  (regions),
    .va       (archpc_q),
    .wa       (pc_wa),
    .hit      (pc_in_region),
    .oreo_mask(pc_mask)
  );

  oreo_extract_bits u_ext (
    .va       (archpc_q),
    .oreo_mask(pc_mask),
    .bits     (pc_bits)
  );

  oreo_mask2valid u_m2v (
    .wa       (pc_wa),
    .oreo_mask(pc_mask),
    .offset   (rob_pc_off),
    .va       (pc_rebuilt)
  );

  assign pc_ok = (pc_bits == rob_pc_off);

  // Replicated next-PC logic.
  always_comb begin
    unique case (rob_npc)
      NPC_DIRECT: archpc_next = rob_taken ? archpc_q + rob_imm
                                          : archpc_q + va_t'(rob_size);
      NPC_INDIR:  archpc_next = rob_target;
      default:    archpc_next = archpc_q + va_t'(rob_size);
    endcase
  end

  always_comb begin
    exc_cause = EXC_NONE;
    if (rob_other_exc || (rob_is_mem && lsq_fault)) exc_cause = EXC_OTHER;
    else if (!pc_ok)                                  exc_cause = EXC_PC_CHECK;
    else if (rob_is_mem && !lsq_check_ok)             exc_cause = EXC_LS_CHECK;
  end

  assign exc_valid = rob_head_valid && (exc_cause != EXC_NONE);
  assign exc_pc    = archpc_q;
  assign flush     = exc_valid;
  assign rob_pop   = rob_head_valid && (exc_cause == EXC_NONE);
  assign lsq_pop   = rob_pop && rob_is_mem;
  assign archpc    = archpc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         archpc_q <= RESET_PC;
    else if (exc_valid) archpc_q <= trap_vec;
    else if (rob_pop)   archpc_q <= archpc_next;
  end

  // A PC accepted by the bit compare must equal the valid address the
  // defining formula rebuilds. (The converse does not hold for an offset
  // with bits set beyond the region's protected bits: the rebuild drops
  // them, the compare rejects them, which is the safer verdict.)
  assert property (@(posedge clk) disable iff (!rst_n)
                   rob_head_valid && pc_ok |-> (pc_rebuilt == archpc_q))
    else $error("protected-bit compare disagrees with Mask2Valid");

endmodule
