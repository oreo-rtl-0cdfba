// oreo_fetch_pc: speculative fetch PC and its next-PC selection.
//
// The fetch PC holds a masked address. Of the four ways the PC is updated,
// three are internal to the front end and keep it masked without help:
// PC + instruction size, PC + immediate of a direct branch found at decode,
// and the branch predictor's target (the predictor was trained on masked
// PCs). The fourth, a target resolved in the execute stage (indirect jumps,
// returns, mispredictions, exception entry), is a virtual address; Oreo
// places a Virt2Mask unit on that path, which this module instantiates.
//
// Priority when several sources are valid in the same cycle, highest first:
// execute redirect, decode redirect, predictor, sequential. `stall` holds
// the PC (for example on an instruction-TLB miss) unless a redirect
// arrives. The PC register updates at the clock edge; `pc` is the masked
// PC of the current fetch. The priority order and the reset value
// RESET_PC are this design's choices.
//
// Lint: the protected-bit vector of the redirect converter is not needed
// here and goes to an unused signal.
module oreo_fetch_pc
  import oreo_pkg::*;
#(
  parameter int  N        = NREGIONS,
  parameter va_t RESET_PC = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  region_t    regions [N],
  input  logic       stall,
  input  logic [3:0] size,        // length of the fetched instruction
  // branch predictor (masked target)
  input  logic       bp_taken,
  input  va_t        bp_target,
  // decode: PC-relative direct branch
  input  logic       dec_redirect,
  input  va_t        dec_pc,
  input  va_t        dec_imm,
  // execute: resolved (virtual) target
  input  logic       ex_redirect,
  input  va_t        ex_target,
  output va_t        pc,
  output logic       ex_target_in_region
);

  va_t pc_q, pc_d, ex_target_m, oreo_mask_unused;

  oreo_virt2mask #(.N(N)) u_v2m (
    .regions  (regions),
    .va       (ex_target),
    .wa       (ex_target_m),
    .hit      (ex_target_in_region),
    .oreo_mask(oreo_mask_unused)
  );

  always_comb begin
    if (ex_redirect)       pc_d = ex_target_m;
    else if (dec_redirect) pc_d = dec_pc + dec_imm;
    else if (stall)        pc_d = pc_q;
    else if (bp_taken)     pc_d = bp_target;
    else                   pc_d = pc_q + va_t'(size);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pc_q <= RESET_PC;
    else        pc_q <= pc_d;
  end

  assign pc = pc_q;

endmodule
