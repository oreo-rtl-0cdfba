// oreo_rob: reorder buffer extended with the PC's correct offset.
//
// Instructions enter in program order at dispatch and leave in order at
// commit. Oreo adds one OFFSET_W-bit field per entry: the correct offset of
// the instruction's PC, which the instruction-TLB lookup returned when the
// instruction was fetched with its masked PC. Besides that field, each
// entry keeps what the commit stage needs to recompute the architectural
// PC (how the next PC is formed, instruction size, immediate, resolved
// target, taken flag), the load/store queue index of a memory instruction,
// a completion flag and a flag for any baseline exception.
//
// Interface: dispatch (disp_valid & disp_ready) writes the tail entry and
// returns its index on disp_idx in the same cycle; completion writes back
// by index; the head entry is shown on head_* and head_valid is high when it
// exists and has completed; `commit` pops it. `squash` keeps the entries
// up to and including squash_idx and drops every younger one (branch
// misprediction); `flush` empties the buffer (exception). All updates
// happen at the clock edge. DEPTH defaults to 192, the ROB size of the
// evaluated core; the set of baseline fields kept per entry is this
// design's choice.
//
// Lint: the rst_n note comes from the assertion's disable iff.
module oreo_rob
  import oreo_pkg::*;
#(
  parameter int DEPTH   = 192,
  parameter int LSQ_IDX = 6,
  localparam int IW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // dispatch
  input  logic               disp_valid,
  output logic               disp_ready,
  output logic [IW-1:0]      disp_idx,
  input  oreo_off_t          disp_pc_off,
  input  npc_e               disp_npc,
  input  logic [3:0]         disp_size,
  input  va_t                disp_imm,
  input  logic               disp_is_mem,
  input  logic [LSQ_IDX-1:0] disp_lsq_idx,
  // completion from execute
  input  logic               cmp_valid,
  input  logic [IW-1:0]      cmp_idx,
  input  logic               cmp_other_exc,
  input  logic               cmp_taken,
  input  va_t                cmp_target,
  // head of the buffer, to the commit stage
  output logic               head_valid,
  output logic [IW-1:0]      head_idx,
  output oreo_off_t          head_pc_off,
  output npc_e               head_npc,
  output logic [3:0]         head_size,
  output va_t                head_imm,
  output logic               head_is_mem,
  output logic [LSQ_IDX-1:0] head_lsq_idx,
  output logic               head_other_exc,
  output logic               head_taken,
  output va_t                head_target,
  input  logic               commit,
  // recovery
  input  logic               squash,
  input  logic [IW-1:0]      squash_idx,
  input  logic               flush,
  output logic [IW:0]        count
);

  typedef struct packed {
    oreo_off_t          pc_off;
    npc_e               npc;
    logic [3:0]         size;
    va_t                imm;
    logic               is_mem;
    logic [LSQ_IDX-1:0] lsq_idx;
    logic               done;
    logic               other_exc;
    logic               taken;
    va_t                target;
  } entry_t;

  entry_t        rob_q [DEPTH];
  logic [IW-1:0] head_q, tail_q;
  logic [IW:0]   count_q;

  function automatic logic [IW-1:0] inc(logic [IW-1:0] p);
    return (p == IW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign disp_ready = (count_q != (IW + 1)'(DEPTH));
  assign disp_idx   = tail_q;
  assign count      = count_q;

  entry_t h;
  assign h              = rob_q[head_q];
  assign head_valid     = (count_q != '0) && h.done;
  assign head_idx       = head_q;
  assign head_pc_off    = h.pc_off;
  assign head_npc       = h.npc;
  assign head_size      = h.size;
  assign head_imm       = h.imm;
  assign head_is_mem    = h.is_mem;
  assign head_lsq_idx   = h.lsq_idx;
  assign head_other_exc = h.other_exc;
  assign head_taken     = h.taken;
  assign head_target    = h.target;

  logic do_disp, do_commit;
  assign do_disp   = disp_valid && disp_ready;
  assign do_commit = commit && head_valid;

  // Entries kept after a squash: head .. squash_idx inclusive.
  logic [IW:0] keep;
  always_comb begin
    if (squash_idx >= head_q) keep = (IW + 1)'(squash_idx - head_q) + 1'b1;
    else keep = (IW + 1)'(DEPTH) - (IW + 1)'(head_q - squash_idx) + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
      for (int i = 0; i < DEPTH; i++) rob_q[i] <= '0;
    end else if (flush) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      if (cmp_valid) begin
        rob_q[cmp_idx].done      <= 1'b1;
        rob_q[cmp_idx].other_exc <= cmp_other_exc;
        rob_q[cmp_idx].taken     <= cmp_taken;
        rob_q[cmp_idx].target    <= cmp_target;
      end
      if (do_commit) head_q <= inc(head_q);
      if (squash) begin
        tail_q  <= inc(squash_idx);
        count_q <= keep - (IW + 1)'(do_commit);
      end else begin
        if (do_disp) begin
          rob_q[tail_q] <= '{pc_off: disp_pc_off, npc: disp_npc,
                             size: disp_size, imm: disp_imm,
                             is_mem: disp_is_mem, lsq_idx: disp_lsq_idx,
                             done: 1'b0, other_exc: 1'b0, taken: 1'b0,
                             target: '0};
          tail_q <= inc(tail_q);
        end
        count_q <= count_q + (IW + 1)'(do_disp) - (IW + 1)'(do_commit);
      end
    end
  end

  // The squash point must be an occupied entry.
  assert property (@(posedge clk) disable iff (!rst_n)
                   squash |-> (count_q != '0) && (keep <= count_q))
    else $error("squash index outside the occupied part of the ROB");

endmodule
