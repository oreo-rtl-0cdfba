// oreo_ptw: page-table walker over masked addresses.
//
// Under Oreo the kernel builds its page tables for masked addresses, so the
// walker is handed the masked address and never sees protected bits: the
// sequence of PTE addresses it reads is the same for every virtual address
// that masks to the same value. The one addition is that the leaf PTE holds
// the correct offset in otherwise unused bits ([PTE_OFF_LSB +: OFFSET_W],
// bits 58..51 here), which the walker returns with the translation so the
// TLB can keep it.
//
// The walk is the x86-64 four-level radix walk: the root comes from `cr3`,
// each level uses 9 bits of the masked address (47..39, 38..30, 29..21,
// 20..12) to pick an 8-byte PTE. A PTE with bit 0 clear ends the walk with
// resp_fault. A level-2 PTE with bit 7 (PS) set is a 2 MiB leaf; 1 GiB pages
// are not supported and report a fault. Write, user and execute permissions
// are the AND of the RW, US and !XD bits along the path.
//
// Timing: one walk at a time. req is accepted when req_ready is high; each
// level issues one memory read (mem_req_valid/mem_req_ready) and waits for
// mem_resp_valid; the result is presented on resp_valid for one cycle.
// A walk with all memory responses in the next cycle takes 2 cycles per
// level plus one. The memory handshake is this design's choice.
//
// Lint: the low 12 bits of cr3 and the PTE bits that carry no meaning
// here (software-available, accessed/dirty, reserved) are read by nothing.
// The low three bits of mem_req_addr are constant zero: PTE reads are
// 8-byte aligned.
module oreo_ptw
  import oreo_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  pa_t        cr3,
  // walk request
  input  logic       req_valid,
  output logic       req_ready,
  input  va_t        req_wa,
  // walk result
  output logic       resp_valid,
  output logic       resp_fault,
  output va_t        resp_wa,
  output logic       resp_is2m,
  output ppn_t       resp_ppn,
  output perm_t      resp_perm,
  output oreo_off_t  resp_off,
  // memory read port
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output pa_t        mem_req_addr,
  input  logic       mem_resp_valid,
  input  logic [63:0] mem_resp_data
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_DONE} state_e;

  state_e     state_q;
  logic [1:0] level_q;     // 3 = top level, 0 = 4 KiB leaf level
  ppn_t       base_q;      // page number of the table being read
  va_t        wa_q;
  perm_t      perm_q;
  logic       fault_q, is2m_q;
  ppn_t       ppn_q;
  oreo_off_t  off_q;

  logic [8:0]  idx;
  logic [63:0] pte;
  logic        pte_p, pte_leaf;
  perm_t       pte_perm;

  always_comb begin
    unique case (level_q)
      2'd3:    idx = wa_q[47:39];
      2'd2:    idx = wa_q[38:30];
      2'd1:    idx = wa_q[29:21];
      default: idx = wa_q[20:12];
    endcase
  end

  assign pte      = mem_resp_data;
  assign pte_p    = pte[0];
  assign pte_leaf = (level_q == 2'd0) || pte[7];
  assign pte_perm = '{w: pte[1], u: pte[2], x: !pte[63]};

  assign req_ready     = (state_q == S_IDLE);
  assign mem_req_valid = (state_q == S_REQ);
  assign mem_req_addr  = {base_q, idx, 3'b000};

  assign resp_valid = (state_q == S_DONE);
  assign resp_fault = fault_q;
  assign resp_wa    = wa_q;
  assign resp_is2m = is2m_q;
  assign resp_ppn   = ppn_q;
  assign resp_perm  = perm_q;
  assign resp_off   = off_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      level_q <= 2'd3;
      base_q  <= '0;
      wa_q    <= '0;
      perm_q  <= '0;
      fault_q <= 1'b0;
      is2m_q <= 1'b0;
      ppn_q   <= '0;
      off_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          state_q <= S_REQ;
          level_q <= 2'd3;
          base_q  <= cr3[PA_W-1:PG_SHIFT];
          wa_q    <= req_wa;
          perm_q  <= '{w: 1'b1, u: 1'b1, x: 1'b1};
          fault_q <= 1'b0;
          is2m_q <= 1'b0;
        end
        S_REQ: if (mem_req_ready) state_q <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          perm_q <= perm_q & pte_perm;
          if (!pte_p || (pte_leaf && level_q >= 2'd2)) begin
            fault_q <= 1'b1;
            state_q <= S_DONE;
          end else if (pte_leaf) begin
            is2m_q <= (level_q == 2'd1);
            ppn_q   <= pte[PA_W-1:PG_SHIFT];
            off_q   <= pte[PTE_OFF_LSB +: OFFSET_W];
            state_q <= S_DONE;
          end else begin
            base_q  <= pte[PA_W-1:PG_SHIFT];
            level_q <= level_q - 2'd1;
            state_q <= S_REQ;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
