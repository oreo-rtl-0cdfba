// tb_oreo_commit: drives a ROB head by hand and checks ArchPC tracking
// (PC + size, taken/not-taken direct branch, indirect target), the PC
// protected-bit check against the ROB offset, the load/store check bit,
// the priority of baseline exceptions over both checks, and the jump to
// the trap vector after an exception.
module tb_oreo_commit;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  region_t regions [2];
  va_t trap_vec = 64'hffffff80_00fff000;
  logic rob_head_valid = 0, rob_is_mem = 0, rob_other_exc = 0, rob_taken = 0, rob_pop;
  oreo_off_t rob_pc_off = '0;
  npc_e rob_npc = NPC_SEQ;
  logic [3:0] rob_size = 4'd4;
  va_t rob_imm = '0, rob_target = '0;
  logic lsq_check_ok = 1, lsq_fault = 0, lsq_pop;
  logic exc_valid, flush;
  exc_e exc_cause;
  va_t exc_pc, archpc;

  localparam va_t RST = 64'hffffff86_01000000;   // protected bits = 0x0c
  oreo_commit #(.N(2), .RESET_PC(RST)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s archpc=%h cause=%0d", what, archpc, exc_cause); end
  endtask

  va_t last_epc;

  // Present one head for one cycle and sample the outcome.
  task automatic head(oreo_off_t off, npc_e npc, logic [3:0] sz, va_t imm, logic tk, va_t tgt,
                      logic mem, logic ok, logic oexc, logic lflt, output logic popped, output exc_e cause);
    @(negedge clk);
    rob_head_valid = 1; rob_pc_off = off; rob_npc = npc; rob_size = sz; rob_imm = imm;
    rob_taken = tk; rob_target = tgt; rob_is_mem = mem; lsq_check_ok = ok;
    rob_other_exc = oexc; lsq_fault = lflt;
    #1 popped = rob_pop; cause = exc_cause; last_epc = exc_pc;
    check("lsq pop follows", lsq_pop == (rob_pop && mem));
    @(negedge clk); rob_head_valid = 0; rob_other_exc = 0; lsq_fault = 0;
  endtask

  // Reference model of the protected bits of a PC (independent of the RTL:
  // fixed bit ranges of the two configured regions).
  function automatic oreo_off_t ref_bits(va_t pc);
    if (pc >= 64'hffffff80_00000000 && pc < 64'hffffffef_00000000) return pc[38:31];
    if (pc < 64'h0020_0000_0000_0000) return oreo_off_t'(pc[52:48]);
    return '0;
  endfunction

  // Random heads: random offsets (right or wrong), next-PC kinds, memory
  // results and baseline exceptions; cause, retirement and the next ArchPC
  // are compared with the model.
  task automatic random_heads(int n);
    va_t model_pc;
    model_pc = archpc;
    for (int i = 0; i < n; i++) begin
      oreo_off_t off; npc_e npc; logic [3:0] sz; va_t imm, tgt; logic tk, mem, ok, oexc, lflt;
      exc_e exp; va_t exp_pc; logic pp; exc_e cc;
      off  = ($urandom_range(3) != 0) ? ref_bits(model_pc) : oreo_off_t'($urandom);
      npc  = npc_e'($urandom_range(2));
      sz   = 4'(1 + $urandom_range(14));
      imm  = va_t'($urandom_range(4095));
      tk   = 1'($urandom_range(1));
      tgt  = ($urandom_range(1) == 1)
             ? (64'hffffff80_01000000 | va_t'($urandom_range(4095)) | (va_t'($urandom_range(221)) << 31))
             : (64'h0000_0000_0040_0000 | va_t'($urandom_range(4095)) | (va_t'($urandom_range(31)) << 48));
      mem  = 1'($urandom_range(1));
      ok   = ($urandom_range(3) != 0);
      oexc = ($urandom_range(7) == 0);
      lflt = ($urandom_range(7) == 0);
      if (oexc || (mem && lflt))           exp = EXC_OTHER;
      else if (off != ref_bits(model_pc))  exp = EXC_PC_CHECK;
      else if (mem && !ok)                 exp = EXC_LS_CHECK;
      else                                 exp = EXC_NONE;
      if (exp != EXC_NONE)                    exp_pc = trap_vec;
      else if (npc == NPC_INDIR)              exp_pc = tgt;
      else if (npc == NPC_DIRECT && tk)       exp_pc = model_pc + imm;
      else                                    exp_pc = model_pc + va_t'(sz);
      head(off, npc, sz, imm, tk, tgt, mem, ok, oexc, lflt, pp, cc);
      check($sformatf("random head %0d: cause and retirement", i),
            cc == exp && pp == (exp == EXC_NONE) && (exp == EXC_NONE || last_epc == model_pc));
      check($sformatf("random head %0d: next ArchPC", i), archpc == exp_pc);
      model_pc = exp_pc;
    end
  endtask

  logic p; exc_e c;
  initial begin
    regions[0] = '{start: 64'hffffff80_00000000, end_: 64'hffffffef_00000000, mask: 64'h7f_80000000};
    regions[1] = '{start: 64'h0, end_: 64'h0020_0000_0000_0000, mask: 64'h001f_0000_0000_0000};
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("reset archpc", archpc == RST);
    head(8'h0c, NPC_SEQ, 4'd3, '0, 0, '0, 0, 1, 0, 0, p, c);
    check("seq commits", p && c == EXC_NONE && archpc == RST + 3);
    head(8'h0c, NPC_DIRECT, 4'd2, 64'h100, 0, '0, 0, 1, 0, 0, p, c);
    check("not-taken branch", p && archpc == RST + 5);
    head(8'h0c, NPC_DIRECT, 4'd2, 64'h100, 1, '0, 1, 1, 0, 0, p, c);
    check("taken branch with valid load", p && archpc == RST + 5 + 64'h100);
    // indirect jump to an address with wrong protected bits (0x0d)
    head(8'h0c, NPC_INDIR, 4'd5, '0, 1, 64'hffffff86_81000000, 0, 1, 0, 0, p, c);
    check("indirect", p && archpc == 64'hffffff86_81000000);
    #1 check("no exception yet", !exc_valid);
    head(8'h0c, NPC_SEQ, 4'd4, '0, 0, '0, 0, 1, 0, 0, p, c);
    check("pc check fails", !p && c == EXC_PC_CHECK);
    check("trap vector", archpc == trap_vec);
    // baseline exception wins over the pc check
    head(8'h00, NPC_SEQ, 4'd4, '0, 0, '0, 0, 1, 1, 0, p, c);
    check("other exception first", !p && c == EXC_OTHER);
    // trap vector has protected bits 0x00
    head(8'h00, NPC_SEQ, 4'd4, '0, 0, '0, 1, 0, 0, 0, p, c);
    check("load/store check fails", !p && c == EXC_LS_CHECK);
    head(8'h00, NPC_SEQ, 4'd4, '0, 0, '0, 1, 0, 0, 1, p, c);
    check("translation fault beats load/store check", !p && c == EXC_OTHER);
    head(8'h01, NPC_SEQ, 4'd4, '0, 0, '0, 1, 0, 0, 0, p, c);
    check("pc check before load/store check", !p && c == EXC_PC_CHECK);
    head(8'h01, NPC_SEQ, 4'd4, '0, 0, '0, 0, 1, 1, 0, p, c);
    check("baseline exception before pc check", !p && c == EXC_OTHER);
    head(8'h00, NPC_INDIR, 4'd4, '0, 1, 64'h0005_0000_0040_0000, 0, 1, 0, 0, p, c);
    check("jump to user", p && archpc == 64'h0005_0000_0040_0000);
    head(8'h05, NPC_SEQ, 4'd4, '0, 0, '0, 0, 1, 0, 0, p, c);
    check("user pc valid", p && archpc == 64'h0005_0000_0040_0004);
    head(8'h04, NPC_SEQ, 4'd4, '0, 0, '0, 0, 1, 0, 0, p, c);
    check("user pc invalid", !p && c == EXC_PC_CHECK && last_epc == 64'h0005_0000_0040_0004);
    @(negedge clk);
    check("idle holds archpc", archpc == trap_vec && !rob_pop && !exc_valid);
    random_heads(400);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
