// tb_oreo_rob: dispatches instructions with distinct PC offsets, completes
// them out of order and checks that the head only commits when complete,
// in program order, with its own offset and commit fields. Also checks a
// squash that keeps the older half, the full condition at the default depth
// of 192 with wrap-around, and flush.
module tb_oreo_rob;
  import oreo_pkg::*;

  localparam int D = 192;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic disp_valid = 0, disp_ready, disp_is_mem = 0;
  logic [7:0] disp_idx;
  oreo_off_t disp_pc_off = '0;
  npc_e disp_npc = NPC_SEQ;
  logic [3:0] disp_size = '0;
  va_t disp_imm = '0;
  logic [5:0] disp_lsq_idx = '0;
  logic cmp_valid = 0, cmp_other_exc = 0, cmp_taken = 0;
  logic [7:0] cmp_idx = '0;
  va_t cmp_target = '0;
  logic head_valid, head_is_mem, head_other_exc, head_taken;
  logic [7:0] head_idx;
  oreo_off_t head_pc_off;
  npc_e head_npc;
  logic [3:0] head_size;
  va_t head_imm, head_target;
  logic [5:0] head_lsq_idx;
  logic commit = 0, squash = 0, flush = 0;
  logic [7:0] squash_idx = '0;
  logic [8:0] count;

  oreo_rob #(.DEPTH(D), .LSQ_IDX(6)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s count=%0d head=%0d", what, count, head_idx); end
  endtask

  logic [7:0] idx [8];
  task automatic dispatch(int k);
    @(negedge clk);
    disp_valid = 1; disp_pc_off = oreo_off_t'(8'h10 + k); disp_size = 4'(k % 15 + 1);
    disp_is_mem = k[0]; disp_lsq_idx = 6'(k); disp_imm = va_t'(k * 100);
    disp_npc = npc_e'(k % 3);
    #1 if (k < 8) idx[k] = disp_idx;
    @(negedge clk); disp_valid = 0;
  endtask

  task automatic complete(logic [7:0] i, logic exc, va_t tgt);
    @(negedge clk); cmp_valid = 1; cmp_idx = i; cmp_other_exc = exc; cmp_taken = 1; cmp_target = tgt;
    @(negedge clk); cmp_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) dispatch(k);
    check("count 4", count == 4);
    check("indices in order", idx[0] == 0 && idx[1] == 1 && idx[3] == 3);
    complete(idx[2], 0, 64'h2222);
    complete(idx[1], 1, 64'h1111);
    check("head not done", !head_valid);
    complete(idx[0], 0, 64'h0);
    check("head done", head_valid && head_pc_off == 8'h10 && head_size == 1 && head_npc == NPC_SEQ);
    @(negedge clk); commit = 1; @(negedge clk); commit = 0;
    check("second head", head_valid && head_pc_off == 8'h11 && head_other_exc && head_is_mem
                         && head_lsq_idx == 1 && head_imm == 100 && head_npc == NPC_DIRECT);
    @(negedge clk); commit = 1; @(negedge clk); commit = 0;
    check("third head", head_valid && head_pc_off == 8'h12 && head_target == 64'h2222 && head_taken
                        && head_npc == NPC_INDIR);
    // squash everything younger than entry 2 (drops entry 3)
    @(negedge clk); squash = 1; squash_idx = idx[2]; @(negedge clk); squash = 0;
    check("squash count", count == 1);
    dispatch(9);
    check("reuse squashed slot", idx[0] == 0 && count == 2);
    @(negedge clk); commit = 1; @(negedge clk); commit = 0;
    check("after commit", count == 1 && !head_valid);
    // fill to the default depth
    for (int k = 0; k < D - 1; k++) dispatch(20 + k);
    check("full", count == D && !disp_ready);
    @(negedge clk); disp_valid = 1; @(negedge clk); disp_valid = 0;
    check("no dispatch when full", count == D);
    for (int k = 0; k < D; k++) complete(8'((4 + k) % D), 0, '0);
    for (int k = 0; k < D; k++) begin
      @(negedge clk); commit = 1;
    end
    @(negedge clk); commit = 0;
    check("drained in order", count == 0);
    dispatch(1); dispatch(2);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    check("flush", count == 0 && !head_valid && disp_ready);
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
