// tb_oreo_fetch_pc: checks the four next-PC sources and their priority,
// the stall, and that a resolved target from execute is masked while a
// predicted target is taken as is.
module tb_oreo_fetch_pc;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, stall = 0;
  region_t regions [2];
  logic [3:0] size = 4'd4;
  logic bp_taken = 0, dec_redirect = 0, ex_redirect = 0, in_reg;
  va_t bp_target = '0, dec_pc = '0, dec_imm = '0, ex_target = '0, pc;

  localparam va_t RST = 64'hffffff80_01000000;
  oreo_fetch_pc #(.N(2), .RESET_PC(RST)) dut (
    .clk, .rst_n, .regions, .stall, .size, .bp_taken, .bp_target,
    .dec_redirect, .dec_pc, .dec_imm, .ex_redirect, .ex_target, .pc,
    .ex_target_in_region(in_reg));

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s pc=%h", what, pc); end
  endtask

  initial begin
    regions[0] = '{start: 64'hffffff80_00000000, end_: 64'hffffffef_00000000, mask: 64'h7f_80000000};
    regions[1] = '{start: 64'h0, end_: 64'h0020_0000_0000_0000, mask: 64'h001f_0000_0000_0000};
    @(negedge clk);
    check("reset pc", pc == RST);
    rst_n = 1;
    @(negedge clk); check("pc + size", pc == RST + 4);
    size = 4'd7;
    @(negedge clk); check("pc + 7", pc == RST + 11);
    stall = 1;
    @(negedge clk); check("stall holds", pc == RST + 11);
    stall = 0; bp_taken = 1; bp_target = 64'hffffff80_01000100;
    @(negedge clk); check("predicted", pc == 64'hffffff80_01000100);
    bp_taken = 1; dec_redirect = 1; dec_pc = 64'hffffff80_01000010; dec_imm = 64'h40;
    @(negedge clk); check("decode beats predictor", pc == 64'hffffff80_01000050);
    dec_redirect = 1; ex_redirect = 1; ex_target = 64'hffffff86_01800040; #1;
    check("target in region", in_reg);
    @(negedge clk); check("execute target masked", pc == 64'hffffff80_01800040);
    ex_target = 64'hffffffe2_01800040;
    @(negedge clk); check("other protected bits same pc", pc == 64'hffffff80_01800040);
    ex_target = 64'h0013_0000_0040_1000;
    @(negedge clk); check("user target masked", pc == 64'h0000_0000_0040_1000);
    ex_target = 64'hffff8880_00001000; stall = 1;
    @(negedge clk); check("redirect beats stall; outside region unchanged", pc == 64'hffff8880_00001000);
    ex_redirect = 0; dec_redirect = 0; bp_taken = 0;
    @(negedge clk); check("stall again", pc == 64'hffff8880_00001000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
