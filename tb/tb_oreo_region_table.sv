// tb_oreo_region_table: reset clears every descriptor; a write appears on
// the outputs one clock later and leaves the other descriptor alone.
module tb_oreo_region_table;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [0:0] cfg_idx = '0;
  region_t cfg_data = '0;
  region_t regions [2];

  oreo_region_table #(.N(2)) dut (.clk, .rst_n, .cfg_we, .cfg_idx, .cfg_data, .regions);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  region_t a, b;
  initial begin
    a = '{start: 64'hffffff80_00000000, end_: 64'hffffffef_00000000, mask: 64'h7f_80000000};
    b = '{start: 64'h0, end_: 64'h0020_0000_0000_0000, mask: 64'h001f_0000_0000_0000};
    repeat (2) @(posedge clk);
    check("reset 0", regions[0] == '0);
    check("reset 1", regions[1] == '0);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_idx = 0; cfg_data = a;
    #1 check("not yet written", regions[0] == '0);
    @(negedge clk); cfg_idx = 1; cfg_data = b;
    check("region 0 written", regions[0] == a);
    @(negedge clk); cfg_we = 0; cfg_data = '1;
    check("region 1 written", regions[1] == b);
    check("region 0 kept", regions[0] == a);
    @(negedge clk);
    check("no write when idle", regions[1] == b && regions[0] == a);
    for (int i = 0; i < 20; i++) begin
      region_t r;
      r = '{start: {$urandom(), $urandom()}, end_: {$urandom(), $urandom()}, mask: {$urandom(), $urandom()}};
      @(negedge clk); cfg_we = 1; cfg_idx = i[0]; cfg_data = r;
      @(negedge clk); cfg_we = 0;
      check("random write", regions[i[0]] == r);
    end
    rst_n = 0; #1;
    check("async reset", regions[0] == '0 && regions[1] == '0);
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
