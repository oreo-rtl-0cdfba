// tb_oreo_virt2mask: checks Virt2Mask against the defining formula
// mask(v) = ((v - start) mod len_subregion) + start, for the two regions of
// the prototype (kernel text/modules with bits 31..38 protected, user space
// with bits 48..52 protected) and for the worked example with bits 20..27.
// Addresses outside every region must pass unchanged.
module tb_oreo_virt2mask;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  region_t regions [2];
  va_t va, wa, msk;
  logic hit;

  oreo_virt2mask #(.N(2)) dut (.regions, .va, .wa, .hit, .oreo_mask(msk));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic va_t formula(va_t v, va_t start, int lsb);
    return ((v - start) % (va_t'(1) << lsb)) + start;
  endfunction

  localparam va_t K_START = 64'hffffff80_00000000;
  localparam va_t K_END   = 64'hffffffef_00000000;
  localparam va_t K_MASK  = 64'h0000007f_80000000;   // bits 31..38
  localparam va_t U_START = 64'h0;
  localparam va_t U_END   = 64'h00200000_00000000;   // 2^53
  localparam va_t U_MASK  = 64'h001f0000_00000000;   // bits 48..52

  initial begin
    regions[0] = '{start: K_START, end_: K_END, mask: K_MASK};
    regions[1] = '{start: U_START, end_: U_END, mask: U_MASK};

    // kernel region, random addresses
    for (int i = 0; i < 200; i++) begin
      va = K_START + {$urandom_range(0, 32'h6e), $urandom()};
      #1;
      check("kernel hit", hit == 1'b1);
      check("kernel mask", wa == formula(va, K_START, 31));
      check("kernel vector", msk == K_MASK);
    end
    // address of the prefetch experiment and one with other protected bits
    va = 64'hffffff86_01800040; #1;
    check("kaslr example", wa == 64'hffffff80_01800040);
    va = 64'hffffffe6_01800040; #1;
    check("same masked address", wa == 64'hffffff80_01800040);
    // user region
    for (int i = 0; i < 200; i++) begin
      va = {11'd0, $urandom_range(0, 31) , $urandom_range(0, 65535), $urandom()};
      va[63:53] = '0;
      #1;
      check("user hit", hit == 1'b1);
      check("user mask", wa == formula(va, U_START, 48));
    end
    // outside both regions: unchanged
    va = 64'hffff8880_12345678; #1;
    check("outside hit", hit == 1'b0);
    check("outside unchanged", wa == va && msk == '0);
    va = K_END; #1;
    check("end is exclusive", hit == 1'b0 && wa == K_END);
    va = K_START; #1;
    check("start is inclusive", hit == 1'b1 && wa == K_START);
    // the worked example: bits 20..27 protected
    regions[1] = '{start: 64'hf_00000000, end_: 64'h10_00000000, mask: 64'h0ff00000};
    va = 64'hf_fab12340; #1;
    check("paper example", wa == 64'hf_f0012340);
    va = 64'hf_faa12340; #1;
    check("paper invalid example", wa == 64'hf_f0012340);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
