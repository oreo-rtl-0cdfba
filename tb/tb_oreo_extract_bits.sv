// tb_oreo_extract_bits: checks the packed protected-bit field. For a
// contiguous vector the reference is (va & mask) >> lsb; two scattered
// vectors are checked against hand-worked values.
module tb_oreo_extract_bits;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  va_t va, msk;
  oreo_off_t bits;

  oreo_extract_bits dut (.va, .oreo_mask(msk), .bits);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s va=%h mask=%h bits=%h", what, va, msk, bits); end
  endtask

  initial begin
    for (int i = 0; i < 300; i++) begin
      int lsb, w;
      lsb = $urandom_range(12, 55);
      w   = $urandom_range(1, 8);
      msk = ((va_t'(1) << w) - 1) << lsb;
      va  = {$urandom(), $urandom()};
      #1;
      check("contiguous", bits == oreo_off_t'((va & msk) >> lsb));
    end
    va = 64'hf_fab12340; msk = 64'h0ff00000; #1;
    check("paper example", bits == 8'hab);
    va = 64'h0013_0000_0000_0000; msk = 64'h001f_0000_0000_0000; #1;
    check("user bits", bits == 8'h13);
    // scattered: bits 3, 10, 40 -> field bits 0,1,2
    msk = (64'd1 << 3) | (64'd1 << 10) | (64'd1 << 40);
    va  = (64'd1 << 10) | (64'd1 << 40) | 64'hff00_0000_0000_0000; #1;
    check("scattered", bits == 8'b110);
    // no protected bits
    msk = '0; va = '1; #1;
    check("empty mask", bits == '0);
    // more than 8 selected: only the lowest 8 count
    msk = 64'h0000_0000_0003_ff00; va = 64'h0000_0000_0003_5a00; #1;
    check("excess bits ignored", bits == 8'h5a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
