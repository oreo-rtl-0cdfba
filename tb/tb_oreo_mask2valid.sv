// tb_oreo_mask2valid: checks that the valid virtual address is rebuilt as
// offset + w, with the offset field deposited at the protected positions.
// The reference is the plain sum w + (offset << lsb) for contiguous vectors.
module tb_oreo_mask2valid;
  import oreo_pkg::*;

  int checks = 0, failures = 0;
  va_t wa, msk, va;
  oreo_off_t off;

  oreo_mask2valid dut (.wa, .oreo_mask(msk), .offset(off), .va);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s wa=%h mask=%h off=%h va=%h", what, wa, msk, off, va); end
  endtask

  initial begin
    wa = 64'hf_f0012340; msk = 64'h0ff00000; off = 8'hab; #1;
    check("paper example", va == 64'hf_fab12340);
    wa = 64'hffffff80_01800040; msk = 64'h0000007f_80000000; off = 8'h0c; #1;
    check("kernel", va == 64'hffffff86_01800040);
    for (int i = 0; i < 300; i++) begin
      int lsb, w;
      lsb = $urandom_range(12, 55);
      w   = $urandom_range(1, 8);
      msk = ((va_t'(1) << w) - 1) << lsb;
      wa  = {$urandom(), $urandom()} & ~msk;
      off = oreo_off_t'($urandom_range(0, (1 << w) - 1));
      #1;
      check("sum", va == wa + (va_t'(off) << lsb));
    end
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
