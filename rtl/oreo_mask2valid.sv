// oreo_mask2valid: rebuilds the valid virtual address from a masked one.
//
// The paper's reconstruction is v = offset_oreo + w, where offset_oreo is
// the protected bits followed by zeros. Since the masked address w has
// those bit positions clear, the addition is a deposit: the packed offset
// field is scattered, lowest bit first, into the positions named by the
// region's protected-bit vector and OR-ed into w. Purely combinational.
// The commit stage uses it to cross-check the Extract-Bits comparison
// against the paper's defining formula.
module oreo_mask2valid
  import oreo_pkg::*;
(
  input  va_t       wa,
  input  va_t       oreo_mask,
  input  oreo_off_t offset,
  output va_t       va
);

  va_t dep;

  always_comb begin
    int unsigned k;
    dep = '0;
    k   = 0;
    for (int i = 0; i < VA_W; i++) begin
      if (oreo_mask[i]) begin
        if (k < OFFSET_W) dep[i] = offset[k[$clog2(OFFSET_W)-1:0]];
        k = k + 1;
      end
    end
    va = wa | dep;
  end

endmodule
