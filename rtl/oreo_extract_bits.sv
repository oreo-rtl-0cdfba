// oreo_extract_bits: gathers the protected bits of an address (Extract Bits).
//
// Given an address and the protected-bit vector of its region, packs the
// bits selected by the vector, lowest first, into an OFFSET_W-bit field
// (a parallel bit extract). For the kernel configuration of the paper
// (bits 31..38) the field is va[38:31]; for user space (bits 48..52) it is
// va[52:48] zero-extended. The same packed form is what the page table and
// the TLB store, so the commit-time check is one equality compare.
// Bits beyond the first OFFSET_W selected bits are ignored; region set-up
// must select at most OFFSET_W bits. Purely combinational.
module oreo_extract_bits
  import oreo_pkg::*;
(
  input  va_t       va,
  input  va_t       oreo_mask,
  output oreo_off_t bits
);

  always_comb begin
    int unsigned k;
    bits = '0;
    k    = 0;
    for (int i = 0; i < VA_W; i++) begin
      if (oreo_mask[i]) begin
        if (k < OFFSET_W) bits[k[$clog2(OFFSET_W)-1:0]] = va[i];
        k = k + 1;
      end
    end
  end

endmodule
