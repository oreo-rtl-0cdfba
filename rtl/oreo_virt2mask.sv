// oreo_virt2mask: virtual-to-masked address conversion (Virt2Mask).
//
// The paper defines mask(v) = ((v - start) mod len_subregion) + start and
// implements it as parallel comparisons of v against the bounds of every
// randomization region followed by a bit-wise AND that clears the region's
// protected bits. This module does exactly that, combinationally (the paper
// counts no extra cycle for it). Addresses outside every region pass
// unchanged. The two forms agree when a region's start has its protected
// bits clear, which the region set-up must guarantee.
//
// Outputs: the masked address, whether a region matched, and the matched
// region's protected-bit vector (zero when none matched), which the Extract
// Bits unit next to it uses. If regions overlap, the lowest index wins
// (a choice of this design; the paper's regions never overlap).
module oreo_virt2mask
  import oreo_pkg::*;
#(
  parameter int N = NREGIONS
) (
  input  region_t regions [N],
  input  va_t     va,
  output va_t     wa,
  output logic    hit,
  output va_t     oreo_mask
);

  logic [N-1:0] in_region;

  always_comb begin
    for (int i = 0; i < N; i++)
      in_region[i] = (va >= regions[i].start) && (va < regions[i].end_);
  end

  always_comb begin
    hit       = 1'b0;
    oreo_mask = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (in_region[i]) begin
        hit       = 1'b1;
        oreo_mask = regions[i].mask;
      end
    end
    wa = va & ~oreo_mask;
  end

endmodule
