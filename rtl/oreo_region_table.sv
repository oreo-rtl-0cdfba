// oreo_region_table: randomization-region metadata registers.
//
// Holds NREGIONS descriptors, each a start address, an end address
// (exclusive) and a 64-bit vector marking which address bits are protected.
// The table is shared by every Virt2Mask and Extract Bits unit in the core,
// as in the paper's area analysis (two regions, 3 x 64 bits each, 384 bits).
// Software writes one descriptor per cycle through cfg_we/cfg_idx/cfg_data;
// the write is visible on `regions` the next cycle. Reset clears every
// descriptor, which makes start == end so that no address hits a region.
// The write port and the reset value are this design's choices; the paper
// does not describe how the metadata is loaded.
module oreo_region_table
  import oreo_pkg::*;
#(
  parameter int N = NREGIONS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [$clog2(N)-1:0] cfg_idx,
  input  region_t              cfg_data,
  output region_t              regions [N]
);

  region_t tbl_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) tbl_q[i] <= '0;
    end else if (cfg_we) begin
      tbl_q[cfg_idx] <= cfg_data;
    end
  end

  assign regions = tbl_q;

endmodule
