// codebook: vector-quantization codebook and dequantization for Stage 1.
//
// The compressed model stores, per Gaussian, only an index into a codebook of
// degree-1 spherical-harmonics coefficient sets (4 coefficients x RGB = 12
// values). Dequantization is the table lookup: rd_idx in one cycle gives the
// 12 coefficients on rd_sh in the next. The entry count is this design's
// choice (256); the reference gives only the 8 KB SRAM size. Entries are
// assumed to be stored already multiplied by the SH basis constants.
//
// Loading: ld_we writes coefficient ld_coef (0..11) of entry ld_entry.
// Layout of an entry: [3*k + c] = coefficient k (0: DC, 1..3: first-order
// terms along y, z, x) of colour c (0 r, 1 g, 2 b).
module codebook
  import gs_pkg::*;
#(
  parameter int ENTRIES = 256,
  parameter int NCOEF   = 12
) (
  input  logic                       clk,
  input  logic                       ld_we,
  input  logic [$clog2(ENTRIES)-1:0] ld_entry,
  input  logic [3:0]                 ld_coef,
  input  fx_t                        ld_data,
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output fx_t [NCOEF-1:0]            rd_sh
);
  fx_t mem [ENTRIES][NCOEF];
  always_ff @(posedge clk) begin
    if (ld_we) mem[ld_entry][ld_coef] <= ld_data;
    if (rd_en) for (int k = 0; k < NCOEF; k++) rd_sh[k] <= mem[rd_idx][k];
  end
endmodule
