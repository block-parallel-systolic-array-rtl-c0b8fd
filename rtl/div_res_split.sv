// div_res_split: splits each pixel of a 4x4 block into its residue and its
// divisible part,
//
//   r = x mod 3          (2 bits, the part that is transformed and marked)
//   d = x - r            (8 bits, a multiple of 3, bypasses the transforms)
//
// As in the architecture, d is read from a precomputed table of depth 256
// indexed by the pixel value; one table read per pixel, sixteen in parallel.
// The table is a constant computed at elaboration by the formula
// DIV_ROM[v] = v - (v mod 3), so no data file is needed. r is then x - d,
// of which only the two low bits are kept (x - d is 0, 1 or 2). Deriving r
// by subtraction instead of from a second table is this design's choice.
//
// Timing: outputs registered, latency 1 clock, one block per clock; in_valid
// travels with the data.
module div_res_split
  import hntt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pix_blk_t x,
  output logic     out_valid,
  output gf3_blk_t r,
  output pix_blk_t d
);

  typedef pix_t rom_t [256];

  function automatic rom_t make_div_rom();
    rom_t tbl;
    for (int v = 0; v < 256; v++) tbl[v] = pix_t'(v - (v % 3));
    return tbl;
  endfunction

  localparam rom_t DIV_ROM = make_div_rom();

  pix_blk_t d_c;
  gf3_blk_t r_c;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < N; k++) begin
        d_c[i][k] = DIV_ROM[x[i][k]];
        r_c[i][k] = gf3_t'(x[i][k] - d_c[i][k]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r         <= '0;
      d         <= '0;
    end else begin
      out_valid <= in_valid;
      r         <= r_c;
      d         <= d_c;
    end
  end

endmodule
