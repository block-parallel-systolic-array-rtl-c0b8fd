// recombine_add: the sixteen parallel 8-bit unsigned adders that rebuild the
// watermarked pixels,
//
//   x'[i][k] = d[i][k] + r'[i][k],
//
// where d is the delayed divisible part and r' the inverse-transformed marked
// residue (0, 1 or 2). The sum is kept to 8 bits, as the architecture's
// output is 8 bits wide: for a pixel whose divisible part is 255 and whose
// marked residue is non-zero the sum wraps (255 + 1 -> 0, 255 + 2 -> 1).
// The paper does not say whether its adders wrap or saturate; wrapping is the
// behaviour of a plain 8-bit adder and is what this design does.
//
// Timing: outputs registered, latency 1 clock, one block per clock.
module recombine_add
  import hntt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pix_blk_t d,
  input  gf3_blk_t rp,
  output logic     out_valid,
  output pix_blk_t xp
);

  pix_blk_t sum;

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++)
        sum[i][k] = d[i][k] + pix_t'(rp[i][k]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      xp        <= '0;
    end else begin
      out_valid <= in_valid;
      xp        <= sum;
    end
  end

endmodule
