// ntt_wm_embed: block-parallel systolic fragile watermark embedder based on
// the 4x4 special Hartley NTT over GF(3).
//
// Every clock one 4x4 block of 8-bit pixels x enters together with a 4x4
// watermark w of GF(3) digits, and (M + 2) clocks later the watermarked block
// x' leaves. Per pixel:
//
//   r  = x mod 3, d = x - r                     div_res_split (table, 256 deep)
//   R  = H4 * r * H4            (mod 3)         special_hntt_2d, forward core
//   R' = R + w                  (mod 3)         wm_insert, 16 GF(3) adders
//   r' = H4 * R' * H4           (mod 3)         special_hntt_2d, inverse core
//   x' = d + r'                 (8-bit)         recombine_add, 16 adders
//
// d bypasses the transforms through delay_fifo (the z^-m FIFO), matched to
// the M clocks the residue path takes from the forward core's input to the
// inverse core's output. Since H4 * H4 = I (mod 3), the watermark is
// recovered as H4 * (x' mod 3) * H4 - H4 * (x mod 3) * H4 = w (mod 3), as long
// as no pixel sum wrapped (d = 255 with r' > 0, see recombine_add).
//
// Latency budget (this design's split; the paper gives only the total m):
//   div_res_split 1 | forward core 4 | wm_insert 1 | inverse core 4 |
//   balancing registers M - 9 | recombine_add 1      => x to x' = M + 2.
// M defaults to the paper's m = 89. The watermark is sampled with its block
// and carried 5 clocks to the adders so that each block may carry its own
// watermark; the paper shows w only at the adders.
//
// Interface: streaming, no back-pressure (the array accepts a block every
// clock). in_valid/out_valid mark blocks in a stream with gaps; the paper's
// array has no such flag. Synchronous active-low reset.
module ntt_wm_embed
  import hntt_pkg::*;
#(
  parameter int unsigned M = 89  // residue-path pipelining latency m (>= 9)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pix_blk_t x,          // [row][column] pixels
  input  gf3_blk_t w,          // [row][column] watermark digits, 0..2
  output logic     out_valid,
  output pix_blk_t xp          // [row][column] watermarked pixels
);

  localparam int unsigned CORE_LAT = 4;
  localparam int unsigned RES_LAT  = 2 * CORE_LAT + 1;  // 9
  localparam int unsigned PAD      = M - RES_LAT;

  // Residue / divisible split.
  logic     s_valid;
  gf3_blk_t r;
  pix_blk_t d;

  div_res_split u_split (
    .clk, .rst_n, .in_valid, .x,
    .out_valid(s_valid), .r, .d
  );

  // Divisible part: z^-M.
  pix_blk_t d_dly;
  delay_fifo #(.WIDTH($bits(pix_blk_t)), .DELAY(M)) u_fifo (
    .clk, .rst_n, .din(d), .dout(d_dly)
  );

  // Watermark carried to the insertion adders.
  gf3_blk_t w_dly;
  pipe_delay #(.WIDTH($bits(gf3_blk_t)), .DEPTH(1 + CORE_LAT)) u_wdly (
    .clk, .rst_n, .din(w), .dout(w_dly)
  );

  // Forward transform.
  logic     f_valid;
  gf3_blk_t R;
  special_hntt_2d u_fwd (
    .clk, .rst_n, .in_valid(s_valid), .a(r), .out_valid(f_valid), .b(R)
  );

  // Watermark insertion.
  logic     e_valid;
  gf3_blk_t Rp;
  wm_insert u_wm (
    .clk, .rst_n, .in_valid(f_valid), .R, .w(w_dly), .out_valid(e_valid), .Rp
  );

  // Inverse transform (same core; H4 is an involution mod 3).
  logic     i_valid;
  gf3_blk_t rp;
  special_hntt_2d u_inv (
    .clk, .rst_n, .in_valid(e_valid), .a(Rp), .out_valid(i_valid), .b(rp)
  );

  // Balancing registers up to the total residue-path latency M.
  logic     p_valid;
  gf3_blk_t rp_dly;
  pipe_delay #(.WIDTH($bits(gf3_blk_t) + 1), .DEPTH(PAD)) u_pad (
    .clk, .rst_n, .din({i_valid, rp}), .dout({p_valid, rp_dly})
  );

  // Recombination.
  recombine_add u_out (
    .clk, .rst_n, .in_valid(p_valid), .d(d_dly), .rp(rp_dly),
    .out_valid, .xp
  );

  initial begin
    assert (M >= RES_LAT) else $error("ntt_wm_embed: M must be at least %0d", RES_LAT);
  end

  // Watermark digits must be proper GF(3) codes.
  for (genvar i = 0; i < N; i++) begin : g_chk_r
    for (genvar k = 0; k < N; k++) begin : g_chk_k
      a_w_code: assert property (@(posedge clk) disable iff (!rst_n)
        in_valid |-> w[i][k] != 2'd3)
        else $error("watermark digit [%0d][%0d] is not in GF(3)", i, k);
    end
  end

endmodule
