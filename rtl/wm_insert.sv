// wm_insert: inserts the watermark in the transform domain with sixteen
// block-parallel GF(3) adders,
//
//   R'[i][k] = R[i][k] + w[i][k]  (mod 3),   0 <= i,k <= 3.
//
// Each adder is one mod3_add look-up table. Outputs are registered (latency
// 1 clock, one block per clock); the register is this design's pipeline cut.
module wm_insert
  import hntt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  gf3_blk_t R,
  input  gf3_blk_t w,
  output logic     out_valid,
  output gf3_blk_t Rp
);

  gf3_blk_t sum;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar k = 0; k < N; k++) begin : g_col
      mod3_add #(.SUB(1'b0)) u_add (.a(R[i][k]), .b(w[i][k]), .c(sum[i][k]));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      Rp        <= '0;
    end else begin
      out_valid <= in_valid;
      Rp        <= sum;
    end
  end

endmodule
