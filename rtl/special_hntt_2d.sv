// special_hntt_2d: the 4x4 two-dimensional *special* HNTT over GF(3),
//
//   B = H4 * A * H4        (all arithmetic mod 3)
//
// This is the separable transform the embedder uses in place of the true 2-D
// Hartley transform (which would also need the index-reversed copies of B);
// since NTT coefficients carry no physical meaning, the cheaper separable
// form serves equally well for watermarking.
//
// Structure (row-column, fully parallel):
//   * four hntt_1d units transform the four columns A[.][k] -> C[.][k];
//   * fixed transpose wiring hands row i of C to the i-th second-rank unit;
//   * four hntt_1d units transform the rows C[i][.] -> B[i][.].
// H4 is symmetric, so transforming the rows of C gives C * H4 = H4 * A * H4.
// The same module is both the forward core and the inverse core, because
// H4 * H4 = 4 I = I (mod 3).
//
// Timing: a new block every clock; latency LATENCY = 4 clocks (two
// butterfly ranks per 1-D unit). in_valid is carried alongside the data to
// out_valid; the paper has no valid signal, the flag is this design's
// addition for a stream with gaps.
module special_hntt_2d
  import hntt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  gf3_blk_t a,          // [row][column]
  output logic     out_valid,
  output gf3_blk_t b           // [row][column]
);

  localparam int unsigned LATENCY = 4;

  gf3_vec_t col_in  [N];
  gf3_vec_t col_out [N];
  gf3_vec_t row_in  [N];

  for (genvar k = 0; k < N; k++) begin : g_col
    for (genvar i = 0; i < N; i++) begin : g_gather
      assign col_in[k][i] = a[i][k];
    end
    hntt_1d u_col (.clk, .rst_n, .x(col_in[k]), .X(col_out[k]));
  end

  // Transpose wiring between the two ranks.
  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar k = 0; k < N; k++) begin : g_gather
      assign row_in[i][k] = col_out[k][i];
    end
    hntt_1d u_row (.clk, .rst_n, .x(row_in[i]), .X(b[i]));
  end

  logic [LATENCY-1:0] vld_sr;
  always_ff @(posedge clk) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LATENCY-2:0], in_valid};
  end
  assign out_valid = vld_sr[LATENCY-1];

endmodule
