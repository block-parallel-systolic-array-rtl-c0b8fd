// hntt_1d: 4-point Hartley number-theoretic transform over GF(3), X = H4 * x,
// with zeta = j and p = 3, so that
//
//        | 1  1  1  1 |
//   H4 = | 1  1 -1 -1 |   (mod 3; -1 is stored as 2)
//        | 1 -1  1 -1 |
//        | 1 -1 -1  1 |
//
// Two butterfly stages, as in the paper's 1-D HNTT diagram:
//   stage 1: B(x0, x1) -> (x0+x1, x0-x1),  B(x2, x3) -> (x2+x3, x2-x3)
//   stage 2: B(x0+x1, x2+x3) -> (X0, X1),  B(x0-x1, x2-x3) -> (X2, X3)
// The difference outputs of the first stage cross over to the lower
// second-stage butterfly. No multiplier is needed. Because H4 is its own
// inverse mod 3 (4^-1 = 1 mod 3), the same block serves as inverse transform.
//
// Latency two clocks (one per butterfly stage), one vector per clock.
module hntt_1d
  import hntt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  gf3_vec_t x,
  output gf3_vec_t X
);

  gf3_t s01, d01, s23, d23;

  hntt_butterfly u_b0 (.clk, .rst_n, .a(x[0]), .b(x[1]), .s(s01), .t(d01));
  hntt_butterfly u_b1 (.clk, .rst_n, .a(x[2]), .b(x[3]), .s(s23), .t(d23));
  hntt_butterfly u_b2 (.clk, .rst_n, .a(s01),  .b(s23),  .s(X[0]), .t(X[1]));
  hntt_butterfly u_b3 (.clk, .rst_n, .a(d01),  .b(d23),  .s(X[2]), .t(X[3]));

endmodule
