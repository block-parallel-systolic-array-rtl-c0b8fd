// hntt_butterfly: the radix-2 butterfly "B" of the 4-point HNTT over GF(3).
//
//   s = a + b mod 3      (upper output)
//   t = a - b mod 3      (lower output, the branch that carries the -1)
//
// Built from two mod3_add look-up tables. Both outputs are registered, so the
// butterfly is one fine-grain pipeline stage with a latency of one clock and
// a throughput of one pair per clock. Registering every butterfly is this
// design's choice of where to put the pipeline cuts; the paper states only
// that the array is fine-grain pipelined. Synchronous, active-low reset
// clears the outputs.
module hntt_butterfly
  import hntt_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  gf3_t a,
  input  gf3_t b,
  output gf3_t s,
  output gf3_t t
);

  gf3_t sum, dif;

  mod3_add #(.SUB(1'b0)) u_add (.a(a), .b(b), .c(sum));
  mod3_add #(.SUB(1'b1)) u_sub (.a(a), .b(b), .c(dif));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s <= '0;
      t <= '0;
    end else begin
      s <= sum;
      t <= dif;
    end
  end

endmodule
