// mod3_add: the atomic GF(3) adder of the embedder, c = a + b mod 3 (SUB = 0)
// or c = a - b mod 3 (SUB = 1).
//
// The operation has four input bits (two 2-bit residues) and two output bits,
// so each output bit is exactly one 4-input look-up table, which is how the
// architecture builds it. The table is written out as a 16-entry constant and
// indexed by {a, b}; synthesis maps it to one LUT4 per output bit. The -1 in
// the lower butterfly branch is folded into the table (SUB = 1) rather than
// built as a separate negator; that folding is this design's choice.
//
// Purely combinational; registers sit in the butterfly that uses it.
// An input code of 11 is treated as the residue 0.
module mod3_add
  import hntt_pkg::*;
#(
  parameter bit SUB = 1'b0
) (
  input  gf3_t a,
  input  gf3_t b,
  output gf3_t c
);

  typedef gf3_t lut_t [16];

  function automatic lut_t make_lut(bit sub);
    lut_t tbl;
    for (int i = 0; i < 16; i++) begin
      tbl[i] = sub ? gf3_sub(gf3_t'(i >> 2), gf3_t'(i & 3))
                 : gf3_add(gf3_t'(i >> 2), gf3_t'(i & 3));
    end
    return tbl;
  endfunction

  localparam lut_t LUT = make_lut(SUB);

  assign c = LUT[{a, b}];

endmodule
