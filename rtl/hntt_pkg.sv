// hntt_pkg: shared types and GF(3) helpers for the fragile watermark embedder.
//
// Everything in the residue datapath is an element of GF(3) held in two bits
// (00 = 0, 01 = 1, 10 = 2). The encoding 11 never arises from the datapath; the
// helpers reduce it to 0 (3 mod 3) so that every look-up table is fully defined.
// Blocks are 4x4 and indexed [row][column], as x[i][k] with 0 <= i,k <= 3.
package hntt_pkg;

  localparam int unsigned N       = 4;  // transform length and block side
  localparam int unsigned P       = 3;  // field characteristic
  localparam int unsigned PIX_W   = 8;  // pixel width
  localparam int unsigned GF3_W   = 2;  // width of one GF(3) element

  typedef logic [GF3_W-1:0]             gf3_t;
  typedef logic [PIX_W-1:0]             pix_t;
  typedef gf3_t [N-1:0]                 gf3_vec_t;   // one column or row
  typedef gf3_t [N-1:0][N-1:0]          gf3_blk_t;   // [row][column]
  typedef pix_t [N-1:0][N-1:0]          pix_blk_t;   // [row][column]

  // Value of a 2-bit code as an integer residue (11 read as 3 = 0 mod 3).
  function automatic int unsigned gf3_val(gf3_t a);
    return (a == 2'd3) ? 0 : int'(a);
  endfunction

  function automatic gf3_t gf3_add(gf3_t a, gf3_t b);
    return gf3_t'((gf3_val(a) + gf3_val(b)) % P);
  endfunction

  function automatic gf3_t gf3_neg(gf3_t a);
    return gf3_t'((P - gf3_val(a)) % P);
  endfunction

  function automatic gf3_t gf3_sub(gf3_t a, gf3_t b);
    return gf3_add(a, gf3_neg(b));
  endfunction

endpackage
