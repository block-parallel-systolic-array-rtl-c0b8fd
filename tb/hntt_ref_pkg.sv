// hntt_ref_pkg: reference arithmetic for the testbenches, written with plain
// integers and independent of the RTL: the transform matrix H4 is entered as
// its printed entries (1 and 2 = -1 mod 3) and products are ordinary integer
// matrix products reduced mod 3.
package hntt_ref_pkg;

  typedef int unsigned mat_t [4][4];
  typedef int unsigned vec_t [4];

  localparam mat_t H4 = '{'{1, 1, 1, 1},
                          '{1, 1, 2, 2},
                          '{1, 2, 1, 2},
                          '{1, 2, 2, 1}};

  function automatic vec_t ref_hntt_1d(vec_t x);
    vec_t y;
    for (int i = 0; i < 4; i++) begin
      y[i] = 0;
      for (int k = 0; k < 4; k++) y[i] += H4[i][k] * x[k];
      y[i] = y[i] % 3;
    end
    return y;
  endfunction

  function automatic mat_t ref_matmul3(mat_t a, mat_t b);
    mat_t c;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        c[i][j] = 0;
        for (int k = 0; k < 4; k++) c[i][j] += a[i][k] * b[k][j];
        c[i][j] = c[i][j] % 3;
      end
    return c;
  endfunction

  // 2-D special HNTT: H4 * A * H4 mod 3.
  function automatic mat_t ref_shntt(mat_t a);
    return ref_matmul3(ref_matmul3(H4, a), H4);
  endfunction

  // Whole embedding of one block of pixels with watermark w (8-bit wrap).
  function automatic mat_t ref_embed(mat_t x, mat_t w);
    mat_t r, R, xp;
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) r[i][k] = x[i][k] % 3;
    R = ref_shntt(r);
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) R[i][k] = (R[i][k] + w[i][k]) % 3;
    R = ref_shntt(R);
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) xp[i][k] = (x[i][k] - x[i][k] % 3 + R[i][k]) % 256;
    return xp;
  endfunction

  // Watermark extraction: shntt(x' mod 3) - shntt(x mod 3), mod 3.
  function automatic mat_t ref_extract(mat_t x, mat_t xp);
    mat_t a, b, w;
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) begin
        a[i][k] = xp[i][k] % 3;
        b[i][k] = x[i][k] % 3;
      end
    a = ref_shntt(a);
    b = ref_shntt(b);
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) w[i][k] = (a[i][k] + 3 - b[i][k]) % 3;
    return w;
  endfunction

endpackage
