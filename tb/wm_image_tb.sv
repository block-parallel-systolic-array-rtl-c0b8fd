// wm_image_tb: whole-image run of the embedder at its default parameters.
//
// A 512x512 8-bit test image is generated from a formula (smooth gradients
// plus a deterministic texture, values 0..250, so that no pixel sum wraps)
// and streamed back to back, one 4x4 block per clock in raster order of
// blocks: 16384 blocks, 16384 clocks plus the 91-clock latency. Every block
// carries the same regular watermark pattern WM.
//
// Checks:
//   * each output block against the integer reference of the embedding, and
//     the output block count and its timing (block b leaves at clock b + 91);
//   * the watermark extracted from the untouched watermarked image equals WM
//     in every block;
//   * perturbation: the least significant bit of each pixel is flipped with
//     probability 1/100; every block that received at least one flip must
//     give a damaged watermark, and every other block the intact one.
module wm_image_tb;
  import hntt_pkg::*;
  import hntt_ref_pkg::*;

  localparam int IMG  = 512;
  localparam int BPR  = IMG / 4;      // blocks per row of blocks
  localparam int NB   = BPR * BPR;
  localparam int LAT  = 89 + 2;

  localparam mat_t WM = '{'{0, 1, 2, 0},
                          '{1, 2, 0, 1},
                          '{2, 0, 1, 2},
                          '{0, 1, 2, 0}};

  int checks = 0, failures = 0;
  int n_out = 0, n_tampered = 0, n_detected = 0, n_clean_ok = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  pix_blk_t x, xp;
  gf3_blk_t w;
  ntt_wm_embed dut (.clk, .rst_n, .in_valid, .x, .w, .out_valid, .xp);

  logic [7:0] img   [IMG][IMG];
  logic [7:0] wmimg [IMG][IMG];
  int         cyc = 0, t_first = -1;

  function automatic int pixel(int r, int c);
    return (r * 3 + c * 5) / 8 + ((r * c) % 7) * 3 + ((r ^ c) & 15) % 13;
  endfunction

  initial begin
    repeat (NB + LAT + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Collect output blocks.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int br, bc;
      if (t_first < 0) t_first = cyc;
      br = n_out / BPR;
      bc = n_out % BPR;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) wmimg[4*br+i][4*bc+k] = xp[i][k];
      n_out <= n_out + 1;
    end
  end

  initial begin
    mat_t xb, e, got, ext;
    int   t_start, v;
    bit   same, hit;
    for (int r = 0; r < IMG; r++)
      for (int c = 0; c < IMG; c++) begin
        v = pixel(r, c);
        img[r][c] = 8'(v > 250 ? 250 : v);
      end
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) w[i][k] = gf3_t'(WM[i][k]);
    x = '0; in_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    t_start = cyc;
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) x[i][k] = img[4*(b/BPR)+i][4*(b%BPR)+k];
      in_valid = 1'b1;
      @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    #1;

    checks++;
    if (n_out != NB) begin failures++; $display("blocks out %0d, expected %0d", n_out, NB); end
    checks++;
    if (t_first - t_start != LAT) begin
      failures++;
      $display("first block after %0d clocks, expected %0d", t_first - t_start, LAT);
    end

    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) begin
          xb[i][k]  = img[4*(b/BPR)+i][4*(b%BPR)+k];
          got[i][k] = wmimg[4*(b/BPR)+i][4*(b%BPR)+k];
        end
      e = ref_embed(xb, WM);
      checks++;
      if (got != e) begin failures++; if (failures < 10) $display("block %0d differs", b); end
      ext = ref_extract(xb, got);
      checks++;
      if (ext != WM) begin failures++; if (failures < 10) $display("block %0d: watermark lost", b); end
      // Perturbation (i): LSB flips with probability 1/100 per pixel.
      hit = 1'b0;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++)
          if ($urandom_range(0, 99) == 0) begin
            got[i][k] ^= 1;
            hit = 1'b1;
          end
      ext = ref_extract(xb, got);
      same = (ext == WM);
      checks++;
      if (hit) begin
        n_tampered++;
        if (same) begin failures++; $display("block %0d: tampering not detected", b); end
        else n_detected++;
      end else begin
        if (!same) failures++;
        else n_clean_ok++;
      end
    end
    checks++;
    if (n_tampered == 0) failures++;
    $display("blocks %0d, tampered %0d, detected %0d, untouched and intact %0d",
             NB, n_tampered, n_detected, n_clean_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
