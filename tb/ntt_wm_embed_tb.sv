// ntt_wm_embed_tb: end-to-end test of the watermark embedder at its default
// parameters (m = 89, so 91 clocks from block in to block out).
//
// A stream of 4x4 pixel blocks, each with its own random watermark, enters
// with random idle clocks and a long back-to-back run. For every block the
// testbench checks:
//   * the watermarked pixels against an integer reference of the whole
//     embedding (split, H4*r*H4, + w, H4*R'*H4, + d, 8-bit wrap);
//   * that the block leaves exactly M + 2 clocks after it entered;
//   * that, when no pixel sum wrapped, the watermark extracted from the
//     output, H4*(x' mod 3)*H4 - H4*(x mod 3)*H4, equals w;
//   * that changing the least significant bit of one output pixel destroys
//     the extracted watermark (fragility).
// It counts how often each mechanism occurred (idle clocks in the stream,
// back-to-back blocks, pixel sums that wrapped past 255, per-block watermark
// changes, tamper detections) and fails if any never occurred.
module ntt_wm_embed_tb;
  import hntt_pkg::*;
  import hntt_ref_pkg::*;

  localparam int M   = 89;        // default of the design
  localparam int LAT = M + 2;
  localparam int NB  = 3000;

  int checks = 0, failures = 0;
  int n_idle = 0, n_b2b = 0, n_wrap = 0, n_wchg = 0, n_extract = 0, n_tamper = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  pix_blk_t x, xp;
  gf3_blk_t w;
  ntt_wm_embed dut (.clk, .rst_n, .in_valid, .x, .w, .out_valid, .xp);

  mat_t xh [NB];
  mat_t wh [NB];
  logic vh [NB];

  initial begin
    repeat (NB + LAT + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic count_need(string what, int cnt);
    checks++;
    $display("%-28s %0d", what, cnt);
    if (cnt == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    mat_t e, got, ext;
    int   m;
    bit   wrapped, same;
    x = '0; w = '0; in_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NB + LAT; n++) begin
      if (n < NB) begin
        // clocks 1000..1999 are a back-to-back run; elsewhere ~25% idle
        vh[n] = (n >= 1000 && n < 2000) ? 1'b1 : ($urandom_range(0, 3) != 0);
        for (int i = 0; i < 4; i++)
          for (int k = 0; k < 4; k++) begin
            xh[n][i][k] = ($urandom_range(0, 15) == 0) ? 255 : $urandom_range(0, 255);
            wh[n][i][k] = $urandom_range(0, 2);
            x[i][k] = pix_t'(xh[n][i][k]);
            w[i][k] = gf3_t'(wh[n][i][k]);
          end
        in_valid = vh[n];
        if (!vh[n]) n_idle++;
        if (n > 0 && vh[n] && vh[n-1]) n_b2b++;
      end else begin
        in_valid = 1'b0;
      end
      @(posedge clk);
      #1;
      m = n - LAT + 1;
      if (m < 0) begin
        checks++;
        if (out_valid) begin failures++; $display("out_valid before any block could arrive"); end
      end else if (m < NB) begin
        checks++;
        if (out_valid != vh[m]) begin
          failures++;
          if (failures < 10) $display("block %0d: out_valid=%0d expected %0d", m, out_valid, vh[m]);
        end
        if (vh[m]) begin
          e = ref_embed(xh[m], wh[m]);
          wrapped = 1'b0;
          for (int i = 0; i < 4; i++)
            for (int k = 0; k < 4; k++) begin
              got[i][k] = int'(xp[i][k]);
              if (e[i][k] < xh[m][i][k] - xh[m][i][k] % 3)  // x' below d: the sum wrapped
                wrapped = 1'b1;
              checks++;
              if (got[i][k] != e[i][k]) begin
                failures++;
                if (failures < 10) $display("block %0d x'[%0d][%0d]=%0d expected %0d", m, i, k, got[i][k], e[i][k]);
              end
            end
          if (wrapped) n_wrap++;
          else begin
            ext = ref_extract(xh[m], got);
            same = 1'b1;
            for (int i = 0; i < 4; i++)
              for (int k = 0; k < 4; k++) if (ext[i][k] != wh[m][i][k]) same = 1'b0;
            checks++;
            if (!same) begin failures++; $display("block %0d: watermark not recovered", m); end
            else n_extract++;
            // Tamper: flip the LSB of one pixel and extract again.
            got[m % 4][(m / 4) % 4] ^= 1;
            ext = ref_extract(xh[m], got);
            same = 1'b1;
            for (int i = 0; i < 4; i++)
              for (int k = 0; k < 4; k++) if (ext[i][k] != wh[m][i][k]) same = 1'b0;
            checks++;
            if (same) begin failures++; $display("block %0d: tamper not detected", m); end
            else n_tamper++;
          end
          if (m > 0 && wh[m] != wh[m-1]) n_wchg++;
        end
      end
    end
    count_need("idle clocks in input", n_idle);
    count_need("back-to-back blocks", n_b2b);
    count_need("blocks with wrapped sums", n_wrap);
    count_need("watermark changes", n_wchg);
    count_need("watermarks extracted", n_extract);
    count_need("tampers detected", n_tamper);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
