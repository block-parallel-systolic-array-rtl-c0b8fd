// ntt_wm_embed_short_tb: the embedder built with the shortest pipeline the
// RTL allows, M = 9 (no balancing registers, a 9-clock divisible-part FIFO),
// so x to x' takes 11 clocks. Random blocks, random watermarks and random
// idle clocks; every output block is compared with the integer reference of
// the embedding at exactly 11 clocks.
module ntt_wm_embed_short_tb;
  import hntt_pkg::*;
  import hntt_ref_pkg::*;

  localparam int M   = 9;
  localparam int LAT = M + 2;
  localparam int NB  = 1000;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  pix_blk_t x, xp;
  gf3_blk_t w;
  ntt_wm_embed #(.M(M)) dut (.clk, .rst_n, .in_valid, .x, .w, .out_valid, .xp);

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

  initial begin
    mat_t e;
    int   m;
    x = '0; w = '0; in_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NB + LAT; n++) begin
      if (n < NB) begin
        vh[n] = ($urandom_range(0, 4) != 0);
        for (int i = 0; i < 4; i++)
          for (int k = 0; k < 4; k++) begin
            xh[n][i][k] = $urandom_range(0, 255);
            wh[n][i][k] = $urandom_range(0, 2);
            x[i][k] = pix_t'(xh[n][i][k]);
            w[i][k] = gf3_t'(wh[n][i][k]);
          end
        in_valid = vh[n];
      end else begin
        in_valid = 1'b0;
      end
      @(posedge clk);
      #1;
      m = n - LAT + 1;
      if (m >= 0 && m < NB) begin
        checks++;
        if (out_valid != vh[m]) failures++;
        if (vh[m]) begin
          e = ref_embed(xh[m], wh[m]);
          for (int i = 0; i < 4; i++)
            for (int k = 0; k < 4; k++) begin
              checks++;
              if (int'(xp[i][k]) != e[i][k]) begin
                failures++;
                if (failures < 10) $display("block %0d x'[%0d][%0d]=%0d expected %0d", m, i, k, xp[i][k], e[i][k]);
              end
            end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
