// div_res_split_tb: presents every pixel value 0..255 (sixteen blocks of
// sixteen pixels, then random blocks) and checks r = x mod 3, d = x - r and
// the one-clock latency of data and valid.
module div_res_split_tb;
  import hntt_pkg::*;

  localparam int NB = 80;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  pix_blk_t x, d;
  gf3_blk_t r;
  div_res_split dut (.clk, .rst_n, .in_valid, .x, .out_valid, .r, .d);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    logic vin;
    x = '0; in_valid = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NB; n++) begin
      vin = n[0] | (n > 20);
      in_valid = vin;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++)
          x[i][k] = (n < 16) ? pix_t'(16 * n + 4 * i + k) : pix_t'($urandom_range(0, 255));
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != vin) failures++;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) begin
          v = int'(x[i][k]);
          checks += 2;
          if (r[i][k] != gf3_t'(v % 3)) begin
            failures++;
            $display("x=%0d r=%0d", v, r[i][k]);
          end
          if (d[i][k] != pix_t'(v - v % 3)) begin
            failures++;
            $display("x=%0d d=%0d", v, d[i][k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
