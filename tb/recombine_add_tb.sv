// recombine_add_tb: random divisible parts (multiples of 3, including 255)
// and marked residues 0..2; checks x' = (d + r') mod 256 one clock later,
// counting how many sums wrapped past 255 (there must be some).
module recombine_add_tb;
  import hntt_pkg::*;

  localparam int NB = 400;

  int checks = 0, failures = 0, wraps = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  pix_blk_t d, xp;
  gf3_blk_t rp;
  recombine_add dut (.clk, .rst_n, .in_valid, .d, .rp, .out_valid, .xp);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dv [4][4], rv [4][4];
    logic vin;
    d = '0; rp = '0; in_valid = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NB; n++) begin
      vin = $urandom_range(0, 1);
      in_valid = vin;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) begin
          dv[i][k] = ($urandom_range(0, 7) == 0) ? 255 : 3 * $urandom_range(0, 85);
          rv[i][k] = $urandom_range(0, 2);
          d[i][k]  = pix_t'(dv[i][k]);
          rp[i][k] = gf3_t'(rv[i][k]);
        end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != vin) failures++;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (dv[i][k] + rv[i][k] > 255) wraps++;
          if (xp[i][k] != pix_t'((dv[i][k] + rv[i][k]) % 256)) begin
            failures++;
            if (failures < 10) $display("d=%0d r'=%0d x'=%0d", dv[i][k], rv[i][k], xp[i][k]);
          end
        end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("no wrapping sum was exercised"); end
    $display("wrapping sums: %0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
