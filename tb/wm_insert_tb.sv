// wm_insert_tb: random transformed residues and watermarks; checks
// R' = R + w mod 3 for all sixteen positions one clock later, and valid.
module wm_insert_tb;
  import hntt_pkg::*;

  localparam int NB = 500;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  gf3_blk_t R, w, Rp;
  wm_insert dut (.clk, .rst_n, .in_valid, .R, .w, .out_valid, .Rp);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rv [4][4], wv [4][4];
    logic vin;
    R = '0; w = '0; in_valid = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NB; n++) begin
      vin = $urandom_range(0, 1);
      in_valid = vin;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) begin
          rv[i][k] = $urandom_range(0, 2);
          wv[i][k] = $urandom_range(0, 2);
          R[i][k] = gf3_t'(rv[i][k]);
          w[i][k] = gf3_t'(wv[i][k]);
        end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != vin) failures++;
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (Rp[i][k] != gf3_t'((rv[i][k] + wv[i][k]) % 3)) begin
            failures++;
            if (failures < 10) $display("R=%0d w=%0d R'=%0d", rv[i][k], wv[i][k], Rp[i][k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
