// special_hntt_2d_tb: streams random 4x4 GF(3) blocks, with random idle
// clocks, into the 2-D special HNTT. Every output block is compared with
// H4 * A * H4 mod 3 (integer matrix products) exactly four clocks after its
// input, and out_valid must follow in_valid by the same four clocks. A second
// instance fed by the first checks that the transform is its own inverse.
module special_hntt_2d_tb;
  import hntt_pkg::*;
  import hntt_ref_pkg::*;

  localparam int LAT = 4;
  localparam int NB  = 600;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid, out_valid2;
  gf3_blk_t a, b, b2;
  special_hntt_2d dut  (.clk, .rst_n, .in_valid, .a, .out_valid, .b);
  special_hntt_2d dut2 (.clk, .rst_n, .in_valid(out_valid), .a(b),
                        .out_valid(out_valid2), .b(b2));

  mat_t hist [NB];
  logic vhist [NB];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mat_t e;
    int   m, m2;
    a = '0; in_valid = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NB + 2 * LAT; n++) begin
      if (n < NB) begin
        vhist[n] = ($urandom_range(0, 3) != 0);
        in_valid = vhist[n];
        for (int i = 0; i < 4; i++)
          for (int k = 0; k < 4; k++) begin
            hist[n][i][k] = $urandom_range(0, 2);
            a[i][k] = gf3_t'(hist[n][i][k]);
          end
      end else begin
        in_valid = 1'b0;
      end
      @(posedge clk);
      #1;
      m = n - LAT + 1;
      if (m >= 0 && m < NB) begin
        checks++;
        if (out_valid != vhist[m]) begin failures++; $display("valid mismatch at %0d", m); end
        e = ref_shntt(hist[m]);
        for (int i = 0; i < 4; i++)
          for (int k = 0; k < 4; k++) begin
            checks++;
            if (b[i][k] != gf3_t'(e[i][k])) begin
              failures++;
              if (failures < 10) $display("blk %0d B[%0d][%0d]=%0d expected %0d", m, i, k, b[i][k], e[i][k]);
            end
          end
      end
      m2 = n - 2 * LAT + 1;
      if (m2 >= 0 && m2 < NB) begin
        checks++;
        if (out_valid2 != vhist[m2]) failures++;
        for (int i = 0; i < 4; i++)
          for (int k = 0; k < 4; k++) begin
            checks++;
            if (b2[i][k] != gf3_t'(hist[m2][i][k])) failures++;
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
