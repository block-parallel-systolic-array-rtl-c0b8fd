// hntt_1d_tb: streams a random GF(3) vector into the 4-point HNTT every clock
// and compares each output with X = H4 * x mod 3 computed by integer matrix
// product, two clocks after the vector entered (the specified latency).
module hntt_1d_tb;
  import hntt_pkg::*;
  import hntt_ref_pkg::*;

  localparam int LAT = 2;
  localparam int NV  = 400;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  gf3_vec_t x, X;
  hntt_1d dut (.clk, .rst_n, .x, .X);

  vec_t hist [NV];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t e;
    x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NV + LAT; n++) begin
      if (n < NV) begin
        for (int i = 0; i < 4; i++) begin
          hist[n][i] = $urandom_range(0, 2);
          x[i] = gf3_t'(hist[n][i]);
        end
      end
      @(posedge clk);
      #1;
      if (n - LAT + 1 >= 0 && n - LAT + 1 < NV) begin
        e = ref_hntt_1d(hist[n - LAT + 1]);
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (X[i] != gf3_t'(e[i])) begin
            failures++;
            if (failures < 10) $display("vec %0d X[%0d]=%0d expected %0d", n - LAT + 1, i, X[i], e[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
