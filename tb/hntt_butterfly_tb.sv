// hntt_butterfly_tb: drives random GF(3) pairs every clock into the
// butterfly and checks (a+b, a-b) mod 3 one clock later, plus the reset value.
module hntt_butterfly_tb;
  import hntt_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  gf3_t a, b, s, t;
  hntt_butterfly dut (.clk, .rst_n, .a, .b, .s, .t);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int av, bv;
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (s != 0 || t != 0) begin failures++; $display("reset value wrong"); end
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      av = $urandom_range(0, 2);
      bv = $urandom_range(0, 2);
      a = gf3_t'(av);
      b = gf3_t'(bv);
      @(posedge clk);
      #1;
      // outputs now hold the pair driven in this cycle
      checks += 2;
      if (s != gf3_t'((av + bv) % 3) || t != gf3_t'((av + 3 - bv) % 3)) begin
        failures++;
        $display("a=%0d b=%0d got s=%0d t=%0d", a, b, s, t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
