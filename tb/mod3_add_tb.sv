// mod3_add_tb: exhaustive check of the GF(3) look-up-table adder in both
// variants (SUB = 0: a + b, SUB = 1: a - b) over all sixteen input codes,
// with the code 11 counting as residue 0.
module mod3_add_tb;
  import hntt_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  gf3_t a, b, c_add, c_sub;
  mod3_add #(.SUB(1'b0)) dut_add (.a, .b, .c(c_add));
  mod3_add #(.SUB(1'b1)) dut_sub (.a, .b, .c(c_sub));

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int av, bv;
    for (int i = 0; i < 16; i++) begin
      a = gf3_t'(i / 4);
      b = gf3_t'(i % 4);
      @(posedge clk);
      av = (i / 4) % 3;
      bv = (i % 4) % 3;
      checks += 2;
      if (c_add != gf3_t'((av + bv) % 3)) begin
        failures++;
        $display("add %0d+%0d got %0d", av, bv, c_add);
      end
      if (c_sub != gf3_t'((av + 3 - bv) % 3)) begin
        failures++;
        $display("sub %0d-%0d got %0d", av, bv, c_sub);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
