// delay_fifo_tb: writes a fresh random 128-bit word every clock into the
// z^-m FIFO at its default delay (m = 89) and checks that each word appears
// at the output exactly 89 clocks later, over several trips around the
// circular buffer.
module delay_fifo_tb;

  localparam int W   = 128;
  localparam int DL  = 89;
  localparam int NW  = 600;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] din, dout;
  delay_fifo dut (.clk, .rst_n, .din, .dout);

  logic [W-1:0] hist [NW];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m;
    din = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NW; n++) begin
      for (int j = 0; j < W / 32; j++) hist[n][32*j +: 32] = $urandom;
      din = hist[n];
      @(posedge clk);
      #1;
      m = n - DL + 1;
      if (m >= 0) begin
        checks++;
        if (dout != hist[m]) begin
          failures++;
          if (failures < 10) $display("word %0d: got %h expected %h", m, dout, hist[m]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
