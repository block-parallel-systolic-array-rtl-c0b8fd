// pipe_delay: a plain register pipeline of DEPTH stages, WIDTH bits wide,
// with synchronous active-low reset. DEPTH = 0 is a wire. Used to keep the
// watermark in step with its block and to pad the residue path to the
// pipelining latency m of the architecture.
module pipe_delay #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int s = 0; s < DEPTH; s++) stage[s] <= '0;
      end else begin
        stage[0] <= din;
        for (int s = 1; s < DEPTH; s++) stage[s] <= stage[s-1];
      end
    end
    assign dout = stage[DEPTH-1];
  end

endmodule
