// delay_fifo: the z^-m delay of the divisible parts. It holds each block's
// sixteen 8-bit divisible parts for exactly DELAY clocks, so that they reach
// the output adders in the same clock as the block's inverse-transformed
// residues.
//
// The architecture names this a FIFO and places it in block RAM. Here it is a
// circular buffer of DELAY-1 words (WIDTH bits each) with one pointer: every
// clock the word at the pointer is read into the output register and the new
// word is written in its place, then the pointer advances. A word therefore
// comes back DELAY-1 clocks after it was written and leaves the output
// register one clock later: total latency DELAY clocks, one word per clock.
// Memory-plus-single-pointer is this design's choice of FIFO; with a constant
// delay no full/empty flags are needed.
//
// The memory is not reset: until DELAY clocks after reset the output carries
// whatever the array held, which the caller ignores (its valid flag is low).
module delay_fifo #(
  parameter int unsigned WIDTH = 128,  // 16 pixels x 8 bits
  parameter int unsigned DELAY = 89    // m, clocks from din to dout (>= 3)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int unsigned DEPTH = DELAY - 1;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;

  always_ff @(posedge clk) begin
    mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr  <= '0;
      dout <= '0;
    end else begin
      dout <= mem[ptr];
      ptr  <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end

  initial begin
    assert (DELAY >= 3) else $error("delay_fifo: DELAY must be at least 3");
  end

endmodule
