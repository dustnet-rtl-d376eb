// lfsr16: pseudo-random test pattern generator for bit-error-rate measurement.
//
// A 16-bit Fibonacci LFSR with feedback polynomial x^16 + x^14 + x^13 + x^11 + 1
// (maximal length, period 65535). It advances one step each time `step` is high,
// i.e. once per CLK_SAMP period, so it produces test words at the same rate as
// the ADC. The width (16 bits) and the stepping by CLK_SAMP follow the paper;
// the polynomial and the seed are this design's choices, and a receiver that
// checks the bit-error rate must use the same ones.
// Shift direction: new bit enters at bit 0, state <= {state[14:0], fb}.
module lfsr16 #(
  parameter int unsigned  WIDTH = 16,
  parameter logic [15:0]  SEED  = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  output logic [WIDTH-1:0] state
);
  logic fb;
  assign fb = state[15] ^ state[13] ^ state[12] ^ state[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= WIDTH'(SEED);
    else if (step) state <= {state[WIDTH-2:0], fb};
  end

  initial assert (WIDTH == 16) else $error("lfsr16: taps are for WIDTH = 16");
endmodule
