// clk_gen: sampling phase generator of the neural front end.
//
// The 50 kHz oscillator clock CLK_LO drives the input chopper directly and is
// divided by DIV (8) to give the 6.25 kHz sampling rate. A 3-bit phase counter
// produces two one-cycle enables in CLK_LO's domain:
//   samp_en   - phase 0: the ADC samples the integrator output; the same pulse
//               is CLK_SAMP, the FIFO write enable and the LFSR step.
//   phi_reset - phase 1: the integrator is reset one CLK_LO cycle after the
//               sample, leaving DIV-1 = 7 cycles (140 us) of integration.
// The divide ratio and the reset-after-sample order follow the paper; the
// counter's reset value (first sample right after reset) is a design choice.
module clk_gen #(
  parameter int unsigned DIV = 8
) (
  input  logic clk_lo,
  input  logic rst_n,
  output logic phi_chop,
  output logic samp_en,
  output logic phi_reset
);
  localparam int unsigned CW = $clog2(DIV);
  logic [CW-1:0] phase;

  always_ff @(posedge clk_lo or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= (phase == CW'(DIV - 1)) ? '0 : phase + 1'b1;
  end

  assign phi_chop  = clk_lo;
  assign samp_en   = rst_n && (phase == '0);
  assign phi_reset = rst_n && (phase == CW'(1));
endmodule
