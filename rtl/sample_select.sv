// sample_select: forms the 9-bit word written into the sample FIFO.
//
// With LFSR data disabled, a 9-bit window of the 12-bit ADC result is taken:
// slice code 0..3 selects bits 0-8, 1-9, 2-10 or 3-11, setting the recorded
// range (MSBs for large signals, LSBs for the finest resolution). With LFSR
// data enabled, the low 9 bits of the LFSR state are stored instead.
// Purely combinational. The four slices and the choice between ADC and LFSR
// follow the paper; placing the slice before the FIFO is this design's reading.
module sample_select #(
  parameter int unsigned ADC_BITS = 12,
  parameter int unsigned W        = 9
) (
  input  logic [ADC_BITS-1:0] d_out,
  input  logic [W-1:0]        d_prbs,
  input  logic [1:0]          slice,
  input  logic                lfsr_en,
  output logic [W-1:0]        wdata
);
  always_comb begin
    if (lfsr_en) wdata = d_prbs;
    else         wdata = W'(d_out >> slice);
  end

  initial assert (ADC_BITS >= W + 3) else $error("sample_select: ADC too narrow for four slices");
endmodule
