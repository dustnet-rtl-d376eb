// sar_adc: behavioural model of the 12-bit SAR ADC of the neural front end.
//
// Behavioural model: the real converter is an asynchronous SAR ADC with a
// 2 V differential full scale. On a clock edge with `sample` high (phi_sample)
// the input is taken and converted by a successive-approximation search with
// an ideal comparator: bit b is kept if the input lies at or above the trial
// level. The result is offset binary: 0 at -VFS/2, 2^BITS-1 just below +VFS/2,
// inputs outside the range clip. The result is ready on d_out after that same
// clock edge and held until the next sample; the real converter's internal
// asynchronous timing is not modelled.
module sar_adc #(
  parameter int unsigned BITS = 12,
  parameter real         VFS  = 2.0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample,
  input  real             vin,
  output logic [BITS-1:0] d_out
);
  function automatic logic [BITS-1:0] convert(input real v);
    logic [BITS-1:0] code;
    real             lsb, x;
    lsb  = VFS / real'(2.0 ** BITS);
    x    = v + VFS / 2.0;
    code = '0;
    for (int b = int'(BITS) - 1; b >= 0; b--) begin
      code[b] = 1'b1;
      if (x < real'(code) * lsb) code[b] = 1'b0;
    end
    return code;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      d_out <= '0;
    else if (sample) d_out <= convert(vin);
  end
endmodule
