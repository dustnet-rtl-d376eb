// us_on_detector: behavioural model of the ultrasound-on detector.
//
// Behavioural model: the real circuit is a capacitor that is discharged by
// transistors driven by the rectifier comparator outputs while the carrier is
// present, and recharged by a current source when it is absent, followed by
// an inverter and a D flip-flop clocked on the falling edge of CK_US whose
// reset path also takes the inverted power-on reset. Here the discharge is a
// counter: US_ON rises on the DISCHARGE_CYC-th falling CK_US edge after the
// carrier appears, and is cleared asynchronously when the carrier stops
// (us_present low) or during power-on reset. The delay value is this model's.
module us_on_detector #(
  parameter int unsigned DISCHARGE_CYC = 3
) (
  input  logic clk_us,
  input  logic us_present,
  input  logic por_n,
  output logic us_on
);
  logic       clr_n;
  logic [3:0] cnt;
  assign clr_n = us_present && por_n;

  always_ff @(negedge clk_us or negedge clr_n) begin
    if (!clr_n) begin
      cnt   <= '0;
      us_on <= 1'b0;
    end else begin
      if (cnt != 4'(DISCHARGE_CYC)) cnt <= cnt + 1'b1;
      us_on <= (cnt >= 4'(DISCHARGE_CYC - 1));
    end
  end
endmodule
