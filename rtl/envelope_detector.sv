// envelope_detector: behavioural model of the downlink envelope detector.
//
// Behavioural model, not synthesizable logic: the real circuit is analog.
// The rectified piezo signal is filtered by two low-pass filters with
// different corner frequencies; a comparator clocked by the extracted
// ultrasound clock CK_US compares the fast one (the instantaneous envelope)
// with the slow one (the average envelope) and outputs DL_DATA = 1 while the
// envelope is above its average. Manchester coding keeps the average constant
// during the downlink data. Here each filter is a first-order recursive
// average updated once per carrier cycle with coefficients A_FAST and A_SLOW;
// their values are this model's own. `env` is the carrier amplitude at the
// piezo (any unit).
// Timing: dl_data changes on the rising edge of clk_us, one cycle after env.
module envelope_detector #(
  parameter real A_FAST = 0.75,
  parameter real A_SLOW = 1.0 / 16.0
) (
  input  logic clk_us,
  input  real  env,
  output logic dl_data
);
  real fast_v;   // a real starts at 0.0
  real slow_v;

  always_ff @(posedge clk_us) begin
    fast_v  <= fast_v + A_FAST * (env - fast_v);
    slow_v  <= slow_v + A_SLOW * (env - slow_v);
    dl_data <= (fast_v + A_FAST * (env - fast_v)) > (slow_v + A_SLOW * (env - slow_v));
  end
endmodule
