// uplink_idac: behavioural model of the 16-level backscatter modulator.
//
// Behavioural model: the real block is two analog current DACs (IDACP and
// IDACN) built into the active rectifier. Each has 15 identical switchable
// sources of unit current I_M; the 4-bit code UL_DATA switches on that many
// sources, so the piezo current, and with it the echo amplitude, steps
// linearly in 16 levels. IDACP conducts in the positive half cycle of the
// carrier and IDACN in the negative one. While UL_EN is high the rectifier's
// pass transistors are off (rect_en = 0) so C_store is not discharged.
// I_M is set by UL_FS between 4 uA and 40 uA: this model uses
// I_M = 4 uA * (UL_FS + 1), limited to 40 uA (the code mapping is assumed).
// Outputs are currents in microamperes.
module uplink_idac #(
  parameter int unsigned N_UNITS = 15
) (
  input  logic       ul_en,
  input  logic [3:0] ul_data,
  input  logic [3:0] ul_fs,
  input  logic       pos_half,
  output real        i_dacp,
  output real        i_dacn,
  output logic       rect_en
);
  real i_unit, i_tot;
  always_comb begin
    i_unit  = (ul_fs >= 4'd9) ? 40.0 : 4.0 * real'(int'(ul_fs) + 1);
    i_tot   = ul_en ? i_unit * real'((int'(ul_data) > int'(N_UNITS)) ? int'(N_UNITS) : int'(ul_data)) : 0.0;
    i_dacp  = pos_half  ? i_tot : 0.0;
    i_dacn  = !pos_half ? i_tot : 0.0;
    rect_en = !ul_en;
  end
endmodule
