// dustnet_top: one DustNet implant IC.
//
// The implant records a neural signal, buffers the samples and sends them to
// the external ultrasound interrogator by modulating the echo of the
// interrogator's pulses (16-level amplitude-shift keying of the backscatter).
// Several implants share the link by time division: each owns one pulse in
// every N. The interrogator configures each implant beforehand with a 2-level
// ASK downlink encoded in the amplitude of its pulses.
// This module joins the digital backend with behavioural models of the mixed-
// signal parts that have a logic function: the envelope detector (downlink
// bits), the US-on detector (pulse detection), the uplink current DACs and the
// SAR ADC. The analog parts without one (rectifier, regulators, references,
// power-on reset, carrier clock extraction, oscillator and the amplifier /
// integrator in front of the ADC) are outside: their outputs are ports.
//   clk_us     carrier clock extracted from the piezo (2 MHz, only during pulses)
//   clk_lo     50 kHz on-chip oscillator
//   por_n      power-on reset flag V_POR (active low reset)
//   us_present carrier present at the rectifier (drives the US-on detector)
//   env        carrier amplitude at the piezo (envelope detector input)
//   pos_half   carrier polarity, selects IDACP or IDACN
//   v_afe      integrator output at the ADC input, volts (differential)
//   implant_id hard-wired 3-bit ID pads
// Outputs: the I-DAC code and enable (ul_data, ul_en), the unit-current code
// ul_fs, the modelled DAC currents, the rectifier enable and status flags.
module dustnet_top
  import dustnet_pkg::*;
(
  input  logic               clk_us,
  input  logic               clk_lo,
  input  logic               por_n,
  input  logic               us_present,
  input  real                env,
  input  logic               pos_half,
  input  real                v_afe,
  input  logic [ID_BITS-1:0] implant_id,
  output logic               ul_en,
  output logic [3:0]         ul_data,
  output logic [3:0]         ul_fs,
  output real                i_dacp,
  output real                i_dacn,
  output logic               rect_en,
  output logic               phi_chop,
  output logic               phi_reset,
  output logic               uplink_mode,
  output logic               fifo_overflow,
  output logic               dl_error,
  output logic               ul_busy,
  output logic [2:0]         tdma_slot,
  output cfg_word_t          cfg
);
  logic                env_bit, us_on, adc_sample;
  logic [ADC_BITS-1:0] d_out;

  envelope_detector u_env (.clk_us, .env, .dl_data(env_bit));

  us_on_detector u_uson (.clk_us, .us_present, .por_n, .us_on);

  sar_adc #(.BITS(ADC_BITS)) u_adc (
    .clk(clk_lo), .rst_n(por_n), .sample(adc_sample), .vin(v_afe), .d_out
  );

  digital_backend u_dbe (
    .clk_us, .clk_lo, .por_n, .env_bit, .us_on, .implant_id, .d_out,
    .adc_sample, .phi_chop, .phi_reset, .ul_en, .ul_data, .ul_fs,
    .uplink_mode, .fifo_overflow, .dl_error, .ul_busy, .tdma_slot, .cfg
  );

  uplink_idac u_idac (
    .ul_en, .ul_data, .ul_fs, .pos_half, .i_dacp, .i_dacn, .rect_en
  );
endmodule
