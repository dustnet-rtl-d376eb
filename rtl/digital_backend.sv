// digital_backend: the implant's protocol and data-handling logic.
//
// Two clock domains:
//   CLK_LO (50 kHz, on-chip oscillator, always running after power-up):
//     clk_gen makes the 6.25 kHz sampling enable; on each one the word chosen
//     by sample_select (a 9-bit slice of the ADC result, or the LFSR word) is
//     written into the FIFO and the LFSR steps.
//   CLK_US (extracted from the ultrasound carrier, runs only during pulses):
//     envelope bits -> dl_demod -> protocol_fsm -> config_regs in Config
//     Mode; US_ON -> protocol_fsm -> tdma_scheduler -> uplink_ctrl, which
//     reads the FIFO and drives the I-DAC code, in Uplink Mode. The
//     symbol_clk_gen supplies the downlink and uplink symbol strobes.
// The configuration bits used in the CLK_LO domain (LFSR enable, ADC slice)
// change only in Config Mode and cross through two-flop synchronisers.
// Power-on reset (por_n, V_POR) resets both domains asynchronously.
// The ADC takes its sample on adc_sample; the word written to the FIFO at a
// sampling enable is the result of the previous conversion.
// The partitioning follows the paper's block diagram; the clock-domain
// arrangement is this design's choice.
// Left unused on purpose: the FIFO's wfull and rempty (the write side drops
// words itself, the reader uses rcount), config_regs' nbits (uplink_ctrl
// derives the sample width from M) and LFSR state bits 15:9 (9 bits are
// stored). por_n is also used as a level in clk_gen's outputs and in
// assertions, which lint reports as a net used both as asynchronous reset
// and as data; it is only ever an asynchronous reset of the flip-flops.
module digital_backend
  import dustnet_pkg::*;
#(
  parameter int unsigned CHARGE_CYC = 16
) (
  input  logic                clk_us,
  input  logic                clk_lo,
  input  logic                por_n,
  input  logic                env_bit,
  input  logic                us_on,
  input  logic [ID_BITS-1:0]  implant_id,
  input  logic [ADC_BITS-1:0] d_out,
  output logic                adc_sample,
  output logic                phi_chop,
  output logic                phi_reset,
  output logic                ul_en,
  output logic [3:0]          ul_data,
  output logic [3:0]          ul_fs,
  output logic                uplink_mode,
  output logic                fifo_overflow,
  output logic                dl_error,
  output logic                ul_busy,
  output logic [2:0]          tdma_slot,
  output cfg_word_t           cfg
);
  // ---------------- CLK_LO domain ----------------
  logic                  samp_en;
  logic [LFSR_BITS-1:0]  lfsr_state;
  logic [FIFO_WIDTH-1:0] wdata;
  logic                  wfull;
  logic [2:0]            lo_sync1, lo_sync2;   // {lfsr_en, adc_slice}

  always_ff @(posedge clk_lo or negedge por_n) begin
    if (!por_n) {lo_sync2, lo_sync1} <= '0;
    else        {lo_sync2, lo_sync1} <= {lo_sync1, {cfg.lfsr_en, cfg.adc_slice}};
  end

  clk_gen #(.DIV(8)) u_clk_gen (
    .clk_lo, .rst_n(por_n), .phi_chop, .samp_en, .phi_reset
  );
  assign adc_sample = samp_en;

  lfsr16 u_lfsr (.clk(clk_lo), .rst_n(por_n), .step(samp_en), .state(lfsr_state));

  sample_select u_sel (
    .d_out, .d_prbs(lfsr_state[FIFO_WIDTH-1:0]), .slice(lo_sync2[1:0]),
    .lfsr_en(lo_sync2[2]), .wdata
  );

  // ---------------- FIFO (crosses domains) ----------------
  logic                  fifo_ren, fifo_empty;
  logic [FIFO_WIDTH-1:0] fifo_rdata;
  logic [4:0]            fifo_count;

  async_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(FIFO_WIDTH)) u_fifo (
    .wclk(clk_lo), .wrst_n(por_n), .wen(samp_en), .wdata, .wfull, .overflow(fifo_overflow),
    .rclk(clk_us), .rrst_n(por_n), .ren(fifo_ren), .rdata(fifo_rdata), .rempty(fifo_empty),
    .rcount(fifo_count)
  );

  // ---------------- CLK_US domain ----------------
  logic [7:0]          dl_width;
  logic                dl_sync, dl_run, clk_dl, clk_ul, ul_sync;
  logic                bit_valid, bit_data, frame_done;
  logic                pulse_start, dl_restart, cfg_we, ack_req;
  logic [CW_BITS-1:0]  cfg_word;
  logic [TID_BITS-1:0] ack_id;
  logic [4:0]          ncps, nsamp;
  logic [3:0]          nbits, nsyms;
  logic                my_slot;

  dl_demod u_dl (
    .clk_us, .rst_n(por_n), .restart(dl_restart), .env_bit, .clk_dl,
    .dl_width, .dl_sync, .dl_run, .bit_valid, .bit_data, .frame_done, .err(dl_error)
  );

  symbol_clk_gen u_symclk (
    .clk_us, .rst_n(por_n), .dl_width, .dl_sync, .dl_run, .clk_dl,
    .ul_sync, .ncps, .clk_ul
  );

  protocol_fsm u_fsm (
    .clk_us, .rst_n(por_n), .us_on, .implant_id, .bit_valid, .bit_data, .frame_done,
    .pulse_start, .dl_restart, .cfg_we, .cfg_word, .ack_req, .ack_id, .uplink_mode
  );

  config_regs u_cfg (
    .clk(clk_us), .rst_n(por_n), .we(cfg_we), .wword(cfg_word), .cfg, .ncps, .nsamp, .nbits, .nsyms
  );
  assign ul_fs = cfg.idac_fs;

  tdma_scheduler #(.NMAX(NIMP_MAX)) u_tdma (
    .clk(clk_us), .rst_n(por_n), .enable(uplink_mode), .pulse_start,
    .nimp_m1(cfg.nimp_m1), .ulidx_m1(cfg.ulidx_m1), .my_slot, .slot(tdma_slot)
  );

  uplink_ctrl #(.CHARGE_CYC(CHARGE_CYC)) u_ul (
    .clk(clk_us), .rst_n(por_n), .start_data(my_slot), .start_ack(ack_req), .ack_id,
    .m_m1(cfg.m_m1), .nsamp, .nsyms, .clk_ul, .ul_sync,
    .fifo_rdata, .fifo_count, .fifo_ren, .ul_en, .ul_data, .busy(ul_busy)
  );
endmodule
