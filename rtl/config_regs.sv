// config_regs: the implant's link-parameter registers.
//
// Written in Config Mode when a downlink frame addressed to this implant has
// been received (we = 1 for one US clock cycle); otherwise hold their value.
// The raw 40-bit word is stored and decoded into the quantities the rest of
// the backend uses. Reset loads dustnet_pkg::CFG_RESET. Parameter set and
// ranges follow the paper's table of programmable uplink parameters; the bit
// layout, encodings and reset values are this design's choices (see the
// package).
module config_regs
  import dustnet_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           we,
  input  logic [39:0]    wword,
  output cfg_word_t      cfg,
  output logic [4:0]     ncps,        // US cycles per uplink symbol
  output logic [4:0]     nsamp,       // samples per packet, 1..16
  output logic [3:0]     nbits,       // 8 or 9 bits sent per sample
  output logic [3:0]     nsyms        // symbols per sample
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  cfg <= CFG_RESET;
    else if (we) cfg <= cfg_word_t'(wword);
  end

  assign ncps  = ncps_of(cfg.ncps_code);
  assign nsamp = {1'b0, cfg.nsamp_m1} + 5'd1;
  assign nbits = bits_per_sample(cfg.m_m1);
  assign nsyms = syms_per_sample(cfg.m_m1);
endmodule
