// symbol_clk_gen: symbol timing for the downlink and the uplink.
//
// Both strobes are single-cycle enables in the extracted ultrasound clock
// (CLK_US) domain, so symbol timing is counted in carrier cycles.
//   clk_dl (CLK_DL): sampling strobe for downlink symbols. After an envelope
//     transition (dl_sync) the first strobe comes dl_width/2 cycles later (the
//     middle of the symbol) and then every dl_width cycles, until the next
//     transition realigns it. Only active while dl_run is high.
//   clk_ul (CLK_UL): uplink symbol boundary, every ncps cycles, counted from
//     the cycle after ul_sync. The first strobe comes ncps cycles after ul_sync.
// Counting symbols in carrier cycles and a programmable cycles-per-symbol
// follow the paper; realigning on transitions is this design's choice.
module symbol_clk_gen #(
  parameter int unsigned WW = 8
) (
  input  logic          clk_us,
  input  logic          rst_n,
  input  logic [WW-1:0] dl_width,
  input  logic          dl_sync,
  input  logic          dl_run,
  output logic          clk_dl,
  input  logic          ul_sync,
  input  logic [4:0]    ncps,
  output logic          clk_ul
);
  logic [WW-1:0] dl_cnt;
  logic          dl_half;   // waiting for the first strobe after a transition
  logic [4:0]    ul_cnt;

  // Downlink: count cycles since the last transition or strobe.
  always_ff @(posedge clk_us or negedge rst_n) begin
    if (!rst_n) begin
      dl_cnt  <= WW'(1);
      dl_half <= 1'b1;
    end else if (!dl_run || dl_sync) begin
      dl_cnt  <= WW'(1);
      dl_half <= 1'b1;
    end else if (clk_dl) begin
      dl_cnt  <= WW'(1);
      dl_half <= 1'b0;
    end else begin
      dl_cnt  <= dl_cnt + 1'b1;
    end
  end
  assign clk_dl = dl_run && !dl_sync && (dl_width > WW'(1)) &&
                  (dl_cnt == (dl_half ? (dl_width >> 1) : dl_width));

  // Uplink: free-running symbol counter, restarted by ul_sync.
  always_ff @(posedge clk_us or negedge rst_n) begin
    if (!rst_n)       ul_cnt <= 5'd1;
    else if (ul_sync) ul_cnt <= 5'd1;
    else if (clk_ul)  ul_cnt <= 5'd1;
    else              ul_cnt <= ul_cnt + 1'b1;
  end
  assign clk_ul = !ul_sync && (ul_cnt >= ncps);
endmodule
