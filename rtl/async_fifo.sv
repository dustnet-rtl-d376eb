// async_fifo: the implant's 16 x 9-bit sample buffer.
//
// Samples are written at 6.25 kHz in the 50 kHz CLK_LO domain (wen is the
// CLK_SAMP pulse) and read in the extracted ultrasound clock domain during the
// implant's uplink slot. The ultrasound clock only runs while the interrogator
// transmits, so the two sides are fully asynchronous: the buffer uses binary
// pointers one bit wider than the address, exchanged between the domains as
// Gray code through two-flop synchronisers. Full and empty are therefore
// conservative (a word written is visible to the reader two to three read
// clocks later).
// A write into a full buffer is dropped, never overwriting unread data, and
// sets the sticky `overflow` flag (cleared only by reset). rdata shows the
// oldest word whenever rempty is low (first-word fall-through); ren pops it.
// rcount is the number of words the reader can see.
// Depth and width follow the paper; the clock-crossing scheme and the
// overflow policy are this design's choices. rrst_n also gates the
// read-while-empty assertion; it resets flip-flops only asynchronously.
module async_fifo #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 9
) (
  input  logic                   wclk,
  input  logic                   wrst_n,
  input  logic                   wen,
  input  logic [WIDTH-1:0]       wdata,
  output logic                   wfull,
  output logic                   overflow,
  input  logic                   rclk,
  input  logic                   rrst_n,
  input  logic                   ren,
  output logic [WIDTH-1:0]       rdata,
  output logic                   rempty,
  output logic [$clog2(DEPTH):0] rcount
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] rbin_w, wbin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---- write side ----
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) {rgray_w2, rgray_w1} <= '0;
    else         {rgray_w2, rgray_w1} <= {rgray_w1, rgray};
  end
  assign rbin_w = gray2bin(rgray_w2);
  assign wfull  = (wbin - rbin_w) == (AW+1)'(DEPTH);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      overflow <= 1'b0;
    end else if (wen) begin
      if (wfull) begin
        overflow <= 1'b1;
      end else begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wen && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  // ---- read side ----
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) {wgray_r2, wgray_r1} <= '0;
    else         {wgray_r2, wgray_r1} <= {wgray_r1, wgray};
  end
  assign wbin_r = gray2bin(wgray_r2);
  assign rcount = wbin_r - rbin;
  assign rempty = (rcount == '0);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else if (ren && !rempty) begin
      rbin  <= rbin + 1'b1;
      rgray <= bin2gray(rbin + 1'b1);
    end
  end

  initial assert (DEPTH == (1 << AW)) else $error("async_fifo: DEPTH must be a power of two");
  always_ff @(posedge rclk) if (rrst_n) assert (!(ren && rempty)) else $error("async_fifo: read while empty");
endmodule
