// tb_dl_demod: sends complete Config Mode downlink frames as envelope bits:
// charge-up (all 1), preamble "10" x 32, header "11001100", 48 random bits
// Manchester coded ("10" = 1, "01" = 0), with symbol widths of 4 to 24 carrier
// cycles, some with +-1 cycle jitter per symbol. Checks the width estimate,
// every decoded bit, frame_done, and that a corrupted Manchester pair raises
// err and produces no frame_done. Includes symbol_clk_gen, which provides the
// sampling strobes.
module tb_dl_demod;
  logic clk = 0, rst_n = 0, restart = 0, env_bit = 1;
  logic clk_dl, dl_sync, dl_run, bit_valid, bit_data, frame_done, err, clk_ul;
  logic [7:0] dl_width;
  int checks = 0, failures = 0;

  dl_demod dut (.clk_us(clk), .rst_n, .restart, .env_bit, .clk_dl, .dl_width, .dl_sync,
                .dl_run, .bit_valid, .bit_data, .frame_done, .err);
  symbol_clk_gen u_sc (.clk_us(clk), .rst_n, .dl_width, .dl_sync, .dl_run, .clk_dl,
                       .ul_sync(1'b0), .ncps(5'd8), .clk_ul);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [47:0] got;
  int nbits_got, nframes, nerr;
  always @(posedge clk) begin
    if (bit_valid) begin got = {got[46:0], bit_data}; nbits_got++; end
    if (frame_done) nframes++;
    if (err) nerr++;
  end

  task automatic send_sym(input bit v, input int w, input bit jitter);
    int len;
    len = jitter ? w + $urandom_range(0, 2) - 1 : w;
    env_bit = v;
    repeat (len) @(negedge clk);
  endtask

  task automatic send_frame(input logic [47:0] bits, input int w, input bit jitter, input int bad_bit);
    restart = 1; @(negedge clk); restart = 0;
    repeat (3 * w + 7) begin env_bit = 1; @(negedge clk); end    // charge-up
    for (int i = 0; i < 32; i++) begin send_sym(1, w, jitter); send_sym(0, w, jitter); end
    for (int i = 7; i >= 0; i--) send_sym(dustnet_pkg::DL_HEADER[i], w, jitter);
    for (int i = 47; i >= 0; i--) begin
      if (47 - i == bad_bit) begin send_sym(1, w, jitter); send_sym(1, w, jitter); end
      else begin send_sym(bits[i], w, jitter); send_sym(!bits[i], w, jitter); end
    end
    repeat (2 * w) begin env_bit = 1; @(negedge clk); end           // uplink section
  endtask

  initial begin
    logic [47:0] bits;
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      int w;
      bit jit;
      w = 4 + 2 * (k % 11);
      jit = (k >= 6) && (w >= 8);
      bits = {$urandom, 16'($urandom)};
      nbits_got = 0; nframes = 0; nerr = 0;
      send_frame(bits, w, jit, -1);
      if (!jit) chk(dl_width == 8'(w), $sformatf("width estimate %0d exp %0d", dl_width, w));
      else chk(dl_width >= 8'(w - 1) && dl_width <= 8'(w + 1), $sformatf("jittered width %0d ~ %0d", dl_width, w));
      chk(nbits_got == 48, $sformatf("w=%0d: 48 bits, got %0d", w, nbits_got));
      chk(got == bits, $sformatf("w=%0d: bits %h exp %h", w, got, bits));
      chk(nframes == 1 && nerr == 0, $sformatf("w=%0d: one frame, no error", w));
    end
    // corrupted frame
    nbits_got = 0; nframes = 0; nerr = 0;
    send_frame(48'h123456789abc, 6, 0, 20);
    chk(nerr == 1, "bad Manchester pair flagged");
    chk(nframes == 0, "no frame_done after error");
    chk(nbits_got == 20, $sformatf("bits before the error: %0d", nbits_got));
    // restart recovers
    nbits_got = 0; nframes = 0; nerr = 0;
    send_frame(48'hfedcba987654, 10, 0, -1);
    chk(nframes == 1 && got == 48'hfedcba987654, "recovers after an aborted frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
