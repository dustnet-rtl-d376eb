// tb_symbol_clk_gen: checks the uplink symbol strobe period for every
// cycles-per-symbol setting (4..16), its restart by ul_sync, and the downlink
// strobes: first at width/2 cycles after a transition, then every width
// cycles, realigned by each new transition and silent while dl_run is low.
module tb_symbol_clk_gen;
  logic clk = 0, rst_n = 0;
  logic [7:0] dl_width = 0;
  logic dl_sync = 0, dl_run = 0, clk_dl, ul_sync = 0, clk_ul;
  logic [4:0] ncps = 8;
  int checks = 0, failures = 0;

  symbol_clk_gen dut (.clk_us(clk), .rst_n, .dl_width, .dl_sync, .dl_run, .clk_dl,
                      .ul_sync, .ncps, .clk_ul);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, last;
    @(negedge clk); rst_n = 1;
    // ---- uplink strobes ----
    for (int n = 4; n <= 16; n += 2) begin
      ncps = 5'(n);
      ul_sync = 1; @(negedge clk); ul_sync = 0;
      t = 0; last = 0;
      for (int c = 1; c <= 5 * n; c++) begin
        #1;
        if (clk_ul) begin
          chk(c - last == n, $sformatf("ncps %0d: strobe spacing %0d", n, c - last));
          last = c;
          t++;
        end
        @(negedge clk);
      end
      chk(t == 5, $sformatf("ncps %0d: 5 strobes in 5 symbols, got %0d", n, t));
    end
    // ---- downlink strobes ----
    for (int w = 4; w <= 20; w += 3) begin
      dl_width = 8'(w);
      dl_run = 0;
      repeat (3) begin @(negedge clk); #1 chk(!clk_dl, "no DL strobe while not running"); end
      dl_run = 1;
      dl_sync = 1; @(negedge clk); dl_sync = 0;
      last = 0; t = 0;
      for (int c = 1; c <= 4 * w; c++) begin
        #1;
        if (clk_dl) begin
          chk(c == w / 2 + t * w, $sformatf("width %0d: strobe at %0d, exp %0d", w, c, w / 2 + t * w));
          t++;
        end
        @(negedge clk);
      end
      chk(t == 4, $sformatf("width %0d: 4 strobes, got %0d", w, t));
      // realign mid-symbol
      dl_sync = 1; @(negedge clk); dl_sync = 0;
      t = 0;
      for (int c = 1; c <= w / 2; c++) begin #1; if (clk_dl) t = c; @(negedge clk); end
      chk(t == w / 2, $sformatf("width %0d: realigned strobe at %0d", w, t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
