// tb_clk_gen: checks the sampling phases derived from CLK_LO.
// Expects samp_en exactly once every 8 CLK_LO cycles (6.25 kHz from 50 kHz),
// phi_reset in the cycle right after each samp_en, and phi_chop = CLK_LO.
module tb_clk_gen;
  logic clk_lo = 0, rst_n = 0;
  logic phi_chop, samp_en, phi_reset;
  int checks = 0, failures = 0;

  clk_gen dut (.clk_lo, .rst_n, .phi_chop, .samp_en, .phi_reset);

  always #10000 clk_lo = ~clk_lo;   // 20 us period = 50 kHz

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400) @(posedge clk_lo);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_samp, n_samp, cyc;
    bit prev_samp;
    repeat (2) @(negedge clk_lo);
    rst_n = 1;
    #1;
    last_samp = -1; n_samp = 0; prev_samp = samp_en;
    for (cyc = 0; cyc < 200; cyc++) begin
      @(negedge clk_lo);
      chk(phi_chop == clk_lo, "phi_chop follows CLK_LO");
      chk(phi_reset == prev_samp, $sformatf("phi_reset one cycle after sample, cycle %0d", cyc));
      chk(!(samp_en && phi_reset), "sample and reset never overlap");
      if (samp_en) begin
        if (last_samp >= 0) chk(cyc - last_samp == 8, $sformatf("sample period %0d != 8", cyc - last_samp));
        last_samp = cyc;
        n_samp++;
      end
      prev_samp = samp_en;
    end
    chk(n_samp == 25 || n_samp == 24, $sformatf("25 samples in 200 cycles, got %0d", n_samp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
