// tb_config_regs: writes random configuration words and checks that the
// fields are stored only on `we`, decoded correctly (cycles per symbol
// 4..16, samples 1..16, 8/9 bits and symbols per sample), and reset.
module tb_config_regs;
  import dustnet_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [39:0] wword;
  cfg_word_t cfg;
  logic [4:0] ncps, nsamp;
  logic [3:0] nbits, nsyms;
  int checks = 0, failures = 0;

  config_regs dut (.clk, .rst_n, .we, .wword, .cfg, .ncps, .nsamp, .nbits, .nsyms);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [39:0] held;
    int exp_ncps, exp_bits, exp_syms, m;
    @(negedge clk);
    chk(cfg == CFG_RESET, "reset value");
    chk(ncps == 8 && nsamp == 12 && nbits == 8 && nsyms == 2, "reset decode");
    rst_n = 1;
    held = 40'(CFG_RESET);
    for (int i = 0; i < 300; i++) begin
      wword = {$urandom, 8'($urandom)};
      we = (i % 3 != 0);
      @(negedge clk);
      if (we) held = wword;
      chk(40'(cfg) == held, $sformatf("stored word %h exp %h", 40'(cfg), held));
      exp_ncps = (held[22:20] == 7) ? 16 : 4 + 2 * int'(held[22:20]);
      m = int'(held[31:30]) + 1;
      exp_bits = (m == 3) ? 9 : 8;
      exp_syms = exp_bits / m;
      chk(ncps == 5'(exp_ncps), $sformatf("ncps %0d exp %0d", ncps, exp_ncps));
      chk(nsamp == 5'(int'(held[35:32]) + 1), "nsamp");
      chk(nbits == 4'(exp_bits) && nsyms == 4'(exp_syms), $sformatf("bits/syms for M=%0d", m));
      chk(cfg.idac_fs == held[39:36] && cfg.nimp_m1 == held[29:27] && cfg.ulidx_m1 == held[26:24] &&
          cfg.lfsr_en == held[23] && cfg.adc_slice == held[19:18], "field positions");
    end
    we = 0;
    rst_n = 0;
    @(negedge clk);
    chk(cfg == CFG_RESET, "reset restores defaults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
