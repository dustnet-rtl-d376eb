// tb_sample_select: checks the four 9-bit ADC windows and the LFSR bypass
// with random inputs against an explicit bit-by-bit reference.
module tb_sample_select;
  logic [11:0] d_out;
  logic [8:0]  d_prbs, wdata, exp_w;
  logic [1:0]  slice;
  logic        lfsr_en;
  int checks = 0, failures = 0;

  sample_select dut (.d_out, .d_prbs, .slice, .lfsr_en, .wdata);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      d_out   = 12'($urandom);
      d_prbs  = 9'($urandom);
      slice   = 2'($urandom);
      lfsr_en = (i % 5 == 0);
      #1;
      for (int b = 0; b < 9; b++) exp_w[b] = lfsr_en ? d_prbs[b] : d_out[b + int'(slice)];
      checks++;
      if (wdata !== exp_w) begin
        failures++;
        $display("FAIL: d_out=%h slice=%0d lfsr=%0b got %h exp %h", d_out, slice, lfsr_en, wdata, exp_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
