// tb_sar_adc: converts random and edge-case input voltages and compares with
// floor((vin + 1 V) / (2 V / 4096)) clipped to 0..4095; checks that the output
// changes only on a sampling edge.
module tb_sar_adc;
  logic clk = 0, rst_n = 0, sample = 0;
  real vin = 0.0;
  logic [11:0] d_out;
  int checks = 0, failures = 0;

  sar_adc dut (.clk, .rst_n, .sample, .vin, .d_out);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vals[$];
    vals = '{-1.5, -1.0, -0.9999, -0.5, 0.0, 0.000244, 0.3, 0.99, 0.99999, 1.0, 2.0};
    for (int i = 0; i < 1000; i++) vals.push_back(($urandom_range(0, 2000000) - 1000000) / 1.0e6);
    @(negedge clk); rst_n = 1;
    foreach (vals[i]) begin
      int e;
      logic [11:0] held_code;
      e = int'($floor((vals[i] + 1.0) / (2.0 / 4096.0)));
      if (e < 0) e = 0;
      if (e > 4095) e = 4095;
      vin = vals[i]; sample = 0;
      held_code = d_out;
      @(negedge clk);
      chk(d_out == held_code, "holds without sample");
      sample = 1; @(negedge clk); sample = 0;
      vin = 0.123;
      chk(d_out == 12'(e), $sformatf("vin %f: code %0d exp %0d", vals[i], d_out, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
