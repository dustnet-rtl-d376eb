// tb_lfsr16: checks the PRBS generator against an independent bit-serial
// model of x^16 + x^14 + x^13 + x^11 + 1, that it holds without `step`, that
// it never reaches the all-zero state and that its period is 65535.
module tb_lfsr16;
  logic clk = 0, rst_n = 0, step = 0;
  logic [15:0] state;
  int checks = 0, failures = 0;

  lfsr16 dut (.clk, .rst_n, .step, .state);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] model, first;
    int period;
    @(negedge clk); rst_n = 1;
    model = 16'hACE1;
    chk(state == model, "seed after reset");
    for (int i = 0; i < 500; i++) begin
      step = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) model = {model[14:0], model[15] ^ model[13] ^ model[12] ^ model[10]};
      chk(state == model, $sformatf("step %0d: state %h expected %h", i, state, model));
    end
    step = 1;
    first = state;
    period = 0;
    do begin
      @(negedge clk);
      period++;
      if (state == 16'h0) begin chk(0, "zero state reached"); break; end
    end while (state != first && period < 70000);
    chk(period == 65535, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
