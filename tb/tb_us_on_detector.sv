// tb_us_on_detector: checks that US_ON rises on the third falling carrier
// edge of each pulse, stays high during the pulse, clears as soon as the
// carrier stops, and is held low during power-on reset.
module tb_us_on_detector;
  logic clk = 0, us_present = 0, por_n = 0, us_on;
  logic run = 0;
  int checks = 0, failures = 0;

  us_on_detector dut (.clk_us(clk), .us_present, .por_n, .us_on);
  always #5 if (run) clk = ~clk; else clk = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    // pulse during reset
    us_present = 1; run = 1;
    repeat (10) @(negedge clk);
    #1 chk(!us_on, "low during reset");
    run = 0; us_present = 0; #50;
    por_n = 1; #20;
    for (int p = 0; p < 5; p++) begin
      int fall;
      us_present = 1; #7; run = 1;
      fall = 0;
      while (!us_on && fall < 20) begin @(negedge clk); fall++; #1; end
      chk(fall == 3, $sformatf("pulse %0d: US_ON after %0d falling edges", p, fall));
      repeat (20 + p) begin @(posedge clk); chk(us_on, "high during pulse"); end
      @(negedge clk); #2; run = 0; us_present = 0;
      #1 chk(!us_on, "cleared when carrier stops");
      #100;
      chk(!us_on, "low in the gap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
