// tb_envelope_detector: feeds a charge-up at full amplitude, then a
// Manchester-like pattern of high (1.0) and low (0.6) carrier amplitudes with
// 8-cycle symbols, and checks that after the filters settle the comparator
// output reproduces the transmitted symbol one cycle late in every cycle away
// from the transitions.
module tb_envelope_detector;
  logic clk = 0, dl_data;
  real env = 0.0;
  int checks = 0, failures = 0;

  envelope_detector dut (.clk_us(clk), .env, .dl_data);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit sym, prev;
    int errs_early;
    env = 1.0;
    repeat (64) @(negedge clk);
    #1 checks++; if (dl_data !== 1'b0 && dl_data !== 1'b1) failures++;
    // 300 random Manchester bits = 600 symbols of 8 cycles
    prev = 1;
    for (int b = 0; b < 300; b++) begin
      bit v;
      v = 1'($urandom);
      for (int h = 0; h < 2; h++) begin
        sym = (h == 0) ? v : !v;
        env = sym ? 1.0 : 0.6;
        for (int c = 0; c < 8; c++) begin
          @(negedge clk);
          // after settling (first 40 bits) and away from the edge
          if (b >= 40 && c >= 2) begin
            checks++;
            if (dl_data != sym) begin
              failures++;
              $display("FAIL: bit %0d half %0d cycle %0d: dl_data=%0b exp %0b", b, h, c, dl_data, sym);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
