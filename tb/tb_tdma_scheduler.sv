// tb_tdma_scheduler: for every number of implants (1..8) and uplink index,
// sends 3 frames of pulses and checks that my_slot fires exactly on pulses
// k with k mod N == index-1, never while disabled, and never if index > N.
module tb_tdma_scheduler;
  logic clk = 0, rst_n = 0, enable = 0, pulse_start = 0;
  logic [2:0] nimp_m1, ulidx_m1, slot;
  logic my_slot;
  int checks = 0, failures = 0;

  tdma_scheduler dut (.clk, .rst_n, .enable, .pulse_start, .nimp_m1, .ulidx_m1, .my_slot, .slot);
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
    @(negedge clk); rst_n = 1;
    for (int n = 1; n <= 8; n++) begin
      for (int idx = 1; idx <= 8; idx++) begin
        nimp_m1 = 3'(n - 1); ulidx_m1 = 3'(idx - 1);
        enable = 0;
        // pulses while disabled never fire
        pulse_start = 1; #1 chk(!my_slot, "disabled: no slot"); @(negedge clk); pulse_start = 0;
        @(negedge clk);
        enable = 1;
        @(negedge clk);
        for (int k = 0; k < 3 * n; k++) begin
          repeat ($urandom_range(1, 4)) @(negedge clk);
          pulse_start = 1;
          #1;
          chk(my_slot == ((k % n) == (idx - 1)),
              $sformatf("N=%0d idx=%0d pulse %0d: my_slot=%0b", n, idx, k, my_slot));
          @(negedge clk);
          pulse_start = 0;
          #1 chk(!my_slot, "my_slot only with pulse_start");
        end
      end
    end
    enable = 0; pulse_start = 1; #1;
    chk(!my_slot, "disabled: no slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
