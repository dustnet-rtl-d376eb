// tb_uplink_idac: checks for every code and unit-current setting that the
// active DAC carries code * I_M microamperes (I_M = 4, 8, ..., 40 uA), that
// only the DAC of the current half cycle conducts, that both are off while
// UL_EN is low, and that the rectifier is disabled exactly while UL_EN is high.
module tb_uplink_idac;
  logic ul_en = 0, pos_half = 0, rect_en;
  logic [3:0] ul_data = 0, ul_fs = 0;
  real i_dacp, i_dacn;
  int checks = 0, failures = 0;

  uplink_idac dut (.ul_en, .ul_data, .ul_fs, .pos_half, .i_dacp, .i_dacn, .rect_en);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int fs = 0; fs < 16; fs++)
      for (int c = 0; c < 16; c++)
        for (int e = 0; e < 2; e++)
          for (int h = 0; h < 2; h++) begin
            real iu, exp_i;
            ul_fs = 4'(fs); ul_data = 4'(c); ul_en = e[0]; pos_half = h[0];
            #1;
            iu = (fs >= 9) ? 40.0 : 4.0 * (fs + 1);
            exp_i = e ? iu * c : 0.0;
            chk((h ? i_dacp : i_dacn) == exp_i, $sformatf("fs=%0d code=%0d en=%0d: %f exp %f", fs, c, e, h ? i_dacp : i_dacn, exp_i));
            chk((h ? i_dacn : i_dacp) == 0.0, "other half-cycle DAC off");
            chk(rect_en == !e[0], "rectifier off while modulating");
          end
    // linearity: equal steps at a fixed setting
    ul_en = 1; pos_half = 1; ul_fs = 4'd4;
    for (int c = 1; c < 16; c++) begin
      real a, b;
      ul_data = 4'(c - 1); #1 a = i_dacp;
      ul_data = 4'(c);     #1 b = i_dacp;
      chk(b - a == 20.0, "linear 20 uA steps at I_M = 20 uA");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
