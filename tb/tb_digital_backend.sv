// tb_digital_backend: self-checking testbench of the digital backend alone.
//
// What it does: drives the backend's digital inputs directly (the envelope
// comparator bit env_bit, the ultrasound-on flag us_on and the 12-bit ADC
// result d_out), so no analog model is involved.
//   1. Configures the implant (pad ID 6, target 0x0E) with a Config Mode
//      pulse at a random symbol width of 4..10 cycles and checks the stored
//      word and the "0101"+ID acknowledgement (12 symbols of NCpS cycles).
//   2. Sends target 0x00 and checks the switch to Uplink Mode.
//   3. With one implant in the network every pulse carries a packet: checks
//      header "1010", the sample count, the NCpS symbol timing and that the
//      LFSR samples continue across packets without loss.
//   4. A second instance (pad ID 2) is configured for ADC data, bits 1-9,
//      4-level ASK, TDMA slot 2 of 2. The testbench changes d_out once per
//      pulse and keeps the history: the samples must be the bits 2-9 of the
//      history's values, in order.
// Timing: 2 MHz carrier (500 ns), 50 kHz CLK_LO, one sample every 8 CLK_LO
// cycles (6.25 kHz); the number of samples delivered is checked against it.
`timescale 1ns / 1ps
module tb_digital_backend;
  import dustnet_pkg::*;

  localparam int NI = 2;
  logic clk_us = 1'b0, clk_lo = 1'b0, por_n = 1'b1, us_run = 1'b0;
  logic env_bit = 1'b1, us_on = 1'b0;
  logic [ADC_BITS-1:0] d_out;

  logic       ul_en [NI], ul_busy [NI], uplink_mode [NI], fifo_overflow [NI], dl_error [NI];
  logic       adc_sample [NI], phi_chop [NI], phi_reset [NI];
  logic [3:0] ul_data [NI], ul_fs [NI];
  logic [2:0] tdma_slot [NI];
  cfg_word_t  cfg [NI];
  localparam logic [2:0] PAD [NI] = '{3'd6, 3'd2};

  for (genvar g = 0; g < NI; g++) begin : g_dut
    digital_backend dut (
      .clk_us, .clk_lo, .por_n, .env_bit, .us_on, .implant_id(PAD[g]), .d_out,
      .adc_sample(adc_sample[g]), .phi_chop(phi_chop[g]), .phi_reset(phi_reset[g]),
      .ul_en(ul_en[g]), .ul_data(ul_data[g]), .ul_fs(ul_fs[g]),
      .uplink_mode(uplink_mode[g]), .fifo_overflow(fifo_overflow[g]),
      .dl_error(dl_error[g]), .ul_busy(ul_busy[g]), .tdma_slot(tdma_slot[g]), .cfg(cfg[g])
    );
  end

  always begin
    if (us_run) begin clk_us = 1'b1; #250; clk_us = 1'b0; #250; end
    else #250;
  end
  always #10000 clk_lo = ~clk_lo;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // capture of the backscatter codes
  int qbuf [NI][2048];
  int qlen [NI];
  always @(negedge clk_us)
    for (int i = 0; i < NI; i++)
      if (ul_en[i]) begin
        qbuf[i][qlen[i]] = int'(ul_data[i]);
        qlen[i]++;
      end

  task automatic cyc(input int n, input logic b);
    repeat (n) begin
      @(negedge clk_us);
      env_bit = b;
    end
  endtask

  task automatic pulse_on();
    for (int i = 0; i < NI; i++) qlen[i] = 0;
    env_bit = 1'b1;
    us_run  = 1'b1;
    repeat (3) @(negedge clk_us);
    us_on   = 1'b1;
  endtask

  task automatic pulse_off(input int gap);
    @(negedge clk_us);
    us_on  = 1'b0;
    us_run = 1'b0;
    #(gap * 500);
  endtask

  task automatic config_pulse(input logic [7:0] tid, input cfg_word_t w, input int width);
    logic [47:0] f;
    f = {tid, w};
    pulse_on();
    cyc(40, 1'b1);
    for (int r = 0; r < 32; r++) begin cyc(width, 1'b1); cyc(width, 1'b0); end
    for (int b = 7; b >= 0; b--) cyc(width, DL_HEADER[b]);
    for (int b = 47; b >= 0; b--) begin cyc(width, f[b]); cyc(width, !f[b]); end
    cyc(200, 1'b1);
    pulse_off(60);
  endtask

  // Decode a capture into symbol codes; returns the number of symbols, or -1
  // when the symbols are not NCpS cycles long.
  function automatic int symbols(input int i, input int n, output int sym [512]);
    if (qlen[i] % n != 0) return -1;
    for (int s = 0; s < qlen[i] / n; s++) begin
      sym[s] = qbuf[i][s * n];
      for (int c = 1; c < n; c++) if (qbuf[i][s * n + c] != sym[s]) return -1;
    end
    return qlen[i] / n;
  endfunction

  initial begin
    cfg_word_t w0, w1;
    int sym [512];
    int ns, width, total0, nlast, cnt, scale;
    logic [15:0] lf;
    logic [8:0] exp9;
    time t0;
    bit first;
    int dh [64];
    int nd, hp, np1;
    time tp2;
    logic [7:0] v8 [16];

    d_out = 12'h5A7;
    #1us por_n = 1'b0;
    #49us por_n = 1'b1;
    #5us;

    // implant 0: LFSR data, 16-level ASK, 10 cycles/symbol, 16 samples, alone
    w0 = CFG_RESET;
    w0.idac_fs = 4'd5; w0.nsamp_m1 = 4'd15; w0.m_m1 = 2'd3; w0.nimp_m1 = 3'd0;
    w0.ulidx_m1 = 3'd0; w0.lfsr_en = 1'b1; w0.ncps_code = 3'd3;
    // implant 1: ADC bits 1-9, 4-level ASK, 4 cycles/symbol, slot 2 of 2
    w1 = CFG_RESET;
    w1.nsamp_m1 = 4'd15; w1.m_m1 = 2'd1; w1.nimp_m1 = 3'd1; w1.ulidx_m1 = 3'd1;
    w1.lfsr_en = 1'b0; w1.adc_slice = 2'd1; w1.ncps_code = 3'd0;

    width = 4 + int'($urandom_range(6));
    config_pulse(8'h0E, w0, width);
    chk(cfg[0] == w0, $sformatf("cfg %h, expected %h (W=%0d)", cfg[0], w0, width));
    chk(cfg[1] == CFG_RESET, "implant with pad 2 took a frame for ID 6");
    ns = symbols(0, 10, sym);
    chk(ns == 12, $sformatf("ack: %0d symbols", ns));
    if (ns == 12) begin
      logic [11:0] a;
      for (int s = 0; s < 12; s++) a[11 - s] = (sym[s] == 15);
      chk(a == {ACK_HEADER, 8'h0E}, $sformatf("ack bits %b", a));
    end
    chk(qlen[1] == 0, "the other implant answered");

    width = 4 + int'($urandom_range(6));
    config_pulse(8'h02, w1, width);
    chk(cfg[1] == w1, $sformatf("cfg %h, expected %h", cfg[1], w1));
    chk(cfg[0] == w0, "implant 0 changed configuration");
    chk(symbols(1, 4, sym) == 12, "ack of implant 1");

    config_pulse(UPLINK_ID, '0, 5);
    chk(uplink_mode[0] && uplink_mode[1], "Uplink Mode not entered");

    // Uplink pulses: 200 us wait, 600 carrier cycles, 200 us off.
    lf = 16'hACE1;
    nd = 0;
    hp = 0;
    np1 = 0;
    first = 1'b1;
    total0 = 0;
    t0 = 0;
    for (int p = 0; p < 24; p++) begin
      d_out = 12'($urandom);
      dh[nd++] = int'(d_out);
      if (p == 2) tp2 = $time;
      #200us;                  // let the new d_out reach the FIFO
      pulse_on();
      cyc(600, 1'b1);
      pulse_off(400);
      // implant 0 sends every pulse
      ns = symbols(0, 10, sym);
      chk(ns >= 9, $sformatf("implant 0 packet has %0d symbols", ns));
      if (ns >= 9) begin
        cnt = 0;
        for (int s = 0; s < 4; s++) chk((sym[s] == 15) == UL_HEADER[3 - s], "packet header");
        for (int s = 4; s < 9; s++) cnt = (cnt << 1) | int'(sym[s] == 15);
        chk(ns == 9 + 2 * cnt, $sformatf("%0d symbols for %0d samples", ns, cnt));
        chk(cnt <= 16, "count above nsamp");
        if (p >= 1) begin
          for (int j = 0; j < cnt; j++) v8[j] = 8'({sym[9 + 2 * j][3:0], sym[10 + 2 * j][3:0]});
          if (first && cnt >= 4) begin
            // locate the LFSR: step the reference until four samples match
            for (int k = 0; k < 70000; k++) begin
              logic [15:0] t;
              bit ok;
              t = lf;
              ok = 1'b1;
              for (int j = 0; j < 4; j++) begin
                if (t[8:1] != v8[j]) ok = 1'b0;
                t = {t[14:0], t[15] ^ t[13] ^ t[12] ^ t[10]};
              end
              if (ok) break;
              lf = {lf[14:0], lf[15] ^ lf[13] ^ lf[12] ^ lf[10]};
            end
            first = 1'b0;
            t0 = $time;
          end
          for (int j = 0; j < cnt && !first; j++) begin
            logic [7:0] v;
            v = v8[j];
            chk(lf[8:1] == v, $sformatf("pulse %0d LFSR sample %h, expected %h", p, v, lf[8:1]));
            lf = {lf[14:0], lf[15] ^ lf[13] ^ lf[12] ^ lf[10]};
            if (p >= 2) total0++;
          end
        end
      end
      // implant 1 sends on odd pulses (slot 2 of 2)
      if (p % 2 == 1) begin
        ns = symbols(1, 4, sym);
        chk(ns >= 9, "implant 1 packet missing");
        if (ns >= 9) begin
          cnt = 0;
          for (int s = 4; s < 9; s++) cnt = (cnt << 1) | int'(sym[s] == 15);
          chk(ns == 9 + 4 * cnt, "implant 1 packet length");
          // the first packet drains samples taken before configuration
          if (np1++ >= 1 && ns == 9 + 4 * cnt) begin
            for (int j = 0; j < cnt; j++) begin
              int v;
              v = 0;
              for (int s = 0; s < 4; s++) begin
                chk(sym[9 + 4 * j + s] % 5 == 0, "4-level code");
                v = (v << 2) | (sym[9 + 4 * j + s] / 5);
              end
              while (hp < nd && v != ((dh[hp] >> 2) & 255)) hp++;
              chk(hp < nd, $sformatf("implant 1 ADC sample %h not the next d_out value", v));
              if (hp >= nd) hp = 0;
            end
          end
        end
      end else chk(qlen[1] == 0, "implant 1 sent outside its slot");
    end
    // rate: samples delivered by implant 0 since pulse 2 match 6.25 kHz
    begin
      int expect_n;
      expect_n = int'(($time - tp2) / 160us);
      chk(total0 >= expect_n - 16 && total0 <= expect_n + 16,
          $sformatf("%0d samples delivered, expected about %0d", total0, expect_n));
    end
    chk(fifo_overflow[1], "implant 1 FIFO should have overflowed during configuration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
