// tb_dustnet_top: end-to-end, full-size testbench of the implant chip.
//
// What it does: builds a network of four dustnet_top implants (pad IDs 1..4)
// at their default parameters and plays the interrogator. It gates a 2 MHz
// carrier clock into pulses, drives the received envelope (1.0 for a high
// ASK symbol, 0.6 for a low one) and a DC front-end voltage per implant, and
// decodes every implant's backscatter from ul_en / ul_data (and checks the
// I-DAC currents against the codes).
//
// Sequence:
//   1. A Config Mode pulse whose Manchester data carries an invalid "11" pair
//      (every implant must flag dl_error and keep its reset configuration).
//   2. One Config Mode pulse per implant (target IDs 1..4, symbol widths of
//      4..8 carrier cycles chosen with $urandom), each answered by a
//      "0101"+ID acknowledgement from the addressed implant only.
//   3. A frame to target 0x07, which no implant owns: no ack, no change.
//   4. A frame to target 0x00: every implant enters Uplink Mode.
//   5. NFRAMES TDMA frames of 8 uplink pulses each (8 implants configured, 4
//      present, as in the paper's measurement). Pulse period 237.5 us, so one
//      frame lasts 1.9 ms, as in the paper.
// Implant 1 sends LFSR data with 16-level ASK, implant 3 LFSR data with
// 8-level ASK (9-bit samples), implant 2 ADC data with 4-level ASK and
// implant 4 ADC data with 2-level ASK and 8 samples per packet.
//
// Checks: symbol length = NCpS cycles, packet length, header patterns, the
// acknowledged ID, that one implant at most backscatters at any time, the
// TDMA slot of each packet, LFSR data against a reference LFSR (lossless:
// consecutive across packets), ADC data against the converted DC voltage,
// I-DAC current = I_M * code, and the 6.25 kHz sample rate. Each mechanism
// is counted; a mechanism that never happened counts as a failure.
`timescale 1ns / 1ps
module tb_dustnet_top;
  import dustnet_pkg::*;

  localparam int NI       = 4;
  localparam int NFRAMES  = 5;
  localparam int UP_ON    = 360;   // carrier cycles of an uplink pulse
  localparam int UP_OFF   = 115;   // cycles of silence: 475 cycles = 237.5 us
  localparam int CHARGE   = 100;   // cycles of full-amplitude charge-up
  localparam int CFG_TAIL = 260;   // carrier kept on for the acknowledgement
  localparam int GAP      = 100;
  localparam int QMAX     = 2048;

  logic clk_us = 1'b0, clk_lo = 1'b0, por_n = 1'b1, us_present = 1'b0;
  logic us_run = 1'b0;
  real  env = 1.0;

  logic      ul_en     [NI];
  logic [3:0] ul_data  [NI];
  logic [3:0] ul_fs    [NI];
  real       i_dacp    [NI];
  real       i_dacn    [NI];
  logic      rect_en   [NI];
  logic      phi_chop  [NI];
  logic      phi_reset [NI];
  logic      uplink_mode [NI];
  logic      fifo_overflow [NI];
  logic      dl_error  [NI];
  logic      ul_busy   [NI];
  logic [2:0] tdma_slot [NI];
  cfg_word_t cfg       [NI];
  real       v_afe     [NI];

  for (genvar g = 0; g < NI; g++) begin : g_imp
    dustnet_top dut (
      .clk_us, .clk_lo, .por_n, .us_present, .env, .pos_half(clk_us),
      .v_afe(v_afe[g]), .implant_id(3'(g + 1)),
      .ul_en(ul_en[g]), .ul_data(ul_data[g]), .ul_fs(ul_fs[g]),
      .i_dacp(i_dacp[g]), .i_dacn(i_dacn[g]), .rect_en(rect_en[g]),
      .phi_chop(phi_chop[g]), .phi_reset(phi_reset[g]),
      .uplink_mode(uplink_mode[g]), .fifo_overflow(fifo_overflow[g]),
      .dl_error(dl_error[g]), .ul_busy(ul_busy[g]), .tdma_slot(tdma_slot[g]),
      .cfg(cfg[g])
    );
  end

  // Carrier: 2 MHz while a pulse is on, held low otherwise.
  always begin
    if (us_run) begin clk_us = 1'b1; #250; clk_us = 1'b0; #250; end
    else #250;
  end
  always #10000 clk_lo = ~clk_lo;   // 50 kHz

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // Mechanism counters.
  int m_dl_error, m_cfg_write, m_ack, m_ignored, m_mode_switch, m_tdma,
      m_idle_slot, m_overflow, m_partial, m_full, m_lfsr, m_adc, m_9bit,
      m_m1, m_m2, m_m4, m_idac, m_symtime, m_rate;

  // Configuration the testbench expects in each implant.
  cfg_word_t exp_cfg [NI];
  int        pkt_n   [NI];
  int        lfsr_k  [NI];        // index of the next expected LFSR word, -1 unknown

  // Reference LFSR words (low 9 bits of the state after k steps).
  localparam int NREF = 8192;
  logic [8:0] ref9 [NREF];
  initial begin
    logic [15:0] s;
    s = 16'hACE1;
    for (int k = 0; k < NREF; k++) begin
      ref9[k] = s[8:0];
      s = {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
    end
  end

  // ---------------------------------------------------------------- capture
  int qbuf [NI][QMAX];
  int qlen [NI];
  int collisions = 0;

  always @(negedge clk_us) begin
    int active;
    active = 0;
    for (int i = 0; i < NI; i++) begin
      if (ul_en[i]) begin
        active++;
        if (qlen[i] < QMAX) qbuf[i][qlen[i]] = int'(ul_data[i]);
        qlen[i]++;
        begin
          real im;
          im = (ul_fs[i] >= 4'd9) ? 40.0 : 4.0 * real'(int'(ul_fs[i]) + 1);
          chk(i_dacn[i] == im * real'(int'(ul_data[i])) && i_dacp[i] == 0.0 && !rect_en[i],
              $sformatf("implant %0d I-DAC current %f for code %0d", i + 1, i_dacn[i], ul_data[i]));
          m_idac++;
        end
      end else begin
        if (i_dacn[i] != 0.0 || i_dacp[i] != 0.0 || !rect_en[i]) begin
          chk(1'b0, $sformatf("implant %0d draws I-DAC current while idle", i + 1));
        end
      end
    end
    if (active > 1) collisions++;
  end

  // ---------------------------------------------------------------- helpers
  function automatic int scale_of(input logic [1:0] m_m1);
    case (m_m1)
      2'd0: return 15;
      2'd1: return 5;
      2'd2: return 2;
      default: return 1;
    endcase
  endfunction

  function automatic int adc_expect(input real v, input logic [1:0] slice, input logic [1:0] m_m1);
    int code, w9;
    code = int'($floor((v + 1.0) / (2.0 / 4096.0)));
    if (code < 0) code = 0;
    if (code > 4095) code = 4095;
    w9 = (code >> slice) & 511;
    return (m_m1 == 2'd2) ? w9 : (w9 >> 1);
  endfunction

  function automatic logic [8:0] ref_sample(input int k, input logic [1:0] m_m1);
    return (m_m1 == 2'd2) ? ref9[k] : {1'b0, ref9[k][8:1]};
  endfunction

  // Decode implant i's backscatter captured during one pulse. kind: 0 none
  // expected, 1 ack expected with id, 2 data packet expected.
  task automatic decode(input int i, input int kind, input int id);
    int n, L, ns, bits, scale, m, spp, cnt, k;
    int sym [QMAX];
    logic [3:0] hdr;
    logic [8:0] smp [16];
    n = int'(ncps_of(exp_cfg[i].ncps_code));
    L = qlen[i];
    if (kind == 0) begin
      chk(L == 0, $sformatf("implant %0d backscattered %0d cycles out of turn", i + 1, L));
      return;
    end
    chk(L > 0, $sformatf("implant %0d sent nothing (kind %0d)", i + 1, kind));
    if (L == 0) return;
    chk(L % n == 0, $sformatf("implant %0d: %0d cycles not a multiple of NCpS %0d", i + 1, L, n));
    ns = L / n;
    for (int s = 0; s < ns; s++) begin
      sym[s] = qbuf[i][s * n];
      for (int c = 1; c < n; c++)
        if (qbuf[i][s * n + c] != sym[s]) begin
          chk(1'b0, $sformatf("implant %0d symbol %0d not constant for NCpS cycles", i + 1, s));
          return;
        end
    end
    m_symtime++;
    for (int s = 0; s < 4; s++) hdr[3 - s] = (sym[s] == 15);
    if (kind == 1) begin
      logic [7:0] rid;
      chk(ns == 12, $sformatf("ack from implant %0d has %0d symbols", i + 1, ns));
      chk(hdr == ACK_HEADER, $sformatf("ack header %b", hdr));
      for (int s = 4; s < 12; s++) rid[11 - s] = (sym[s] == 15);
      chk(rid == 8'(id), $sformatf("ack carries ID %h, expected %h", rid, id));
      if (ns == 12 && hdr == ACK_HEADER && rid == 8'(id)) m_ack++;
      return;
    end
    // data packet
    chk(hdr == UL_HEADER, $sformatf("implant %0d packet header %b", i + 1, hdr));
    for (int s = 0; s < 9; s++)
      chk(sym[s] == 0 || sym[s] == 15, "header symbol not a 2-level code");
    cnt = 0;
    for (int s = 4; s < 9; s++) cnt = (cnt << 1) | int'(sym[s] == 15);
    m     = int'(exp_cfg[i].m_m1) + 1;
    spp   = int'(syms_per_sample(exp_cfg[i].m_m1));
    scale = scale_of(exp_cfg[i].m_m1);
    chk(ns == 9 + cnt * spp, $sformatf("implant %0d packet: %0d symbols for %0d samples", i + 1, ns, cnt));
    chk(cnt <= int'(exp_cfg[i].nsamp_m1) + 1, "more samples than configured");
    if (cnt == int'(exp_cfg[i].nsamp_m1) + 1) m_full++;
    else if (cnt > 0) m_partial++;
    if (ns != 9 + cnt * spp) return;
    for (int j = 0; j < cnt; j++) begin
      int v;
      v = 0;
      for (int s = 0; s < spp; s++) begin
        int c;
        c = sym[9 + j * spp + s];
        chk(c % scale == 0, $sformatf("code %0d is not a %0d-level ASK level", c, 1 << m));
        v = (v << m) | (c / scale);
      end
      smp[j] = 9'(v);
    end
    case (exp_cfg[i].m_m1)
      2'd0: m_m1++;
      2'd1: m_m2++;
      2'd2: m_9bit++;
      default: m_m4++;
    endcase
    // The FIFO was full of samples taken before configuration: skip the
    // packets that drain those 16 words.
    if (pkt_n[i]++ < (16 + int'(exp_cfg[i].nsamp_m1)) / (int'(exp_cfg[i].nsamp_m1) + 1)) return;
    if (exp_cfg[i].lfsr_en) begin
      for (int j = 0; j < cnt; j++) begin
        if (lfsr_k[i] < 0) begin
          // locate the sequence with the first four samples
          for (k = 0; k < NREF - 32; k++) begin
            bit ok;
            ok = 1'b1;
            for (int t = 0; t < 4 && t < cnt; t++)
              if (ref_sample(k + t, exp_cfg[i].m_m1) != smp[t]) ok = 1'b0;
            if (ok) break;
          end
          chk(k < NREF - 32, $sformatf("implant %0d LFSR data not found in the reference", i + 1));
          lfsr_k[i] = k;
        end
        chk(lfsr_k[i] < NREF && ref_sample(lfsr_k[i], exp_cfg[i].m_m1) == smp[j],
            $sformatf("implant %0d LFSR sample %h, expected %h", i + 1, smp[j],
                      ref_sample(lfsr_k[i], exp_cfg[i].m_m1)));
        if (lfsr_k[i] < NREF && ref_sample(lfsr_k[i], exp_cfg[i].m_m1) == smp[j]) m_lfsr++;
        lfsr_k[i]++;
      end
    end else begin
      int e;
      e = adc_expect(v_afe[i], exp_cfg[i].adc_slice, exp_cfg[i].m_m1);
      for (int j = 0; j < cnt; j++) begin
        chk(int'(smp[j]) == e, $sformatf("implant %0d ADC sample %0d, expected %0d", i + 1, smp[j], e));
        if (int'(smp[j]) == e) m_adc++;
      end
    end
  endtask

  // ---------------------------------------------------------------- interrogator
  task automatic carrier(input int n, input real level);
    repeat (n) begin
      @(negedge clk_us);
      env = level;
    end
  endtask

  task automatic pulse_on();
    for (int i = 0; i < NI; i++) qlen[i] = 0;
    env        = 1.0;
    us_present = 1'b1;
    us_run     = 1'b1;
  endtask

  task automatic pulse_off(input int gap);
    @(negedge clk_us);
    us_run     = 1'b0;
    us_present = 1'b0;
    #(gap * 500);
  endtask

  // One Config Mode pulse: charge-up, preamble "10" x 32, header 11001100,
  // 48 Manchester bits ("10" = 1, "01" = 0), then carrier for the ack.
  task automatic config_pulse(input logic [7:0] tid, input cfg_word_t w, input int width,
                              input int bad_bit);
    logic [47:0] frame;
    frame = {tid, w};
    pulse_on();
    carrier(CHARGE, 1.0);
    for (int r = 0; r < 32; r++) begin
      carrier(width, 1.0);
      carrier(width, 0.6);
    end
    for (int b = 7; b >= 0; b--) carrier(width, DL_HEADER[b] ? 1.0 : 0.6);
    for (int b = 47; b >= 0; b--) begin
      if (47 - b == bad_bit) begin
        carrier(width, 1.0);
        carrier(width, 1.0);
      end else begin
        carrier(width, frame[b] ? 1.0 : 0.6);
        carrier(width, frame[b] ? 0.6 : 1.0);
      end
    end
    carrier(CFG_TAIL, 1.0);
    pulse_off(GAP);
  endtask

  function automatic cfg_word_t make_cfg(input int idx, input int m_m1, input int ncps_code,
                                         input int nsamp, input bit lfsr, input int slice,
                                         input int fs);
    cfg_word_t w;
    w           = '0;
    w.idac_fs   = 4'(fs);
    w.nsamp_m1  = 4'(nsamp - 1);
    w.m_m1      = 2'(m_m1);
    w.nimp_m1   = 3'd7;
    w.ulidx_m1  = 3'(idx - 1);
    w.lfsr_en   = lfsr;
    w.ncps_code = 3'(ncps_code);
    w.adc_slice = 2'(slice);
    w.reserved  = 18'($urandom);
    return w;
  endfunction

  // ---------------------------------------------------------------- sample rate
  int  nreset = 0;
  time t_rate0;
  always @(posedge phi_reset[0]) nreset++;

  // ---------------------------------------------------------------- dl_error
  int nerr [NI];
  for (genvar g = 0; g < NI; g++) begin : g_err
    always @(posedge dl_error[g]) nerr[g]++;
  end

  // ---------------------------------------------------------------- stimulus
  cfg_word_t plan [NI];
  initial begin
    int width, nr0;
    v_afe[0] = 0.0;
    v_afe[1] = 0.3;
    v_afe[2] = -0.2;
    v_afe[3] = -0.45;
    for (int i = 0; i < NI; i++) begin
      exp_cfg[i] = CFG_RESET;
      pkt_n[i]   = 0;
      lfsr_k[i]  = -1;
      nerr[i]    = 0;
    end
    //                 idx M-1 ncps n   lfsr slice fs
    plan[0] = make_cfg(1, 3, 2, 16, 1'b1, 3, 9);    // 16-level, 8 cycles/symbol
    plan[1] = make_cfg(2, 1, 0, 16, 1'b0, 3, 3);    // 4-level, ADC bits 3-11
    plan[2] = make_cfg(3, 2, 0, 16, 1'b1, 2, 12);   // 8-level, 9-bit samples
    plan[3] = make_cfg(4, 0, 0, 8,  1'b0, 0, 0);    // 2-level, ADC bits 0-8

    // power-on reset: the carrier clock is not running, so the reset must
    // act asynchronously (falling edge of por_n)
    #1us;
    por_n = 1'b0;
    #49us;
    por_n = 1'b1;
    #10us;
    t_rate0 = $time;
    nr0     = nreset;

    // 1. corrupted frame: every implant rejects it
    config_pulse(8'h01, plan[0], 6, 30);
    for (int i = 0; i < NI; i++) begin
      decode(i, 0, 0);
      chk(nerr[i] > 0, $sformatf("implant %0d did not flag the Manchester error", i + 1));
      chk(cfg[i] == CFG_RESET, $sformatf("implant %0d changed configuration on a bad frame", i + 1));
      if (nerr[i] > 0 && cfg[i] == CFG_RESET) m_dl_error++;
    end

    // 2. configure each implant
    for (int t = 0; t < NI; t++) begin
      width = 4 + int'($urandom_range(4));
      exp_cfg[t] = plan[t];
      config_pulse(8'(t + 1), plan[t], width, -1);
      for (int i = 0; i < NI; i++) begin
        decode(i, (i == t) ? 1 : 0, t + 1);
        chk(cfg[i] == exp_cfg[i], $sformatf("implant %0d config %h, expected %h (W=%0d)",
                                            i + 1, cfg[i], exp_cfg[i], width));
        chk(!uplink_mode[i], "uplink mode entered too early");
      end
      if (cfg[t] == plan[t]) m_cfg_write++;
    end

    // 3. a target ID nobody owns
    config_pulse(8'h07, make_cfg(1, 0, 7, 1, 1'b0, 0, 15), 5, -1);
    begin
      bit quiet;
      quiet = 1'b1;
      for (int i = 0; i < NI; i++) begin
        if (qlen[i] != 0 || cfg[i] != exp_cfg[i]) quiet = 1'b0;
        decode(i, 0, 0);
        chk(cfg[i] == exp_cfg[i], "configuration changed by a frame for another ID");
      end
      if (quiet) m_ignored++;
    end
    for (int i = 0; i < NI; i++) if (fifo_overflow[i]) m_overflow++;

    // 4. switch to Uplink Mode
    config_pulse(UPLINK_ID, '0, 7, -1);
    for (int i = 0; i < NI; i++) begin
      decode(i, 0, 0);
      chk(uplink_mode[i], $sformatf("implant %0d not in Uplink Mode", i + 1));
      chk(cfg[i] == exp_cfg[i], "configuration changed by the Uplink Mode frame");
      if (uplink_mode[i]) m_mode_switch++;
    end

    // 5. TDMA uplink frames
    for (int p = 0; p < NFRAMES * 8; p++) begin
      int owner;
      owner = p % 8;            // uplink index owner+1
      pulse_on();
      carrier(UP_ON, 1.0);
      for (int i = 0; i < NI; i++)
        chk(!ul_busy[i], $sformatf("implant %0d still sending at the end of a pulse", i + 1));
      pulse_off(UP_OFF);
      for (int i = 0; i < NI; i++) begin
        if (i == owner) begin
          if (qlen[i] > 0) m_tdma++;
          decode(i, 2, 0);
        end else decode(i, 0, 0);
      end
      if (owner >= NI) begin
        bit quiet;
        quiet = 1'b1;
        for (int i = 0; i < NI; i++) if (qlen[i] != 0) quiet = 1'b0;
        if (quiet) m_idle_slot++;
      end
    end

    // sample rate: one conversion (phi_reset) every 160 us
    begin
      int expect_n;
      expect_n = int'(($time - t_rate0) / 160us);
      chk(nreset - nr0 >= expect_n - 1 && nreset - nr0 <= expect_n + 1,
          $sformatf("%0d conversions in %0t, expected %0d", nreset - nr0, $time - t_rate0, expect_n));
      if (nreset - nr0 >= expect_n - 1 && nreset - nr0 <= expect_n + 1) m_rate++;
    end
    chk(collisions == 0, $sformatf("%0d cycles with more than one implant backscattering", collisions));

    $display("mechanisms: dl_error=%0d cfg_write=%0d ack=%0d ignored=%0d mode_switch=%0d tdma=%0d idle_slot=%0d",
             m_dl_error, m_cfg_write, m_ack, m_ignored, m_mode_switch, m_tdma, m_idle_slot);
    $display("            overflow=%0d full_pkt=%0d partial_pkt=%0d lfsr=%0d adc=%0d ask2=%0d ask4=%0d ask8_9bit=%0d ask16=%0d idac=%0d symtime=%0d rate=%0d",
             m_overflow, m_full, m_partial, m_lfsr, m_adc, m_m1, m_m2, m_9bit, m_m4, m_idac, m_symtime, m_rate);
    chk(m_dl_error  > 0, "mechanism never seen: downlink error detection");
    chk(m_cfg_write > 0, "mechanism never seen: configuration write");
    chk(m_ack       > 0, "mechanism never seen: configuration acknowledgement");
    chk(m_ignored   > 0, "mechanism never seen: frame for another ID ignored");
    chk(m_mode_switch > 0, "mechanism never seen: switch to Uplink Mode");
    chk(m_tdma      > 0, "mechanism never seen: TDMA slot transmission");
    chk(m_idle_slot > 0, "mechanism never seen: idle TDMA slot");
    chk(m_overflow  > 0, "mechanism never seen: FIFO overflow");
    chk(m_full      > 0, "mechanism never seen: full packet");
    chk(m_partial   > 0, "mechanism never seen: partial packet");
    chk(m_lfsr      > 0, "mechanism never seen: LFSR data");
    chk(m_adc       > 0, "mechanism never seen: ADC data");
    chk(m_m1 > 0 && m_m2 > 0 && m_9bit > 0 && m_m4 > 0, "mechanism never seen: one of the ASK orders");
    chk(m_idac      > 0, "mechanism never seen: I-DAC modulation");
    chk(m_symtime   > 0, "mechanism never seen: symbol timing");
    chk(m_rate      > 0, "mechanism never seen: sample rate");
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
