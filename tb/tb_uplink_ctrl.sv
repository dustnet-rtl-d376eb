// tb_uplink_ctrl: builds uplink packets from a behavioural FIFO and decodes
// the I-DAC code stream the way the interrogator would. For random settings
// of M (1..4), cycles per symbol (4..16), samples per packet (1..16) and FIFO
// fill (including fewer words than configured and an empty FIFO) it checks:
// the charge-up delay, that each symbol holds for exactly ncps cycles, the
// "1010" header and 5-bit sample count in 2-level ASK (codes 0/15), every data
// symbol (upper 8 or all 9 bits, MSB first, levels spread over 0..15), the
// number of FIFO pops, and ul_en low outside the packet. It also checks the
// configuration acknowledgement "0101" + 8-bit ID.
module tb_uplink_ctrl;
  import dustnet_pkg::*;
  localparam int CH = 16;
  logic clk = 0, rst_n = 0, start_data = 0, start_ack = 0;
  logic [7:0] ack_id = 0;
  logic [1:0] m_m1 = 3;
  logic [4:0] nsamp = 12, ncps = 8;
  logic [3:0] nsyms;
  logic clk_ul, ul_sync, fifo_ren, ul_en, busy;
  logic [8:0] fifo_rdata;
  logic [4:0] fifo_count;
  logic [3:0] ul_data;
  logic [7:0] dlw = 0;
  logic clk_dl;
  int checks = 0, failures = 0;
  logic [8:0] fq[$];

  uplink_ctrl #(.CHARGE_CYC(CH)) dut (.clk, .rst_n, .start_data, .start_ack, .ack_id, .m_m1, .nsamp, .nsyms,
                   .clk_ul, .ul_sync, .fifo_rdata, .fifo_count, .fifo_ren, .ul_en, .ul_data, .busy);
  symbol_clk_gen u_sc (.clk_us(clk), .rst_n, .dl_width(dlw), .dl_sync(1'b0), .dl_run(1'b0), .clk_dl,
                       .ul_sync, .ncps, .clk_ul);
  always #5 clk = ~clk;

  assign nsyms = (m_m1 == 0) ? 4'd8 : (m_m1 == 1) ? 4'd4 : (m_m1 == 2) ? 4'd3 : 4'd2;
  assign fifo_rdata = (fq.size() > 0) ? fq[0] : 9'h0;
  assign fifo_count = 5'(fq.size());
  int pops;
  always @(posedge clk) if (fifo_ren) begin void'(fq.pop_front()); pops++; end

  // record the code of every cycle with ul_en
  int cyc, t_first, ncyc;
  logic [3:0] codes[$];
  always @(posedge clk) begin
    cyc++;
    if (ul_en) begin
      if (codes.size() == 0) t_first = cyc;
      codes.push_back(ul_data);
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collapse cycles into symbols of n cycles, checking each is constant
  function automatic void to_syms(input int n, output int syms[$], output bit ok);
    ok = (codes.size() % n) == 0;
    syms = {};
    for (int s = 0; s < codes.size() / n; s++) begin
      for (int c = 1; c < n; c++) if (codes[s*n + c] != codes[s*n]) ok = 0;
      syms.push_back(int'(codes[s*n]));
    end
  endfunction

  initial begin
    int syms[$], exp_s[$];
    bit ok;
    int t_start;
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      int m, n, ns, fill, nsend, scale, bits;
      logic [8:0] words[$];
      m = 1 + (k % 4);
      n = 4 + 2 * ((k / 4) % 7);
      ns = 1 + $urandom_range(0, 15);
      fill = (k % 5 == 4) ? 0 : $urandom_range(1, 16);
      m_m1 = 2'(m - 1); ncps = 5'(n); nsamp = 5'(ns);
      fq = {}; words = {};
      for (int i = 0; i < fill; i++) begin fq.push_back(9'($urandom)); words.push_back(fq[i]); end
      nsend = (fill < ns) ? fill : ns;
      codes = {}; pops = 0;
      @(negedge clk);
      start_data = 1; t_start = cyc + 1; @(negedge clk); start_data = 0;
      wait (!busy); repeat (3) @(negedge clk);
      chk(t_first - t_start == CH + 1, $sformatf("charge-up %0d cycles", t_first - t_start));
      to_syms(n, syms, ok);
      chk(ok, $sformatf("k=%0d: symbols of exactly %0d cycles", k, n));
      // expected symbol list
      exp_s = '{15, 0, 15, 0};
      for (int b = 4; b >= 0; b--) exp_s.push_back(((nsend >> b) & 1) ? 15 : 0);
      scale = (m == 1) ? 15 : (m == 2) ? 5 : (m == 3) ? 2 : 1;
      bits = (m == 3) ? 9 : 8;
      for (int i = 0; i < nsend; i++) begin
        logic [8:0] w;
        w = (bits == 9) ? words[i] : {words[i][8:1], 1'b0};
        for (int s = 0; s < bits / m; s++) begin
          int v;
          v = int'(w[8 -: 4]) >> (4 - m);
          exp_s.push_back(v * scale);
          w = w << m;
        end
      end
      chk(syms.size() == exp_s.size(), $sformatf("k=%0d M=%0d: %0d symbols, exp %0d", k, m, syms.size(), exp_s.size()));
      for (int i = 0; i < syms.size() && i < exp_s.size(); i++)
        chk(syms[i] == exp_s[i], $sformatf("k=%0d M=%0d sym %0d: %0d exp %0d", k, m, i, syms[i], exp_s[i]));
      chk(pops == nsend, $sformatf("k=%0d: %0d pops, exp %0d", k, pops, nsend));
    end
    // acknowledgement
    ncps = 6; codes = {};
    ack_id = 8'h56;
    @(negedge clk); start_ack = 1; @(negedge clk); start_ack = 0;
    wait (!busy); repeat (3) @(negedge clk);
    to_syms(6, syms, ok);
    chk(ok && syms.size() == 12, "ack: 12 symbols of 6 cycles");
    exp_s = '{0, 15, 0, 15};
    for (int b = 7; b >= 0; b--) exp_s.push_back(ack_id[b] ? 15 : 0);
    for (int i = 0; i < 12 && i < syms.size(); i++) chk(syms[i] == exp_s[i], $sformatf("ack symbol %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
