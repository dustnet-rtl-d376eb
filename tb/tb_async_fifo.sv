// tb_async_fifo: two unrelated clocks (write 20 ns, read 7 ns). Phase 1 fills
// the FIFO with the reader stopped: 16 words fit, the 17th and 18th are
// dropped and `overflow` is set; then all 16 are read back in order and the
// count seen by the reader is checked. Phase 2 streams 2000 random words with
// random write and read enables against a queue scoreboard.
module tb_async_fifo;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic wen = 0, ren = 0;
  logic [8:0] wdata = 0, rdata;
  logic wfull, overflow, rempty;
  logic [4:0] rcount;
  int checks = 0, failures = 0;
  logic [8:0] q[$];

  async_fifo dut (.wclk, .wrst_n(rst_n), .wen, .wdata, .wfull, .overflow,
                  .rclk, .rrst_n(rst_n), .ren, .rdata, .rempty, .rcount);
  always #10 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader: pops whenever allowed, compares with scoreboard
  bit rd_go = 0;
  always @(negedge rclk) begin
    if (rst_n && rd_go) begin
      if (ren) begin
        chk(q.size() > 0, "read with empty scoreboard");
        if (q.size() > 0) begin
          logic [8:0] e;
          e = q.pop_front();
          chk(rdata_q == e, $sformatf("data %h exp %h", rdata_q, e));
        end
      end
      ren = !rempty && ($urandom_range(0, 2) != 0);
    end else ren = 0;
  end
  logic [8:0] rdata_q;
  always @(posedge rclk) rdata_q <= rdata;

  initial begin
    repeat (3) @(negedge wclk);
    rst_n = 1;
    // ---- phase 1: fill, overflow ----
    for (int i = 0; i < 18; i++) begin
      @(negedge wclk);
      wen = 1; wdata = 9'(i * 7 + 3);
      if (i < 16) begin
        chk(!wfull, $sformatf("not full before word %0d", i));
        q.push_back(wdata);
      end else chk(wfull, "full after 16");
    end
    @(negedge wclk); wen = 0;
    chk(overflow, "overflow flagged");
    repeat (4) @(negedge wclk);
    @(negedge rclk);
    chk(rcount == 16, $sformatf("reader sees 16, got %0d", rcount));
    rd_go = 1;
    wait (q.size() == 0);
    repeat (4) @(negedge rclk);
    chk(rempty, "empty after draining");
    chk(overflow, "overflow is sticky");
    // ---- phase 2: random streaming ----
    for (int i = 0; i < 2000; i++) begin
      @(negedge wclk);
      wen = ($urandom_range(0, 1) == 1) && !wfull;
      wdata = 9'($urandom);
      if (wen) q.push_back(wdata);
    end
    @(negedge wclk); wen = 0;
    wait (q.size() == 0);
    repeat (4) @(negedge rclk);
    chk(rempty, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
