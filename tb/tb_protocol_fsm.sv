// tb_protocol_fsm: drives US_ON pulses and decoded downlink frames into the
// mode controller of an implant with pad ID 5. Checks: one pulse_start and
// dl_restart per pulse; a frame for ID 0x15 (low bits 5) writes the 40-bit
// word and requests an ack with that ID; frames for 0x03 and 0x0E are ignored;
// 40 frames with random non-zero IDs are taken exactly when the low 3 bits are 5;
// a frame for ID 0x00 switches to Uplink Mode, after which pulses still give
// pulse_start but no dl_restart and frames are ignored.
module tb_protocol_fsm;
  logic clk = 0, rst_n = 0, us_on = 0, bit_valid = 0, bit_data = 0, frame_done = 0;
  logic [2:0] implant_id = 3'd5;
  logic pulse_start, dl_restart, cfg_we, ack_req, uplink_mode;
  logic [39:0] cfg_word;
  logic [7:0] ack_id;
  int checks = 0, failures = 0;
  int n_ps, n_rs, n_we, n_ack;
  logic [39:0] we_word;
  logic [7:0]  last_ack;

  protocol_fsm dut (.clk_us(clk), .rst_n, .us_on, .implant_id, .bit_valid, .bit_data, .frame_done,
                    .pulse_start, .dl_restart, .cfg_we, .cfg_word, .ack_req, .ack_id, .uplink_mode);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (pulse_start) n_ps++;
    if (dl_restart) n_rs++;
    if (cfg_we) begin n_we++; we_word = cfg_word; end
    if (ack_req) begin n_ack++; last_ack = ack_id; end
  end

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

  task automatic pulse_with_frame(input logic [7:0] tid, input logic [39:0] w, input bit send);
    logic [47:0] f;
    f = {tid, w};
    us_on = 0; repeat (5) @(negedge clk);
    us_on = 1; repeat (3) @(negedge clk);
    if (send) begin
      for (int i = 47; i >= 0; i--) begin
        bit_valid = 1; bit_data = f[i]; @(negedge clk);
        bit_valid = 0; repeat ($urandom_range(1, 3)) @(negedge clk);
      end
      frame_done = 1; @(negedge clk); frame_done = 0;
    end
    repeat (5) @(negedge clk);
    us_on = 0; repeat (3) @(negedge clk);
  endtask

  initial begin
    logic [39:0] w1;
    @(negedge clk); rst_n = 1;
    chk(!uplink_mode, "starts in Config Mode");
    n_ps = 0; n_rs = 0; n_we = 0; n_ack = 0;
    w1 = {$urandom, 8'($urandom)};
    pulse_with_frame(8'h15, w1, 1);
    chk(n_ps == 1 && n_rs == 1, "one pulse start and restart");
    chk(n_we == 1 && we_word == w1, $sformatf("config written: %h exp %h", we_word, w1));
    chk(n_ack == 1 && last_ack == 8'h15, "ack requested with the target ID");
    pulse_with_frame(8'h03, 40'h1, 1);
    pulse_with_frame(8'h0E, 40'h2, 1);
    chk(n_we == 1 && n_ack == 1, "other IDs ignored");
    // random non-zero target IDs: only those with low bits 5 are taken
    for (int k = 0; k < 40; k++) begin
      logic [7:0]  t;
      logic [39:0] w;
      int we0, ack0;
      t = 8'($urandom_range(1, 255));
      if (k % 4 == 0) t = {t[7:3], 3'd5};
      w = {$urandom, 8'($urandom)};
      we0 = n_we; ack0 = n_ack;
      pulse_with_frame(t, w, 1);
      if (t[2:0] == 3'd5) begin
        chk(n_we == we0 + 1 && we_word == w, $sformatf("ID %h: word written", t));
        chk(n_ack == ack0 + 1 && last_ack == t, $sformatf("ID %h: ack with that ID", t));
      end else begin
        chk(n_we == we0 && n_ack == ack0, $sformatf("ID %h: ignored", t));
      end
      chk(!uplink_mode, "non-zero ID keeps Config Mode");
    end
    chk(n_ps == 43 && n_rs == 43, "one pulse start and restart per pulse");
    n_ps = 3; n_rs = 3; n_we = 1; n_ack = 1;
    pulse_with_frame(8'h00, 40'h0, 0);   // pulse without a frame
    chk(n_ps == 4 && n_rs == 4 && !uplink_mode, "pulses counted, still Config Mode");
    pulse_with_frame(8'h00, 40'h0, 1);
    chk(uplink_mode, "target ID 0 switches to Uplink Mode");
    chk(n_we == 1 && n_ack == 1, "ID 0 frame writes nothing");
    for (int i = 0; i < 5; i++) pulse_with_frame(8'h15, 40'h3, 0);
    chk(n_ps == 10 && n_rs == 5, $sformatf("uplink pulses counted without restart: %0d %0d", n_ps, n_rs));
    chk(uplink_mode, "stays in Uplink Mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
