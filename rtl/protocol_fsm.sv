// protocol_fsm: Config Mode / Uplink Mode controller of the implant.
//
// Pulse detection: US_ON (from the US-on detector) is sampled on CLK_US; its
// rising edge gives pulse_start, one cycle at the start of every interrogator
// pulse. US_ON is cleared asynchronously while the ultrasound is off, so every
// pulse produces a fresh edge even though CLK_US stops between pulses.
// Config Mode (after power-on reset): every pulse_start restarts the downlink
// demodulator (dl_restart). The 48 decoded bits are shifted in, first bit at
// the top. When the frame completes (frame_done):
//   - target ID 0x00 (reserved): switch to Uplink Mode for good;
//   - target ID addressed to this implant: write the 40-bit configuration word
//     (cfg_we) and request the acknowledgement packet, which backscatters the
//     received 8-bit target ID (ack_req, ack_id);
//   - any other ID: ignore the frame.
// Uplink Mode: the FSM only forwards pulse_start to the TDMA scheduler; it is
// left only through power-on reset.
// Address match (dustnet_pkg::id_match): a non-zero target whose low 3 bits
// equal the 3-bit pad ID. Pulse counting, the frame layout, ID 0 as the
// switch to Uplink Mode and the ID acknowledgement follow the paper; the match
// rule and the one-way mode switch are this design's choices.
// rst_n also disables the assertion below; it resets flip-flops only
// asynchronously.
module protocol_fsm
  import dustnet_pkg::*;
(
  input  logic                clk_us,
  input  logic                rst_n,
  input  logic                us_on,
  input  logic [ID_BITS-1:0]  implant_id,
  input  logic                bit_valid,
  input  logic                bit_data,
  input  logic                frame_done,
  output logic                pulse_start,
  output logic                dl_restart,
  output logic                cfg_we,
  output logic [CW_BITS-1:0]  cfg_word,
  output logic                ack_req,
  output logic [TID_BITS-1:0] ack_id,
  output logic                uplink_mode
);
  typedef enum logic {CONFIG_MODE, UPLINK_MODE} mode_t;
  mode_t mode;

  logic                us_on_prev;
  logic [CFG_BITS-1:0] frame;
  logic [TID_BITS-1:0] tid;

  assign pulse_start = us_on && !us_on_prev;
  assign dl_restart  = pulse_start && (mode == CONFIG_MODE);
  assign uplink_mode = (mode == UPLINK_MODE);
  assign tid         = frame[CFG_BITS-1 -: TID_BITS];
  assign cfg_word    = frame[CW_BITS-1:0];

  always_ff @(posedge clk_us or negedge rst_n) begin
    if (!rst_n) begin
      mode       <= CONFIG_MODE;
      us_on_prev <= 1'b0;
      frame      <= '0;
      cfg_we     <= 1'b0;
      ack_req    <= 1'b0;
      ack_id     <= '0;
    end else begin
      us_on_prev <= us_on;
      cfg_we     <= 1'b0;
      ack_req    <= 1'b0;
      if (mode == CONFIG_MODE) begin
        if (bit_valid) frame <= {frame[CFG_BITS-2:0], bit_data};
        if (frame_done) begin
          if (tid == UPLINK_ID) begin
            mode <= UPLINK_MODE;
          end else if (id_match(tid, implant_id)) begin
            cfg_we  <= 1'b1;
            ack_req <= 1'b1;
            ack_id  <= tid;
          end
        end
      end
    end
  end

  assert property (@(posedge clk_us) disable iff (!rst_n) !(bit_valid && frame_done))
    else $error("protocol_fsm: frame_done must follow the last bit");
endmodule
