// dustnet_pkg: constants and types shared by the DustNet implant digital backend.
//
// The implant is configured over a 2-level ASK downlink with a 48-bit frame:
// an 8-bit target ID followed by a 40-bit configuration word. The frame length,
// the ID width, the preamble and header patterns, the FIFO geometry and the
// parameter ranges (Table of programmable uplink parameters) follow the paper.
// The bit layout of the 40-bit word, the Manchester polarity and the mapping of
// 2^M ASK levels onto the 16-level current DAC are this design's own choices.
//
// Configuration word (bit 39 is the first bit received after the target ID):
//   [39:36] idac_fs    I-DAC unit current code (4 uA * (code+1), max 40 uA)
//   [35:32] nsamp_m1   uplink samples per packet minus 1 (1..16)
//   [31:30] m_m1       bits per symbol M minus 1 (2, 4, 8, 16 levels)
//   [29:27] nimp_m1    implants in the network minus 1 (1..8)
//   [26:24] ulidx_m1   this implant's uplink index minus 1 (1..8)
//   [23]    lfsr_en    send PRBS data instead of ADC data
//   [22:20] ncps_code  ultrasound cycles per uplink symbol = 4 + 2*code (4..16)
//   [19:18] adc_slice  ADC bits stored: 0 -> 0-8, 1 -> 1-9, 2 -> 2-10, 3 -> 3-11
//   [17:0]  reserved
package dustnet_pkg;

  localparam int unsigned FIFO_DEPTH = 16;   // 16 x 9-bit FIFO
  localparam int unsigned FIFO_WIDTH = 9;
  localparam int unsigned ADC_BITS   = 12;
  localparam int unsigned LFSR_BITS  = 16;
  localparam int unsigned ID_BITS    = 3;    // hard-wired implant ID pads
  localparam int unsigned TID_BITS   = 8;    // target ID field in the frame
  localparam int unsigned CFG_BITS   = 48;   // Manchester-coded frame bits
  localparam int unsigned CW_BITS    = CFG_BITS - TID_BITS;  // 40
  localparam int unsigned NIMP_MAX   = 8;
  localparam int unsigned IDAC_MAX   = 15;   // 15 unit current sources
  localparam int unsigned CNT_BITS   = 5;    // sample-count field, 0..16

  localparam logic [7:0] DL_HEADER  = 8'b1100_1100;  // ends the DL preamble
  localparam logic [3:0] UL_HEADER  = 4'b1010;       // uplink packet header
  localparam logic [3:0] ACK_HEADER = 4'b0101;       // configuration ack header
  localparam logic [7:0] UPLINK_ID  = 8'h00;         // reserved: enter Uplink Mode

  typedef struct packed {
    logic [3:0]  idac_fs;
    logic [3:0]  nsamp_m1;
    logic [1:0]  m_m1;
    logic [2:0]  nimp_m1;
    logic [2:0]  ulidx_m1;
    logic        lfsr_en;
    logic [2:0]  ncps_code;
    logic [1:0]  adc_slice;
    logic [17:0] reserved;
  } cfg_word_t;

  // Reset configuration: one implant, index 1, 16-level ASK, 8 cycles per
  // symbol, 12 samples per packet, ADC bits 3-11, ADC data, smallest current.
  localparam cfg_word_t CFG_RESET = '{
    idac_fs:   4'd0,
    nsamp_m1:  4'd11,
    m_m1:      2'd3,
    nimp_m1:   3'd0,
    ulidx_m1:  3'd0,
    lfsr_en:   1'b0,
    ncps_code: 3'd2,
    adc_slice: 2'd3,
    reserved:  '0
  };

  // Cycles per uplink symbol: 4, 6, ..., 16; code 7 saturates at 16.
  function automatic logic [4:0] ncps_of(input logic [2:0] code);
    return (code == 3'd7) ? 5'd16 : 5'(5'd4 + {1'b0, code, 1'b0});
  endfunction

  // Bits per sample sent: 9 for 8-level ASK (3 symbols of 3 bits), else 8.
  function automatic logic [3:0] bits_per_sample(input logic [1:0] m_m1);
    return (m_m1 == 2'd2) ? 4'd9 : 4'd8;
  endfunction

  // Symbols per sample: 8, 4, 3, 2 for M = 1..4.
  function automatic logic [3:0] syms_per_sample(input logic [1:0] m_m1);
    case (m_m1)
      2'd0:    return 4'd8;
      2'd1:    return 4'd4;
      2'd2:    return 4'd3;
      default: return 4'd2;
    endcase
  endfunction

  // Map an M-bit symbol value onto the 0..15 I-DAC code so that the 2^M
  // levels span the full range with equal spacing (x15, x5, x2, x1).
  function automatic logic [3:0] ask_code(input logic [1:0] m_m1, input logic [3:0] v);
    case (m_m1)
      2'd0:    return v[0] ? 4'd15 : 4'd0;
      2'd1:    return 4'(v[1:0] * 3'd5);
      2'd2:    return {v[2:0], 1'b0};
      default: return v;
    endcase
  endfunction

  // Implant ID match: non-zero target whose low 3 bits equal the pad ID.
  function automatic logic id_match(input logic [7:0] tid, input logic [2:0] pad_id);
    return (tid != UPLINK_ID) && (tid[2:0] == pad_id);
  endfunction

endpackage
