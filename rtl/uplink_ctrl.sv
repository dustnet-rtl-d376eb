// uplink_ctrl: builds the backscatter symbol stream of one packet.
//
// A packet is started by start_data (this implant's TDMA slot began) or by
// start_ack (a configuration frame for this implant was received). It then
//   1. CHARGE: lets the storage capacitor charge for CHARGE_CYC carrier cycles
//      with the modulator off;
//   2. HDR: sends header symbols with 2-level ASK (I-DAC code 0 or 15):
//        data packet: "1010" then the 5-bit number of samples that follow;
//        acknowledgement: "0101" then the 8-bit target ID received;
//   3. DATA (data packets only): pops samples from the FIFO and sends each as
//      M-bit symbols, most significant first, with 2^M-level ASK. For M = 1, 2
//      and 4 the upper 8 of the 9 stored bits are sent (8, 4 or 2 symbols);
//      for M = 3 all 9 bits (3 symbols).
// Each symbol lasts ncps carrier cycles: ul_sync restarts the CLK_UL symbol
// timer as the first header symbol starts, and every clk_ul strobe moves to
// the next symbol. The number of samples sent is min(configured, available in
// the FIFO), fixed when the packet starts; it is 0 if the FIFO is empty.
// ul_en is high while symbols are sent: it enables the I-DACs and turns off
// the rectifier pass transistors. ul_data is the I-DAC code.
// Header patterns, 2-level headers, sample count, 8/9-bit samples and M-bit
// symbols follow the paper. The charge-up length, the width of the count
// field, the symbol-to-code mapping and starting the acknowledgement after a
// charge-up wait are this design's choices.
module uplink_ctrl
  import dustnet_pkg::*;
#(
  parameter int unsigned CHARGE_CYC = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start_data,
  input  logic                  start_ack,
  input  logic [TID_BITS-1:0]   ack_id,
  input  logic [1:0]            m_m1,
  input  logic [4:0]            nsamp,
  input  logic [3:0]            nsyms,
  input  logic                  clk_ul,
  output logic                  ul_sync,
  input  logic [FIFO_WIDTH-1:0] fifo_rdata,
  input  logic [4:0]            fifo_count,
  output logic                  fifo_ren,
  output logic                  ul_en,
  output logic [3:0]            ul_data,
  output logic                  busy
);
  typedef enum logic [1:0] {IDLE, CHARGE, HDR, DATA} state_t;
  state_t state;

  localparam int unsigned CCW = $clog2(CHARGE_CYC + 1);

  logic [CCW-1:0]        ccnt;
  logic [11:0]           hdr;       // header bits, next bit at the top
  logic [3:0]            hleft;     // header symbols left, including current
  logic [4:0]            sleft;     // samples left to send, including current
  logic [3:0]            symleft;   // symbols left in current sample
  logic [FIFO_WIDTH-1:0] sreg;      // current sample, next symbol at the top
  logic [3:0]            symval;
  logic                  load;

  // Latched at packet start: number of samples to send.
  logic [4:0] nsend;
  assign nsend = (fifo_count < nsamp) ? fifo_count : nsamp;

  always_comb begin
    unique case (m_m1)
      2'd0:    symval = {3'b0, sreg[8]};
      2'd1:    symval = {2'b0, sreg[8:7]};
      2'd2:    symval = {1'b0, sreg[8:6]};
      default: symval = sreg[8:5];
    endcase
  end

  // Pop and load the next sample: at the end of the header or the last symbol
  // of the previous sample.
  assign load = clk_ul && (sleft != '0) &&
                (((state == HDR) && (hleft == 4'd1)) ||
                 ((state == DATA) && (symleft == 4'd1) && (sleft != 5'd1)));
  assign fifo_ren = load;
  assign ul_sync  = (state == CHARGE) && (ccnt == CCW'(CHARGE_CYC - 1));
  assign busy     = (state != IDLE);
  assign ul_en    = (state == HDR) || (state == DATA);

  always_comb begin
    unique case (state)
      HDR:     ul_data = hdr[11] ? 4'd15 : 4'd0;
      DATA:    ul_data = ask_code(m_m1, symval);
      default: ul_data = 4'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      ccnt    <= '0;
      hdr     <= '0;
      hleft   <= '0;
      sleft   <= '0;
      symleft <= '0;
      sreg    <= '0;
    end else begin
      unique case (state)
        IDLE: begin
          if (start_ack) begin
            state <= CHARGE;
            ccnt  <= '0;
            hdr   <= {ACK_HEADER, ack_id};
            hleft <= 4'd12;
            sleft <= '0;
          end else if (start_data) begin
            state <= CHARGE;
            ccnt  <= '0;
            hdr   <= {UL_HEADER, nsend, 3'b000};
            hleft <= 4'd9;
            sleft <= nsend;
          end
        end
        CHARGE: begin
          ccnt <= ccnt + 1'b1;
          if (ul_sync) state <= HDR;
        end
        HDR: begin
          if (clk_ul) begin
            hdr   <= {hdr[10:0], 1'b0};
            hleft <= hleft - 1'b1;
            if (hleft == 4'd1) state <= (sleft != '0) ? DATA : IDLE;
          end
        end
        DATA: begin
          if (clk_ul) begin
            if (symleft == 4'd1) begin
              sleft <= sleft - 1'b1;
              if (sleft == 5'd1) state <= IDLE;
            end else begin
              symleft <= symleft - 1'b1;
              sreg    <= sreg << ({1'b0, m_m1} + 3'd1);
            end
          end
        end
        default: state <= IDLE;
      endcase
      if (load) begin
        symleft <= nsyms;
        sreg    <= (m_m1 == 2'd2) ? fifo_rdata : {fifo_rdata[8:1], 1'b0};
      end
    end
  end
endmodule
