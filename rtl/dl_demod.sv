// dl_demod: Config Mode downlink demodulator.
//
// Input is the envelope comparator output (1 = envelope above its average),
// one value per ultrasound cycle. Each Config Mode pulse is received as:
//   charge-up (full amplitude, reads as 1) | preamble "10" x 32 |
//   header "11001100" | 48 Manchester-coded bits (96 symbols) | uplink
// The demodulator is restarted at the start of every pulse and then:
//   1. WAIT_FALL: waits for the first 1->0 transition (the first preamble "1"
//      merges with the charge-up, so it cannot be measured).
//   2. MEASURE: skips N_SKIP_RUNS runs (time for the envelope detector's
//      average to settle after the full-amplitude charge-up), then measures
//      the length, in carrier cycles, of the next N_AVG_RUNS runs of "0" and
//      "1" and takes their average as the symbol width (a shift, N_AVG_RUNS
//      is a power of two). N_SKIP_RUNS + N_AVG_RUNS must stay below the 63
//      complete preamble runs.
//   3. HUNT: with symbol strobes from symbol_clk_gen (middle of each symbol,
//      realigned on every transition), shifts in sampled symbols until the
//      last eight equal the header "11001100".
//   4. DATA: pairs of symbols are Manchester-decoded, "10" -> 1, "01" -> 0;
//      any other pair sets `err` and aborts the frame. Each bit is presented
//      on bit_data with a one-cycle bit_valid, first bit first; frame_done
//      pulses the cycle after the 48th bit.
// Preamble, header, frame length and midpoint sampling with the averaged width
// follow the paper. The numbers of skipped and averaged runs, the Manchester
// polarity and the abort on error are this design's choices.
module dl_demod #(
  parameter int unsigned WW         = 8,
  parameter int unsigned N_SKIP_RUNS = 8,
  parameter int unsigned N_AVG_RUNS = 32,
  parameter int unsigned N_BITS     = 48,
  parameter logic [7:0]  HEADER     = dustnet_pkg::DL_HEADER
) (
  input  logic          clk_us,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          env_bit,
  input  logic          clk_dl,
  output logic [WW-1:0] dl_width,
  output logic          dl_sync,
  output logic          dl_run,
  output logic          bit_valid,
  output logic          bit_data,
  output logic          frame_done,
  output logic          err
);
  localparam int unsigned RB = $clog2(N_AVG_RUNS);
  localparam int unsigned CB = $clog2(N_SKIP_RUNS + N_AVG_RUNS + 1);
  localparam int unsigned SB = WW + RB;
  localparam int unsigned NB = $clog2(2 * N_BITS + 1);

  typedef enum logic [2:0] {IDLE, WAIT_FALL, MEASURE, HUNT, DATA} state_t;
  state_t state;

  logic          env_prev;
  logic          trans;
  logic [WW-1:0] run_len;
  logic [SB-1:0] run_sum;
  logic [CB-1:0] runs;
  logic [6:0]    shreg;   // last 7 decisions; the 8th is env_bit itself
  logic [NB-1:0] nsym;
  logic          first_sym;
  logic [SB-1:0] sum_next;

  assign trans    = (env_bit != env_prev);
  assign dl_sync  = trans;
  assign dl_run   = (state == HUNT) || (state == DATA);
  assign sum_next = run_sum + SB'(run_len);

  always_ff @(posedge clk_us or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      env_prev   <= 1'b1;
      run_len    <= '0;
      run_sum    <= '0;
      runs       <= '0;
      dl_width   <= '0;
      shreg      <= '0;
      nsym       <= '0;
      first_sym  <= 1'b0;
      bit_valid  <= 1'b0;
      bit_data   <= 1'b0;
      frame_done <= 1'b0;
      err        <= 1'b0;
    end else begin
      env_prev   <= env_bit;
      bit_valid  <= 1'b0;
      frame_done <= 1'b0;
      err        <= 1'b0;
      if (restart) begin
        state   <= WAIT_FALL;
        run_len <= '0;
        run_sum <= '0;
        runs    <= '0;
        shreg   <= '0;
        nsym    <= '0;
      end else begin
        unique case (state)
          IDLE: ;
          WAIT_FALL: begin
            if (trans && !env_bit) begin
              state   <= MEASURE;
              run_len <= WW'(1);
            end
          end
          MEASURE: begin
            if (trans) begin
              if (runs >= CB'(N_SKIP_RUNS)) run_sum <= sum_next;
              run_len <= WW'(1);
              runs    <= runs + 1'b1;
              if (runs == CB'(N_SKIP_RUNS + N_AVG_RUNS - 1)) begin
                dl_width <= WW'(sum_next >> RB);
                state    <= HUNT;
              end
            end else if (run_len != '1) begin
              run_len <= run_len + 1'b1;
            end
          end
          HUNT: begin
            if (clk_dl) begin
              shreg <= {shreg[5:0], env_bit};
              if ({shreg, env_bit} == HEADER) begin
                state <= DATA;
                nsym  <= '0;
              end
            end
          end
          DATA: begin
            if (clk_dl) begin
              nsym <= nsym + 1'b1;
              if (!nsym[0]) begin
                first_sym <= env_bit;
              end else if (first_sym != env_bit) begin
                bit_valid <= 1'b1;
                bit_data  <= first_sym;
                if (nsym == NB'(2 * N_BITS - 1)) begin
                  state <= IDLE;
                end
              end else begin
                err   <= 1'b1;
                state <= IDLE;
              end
            end
          end
          default: state <= IDLE;
        endcase
      end
      // frame_done follows the last bit by one cycle
      if (bit_valid && (nsym == NB'(2 * N_BITS))) frame_done <= 1'b1;
    end
  end

  initial assert (N_SKIP_RUNS + N_AVG_RUNS < 64) else $error("dl_demod: preamble has 63 complete runs");
  initial assert (N_AVG_RUNS == (1 << RB)) else $error("dl_demod: N_AVG_RUNS must be a power of two");
endmodule
