// tdma_scheduler: keeps track of which implant owns the current uplink pulse.
//
// In Uplink Mode every implant sees every interrogator pulse. On each new
// pulse (pulse_start, one cycle at the rising edge of US_ON) the slot number
// advances modulo the configured number of implants; the first pulse after the
// switch to Uplink Mode is slot 0 (uplink index 1). my_slot is a one-cycle
// strobe, in the pulse_start cycle, when the slot equals this implant's
// uplink index. While `enable` is low the counter is held at slot 0.
// Pulse counting and index-based ownership follow the paper; the numbering of
// the first slot is a design choice. An index larger than the implant count
// never matches.
module tdma_scheduler #(
  parameter int unsigned NMAX = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic                    pulse_start,
  input  logic [$clog2(NMAX)-1:0] nimp_m1,
  input  logic [$clog2(NMAX)-1:0] ulidx_m1,
  output logic                    my_slot,
  output logic [$clog2(NMAX)-1:0] slot
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  slot <= '0;
    else if (!enable)            slot <= '0;
    else if (pulse_start)        slot <= (slot >= nimp_m1) ? '0 : slot + 1'b1;
  end

  assign my_slot = enable && pulse_start && (slot == ulidx_m1) && (ulidx_m1 <= nimp_m1);
endmodule
