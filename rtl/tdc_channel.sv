// tdc_channel: timestamps the rising edges seen by one tapped delay line.
//
// Each cycle the channel receives the thermometer word its delay line captured
// at the last clock edge. A new hit is recognised when the first tap reads 1
// after reading 0 the cycle before. The number of ones in the word (a ones
// counter, which tolerates bubbles) is the time in tap units from the hit to
// that clock edge, so the hit time is
//     ts = coarse * TAPS - ones          (modulo 2**TS_BITS)
// where coarse is the free-running cycle counter shared by all channels. A hit
// that arrives less than one tap before an edge reads 0 on the first tap and is
// caught one edge later with all taps set, which gives the same result.
//
// Timing: hit_valid and hit_ts are registered, one cycle after the word
// arrives. At most one hit per cycle per channel. The edge rule and the ones
// counter are this design's choice; the source gives only the TDC's function.
`timescale 1ps/1ps
module tdc_channel
  import pc_pkg::*;
#(
  parameter int unsigned TAPS = 1 << FINE_BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [TAPS-1:0]        therm,
  input  logic [COARSE_BITS-1:0] coarse,
  output logic                   hit_valid,
  output ts_t                    hit_ts
);

  localparam int unsigned ONES_BITS = $clog2(TAPS + 1);

  logic                 tap0_q;
  logic [ONES_BITS-1:0] ones;

  always_comb begin
    ones = '0;
    for (int k = 0; k < TAPS; k++)
      ones += ONES_BITS'(therm[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tap0_q    <= 1'b0;
      hit_valid <= 1'b0;
      hit_ts    <= '0;
    end else begin
      tap0_q    <= therm[0];
      hit_valid <= therm[0] & ~tap0_q;
      hit_ts    <= ts_t'({coarse, {FINE_BITS{1'b0}}}) - ts_t'(ones);
    end
  end

endmodule
