// tdl_delay_line: BEHAVIOURAL MODEL (not synthesizable) of one tapped delay
// line, the fine interpolator of a TDC channel.
//
// In the FPGA the hit signal from the comparator runs along a chain of carry
// cells; a flip-flop behind every cell samples the chain on each rising clock
// edge. The captured word is a thermometer code: tap k reads 1 when the rising
// edge of the hit has travelled past k+1 cells, i.e. arrived at least
// (k+1)*TAP_PS before the clock edge. Its count of ones is therefore the time
// from the hit to the sampling edge in tap units. This model has the real part's
// ports (the asynchronous hit input, the sampling clock and the captured word)
// and reproduces that sampling with ideal, equal tap delays: TAPS taps of
// CLK_PERIOD_PS/TAPS each, so the line spans exactly one clock period.
//
// Timing: therm is updated on every rising clk edge. The model remembers the
// last two pulses on hit, so pulses and the gaps between them must be longer
// than one tap; comparator pulses are several ns wide. Tap delays that spread
// or drift, and bubbles in the code, are not modelled. The use of a carry-chain
// delay line and the tap count are this design's assumptions: the source only
// states the TDC's resolution (better than 15 ps r.m.s. per channel).
`timescale 1ps/1ps
module tdl_delay_line #(
  parameter int unsigned TAPS          = 256,
  parameter real         CLK_PERIOD_PS = 2500.0
) (
  input  logic            clk,
  input  logic            hit,     // comparator output, asynchronous
  output logic [TAPS-1:0] therm    // thermometer word captured at posedge clk
);

  localparam real TAP_PS = CLK_PERIOD_PS / TAPS;

  // Rise and fall times of the current and of the previous pulse.
  realtime rise_t [2];
  realtime fall_t [2];

  initial begin
    rise_t = '{-2.0e9, -2.0e9};
    fall_t = '{-1.0e9, -1.0e9};
    therm  = '0;
  end

  always @(posedge hit) begin
    rise_t[1] = rise_t[0];
    fall_t[1] = fall_t[0];
    rise_t[0] = $realtime;
  end

  always @(negedge hit) fall_t[0] = $realtime;

  // Level of the hit signal at an earlier time t.
  function automatic logic level_at(realtime t);
    logic lv = 1'b0;
    for (int p = 0; p < 2; p++) begin
      if (t >= rise_t[p] && !(fall_t[p] >= rise_t[p] && t >= fall_t[p]))
        lv = 1'b1;
    end
    return lv;
  endfunction

  always @(posedge clk) begin
    automatic realtime now = $realtime;
    for (int k = 0; k < TAPS; k++)
      therm[k] <= level_at(now - (k + 1) * TAP_PS);
  end

endmodule
