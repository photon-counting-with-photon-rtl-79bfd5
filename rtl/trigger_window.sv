// trigger_window: START detection and acceptance window.
//
// One channel, chosen by trig_sel, is the trigger. Its hit is the START of an
// acquisition: the trigger keeps START's timestamp, increments the acquisition
// number and holds the acceptance WINDOW open for win_cycles_m1+1 clock cycles
// (2.5 ns steps, 1 to 256 cycles = 2.5 ns to 640 ns). While the window is open
// every hit on another channel is passed on (gate) to the TDC, which measures
// its interval from START, and to the ACDC, which notes its presence. In the
// cycle of START itself only hits timestamped at or after START are taken. In
// the cycle after the last window cycle the window closes: close pulses with
// the acquisition number, the ACDC emits its count, and a new START may be
// taken in that same cycle. Trigger-channel hits while the window is open are
// ignored: there is no re-trigger. enable low lets a running window finish but
// takes no new START.
//
// Latency: gate and close are combinational from the registered TDC timestamps.
// Following the source: programmable trigger channel, programmable window,
// 2.5 ns window resolution, START/WINDOW/STOP sequence. This design's choices:
// no re-trigger, window length encoding, same-cycle START ordering.
`timescale 1ps/1ps
module trigger_window
  import pc_pkg::*;
#(
  parameter int unsigned N_CH  = 8,
  parameter int unsigned SEL_W = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,
  input  logic [SEL_W-1:0]       trig_sel,
  input  logic [COARSE_BITS-1:0] win_cycles_m1,
  input  logic [N_CH-1:0]        hit_valid,
  input  ts_t                    hit_ts   [N_CH],
  output logic                   start,
  output logic                   active,      // window open this cycle
  output ts_t                    start_ts,
  output logic [N_CH-1:0]        gate,
  output acq_id_t                gate_id,
  output logic                   close,
  output acq_id_t                close_id
);

  logic                 active_q;
  logic [COARSE_BITS:0] cnt_q;
  ts_t                  start_ts_q;
  acq_id_t              id_q;

  logic [COARSE_BITS:0] win_len;
  logic                 open;
  ts_t                  diff;

  assign win_len = {1'b0, win_cycles_m1} + 1'b1;
  assign close   = active_q && (cnt_q == win_len);
  assign open    = active_q && !close;
  assign start   = enable && hit_valid[trig_sel] && !open;
  assign active  = open || start;

  always_comb begin
    start_ts = start ? hit_ts[trig_sel] : start_ts_q;
    gate_id  = start ? id_q + 1'b1 : id_q;
    close_id = id_q;
    gate     = '0;
    for (int i = 0; i < N_CH; i++) begin
      diff = hit_ts[i] - hit_ts[trig_sel];
      if (hit_valid[i] && i != int'(trig_sel)) begin
        if (open)
          gate[i] = 1'b1;
        else if (start && diff < ts_t'(1 << FINE_BITS))
          gate[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q   <= 1'b0;
      cnt_q      <= '0;
      start_ts_q <= '0;
      id_q       <= '0;
    end else if (start) begin
      active_q   <= 1'b1;
      cnt_q      <= 1;
      start_ts_q <= hit_ts[trig_sel];
      id_q       <= id_q + 1'b1;
    end else if (close) begin
      active_q   <= 1'b0;
    end else if (open) begin
      cnt_q      <= cnt_q + 1'b1;
    end
  end

  // A window never outlasts its programmed length.
  a_win_len: assert property (@(posedge clk) disable iff (!rst_n)
    active_q |-> cnt_q <= win_len || $changed(win_cycles_m1));

endmodule
