// photon_counter_top: programmable-logic part of a multi-channel photon-timing
// and photon-number system for superconducting nanowire detectors.
//
// N_CH comparator outputs (hit_in) enter one tapped delay line each. The TDC
// timestamps every rising edge to 9.77 ps within a 640 ns range. The trigger
// takes the hit of the channel chosen by trig_sel as START and opens an
// acceptance window of win_cycles_m1+1 cycles of 2.5 ns; the other channels'
// hits inside it become TIME records (START-to-STOP interval, channel,
// acquisition number) from the TDC and, at window close, one COUNT record
// (channel pattern and number of channels hit, 0 included) from the ACDC. The
// records are merged into one FIFO, read out through rd_en/rd_data towards the
// processor and USB link that carry them to the host. The record layout is in
// pc_pkg.
//
// Clock: one 400 MHz clock (2.5 ns, the trigger resolution). Configuration
// inputs (enable, trig_sel, win_cycles_m1) are set by the host and are assumed
// static while a window is open. The delay lines are behavioural models, so
// this top simulates but does not synthesize as it stands; everything else is
// synthesizable.
`timescale 1ps/1ps
module photon_counter_top
  import pc_pkg::*;
#(
  parameter int unsigned N_CH          = 8,
  parameter int unsigned TAPS          = 1 << FINE_BITS,
  parameter real         CLK_PERIOD_PS = 2500.0,
  parameter int unsigned FIFO_DEPTH    = 512,
  parameter int unsigned SEL_W         = (N_CH > 1) ? $clog2(N_CH) : 1,
  parameter int unsigned FIFO_AW       = $clog2(FIFO_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N_CH-1:0]        hit_in,
  input  logic                   enable,
  input  logic [SEL_W-1:0]       trig_sel,
  input  logic [COARSE_BITS-1:0] win_cycles_m1,
  input  logic                   rd_en,
  output record_t                rd_data,
  output logic                   rd_empty,
  output logic [FIFO_AW:0]       fifo_level,
  output logic                   fifo_full,
  output logic [31:0]            drop_count,
  output logic                   acq_start,    // START taken this cycle
  output logic                   window_open   // acceptance window open
);

  localparam int unsigned CNT_W = $clog2(N_CH + 1);
  localparam int unsigned N_SRC = N_CH + 1;

  logic [TAPS-1:0]        therm     [N_CH];
  logic [N_CH-1:0]        hit_valid;
  ts_t                    hit_ts    [N_CH];
  logic [N_CH-1:0]        gate;
  ts_t                    start_ts;
  acq_id_t                gate_id, close_id, int_id, cnt_id;
  logic                   close;
  logic [N_CH-1:0]        int_valid;
  ts_t                    int_value [N_CH];
  logic                   cnt_valid;
  logic [N_CH-1:0]        cnt_mask;
  logic [CNT_W-1:0]       cnt_num;
  logic [N_SRC-1:0]       src_valid;
  record_t                src_rec   [N_SRC];

  for (genvar i = 0; i < N_CH; i++) begin : g_tdl
    tdl_delay_line #(.TAPS(TAPS), .CLK_PERIOD_PS(CLK_PERIOD_PS)) u_tdl (
      .clk  (clk),
      .hit  (hit_in[i]),
      .therm(therm[i])
    );
  end

  tdc_multichannel #(.N_CH(N_CH), .TAPS(TAPS)) u_tdc (
    .clk      (clk),
    .rst_n    (rst_n),
    .therm    (therm),
    .coarse   (),
    .hit_valid(hit_valid),
    .hit_ts   (hit_ts),
    .gate     (gate),
    .start_ts (start_ts),
    .gate_id  (gate_id),
    .int_valid(int_valid),
    .int_value(int_value),
    .int_id   (int_id)
  );

  trigger_window #(.N_CH(N_CH)) u_trig (
    .clk          (clk),
    .rst_n        (rst_n),
    .enable       (enable),
    .trig_sel     (trig_sel),
    .win_cycles_m1(win_cycles_m1),
    .hit_valid    (hit_valid),
    .hit_ts       (hit_ts),
    .start        (acq_start),
    .active       (window_open),
    .start_ts     (start_ts),
    .gate         (gate),
    .gate_id      (gate_id),
    .close        (close),
    .close_id     (close_id)
  );

  acdc #(.N_CH(N_CH)) u_acdc (
    .clk      (clk),
    .rst_n    (rst_n),
    .gate     (gate),
    .close    (close),
    .close_id (close_id),
    .cnt_valid(cnt_valid),
    .cnt_mask (cnt_mask),
    .cnt_num  (cnt_num),
    .cnt_id   (cnt_id)
  );

  // Record formation: sources 0..N_CH-1 are the channels' intervals, source
  // N_CH is the ACDC.
  always_comb begin
    for (int i = 0; i < N_CH; i++) begin
      src_valid[i]       = int_valid[i];
      src_rec[i].tag     = TAG_TIME;
      src_rec[i].acq_id  = int_id;
      src_rec[i].chan    = CHF_BITS'(i);
      src_rec[i].payload = PAYLOAD_BITS'(int_value[i]);
    end
    src_valid[N_CH]       = cnt_valid;
    src_rec[N_CH].tag     = TAG_COUNT;
    src_rec[N_CH].acq_id  = cnt_id;
    src_rec[N_CH].chan    = CHF_BITS'(cnt_num);
    src_rec[N_CH].payload = PAYLOAD_BITS'(cnt_mask);
  end

  event_fifo #(.N_SRC(N_SRC), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (src_valid),
    .in_rec    (src_rec),
    .rd_en     (rd_en),
    .rd_data   (rd_data),
    .empty     (rd_empty),
    .full      (fifo_full),
    .level     (fifo_level),
    .drop_count(drop_count)
  );

endmodule
