// tdc_multichannel: the multi-channel time-to-digital converter.
//
// One coarse counter, counting 2.5 ns clock cycles modulo 256 (640 ns), is
// shared by N_CH tdc_channel instances; each turns its delay-line word into a
// 16-bit timestamp {coarse, fine}, one fine LSB = 2.5 ns / 256 = 9.77 ps.
// Timestamps go to the trigger (stage 1). For every hit the trigger accepts into
// the acceptance window (gate) the TDC then computes the START-to-STOP interval
//     interval = hit_ts - start_ts       (modulo 2**16, i.e. within 640 ns)
// and presents it one cycle later (stage 2) with the acquisition number.
//
// Interface: therm[i] from the delay line of channel i; hit_valid/hit_ts to the
// trigger; gate/start_ts/gate_id back from the trigger; int_valid/int_value/
// int_id out. Latency: word -> hit_ts 1 cycle, gate -> interval 1 cycle.
// The 640 ns range and the channel count follow the source; the split into a
// shared coarse counter and per-channel fine codes is this design's choice.
`timescale 1ps/1ps
module tdc_multichannel
  import pc_pkg::*;
#(
  parameter int unsigned N_CH = 8,
  parameter int unsigned TAPS = 1 << FINE_BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [TAPS-1:0]        therm     [N_CH],
  output logic [COARSE_BITS-1:0] coarse,
  output logic [N_CH-1:0]        hit_valid,
  output ts_t                    hit_ts    [N_CH],
  input  logic [N_CH-1:0]        gate,
  input  ts_t                    start_ts,
  input  acq_id_t                gate_id,
  output logic [N_CH-1:0]        int_valid,
  output ts_t                    int_value [N_CH],
  output acq_id_t                int_id
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coarse <= '0;
    else        coarse <= coarse + 1'b1;
  end

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    tdc_channel #(.TAPS(TAPS)) u_ch (
      .clk      (clk),
      .rst_n    (rst_n),
      .therm    (therm[i]),
      .coarse   (coarse),
      .hit_valid(hit_valid[i]),
      .hit_ts   (hit_ts[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      int_valid <= '0;
      int_id    <= '0;
      for (int i = 0; i < N_CH; i++) int_value[i] <= '0;
    end else begin
      int_valid <= gate & hit_valid;
      int_id    <= gate_id;
      for (int i = 0; i < N_CH; i++) int_value[i] <= hit_ts[i] - start_ts;
    end
  end

endmodule
