// acdc: Asynchronous-Correlated-Digital-Counter, the photon-number part.
//
// For each acquisition (one trigger window) the ACDC keeps one presence bit
// per channel, set by the first event the trigger gates in on that channel.
// When the window closes it outputs the channel pattern and the number of
// channels that fired. With the light split over several single-photon
// detectors that number is the detected photon number of the pulse; an
// acquisition in which no detector fired is reported as well, with count 0,
// so a host can build the 0..N photon histogram (coincidences up to N-fold).
//
// Interface: gate[i] is the trigger's accepted hit of channel i; close with
// close_id ends the acquisition. Timing: cnt_valid pulses one cycle after
// close. A window that starts in the closing cycle starts its pattern with that
// cycle's gates. Presence per acquisition, and counting empty acquisitions as
// 0 photons, follow the source; the output format is this design's choice, and
// events are taken from the TDC's edge detection rather than sampled apart.
`timescale 1ps/1ps
module acdc
  import pc_pkg::*;
#(
  parameter int unsigned N_CH  = 8,
  parameter int unsigned CNT_W = $clog2(N_CH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_CH-1:0]  gate,
  input  logic             close,
  input  acq_id_t          close_id,
  output logic             cnt_valid,
  output logic [N_CH-1:0]  cnt_mask,
  output logic [CNT_W-1:0] cnt_num,
  output acq_id_t          cnt_id
);

  logic [N_CH-1:0]  present_q;
  logic [CNT_W-1:0] ones;

  always_comb begin
    ones = '0;
    for (int i = 0; i < N_CH; i++) ones += CNT_W'(present_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      present_q <= '0;
      cnt_valid <= 1'b0;
      cnt_mask  <= '0;
      cnt_num   <= '0;
      cnt_id    <= '0;
    end else begin
      cnt_valid <= close;
      if (close) begin
        cnt_mask  <= present_q;
        cnt_num   <= ones;
        cnt_id    <= close_id;
        present_q <= gate;
      end else begin
        present_q <= present_q | gate;
      end
    end
  end

endmodule
