// tb_photon_statistics: photon-number measurement of weak coherent pulses.
//
// Setup modelled: a laser pulse with a Poisson-distributed number of photons
// (mean MU) enters an eight-port fibre splitter; ports 1..7 feed detectors
// CH1..CH7 with detection efficiency ETA each, port 8 is unused, and the laser
// trigger drives CH8, the START channel. A detector clicks when it absorbs at
// least one photon, so the number of clicks is the measured photon number. For
// each of the means 0.5, 1, 2 and 4.2 photons per pulse, 10000 pulses are
// played; the repetition period is shortened from 10 us to 30 clock cycles,
// which the logic cannot tell apart (nothing in it depends on idle time).
//
// Checks: every COUNT record equals the clicks the testbench fired (pattern
// and number), every pulse gives exactly one COUNT record, and the mean click
// number agrees with 7*(1-exp(-MU*ETA/8)) within 8 % (about five standard
// errors at MU = 0.5). The click histograms (0..7) are printed.
`timescale 1ps/1ps
module tb_photon_statistics;
  import pc_pkg::*;
  localparam int N_CH = 8;
  localparam int P_PS = 2500;
  localparam int SHOTS = 10000;
  localparam real ETA = 0.807;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_CH-1:0] hit_in = '0;
  logic enable = 1'b0;
  logic [2:0] trig_sel = 3'd7;
  logic [COARSE_BITS-1:0] win_cycles_m1 = 8'd5;
  logic rd_en;
  record_t rd_data;
  logic rd_empty, fifo_full, acq_start, window_open;
  logic [9:0] fifo_level;
  logic [31:0] drop_count;

  photon_counter_top dut (.*);

  always #(P_PS/2) clk = ~clk;
  assign rd_en = !rd_empty;

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  int skew [N_CH] = '{4210, 4740, 6600, 5920, 5530, 5570, 6260, 0};
  int e_mask [256];
  int n_acq = 0;
  int n_rec = 0;
  int hist [N_CH];

  always @(negedge clk) begin
    if (rd_en && rd_data.tag == TAG_COUNT) begin
      automatic int a = int'(rd_data.acq_id);
      n_rec++;
      hist[rd_data.chan]++;
      check("COUNT pattern", rd_data.payload, e_mask[a]);
      check("COUNT photons", rd_data.chan, $countones(e_mask[a]));
    end
  end

  function automatic real urand();
    return (real'($urandom) + 0.5) / 4294967296.0;
  endfunction

  function automatic int poisson(real mu);
    real l = $exp(-mu), p = 1.0;
    int k = 0;
    do begin k++; p = p * urand(); end while (p > l);
    return k - 1;
  endfunction

  task automatic pulse(int ch, int at_ps);
    fork
      begin
        #(at_ps) hit_in[ch] = 1'b1;
        #(5000) hit_in[ch] = 1'b0;
      end
    join_none
  endtask

  initial begin
    real mus [4] = '{0.5, 1.0, 2.0, 4.2};
    repeat (4) @(posedge clk);
    #100 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    enable = 1'b1;
    foreach (mus[m]) begin
      automatic real mean, expect_mean;
      automatic longint clicks = 0;
      automatic int recs0 = n_rec;
      for (int k = 0; k < N_CH; k++) hist[k] = 0;
      for (int s = 0; s < SHOTS; s++) begin
        automatic int nph = poisson(mus[m]);
        automatic int mask = 0;
        automatic int a;
        for (int p = 0; p < nph; p++) begin
          automatic int port = int'($urandom_range(0, 7));
          if (port < 7 && urand() < ETA) mask |= 1 << port;
        end
        @(posedge clk);
        #(int'($urandom_range(1, P_PS - 1)));
        n_acq++;
        a = n_acq % 256;
        e_mask[a] = mask;
        clicks += $countones(mask);
        pulse(7, 0);
        for (int c = 0; c < 7; c++)
          if ((mask >> c) & 1) pulse(c, skew[c] + int'($urandom_range(0, 100)));
        repeat (30) @(posedge clk);
      end
      repeat (20) @(posedge clk);
      check("one COUNT record per pulse", n_rec - recs0, SHOTS);
      mean = real'(clicks) / SHOTS;
      expect_mean = 7.0 * (1.0 - $exp(-mus[m] * ETA / 8.0));
      $display("mu=%0.1f mean clicks=%0.3f expected=%0.3f hist 0..7: %0d %0d %0d %0d %0d %0d %0d %0d",
               mus[m], mean, expect_mean, hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
      check("mean photon number within 8%", (mean > 0.92 * expect_mean && mean < 1.08 * expect_mean), 1);
    end
    check("no record dropped", drop_count, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
