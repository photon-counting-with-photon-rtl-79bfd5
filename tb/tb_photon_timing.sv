// tb_photon_timing: START-to-STOP timing of all channels against CH8.
//
// Pulses as from a function generator at 1.8 MHz drive all eight inputs: CH8
// is the trigger and CH1..CH7 follow it by the channel skews of the
// comparator-plus-TDC calibration (1.81 to 3.36 ns), then, in a second run, of
// the complete detector chain (4.21 to 6.60 ns). Each stop pulse gets Gaussian
// jitter of SIGMA_PS r.m.s. and so does the trigger. 2000 pulses per run.
// A third run replaces the generator by a free-running 76 MHz laser (13.16 ns
// period) with each detector firing on 30 % of the pulses, and a 15 ns window:
// trigger pulses that fall into a still-open window must be ignored.
//
// Checks, per channel: one TIME record per fired pulse (at most one at 76 MHz);
// one COUNT record per START; the mean measured interval
// within 3 ps of the true mean skew (the TDC's timestamps are biased by at most
// one LSB each way, symmetric on average); and the r.m.s. spread of the
// measured intervals within 15 % of sqrt(2*SIGMA^2 + LSB^2/6), the spread of
// two jittered edges each quantised by a 9.77 ps bin.
`timescale 1ps/1ps
module tb_photon_timing;
  import pc_pkg::*;
  localparam int N_CH = 8;
  localparam int P_PS = 2500;
  localparam int SHOTS = 2000;
  localparam int PERIOD_PS = 555556;     // 1.8 MHz
  localparam real SIGMA_PS = 16.0;
  localparam real LSB_PS = 2500.0 / 256.0;

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

  real sum [N_CH], sum2 [N_CH];
  int  cnt [N_CH];
  int  n_starts = 0, n_counts = 0;

  always @(posedge clk) if (acq_start) n_starts++;

  always @(negedge clk) begin
    if (rd_en && rd_data.tag == TAG_COUNT) n_counts++;
    if (rd_en && rd_data.tag == TAG_TIME) begin
      automatic int ch = int'(rd_data.chan);
      automatic real v = real'(rd_data.payload[15:0]) * LSB_PS;
      sum[ch] += v; sum2[ch] += v * v; cnt[ch]++;
    end
  end

  function automatic real urand();
    return (real'($urandom) + 0.5) / 4294967296.0;
  endfunction

  function automatic real gauss(real sigma);
    return sigma * $sqrt(-2.0 * $ln(urand())) * $cos(6.283185307179586 * urand());
  endfunction

  task automatic pulse(int ch, int at_ps);
    fork
      begin
        #(at_ps) hit_in[ch] = 1'b1;
        #(5000) hit_in[ch] = 1'b0;
      end
    join_none
  endtask

  // One run: SHOTS trigger pulses, a detector pulse per channel with
  // probability prob_pct. period_ps = 0 means the 1.8 MHz generator, placed at
  // a random clock phase; otherwise a free-running laser of that period.
  task automatic run(string name, int skew [7], int period_ps, int prob_pct);
    real mean, rms, exp_rms, jt;
    int fired [7];
    int starts0 = n_starts, counts0 = n_counts;
    for (int c = 0; c < N_CH; c++) begin sum[c] = 0; sum2[c] = 0; cnt[c] = 0; end
    for (int c = 0; c < 7; c++) fired[c] = 0;
    @(posedge clk);
    for (int s = 0; s < SHOTS; s++) begin
      if (period_ps == 0) begin
        @(posedge clk);
        #(int'($urandom_range(200, P_PS - 200)));
      end
      jt = gauss(SIGMA_PS);
      pulse(7, 100 + int'($rtoi(jt + 1000.5)) - 1000);
      for (int c = 0; c < 7; c++)
        if (int'($urandom_range(0, 99)) < prob_pct) begin
          pulse(c, 100 + skew[c] + int'($rtoi(gauss(SIGMA_PS) + 1000.5)) - 1000);
          fired[c]++;
        end
      if (period_ps == 0) #(PERIOD_PS - 3000);
      else #(period_ps);
    end
    repeat (50) @(posedge clk);
    check("one COUNT record per START", n_counts - counts0, n_starts - starts0);
    if (period_ps != 0) begin
      // Window (15 ns) longer than the laser period: some trigger pulses fall
      // into an open window and are ignored.
      $display("%s: %0d laser pulses, %0d acquisitions", name, SHOTS, n_starts - starts0);
      check("re-trigger ignored at 76 MHz", (n_starts - starts0 < SHOTS && n_starts - starts0 > SHOTS / 4), 1);
    end
    exp_rms = $sqrt(2.0 * SIGMA_PS * SIGMA_PS + LSB_PS * LSB_PS / 6.0);
    for (int c = 0; c < 7; c++) begin
      mean = sum[c] / cnt[c];
      rms  = $sqrt(sum2[c] / cnt[c] - mean * mean);
      $display("%s CH%0d-CH8: records=%0d mean=%0.2f ns (true %0.2f) sigma=%0.1f ps (expected %0.1f)",
               name, c + 1, cnt[c], mean / 1000.0, skew[c] / 1000.0, rms, exp_rms);
      if (period_ps == 0) check("one TIME record per pulse", cnt[c], fired[c]);
      else check("TIME records at most the pulses fired", (cnt[c] <= fired[c] && cnt[c] > 50), 1);
      check("mean interval within 3 ps", (mean > skew[c] - 3.0 && mean < skew[c] + 3.0), 1);
      check("sigma within 15%", (rms > 0.85 * exp_rms && rms < 1.15 * exp_rms), 1);
    end
  endtask

  initial begin
    int table1 [7] = '{1810, 2670, 2830, 3360, 3080, 2700, 2800};
    int table2 [7] = '{4210, 4740, 6600, 5920, 5530, 5570, 6260};
    repeat (4) @(posedge clk);
    #100 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    enable = 1'b1;
    run("comparator+TDC", table1, 0, 100);
    run("full chain", table2, 0, 100);
    run("full chain, 76 MHz laser", table2, 13158, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
