// tb_photon_counter_top: end-to-end run of the photon counter at its default
// size (8 channels, 256 taps, 400 MHz, 512-record FIFO).
//
// Laser shots are played as comparator pulses: a trigger pulse and, per other
// channel, a detector pulse at a fixed delay (the channel skews of the
// system's complete-chain calibration, 4.21 to 6.60 ns) that is present or
// absent at random. The testbench keeps the true times in picoseconds and
// checks every record read from the FIFO:
//   TIME  - channel is one that fired in that acquisition, and the interval
//           differs from the true START-to-STOP time by less than 1 LSB
//           (2500/256 ps), the quantisation of the two timestamps;
//   COUNT - channel pattern and photon number equal what was fired, 0 included;
// and that no record is missing except while the FIFO was made to overflow.
// Mechanisms exercised and counted (each must occur): START, TIME and COUNT
// records, 0-photon and multi-photon acquisitions, hits after the window,
// hits just before START, trigger pulses ignored inside an open window, shots
// ignored while disabled, window edge in/out at exactly W cycles, change of
// trigger channel, FIFO full and record drops.
`timescale 1ps/1ps
module tb_photon_counter_top;
  import pc_pkg::*;
  localparam int N_CH = 8;
  localparam int P_PS = 2500;
  localparam int PULSE_PS = 5000;

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

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // Expected content of each acquisition, indexed by acquisition number.
  localparam int MAXA = 256;
  int  e_mask  [MAXA];
  int  e_dly   [MAXA][N_CH];
  bit  e_lossy [MAXA];
  int  got_time[MAXA];
  int  got_cnt [MAXA];
  int  n_acq = 0;           // acquisitions started by the testbench

  // Mechanism counters.
  int m_start = 0, m_time = 0, m_count = 0, m_zero = 0, m_multi = 0;
  int m_after = 0, m_before = 0, m_retrig = 0, m_disabled = 0;
  int m_edge_in = 0, m_edge_out = 0, m_switch = 0, m_full = 0;

  // Channel skews (ps) relative to the trigger, channel index 0 = CH1.
  int skew [N_CH] = '{4210, 4740, 6600, 5920, 5530, 5570, 6260, 3000};

  logic reading = 1'b1;
  assign rd_en = reading && !rd_empty;

  always @(posedge clk) if (acq_start) m_start++;
  always @(posedge clk) if (fifo_full) m_full++;

  // Read side: take the record at the falling edge, before the pop.
  always @(negedge clk) begin
    if (rd_en) begin
      automatic int a = int'(rd_data.acq_id);
      automatic int ch = int'(rd_data.chan);
      if (rd_data.tag == TAG_TIME) begin
        automatic longint iv = longint'(rd_data.payload[15:0]);
        automatic longint err = iv * P_PS - longint'(e_dly[a][ch]) * 256;
        m_time++;
        got_time[a]++;
        check("TIME channel fired", (e_mask[a] >> ch) & 1, 1);
        check("TIME interval within 1 LSB", (err > -P_PS && err < P_PS), 1);
      end else if (rd_data.tag == TAG_COUNT) begin
        m_count++;
        got_cnt[a]++;
        if (ch == 0) m_zero++;
        if (ch > 1) m_multi++;
        check("COUNT pattern", rd_data.payload, e_mask[a]);
        check("COUNT photons", ch, $countones(e_mask[a]));
      end else begin
        check("record tag", 0, 1);
      end
    end
  end

  task automatic pulse(int ch, int at_ps);
    fork
      begin
        #(at_ps) hit_in[ch] = 1'b1;
        #(PULSE_PS) hit_in[ch] = 1'b0;
      end
    join_none
  endtask

  // One laser shot: trigger pulse in the middle of a clock period and random
  // detector clicks; extra = 0 normal, 1 late hit after the window,
  // 3 second trigger inside the window, 4 window edges (other values: normal).
  task automatic shot(int prob_pct, int extra, bit counts, bit lossy);
    int trig = int'(trig_sel);
    int w = int'(win_cycles_m1) + 1;
    int mask = 0;
    int a = (n_acq + 1) % MAXA;
    @(posedge clk);
    #(P_PS/2);
    pulse(trig, 0);
    for (int c = 0; c < N_CH; c++) begin
      if (c == trig) continue;
      if (extra == 4) begin
        // Channel c+1 just inside (W-1 cycles), the next just outside (W).
        if (c == (trig + 1) % N_CH) begin
          pulse(c, (w - 1) * P_PS); mask |= 1 << c; e_dly[a][c] = (w - 1) * P_PS; m_edge_in++;
        end else if (c == (trig + 2) % N_CH) begin
          pulse(c, w * P_PS); m_edge_out++;
        end
        continue;
      end
      if (int'($urandom_range(0, 99)) < prob_pct) begin
        int d = skew[c] + int'($urandom_range(0, 200)) - 100;
        pulse(c, d);
        mask |= 1 << c;
        e_dly[a][c] = d;
      end else if (extra == 1 && c == (trig + 3) % N_CH) begin
        pulse(c, (w + 4) * P_PS); m_after++;
      end
    end
    if (extra == 3) begin pulse(trig, 2 * P_PS + 700); m_retrig++; end
    if (counts) begin
      n_acq++;
      e_mask[a] = mask; e_lossy[a] = lossy; got_time[a] = 0; got_cnt[a] = 0;
    end
    repeat (20) @(posedge clk);
  endtask

  // Early hit: raised 300 ps before the trigger of the coming shot.
  task automatic shot_early(int prob_pct);
    int trig = int'(trig_sel);
    int c = (trig + 3) % N_CH;
    int a = (n_acq + 1) % MAXA;
    @(posedge clk);
    #(P_PS/2 - 300) hit_in[c] = 1'b1;
    #300;
    pulse(trig, 0);
    m_before++;
    fork begin #(PULSE_PS - 300) hit_in[c] = 1'b0; end join_none
    n_acq++;
    e_mask[a] = 0; e_lossy[a] = 0; got_time[a] = 0; got_cnt[a] = 0;
    for (int k = 0; k < N_CH; k++) begin
      if (k == trig || k == c) continue;
      if (int'($urandom_range(0, 99)) < prob_pct) begin
        pulse(k, skew[k]); e_mask[a] |= 1 << k; e_dly[a][k] = skew[k];
      end
    end
    repeat (20) @(posedge clk);
  endtask

  initial begin
    int starts_before;
    repeat (4) @(posedge clk);
    #100 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    enable = 1'b1;
    // Phase 1: CH8 is the trigger, window 6 cycles = 15 ns, mixed photon numbers.
    for (int s = 0; s < 40; s++) shot(40 + (s % 3) * 20, s % 4, 1, 0);
    for (int s = 0; s < 4; s++) shot(0, 0, 1, 0);
    for (int s = 0; s < 4; s++) shot(0, 4, 1, 0);
    for (int s = 0; s < 4; s++) shot_early(50);
    // Phase 2: disabled, shots must be ignored.
    enable = 1'b0;
    starts_before = m_start;
    for (int s = 0; s < 4; s++) begin shot(50, 0, 0, 0); m_disabled++; end
    check("no START while disabled", m_start, starts_before);
    // Phase 3: trigger moved to CH2, CH8 now counts as a detector.
    trig_sel = 3'd1; m_switch++;
    repeat (4) @(posedge clk);
    enable = 1'b1;
    for (int s = 0; s < 30; s++) shot(50, s % 4, 1, 0);
    // Phase 4: no reading: the FIFO fills and records are dropped.
    trig_sel = 3'd7; m_switch++;
    repeat (10) @(posedge clk);
    reading = 1'b0;
    for (int s = 0; s < 90; s++) shot(100, 0, 1, 1);
    check("FIFO full", fifo_full, 1);
    reading = 1'b1;
    repeat (600) @(posedge clk);
    // Phase 5: recovery after the overflow.
    for (int s = 0; s < 20; s++) shot(50, s % 4, 1, 0);
    repeat (100) @(posedge clk);

    check("FIFO drained", rd_empty, 1);
    check("START count", m_start, n_acq);
    for (int n = 1; n <= n_acq; n++) begin
      if (!e_lossy[n % MAXA]) begin
        check($sformatf("acq %0d COUNT records", n), got_cnt[n % MAXA], 1);
        check($sformatf("acq %0d TIME records", n), got_time[n % MAXA], $countones(e_mask[n % MAXA]));
      end
    end
    $display("acq=%0d start=%0d time=%0d count=%0d zero=%0d multi=%0d after=%0d before=%0d retrig=%0d disabled=%0d edge_in=%0d edge_out=%0d switch=%0d full_cycles=%0d drops=%0d",
             n_acq, m_start, m_time, m_count, m_zero, m_multi, m_after, m_before, m_retrig,
             m_disabled, m_edge_in, m_edge_out, m_switch, m_full, drop_count);
    check("mechanism START", m_start > 0, 1);
    check("mechanism TIME record", m_time > 0, 1);
    check("mechanism COUNT record", m_count > 0, 1);
    check("mechanism zero-photon acquisition", m_zero > 0, 1);
    check("mechanism multi-photon acquisition", m_multi > 0, 1);
    check("mechanism hit after window", m_after > 0, 1);
    check("mechanism hit before START", m_before > 0, 1);
    check("mechanism trigger ignored in window", m_retrig > 0, 1);
    check("mechanism disabled", m_disabled > 0, 1);
    check("mechanism window edge", m_edge_in > 0 && m_edge_out > 0, 1);
    check("mechanism trigger switch", m_switch > 0, 1);
    check("mechanism FIFO full", m_full > 0, 1);
    check("mechanism drop", drop_count > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
