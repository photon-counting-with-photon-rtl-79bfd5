// tb_trigger_window: random hits on 8 channels against a window reference.
// The reference keeps the cycle index S of the last START: a cycle c is inside
// the window when 0 < c-S < W, the window closes at c-S == W, and a START is
// taken when the trigger channel fires outside an open window while enabled.
// In the START cycle a hit counts only if its timestamp is not earlier than
// START's. Checks gate, start, close, start_ts and the acquisition numbers
// every cycle, for random window lengths and trigger channels.
`timescale 1ps/1ps
module tb_trigger_window;
  import pc_pkg::*;
  localparam int N_CH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable;
  logic [2:0] trig_sel;
  logic [COARSE_BITS-1:0] win_cycles_m1;
  logic [N_CH-1:0] hit_valid, gate;
  ts_t hit_ts [N_CH], start_ts;
  logic start, active, close;
  acq_id_t gate_id, close_id;
  int checks = 0, failures = 0;
  int n_start = 0, n_close = 0, n_gate = 0, n_early = 0, n_ignored = 0;

  trigger_window #(.N_CH(N_CH)) dut (.*);

  always #1250 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  int  cyc = 0;
  int  s_cyc = -1000000;
  bit  r_active = 0;
  int  r_id = 0;
  int  r_start_ts = 0;

  initial begin
    int w, d, e_open, e_close, e_start;
    logic [N_CH-1:0] e_gate;
    enable = 1'b1; trig_sel = 3'd7; win_cycles_m1 = 8'd3; hit_valid = '0;
    for (int i = 0; i < N_CH; i++) hit_ts[i] = '0;
    repeat (3) @(posedge clk);
    #100 rst_n = 1'b1;
    for (cyc = 0; cyc < 6000; cyc++) begin
      @(posedge clk); #1;
      // Reconfigure now and then while no window is open.
      if (!r_active && $urandom_range(0, 40) == 0) begin
        trig_sel = 3'($urandom);
        win_cycles_m1 = ($urandom_range(0, 9) == 0) ? 8'd255 : 8'($urandom_range(0, 6));
      end
      enable = ($urandom_range(0, 30) != 0);
      for (int i = 0; i < N_CH; i++) begin
        hit_valid[i] = ($urandom_range(0, 4) == 0);
        hit_ts[i] = ts_t'(cyc * 256 - int'($urandom_range(0, 256)));
      end
      w = int'(win_cycles_m1) + 1;
      e_open  = r_active && (cyc - s_cyc) > 0 && (cyc - s_cyc) < w;
      e_close = r_active && (cyc - s_cyc) == w;
      e_start = enable && hit_valid[trig_sel] && !e_open;
      if (hit_valid[trig_sel] && e_open) n_ignored++;
      e_gate = '0;
      for (int i = 0; i < N_CH; i++) begin
        d = (int'(hit_ts[i]) - int'(hit_ts[trig_sel])) & 16'hFFFF;
        if (hit_valid[i] && i != int'(trig_sel)) begin
          if (e_open) e_gate[i] = 1'b1;
          else if (e_start && d < 256) e_gate[i] = 1'b1;
          else if (e_start) n_early++;
        end
      end
      #1;
      check("start", start, e_start);
      check("close", close, e_close);
      check("active", active, e_open || e_start);
      check("gate", gate, e_gate);
      if (e_close) check("close_id", close_id, r_id & 255);
      if (|e_gate) check("gate_id", gate_id, (e_start ? r_id + 1 : r_id) & 255);
      if (|e_gate) check("start_ts", start_ts, e_start ? int'(hit_ts[trig_sel]) : r_start_ts);
      n_start += e_start; n_close += e_close; n_gate += $countones(e_gate);
      if (e_start) begin
        s_cyc = cyc; r_active = 1; r_id++; r_start_ts = int'(hit_ts[trig_sel]);
      end else if (e_close) r_active = 0;
    end
    $display("starts=%0d closes=%0d gated=%0d early_rejected=%0d retrig_ignored=%0d",
             n_start, n_close, n_gate, n_early, n_ignored);
    check("mechanisms seen", (n_start > 100 && n_close > 100 && n_early > 0 && n_ignored > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
