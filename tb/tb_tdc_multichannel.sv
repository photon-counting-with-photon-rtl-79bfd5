// tb_tdc_multichannel: drives thermometer words straight into the TDC.
// For a channel whose word rises from 0 to n ones in the cycle after clock edge
// c (the testbench counts edges since reset itself), the TDC must report one
// hit with timestamp c*256 - n (mod 2^16) one cycle later, and nothing while the
// word stays set. When a hit is gated, its interval from the given start
// timestamp must appear one cycle after the gate with the gate's id.
`timescale 1ps/1ps
module tb_tdc_multichannel;
  import pc_pkg::*;
  localparam int N_CH = 8;
  localparam int TAPS = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [TAPS-1:0] therm [N_CH];
  logic [COARSE_BITS-1:0] coarse;
  logic [N_CH-1:0] hit_valid, gate, int_valid;
  ts_t hit_ts [N_CH], int_value [N_CH], start_ts;
  acq_id_t gate_id, int_id;
  int checks = 0, failures = 0;
  int edge_n = 0;

  tdc_multichannel #(.N_CH(N_CH), .TAPS(TAPS)) dut (.*);

  always #1250 clk = ~clk;
  always @(posedge clk) if (rst_n) edge_n <= edge_n + 1;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Expected result of the current cycle, kept for the next one.
  logic [N_CH-1:0] exp_v, exp_gv;
  int exp_ts [N_CH];
  int exp_int [N_CH];
  int exp_id;
  int n_hits = 0;

  initial begin
    for (int i = 0; i < N_CH; i++) therm[i] = '0;
    gate = '0; start_ts = '0; gate_id = '0;
    exp_v = '0; exp_gv = '0;
    repeat (3) @(posedge clk);
    #100 rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(posedge clk);
      #1;
      // Check what the previous cycle's inputs produced.
      for (int i = 0; i < N_CH; i++) begin
        check($sformatf("hit_valid ch%0d", i), int'(hit_valid[i]), int'(exp_v[i]));
        if (exp_v[i]) check($sformatf("hit_ts ch%0d", i), int'(hit_ts[i]), exp_ts[i]);
        check($sformatf("int_valid ch%0d", i), int'(int_valid[i]), int'(exp_gv[i]));
        if (exp_gv[i]) check($sformatf("int ch%0d", i), int'(int_value[i]), exp_int[i]);
      end
      if (|exp_gv) check("int_id", int'(int_id), exp_id);
      // Gate this cycle's registered hits at random against a random start.
      start_ts = ts_t'($urandom);
      gate_id  = acq_id_t'($urandom);
      gate     = hit_valid & N_CH'($urandom);
      exp_gv   = gate;
      exp_id   = int'(gate_id);
      for (int i = 0; i < N_CH; i++)
        exp_int[i] = (int'(hit_ts[i]) - int'(start_ts)) & 16'hFFFF;
      // New words: each channel toggles between idle and a rising edge.
      for (int i = 0; i < N_CH; i++) begin
        int n;
        exp_v[i] = 1'b0;
        if (therm[i][0]) begin
          if ($urandom_range(0, 2) == 0) therm[i] = '0;
          else therm[i] = '1;
        end else if ($urandom_range(0, 3) == 0) begin
          n = int'($urandom_range(1, TAPS));
          therm[i] = (n == TAPS) ? '1 : ((TAPS'(1) << n) - 1);
          exp_v[i]  = 1'b1;
          exp_ts[i] = (edge_n * TAPS - n) & 16'hFFFF;
          n_hits++;
        end else begin
          // Edge not yet at tap 0: some ones only at the far end are ignored.
          therm[i] = '0;
        end
      end
    end
    check("hits seen", int'(n_hits > 500), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
