// tb_photon_counter_32ch: the same logic scaled to 32 channels (N_CH = 32),
// the size the architecture is meant to grow to. CH32 is the trigger, the other
// 31 channels fire at random with random delays of 1 to 12 ns in a 16-cycle
// (40 ns) window. Every TIME record must name a channel that fired and give its
// delay to within one LSB; every COUNT record must give the 31-bit pattern and
// its population; no record may be missing. 300 shots.
`timescale 1ps/1ps
module tb_photon_counter_32ch;
  import pc_pkg::*;
  localparam int N_CH = 32;
  localparam int P_PS = 2500;
  localparam int SHOTS = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_CH-1:0] hit_in = '0;
  logic enable = 1'b0;
  logic [4:0] trig_sel = 5'd31;
  logic [COARSE_BITS-1:0] win_cycles_m1 = 8'd15;
  logic rd_en;
  record_t rd_data;
  logic rd_empty, fifo_full, acq_start, window_open;
  logic [9:0] fifo_level;
  logic [31:0] drop_count;

  photon_counter_top #(.N_CH(N_CH)) dut (.*);

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

  longint e_mask [256];
  int     e_dly  [256][N_CH];
  int     n_time = 0, n_count = 0, n_fired = 0;

  always @(negedge clk) begin
    if (rd_en) begin
      automatic int a = int'(rd_data.acq_id);
      automatic int ch = int'(rd_data.chan);
      if (rd_data.tag == TAG_TIME) begin
        automatic longint err = longint'(rd_data.payload[15:0]) * P_PS - longint'(e_dly[a][ch]) * 256;
        n_time++;
        check("TIME channel fired", (e_mask[a] >> ch) & 1, 1);
        check("TIME interval within 1 LSB", (err > -P_PS && err < P_PS), 1);
      end else begin
        n_count++;
        check("COUNT pattern", longint'(rd_data.payload), e_mask[a]);
        check("COUNT photons", ch, $countones(e_mask[a]));
      end
    end
  end

  task automatic pulse(int ch, int at_ps);
    fork
      begin
        #(at_ps) hit_in[ch] = 1'b1;
        #(5000) hit_in[ch] = 1'b0;
      end
    join_none
  endtask

  initial begin
    repeat (4) @(posedge clk);
    #100 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    enable = 1'b1;
    for (int s = 1; s <= SHOTS; s++) begin
      automatic int a = s % 256;
      e_mask[a] = 0;
      @(posedge clk);
      #(int'($urandom_range(1, P_PS - 1)));
      pulse(31, 0);
      for (int c = 0; c < 31; c++) begin
        if ($urandom_range(0, 2) == 0) begin
          e_dly[a][c] = int'($urandom_range(1000, 12000));
          e_mask[a] |= longint'(1) << c;
          pulse(c, e_dly[a][c]);
          n_fired++;
        end
      end
      repeat (50) @(posedge clk);
    end
    repeat (100) @(posedge clk);
    $display("shots=%0d hits=%0d time_records=%0d count_records=%0d", SHOTS, n_fired, n_time, n_count);
    check("TIME records", n_time, n_fired);
    check("COUNT records", n_count, SHOTS);
    check("no drops", drop_count, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
