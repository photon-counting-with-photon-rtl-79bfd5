// tb_event_fifo: random records from 9 sources, read at a varying rate.
// Each record carries a unique serial number in its payload. The reference
// holds one record per source, moves the lowest-numbered held record into a
// queue each cycle unless DEPTH records are queued, and loses a new record
// whose source is still holding one. Checks every popped record against the
// queue head, the empty/full flags, the level and the lost-record count.
// Phases with no reads fill the FIFO so that back-pressure and drops happen.
`timescale 1ps/1ps
module tb_event_fifo;
  import pc_pkg::*;
  localparam int N_SRC = 9;
  localparam int DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_SRC-1:0] in_valid;
  record_t in_rec [N_SRC];
  logic rd_en;
  record_t rd_data;
  logic empty, full;
  logic [4:0] level;
  logic [31:0] drop_count;
  int checks = 0, failures = 0;

  event_fifo #(.N_SRC(N_SRC), .DEPTH(DEPTH)) dut (.*);

  always #1250 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    record_t q [$];
    bit      h_v [N_SRC];
    record_t h_r [N_SRC];
    int serial = 1, drops = 0, n_full = 0, n_read = 0;
    int g, sz0;
    in_valid = '0; rd_en = 1'b0;
    for (int i = 0; i < N_SRC; i++) begin h_v[i] = 0; in_rec[i] = '0; end
    repeat (3) @(posedge clk);
    #100 rst_n = 1'b1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(posedge clk); #1;
      check("empty", empty, q.size() == 0);
      check("full", full, q.size() == DEPTH);
      check("level", level, q.size());
      check("drop_count", drop_count, drops);
      if (full) n_full++;
      // Inputs for this cycle.
      rd_en = ((cyc / 500) % 2 == 0) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 9) == 0);
      for (int i = 0; i < N_SRC; i++) begin
        in_valid[i] = ($urandom_range(0, 6) == 0);
        in_rec[i].tag = (i == N_SRC - 1) ? TAG_COUNT : TAG_TIME;
        in_rec[i].acq_id = acq_id_t'($urandom);
        in_rec[i].chan = 6'(i);
        in_rec[i].payload = 32'(serial++);
      end
      if (rd_en && q.size() > 0) begin
        check("rd_data", rd_data, q[0]);
        n_read++;
      end
      // Reference update for the coming edge.
      sz0 = q.size();
      if (rd_en && q.size() > 0) void'(q.pop_front());
      g = -1;
      // The FIFO accepts a held record when it was not full this cycle.
      if (sz0 < DEPTH) for (int i = 0; i < N_SRC; i++) if (h_v[i] && g < 0) g = i;
      if (g >= 0) begin q.push_back(h_r[g]); h_v[g] = 0; end
      for (int i = 0; i < N_SRC; i++) begin
        if (in_valid[i]) begin
          if (h_v[i]) drops++;
          else begin h_v[i] = 1; h_r[i] = in_rec[i]; end
        end
      end
    end
    $display("reads=%0d drops=%0d full_cycles=%0d", n_read, drops, n_full);
    check("reads, full and drops all seen", n_read > 500 && drops > 0 && n_full > 0, 1);
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
