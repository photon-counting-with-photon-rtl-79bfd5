// tb_acdc: random gated events and window closes. The reference keeps, per
// acquisition, the set of channels seen since the previous close; one cycle
// after each close the ACDC must report that set, its size and the close's
// acquisition number. Empty acquisitions (0 photons) must be reported too.
`timescale 1ps/1ps
module tb_acdc;
  import pc_pkg::*;
  localparam int N_CH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_CH-1:0] gate, cnt_mask;
  logic close, cnt_valid;
  acq_id_t close_id, cnt_id;
  logic [3:0] cnt_num;
  int checks = 0, failures = 0;
  int n_zero = 0, n_multi = 0;

  acdc #(.N_CH(N_CH)) dut (.*);

  always #1250 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    bit seen [N_CH];
    bit e_valid = 0;
    int e_mask = 0, e_num = 0, e_id = 0;
    gate = '0; close = 1'b0; close_id = '0;
    for (int i = 0; i < N_CH; i++) seen[i] = 0;
    repeat (3) @(posedge clk);
    #100 rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(posedge clk); #1;
      check("cnt_valid", cnt_valid, e_valid);
      if (e_valid) begin
        check("cnt_mask", cnt_mask, e_mask);
        check("cnt_num", cnt_num, e_num);
        check("cnt_id", cnt_id, e_id);
      end
      close    = ($urandom_range(0, 5) == 0);
      close_id = acq_id_t'($urandom);
      gate     = ($urandom_range(0, 3) == 0) ? N_CH'($urandom) & N_CH'($urandom) : '0;
      e_valid  = close;
      if (close) begin
        e_mask = 0; e_num = 0; e_id = int'(close_id);
        for (int i = 0; i < N_CH; i++) if (seen[i]) begin e_mask |= 1 << i; e_num++; end
        if (e_num == 0) n_zero++;
        if (e_num > 1) n_multi++;
        for (int i = 0; i < N_CH; i++) seen[i] = gate[i];
      end else begin
        for (int i = 0; i < N_CH; i++) if (gate[i]) seen[i] = 1;
      end
    end
    check("zero and multi-photon acquisitions seen", n_zero > 10 && n_multi > 10, 1);
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
