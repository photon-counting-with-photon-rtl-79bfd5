// tb_tdl_delay_line: checks the delay-line model's thermometer word.
// A hit rises at a random offset inside a 2.5 ns clock period; at the next edge
// the word must hold floor(d / (2500/256 ps)) contiguous ones from tap 0, d being
// the time from the hit to the edge. A hit that arrives less than one tap
// before the edge must show a full word one edge later. After the pulse ends
// the first tap must return to 0.
`timescale 1ps/1ps
module tb_tdl_delay_line;
  localparam int TAPS = 256;
  logic clk = 1'b0;
  logic hit = 1'b0;
  logic [TAPS-1:0] therm;
  int checks = 0, failures = 0;

  tdl_delay_line #(.TAPS(TAPS), .CLK_PERIOD_PS(2500.0)) dut (.clk(clk), .hit(hit), .therm(therm));

  always #1250 clk = ~clk;

  function automatic int ones_of(logic [TAPS-1:0] w);
    int n = 0;
    for (int k = 0; k < TAPS; k++) n += int'(w[k]);
    return n;
  endfunction

  function automatic logic is_therm(logic [TAPS-1:0] w);
    int n = ones_of(w);
    for (int k = 0; k < TAPS; k++) if (w[k] != (k < n)) return 1'b0;
    return 1'b1;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int off, d, exp;
    repeat (4) @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      @(posedge clk);
      off = (t < 3) ? 2500 - t : 1 + int'($urandom_range(0, 2497));
      #(off) hit = 1'b1;
      d   = 2500 - off;
      exp = (d * TAPS) / 2500;
      @(posedge clk); #1;
      check("shape", int'(is_therm(therm)), 1);
      check("ones", ones_of(therm), exp);
      if (exp == 0) begin
        @(posedge clk); #1;
        check("ones next edge", ones_of(therm), TAPS);
      end
      #(6000) hit = 1'b0;
      repeat (3) @(posedge clk); #1;
      check("tap0 after fall", int'(therm[0]), 0);
    end
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
