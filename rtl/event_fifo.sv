// event_fifo: merges the result records of all sources into one read-out FIFO.
//
// Each of the N_SRC sources (the TDC's interval records, one per channel, and
// the ACDC's count record, last) writes into a one-record holding register.
// A fixed-priority arbiter moves one held record per cycle, lowest source index
// first, into a DEPTH-entry FIFO; the ACDC, having the highest index, drains
// after the interval records of its own window. When the FIFO is full the
// holding registers wait; a record that arrives at a holding register that is
// still occupied is lost and counted in drop_count (overflow).
//
// Read side: first-word-fall-through. rd_data is valid while empty is low;
// rd_en pops it. Same clock as the write side. Timing: a record reaches the
// FIFO two cycles after in_valid at the earliest. The FIFO between TDC/ACDC and
// the USB link is in the source; depth, holding registers, arbitration and drop
// counting are this design's choices.
`timescale 1ps/1ps
module event_fifo
  import pc_pkg::*;
#(
  parameter int unsigned N_SRC = 9,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_SRC-1:0] in_valid,
  input  record_t         in_rec   [N_SRC],
  input  logic            rd_en,
  output record_t         rd_data,
  output logic            empty,
  output logic            full,
  output logic [AW:0]     level,
  output logic [31:0]     drop_count
);

  record_t              mem [DEPTH];
  logic [AW-1:0]        wr_ptr, rd_ptr;
  logic [N_SRC-1:0]     hold_v;
  record_t              hold_rec [N_SRC];

  logic [N_SRC-1:0]     grant;
  logic                 wr;
  record_t              wr_rec;
  logic                 rd;
  logic [N_SRC-1:0]     lost;
  logic [31:0]          n_lost;

  assign empty = (level == 0);
  assign full  = (level == (AW+1)'(DEPTH));
  assign rd    = rd_en && !empty;
  assign rd_data = mem[rd_ptr];

  // Fixed-priority pick among the held records.
  always_comb begin
    grant  = '0;
    wr_rec = '0;
    if (!full) begin
      for (int i = N_SRC - 1; i >= 0; i--) begin
        if (hold_v[i]) begin
          grant  = '0;
          grant[i] = 1'b1;
          wr_rec = hold_rec[i];
        end
      end
    end
    wr = |grant;
    lost   = in_valid & hold_v & ~grant;
    n_lost = '0;
    for (int i = 0; i < N_SRC; i++) n_lost += 32'(lost[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v     <= '0;
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      level      <= '0;
      drop_count <= '0;
      for (int i = 0; i < N_SRC; i++) hold_rec[i] <= '0;
    end else begin
      for (int i = 0; i < N_SRC; i++) begin
        if (in_valid[i] && (!hold_v[i] || grant[i])) begin
          hold_v[i]   <= 1'b1;
          hold_rec[i] <= in_rec[i];
        end else if (grant[i]) begin
          hold_v[i]   <= 1'b0;
        end
      end
      drop_count <= drop_count + n_lost;
      if (wr) wr_ptr <= AW'((int'(wr_ptr) + 1) % DEPTH);
      if (rd) rd_ptr <= AW'((int'(rd_ptr) + 1) % DEPTH);
      level <= level + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

  always_ff @(posedge clk) begin
    if (wr) mem[wr_ptr] <= wr_rec;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr |-> !full);
  a_level_range: assert property (@(posedge clk) disable iff (!rst_n)
    level <= (AW+1)'(DEPTH));

endmodule
