// hit_count_array: the hit-flag ring of the trigger, in its reduced form of
// one counter per trigger cluster and time column (16 x 172 instead of
// 900 x 172 single-bit flags).
//
// The ring has COLS = 172 columns, one per 25 ns global cycle: 160 columns of
// delay buffering, the column under trigger processing, the clear column and
// 10 columns of margin. `trig_col` (the Trigger Pointer) advances by one on
// every `tick`. On that tick the 16 counters of column `trig_col` are copied to
// `col_counts` (valid with `col_valid` one clock later) and the column is set
// to zero, so that it is empty when it comes round again (the Clear Pointer,
// one column behind the Trigger Pointer, in the source's terms).
//
// A hit (`wr_valid`, the packet's `wr_channel` and its `wr_offset` of 1..160
// columns ahead of the Trigger Pointer, from sync_window) adds one to the
// counter of every cluster that contains the channel, in the BROADEN = 10
// columns starting at trig_col + wr_offset. This is the 250 ns pulse
// broadening: a hit at cycle t is seen by the trigger at t .. t+9. Counters
// saturate at 2^CNT_W - 1. One hit per clock is taken.
//
// Source design: ring of 172 columns, the 160-column active write section,
// broadening to 10 columns, clearing the column after use, the 16 x 172 array
// of per-cluster counts. Own choices: counter width, saturation, placing
// columns relative to the Trigger Pointer (the source indexes them by coarse
// time modulo 172; the two differ by a constant offset, apart from the wrap
// of the 27-bit counter, which the relative form handles without a gap).
// A channel that fires twice within 10 cycles counts twice here, as in any
// per-cluster counter array; a per-channel flag array would count it once.
module hit_count_array
  import lawca_pkg::*;
#(
  parameter int unsigned COLS    = 172,
  parameter int unsigned BROADEN = 10,
  parameter int unsigned NCL     = N_CLUSTERS,
  parameter int unsigned CNT_W   = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  input  logic             wr_valid,
  input  logic [9:0]       wr_channel,
  input  logic [7:0]       wr_offset,
  output logic             col_valid,
  output logic [CNT_W-1:0] col_counts [NCL],
  output logic [7:0]       trig_col
);
  logic [CNT_W-1:0] cnt [NCL][COLS];
  logic [NCL-1:0]   mask;
  logic [COLS-1:0]  in_win;
  logic [8:0]       base;

  always_comb begin
    int unsigned dst;
    mask = cluster_mask(wr_channel);
    base = 9'(trig_col) + 9'(wr_offset);
    if (base >= 9'(COLS)) base = base - 9'(COLS);
    for (int unsigned j = 0; j < COLS; j++) begin
      dst      = (j + COLS - int'(base)) % COLS;
      in_win[j] = wr_valid && (dst < BROADEN);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_col  <= '0;
      col_valid <= 1'b0;
      for (int m = 0; m < NCL; m++) begin
        col_counts[m] <= '0;
        for (int j = 0; j < COLS; j++) cnt[m][j] <= '0;
      end
    end else begin
      col_valid <= tick;
      for (int m = 0; m < NCL; m++) begin
        for (int j = 0; j < COLS; j++) begin
          if (tick && j == int'(trig_col))
            cnt[m][j] <= '0;
          else if (in_win[j] && mask[m] && cnt[m][j] != '1)
            cnt[m][j] <= cnt[m][j] + 1'b1;
        end
        if (tick) col_counts[m] <= cnt[m][trig_col];
      end
      if (tick) trig_col <= (trig_col == 8'(COLS - 1)) ? '0 : trig_col + 1'b1;
    end
  end

  a_offset_in_active_section: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> (wr_offset >= 1 && int'(wr_offset) + BROADEN + 1 <= COLS));
endmodule
