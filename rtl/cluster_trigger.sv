// cluster_trigger: the kernel trigger decision.
//
// For each of the NCL = 16 trigger clusters the hit count of the current
// column (Trig_m_cnt, the number of fired PMTs of the cluster within the
// 250 ns broadening window) is compared with THRESHOLD = 12: Trig_m is set when
// the count is 12 or more. The global trigger Trigger_G is the OR of the 16
// local triggers. Inputs are sampled when `col_valid` is high (once per 40 MHz
// cycle); outputs are registered and valid for one clock, one clock later.
// `trig_time` returns the coarse time of the column that fired, taken from
// `col_time` at the same moment.
//
// Source design: the threshold, per-cluster comparison and the OR of Eq. (1).
// Own choices: the one-clock register stage and the time tag.
module cluster_trigger
  import lawca_pkg::*;
#(
  parameter int unsigned NCL       = N_CLUSTERS,
  parameter int unsigned CNT_W     = 8,
  parameter int unsigned THRESHOLD = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              col_valid,
  input  logic [CNT_W-1:0]  col_counts [NCL],
  input  logic [TIME_W-1:0] col_time,
  output logic [NCL-1:0]    trig_m,
  output logic              trigger_g,
  output logic [TIME_W-1:0] trig_time
);
  logic [NCL-1:0] local_trig;

  always_comb
    for (int m = 0; m < NCL; m++)
      local_trig[m] = (int'(col_counts[m]) >= THRESHOLD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_m    <= '0;
      trigger_g <= 1'b0;
      trig_time <= '0;
    end else begin
      trig_m    <= col_valid ? local_trig : '0;
      trigger_g <= col_valid && (|local_trig);
      if (col_valid) trig_time <= col_time;
    end
  end

  initial assert (THRESHOLD < (1 << CNT_W))
    else $error("cluster_trigger: THRESHOLD does not fit the counter width");
endmodule
