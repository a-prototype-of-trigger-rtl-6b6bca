// tb_cluster_trigger: checks the threshold comparison and the OR of the 16
// local triggers. Random cluster counts around the threshold of 12 are
// applied with col_valid; one clock later trig_m must equal the set of
// clusters with count >= 12, trigger_g their OR and trig_time the column time.
module tb_cluster_trigger;
  import lawca_pkg::*;
  logic clk = 0, rst_n = 0;
  logic col_valid = 0;
  logic [7:0] col_counts [16];
  logic [26:0] col_time = '0;
  logic [15:0] trig_m;
  logic trigger_g;
  logic [26:0] trig_time;
  int checks = 0, failures = 0, fired = 0;

  cluster_trigger #(.NCL(16), .CNT_W(8), .THRESHOLD(12)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] exp_m;
    for (int m = 0; m < 16; m++) col_counts[m] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      exp_m = '0;
      for (int m = 0; m < 16; m++) begin
        // mostly below threshold, sometimes at or just above it
        col_counts[m] = 8'(($urandom_range(0, 15) == 0) ? $urandom_range(11, 14) : $urandom_range(0, 11));
        if (i % 50 == 0) col_counts[m] = 8'(m == i % 16 ? 12 : 11);
        if (col_counts[m] >= 12) exp_m[m] = 1'b1;
      end
      col_valid = (i % 5 != 4);
      col_time  = 27'($urandom);
      @(negedge clk);
      if (col_valid) begin
        check(trig_m == exp_m, $sformatf("trig_m %h vs %h", trig_m, exp_m));
        check(trigger_g == (|exp_m), "trigger_g");
        check(trig_time == col_time, "trig_time");
        if (trigger_g) fired++;
      end else begin
        check(!trigger_g && trig_m == '0, "no trigger without col_valid");
      end
      col_valid = 0;
    end
    check(fired > 10, "triggers seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
