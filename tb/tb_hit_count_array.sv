// tb_hit_count_array: random hits on random channels with random offsets
// (1..160 columns ahead of the Trigger Pointer) are written while the ring
// turns for about 3.5 revolutions. A reference computes, for every evaluated
// column, the number of hits per cluster whose 10-column broadened pulse
// covers it, using its own channel-to-cluster geometry. Every col_counts
// output is compared with it, which checks the broadening length, the
// placement relative to the Trigger Pointer, the clearing of used columns and
// the ring wrap.
module tb_hit_count_array;
  localparam int COLS = 172, BROADEN = 10, NCL = 16, CPT = 4, NTICKS = 600;
  logic clk = 0, rst_n = 0, tick = 0;
  logic wr_valid = 0;
  logic [9:0] wr_channel = '0;
  logic [7:0] wr_offset = 8'd1;
  logic col_valid;
  logic [7:0] col_counts [NCL];
  logic [7:0] trig_col;
  int checks = 0, failures = 0, nticks = 0, nonzero = 0, above12 = 0;
  // hits[e] = clusters hit whose pulse starts at eval index e
  int start_cnt [NTICKS + 200][NCL];

  hit_count_array #(.COLS(COLS), .BROADEN(BROADEN), .NCL(NCL), .CNT_W(8)) dut (.*);

  always #5 clk = ~clk;

  function automatic bit in_cluster(input int ch, input int m);
    int x, y, cx, cy;
    x  = ((ch / 9) % 10) * 3 + (ch % 3);
    y  = (ch / 90) * 3 + ((ch % 9) / 3);
    cx = m % 4;
    cy = m / 4;
    return (x / 6 == cx || x / 6 == cx + 1) && (y / 6 == cy || y / 6 == cy + 1);
  endfunction

  // evaluated column index of the counts now on the output
  int eval_idx = -1;
  always @(posedge clk) if (rst_n) begin
    if (tick) begin nticks <= nticks + 1; eval_idx <= nticks; end
    if (col_valid) begin
      for (int m = 0; m < NCL; m++) begin
        int exp_c;
        exp_c = 0;
        for (int e = eval_idx - BROADEN + 1; e <= eval_idx; e++)
          if (e >= 0) exp_c += start_cnt[e][m];
        checks++;
        if (int'(col_counts[m]) != exp_c) begin
          failures++;
          $display("FAIL: column %0d cluster %0d count %0d expected %0d", eval_idx, m, col_counts[m], exp_c);
        end
        if (exp_c > 0) nonzero++;
        if (exp_c >= 12) above12++;
      end
    end
  end

  initial begin
    for (int e = 0; e < NTICKS + 200; e++) for (int m = 0; m < NCL; m++) start_cnt[e][m] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NTICKS * CPT; c++) begin
      @(negedge clk);
      tick = (c % CPT == CPT - 1);
      wr_valid = 1'b0;
      if (c / CPT < NTICKS - 170 && $urandom_range(0, 2) == 0) begin
        int ch, d;
        // half the hits in one corner so that counts climb past 12
        ch = ($urandom_range(0, 1) == 0) ? $urandom_range(0, 899) : 9 * $urandom_range(0, 3) + $urandom_range(0, 8);
        d  = ($urandom_range(0, 3) == 0) ? (($urandom_range(0, 1) == 0) ? 1 : 160) : $urandom_range(1, 160);
        wr_valid = 1'b1;
        wr_channel = 10'(ch);
        wr_offset = 8'(d);
        for (int m = 0; m < NCL; m++)
          if (in_cluster(ch, m)) start_cnt[nticks + d][m]++;
      end
    end
    @(negedge clk); wr_valid = 0; tick = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (nonzero < 100 || above12 < 5) begin
      failures++;
      $display("FAIL: too little coverage nonzero=%0d above12=%0d", nonzero, above12);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NTICKS * CPT + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
