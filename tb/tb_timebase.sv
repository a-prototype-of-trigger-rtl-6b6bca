// tb_timebase: checks the global-cycle enable and the coarse time counter.
// The tick must come exactly every CLK_PER_TICK clocks, `now` must advance by
// one per tick, wrap at 2^27 and take a loaded value.
module tb_timebase;
  localparam int unsigned CPT = 4;
  logic clk = 0, rst_n = 0, time_load = 0;
  logic [26:0] time_value = '0, now, prev_now;
  logic tick;
  int checks = 0, failures = 0;
  int last_tick = -1, cyc = 0, nticks = 0;

  timebase #(.CLK_PER_TICK(CPT), .TIME_W(27)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && tick) begin
      if (last_tick >= 0) check(cyc - last_tick == CPT, $sformatf("tick spacing %0d", cyc - last_tick));
      last_tick <= cyc;
      nticks <= nticks + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(now == 0, "reset value");
    // now advances by exactly one per tick
    repeat (20) begin
      prev_now = now;
      @(posedge clk); #1;
      while (!tick) begin @(posedge clk); #1; end
      // the increment happens at the clock edge where tick is high
      @(posedge clk); #1;
      check(now == prev_now + 1, $sformatf("increment %0d -> %0d", prev_now, now));
    end
    // load just below the wrap point and watch it wrap
    @(negedge clk); time_load = 1; time_value = 27'h7FF_FFFE;
    @(negedge clk); time_load = 0;
    check(now == 27'h7FF_FFFE, "load");
    repeat (3 * CPT) @(negedge clk);
    check(now == 27'h000_0001 || now == 27'h000_0000 || now == 27'h7FF_FFFF, "wrap region");
    repeat (4 * CPT) @(negedge clk);
    check(now < 27'd10, $sformatf("wrapped to small value %0d", now));
    check(nticks > 20, "ticks seen");
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
