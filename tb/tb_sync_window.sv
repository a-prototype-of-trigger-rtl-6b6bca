// tb_sync_window: checks the delay window classification. For random local
// times and packet ages, a packet must be accepted exactly when its age is
// 0..DELAY-1, with offset DELAY - age; older packets count as late and
// packets ahead of the local time as early. Ages are chosen around the
// window edges and across the 2^27 wrap of the coarse time.
module tb_sync_window;
  import lawca_pkg::*;
  localparam int unsigned DELAY = 160;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fee_packet_t in_pkt = '0;
  logic [26:0] now = '0;
  logic accept;
  logic [7:0] offset;
  logic [31:0] late_packets, early_packets;
  int checks = 0, failures = 0;
  int exp_late = 0, exp_early = 0;

  sync_window #(.DELAY(DELAY)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int age;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      case (i % 4)
        0: age = $urandom_range(0, DELAY - 1);
        1: age = DELAY - 2 + $urandom_range(0, 4);      // edge
        2: age = -$urandom_range(1, 20);                 // from the future
        default: age = $urandom_range(0, 1000);
      endcase
      now = (i % 3 == 0) ? 27'($urandom_range(0, 50)) : 27'($urandom);
      in_pkt.coarse_time = 27'(int'(now) - age);
      in_valid = (i % 7 != 6);
      #1;
      if (!in_valid) check(!accept, "no accept without valid");
      else if (age >= 0 && age < DELAY) begin
        check(accept && offset == 8'(DELAY - age), $sformatf("age %0d accept=%0b offset=%0d", age, accept, offset));
      end else begin
        check(!accept, $sformatf("age %0d must be rejected", age));
        if (age < 0) exp_early++; else exp_late++;
      end
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check(late_packets == 32'(exp_late), $sformatf("late %0d vs %0d", late_packets, exp_late));
    check(early_packets == 32'(exp_early), $sformatf("early %0d vs %0d", early_packets, exp_early));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
