// tb_data_preprocessing: drives random packets on all 10 fibers, some with a
// wrong header, a wrong checksum or a channel number above 899. Each packet
// carries its fiber and a sequence number in the reserved field. Checks:
// damaged packets never come out and are counted; every good packet comes out
// exactly once, unchanged, in order per fiber, unless it was counted as a
// FIFO drop; a burst on all fibers at once overflows the FIFOs; a single busy
// fiber is merged at one packet per clock with a latency of two clocks.
module tb_data_preprocessing;
  import lawca_pkg::*;
  localparam int NF = 10;
  logic clk = 0, rst_n = 0;
  logic [NF-1:0] fib_valid = '0;
  fee_packet_t fib_pkt [NF];
  logic out_valid;
  fee_packet_t out_pkt;
  logic [31:0] bad_packets, fifo_drops;
  int checks = 0, failures = 0;
  int exp_bad = 0, n_good = 0, n_out = 0;
  int next_seq [NF];
  int sent_seq [NF];
  logic [95:0] sent [NF][$];

  data_preprocessing #(.NF(NF), .FIFO_DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fee_packet_t make_pkt(input int f, input int seq, input int kind);
    fee_packet_t p;
    p = fee_packet_t'({$urandom, $urandom, $urandom});
    p.header   = PKT_HEADER;
    p.channel  = 10'($urandom_range(0, 899));
    p.reserved = {4'(f), 12'(seq)};
    p.checksum = pkt_checksum(p);
    if (kind == 1) p.header   = ~PKT_HEADER;
    if (kind == 2) p.checksum = p.checksum ^ 3'b010;
    if (kind == 3) begin p.channel = 10'($urandom_range(900, 1023)); p.checksum = pkt_checksum(p); end
    return p;
  endfunction

  // output side: match against what was sent on the packet's fiber
  always @(posedge clk) if (rst_n && out_valid) begin
    int f, s;
    f = int'(out_pkt.reserved[15:12]);
    s = int'(out_pkt.reserved[11:0]);
    n_out++;
    // drop expectations skipped by FIFO overflow (older sequence numbers)
    while (sent[f].size() > 0 && sent[f][0][78:67] != 12'(s))
      void'(sent[f].pop_front());
    checks++;
    if (sent[f].size() == 0 || sent[f][0] != out_pkt) begin
      failures++;
      $display("FAIL: unexpected packet fiber %0d seq %0d", f, s);
    end else void'(sent[f].pop_front());
  end

  task automatic drive(input int cycles, input int rate_pct, input bit allow_bad, input int only_fiber);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      fib_valid = '0;
      for (int f = 0; f < NF; f++) begin
        if ((only_fiber < 0 || only_fiber == f) && $urandom_range(1, 100) <= rate_pct) begin
          int kind;
          kind = allow_bad ? (($urandom_range(0, 9) == 0) ? $urandom_range(1, 3) : 0) : 0;
          fib_pkt[f] = make_pkt(f, next_seq[f], kind);
          fib_valid[f] = 1'b1;
          if (kind == 0) begin
            sent[f].push_back(fib_pkt[f]);
            n_good++;
          end else exp_bad++;
          next_seq[f] = (next_seq[f] + 1) % 4096;
        end
      end
    end
    @(negedge clk);
    fib_valid = '0;
  endtask

  initial begin
    for (int f = 0; f < NF; f++) begin next_seq[f] = 0; fib_pkt[f] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1) light random traffic with damaged packets: nothing may be lost
    drive(2000, 8, 1'b1, -1);
    repeat (50) @(posedge clk);
    check(bad_packets == 32'(exp_bad), $sformatf("bad %0d vs %0d", bad_packets, exp_bad));
    check(fifo_drops == 0, "no drops at light load");
    check(n_out == n_good, $sformatf("out %0d vs good %0d", n_out, n_good));
    // 2) single fiber, one packet per clock: latency one clock, rate one per clock
    @(negedge clk);
    fib_pkt[3] = make_pkt(3, next_seq[3], 0); next_seq[3]++;
    sent[3].push_back(fib_pkt[3]); n_good++;
    fib_valid = 10'b1 << 3;
    @(negedge clk); fib_valid = '0;
    check(!out_valid, "not before the FIFO write");
    @(negedge clk);
    check(out_valid && out_pkt == fib_pkt[3], "two-clock latency");
    drive(40, 100, 1'b0, 5);
    repeat (5) @(posedge clk);
    check(fifo_drops == 0, "one fiber at full rate is merged without loss");
    // 3) all fibers every clock: FIFOs overflow
    drive(40, 100, 1'b0, -1);
    repeat (200) @(posedge clk);
    check(fifo_drops > 0, "overflow seen");
    check(32'(n_out) + fifo_drops == 32'(n_good), $sformatf("out %0d + drops %0d vs good %0d", n_out, fifo_drops, n_good));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
