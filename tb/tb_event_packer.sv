// tb_event_packer: feeds random events (header, 0..6 packets, trailer) with
// random gaps on the input and random back-pressure on the output, and checks
// every output word, sop/eop marking and the event number against a model of
// the frame format.
module tb_event_packer;
  import lawca_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  readout_rec_t in_rec = '0;
  logic out_valid, out_ready = 0, out_sop, out_eop;
  logic [31:0] out_data;
  int checks = 0, failures = 0, n_events = 0;
  typedef struct { logic [31:0] d; bit sop; bit eop; } word_t;
  word_t exp_q [$];

  event_packer dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) out_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    word_t w;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected word %h", out_data);
    end else begin
      w = exp_q.pop_front();
      if (w.d != out_data || w.sop != out_sop || w.eop != out_eop) begin
        failures++;
        $display("FAIL: word %h sop %0b eop %0b, expected %h %0b %0b", out_data, out_sop, out_eop, w.d, w.sop, w.eop);
      end
    end
  end

  task automatic send(input readout_rec_t r);
    @(negedge clk);
    while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
    in_valid = 1;
    in_rec = r;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 60; ev++) begin
      logic [26:0] t;
      logic [95:0] p;
      int n;
      t = 27'($urandom);
      n = $urandom_range(0, 6);
      exp_q.push_back('{d: {8'hA5, 24'(ev)}, sop: 1, eop: 0});
      exp_q.push_back('{d: {5'b0, t}, sop: 0, eop: 0});
      send('{kind: REC_HEADER, payload: 96'(t)});
      for (int i = 0; i < n; i++) begin
        p = {$urandom, $urandom, $urandom};
        exp_q.push_back('{d: p[95:64], sop: 0, eop: 0});
        exp_q.push_back('{d: p[63:32], sop: 0, eop: 0});
        exp_q.push_back('{d: p[31:0], sop: 0, eop: 0});
        send('{kind: REC_PACKET, payload: p});
      end
      exp_q.push_back('{d: {8'h5A, 7'b0, 1'(ev % 5 == 0), 16'(n)}, sop: 0, eop: 1});
      send('{kind: REC_TRAILER, payload: 96'({1'(ev % 5 == 0), 16'(n)})});
      n_events++;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d words missing", exp_q.size()); end
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
