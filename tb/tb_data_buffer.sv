// tb_data_buffer: drives the slice ring with the local time, stores random
// packets with ages of 0..100 cycles and fires triggers two clocks after a
// tick, as the trigger logic does. A reference keeps every stored packet with
// its 1 us group (40 columns) and predicts each readout: the packets of the
// three groups around the trigger, in storage order, whose time lies within
// [T - 40, T + 39]. Checked: header time, every packet, the trailer count,
// the pointer distances, slice overflow (drops past 256 packets per slice),
// triggers refused inside the hold-off, and an overrun when the output is
// held back until the ring reuses the slices being read.
module tb_data_buffer;
  import lawca_pkg::*;
  localparam int CPT = 4, DELAY = 160, ST = 40, DEPTH = 256, T0 = 1000;
  logic clk = 0, rst_n = 0, tick = 0;
  logic [26:0] now = 27'(T0);
  logic wr_valid = 0;
  logic [7:0] wr_offset = '0;
  fee_packet_t wr_pkt = '0;
  logic trigger = 0;
  logic out_valid, out_ready = 1, busy;
  readout_rec_t out_rec;
  logic [2:0] proc_ptr, buf_ptr, rdo_ptr, cln_ptr;
  logic [31:0] buffer_drops, events_read, triggers_skipped, readout_overruns;
  int checks = 0, failures = 0;
  int nticks = 0, cyc = 0;
  bit random_ready = 1;

  typedef struct { logic [95:0] p; int t; int grp; } stored_t;
  stored_t store [$];
  int grp_fill [200];
  int exp_drops = 0;
  readout_rec_t exp_q [$];
  int n_packets_read = 0;
  int last_e = 0;
  int tfix = 0;
  bit no_model = 0;

  data_buffer #(.SLICES(7), .SLICE_TICKS(ST), .DEPTH(DEPTH), .DELAY(DELAY),
                .HALF_WIN(40), .HOLDOFF(80)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) tick <= rst_n && (cyc % CPT == CPT - 1);

  always @(posedge clk) if (rst_n && tick) begin
    nticks <= nticks + 1;
    now <= now + 1'b1;
  end

  always @(posedge clk) if (rst_n) out_ready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b0;

  always @(posedge clk) if (rst_n && out_valid && out_ready && !no_model) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected record kind %0d at %0t busy %0d", out_rec.kind, $time, busy);
    end else begin
      readout_rec_t e;
      e = exp_q.pop_front();
      if (e != out_rec) begin
        failures++;
        $display("FAIL: record kind %0d payload %h, expected kind %0d payload %h", out_rec.kind, out_rec.payload, e.kind, e.payload);
      end
      if (out_rec.kind == REC_PACKET) n_packets_read++;
    end
  end

  // one clock of the write side; column under processing is T0 - DELAY + nticks
  task automatic step(input bit do_write, input int max_age, input int force_age);
    @(negedge clk);
    #1;
    wr_valid = 1'b0;
    if (do_write) begin
      int age, t, grp;
      age = (force_age >= 0) ? force_age : $urandom_range(0, max_age);
      if (force_age == -2) age = int'(now) - tfix;
      t   = int'(now) - age;
      grp = (t - (T0 - DELAY)) / ST;
      wr_valid  = 1'b1;
      wr_offset = 8'(DELAY - age);
      wr_pkt    = fee_packet_t'({$urandom, $urandom, $urandom});
      wr_pkt.coarse_time = 27'(t);
      if (grp_fill[grp] < DEPTH) begin
        store.push_back('{p: wr_pkt, t: t, grp: grp});
        grp_fill[grp]++;
      end else exp_drops++;
    end
  endtask

  // fire a trigger for the column of the next tick and predict its readout
  task automatic fire(input bit expect_accept);
    int e, tt;
    int cnt;
    do step(0, 0, -1); while (!tick);
    e  = nticks;                       // index of the column this tick evaluates
    tt = T0 - DELAY + e;
    step(0, 0, -1);
    step(0, 0, -1);
    trigger = 1'b1;
    @(negedge clk);
    #1;
    trigger = 1'b0;
    if (expect_accept) last_e = e;
    if (expect_accept) begin
      cnt = 0;
      exp_q.push_back('{kind: REC_HEADER, payload: 96'(tt)});
      for (int g = e / ST - 1; g <= e / ST + 1; g++)
        foreach (store[i])
          if (store[i].grp == g && store[i].t >= tt - 40 && store[i].t <= tt + 39) begin
            exp_q.push_back('{kind: REC_PACKET, payload: store[i].p});
            cnt++;
          end
      exp_q.push_back('{kind: REC_TRAILER, payload: 96'(cnt)});
    end
  endtask

  task automatic wait_idle();
    step(0, 0, -1);
    while (busy) step(0, 0, -1);
  endtask

  int skipped_before;

  initial begin
    for (int g = 0; g < 200; g++) grp_fill[g] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pointer distances of the slice ring
    step(0, 0, -1);
    check(buf_ptr == 3'((proc_ptr + 4) % 7) && rdo_ptr == 3'((proc_ptr + 6) % 7) &&
          cln_ptr == 3'((proc_ptr + 5) % 7), "pointer distances");
    // light traffic for 6 us, then a trigger with traffic stopped around it
    for (int c = 0; c < 240 * CPT; c++) step($urandom_range(0, 11) == 0, 100, -1);
    check(proc_ptr == 3'((nticks / ST) % 7), "processing pointer follows the 1 us slices");
    fire(1);
    wait_idle();
    // a second trigger after the readout but inside the 80-column hold-off
    skipped_before = int'(triggers_skipped);
    fire(0);
    step(0, 0, -1);
    check(nticks - last_e < 80, "second trigger inside the hold-off");
    check(int'(triggers_skipped) == skipped_before + 1 && !busy, "hold-off refuses a trigger");
    // more traffic, triggers at various phases inside the slice
    for (int k = 0; k < 6; k++) begin
      for (int c = 0; c < (85 + 7 * k) * CPT; c++) step($urandom_range(0, 2) == 0, 100, -1);
      fire(1);
      wait_idle();
    end
    // overflow: 300 packets of the same cycle into one slice
    tfix = int'(now);
    for (int c = 0; c < 300; c++) step(1, 0, -2);
    step(0, 0, -1);
    check(buffer_drops == 32'(exp_drops) && exp_drops > 0, $sformatf("drops %0d expected %0d", buffer_drops, exp_drops));
    // readout of the overfull slices
    for (int c = 0; c < 170 * CPT; c++) step(0, 0, -1);
    fire(1);
    wait_idle();
    check(exp_q.size() == 0, $sformatf("%0d records not read", exp_q.size()));
    // overrun: output held back for 3 us after a trigger
    for (int c = 0; c < 90 * CPT; c++) step($urandom_range(0, 2) == 0, 100, -1);
    random_ready = 0;
    no_model = 1;
    fire(0);
    for (int c = 0; c < 120 * CPT; c++) step(0, 0, -1);
    random_ready = 1;
    begin
      int n_hdr, n_trl, ovr;
      n_hdr = 0; n_trl = 0; ovr = 0;
      while (busy) begin
        @(posedge clk);
        if (out_valid && out_ready && out_rec.kind == REC_TRAILER) ovr = out_rec.payload[16];
      end
      check(ovr == 1 && readout_overruns > 0, "overrun reported");
    end
    check(events_read == 32'd9, $sformatf("events read %0d", events_read));
    check(n_packets_read > 100, $sformatf("packets read %0d", n_packets_read));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
