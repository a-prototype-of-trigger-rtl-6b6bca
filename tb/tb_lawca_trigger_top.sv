// tb_lawca_trigger_top: end-to-end test of the trigger module at its full
// size (900 channels, 10 fibers, 16 clusters, 172 columns, 7 slices of 256).
//
// The testbench plays the 10 clock-and-data transmission modules. It creates
// about 35 us of detector data: random single-PMT noise at about 45 hits per
// microsecond (900 PMTs at 50 kHz), several air showers of 14 to 25 PMTs in one
// cluster within 5 cycles, one very large shower of 320 PMTs, a few packets
// that arrive after their 4 us delay, a few whose coarse time lies in the
// future and a few with a damaged checksum. Packets are sent on the fiber of
// their channel's CDTM (channel / 90) at most once per 16 clocks per fiber,
// the payload rate of a 1.25 Gbps link, after a random transit delay.
//
// An independent model computes, from the packets that reached the module in
// time, the per-cluster count of hits in every 10-cycle window and hence the
// exact set of columns that must raise Trigger_G; the DUT's trig_time pulses
// are compared with it. Every frame on the DAQ output is decoded: its packets
// must be genuine, unique and within 2 us of the trigger time, and every
// packet of that window that arrived before the trigger was taken must be in
// it (unless the frame reports an overrun or its slices overflowed). Each
// mechanism (trigger, hold-off skip, late, early, damaged packet, slice
// overflow, readout overrun, ring wrap) must happen at least once.
module tb_lawca_trigger_top;
  import lawca_pkg::*;

  localparam int CPT = 4, NT = 1500, L0 = 100000, DELAY = 160;

  logic clk = 0, rst_n = 0, time_load = 0;
  logic [26:0] time_value = '0;
  logic [9:0] fib_valid = '0;
  fee_packet_t fib_pkt [10];
  logic daq_valid, daq_ready = 1, daq_sop, daq_eop;
  logic [31:0] daq_data;
  logic trigger_g;
  logic [15:0] trig_m;
  logic [26:0] trig_time;
  status_t status;

  lawca_trigger_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  // ---------------- stimulus ----------------
  typedef struct {
    int ch; int t; int due; int kind;   // kind 0 good, 1 damaged, 2 early, 3 late
    int sent_now; bit sent; bit big; int arr_now; bit arrived;
  } hit_t;
  hit_t hits [$];
  int fiber_q [10][$];                  // indices into hits, in due order

  function automatic bit in_cluster(input int ch, input int m);
    int x, y, cx, cy;
    x  = ((ch / 9) % 10) * 3 + (ch % 3);
    y  = (ch / 90) * 3 + ((ch % 9) / 3);
    cx = m % 4;
    cy = m / 4;
    return (x / 6 == cx || x / 6 == cx + 1) && (y / 6 == cy || y / 6 == cy + 1);
  endfunction

  function automatic int chan_at(input int x, input int y);
    return ((y / 3) * 10 + (x / 3)) * 9 + (y % 3) * 3 + (x % 3);
  endfunction

  task automatic add_hit(input int ch, input int tick_t, input int delay, input int kind, input bit big);
    hits.push_back('{ch: ch, t: L0 + tick_t, due: tick_t + delay, kind: kind, sent_now: 0, sent: 0, big: big, arr_now: 0, arrived: 0});
  endtask

  task automatic add_shower(input int at, input int n, input int spread, input bit big);
    int m, x0, y0, used [int];
    m  = $urandom_range(0, 15);
    x0 = (m % 4) * 6;
    y0 = (m / 4) * 6;
    for (int i = 0; i < n; i++) begin
      int ch;
      if (big) ch = $urandom_range(0, 899);
      else ch = chan_at(x0 + $urandom_range(0, 11), y0 + $urandom_range(0, 11));
      if (used.exists(ch)) begin i--; continue; end
      used[ch] = 1;
      add_hit(ch, at + $urandom_range(0, spread), big ? $urandom_range(2, 8) : $urandom_range(2, 60), 0, big);
    end
  endtask

  // ---------------- fiber senders ----------------
  int cyc = 0, nticks = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && dut.tick) nticks <= nticks + 1;

  int next_free [10];
  int tick_base = 0;          // nticks value when the local time was loaded

  task automatic send_cycle();
    // called after a negedge: drive at most one packet per fiber
    fib_valid = '0;
    for (int f = 0; f < 10; f++) begin
      if (fiber_q[f].size() > 0 && cyc >= next_free[f]) begin
        int i;
        i = fiber_q[f][0];
        if (hits[i].due <= int'(dut.now) - L0) begin
          fee_packet_t p;
          void'(fiber_q[f].pop_front());
          p = fee_packet_t'({$urandom, $urandom, $urandom});
          p.header   = PKT_HEADER;
          p.channel  = 10'(hits[i].ch);
          p.reserved = 16'(i);
          p.coarse_time = (hits[i].kind == 2) ? dut.now + 27'd3 : 27'(hits[i].t);
          p.checksum = pkt_checksum(p);
          if (hits[i].kind == 1) p.checksum = ~p.checksum;
          fib_pkt[f] = p;
          fib_valid[f] = 1'b1;
          hits[i].sent = 1;
          hits[i].sent_now = int'(dut.now);
          next_free[f] = cyc + 16;
        end
      end
    end
  endtask

  // ---------------- trigger model ----------------
  // local time at which each packet reaches the synchroniser, after the
  // fiber FIFOs and the merge
  always @(posedge clk) if (rst_n && dut.pp_valid) begin
    int i;
    i = int'(dut.pp_pkt.reserved);
    hits[i].arrived = 1;
    hits[i].arr_now = int'(dut.now);
  end

  // the synchronisation rule: accepted if it arrives within DELAY cycles
  function automatic bit accepted(input int i);
    return hits[i].kind == 0 && hits[i].arrived &&
           (hits[i].arr_now - hits[i].t) >= 0 && (hits[i].arr_now - hits[i].t) < DELAY;
  endfunction

  int dut_trig [int];                // trigger times seen
  always @(posedge clk) if (rst_n && trigger_g) begin
    dut_trig[int'(trig_time)] = cyc;
    check(trig_m != '0, "Trigger_G comes with a local trigger");
  end

  // ---------------- DAQ frame decoder ----------------
  int frames = 0, frame_pkts = 0, overrun_frames = 0, full_frames = 0;
  int fr_state = 0, fr_word = 0, fr_time = 0;
  logic [95:0] fr_pkt;
  int fr_ids [$];
  always @(posedge clk) if (rst_n && daq_valid && daq_ready) begin
    if (daq_sop) begin
      check(daq_data[31:24] == 8'hA5 && fr_state == 0, "frame start");
      fr_state = 1; fr_ids.delete();
    end else if (fr_state == 1) begin
      fr_time = int'(daq_data[26:0]); fr_state = 2; fr_word = 0;
    end else if (daq_eop) begin
      check(daq_data[31:24] == 8'h5A && fr_state == 2 && fr_word == 0, "frame end");
      check(int'(daq_data[15:0]) == fr_ids.size(), "trailer count");
      check_frame(fr_time, fr_ids, daq_data[16]);
      fr_state = 0;
    end else begin
      fr_pkt = {fr_pkt[63:0], daq_data};
      fr_word++;
      if (fr_word == 3) begin
        fr_word = 0;
        fr_ids.push_back(int'(fr_pkt[82:67]));
      end
    end
  end

  function automatic void check_frame(input int tt, input int ids [$], input bit ovr);
    bit seen [int];
    bit relaxed;
    int trig_cyc;
    frames++;
    if (ovr) overrun_frames++;
    check(dut_trig.exists(tt), "frame belongs to a trigger");
    trig_cyc = dut_trig.exists(tt) ? dut_trig[tt] : 0;
    relaxed = ovr;
    foreach (ids[k]) begin
      int i;
      i = ids[k];
      check(i < hits.size() && accepted(i) && !seen.exists(i), "genuine unique packet");
      if (i < hits.size()) begin
        check(hits[i].t >= tt - 40 && hits[i].t <= tt + 39, "packet inside the 2 us window");
        if (hits[i].big) relaxed = 1;
      end
      seen[i] = 1;
      frame_pkts++;
    end
    foreach (hits[i]) if (hits[i].big && hits[i].t >= tt - 80 && hits[i].t <= tt + 80) relaxed = 1;
    if (!relaxed) begin
      full_frames++;
      foreach (hits[i])
        if (accepted(i) && hits[i].t >= tt - 40 && hits[i].t <= tt + 39 && hits[i].sent_now < tt + DELAY)
          check(seen.exists(i), $sformatf("packet %0d (t=%0d) of the window missing from frame %0d", i, hits[i].t, tt));
    end
  endfunction

  // ---------------- main ----------------
  initial begin
    int first_col, last_col, exp_trig, exp_late;
    for (int f = 0; f < 10; f++) begin fib_pkt[f] = '0; next_free[f] = 0; end
    // noise
    for (int k = 5; k < NT - 200; k++) begin
      int n;
      n = $urandom_range(0, 8);
      n = (n < 2) ? 0 : (n < 7) ? 1 : 2;        // about 1.1 hits per cycle
      for (int j = 0; j < n; j++) add_hit($urandom_range(0, 899), k, $urandom_range(2, 140), 0, 0);
    end
    // showers
    add_shower(300, 14, 4, 0);
    add_shower(420, 25, 4, 0);
    add_shower(560, 18, 3, 0);
    add_shower(700, 20, 4, 0);
    add_shower(880, 16, 2, 0);
    add_shower(1150, 320, 2, 1);
    // misbehaving packets
    for (int j = 0; j < 6; j++) add_hit($urandom_range(0, 899), 200 + 100 * j, 200, 3, 0);
    for (int j = 0; j < 6; j++) add_hit($urandom_range(0, 899), 250 + 100 * j, 20, 1, 0);
    for (int j = 0; j < 4; j++) add_hit($urandom_range(0, 899), 230 + 150 * j, 20, 2, 0);
    // per-fiber queues in due order
    begin
      int order [$];
      foreach (hits[i]) order.push_back(i);
      order.sort() with (hits[item].due);
      foreach (order[k]) fiber_q[hits[order[k]].ch / 90].push_back(order[k]);
    end

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (8) @(posedge clk);
    @(negedge clk); time_load = 1; time_value = 27'(L0);
    @(negedge clk); time_load = 0;
    first_col = L0 - DELAY + 1;
    for (int c = 0; c < (NT + 200) * CPT; c++) begin
      @(negedge clk);
      // hold the DAQ link back for 4 us after the fourth shower is read out
      daq_ready = !(int'(dut.now) - L0 >= 900 && int'(dut.now) - L0 < 1060);
      send_cycle();
    end
    @(negedge clk); fib_valid = '0;
    daq_ready = 1;
    repeat (4000) @(posedge clk);
    last_col = int'(dut.now) - DELAY - 2;

    // exact trigger comparison over the evaluated columns
    exp_trig = 0;
    for (int tt = first_col; tt <= last_col; tt++) begin
      int cnt [16];
      bit fire;
      for (int m = 0; m < 16; m++) cnt[m] = 0;
      foreach (hits[i])
        if (accepted(i) && hits[i].t <= tt && hits[i].t > tt - 10)
          for (int m = 0; m < 16; m++) if (in_cluster(hits[i].ch, m)) cnt[m]++;
      fire = 0;
      for (int m = 0; m < 16; m++) if (cnt[m] >= 12) fire = 1;
      if (fire) exp_trig++;
      check(fire == dut_trig.exists(tt), $sformatf("trigger at column %0d: model %0b dut %0b", tt, fire, dut_trig.exists(tt)));
    end
    exp_late = 0;
    foreach (hits[i]) begin
      check(hits[i].sent, "every packet was sent");
      if ((hits[i].kind == 0 || hits[i].kind == 3) && hits[i].arr_now - hits[i].t >= DELAY) exp_late++;
    end
    check(fr_state == 0, "no frame left open");

    $display("mechanisms: triggers=%0d (model %0d) frames=%0d full-checked=%0d packets=%0d skipped=%0d late=%0d early=%0d bad=%0d slice_drops=%0d overruns=%0d ring_turns=%0d slice_turns=%0d",
             status.triggers, exp_trig, frames, full_frames, frame_pkts, status.triggers_skipped,
             status.late_packets, status.early_packets, status.bad_packets, status.buffer_drops,
             status.readout_overruns, nticks / 172, nticks / 280);
    $display("late model %0d", exp_late);
    // valid data ratio: share of the accepted hit packets that reach the DAQ
    begin
      int n_acc;
      n_acc = 0;
      foreach (hits[i]) if (accepted(i)) n_acc++;
      $display("valid data ratio: %0d of %0d accepted packets read out (%0.1f %%)",
               frame_pkts, n_acc, 100.0 * frame_pkts / (n_acc > 0 ? n_acc : 1));
    end
    check(status.triggers > 0 && int'(status.triggers) == exp_trig, "triggers happened and match the model");
    check(frames == int'(status.events_read) && frames >= 5, "frames sent for the accepted triggers");
    check(full_frames >= 3, "frames checked for completeness");
    check(status.triggers_skipped > 0, "hold-off / busy skip happened");
    check(int'(status.late_packets) == exp_late && exp_late >= 6, $sformatf("late packets dropped %0d model %0d", status.late_packets, exp_late));
    check(status.early_packets == 4, "early packets dropped");
    check(status.bad_packets == 6, "damaged packets dropped");
    check(status.buffer_drops > 0, "slice overflow happened");
    check(status.readout_overruns > 0 && overrun_frames > 0, "readout overrun happened");
    check(status.fifo_drops == 0, "no input FIFO loss at link rate");
    check(nticks > 2 * 280, "rings turned over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NT + 200) * CPT + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
