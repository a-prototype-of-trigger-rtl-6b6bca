// lawca_trigger_top: kernel logic of the LAWCA trigger module, a
// "triggerless front end" trigger. All 900 PMT hits of the array reach this
// module as raw 96-bit packets over 10 fibers; the trigger decision, the
// delay buffering and the selection of the 2 us readout window all happen
// here, and only selected data leave for the data acquisition system.
//
// Data flow (one processing clock `clk`, CLK_PER_TICK clocks per 25 ns global
// cycle):
//   fibers -> data_preprocessing (check, per-fiber FIFO, round-robin merge)
//          -> sync_window (4 us delay window against local coarse time)
//          -> hit_count_array (16 clusters x 172 columns, 10-cycle broadening)
//             -> cluster_trigger (count >= 12 in any cluster -> Trigger_G)
//          -> data_buffer (7 x 1 us slices; Trigger_G reads 2 us around the
//                          trigger time)
//          -> event_packer (frames of 32-bit words towards the Ethernet MAC)
// Timing: a hit recorded at coarse time t reaches the trigger decision when
// the local time is t + 160 (4 us) to t + 169, whatever its transit time on
// the fibers, as long as it arrived within those 4 us. Trigger_G (and the 16
// local triggers) pulse for one clock two clocks after the tick that evaluated
// the column; `trig_time` gives the coarse time of that column.
// Interfaces: `fib_valid`/`fib_pkt` per fiber come from the serial link
// receivers (SFP, GTX deserializer, 8B/10B decoder), one packet per valid;
// `daq_*` is a valid/ready word stream for the Ethernet MAC client side;
// `time_load`/`time_value` align the local coarse time with the clock
// distribution. Status counters are collected in `status`.
module lawca_trigger_top
  import lawca_pkg::*;
#(
  parameter int unsigned CLK_PER_TICK = 4,
  parameter int unsigned FIFO_DEPTH   = 16,
  parameter int unsigned DELAY        = 160,
  parameter int unsigned COLS         = 172,
  parameter int unsigned BROADEN      = 10,
  parameter int unsigned CNT_W        = 8,
  parameter int unsigned THRESHOLD    = 12,
  parameter int unsigned SLICES       = 7,
  parameter int unsigned SLICE_TICKS  = 40,
  parameter int unsigned SLICE_DEPTH  = 256,
  parameter int unsigned HALF_WIN     = 40,
  parameter int unsigned HOLDOFF      = 80
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  time_load,
  input  logic [TIME_W-1:0]     time_value,
  input  logic [N_FIBERS-1:0]   fib_valid,
  input  fee_packet_t           fib_pkt [N_FIBERS],
  output logic                  daq_valid,
  input  logic                  daq_ready,
  output logic [31:0]           daq_data,
  output logic                  daq_sop,
  output logic                  daq_eop,
  output logic                  trigger_g,
  output logic [N_CLUSTERS-1:0] trig_m,
  output logic [TIME_W-1:0]     trig_time,
  output status_t               status
);
  logic              tick;
  logic [TIME_W-1:0] now, col_time;
  logic              pp_valid;
  fee_packet_t       pp_pkt;
  logic              acc;
  logic [7:0]        acc_offset;
  logic              col_valid;
  logic [CNT_W-1:0]  col_counts [N_CLUSTERS];
  logic              rec_valid, rec_ready;
  readout_rec_t      rec;

  timebase #(.CLK_PER_TICK(CLK_PER_TICK), .TIME_W(TIME_W)) u_timebase (
    .clk, .rst_n, .time_load, .time_value, .tick, .now
  );

  data_preprocessing #(.NF(N_FIBERS), .FIFO_DEPTH(FIFO_DEPTH)) u_pre (
    .clk, .rst_n, .fib_valid, .fib_pkt,
    .out_valid  (pp_valid),
    .out_pkt    (pp_pkt),
    .bad_packets(status.bad_packets),
    .fifo_drops (status.fifo_drops)
  );

  sync_window #(.DELAY(DELAY)) u_sync (
    .clk, .rst_n,
    .in_valid     (pp_valid),
    .in_pkt       (pp_pkt),
    .now,
    .accept       (acc),
    .offset       (acc_offset),
    .late_packets (status.late_packets),
    .early_packets(status.early_packets)
  );

  hit_count_array #(.COLS(COLS), .BROADEN(BROADEN), .NCL(N_CLUSTERS), .CNT_W(CNT_W)) u_hits (
    .clk, .rst_n, .tick,
    .wr_valid  (acc),
    .wr_channel(pp_pkt.channel),
    .wr_offset (acc_offset),
    .col_valid,
    .col_counts,
    .trig_col  ()
  );

  // coarse time of the column the tick hands to the trigger
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    col_time <= '0;
    else if (tick) col_time <= now - TIME_W'(DELAY);

  cluster_trigger #(.NCL(N_CLUSTERS), .CNT_W(CNT_W), .THRESHOLD(THRESHOLD)) u_trig (
    .clk, .rst_n, .col_valid, .col_counts, .col_time,
    .trig_m, .trigger_g, .trig_time
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         status.triggers <= '0;
    else if (trigger_g) status.triggers <= status.triggers + 1'b1;

  data_buffer #(
    .SLICES(SLICES), .SLICE_TICKS(SLICE_TICKS), .DEPTH(SLICE_DEPTH),
    .DELAY(DELAY), .HALF_WIN(HALF_WIN), .HOLDOFF(HOLDOFF)
  ) u_buf (
    .clk, .rst_n, .tick, .now,
    .wr_valid        (acc),
    .wr_offset       (acc_offset),
    .wr_pkt          (pp_pkt),
    .trigger         (trigger_g),
    .out_valid       (rec_valid),
    .out_ready       (rec_ready),
    .out_rec         (rec),
    .proc_ptr        (),
    .buf_ptr         (),
    .rdo_ptr         (),
    .cln_ptr         (),
    .busy            (),
    .buffer_drops    (status.buffer_drops),
    .events_read     (status.events_read),
    .triggers_skipped(status.triggers_skipped),
    .readout_overruns(status.readout_overruns)
  );

  event_packer u_pack (
    .clk, .rst_n,
    .in_valid (rec_valid),
    .in_ready (rec_ready),
    .in_rec   (rec),
    .out_valid(daq_valid),
    .out_ready(daq_ready),
    .out_data (daq_data),
    .out_sop  (daq_sop),
    .out_eop  (daq_eop)
  );

  initial assert (COLS >= DELAY + BROADEN + 2)
    else $error("lawca_trigger_top: ring too short for delay plus broadening");
endmodule
