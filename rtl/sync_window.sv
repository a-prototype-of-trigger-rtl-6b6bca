// sync_window: the delay-based synchronisation of the fiber streams.
//
// Every packet is held back until DELAY global cycles (4 us) after the time it
// was recorded at, so that packets of the same instant that travelled on a
// busy and on an idle fiber meet again. In the ring structures this becomes a
// window test: with the local coarse time `now`, the column under trigger
// processing belongs to time now - DELAY, and a packet may only be written
// into the DELAY columns that follow it. This module computes, for the packet
// on its input, its distance `offset` = coarse_time - (now - DELAY), modulo
// 2^27, and sorts it:
//   accept : 1 <= offset <= DELAY   (write it; offset selects the column/slice)
//   late   : offset < 1 or it arrived more than DELAY cycles after its time
//   early  : its coarse time lies ahead of `now` (a clock alignment fault)
// A packet that is older than the delay buffer is counted as late and a packet
// from the future as early; both are dropped by the consumers. The decision is
// combinational so that `offset` refers to the same trigger pointer the
// consumers hold in that clock; the two counters are registered.
//
// Source design: the 4 us / 160-cycle delay and the active write section of
// 160 columns from N+1 to N-12. Own choices: dropping and counting packets
// outside the window and the split into late and early.
module sync_window
  import lawca_pkg::*;
#(
  parameter int unsigned DELAY = 160
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fee_packet_t       in_pkt,
  input  logic [TIME_W-1:0] now,
  output logic              accept,
  output logic [7:0]        offset,
  output logic [31:0]       late_packets,
  output logic [31:0]       early_packets
);
  logic [TIME_W-1:0] age;     // now - coarse_time, modulo 2^27
  logic              future;

  always_comb begin
    age    = now - in_pkt.coarse_time;
    // Ages in the upper half of the counter range are packets from the future.
    future = age[TIME_W-1];
    accept = in_valid && !future && (age < TIME_W'(DELAY));
    offset = 8'(DELAY - age[7:0]);
    if (!accept) offset = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      late_packets  <= '0;
      early_packets <= '0;
    end else if (in_valid && !accept) begin
      if (future) early_packets <= early_packets + 1'b1;
      else        late_packets  <= late_packets + 1'b1;
    end
  end

  initial assert (DELAY >= 1 && DELAY <= 255)
    else $error("sync_window: DELAY must fit the 8-bit offset");
endmodule
