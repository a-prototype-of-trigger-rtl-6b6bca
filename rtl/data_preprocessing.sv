// data_preprocessing: front stage of the trigger module. It takes the FEE
// packets arriving on the N_FIBERS fiber links (one per clock-and-data
// transmission module), rejects damaged packets and merges the links into a
// single packet stream for the hit-flag logic and the data buffer.
//
// Per fiber: a packet offered with `fib_valid` is checked (header value,
// checksum, channel number below 900); a bad packet is dropped and counted in
// `bad_packets`. A good one goes into a FIFO_DEPTH-word FIFO; a packet that
// finds the FIFO full is dropped and counted in `fifo_drops`. The links cannot
// be stalled, so there is no ready signal towards them.
// Merge: a round-robin arbiter takes one packet per clock from the non-empty
// FIFOs, starting after the fiber served last, and presents it on `out_pkt`
// with `out_valid` for exactly one clock. Its downstream consumers always
// accept. A packet sampled with `fib_valid` at one clock edge is written into
// its FIFO there and, if that FIFO was empty and wins arbitration, appears on
// `out_valid` after the next edge: two clocks of latency.
//
// Source design: 10 fibers, the packet layout, checking by header and
// checksum, extraction of channel number and coarse time. Own choices: the
// per-fiber FIFO and its depth, round-robin merging at one packet per
// processing clock, the checksum rule and header value (see lawca_pkg).
module data_preprocessing
  import lawca_pkg::*;
#(
  parameter int unsigned NF         = N_FIBERS,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NF-1:0] fib_valid,
  input  fee_packet_t   fib_pkt [NF],
  output logic          out_valid,
  output fee_packet_t   out_pkt,
  output logic [31:0]   bad_packets,
  output logic [31:0]   fifo_drops
);
  localparam int unsigned SEL_W = (NF > 1) ? $clog2(NF) : 1;

  logic [NF-1:0] good, push, pop, empty, full;
  logic [PKT_W-1:0] dout [NF];
  logic [SEL_W-1:0] last_sel, sel;
  logic             any;

  for (genvar f = 0; f < NF; f++) begin : g_fiber
    assign good[f] = (fib_pkt[f].header == PKT_HEADER) &&
                     (fib_pkt[f].checksum == pkt_checksum(fib_pkt[f])) &&
                     (int'(fib_pkt[f].channel) < N_CHANNELS);
    assign push[f] = fib_valid[f] && good[f];

    sync_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (push[f]),
      .din  (fib_pkt[f]),
      .pop  (pop[f]),
      .dout (dout[f]),
      .empty(empty[f]),
      .full (full[f]),
      .count()
    );
  end

  // Round robin: first non-empty FIFO after the one served last.
  always_comb begin
    int unsigned idx;
    any = 1'b0;
    sel = last_sel;
    for (int unsigned k = 1; k <= NF; k++) begin
      idx = (int'(last_sel) + k) % NF;
      if (!any && !empty[idx]) begin
        any = 1'b1;
        sel = SEL_W'(idx);
      end
    end
    pop = '0;
    if (any) pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_sel    <= SEL_W'(NF - 1);
      out_valid   <= 1'b0;
      out_pkt     <= '0;
      bad_packets <= '0;
      fifo_drops  <= '0;
    end else begin
      out_valid <= any;
      if (any) begin
        out_pkt  <= dout[sel];
        last_sel <= sel;
      end
      bad_packets <= bad_packets + 32'($countones(fib_valid & ~good));
      fifo_drops  <= fifo_drops  + 32'($countones(push & full));
    end
  end
endmodule
