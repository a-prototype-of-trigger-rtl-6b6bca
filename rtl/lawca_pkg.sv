// lawca_pkg: types, constants and helper functions shared by the LAWCA trigger
// module. It fixes the 96-bit FEE packet layout, the detector geometry (900 PMTs
// on a 30 x 30 grid, read out 3 x 3 per front-end board), the 16 overlapping
// 12 x 12 trigger clusters and the record format passed from the data buffer to
// the data transmission stage.
//
// From the source design: field widths and field order of the packet, the
// 30 x 30 grid, 12 x 12 clusters placed every 6 PMTs, 172 ring columns, the
// 160-cycle delay, 10-cycle pulse broadening, threshold 12, 7 one-microsecond
// slices. Own choices: packet fields are packed most significant first in the
// order they are drawn (header at bit 95, checksum at bits 2:0); the header
// value, the checksum rule (XOR of the thirty-one 3-bit groups above the
// checksum) and the channel numbering (channel = 9 * board + position inside
// the 3 x 3 board, boards numbered row by row on a 10 x 10 grid) are not
// specified by the source and are fixed here.
package lawca_pkg;

  // ---- detector geometry -------------------------------------------------
  localparam int unsigned N_CHANNELS   = 900;  // PMTs / readout channels
  localparam int unsigned GRID         = 30;   // 30 x 30 detector units
  localparam int unsigned FEE_SIDE     = 3;    // 3 x 3 PMTs per FEE
  localparam int unsigned FEE_PER_ROW  = GRID / FEE_SIDE;  // 10
  localparam int unsigned CLUSTER_SIDE = 12;   // cluster is 12 x 12 PMTs
  localparam int unsigned CLUSTER_STEP = 6;    // clusters start at 0,6,12,18
  localparam int unsigned CL_PER_AXIS  = 4;
  localparam int unsigned N_CLUSTERS   = CL_PER_AXIS * CL_PER_AXIS;  // 16

  // ---- link / packet -----------------------------------------------------
  localparam int unsigned N_FIBERS     = 10;
  localparam int unsigned PKT_W        = 96;
  localparam int unsigned TIME_W       = 27;   // coarse time counter width
  localparam logic [2:0]  PKT_HEADER   = 3'b101;

  // FEE data packet, most significant field first.
  typedef struct packed {
    logic [2:0]        header;
    logic [9:0]        channel;
    logic [15:0]       reserved;
    logic [TIME_W-1:0] coarse_time;
    logic [4:0]        fine_time;
    logic [15:0]       q_high;
    logic [15:0]       q_low;
    logic [2:0]        checksum;
  } fee_packet_t;

  // ---- records from the data buffer to data transmission -----------------
  typedef enum logic [1:0] {
    REC_HEADER  = 2'd0,   // payload[26:0] = trigger coarse time
    REC_PACKET  = 2'd1,   // payload = one FEE packet
    REC_TRAILER = 2'd2    // payload[15:0] = packet count, payload[16] = overrun
  } rec_kind_e;

  typedef struct packed {
    rec_kind_e         kind;
    logic [PKT_W-1:0]  payload;
  } readout_rec_t;

  // ---- status counters brought out of the top ------------------------------
  typedef struct packed {
    logic [31:0] bad_packets;     // header, checksum or channel number rejected
    logic [31:0] fifo_drops;      // per-fiber input FIFO full
    logic [31:0] late_packets;    // older than the delay buffer
    logic [31:0] early_packets;   // coarse time ahead of the local time
    logic [31:0] buffer_drops;    // data buffer slice full
    logic [31:0] triggers;        // Trigger_G pulses
    logic [31:0] events_read;     // triggers that started a readout
    logic [31:0] triggers_skipped;// triggers inside a running readout or hold-off
    logic [31:0] readout_overruns;// slice reused before its readout finished
  } status_t;

  // XOR of the 31 three-bit groups above the checksum field.
  function automatic logic [2:0] pkt_checksum(input logic [PKT_W-1:0] p);
    logic [2:0] c;
    c = '0;
    for (int g = 1; g < PKT_W / 3; g++) c ^= p[3*g +: 3];
    return c;
  endfunction

  // Grid position of a channel: board = ch / 9, boards row by row on 10 x 10.
  function automatic int unsigned ch_x(input int unsigned ch);
    int unsigned fee, k;
    fee = ch / (FEE_SIDE * FEE_SIDE);
    k   = ch % (FEE_SIDE * FEE_SIDE);
    return (fee % FEE_PER_ROW) * FEE_SIDE + (k % FEE_SIDE);
  endfunction

  function automatic int unsigned ch_y(input int unsigned ch);
    int unsigned fee, k;
    fee = ch / (FEE_SIDE * FEE_SIDE);
    k   = ch % (FEE_SIDE * FEE_SIDE);
    return (fee / FEE_PER_ROW) * FEE_SIDE + (k / FEE_SIDE);
  endfunction

  // Bit m is set when the channel lies in cluster m (m = 4 * cy + cx).
  function automatic logic [N_CLUSTERS-1:0] cluster_mask(input logic [9:0] ch);
    logic [N_CLUSTERS-1:0] m;
    int unsigned x, y;
    m = '0;
    x = ch_x(int'(ch));
    y = ch_y(int'(ch));
    for (int cy = 0; cy < CL_PER_AXIS; cy++)
      for (int cx = 0; cx < CL_PER_AXIS; cx++)
        if (int'(ch) < N_CHANNELS &&
            x >= cx * CLUSTER_STEP && x < cx * CLUSTER_STEP + CLUSTER_SIDE &&
            y >= cy * CLUSTER_STEP && y < cy * CLUSTER_STEP + CLUSTER_SIDE)
          m[cy * CL_PER_AXIS + cx] = 1'b1;
    return m;
  endfunction

endpackage
