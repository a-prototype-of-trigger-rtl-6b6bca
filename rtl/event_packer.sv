// event_packer: the Data Transmission stage. It turns the records of one
// triggered event into a frame of 32-bit words for the Gigabit Ethernet MAC
// that carries them to the data acquisition system.
//
// Frame layout (one frame per trigger):
//   word 0      : {8'hA5, event number[23:0]}            (out_sop = 1)
//   word 1      : {5'b0, trigger coarse time[26:0]}
//   3 words per selected FEE packet, packet bits [95:64], [63:32], [31:0]
//   last word   : {8'h5A, 7'b0, overrun, packet count[15:0]} (out_eop = 1)
// Records come in on `in_rec` with a valid/ready handshake; words leave on
// `out_data` with valid/ready. A record is taken (`in_ready`) when its last
// word is accepted, so the packer holds no record storage of its own. The
// event number starts at 0 after reset and counts the header records.
//
// Source design: selected data are packaged and sent over Gigabit Ethernet.
// Own choices: the whole frame format and word width; the MAC and PHY are
// outside this logic.
module event_packer
  import lawca_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  readout_rec_t in_rec,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [31:0]  out_data,
  output logic         out_sop,
  output logic         out_eop
);
  localparam logic [7:0] FRAME_START = 8'hA5;
  localparam logic [7:0] FRAME_END   = 8'h5A;

  logic [1:0]  word;       // word index inside the current record
  logic [1:0]  last_word;
  logic [23:0] evt_num;

  always_comb begin
    out_valid = in_valid;
    out_sop   = 1'b0;
    out_eop   = 1'b0;
    out_data  = '0;
    last_word = 2'd0;
    unique case (in_rec.kind)
      REC_HEADER: begin
        last_word = 2'd1;
        out_sop   = (word == 2'd0);
        out_data  = (word == 2'd0) ? {FRAME_START, evt_num}
                                   : {5'b0, in_rec.payload[TIME_W-1:0]};
      end
      REC_PACKET: begin
        last_word = 2'd2;
        out_data  = in_rec.payload[PKT_W-1-32*word -: 32];
      end
      REC_TRAILER: begin
        out_eop   = 1'b1;
        out_data  = {FRAME_END, 7'b0, in_rec.payload[16], in_rec.payload[15:0]};
      end
      default: out_valid = 1'b0;
    endcase
    in_ready = out_ready && (word == last_word);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word    <= '0;
      evt_num <= '0;
    end else if (out_valid && out_ready) begin
      if (word == last_word) begin
        word <= '0;
        if (in_rec.kind == REC_HEADER) evt_num <= evt_num + 1'b1;
      end else begin
        word <= word + 1'b1;
      end
    end
  end

  a_hold_record: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_rec));
endmodule
