// data_buffer: holds every accepted raw packet while the trigger decides, and
// reads out the 2 us of data around each global trigger.
//
// Storage is a ring of SLICES = 7 slices, each holding the packets whose
// coarse time falls in one 1 us period (SLICE_TICKS = 40 global cycles), at
// most DEPTH packets per slice. Four pointers walk round the ring and all move
// to the next slice every 1 us:
//   Processing Pointer `proc_ptr` : slice of the time now under trigger
//                                   processing (now - 160)
//   Buffering Pointer  `buf_ptr`  : proc_ptr + 4, slice of the newest data
//   Readout Pointer    `rdo_ptr`  : proc_ptr - 1, first slice of a readout
//   Cleanup Pointer    `cln_ptr`  : proc_ptr - 2, obsolete data
// A packet from sync_window (`wr_valid`, `wr_offset` = columns ahead of the
// processing time) is stored in slice proc_ptr + (phase + offset) / 40, where
// `phase` (0..39) is the position of the processing time inside its slice; a
// full slice drops it (`buffer_drops`). Obsolete slices are not wiped: the
// fill count of a slice is reset when the Buffering Pointer reaches it, one
// microsecond after the Cleanup Pointer marked it, so that a readout still
// running on it keeps its contents until then.
//
// Readout: the processing slice and phase are latched on every `tick`
// together with the processing time. A `trigger` (Trigger_G, which arrives two
// clocks after that tick) starts a readout if the readout engine is idle and
// the trigger time is at least HOLDOFF cycles after the previous accepted
// trigger; otherwise it is counted in `triggers_skipped`. The engine emits on
// `out_rec` (valid/ready): a header record with the trigger time, the packets
// of slices rdo_ptr, proc_ptr and proc_ptr + 1 whose coarse time lies in
// [T - 40, T + 39] (the 2 us window), and a trailer with their count. Each
// slice's fill count is taken when its turn comes; one stored packet is
// examined per clock and a selected one is held in an output register until
// it is taken (two clocks per selected packet at full speed). If the
// Buffering Pointer reaches a slice before its readout is done (the readout
// slice two slice shifts after the triggering tick, the next one three, the
// last four), the rest of it is skipped and the trailer's overrun bit set.
//
// Source design: 7 slices of 1 us, the four pointers and their distances
// (4 us delay, readout 1 us behind processing, cleanup behind readout), the
// 3-slice readout for a 2 us window. Own choices: slice depth, the time filter
// that cuts the 3 slices to exactly 2 us, erasing by fill-count reset when the
// slice is reused, the hold-off between triggers, and the record format.
module data_buffer
  import lawca_pkg::*;
#(
  parameter int unsigned SLICES      = 7,
  parameter int unsigned SLICE_TICKS = 40,
  parameter int unsigned DEPTH       = 256,
  parameter int unsigned DELAY       = 160,
  parameter int unsigned HALF_WIN    = 40,
  parameter int unsigned HOLDOFF     = 80
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  input  logic [TIME_W-1:0] now,
  input  logic              wr_valid,
  input  logic [7:0]        wr_offset,
  input  fee_packet_t       wr_pkt,
  input  logic              trigger,
  output logic              out_valid,
  input  logic              out_ready,
  output readout_rec_t      out_rec,
  output logic [2:0]        proc_ptr,
  output logic [2:0]        buf_ptr,
  output logic [2:0]        rdo_ptr,
  output logic [2:0]        cln_ptr,
  output logic              busy,
  output logic [31:0]       buffer_drops,
  output logic [31:0]       events_read,
  output logic [31:0]       triggers_skipped,
  output logic [31:0]       readout_overruns
);
  localparam int unsigned IDX_W   = $clog2(DEPTH);
  localparam int unsigned PH_W    = $clog2(SLICE_TICKS);
  localparam int unsigned AHEAD   = DELAY / SLICE_TICKS;     // 4 slices
  localparam int unsigned N_READ  = 3;

  typedef enum logic [2:0] {S_IDLE, S_HEADER, S_SLICE, S_READ, S_EMIT, S_TRAILER} state_e;

  fee_packet_t      mem [SLICES * DEPTH];
  logic [IDX_W:0]   fill [SLICES];
  logic [PH_W-1:0]  phase;

  // latched at every tick: the column handed to the trigger logic
  logic [2:0]        eval_ptr;
  logic [TIME_W-1:0] eval_time;

  state_e            state;
  logic [TIME_W-1:0] win_time, last_time;
  logic              have_last;
  logic [2:0]        rd_slice;
  logic [1:0]        rd_n;          // slices done
  logic [IDX_W:0]    rd_idx, rd_len;
  logic [15:0]       rd_count;
  logic              rd_overrun;
  logic [2:0]        rd_shifts;     // slice shifts since the triggering tick
  fee_packet_t       emit_pkt;

  function automatic logic [2:0] ring(input int unsigned s);
    return 3'(s % SLICES);
  endfunction

  logic [2:0] proc_ptr_q;
  assign proc_ptr = proc_ptr_q;
  assign buf_ptr = ring(int'(proc_ptr_q) + AHEAD);
  assign rdo_ptr = ring(int'(proc_ptr_q) + SLICES - 1);
  assign cln_ptr = ring(int'(proc_ptr_q) + SLICES - 2);
  assign busy    = (state != S_IDLE);

  // ---- write side -----------------------------------------------------------
  logic [2:0]  wr_slice;
  logic        wr_room;
  always_comb begin
    wr_slice = ring(int'(proc_ptr_q) + (int'(phase) + int'(wr_offset)) / SLICE_TICKS);
    wr_room  = fill[wr_slice] < (IDX_W+1)'(DEPTH);
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_room)
      mem[int'(wr_slice) * DEPTH + int'(fill[wr_slice][IDX_W-1:0])] <= wr_pkt;
  end

  // ---- read side --------------------------------------------------------------
  fee_packet_t rd_pkt;
  logic        rd_in_win, rd_lost;
  always_comb begin
    rd_pkt    = mem[int'(rd_slice) * DEPTH + int'(rd_idx[IDX_W-1:0])];
    rd_in_win = ((rd_pkt.coarse_time - (win_time - TIME_W'(HALF_WIN))) < TIME_W'(2 * HALF_WIN));
    // slice number rd_n (0 = readout slice) of the trigger is handed to the
    // Buffering Pointer, and reused, rd_n + 2 shifts after the triggering tick
    rd_lost   = (int'(rd_shifts) >= int'(rd_n) + 2);
  end

  always_comb begin
    out_valid = 1'b0;
    out_rec   = '{kind: REC_HEADER, payload: '0};
    unique case (state)
      S_HEADER: begin
        out_valid = 1'b1;
        out_rec   = '{kind: REC_HEADER, payload: PKT_W'(win_time)};
      end
      S_EMIT: begin
        out_valid = 1'b1;
        out_rec   = '{kind: REC_PACKET, payload: emit_pkt};
      end
      S_TRAILER: begin
        out_valid = 1'b1;
        out_rec   = '{kind: REC_TRAILER, payload: PKT_W'({rd_overrun, rd_count})};
      end
      default: ;
    endcase
  end

  logic trig_ok;
  assign trig_ok = (state == S_IDLE) &&
                   (!have_last || (eval_time - last_time) >= TIME_W'(HOLDOFF));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      proc_ptr_q       <= '0;
      phase            <= '0;
      for (int s = 0; s < SLICES; s++) fill[s] <= '0;
      eval_ptr         <= '0;
      eval_time        <= '0;
      state            <= S_IDLE;
      win_time         <= '0;
      last_time        <= '0;
      have_last        <= 1'b0;
      rd_slice         <= '0;
      rd_n             <= '0;
      rd_idx           <= '0;
      rd_len           <= '0;
      rd_count         <= '0;
      rd_overrun       <= 1'b0;
      rd_shifts        <= '0;
      emit_pkt         <= '0;
      buffer_drops     <= '0;
      events_read      <= '0;
      triggers_skipped <= '0;
      readout_overruns <= '0;
    end else begin
      // store
      if (wr_valid) begin
        if (wr_room) fill[wr_slice] <= fill[wr_slice] + 1'b1;
        else         buffer_drops   <= buffer_drops + 1'b1;
      end

      // pointers: the tick hands column (now - DELAY) to the trigger logic
      if (tick) begin
        eval_ptr  <= proc_ptr_q;
        eval_time <= now - TIME_W'(DELAY);
        if (int'(phase) == SLICE_TICKS - 1) begin
          phase      <= '0;
          proc_ptr_q <= ring(int'(proc_ptr_q) + 1);
          // the slice the Buffering Pointer moves onto is reused: erase it
          fill[ring(int'(proc_ptr_q) + 1 + AHEAD)] <= '0;
        end else begin
          phase <= phase + 1'b1;
        end
      end

      // readout engine
      if (busy && tick && int'(phase) == SLICE_TICKS - 1 && rd_shifts != '1)
        rd_shifts <= rd_shifts + 1'b1;
      if (trigger && !trig_ok) triggers_skipped <= triggers_skipped + 1'b1;
      unique case (state)
        S_IDLE: if (trigger && trig_ok) begin
          state       <= S_HEADER;
          win_time    <= eval_time;
          last_time   <= eval_time;
          have_last   <= 1'b1;
          rd_slice    <= ring(int'(eval_ptr) + SLICES - 1);
          rd_n        <= '0;
          rd_count    <= '0;
          rd_overrun  <= 1'b0;
          rd_shifts   <= (proc_ptr_q != eval_ptr) ? 3'd1 : 3'd0;
          events_read <= events_read + 1'b1;
        end
        S_HEADER: if (out_ready) state <= S_SLICE;
        S_SLICE: begin
          rd_len <= fill[rd_slice];
          rd_idx <= '0;
          state  <= S_READ;
        end
        S_READ: begin
          if (rd_lost || rd_idx >= rd_len) begin
            if (rd_lost) begin
              rd_overrun       <= 1'b1;
              readout_overruns <= readout_overruns + 1'b1;
            end
            if (int'(rd_n) == N_READ - 1) begin
              state <= S_TRAILER;
            end else begin
              rd_n     <= rd_n + 1'b1;
              rd_slice <= ring(int'(rd_slice) + 1);
              state    <= S_SLICE;
            end
          end else begin
            rd_idx <= rd_idx + 1'b1;
            if (rd_in_win) begin
              emit_pkt <= rd_pkt;
              state    <= S_EMIT;
            end
          end
        end
        S_EMIT: if (out_ready) begin
          rd_count <= rd_count + 1'b1;
          state    <= S_READ;
        end
        S_TRAILER: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (SLICES <= 8 && (1 << IDX_W) == DEPTH && DELAY % SLICE_TICKS == 0 &&
                  AHEAD + 3 <= SLICES && 2 * HALF_WIN <= 2 * SLICE_TICKS)
    else $error("data_buffer: inconsistent slice parameters");

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_rec));
endmodule
