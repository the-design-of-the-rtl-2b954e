// l2_data_sort: pre-sorting of L1-L2 packets into whole slices (L2).
//
// Packets reach the L2 from up to N_LINKS L1 concentrators, interleaved by
// the arbitrator. Each link's packets are already in (frame, slice) order
// because the L1 merge orders them. This block gathers them by slice and
// sends every slice to the host as one contiguous block, complete and in
// slice order.
//
// Storage is NBINS slice bins of BIN_WORDS words each. The board's DDR4
// holds this buffer; here it is an on-chip array. A packet whose
// (frame, slice) matches an open bin is appended to it; otherwise a free bin
// is opened for it. When no bin is free the input stalls (back-pressure)
// until one has been sent. For every link the block keeps the (frame, slice)
// of the last packet header it saw (its watermark). A bin is complete once
// every enabled link has a watermark beyond the bin's slice: no more data can
// come for it. The oldest complete bin is then sent. flush_all sends open bins
// without waiting, for the end of a run.
// When a new slice needs a bin and none is free, the oldest bin is sent at
// once, even if it is not complete. Waiting would deadlock: the packet that
// would complete that bin may sit behind the stalled one in the input
// stream. Such a slice is marked "sent early".
// A packet that does not fit its bin is removed, and the slice is marked
// incomplete. A packet that arrives for a slice already sent is dropped as
// late. All of these are counted.
//
// Output block of one slice: word 0 frame, word 1 slice, word 2
// {flags[31:24], 8'h00, number of data words[15:0]} (flag bit 24: data were
// lost to overflow; bit 25: sent early, by eviction or flush_all), then the
// stored L1-L2 packets unchanged; out_last on the final word.
// The published design says only that the L2 pre-sorts the data before the
// transfer and that slices are the unit of the data. The bin method is this
// design's choice.
module l2_data_sort
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_LINKS   = 8,
  parameter int unsigned NBINS     = 8,
  parameter int unsigned BIN_WORDS = 2048
) (
  input  logic  clk,
  input  logic  rst,
  input  logic [N_LINKS-1:0] link_en,
  input  logic  flush_all,
  input  logic  in_valid,
  input  word_t in_data,
  input  logic  in_last,
  input  logic [$clog2(N_LINKS)-1:0] in_link,
  output logic  in_ready,
  output logic  out_valid,
  output word_t out_data,
  output logic  out_last,
  input  logic  out_ready,
  output logic [31:0] cnt_slices,
  output logic [31:0] cnt_late,
  output logic [31:0] cnt_ovf,
  output logic [31:0] cnt_stall,     // cycles the input waited for a free bin
  output logic [31:0] cnt_early      // slices sent before every link had finished them
);
  localparam int unsigned BW = $clog2(NBINS);
  localparam int unsigned IW = $clog2(BIN_WORDS + 1);
  localparam int unsigned AW = $clog2(NBINS * BIN_WORDS);

  typedef logic [63:0] key_t;   // {frame, slice}

  word_t        mem [NBINS * BIN_WORDS];
  logic         b_valid [NBINS];
  key_t         b_key   [NBINS];
  logic [IW-1:0] b_cnt  [NBINS];
  logic         b_lost  [NBINS];

  key_t         wm    [N_LINKS];
  logic         wm_ok [N_LINKS];
  key_t         last_sent;
  logic         sent_any;

  // flush-side state (declared here, used by both sides)
  typedef enum logic [2:0] {F_IDLE, F_FR, F_SL, F_CNT, F_DATA} fstate_e;
  fstate_e       fs;
  logic [BW-1:0] fbin;
  logic [IW-1:0] fidx;
  logic          f_early;
  logic          writing;
  key_t          min_wm;
  logic          wm_all;
  logic [BW-1:0] old_bin;
  logic          old_ok;

  // ------------------------------------------------------------------ write
  typedef enum logic [3:0] {W_H0, W_FR, W_SL, W_ALLOC, W_WH0, W_WFR, W_WSL, W_PL, W_DROP} wstate_e;
  wstate_e       ws;
  word_t         h0_q, fr_q, sl_q;
  logic          hdr_last;
  logic [BW-1:0] wbin;
  logic [IW-1:0] pkt_start;
  key_t          in_key;

  assign in_key = {fr_q, sl_q};

  // bin lookup
  logic [BW-1:0] hit_bin, free_bin;
  logic          hit_ok, free_ok;
  always_comb begin
    hit_bin = '0; hit_ok = 1'b0; free_bin = '0; free_ok = 1'b0;
    for (int b = 0; b < NBINS; b++) begin
      if (!hit_ok && b_valid[b] && b_key[b] == in_key) begin hit_bin = BW'(b); hit_ok = 1'b1; end
      if (!free_ok && !b_valid[b]) begin free_bin = BW'(b); free_ok = 1'b1; end
    end
  end

  // late: its slice was sent already or is being sent now
  logic late, late_base, alloc_blocked;
  logic start_flush;
  assign late_base = (sent_any && (in_key <= last_sent))
                  || (fs != F_IDLE && b_key[fbin] == in_key);
  assign late = late_base || (start_flush && b_key[old_bin] == in_key);
  // a new slice needs a bin and none is free
  assign alloc_blocked = (ws == W_ALLOC) && !late_base && !hit_ok && !free_ok;

  logic         wr_en;
  logic [AW-1:0] wr_addr;
  word_t        wr_word;
  logic         bin_full;
  assign bin_full = (b_cnt[wbin] == IW'(BIN_WORDS));
  assign wr_addr  = AW'(wbin) * AW'(BIN_WORDS) + AW'(b_cnt[wbin]);

  always_comb begin
    in_ready = 1'b0; wr_en = 1'b0; wr_word = in_data;
    unique case (ws)
      W_H0, W_FR, W_SL, W_DROP: in_ready = 1'b1;
      W_WH0: begin wr_en = !bin_full; wr_word = h0_q; end
      W_WFR: begin wr_en = !bin_full; wr_word = fr_q; end
      W_WSL: begin wr_en = !bin_full; wr_word = sl_q; end
      W_PL:  begin in_ready = 1'b1; wr_en = in_valid && !bin_full; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
  end

  // ------------------------------------------------------------------ flush

  assign writing = (ws inside {W_WH0, W_WFR, W_WSL, W_PL});

  always_comb begin
    min_wm = '1; wm_all = 1'b1;
    for (int l = 0; l < N_LINKS; l++) begin
      if (link_en[l]) begin
        if (!wm_ok[l]) wm_all = 1'b0;
        else if (wm[l] < min_wm) min_wm = wm[l];
      end
    end
    old_bin = '0; old_ok = 1'b0;
    for (int b = 0; b < NBINS; b++) begin
      if (b_valid[b] && !(writing && wbin == BW'(b)) && (!old_ok || b_key[b] < b_key[old_bin])) begin
        old_bin = BW'(b); old_ok = 1'b1;
      end
    end
  end

  logic old_done;
  assign old_done    = wm_all && (b_key[old_bin] < min_wm);
  assign start_flush = (fs == F_IDLE) && old_ok && (flush_all || old_done || alloc_blocked);

  logic o_load;
  assign o_load = !out_valid || out_ready;

  // ------------------------------------------------------------------ state
  always_ff @(posedge clk) begin
    if (rst) begin
      ws <= W_H0; h0_q <= '0; fr_q <= '0; sl_q <= '0; hdr_last <= 1'b0; wbin <= '0; pkt_start <= '0;
      fs <= F_IDLE; fbin <= '0; fidx <= '0; f_early <= 1'b0; cnt_early <= '0; last_sent <= '0; sent_any <= 1'b0;
      out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
      cnt_slices <= '0; cnt_late <= '0; cnt_ovf <= '0; cnt_stall <= '0;
      for (int b = 0; b < NBINS; b++) begin
        b_valid[b] <= 1'b0; b_key[b] <= '0; b_cnt[b] <= '0; b_lost[b] <= 1'b0;
      end
      for (int l = 0; l < N_LINKS; l++) begin wm[l] <= '0; wm_ok[l] <= 1'b0; end
    end else begin
      // ---------------- write side
      if (wr_en) b_cnt[wbin] <= b_cnt[wbin] + 1'b1;
      unique case (ws)
        W_H0: if (in_valid) begin h0_q <= in_data; ws <= W_FR; end
        W_FR: if (in_valid) begin fr_q <= in_data; ws <= W_SL; end
        W_SL: if (in_valid) begin
          sl_q <= in_data; hdr_last <= in_last; ws <= W_ALLOC;
          wm[in_link] <= {fr_q, in_data}; wm_ok[in_link] <= 1'b1;
        end
        W_ALLOC: begin
          if (late) begin
            cnt_late <= cnt_late + 1;
            ws <= hdr_last ? W_H0 : W_DROP;
          end else if (hit_ok) begin
            wbin <= hit_bin; pkt_start <= b_cnt[hit_bin]; ws <= W_WH0;
          end else if (free_ok) begin
            wbin <= free_bin; pkt_start <= '0; ws <= W_WH0;
            b_valid[free_bin] <= 1'b1; b_key[free_bin] <= in_key;
            b_cnt[free_bin] <= '0; b_lost[free_bin] <= 1'b0;
          end else begin
            cnt_stall <= cnt_stall + 1;
          end
        end
        W_WH0, W_WFR, W_WSL, W_PL: begin
          if (bin_full && (ws != W_PL || in_valid)) begin
            // the packet does not fit: remove what was written of it
            b_cnt[wbin]  <= pkt_start;
            b_lost[wbin] <= 1'b1;
            cnt_ovf      <= cnt_ovf + 1;
            if (ws == W_PL) ws <= in_last ? W_H0 : W_DROP;
            else            ws <= hdr_last ? W_H0 : W_DROP;
          end else begin
            unique case (ws)
              W_WH0: ws <= W_WFR;
              W_WFR: ws <= W_WSL;
              W_WSL: ws <= hdr_last ? W_H0 : W_PL;
              default: if (in_valid && in_last) ws <= W_H0;
            endcase
          end
        end
        default: if (in_valid && in_last) ws <= W_H0;   // W_DROP
      endcase

      // ---------------- flush side
      if (o_load) out_valid <= 1'b0;
      unique case (fs)
        F_IDLE: if (start_flush) begin
          fbin <= old_bin; fidx <= '0; fs <= F_FR; f_early <= !old_done;
          if (!old_done) cnt_early <= cnt_early + 1;
        end
        F_FR: if (o_load) begin
          out_valid <= 1'b1; out_data <= b_key[fbin][63:32]; out_last <= 1'b0; fs <= F_SL;
        end
        F_SL: if (o_load) begin
          out_valid <= 1'b1; out_data <= b_key[fbin][31:0]; fs <= F_CNT;
        end
        F_CNT: if (o_load) begin
          out_valid <= 1'b1;
          out_data  <= {6'd0, f_early, b_lost[fbin], 8'h00, 16'(b_cnt[fbin])};
          out_last  <= (b_cnt[fbin] == 0);
          fs <= (b_cnt[fbin] == 0) ? F_IDLE : F_DATA;
          if (b_cnt[fbin] == 0) begin
            b_valid[fbin] <= 1'b0; last_sent <= b_key[fbin]; sent_any <= 1'b1;
            cnt_slices <= cnt_slices + 1;
          end
        end
        default: if (o_load) begin   // F_DATA
          out_valid <= 1'b1;
          out_data  <= mem[AW'(fbin) * AW'(BIN_WORDS) + AW'(fidx)];
          out_last  <= (fidx == b_cnt[fbin] - 1'b1);
          fidx      <= fidx + 1'b1;
          if (fidx == b_cnt[fbin] - 1'b1) begin
            fs <= F_IDLE;
            b_valid[fbin] <= 1'b0; last_sent <= b_key[fbin]; sent_any <= 1'b1;
            cnt_slices <= cnt_slices + 1;
          end
        end
      endcase
    end
  end

  // A bin that is being sent is never written.
  assert property (@(posedge clk) disable iff (rst) (fs != F_IDLE && wr_en) |-> (wbin != fbin));
endmodule
