// feb_packet_tx: FEE-side framer of FEB-L1 packets.
//
// The front-end logic delivers hit words (hit_valid/hit_data) while a frame
// is open. They are collected per slice: when the slice closes (slice_end from
// fee_cmd_receiver) the framer sends one packet holding that slice's words,
// also when there were none, so that the concentrator learns that the slice
// is complete. A slice with more than MAX_PAYLOAD words is cut into several
// packets. Packet layout (bit positions as published):
//   word 0 : type[31:26] board_id[25:16] packet number[15:8] time LSB[7:0]
//   word 1 : payload format[31:26] frame LSB[25:16] slice LSB[15:0]
//   payload words, then the CRC-32 of words 0..n (tx_last marks it).
// The packet number counts packets modulo 256 so that the receiver can see
// losses. time LSB is the frame time counter when the packet was closed.
// Hits arriving while the buffers are full are lost and counted.
//
// Output pacing: the serial FEE-L1 link carries 1 Gbit/s, one 32-bit word per
// CYC_PER_WORD = 4 cycles of the 125 MHz global clock; tx_valid is high for
// one cycle per word. The link has no back-pressure.
// Lint note: only the low bits of the frame, slice and time numbers are sent
// (Fig. 5 field widths), so their upper bits are unused (UNUSEDSIGNAL); so
// are a few bits of the slice descriptor that only the splitting logic needs.
module feb_packet_tx
  import spd_daq_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD  = 64,
  parameter int unsigned DATA_DEPTH   = 1024,
  parameter int unsigned DESC_DEPTH   = 16,
  parameter int unsigned CYC_PER_WORD = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [9:0]  board_id,
  input  logic [5:0]  fmt_id,
  // time structure from fee_cmd_receiver
  input  logic        in_frame,
  input  logic [31:0] frame_num,
  input  logic [31:0] slice_num,
  input  logic [31:0] time_cnt,
  input  logic        slice_end,
  input  logic [31:0] closed_frame,
  input  logic [31:0] closed_slice,
  // hits from the front-end logic
  input  logic        hit_valid,
  input  word_t       hit_data,
  // serial link (word level)
  output logic        tx_valid,
  output word_t       tx_data,
  output logic        tx_last,
  output logic [31:0] hits_lost
);
  localparam int unsigned CW = $clog2(MAX_PAYLOAD + 1);

  typedef struct packed {
    logic [FRAME_LSB_W-1:0] frame_lsb;
    logic [SLICE_LSB_W-1:0] slice_lsb;
    logic [7:0]             time_lsb;
    logic [CW-1:0]          count;
  } desc_t;

  // ---------------- collection ----------------
  logic [CW-1:0] cur_cnt;
  logic          d_in_valid, d_in_ready, d_out_valid, d_out_ready;
  desc_t         d_in, d_out;
  logic          w_in_valid, w_in_ready, w_out_valid, w_out_ready;
  word_t         w_out;
  logic          split, take_hit;

  assign split    = hit_valid && in_frame && !slice_end && (cur_cnt == CW'(MAX_PAYLOAD));
  assign take_hit = hit_valid && in_frame && w_in_ready && !(split && !d_in_ready);

  always_comb begin
    d_in_valid = 1'b0;
    d_in = '{frame_lsb: closed_frame[FRAME_LSB_W-1:0], slice_lsb: closed_slice[SLICE_LSB_W-1:0],
             time_lsb: time_cnt[7:0], count: cur_cnt};
    if (slice_end) d_in_valid = 1'b1;
    else if (split) begin
      d_in_valid = 1'b1;
      d_in.frame_lsb = frame_num[FRAME_LSB_W-1:0];
      d_in.slice_lsb = slice_num[SLICE_LSB_W-1:0];
    end
  end

  assign w_in_valid = take_hit;

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_cnt <= '0; hits_lost <= '0;
    end else begin
      if (slice_end || split) cur_cnt <= take_hit ? CW'(1) : '0;
      else if (take_hit)      cur_cnt <= cur_cnt + 1'b1;
      if (hit_valid && in_frame && !take_hit) hits_lost <= hits_lost + 1;
    end
  end

  sync_fifo #(.WIDTH($bits(desc_t)), .DEPTH(DESC_DEPTH)) u_desc (
    .clk, .rst, .in_valid(d_in_valid), .in_ready(d_in_ready), .in_data(d_in),
    .out_valid(d_out_valid), .out_ready(d_out_ready), .out_data(d_out));

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(DATA_DEPTH)) u_data (
    .clk, .rst, .in_valid(w_in_valid), .in_ready(w_in_ready), .in_data(hit_data),
    .out_valid(w_out_valid), .out_ready(w_out_ready), .out_data(w_out));

  // ---------------- transmission ----------------
  typedef enum logic [2:0] {T_IDLE, T_H0, T_H1, T_PL, T_CRC} tstate_e;
  tstate_e       ts;
  logic [7:0]    pkt_num;
  logic [CW-1:0] left;
  logic [31:0]   crc;
  logic [$clog2(CYC_PER_WORD+1)-1:0] gap;
  logic          slot;       // a word may go out this cycle
  word_t         word;
  feb_hdr0_t     h0;
  feb_hdr1_t     h1;
  desc_t         cur;

  assign slot = (gap == 0);
  assign h0 = '{pkt_type: PKT_TYPE_DATA, board_id: board_id, pkt_num: pkt_num, time_lsb: cur.time_lsb};
  assign h1 = '{fmt_id: fmt_id, frame_lsb: cur.frame_lsb, slice_lsb: cur.slice_lsb};

  always_comb begin
    unique case (ts)
      T_H0:    word = h0;
      T_H1:    word = h1;
      T_PL:    word = w_out;
      T_CRC:   word = ~crc;
      default: word = '0;
    endcase
  end

  assign d_out_ready = (ts == T_IDLE) && d_out_valid;
  // a payload word is taken only when present (the collection side always
  // writes a slice's words before its descriptor, so it is)
  assign w_out_ready = (ts == T_PL) && slot && w_out_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      ts <= T_IDLE; pkt_num <= '0; left <= '0; crc <= CRC32_INIT; gap <= '0;
      tx_valid <= 1'b0; tx_data <= '0; tx_last <= 1'b0; cur <= '0;
    end else begin
      tx_valid <= 1'b0; tx_last <= 1'b0;
      if (gap != 0) gap <= gap - 1'b1;
      unique case (ts)
        T_IDLE: if (d_out_valid) begin
          cur <= d_out; left <= d_out.count; ts <= T_H0; crc <= CRC32_INIT;
        end
        default: if (slot && (ts != T_PL || w_out_valid)) begin
          tx_valid <= 1'b1;
          tx_data  <= word;
          gap      <= ($clog2(CYC_PER_WORD+1))'(CYC_PER_WORD - 1);
          if (ts != T_CRC) crc <= crc32_word(crc, word);
          unique case (ts)
            T_H0:  ts <= T_H1;
            T_H1:  ts <= (left == 0) ? T_CRC : T_PL;
            T_PL:  begin left <= left - 1'b1; if (left == 1) ts <= T_CRC; end
            default: begin tx_last <= 1'b1; ts <= T_IDLE; pkt_num <= pkt_num + 1'b1; end
          endcase
        end
      endcase
    end
  end
endmodule
