// l1_data_receiver: per-port data receiver of the L1 concentrator.
//
// Takes the word stream of one FEE link (one word per rx_valid, rx_last on
// the CRC word that closes an FEB-L1 packet), checks the packet and stores it:
//   - the CRC-32 over the header and payload words must equal the last word;
//   - the packet number must follow the previous one (mod 256); a gap is
//     counted as lost packets but the packet itself is kept;
//   - a packet that is shorter than two header words, fails its CRC, or does
//     not fit the buffer is removed again (store and forward, pkt_fifo).
// A good packet leaves as a descriptor (both header words and the payload
// length) plus its payload words in a separate packet FIFO.
//
// The counters are the per-FEE status the concentrator monitors: packets,
// words (the data rate when sampled per unit time), CRC errors, lost packets
// and overflows. Which checks to make is this design's choice; the published
// text says only that the receiver takes the data and that each FEE's status
// and data rate are monitored. A disabled port ignores its link.
// Lint note: only the packet-number field of header word 0 is inspected here
// and the buffer's free_words output is not needed (UNUSEDSIGNAL).
module l1_data_receiver
  import spd_daq_pkg::*;
#(
  parameter int unsigned DATA_DEPTH = 512,
  parameter int unsigned DESC_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  // link
  input  logic        rx_valid,
  input  word_t       rx_data,
  input  logic        rx_last,
  // descriptor of a stored packet
  output logic        desc_valid,
  input  logic        desc_ready,
  output feb_hdr0_t   desc_h0,
  output feb_hdr1_t   desc_h1,
  output logic [15:0] desc_len,
  // payload words
  output logic        pl_valid,
  output word_t       pl_data,
  input  logic        pl_ready,
  // monitoring
  output logic [31:0] cnt_pkts,
  output logic [31:0] cnt_words,
  output logic [31:0] cnt_crc_err,
  output logic [31:0] cnt_lost,
  output logic [31:0] cnt_ovf
);
  logic [15:0] idx;          // word index inside the packet
  logic [31:0] crc;
  word_t       h0_q, h1_q;
  logic        ovf_q;        // packet did not fit
  logic [7:0]  exp_num;
  logic        have_prev;
  logic        fifo_full;
  logic        w_valid, w_commit, w_drop;
  logic        d_in_ready;
  logic        good;
  feb_hdr0_t   h0_v;
  logic [$clog2(DATA_DEPTH):0] free_words;

  logic acc;
  assign acc = enable && rx_valid;

  assign w_valid  = acc && !rx_last && idx >= 2;
  assign good     = acc && rx_last && idx >= 2 && (~crc == rx_data) && !ovf_q && d_in_ready;
  assign w_commit = good;
  assign w_drop   = acc && rx_last && !good;
  assign h0_v     = feb_hdr0_t'(h0_q);

  pkt_fifo #(.WIDTH(WORD_W), .DEPTH(DATA_DEPTH)) u_data (
    .clk, .rst, .wr_valid(w_valid), .wr_data(rx_data), .wr_commit(w_commit), .wr_drop(w_drop),
    .full(fifo_full), .free_words(free_words),
    .rd_valid(pl_valid), .rd_data(pl_data), .rd_ready(pl_ready));

  logic [WORD_W*2+15:0] d_out;
  sync_fifo #(.WIDTH(WORD_W*2+16), .DEPTH(DESC_DEPTH)) u_desc (
    .clk, .rst, .in_valid(good), .in_ready(d_in_ready), .in_data({h0_q, h1_q, idx - 16'd2}),
    .out_valid(desc_valid), .out_ready(desc_ready), .out_data(d_out));
  assign {desc_h0, desc_h1, desc_len} = d_out;

  always_ff @(posedge clk) begin
    if (rst) begin
      idx <= '0; crc <= CRC32_INIT; h0_q <= '0; h1_q <= '0; ovf_q <= 1'b0;
      exp_num <= '0; have_prev <= 1'b0;
      cnt_pkts <= '0; cnt_words <= '0; cnt_crc_err <= '0; cnt_lost <= '0; cnt_ovf <= '0;
    end else if (acc) begin
      cnt_words <= cnt_words + 1;
      if (rx_last) begin
        idx <= '0; crc <= CRC32_INIT; ovf_q <= 1'b0;
        if (good) begin
          cnt_pkts  <= cnt_pkts + 1;
          have_prev <= 1'b1;
          exp_num   <= h0_v.pkt_num + 1'b1;
          if (have_prev && h0_v.pkt_num != exp_num)
            cnt_lost <= cnt_lost + 32'(8'(h0_v.pkt_num - exp_num));
        end else if (idx < 2 || ~crc != rx_data) begin
          cnt_crc_err <= cnt_crc_err + 1;
        end else begin
          cnt_ovf <= cnt_ovf + 1;
        end
      end else begin
        idx <= idx + 1'b1;
        crc <= crc32_word(crc, rx_data);
        if (idx == 0) h0_q <= rx_data;
        if (idx == 1) h1_q <= rx_data;
        if (w_valid && fifo_full) ovf_q <= 1'b1;
      end
    end
  end
endmodule
