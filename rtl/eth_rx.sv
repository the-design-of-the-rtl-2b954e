// eth_rx: Ethernet II receiver of one L2 link input.
//
// Accepts the word-level frames made by eth_tx (4 header words, the L1-L2
// packet, the FCS word with in_last). A frame is kept only if its FCS is
// correct, its EtherType is the readout EtherType and the packet fits the
// buffer; otherwise it is removed (store and forward with pkt_fifo) and
// counted. The output is the bare L1-L2 packet as a valid/ready stream with
// out_last on its final word, released only after the whole frame has been
// checked. Words come in without back-pressure, as from a MAC.
// Frame validation rules and counters are this design's choice.
// Lint note: the buffer's free_words output is not needed (UNUSEDSIGNAL).
module eth_rx
  import spd_daq_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  word_t       in_data,
  input  logic        in_last,
  output logic        out_valid,
  output word_t       out_data,
  output logic        out_last,
  input  logic        out_ready,
  output logic [31:0] cnt_frames,
  output logic [31:0] cnt_fcs_err,
  output logic [31:0] cnt_drop
);
  logic [15:0] idx;
  logic [31:0] crc, fcs_rx;
  logic        bad_type, ovf;
  logic        full, wv, commit, drop, fcs_ok;
  word_t       prev;        // a payload word is written one word late so the
  logic        prev_v;      // final one can carry the last flag
  logic [$clog2(DEPTH):0] free_words;

  assign fcs_rx = {in_data[7:0], in_data[15:8], in_data[23:16], in_data[31:24]};
  assign fcs_ok = (fcs_rx == ~crc);
  assign wv     = in_valid && prev_v;
  assign commit = in_valid && in_last && fcs_ok && !bad_type && !ovf && prev_v && !full;
  assign drop   = in_valid && in_last && !commit;

  pkt_fifo #(.WIDTH(WORD_W + 1), .DEPTH(DEPTH)) u_buf (
    .clk, .rst, .wr_valid(wv), .wr_data({in_last, prev}), .wr_commit(commit), .wr_drop(drop),
    .full(full), .free_words(free_words),
    .rd_valid(out_valid), .rd_data({out_last, out_data}), .rd_ready(out_ready));

  always_ff @(posedge clk) begin
    if (rst) begin
      idx <= '0; crc <= CRC32_INIT; bad_type <= 1'b0; ovf <= 1'b0; prev <= '0; prev_v <= 1'b0;
      cnt_frames <= '0; cnt_fcs_err <= '0; cnt_drop <= '0;
    end else if (in_valid) begin
      if (in_last) begin
        idx <= '0; crc <= CRC32_INIT; bad_type <= 1'b0; ovf <= 1'b0; prev_v <= 1'b0;
        if (commit)       cnt_frames  <= cnt_frames + 1;
        else if (!fcs_ok) cnt_fcs_err <= cnt_fcs_err + 1;
        else              cnt_drop    <= cnt_drop + 1;
      end else begin
        idx <= idx + 1'b1;
        crc <= crc32_word(crc, in_data);
        if (idx == 3 && in_data[31:16] != ETHERTYPE_SPD) bad_type <= 1'b1;
        if (idx >= 4) begin prev <= in_data; prev_v <= 1'b1; end
        if (wv && full) ovf <= 1'b1;
      end
    end
  end
endmodule
