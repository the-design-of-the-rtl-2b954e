// eth_tx: Ethernet II framing of L1-L2 packets (concentrator to concentrator).
//
// Each L1-L2 packet from the merge becomes one Ethernet II frame on a 32-bit
// word stream:
//   word 0 : destination MAC [47:16]
//   word 1 : destination MAC [15:0], source MAC [47:32]
//   word 2 : source MAC [31:0]
//   word 3 : EtherType [31:16], two zero pad bytes [15:0]
//   the L1-L2 packet words
//   FCS    : CRC-32 over words 0..n, sent low byte first as on the wire.
// The two pad bytes keep the L1-L2 packet on a 32-bit boundary. The published
// design only says that the 32-bit alignment must be kept. The EtherType and
// the pad are this design's choice. Frames are not padded to the 64-byte
// Ethernet minimum, because the L1-L2 header carries no length from which a
// receiver could remove the padding. The 10G MAC/PCS and the optics below this
// word stream are not modelled, and the stream runs at one word per cycle.
//
// Interface: valid/ready in and out; in_last marks a packet's final word,
// out_last the FCS word. Latency from the first input word to the first output
// word is one cycle. Each frame takes 5 extra cycles (4 header words and the
// FCS).
module eth_tx
  import spd_daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] src_mac,
  input  logic [47:0] dst_mac,
  input  logic        in_valid,
  input  word_t       in_data,
  input  logic        in_last,
  output logic        in_ready,
  output logic        out_valid,
  output word_t       out_data,
  output logic        out_last,
  input  logic        out_ready,
  output logic [31:0] cnt_frames
);
  typedef enum logic [2:0] {E_IDLE, E_H0, E_H1, E_H2, E_H3, E_PL, E_FCS} estate_e;
  estate_e     es;
  logic [31:0] crc, fcs;

  assign fcs = ~crc;

  always_comb begin
    out_valid = 1'b0; out_data = '0; out_last = 1'b0; in_ready = 1'b0;
    unique case (es)
      E_H0:  begin out_valid = 1'b1; out_data = dst_mac[47:16]; end
      E_H1:  begin out_valid = 1'b1; out_data = {dst_mac[15:0], src_mac[47:32]}; end
      E_H2:  begin out_valid = 1'b1; out_data = src_mac[31:0]; end
      E_H3:  begin out_valid = 1'b1; out_data = {ETHERTYPE_SPD, 16'h0000}; end
      E_PL:  begin out_valid = in_valid; out_data = in_data; in_ready = out_ready; end
      E_FCS: begin out_valid = 1'b1; out_data = {fcs[7:0], fcs[15:8], fcs[23:16], fcs[31:24]};
                   out_last = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      es <= E_IDLE; crc <= CRC32_INIT; cnt_frames <= '0;
    end else begin
      if (out_valid && out_ready && es != E_FCS) crc <= crc32_word(crc, out_data);
      unique case (es)
        E_IDLE: if (in_valid) begin es <= E_H0; crc <= CRC32_INIT; end
        E_H0:   if (out_ready) es <= E_H1;
        E_H1:   if (out_ready) es <= E_H2;
        E_H2:   if (out_ready) es <= E_H3;
        E_H3:   if (out_ready) es <= E_PL;
        E_PL:   if (in_valid && out_ready && in_last) es <= E_FCS;
        default: if (out_ready) begin es <= E_IDLE; cnt_frames <= cnt_frames + 1; end
      endcase
    end
  end
endmodule
