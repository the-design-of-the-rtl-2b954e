// spd_daq_pkg: types and constants shared by the SPD readout-chain RTL.
//
// The two packet layouts follow the preliminary data format of the readout
// chain. An FEB-L1 packet (front-end board to first-level concentrator) has
// two header words, the payload and a CRC-32 word. An L1-L2 packet has three
// header words (identifiers, full frame number, full slice number) followed by
// the FEB payload. The bit positions of every header field are the
// published ones. The numeric codes (packet type, command codes, EtherType)
// are choices of this design: the format gives field widths, not values.
//
// The CRC-32 is the IEEE 802.3 polynomial in its reflected form (0xEDB88320,
// preset all ones, result inverted). A 32-bit word enters it byte by byte,
// most significant byte first, so the byte order is the network order of the
// word. The same function gives the FEB-L1 checksum and the Ethernet FCS.
package spd_daq_pkg;

  localparam int unsigned WORD_W      = 32;
  localparam int unsigned FEE_PER_L1  = 8;    // FEE cards per L1 concentrator
  localparam int unsigned FRAME_LSB_W = 10;   // frame number bits sent by the FEE
  localparam int unsigned SLICE_LSB_W = 16;   // slice number bits sent by the FEE

  typedef logic [WORD_W-1:0] word_t;

  // FEB-L1 header word 0: bits 31:26 type, 25:16 board, 15:8 packet number,
  // 7:0 time counter LSBs.
  typedef struct packed {
    logic [5:0] pkt_type;
    logic [9:0] board_id;
    logic [7:0] pkt_num;
    logic [7:0] time_lsb;
  } feb_hdr0_t;

  // FEB-L1 header word 1: bits 31:26 payload format, 25:16 frame LSBs,
  // 15:0 slice LSBs.
  typedef struct packed {
    logic [5:0]             fmt_id;
    logic [FRAME_LSB_W-1:0] frame_lsb;
    logic [SLICE_LSB_W-1:0] slice_lsb;
  } feb_hdr1_t;

  // L1-L2 header word 0: bits 31:26 type, 25:22 L1 port, 21:14 board,
  // 13:8 payload format, 7:0 packet number. Words 1 and 2 hold the full
  // 32-bit frame and slice numbers.
  typedef struct packed {
    logic [5:0] pkt_type;
    logic [3:0] l1_port;
    logic [7:0] board_id;
    logic [5:0] fmt_id;
    logic [7:0] pkt_num;
  } l1l2_hdr0_t;

  localparam int unsigned L1L2_HDR_WORDS = 3;

  // Packet type of a hit-data packet (value chosen by this design).
  localparam logic [5:0] PKT_TYPE_DATA = 6'h01;

  // Synchronous commands on the serial TSS command line. A command is a start
  // bit '1' followed by the 2-bit code, MSB first. Set Next Frame continues
  // with the 32-bit frame number, MSB first, and one even-parity bit.
  typedef enum logic [1:0] {
    CMD_NONE = 2'd0,
    CMD_SOF  = 2'd1,   // Start of Frame
    CMD_SOS  = 2'd2,   // Start of Slice
    CMD_SNF  = 2'd3    // Set Next Frame
  } tss_cmd_e;

  localparam int unsigned CMD_SHORT_BITS = 3;        // start + code
  localparam int unsigned CMD_SNF_BITS   = 3 + 32 + 1;

  // Ethernet II between L1 and L2: EtherType of the readout traffic (the
  // IEEE "local experimental" value; the real value is not fixed).
  localparam logic [15:0] ETHERTYPE_SPD = 16'h88B5;
  localparam int unsigned ETH_HDR_WORDS = 4;  // 14 header bytes + 2 pad bytes

  // One CRC-32 step over a 32-bit word, most significant byte first.
  function automatic logic [31:0] crc32_word(input logic [31:0] crc_in, input logic [31:0] w);
    logic [31:0] c;
    logic [7:0]  b;
    c = crc_in;
    for (int k = 3; k >= 0; k--) begin
      b = w[8*k +: 8];
      for (int i = 0; i < 8; i++) begin
        if (c[0] ^ b[i]) c = (c >> 1) ^ 32'hEDB88320;
        else             c = c >> 1;
      end
    end
    return c;
  endfunction

  localparam logic [31:0] CRC32_INIT = 32'hFFFF_FFFF;

  // Restore a counter value from its W least significant bits: the largest
  // value not above ref_full whose low W bits equal lsb. Data reach the
  // concentrator after the command that opened their slice, never before.
  function automatic logic [31:0] extend_lsb(input logic [31:0] ref_full, input logic [31:0] lsb,
                                             input int unsigned w);
    logic [31:0] mask, diff;
    mask = (w >= 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 32'd1);
    diff = (ref_full - lsb) & mask;
    return ref_full - diff;
  endfunction

endpackage
