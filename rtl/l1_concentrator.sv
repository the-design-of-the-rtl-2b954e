// l1_concentrator: first-level data concentrator (FPGA logic of one L1 board).
//
// Collects the data of N_PORTS = 8 front-end boards and sends it, merged and
// ordered by slice, to the L2 concentrator over one Ethernet II link. Inside:
//   tss_node          generates Set Next Frame / Start of Frame / Start of
//                     Slice on the command line shared by the 8 FEE, from the
//                     run schedule delivered by the White Rabbit node;
//   l1_data_receiver  one per FEE link: CRC check, loss detection, buffering;
//   l1_merge          slice-ordered merge, full frame/slice numbers, L1-L2
//                     header with the port number;
//   eth_tx            Ethernet II framing towards L2;
//   l1_reg_control    Arm/Disarm reset lines, port enables, per-FEE status.
// The White Rabbit core, the 1G Ethernet of the TSS network, the LVDS
// serdes, the 10G MAC/PHY and the firmware-reconfiguration path are outside
// this module: their signals are its ports. fee_rst[p] is the reset line to
// FEE p: high while the FEE is disarmed or the L1 is in reset. The whole
// board runs on the 125 MHz global clock.
// Lint note: the Start of Frame / Start of Slice pulses of tss_node are left
// open here (PINCONNECTEMPTY); the L1 needs only the frame and slice numbers.
module l1_concentrator
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_PORTS    = FEE_PER_L1,
  parameter int unsigned DATA_DEPTH = 512,
  parameter logic [47:0] SRC_MAC    = 48'h02_00_00_00_01_00,
  parameter logic [47:0] DST_MAC    = 48'h02_00_00_00_02_00
) (
  input  logic        clk,
  input  logic        rst,
  // schedule from the White Rabbit node
  input  logic        run_start,
  input  logic        run_stop,
  input  logic [31:0] first_frame,
  input  logic [31:0] slice_len,
  input  logic [31:0] slices_per_frame,
  // FEE side
  output logic        fee_cmd,
  output logic [N_PORTS-1:0] fee_rst,
  input  logic        rx_valid [N_PORTS],
  input  word_t       rx_data  [N_PORTS],
  input  logic        rx_last  [N_PORTS],
  // register access (control path from L2)
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [11:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  output logic        alarm,
  // Ethernet frames to L2
  output logic        eth_valid,
  output word_t       eth_data,
  output logic        eth_last,
  input  logic        eth_ready,
  // status
  output logic        running,
  output logic [31:0] cur_frame,
  output logic [31:0] cur_slice,
  output logic [31:0] cnt_timeouts,    // merge went on without a silent port
  output logic [31:0] cnt_frames       // Ethernet frames sent
);
  logic [31:0] prev_frame_slices;
  logic [N_PORTS-1:0] arm, port_en;
  logic [31:0] timeout_cycles;
  logic [47:0] src_mac, dst_mac;

  tss_node u_tss (
    .clk, .rst, .run_start, .run_stop, .first_frame, .slice_len, .slices_per_frame,
    .cmd_out(fee_cmd), .running, .cur_frame, .cur_slice, .prev_frame_slices,
    .sof_pulse(), .sos_pulse());

  assign fee_rst = ~arm | {N_PORTS{rst}};

  logic        desc_valid [N_PORTS];
  logic        desc_ready [N_PORTS];
  feb_hdr0_t   desc_h0    [N_PORTS];
  feb_hdr1_t   desc_h1    [N_PORTS];
  logic [15:0] desc_len   [N_PORTS];
  logic        pl_valid   [N_PORTS];
  word_t       pl_data    [N_PORTS];
  logic        pl_ready   [N_PORTS];
  logic [31:0] c_pkts [N_PORTS], c_words [N_PORTS], c_crc [N_PORTS], c_lost [N_PORTS], c_ovf [N_PORTS];

  for (genvar p = 0; p < N_PORTS; p++) begin : g_rx
    l1_data_receiver #(.DATA_DEPTH(DATA_DEPTH)) u_rx (
      .clk, .rst, .enable(port_en[p]),
      .rx_valid(rx_valid[p]), .rx_data(rx_data[p]), .rx_last(rx_last[p]),
      .desc_valid(desc_valid[p]), .desc_ready(desc_ready[p]),
      .desc_h0(desc_h0[p]), .desc_h1(desc_h1[p]), .desc_len(desc_len[p]),
      .pl_valid(pl_valid[p]), .pl_data(pl_data[p]), .pl_ready(pl_ready[p]),
      .cnt_pkts(c_pkts[p]), .cnt_words(c_words[p]), .cnt_crc_err(c_crc[p]),
      .cnt_lost(c_lost[p]), .cnt_ovf(c_ovf[p]));
  end

  logic  m_valid, m_last, m_ready;
  word_t m_data;

  l1_merge #(.N_PORTS(N_PORTS)) u_merge (
    .clk, .rst, .port_en, .timeout_cycles, .cur_frame, .cur_slice, .prev_frame_slices,
    .desc_valid, .desc_ready, .desc_h0, .desc_h1, .desc_len, .pl_valid, .pl_data, .pl_ready,
    .out_valid(m_valid), .out_data(m_data), .out_last(m_last), .out_ready(m_ready),
    .cnt_timeouts);

  eth_tx u_eth (
    .clk, .rst, .src_mac, .dst_mac,
    .in_valid(m_valid), .in_data(m_data), .in_last(m_last), .in_ready(m_ready),
    .out_valid(eth_valid), .out_data(eth_data), .out_last(eth_last), .out_ready(eth_ready),
    .cnt_frames);

  l1_reg_control #(.N_PORTS(N_PORTS), .SRC_MAC_DEFAULT(SRC_MAC), .DST_MAC_DEFAULT(DST_MAC)) u_regs (
    .clk, .rst, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .arm, .port_en, .timeout_cycles, .src_mac, .dst_mac, .alarm,
    .cnt_pkts(c_pkts), .cnt_words(c_words), .cnt_crc_err(c_crc), .cnt_lost(c_lost), .cnt_ovf(c_ovf));
endmodule
