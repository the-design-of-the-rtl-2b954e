// l2_concentrator: second-level data concentrator (FPGA logic of one L2 card
// in a readout computer).
//
// Receives the Ethernet II links of N_LINKS L1 concentrators (8 to 16 per
// card), removes and checks the framing (eth_rx), arbitrates between the links
// packet by packet (l2_arbitrator), gathers the packets into complete slices
// (l2_data_sort), and writes the slices into a ring buffer in the host's
// memory (l2_dma). The 10G MAC/PHYs, the DDR4 behind the sort buffer, the PCIe
// core and the control path back to the L1s (register and reconfiguration
// messages) are outside this module: their signals are its ports.
// link_en selects the links whose slices must be complete before a slice
// is sent; flush_all sends open slices at the end of a run.
module l2_concentrator
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_LINKS   = 8,
  parameter int unsigned RX_DEPTH  = 1024,
  parameter int unsigned NBINS     = 8,
  parameter int unsigned BIN_WORDS = 2048
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        lk_valid [N_LINKS],
  input  word_t       lk_data  [N_LINKS],
  input  logic        lk_last  [N_LINKS],
  input  logic [N_LINKS-1:0] link_en,
  input  logic        flush_all,
  input  logic [63:0] ring_base,
  input  logic [31:0] ring_words,
  input  logic [31:0] rd_count,
  output logic        req_valid,
  output logic [63:0] req_addr,
  output word_t       req_data,
  input  logic        req_ready,
  output logic [31:0] wr_count,
  output logic        slice_done,
  // status
  output logic [31:0] cnt_frames   [N_LINKS],
  output logic [31:0] cnt_fcs_err  [N_LINKS],
  output logic [31:0] cnt_drop     [N_LINKS],
  output logic [31:0] cnt_slices,
  output logic [31:0] cnt_late,
  output logic [31:0] cnt_ovf,
  output logic [31:0] cnt_stall,
  output logic [31:0] cnt_early,
  output logic [31:0] cnt_full_cycles
);
  localparam int unsigned LW = $clog2(N_LINKS);

  logic  r_valid [N_LINKS];
  word_t r_data  [N_LINKS];
  logic  r_last  [N_LINKS];
  logic  r_ready [N_LINKS];

  for (genvar l = 0; l < N_LINKS; l++) begin : g_rx
    eth_rx #(.DEPTH(RX_DEPTH)) u_rx (
      .clk, .rst, .in_valid(lk_valid[l]), .in_data(lk_data[l]), .in_last(lk_last[l]),
      .out_valid(r_valid[l]), .out_data(r_data[l]), .out_last(r_last[l]), .out_ready(r_ready[l]),
      .cnt_frames(cnt_frames[l]), .cnt_fcs_err(cnt_fcs_err[l]), .cnt_drop(cnt_drop[l]));
  end

  logic          a_valid, a_last, a_ready;
  word_t         a_data;
  logic [LW-1:0] a_link;

  l2_arbitrator #(.N_LINKS(N_LINKS)) u_arb (
    .clk, .rst, .in_valid(r_valid), .in_data(r_data), .in_last(r_last), .in_ready(r_ready),
    .out_valid(a_valid), .out_data(a_data), .out_last(a_last), .out_link(a_link), .out_ready(a_ready));

  logic  s_valid, s_last, s_ready;
  word_t s_data;

  l2_data_sort #(.N_LINKS(N_LINKS), .NBINS(NBINS), .BIN_WORDS(BIN_WORDS)) u_sort (
    .clk, .rst, .link_en, .flush_all,
    .in_valid(a_valid), .in_data(a_data), .in_last(a_last), .in_link(a_link), .in_ready(a_ready),
    .out_valid(s_valid), .out_data(s_data), .out_last(s_last), .out_ready(s_ready),
    .cnt_slices, .cnt_late, .cnt_ovf, .cnt_stall, .cnt_early);

  l2_dma u_dma (
    .clk, .rst, .ring_base, .ring_words, .rd_count,
    .in_valid(s_valid), .in_data(s_data), .in_last(s_last), .in_ready(s_ready),
    .req_valid, .req_addr, .req_data, .req_ready, .wr_count, .slice_done, .cnt_full_cycles);
endmodule
