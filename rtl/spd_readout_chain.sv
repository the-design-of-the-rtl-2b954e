// spd_readout_chain: one readout chain of the SPD free-running DAQ.
//
// A readout chain carries the data of part of the detector from the
// front-end electronics (FEE) to one readout computer:
//
//   FEE (x8 per L1) --1 Gbit/s link--> L1 concentrator (x N_L1)
//        ^  command line, reset line        | Ethernet II, 10 Gbit/s
//        |                                  v
//   TSS node in each L1              L2 concentrator --> host memory (PCIe)
//
// Per FEE the chain holds the FEE's interface logic: the synchronous-
// command receiver (fee_cmd_receiver) and the packet framer (feb_packet_tx).
// The detector-specific front-end logic stays outside, and its hit words are
// inputs of this module. Each L1 concentrator (l1_concentrator) generates the
// synchronous commands for its 8 FEE from the run schedule, receives and
// checks their packets, merges them in slice order and sends them to the L2.
// The L2 (l2_concentrator) checks the links, sorts the packets into whole
// slices and writes the slices into a ring buffer in host memory.
//
// The schedule inputs stand for the White Rabbit node of every L1. All L1s
// receive the same broadcast schedule and run on the same global clock, so
// one set of inputs feeds them all. The register buses stand for the control
// path from the readout computer through L2 to each L1. All logic runs on one
// clock, the 125 MHz global clock. A real L2 would run its links and PCIe in
// faster clock domains.
// Lint note: next_valid and next_frame of the FEE command receivers are not
// used in the chain (UNUSEDSIGNAL); they exist for the FEE's own logic.
module spd_readout_chain
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_L1      = 8,     // L1 concentrators on this L2 (8..16)
  parameter int unsigned NF        = FEE_PER_L1,
  parameter int unsigned NBINS     = 8,
  parameter int unsigned BIN_WORDS = 2048
) (
  input  logic        clk,
  input  logic        rst,
  // run schedule (White Rabbit nodes)
  input  logic        run_start,
  input  logic        run_stop,
  input  logic [31:0] first_frame,
  input  logic [31:0] slice_len,
  input  logic [31:0] slices_per_frame,
  // front-end logic
  input  logic [9:0]  fee_board_id [N_L1][NF],
  input  logic [5:0]  fee_fmt_id   [N_L1][NF],
  input  logic        hit_valid    [N_L1][NF],
  input  word_t       hit_data     [N_L1][NF],
  output logic        fee_in_frame [N_L1][NF],
  output logic [31:0] fee_hits_lost[N_L1][NF],
  output logic        fee_parity_err[N_L1][NF],
  // L1 register buses and alarms
  input  logic        reg_wr    [N_L1],
  input  logic        reg_rd    [N_L1],
  input  logic [11:0] reg_addr  [N_L1],
  input  logic [31:0] reg_wdata [N_L1],
  output logic [31:0] reg_rdata [N_L1],
  output logic        reg_rvalid[N_L1],
  output logic        l1_alarm  [N_L1],
  output logic [31:0] l1_timeouts [N_L1],
  output logic        l1_running  [N_L1],
  output logic [31:0] l1_frame    [N_L1],
  output logic [31:0] l1_slice    [N_L1],
  output logic [31:0] l1_eth_frames [N_L1],
  // L2 control
  input  logic [N_L1-1:0] link_en,
  input  logic        flush_all,
  input  logic [63:0] ring_base,
  input  logic [31:0] ring_words,
  input  logic [31:0] rd_count,
  // host memory writes (PCIe)
  output logic        req_valid,
  output logic [63:0] req_addr,
  output word_t       req_data,
  input  logic        req_ready,
  output logic [31:0] wr_count,
  output logic        slice_done,
  // L2 status
  output logic [31:0] l2_frames  [N_L1],
  output logic [31:0] l2_fcs_err [N_L1],
  output logic [31:0] l2_drop    [N_L1],
  output logic [31:0] cnt_slices,
  output logic [31:0] cnt_late,
  output logic [31:0] cnt_ovf,
  output logic [31:0] cnt_stall,
  output logic [31:0] cnt_early,
  output logic [31:0] cnt_full_cycles
);
  logic  lk_valid [N_L1];
  word_t lk_data  [N_L1];
  logic  lk_last  [N_L1];

  for (genvar i = 0; i < N_L1; i++) begin : g_l1
    logic          fee_cmd;
    logic [NF-1:0] fee_rst;
    logic          rx_valid [NF];
    word_t         rx_data  [NF];
    logic          rx_last  [NF];

    for (genvar p = 0; p < NF; p++) begin : g_fee
      logic        in_frame, next_valid, slice_end;
      logic [31:0] frame_num, slice_num, time_cnt, next_frame, closed_frame, closed_slice;

      fee_cmd_receiver u_cmd (
        .clk, .fee_rst(fee_rst[p]), .cmd_in(fee_cmd),
        .in_frame, .frame_num, .slice_num, .time_cnt, .next_valid, .next_frame,
        .slice_end, .closed_frame, .closed_slice, .parity_err(fee_parity_err[i][p]));

      feb_packet_tx u_tx (
        .clk, .rst(fee_rst[p]), .board_id(fee_board_id[i][p]), .fmt_id(fee_fmt_id[i][p]),
        .in_frame, .frame_num, .slice_num, .time_cnt, .slice_end, .closed_frame, .closed_slice,
        .hit_valid(hit_valid[i][p]), .hit_data(hit_data[i][p]),
        .tx_valid(rx_valid[p]), .tx_data(rx_data[p]), .tx_last(rx_last[p]),
        .hits_lost(fee_hits_lost[i][p]));

      assign fee_in_frame[i][p] = in_frame;
    end

    l1_concentrator #(.N_PORTS(NF),
                      .SRC_MAC(48'h02_00_00_00_01_00 | 48'(i)),
                      .DST_MAC(48'h02_00_00_00_02_00 | 48'(i))) u_l1 (
      .clk, .rst, .run_start, .run_stop, .first_frame, .slice_len, .slices_per_frame,
      .fee_cmd, .fee_rst, .rx_valid, .rx_data, .rx_last,
      .reg_wr(reg_wr[i]), .reg_rd(reg_rd[i]), .reg_addr(reg_addr[i]), .reg_wdata(reg_wdata[i]),
      .reg_rdata(reg_rdata[i]), .reg_rvalid(reg_rvalid[i]), .alarm(l1_alarm[i]),
      .eth_valid(lk_valid[i]), .eth_data(lk_data[i]), .eth_last(lk_last[i]), .eth_ready(1'b1),
      .running(l1_running[i]), .cur_frame(l1_frame[i]), .cur_slice(l1_slice[i]),
      .cnt_timeouts(l1_timeouts[i]), .cnt_frames(l1_eth_frames[i]));
  end

  l2_concentrator #(.N_LINKS(N_L1), .NBINS(NBINS), .BIN_WORDS(BIN_WORDS)) u_l2 (
    .clk, .rst, .lk_valid, .lk_data, .lk_last, .link_en, .flush_all,
    .ring_base, .ring_words, .rd_count,
    .req_valid, .req_addr, .req_data, .req_ready, .wr_count, .slice_done,
    .cnt_frames(l2_frames), .cnt_fcs_err(l2_fcs_err), .cnt_drop(l2_drop),
    .cnt_slices, .cnt_late, .cnt_ovf, .cnt_stall, .cnt_early, .cnt_full_cycles);
endmodule
