// tb_l1_concentrator: one L1 board with its eight front-end boards.
// The FEE are built from the front-end RTL blocks (fee_cmd_receiver and
// feb_packet_tx), driven by the L1's own command line and reset lines; each
// one produces hit words {port, sequence} at random while its frame is open.
// Sequence:
//   registers: TIMEOUT = 600, ARM = 0x7F (FEE 7 stays disarmed, so it never
//   sees a frame, but its port stays enabled and the merge must time out);
//   run of 3 frames x 4 slices of 400 cycles starting at frame 5 (the stop
//   request comes in frame 6; frame 7 has already been announced and runs);
//   after the first frame PORT_EN = 0x7F: the timeouts stop.
// The Ethernet output, back-pressured at random, is decoded: header words,
// EtherType and FCS (bit-wise reference CRC); L1-L2 header port, full frame
// and slice numbers; the (frame, slice) order must never go back. Per FEE the
// concatenated payloads must equal the hits it produced, and every FEE 0..6
// must report every one of the 12 slices.
`include "tb_common.svh"
module tb_l1_concentrator;
  import spd_daq_pkg::*;
  `include "tb_crc_ref.svh"
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  localparam int NP = FEE_PER_L1;
  logic rst, run_start, run_stop, fee_cmd, running, alarm, reg_wr, reg_rd, reg_rvalid;
  logic [31:0] first_frame, slice_len, slices_per_frame, cur_frame, cur_slice, cnt_timeouts, cnt_frames;
  logic [NP-1:0] fee_rst;
  logic rx_valid [NP], rx_last [NP];
  word_t rx_data [NP];
  logic [11:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic eth_valid, eth_last, eth_ready;
  word_t eth_data;

  l1_concentrator dut (.*);

  // front-end boards
  logic        in_frame [NP], slice_end [NP], hit_valid [NP];
  logic [31:0] frame_num [NP], slice_num [NP], time_cnt [NP], closed_frame [NP], closed_slice [NP], hits_lost [NP];
  word_t       hit_data [NP];
  for (genvar p = 0; p < NP; p++) begin : g_fee
    fee_cmd_receiver u_rx (
      .clk, .fee_rst(fee_rst[p]), .cmd_in(fee_cmd), .in_frame(in_frame[p]),
      .frame_num(frame_num[p]), .slice_num(slice_num[p]), .time_cnt(time_cnt[p]),
      .next_valid(), .next_frame(), .slice_end(slice_end[p]),
      .closed_frame(closed_frame[p]), .closed_slice(closed_slice[p]), .parity_err());
    feb_packet_tx u_tx (
      .clk, .rst, .board_id(10'(16 + p)), .fmt_id(6'd3),
      .in_frame(in_frame[p]), .frame_num(frame_num[p]), .slice_num(slice_num[p]), .time_cnt(time_cnt[p]),
      .slice_end(slice_end[p]), .closed_frame(closed_frame[p]), .closed_slice(closed_slice[p]),
      .hit_valid(hit_valid[p]), .hit_data(hit_data[p]),
      .tx_valid(rx_valid[p]), .tx_data(rx_data[p]), .tx_last(rx_last[p]), .hits_lost(hits_lost[p]));
  end

  word_t sent [NP][$];
  int    seq [NP];
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      hit_valid[p] = 0;
      if (!rst && in_frame[p] && !slice_end[p] && $urandom % 40 == 0) begin
        hit_valid[p] = 1; hit_data[p] = {4'(p), 28'(seq[p])};
        sent[p].push_back(hit_data[p]); seq[p]++;
      end
    end
  end

  // Ethernet sink and decoder
  word_t got [NP][$];
  word_t fr [$];
  int    n_eth = 0, slices_seen [NP];
  logic [63:0] last_key = 0;
  always @(negedge clk) begin
    eth_ready = ($urandom % 4 != 0);
    #2;
    if (!rst && eth_valid && eth_ready) begin
      fr.push_back(eth_data);
      if (eth_last) begin
        word_t body [$];
        logic [31:0] fcs;
        l1l2_hdr0_t h;
        n_eth++;
        body = fr[0:fr.size()-2];
        fcs  = ref_crc32(body);
        `TB_CHECK(fr[$] == {fcs[7:0], fcs[15:8], fcs[23:16], fcs[31:24]}, "FCS")
        `TB_CHECK(fr[0] == 32'h0200_0000 && fr[1] == 32'h0200_0200 && fr[2] == 32'h0000_0100
                  && fr[3] == {ETHERTYPE_SPD, 16'h0}, "Ethernet header")
        h = fr[4];
        `TB_CHECK(h.pkt_type == PKT_TYPE_DATA && h.board_id == 8'(16 + h.l1_port) && h.fmt_id == 3, "L1-L2 header fields")
        `TB_CHECK({fr[5], fr[6]} >= last_key, $sformatf("order: %0d.%0d after %0d.%0d", fr[5], fr[6], last_key[63:32], last_key[31:0]))
        `TB_CHECK(fr[5] >= 5 && fr[5] <= 7 && fr[6] < 4, $sformatf("frame %0d slice %0d", fr[5], fr[6]))
        last_key = {fr[5], fr[6]};
        if (fr.size() > 8) for (int i = 7; i < fr.size() - 1; i++) got[h.l1_port].push_back(fr[i]);
        slices_seen[h.l1_port]++;
        fr = {};
      end
    end
  end

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask

  `TB_WATCHDOG(40000)

  logic [31:0] to_after_disable;
  initial begin
    rst = 1; run_start = 0; run_stop = 0; first_frame = 5; slice_len = 400; slices_per_frame = 4;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0; eth_ready = 0;
    for (int p = 0; p < NP; p++) begin hit_valid[p] = 0; hit_data[p] = 0; seq[p] = 0; slices_seen[p] = 0; end
    repeat (4) @(posedge clk); rst = 0;
    wr(12'h002, 600);
    wr(12'h000, 32'h7F);
    repeat (5) @(posedge clk);
    `TB_CHECK(fee_rst == 8'h80, "reset lines follow ARM")
    @(negedge clk); run_start = 1; @(negedge clk); run_start = 0;
    wait (cur_frame == 6);
    `TB_CHECK(cnt_timeouts > 0, "merge timed out on the silent FEE")
    wr(12'h001, 32'h7F);
    repeat (1000) @(posedge clk);
    to_after_disable = cnt_timeouts;
    wait (cur_frame == 6 && cur_slice == 3);  // frame 7 is already announced
    @(negedge clk); run_stop = 1; @(negedge clk); run_stop = 0;
    wait (!running);
    repeat (3000) @(posedge clk);
    `TB_CHECK(cnt_timeouts == to_after_disable, "no timeouts once the port is disabled")
    for (int p = 0; p < NP - 1; p++) begin
      `TB_CHECK(got[p] == sent[p], $sformatf("FEE %0d payload: %0d words, %0d sent", p, got[p].size(), sent[p].size()))
      `TB_CHECK(slices_seen[p] == 12, $sformatf("FEE %0d reported %0d slices", p, slices_seen[p]))
      `TB_CHECK(hits_lost[p] == 0, "no hits lost in the FEE")
    end
    `TB_CHECK(slices_seen[NP-1] == 0 && sent[NP-1].size() == 0, "disarmed FEE silent")
    `TB_CHECK(cnt_frames == n_eth && n_eth == 7 * 12, $sformatf("%0d Ethernet frames", n_eth))
    `TB_FINISH
  end
endmodule
