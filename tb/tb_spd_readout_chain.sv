// tb_spd_readout_chain: end-to-end and full-size test of one readout chain at
// the default size: 8 L1 concentrators of 8 front-end boards (64 FEE) and one
// L2 writing to host memory. Runs at the chain's default parameters; only the
// run schedule (slices of 600 cycles, 4 slices per frame) is chosen here.
//
// Scenario (hits at random, about 2 per FEE and slice):
//   - L1 0..6 get TIMEOUT = 1500 cycles and arm all FEE; L1 7 gets 6000
//     cycles (10 slices) and leaves FEE 7 disarmed, so L1 7 waits for it once
//     and falls 10 slices behind the others;
//   - the L2 bins fill with the slices the lagging link has not finished:
//     the sort input stalls, the oldest slice is sent early and the packets
//     L1 7 delivers later for it are dropped as late;
//   - in frame 2 FEE 7 of L1 7 is armed; it joins at the first frame
//     announced after that;
//   - in frame 5 slice 1 every FEE produces about 60 hits, more than a slice
//     bin holds: packets are removed and the slice is marked lost;
//   - from frame 6 the host stops reading its 2560-word ring (the smallest
//     ring must hold one full slice bin) for 16000 cycles, so the ring runs
//     full and the DMA back-pressures the sort;
//   - the run is stopped as frame 13 starts, before frame 14 is announced,
//     so the next start of frame finds no preloaded number and ends the run
//     (13 frames, 52 slices);
//   - the L1 7 backlog arrives while the L2 is stalled, so the L2 input
//     buffer of link 7 overflows and whole Ethernet frames are dropped
//     there. These losses are not flagged in the slice blocks (the L2 cannot
//     tell which slice a dropped frame belonged to), so the completeness
//     check below covers only links that lost no frame;
//   - flush_all, held for 3000 cycles, sends the slices still open at the end.
// Hit words are {8'hA5, L1[2:0], FEE[2:0], sequence[17:0]}, so the host
// model can tell them from L1-L2 headers ([31:26] = packet type 1).
// Checks on the data in host memory: slice blocks in increasing order; every
// packet in a block belongs to the block's frame and slice; per FEE the hits
// arrive in sequence order, without duplicates, and only hits that were sent;
// a block without flags holds a packet of every armed FEE; every hit is
// either delivered or lies in a block flagged as lost or in a late packet.
// Each mechanism is counted and the test fails if one never happened:
// merge timeout, run start and stop, frame changes, sort stall, early send,
// late drop, bin overflow, ring full, FEE arming during the run, L2 link
// buffer overflow, flush_all.
`include "tb_common.svh"
module tb_spd_readout_chain;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  localparam int NL = 8, NF = FEE_PER_L1, RW = 2560;

  logic rst, run_start, run_stop, flush_all, req_valid, req_ready, slice_done;
  logic [31:0] first_frame, slice_len, slices_per_frame;
  logic [9:0]  fee_board_id [NL][NF];
  logic [5:0]  fee_fmt_id   [NL][NF];
  logic        hit_valid    [NL][NF];
  word_t       hit_data     [NL][NF];
  logic        fee_in_frame [NL][NF];
  logic [31:0] fee_hits_lost[NL][NF];
  logic        fee_parity_err[NL][NF];
  logic        reg_wr [NL], reg_rd [NL], reg_rvalid [NL], l1_alarm [NL], l1_running [NL];
  logic [11:0] reg_addr [NL];
  logic [31:0] reg_wdata [NL], reg_rdata [NL], l1_timeouts [NL], l1_frame [NL], l1_slice [NL], l1_eth_frames [NL];
  logic [NL-1:0] link_en;
  logic [63:0] ring_base, req_addr;
  logic [31:0] ring_words, rd_count, wr_count;
  word_t       req_data;
  logic [31:0] l2_frames [NL], l2_fcs_err [NL], l2_drop [NL];
  logic [31:0] cnt_slices, cnt_late, cnt_ovf, cnt_stall, cnt_early, cnt_full_cycles;

  spd_readout_chain dut (.*);

  // ---------------- front-end hit sources
  int  seq [NL][NF];
  bit  burst = 0;
  // the hit word follows the sequence counter, which moves on after each
  // hit has been taken
  for (genvar gi = 0; gi < NL; gi++) begin : g_hd
    for (genvar gp = 0; gp < NF; gp++) begin : g_hp
      assign hit_data[gi][gp] = {8'hA5, 3'(gi), 3'(gp), 18'(seq[gi][gp])};
    end
  end
  always @(negedge clk) begin
    for (int i = 0; i < NL; i++)
      for (int p = 0; p < NF; p++) begin
        if (hit_valid[i][p]) seq[i][p]++;
        hit_valid[i][p] = !rst && fee_in_frame[i][p] && ($urandom % (burst ? 10 : 300) == 0);
      end
  end

  // ---------------- host memory and ring reader
  word_t mem [RW];
  int    n_written = 0, n_read = 0;
  bit    host_pause = 0;
  word_t host [$];
  always @(negedge clk) begin
    req_ready = ($urandom % 8 != 0);
    #2;
    if (!rst && req_valid && req_ready) begin
      mem[n_written % RW] = req_data;
      n_written++;
    end
  end
  always @(posedge clk)
    if (!rst && !host_pause && n_read < wr_count) begin
      host.push_back(mem[n_read % RW]);
      n_read++;
      rd_count <= n_read;
    end

  // ---------------- register access
  task automatic wr(input int i, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); reg_wr[i] = 1; reg_addr[i] = a; reg_wdata[i] = d;
    @(negedge clk); reg_wr[i] = 0;
  endtask

  // ---------------- mechanism counters
  int m_frames = 0, m_stopped = 0, m_armed_join = 0;
  logic [31:0] last_frame = 0;
  logic was_running = 0;
  always @(posedge clk) if (!rst) begin
    if (l1_running[0] && l1_frame[0] != last_frame) begin m_frames++; last_frame = l1_frame[0]; end
    if (was_running && !l1_running[0]) m_stopped++;
    was_running = l1_running[0];
    if (fee_in_frame[7][7]) m_armed_join = 1;
  end

  `TB_WATCHDOG(200000)
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (!rst && cyc % 5000 == 0)
    $display("t=%0t l1 %0d.%0d l1_7 %0d.%0d run %0d/%0d slices %0d stall %0d early %0d late %0d ovf %0d wr %0d rd %0d",
             $time, l1_frame[0], l1_slice[0], l1_frame[7], l1_slice[7], l1_running[0], l1_running[7], cnt_slices, cnt_stall, cnt_early, cnt_late, cnt_ovf, wr_count, n_read);

  int n_blocks = 0, n_flagged = 0, n_complete = 0, bad_order = 0, bad_pkt = 0, bad_seq = 0, incomplete = 0;
  int parity = 0;
  int next_seq [NL][NF];
  initial begin
    rst = 1; run_start = 0; run_stop = 0; flush_all = 0;
    first_frame = 1; slice_len = 600; slices_per_frame = 4;
    link_en = '1; ring_base = 64'h10_0000; ring_words = RW; rd_count = 0; req_ready = 0;
    for (int i = 0; i < NL; i++) begin
      reg_wr[i] = 0; reg_rd[i] = 0; reg_addr[i] = 0; reg_wdata[i] = 0;
      for (int p = 0; p < NF; p++) begin
        fee_board_id[i][p] = 10'(8 * i + p); fee_fmt_id[i][p] = 6'd1;
        hit_valid[i][p] = 0; seq[i][p] = 0; next_seq[i][p] = 0;
      end
    end
    foreach (mem[k]) mem[k] = 0;
    repeat (5) @(posedge clk); rst = 0;
    for (int i = 0; i < NL; i++) begin
      wr(i, 12'h002, (i == NL - 1) ? 6000 : 1500);
      wr(i, 12'h000, (i == NL - 1) ? 32'h7F : 32'hFF);
    end
    @(negedge clk); run_start = 1; @(negedge clk); run_start = 0;
    // frame 1: normal; frame 2 slice 1: hit burst; then host pause
    wait (l1_frame[0] == 2 && l1_slice[0] == 2);
    wr(NL - 1, 12'h000, 32'hFF);
    $display("t=%0t FEE 7 of L1 7 armed", $time);
    wait (l1_frame[0] == 5 && l1_slice[0] == 1);
    burst = 1;
    $display("t=%0t burst", $time);
    wait (l1_slice[0] == 2);
    burst = 0;
    wait (l1_frame[0] == 6);
    host_pause = 1; repeat (16000) @(posedge clk); host_pause = 0;
    wait (l1_frame[0] == 13);
    @(negedge clk); run_stop = 1; @(negedge clk); run_stop = 0;
    wait (!l1_running[0]);
    $display("t=%0t run over", $time);
    // let the lagging L1 drain, then flush
    wait (!l1_running[NL - 1]);
    repeat (30000) @(posedge clk);
    $display("t=%0t flush", $time);
    flush_all = 1; repeat (3000) @(posedge clk); flush_all = 0;
    repeat (5000) @(posedge clk);

    // ---------------- check host data
    begin
      logic [63:0] prev_key = 0;
      while (host.size() >= 3) begin
        logic [31:0] bf, bs;
        logic [7:0]  flags;
        int cnt;
        bit have [NL][NF];
        int pi, pp;
        bit in_pkt;
        foreach (have[i, p]) have[i][p] = 0;
        bf = host.pop_front(); bs = host.pop_front();
        flags = host[0][31:24]; cnt = host[0][15:0]; void'(host.pop_front());
        n_blocks++;
        if (n_blocks > 1 && {bf, bs} <= prev_key) bad_order++;
        prev_key = {bf, bs};
        if (flags != 0) n_flagged++;
        in_pkt = 0; pi = 0; pp = 0;
        for (int k = 0; k < cnt; k++) begin
          word_t w;
          w = host.pop_front();
          if (w[31:24] == 8'hA5) begin
            if (!in_pkt || w[23:21] != 3'(pi) || w[20:18] != 3'(pp)) bad_pkt++;
            else begin
              if (int'(w[17:0]) < next_seq[pi][pp] || int'(w[17:0]) > seq[pi][pp]) bad_seq++;
              next_seq[pi][pp] = int'(w[17:0]) + 1;
            end
          end else begin
            l1l2_hdr0_t h;
            h = w;
            if (h.pkt_type != PKT_TYPE_DATA || k + 2 >= cnt) begin bad_pkt++; break; end
            pi = int'(h.board_id) / NF; pp = int'(h.board_id) % NF;
            if (host[0] != bf || host[1] != bs || pi >= NL || 32'(h.l1_port) != 32'(pp)) bad_pkt++;
            void'(host.pop_front()); void'(host.pop_front()); k += 2;
            in_pkt = 1;
            if (pi < NL) have[pi][pp] = 1;
          end
        end
        if (flags == 0) begin
          int missing = 0;
          foreach (have[i, p]) if (!have[i][p] && l2_drop[i] == 0 && !(i == NL - 1 && p == NF - 1)) missing++;
          if (missing != 0) incomplete++; else n_complete++;
        end
      end
    end
    foreach (fee_parity_err[i, p]) parity += fee_parity_err[i][p];

    `TB_CHECK(n_read == n_written && wr_count == n_written, "host read everything")
    `TB_CHECK(host.size() == 0, $sformatf("%0d words left after the last block", host.size()))
    `TB_CHECK(n_blocks == cnt_slices, $sformatf("%0d blocks, %0d slices sent", n_blocks, cnt_slices))
    `TB_CHECK(n_blocks == 52, $sformatf("%0d slice blocks for 13 frames of 4 slices", n_blocks))
    `TB_CHECK(bad_order == 0, $sformatf("%0d blocks out of order", bad_order))
    `TB_CHECK(bad_pkt == 0, $sformatf("%0d malformed or misplaced packets", bad_pkt))
    `TB_CHECK(bad_seq == 0, $sformatf("%0d hits out of sequence", bad_seq))
    `TB_CHECK(incomplete == 0, $sformatf("%0d unflagged blocks miss an FEE", incomplete))
    `TB_CHECK(n_complete > 0, "complete blocks seen")
    foreach (l2_fcs_err[i]) `TB_CHECK(l2_fcs_err[i] == 0 && l2_frames[i] + l2_drop[i] == l1_eth_frames[i], $sformatf("link %0d frame count", i))
    `TB_CHECK(parity == 0, "no command parity errors")
    // mechanisms
    $display("mechanisms: timeouts=%0d frames=%0d stopped=%0d stall=%0d early=%0d late=%0d ovf=%0d full=%0d join=%0d flagged=%0d",
             l1_timeouts[NL - 1], m_frames, m_stopped, cnt_stall, cnt_early, cnt_late, cnt_ovf, cnt_full_cycles, m_armed_join, n_flagged);
    `TB_CHECK(l1_timeouts[NL - 1] > 0, "merge timeout happened")
    `TB_CHECK(m_frames == 13 && m_stopped == 1, $sformatf("%0d frames, run stopped %0d times", m_frames, m_stopped))
    `TB_CHECK(cnt_stall > 0, "sort stall happened")
    `TB_CHECK(cnt_early > 0, "early send happened")
    `TB_CHECK(cnt_late > 0, "late drop happened")
    `TB_CHECK(cnt_ovf > 0, "bin overflow happened")
    `TB_CHECK(cnt_full_cycles > 0, "ring full happened")
    `TB_CHECK(m_armed_join == 1, "FEE armed during the run joined")
    `TB_CHECK(l2_drop[NL - 1] > 0, "L2 link buffer overflow happened")
    `TB_FINISH
  end
endmodule
