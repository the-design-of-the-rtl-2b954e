// tb_l2_concentrator: one L2 card with its default 8 links.
// Each link model sends Ethernet II frames (header, L1-L2 packet, FCS from
// the bit-wise reference CRC) for slices 0..5 of frame 1, in order, with 0..20
// payload words each and random gaps. One frame of link 3 (slice 2) is sent
// with a corrupted FCS and must be removed. The host model owns a 256-word
// ring at byte address 0x8000, stores the memory writes, reads the ring only up
// to the published wr_count and returns rd_count slowly, so the ring runs
// full. After all links are done, flush_all sends the last slice.
// Checked: six slice blocks in order; each holds exactly the words of all
// packets of that slice except the corrupted one (compared as sorted lists,
// because the link order inside a block depends on arbitration); the word
// count in the block header; flags 0 on slices 0..4 and "sent early" on
// slice 5; the FCS error counter; the ring-full stall.
`include "tb_common.svh"
module tb_l2_concentrator;
  import spd_daq_pkg::*;
  `include "tb_crc_ref.svh"
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  localparam int NL = 8, NS = 6, RW = 256;
  logic rst, flush_all, req_valid, req_ready, slice_done;
  logic  lk_valid [NL], lk_last [NL];
  word_t lk_data [NL];
  logic [NL-1:0] link_en;
  logic [63:0] ring_base, req_addr;
  logic [31:0] ring_words, rd_count, wr_count;
  word_t req_data;
  logic [31:0] cnt_frames [NL], cnt_fcs_err [NL], cnt_drop [NL];
  logic [31:0] cnt_slices, cnt_late, cnt_ovf, cnt_stall, cnt_early, cnt_full_cycles;

  l2_concentrator dut (.*);

  // expected words per slice
  word_t exp_w [NS][$];
  int    links_done = 0;

  for (genvar l = 0; l < NL; l++) begin : g_link
    initial begin
      lk_valid[l] = 0; lk_last[l] = 0; lk_data[l] = 0;
      @(negedge rst);
      for (int s = 0; s < NS; s++) begin
        word_t f [$];
        logic [31:0] c;
        int n;
        bit bad;
        n   = $urandom % 21;
        bad = (l == 3 && s == 2);
        f = '{32'h0200_0000, 32'h0200_0200, 32'(32'h100 + l), {ETHERTYPE_SPD, 16'h0},
              {PKT_TYPE_DATA, 4'(l), 8'(l), 6'd3, 8'(s)}, 32'd1, 32'(s)};
        for (int i = 0; i < n; i++) f.push_back({4'(l), 4'(s), 8'(i), 16'($urandom)});
        if (!bad) for (int i = 4; i < f.size(); i++) exp_w[s].push_back(f[i]);
        c = ref_crc32(f);
        if (bad) c = c ^ 32'h1;
        f.push_back({c[7:0], c[15:8], c[23:16], c[31:24]});
        foreach (f[i]) begin
          @(negedge clk);
          lk_valid[l] = 1; lk_data[l] = f[i]; lk_last[l] = (i == f.size() - 1);
          @(negedge clk);
          lk_valid[l] = 0; lk_last[l] = 0;
          repeat ($urandom % 2) @(negedge clk);
        end
        repeat ($urandom % 30) @(negedge clk);
      end
      links_done++;
    end
  end

  // memory and host
  word_t mem [RW];
  int    n_written = 0, n_read = 0, bad_addr = 0;
  always @(negedge clk) begin
    req_ready = ($urandom % 5 != 0);
    #2;
    if (!rst && req_valid && req_ready) begin
      if (req_addr != 64'h8000 + 4 * (n_written % RW)) bad_addr++;
      mem[n_written % RW] = req_data;
      n_written++;
    end
  end
  word_t host [$];
  always @(posedge clk) begin
    if (!rst && n_read < wr_count && $urandom % 4 == 0) begin
      host.push_back(mem[n_read % RW]);
      n_read++;
      rd_count <= n_read;
    end
  end

  `TB_WATCHDOG(60000)

  initial begin
    rst = 1; flush_all = 0; link_en = '1; ring_base = 64'h8000; ring_words = RW; rd_count = 0; req_ready = 0;
    foreach (mem[i]) mem[i] = 0;
    repeat (4) @(posedge clk); rst = 0;
    wait (links_done == NL);
    repeat (2000) @(posedge clk);
    `TB_CHECK(cnt_slices == NS - 1, $sformatf("%0d slices before the flush", cnt_slices))
    flush_all = 1; repeat (5) @(posedge clk); flush_all = 0;
    repeat (3000) @(posedge clk);
    `TB_CHECK(n_read == wr_count && wr_count == n_written, "host read everything")
    `TB_CHECK(bad_addr == 0, "ring addresses")
    for (int s = 0; s < NS; s++) begin
      word_t g [$];
      word_t e [$];
      int cnt;
      if (host.size() < 3) begin `TB_CHECK(0, $sformatf("slice %0d missing", s)) break; end
      `TB_CHECK(host[0] == 1 && host[1] == s, $sformatf("block %0d is frame %0d slice %0d", s, host[0], host[1]))
      `TB_CHECK(host[2][31:24] == ((s == NS - 1) ? 8'h02 : 8'h00), $sformatf("slice %0d flags %h", s, host[2][31:24]))
      cnt = host[2][15:0];
      `TB_CHECK(cnt == exp_w[s].size(), $sformatf("slice %0d: %0d words, %0d expected", s, cnt, exp_w[s].size()))
      g = host[3 : 2 + cnt];
      e = exp_w[s];
      g.sort(); e.sort();
      `TB_CHECK(g == e, $sformatf("slice %0d contents", s))
      repeat (3 + cnt) void'(host.pop_front());
    end
    `TB_CHECK(host.size() == 0, $sformatf("%0d words after the last slice", host.size()))
    `TB_CHECK(cnt_fcs_err[3] == 1 && cnt_frames[3] == NS - 1, $sformatf("link 3: %0d frames, %0d FCS errors", cnt_frames[3], cnt_fcs_err[3]))
    `TB_CHECK(cnt_late == 0 && cnt_ovf == 0 && cnt_early == 1, "sort counters")
    `TB_CHECK(cnt_full_cycles > 0, "ring ran full")
    `TB_FINISH
  end
endmodule
