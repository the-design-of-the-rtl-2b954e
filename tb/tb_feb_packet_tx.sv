// tb_feb_packet_tx: feeds hits into the FEE packet framer slice by slice and
// checks every packet word: header fields at their published bit positions,
// payload order, CRC-32 against an independent reference, packet numbers,
// splitting of a slice larger than MAX_PAYLOAD (4 here), the empty packet of
// a slice without hits, and the output pace of one word every 4 cycles.
`include "tb_common.svh"
module tb_feb_packet_tx;
  import spd_daq_pkg::*;
  `include "tb_crc_ref.svh"
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic rst;
  logic [9:0] board_id = 10'h2A5;
  logic [5:0] fmt_id = 6'h15;
  logic in_frame, slice_end, hit_valid;
  logic [31:0] frame_num, slice_num, time_cnt, closed_frame, closed_slice, hits_lost;
  word_t hit_data, tx_data;
  logic tx_valid, tx_last;

  feb_packet_tx #(.MAX_PAYLOAD(4)) dut (.*);

  // capture packets
  word_t cur [$];
  word_t pkts [$][$];
  int unsigned last_t = 0, t = 0, bad_gap = 0, nwords = 0;
  always @(posedge clk) begin
    t++;
    if (tx_valid) begin
      if (nwords > 0 && t - last_t != 4) bad_gap++;
      last_t = t; nwords++;
      cur.push_back(tx_data);
      if (tx_last) begin pkts.push_back(cur); cur = {}; nwords = 0; end
    end
  end

  task automatic hits(input word_t d [$]);
    foreach (d[i]) begin hit_valid <= 1; hit_data <= d[i]; @(posedge clk); end
    hit_valid <= 0;
  endtask
  task automatic end_slice(input logic [31:0] f, input logic [31:0] s, input logic [31:0] tc);
    closed_frame <= f; closed_slice <= s; time_cnt <= tc; slice_end <= 1;
    @(posedge clk); slice_end <= 0;
  endtask

  task automatic check_pkt(input int k, input logic [31:0] f, input logic [31:0] s, input logic [7:0] tl,
                           input logic [7:0] num, input word_t pl [$]);
    word_t p [$];
    word_t body [$];
    feb_hdr0_t h0;
    feb_hdr1_t h1;
    if (k >= pkts.size()) begin `TB_CHECK(0, $sformatf("packet %0d missing", k)) return; end
    p = pkts[k];
    `TB_CHECK(p.size() == pl.size() + 3, $sformatf("packet %0d length %0d", k, p.size()))
    if (p.size() != pl.size() + 3) return;
    h0 = p[0]; h1 = p[1];
    `TB_CHECK(p[0][31:26] == PKT_TYPE_DATA && p[0][25:16] == board_id && p[0][15:8] == num && p[0][7:0] == tl,
              $sformatf("packet %0d word 0 %h", k, p[0]))
    `TB_CHECK(p[1][31:26] == fmt_id && p[1][25:16] == f[9:0] && p[1][15:0] == s[15:0],
              $sformatf("packet %0d word 1 %h", k, p[1]))
    foreach (pl[i]) `TB_CHECK(p[2+i] == pl[i], $sformatf("packet %0d payload %0d", k, i))
    body = p[0:p.size()-2];
    `TB_CHECK(p[p.size()-1] == ref_crc32(body), $sformatf("packet %0d CRC", k))
  endtask

  `TB_WATCHDOG(5000)

  initial begin
    rst = 1; in_frame = 0; slice_end = 0; hit_valid = 0; hit_data = 0;
    frame_num = 32'h7FF; slice_num = 32'h12345; time_cnt = 0; closed_frame = 0; closed_slice = 0;
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    hits('{32'h1111_0001});   // outside a frame: not taken
    in_frame <= 1; @(posedge clk);
    hits('{32'hA000_0001, 32'hA000_0002}); @(posedge clk); hits('{32'hA000_0003});
    end_slice(32'h7FF, 32'h12345, 32'h1AB);
    slice_num <= 32'h12346;
    repeat (5) @(posedge clk);
    end_slice(32'h7FF, 32'h12346, 32'h2CD);       // empty slice
    slice_num <= 32'h12347;
    hits('{32'hB000_0000, 32'hB000_0001, 32'hB000_0002, 32'hB000_0003,
           32'hB000_0004, 32'hB000_0005});            // 6 hits: split 4 + 2
    end_slice(32'h7FF, 32'h12347, 32'h3EF);
    repeat (200) @(posedge clk);
    `TB_CHECK(pkts.size() == 4, $sformatf("%0d packets", pkts.size()))
    check_pkt(0, 32'h7FF, 32'h12345, 8'hAB, 8'd0, '{32'hA000_0001, 32'hA000_0002, 32'hA000_0003});
    check_pkt(1, 32'h7FF, 32'h12346, 8'hCD, 8'd1, '{});
    check_pkt(2, 32'h7FF, 32'h12347, 8'hCD, 8'd2, '{32'hB000_0000, 32'hB000_0001, 32'hB000_0002, 32'hB000_0003});
    check_pkt(3, 32'h7FF, 32'h12347, 8'hEF, 8'd3, '{32'hB000_0004, 32'hB000_0005});
    `TB_CHECK(bad_gap == 0, $sformatf("%0d word gaps not 4 cycles", bad_gap))
    `TB_CHECK(hits_lost == 0, "no hit lost")
    `TB_FINISH
  end
endmodule
