// tb_eth_rx: sends Ethernet II frames built by the testbench (reference FCS)
// into the L2 link receiver and checks that good frames come out as bare
// L1-L2 packets with the last flag on their final word, while frames with a
// wrong FCS or a foreign EtherType are removed and counted. A frame larger
// than the buffer (16 words here) is removed as a drop.
`include "tb_common.svh"
module tb_eth_rx;
  import spd_daq_pkg::*;
  `include "tb_crc_ref.svh"
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic rst, in_valid, in_last, out_valid, out_last, out_ready;
  word_t in_data, out_data;
  logic [31:0] cnt_frames, cnt_fcs_err, cnt_drop;

  eth_rx #(.DEPTH(16)) dut (.*);

  function automatic word_t bswap(input word_t w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  task automatic send(input word_t pl [$], input logic bad_fcs = 0, input logic [15:0] et = ETHERTYPE_SPD);
    word_t f [$];
    f = '{32'h0200_0000, 32'h0200_0200, 32'h0000_0100, {et, 16'h0}};
    foreach (pl[i]) f.push_back(pl[i]);
    f.push_back(bswap(ref_crc32(f)) ^ (bad_fcs ? 32'h100 : 32'h0));
    foreach (f[i]) begin
      @(negedge clk); in_valid = 1; in_data = f[i]; in_last = (i == f.size() - 1);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  word_t got [$][$];
  word_t cur [$];
  always @(negedge clk) begin
    out_ready = ($urandom % 3 != 0);
    #2;
    if (!rst && out_valid && out_ready) begin
      cur.push_back(out_data);
      if (out_last) begin got.push_back(cur); cur = {}; end
    end
  end

  `TB_WATCHDOG(3000)

  initial begin
    word_t a [$] = '{32'hA1, 32'hA2, 32'hA3};
    word_t b [$] = '{32'hB1};
    word_t c [$];
    for (int i = 0; i < 20; i++) c.push_back(32'hC00 + i);
    rst = 1; in_valid = 0; in_last = 0; in_data = 0;
    repeat (3) @(posedge clk); rst = 0;
    send(a);
    send(b, 1'b1);                 // bad FCS
    send(b, 1'b0, 16'h0800);       // IPv4: not ours
    send(c);                       // too big for 16 words
    send(b);
    repeat (100) @(posedge clk);
    `TB_CHECK(got.size() == 2, $sformatf("%0d packets", got.size()))
    if (got.size() == 2) begin
      `TB_CHECK(got[0] == a, "packet a")
      `TB_CHECK(got[1] == b, "packet b")
    end
    `TB_CHECK(cnt_frames == 2 && cnt_fcs_err == 1 && cnt_drop == 2,
              $sformatf("counters %0d %0d %0d", cnt_frames, cnt_fcs_err, cnt_drop))
    `TB_FINISH
  end
endmodule
