// tb_eth_tx: frames L1-L2 packets and checks the Ethernet II words:
// addresses, EtherType and pad, payload, and the FCS. For the packet
// 11111111 22222222 between 02:00:00:00:01:00 and 02:00:00:00:02:00 the FCS
// word must be B50A6AC7 (standard Ethernet CRC of those 24 bytes, sent low
// byte first). Other packets are checked against a reference CRC. The output
// is back-pressured at random, and the frame length must be payload + 5 words.
`include "tb_common.svh"
module tb_eth_tx;
  import spd_daq_pkg::*;
  `include "tb_crc_ref.svh"
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic rst, in_valid, in_last, in_ready, out_valid, out_last, out_ready;
  word_t in_data, out_data;
  logic [47:0] src_mac = 48'h02_00_00_00_01_00, dst_mac = 48'h02_00_00_00_02_00;
  logic [31:0] cnt_frames;

  eth_tx dut (.*);

  word_t src [$];          // words to send, with their last flags
  logic  srcl [$];
  logic  ihs = 0;
  always @(negedge clk) begin
    if (ihs) begin void'(src.pop_front()); void'(srcl.pop_front()); end
    in_valid  = src.size() > 0 && ($urandom % 4 != 0);
    in_data   = src.size() > 0 ? src[0] : '0;
    in_last   = srcl.size() > 0 ? srcl[0] : 1'b0;
    out_ready = ($urandom % 3 != 0);
    #1 ihs = !rst && in_valid && in_ready;
  end

  word_t got [$][$];
  word_t cur [$];
  always @(negedge clk) begin
    #2;
    if (!rst && out_valid && out_ready) begin
      cur.push_back(out_data);
      if (out_last) begin got.push_back(cur); cur = {}; end
    end
  end

  function automatic word_t bswap(input word_t w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  task automatic put(input word_t w [$]);
    foreach (w[i]) begin src.push_back(w[i]); srcl.push_back(i == w.size() - 1); end
  endtask

  `TB_WATCHDOG(3000)

  initial begin
    word_t p1 [$] = '{32'h1111_1111, 32'h2222_2222};
    word_t p2 [$];
    for (int i = 0; i < 13; i++) p2.push_back($urandom);
    rst = 1;
    repeat (3) @(posedge clk); rst = 0;
    put(p1); put(p2); put('{32'hABCD_0001, 32'h0, 32'h5});
    repeat (300) @(posedge clk);
    `TB_CHECK(got.size() == 3 && cnt_frames == 3, $sformatf("%0d frames", got.size()))
    if (got.size() == 3) begin
      word_t f [$];
      f = got[0];
      `TB_CHECK(f.size() == 7, "frame 0 length")
      `TB_CHECK(f[0] == 32'h0200_0000 && f[1] == 32'h0200_0200 && f[2] == 32'h0000_0100, "addresses")
      `TB_CHECK(f[3] == 32'h88B5_0000, "EtherType and pad")
      `TB_CHECK(f[4] == 32'h1111_1111 && f[5] == 32'h2222_2222, "payload")
      `TB_CHECK(f[6] == 32'hB50A_6AC7, $sformatf("known FCS %h", f[6]))
      f = got[1];
      `TB_CHECK(f.size() == 13 + 5, "frame 1 length")
      for (int i = 0; i < 13; i++) `TB_CHECK(f[4+i] == p2[i], $sformatf("frame 1 word %0d", i))
      `TB_CHECK(f[17] == bswap(ref_crc32(f[0:16])), "frame 1 FCS")
      f = got[2];
      `TB_CHECK(f.size() == 8 && f[7] == bswap(ref_crc32(f[0:6])), "frame 2 FCS")
    end
    `TB_FINISH
  end
endmodule
