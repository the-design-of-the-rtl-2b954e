// tb_l2_dma: checks the ring-buffer transfer. A host model owns a 16-word
// ring at byte address 0x1000 and a memory array. It reads the ring only up to
// the published wr_count and returns rd_count after a random delay, so the
// ring runs full and the DMA must wait. The source sends 30 blocks of random
// length 1..12 words with a running pattern; the memory interface accepts
// requests at random. Checked: every address lies in the ring and follows the
// expected wrap-around order, the host reads back exactly the sent words,
// wr_count only moves at block ends, slice_done pulses once per block, and
// the full-ring stall happened.
`include "tb_common.svh"
module tb_l2_dma;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  localparam int RW = 16;
  logic rst, in_valid, in_last, in_ready, req_valid, req_ready, slice_done;
  logic [63:0] ring_base, req_addr;
  logic [31:0] ring_words, rd_count, wr_count, cnt_full_cycles;
  word_t in_data, req_data;

  l2_dma dut (.*);

  word_t mem [RW];
  word_t sent [$];
  int    block_ends [$];
  int    n_written = 0, n_read = 0, n_done = 0, bad_addr = 0, bad_pub = 0;

  // memory side: random acceptance, address check, store
  always @(negedge clk) begin
    req_ready = ($urandom % 4 != 0);
    #2;
    if (!rst && req_valid && req_ready) begin
      if (req_addr != 64'h1000 + 4 * (n_written % RW)) bad_addr++;
      mem[n_written % RW] = req_data;
      n_written++;
    end
  end

  // host: consume published words, on average one every six cycles, slower than the source
  logic [31:0] seen_wr = 0;
  always @(posedge clk) begin
    if (!rst) begin
      if (slice_done) n_done++;
      if (wr_count != seen_wr) begin
        if (block_ends.size() == 0 || !(wr_count inside {block_ends})) bad_pub++;
        seen_wr = wr_count;
      end
      if (n_read < wr_count && $urandom % 6 == 0) begin
        if (mem[n_read % RW] != sent[n_read]) begin
          `TB_CHECK(0, $sformatf("word %0d: %h want %h", n_read, mem[n_read % RW], sent[n_read]))
        end
        n_read++;
        rd_count <= n_read;
      end
    end
  end

  `TB_WATCHDOG(20000)

  initial begin
    rst = 1; in_valid = 0; in_last = 0; in_data = 0; rd_count = 0;
    ring_base = 64'h1000; ring_words = RW; req_ready = 0;
    foreach (mem[i]) mem[i] = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int b = 0; b < 30; b++) begin
      int n;
      n = 1 + $urandom % 12;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = {8'(b), 8'(i), 16'($urandom)}; in_last = (i == n - 1);
        sent.push_back(in_data);
        if (in_last) block_ends.push_back(sent.size());
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      repeat ($urandom % 3) @(posedge clk);
    end
    while (n_read < sent.size()) @(posedge clk);
    repeat (5) @(posedge clk);
    `TB_CHECK(n_written == sent.size(), $sformatf("%0d words written, %0d sent", n_written, sent.size()))
    `TB_CHECK(n_read == sent.size(), "host read every word")
    `TB_CHECK(bad_addr == 0, $sformatf("%0d wrong addresses", bad_addr))
    `TB_CHECK(bad_pub == 0, $sformatf("%0d wr_count values not at a block end", bad_pub))
    `TB_CHECK(wr_count == sent.size(), "final wr_count")
    `TB_CHECK(n_done == 30, $sformatf("slice_done pulses %0d", n_done))
    `TB_CHECK(cnt_full_cycles > 0, "ring ran full")
    `TB_FINISH
  end
endmodule
