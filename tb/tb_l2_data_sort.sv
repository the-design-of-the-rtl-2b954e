// tb_l2_data_sort: two links, two bins of 16 words. The testbench plays the
// arbitrator and feeds L1-L2 packets; a reference model in the testbench
// predicts each slice block. Sequence and expected result:
//   (1,0) from both links, then both links move on to (1,1): slice (1,0) is
//         complete and sent with flags 0;
//   link 0 opens (1,2) and then (1,3) while link 1 is still in (1,1): no bin
//         is free, so the input stalls and the oldest bin (1,1) is sent early
//         (flag bit 25);
//   link 1 then sends more of (1,1): dropped as late;
//   link 1 sends 20 words for (1,2): they do not fit, so the packet is
//         dropped and (1,2) is flagged lost (bit 24);
//   link 1 reaches (1,3): (1,2) is complete and sent;
//   flush_all sends (1,3), flagged early.
// The output is back-pressured at random.
`include "tb_common.svh"
module tb_l2_data_sort;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic rst, flush_all, in_valid, in_last, in_ready, out_valid, out_last, out_ready;
  logic [1:0] link_en;
  logic [0:0] in_link;
  word_t in_data, out_data;
  logic [31:0] cnt_slices, cnt_late, cnt_ovf, cnt_stall, cnt_early;

  l2_data_sort #(.N_LINKS(2), .NBINS(2), .BIN_WORDS(16)) dut (.*);

  function automatic void mk(input int l, input int s, input int n, ref word_t w [$]);
    w = '{{6'h01, 4'(l), 8'(s), 6'h0, 8'(n)}, 32'd1, 32'(s)};
    for (int i = 0; i < n; i++) w.push_back({8'(l), 8'(s), 16'(i)});
  endfunction

  task automatic send(input int l, input int s, input int n);
    word_t w [$];
    mk(l, s, n, w);
    foreach (w[i]) begin
      @(negedge clk);
      in_valid = 1; in_data = w[i]; in_last = (i == w.size() - 1); in_link = 1'(l);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
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

  task automatic expect_blk(input int k, input int s, input logic [7:0] flags, input int pk [$][2]);
    word_t e [$];
    word_t w [$];
    e = '{32'd1, 32'(s), 32'h0};
    foreach (pk[i]) begin mk(pk[i][0], s, pk[i][1], w); e = {e, w}; end
    e[2] = {flags, 8'h00, 16'(e.size() - 3)};
    if (k >= got.size()) begin `TB_CHECK(0, $sformatf("block %0d missing", k)) return; end
    `TB_CHECK(got[k] == e, $sformatf("block %0d: got %p want %p", k, got[k], e))
  endtask

  `TB_WATCHDOG(4000)

  initial begin
    rst = 1; flush_all = 0; link_en = 2'b11; in_valid = 0; in_last = 0; in_data = 0; in_link = 0;
    repeat (3) @(posedge clk); rst = 0;
    send(0, 0, 2); send(1, 0, 1); send(0, 1, 1);
    repeat (20) @(posedge clk);
    `TB_CHECK(got.size() == 0, "slice (1,0) held while link 1 is in it")
    send(1, 1, 0);
    repeat (40) @(posedge clk);
    `TB_CHECK(got.size() == 1, "slice (1,0) sent once complete")
    send(0, 2, 1); send(0, 3, 2);     // needs a third bin: evicts (1,1)
    send(1, 1, 1);                    // late
    send(1, 2, 20);                   // overflow
    send(1, 3, 0);
    repeat (60) @(posedge clk);
    flush_all = 1;
    repeat (60) @(posedge clk);
    flush_all = 0;
    `TB_CHECK(got.size() == 4, $sformatf("%0d slice blocks", got.size()))
    expect_blk(0, 0, 8'h00, '{'{0, 2}, '{1, 1}});
    expect_blk(1, 1, 8'h02, '{'{0, 1}, '{1, 0}});
    expect_blk(2, 2, 8'h01, '{'{0, 1}});
    expect_blk(3, 3, 8'h02, '{'{0, 2}, '{1, 0}});
    `TB_CHECK(cnt_slices == 4 && cnt_late == 1 && cnt_ovf == 1 && cnt_early == 2,
              $sformatf("counters slices %0d late %0d ovf %0d early %0d", cnt_slices, cnt_late, cnt_ovf, cnt_early))
    `TB_CHECK(cnt_stall > 0, "input stalled for a bin")
    `TB_FINISH
  end
endmodule
