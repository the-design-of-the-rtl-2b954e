// tb_l2_arbitrator: three links with queued packets of different lengths.
// Checks that whole packets pass without interleaving, tagged with the right
// link, and in round-robin order: links 0,1,2,0,1,2,... while all are busy,
// then the remaining link alone. Inputs stall inside packets and the output
// is back-pressured at random.
`include "tb_common.svh"
module tb_l2_arbitrator;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;
  localparam int NL = 3;

  logic rst, out_valid, out_last, out_ready;
  logic in_valid [NL], in_last [NL], in_ready [NL];
  word_t in_data [NL], out_data;
  logic [1:0] out_link;

  l2_arbitrator #(.N_LINKS(NL)) dut (.*);

  word_t q [NL][$];
  logic  ql [NL][$];
  logic  hs [NL];
  initial for (int l = 0; l < NL; l++) hs[l] = 0;
  always @(negedge clk) begin
    for (int l = 0; l < NL; l++) begin
      if (hs[l]) begin void'(q[l].pop_front()); void'(ql[l].pop_front()); end
      // a packet's first word is offered at once, later words may stall
      in_valid[l] = q[l].size() > 0 && (q[l][0][23:0] == 0 || $urandom % 5 != 0);
      in_data[l]  = q[l].size() > 0 ? q[l][0] : '0;
      in_last[l]  = ql[l].size() > 0 ? ql[l][0] : 1'b0;
    end
    out_ready = ($urandom % 4 != 0);
    #1 for (int l = 0; l < NL; l++) hs[l] = !rst && in_valid[l] && in_ready[l];
  end

  word_t got [$][$];
  int    gl [$];
  word_t cur [$];
  int    bad_link = 0;
  always @(negedge clk) begin
    #2;
    if (!rst && out_valid && out_ready) begin
      if (cur.size() > 0 && out_data[31:28] != 4'(out_link)) bad_link++;
      cur.push_back(out_data);
      if (out_last) begin got.push_back(cur); gl.push_back(out_link); cur = {}; end
    end
  end

  `TB_WATCHDOG(3000)

  initial begin
    int exp_l [$] = '{0, 1, 2, 0, 1, 2, 1};
    int cnt [NL] = '{0, 0, 0};
    int len [NL] = '{2, 5, 1};
    int npk [NL] = '{2, 3, 2};
    rst = 1;
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < npk[l]; k++)
        for (int i = 0; i < len[l] + k; i++) begin
          q[l].push_back({4'(l), 4'(k), 24'(i)});
          ql[l].push_back(i == len[l] + k - 1);
        end
    repeat (3) @(posedge clk); rst = 0;
    repeat (300) @(posedge clk);
    `TB_CHECK(got.size() == 7, $sformatf("%0d packets", got.size()))
    foreach (got[j]) begin
      int l, k;
      l = got[j][0][31:28]; k = got[j][0][27:24];
      `TB_CHECK(gl[j] == l, $sformatf("packet %0d link tag", j))
      if (j < exp_l.size()) `TB_CHECK(l == exp_l[j], $sformatf("packet %0d from link %0d, want %0d", j, l, exp_l[j]))
      `TB_CHECK(k == cnt[l] && got[j].size() == len[l] + k, $sformatf("packet %0d whole and in order", j))
      foreach (got[j][i]) `TB_CHECK(got[j][i] == {4'(l), 4'(k), 24'(i)}, "no interleaving")
      cnt[l]++;
    end
    `TB_CHECK(bad_link == 0, "out_link stable")
    `TB_FINISH
  end
endmodule
