// tb_l1_merge: three modelled port receivers hold packets of different
// slices, some from the previous frame, and the merge must emit them in
// (frame, slice) order with full 32-bit numbers and the L1-L2 header.
// L1 state: frame 1030, slice 3, previous frame had 65536 slices.
//   port 0: A (frame 1029, slice 65535, 2 words), B (1030, 0, no words)
//   port 1: C (1030, 0, 1 word), D (1030, 2, 1 word)
//   port 2: E (1030, 1, no words)
// Expected order A B C E D. A comes first because it is oldest; B goes before
// C on the tie because it is on the lower port. C goes out at once: port 0 is
// empty, but it has already delivered slice (1030, 0), so it cannot send
// anything older. E goes out only after the merge has waited timeout_cycles
// (20) for port 0, which is then treated as absent. D waits for the timeout
// again, now for port 2, whose last packet was older than D. So two timeouts
// are counted, each after at least 20 cycles. The output is back-pressured at random.
`include "tb_common.svh"
module tb_l1_merge;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;
  localparam int NP = 3;

  logic rst;
  logic [NP-1:0] port_en;
  logic [31:0] timeout_cycles, cur_frame, cur_slice, prev_frame_slices, cnt_timeouts;
  logic desc_valid [NP], desc_ready [NP], pl_valid [NP], pl_ready [NP];
  feb_hdr0_t desc_h0 [NP];
  feb_hdr1_t desc_h1 [NP];
  logic [15:0] desc_len [NP];
  word_t pl_data [NP];
  logic out_valid, out_last, out_ready;
  word_t out_data;

  l1_merge #(.N_PORTS(NP)) dut (.*);

  typedef struct { logic [31:0] f, s; int n; logic [7:0] num; } pkt_t;
  pkt_t  dq [NP][$];
  word_t pq [NP][$];
  logic  dhs [NP], phs [NP];

  task automatic add(input int p, input logic [31:0] f, input logic [31:0] s, input int n, input logic [7:0] num);
    dq[p].push_back('{f: f, s: s, n: n, num: num});
    for (int i = 0; i < n; i++) pq[p].push_back({num, 24'(i)});
  endtask

  // receiver models: drive at the falling edge, note handshakes just after
  initial for (int p = 0; p < NP; p++) begin dhs[p] = 0; phs[p] = 0; end
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (dhs[p]) void'(dq[p].pop_front());
      if (phs[p]) void'(pq[p].pop_front());
      desc_valid[p] = dq[p].size() > 0;
      pl_valid[p]   = pq[p].size() > 0 && ($urandom % 4 != 0);
      if (dq[p].size() > 0) begin
        desc_h0[p] = '{pkt_type: PKT_TYPE_DATA, board_id: 10'h300 + 10'(p), pkt_num: dq[p][0].num, time_lsb: 8'h00};
        desc_h1[p] = '{fmt_id: 6'(p + 1), frame_lsb: dq[p][0].f[9:0], slice_lsb: dq[p][0].s[15:0]};
        desc_len[p] = 16'(dq[p][0].n);
      end
      pl_data[p] = (pq[p].size() > 0) ? pq[p][0] : '0;
    end
    out_ready = ($urandom % 3 != 0);
    #1;
    for (int p = 0; p < NP; p++) begin
      dhs[p] = !rst && desc_valid[p] && desc_ready[p];
      phs[p] = !rst && pl_valid[p] && pl_ready[p];
    end
  end

  // output capture
  word_t got [$][$];
  word_t cur [$];
  int unsigned t = 0;
  int unsigned start_t [$];
  always @(negedge clk) begin
    #2;
    t++;
    if (!rst && out_valid && out_ready) begin
      if (cur.size() == 0) start_t.push_back(t);
      cur.push_back(out_data);
      if (out_last) begin got.push_back(cur); cur = {}; end
    end
  end

  task automatic expect_pkt(input int k, input int port, input logic [31:0] f, input logic [31:0] s,
                            input int n, input logic [7:0] num);
    word_t w [$];
    l1l2_hdr0_t h;
    if (k >= got.size()) begin `TB_CHECK(0, $sformatf("packet %0d missing", k)) return; end
    w = got[k];
    h = w[0];
    `TB_CHECK(w.size() == 3 + n, $sformatf("packet %0d size %0d", k, w.size()))
    `TB_CHECK(h.pkt_type == PKT_TYPE_DATA && h.l1_port == 4'(port) && h.board_id == 8'(10'h300 + 10'(port))
              && h.fmt_id == 6'(port + 1) && h.pkt_num == num, $sformatf("packet %0d header %h", k, w[0]))
    `TB_CHECK(w[1] == f && w[2] == s, $sformatf("packet %0d frame %0d slice %0d", k, w[1], w[2]))
    for (int i = 0; i < n && 3 + i < w.size(); i++)
      `TB_CHECK(w[3+i] == {num, 24'(i)}, $sformatf("packet %0d payload %0d", k, i))
  endtask

  `TB_WATCHDOG(3000)

  initial begin
    rst = 1; port_en = '1; timeout_cycles = 20;
    cur_frame = 1030; cur_slice = 3; prev_frame_slices = 65536;
    for (int p = 0; p < NP; p++) begin desc_valid[p] = 0; pl_valid[p] = 0; end
    add(0, 1029, 65535, 2, 8'hA0); add(0, 1030, 0, 0, 8'hB0);
    add(1, 1030, 0, 1, 8'hC0);     add(1, 1030, 2, 1, 8'hD0);
    add(2, 1030, 1, 0, 8'hE0);
    repeat (3) @(posedge clk); rst <= 0;
    repeat (400) @(posedge clk);
    `TB_CHECK(got.size() == 5, $sformatf("%0d packets", got.size()))
    expect_pkt(0, 0, 1029, 65535, 2, 8'hA0);
    expect_pkt(1, 0, 1030, 0, 0, 8'hB0);
    expect_pkt(2, 1, 1030, 0, 1, 8'hC0);
    expect_pkt(3, 2, 1030, 1, 0, 8'hE0);
    expect_pkt(4, 1, 1030, 2, 1, 8'hD0);
    `TB_CHECK(cnt_timeouts == 2, $sformatf("timeouts %0d", cnt_timeouts))
    if (start_t.size() == 5) begin
      `TB_CHECK(start_t[2] - start_t[1] < 20, "C did not wait")
      `TB_CHECK(start_t[3] - start_t[2] >= 20, "E waited for the timeout")
    end
    `TB_FINISH
  end
endmodule
