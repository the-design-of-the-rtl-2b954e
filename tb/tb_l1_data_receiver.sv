// tb_l1_data_receiver: sends FEB-L1 packets built by the testbench (with the
// reference CRC) into one port receiver and checks what is stored: a good
// packet's descriptor (both header words, payload length) and its payload
// words; a packet with a corrupted CRC removed and counted; a gap in the
// packet numbers counted as lost packets; a header-only packet kept; a packet
// larger than the buffer (8 words here) removed and counted as overflow; a
// disabled port ignoring its link; and the word counter.
`include "tb_common.svh"
module tb_l1_data_receiver;
  import spd_daq_pkg::*;
  `include "tb_crc_ref.svh"
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic rst, enable, rx_valid, rx_last, desc_valid, desc_ready, pl_valid, pl_ready;
  word_t rx_data, pl_data;
  feb_hdr0_t desc_h0;
  feb_hdr1_t desc_h1;
  logic [15:0] desc_len;
  logic [31:0] cnt_pkts, cnt_words, cnt_crc_err, cnt_lost, cnt_ovf;

  l1_data_receiver #(.DATA_DEPTH(8), .DESC_DEPTH(4)) dut (.*);

  int unsigned sent_words = 0;
  task automatic send(input logic [7:0] num, input logic [15:0] slice, input int n, input logic corrupt = 0);
    word_t w [$];
    w.push_back({PKT_TYPE_DATA, 10'h155, num, 8'h77});
    w.push_back({6'h02, 10'h001, slice});
    for (int i = 0; i < n; i++) w.push_back({num, 8'h00, 16'(i)});
    w.push_back(ref_crc32(w) ^ (corrupt ? 32'h1 : 32'h0));
    foreach (w[i]) begin
      rx_valid <= 1; rx_data <= w[i]; rx_last <= (i == w.size() - 1); @(posedge clk);
    end
    rx_valid <= 0; rx_last <= 0;
    sent_words += w.size();
  endtask

  // drain and check one stored packet
  task automatic expect_pkt(input logic [7:0] num, input logic [15:0] slice, input int n);
    int waitc = 0;
    while (!desc_valid && waitc < 50) begin @(posedge clk); waitc++; end
    `TB_CHECK(desc_valid, $sformatf("descriptor of packet %0d", num))
    if (!desc_valid) return;
    `TB_CHECK(desc_h0.pkt_num == num && desc_h0.board_id == 10'h155 && desc_h0.time_lsb == 8'h77,
              $sformatf("h0 of packet %0d", num))
    `TB_CHECK(desc_h1.slice_lsb == slice && desc_h1.fmt_id == 6'h02, $sformatf("h1 of packet %0d", num))
    `TB_CHECK(desc_len == 16'(n), $sformatf("len of packet %0d = %0d", num, desc_len))
    desc_ready <= 1; @(posedge clk); desc_ready <= 0;
    for (int i = 0; i < n; i++) begin
      waitc = 0;
      @(negedge clk);
      while (!pl_valid && waitc < 50) begin @(negedge clk); waitc++; end
      `TB_CHECK(pl_data == {num, 8'h00, 16'(i)}, $sformatf("payload %0d of packet %0d: %h", i, num, pl_data))
      pl_ready = 1;
      @(posedge clk);
      #1 pl_ready = 0;
    end
    @(posedge clk);
  endtask

  `TB_WATCHDOG(5000)

  initial begin
    rst = 1; enable = 1; rx_valid = 0; rx_last = 0; rx_data = 0; desc_ready = 0; pl_ready = 0;
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    send(8'd0, 16'd10, 3);
    expect_pkt(8'd0, 16'd10, 3);
    send(8'd1, 16'd11, 2, 1'b1);            // bad CRC
    repeat (3) @(posedge clk);
    `TB_CHECK(!desc_valid && cnt_crc_err == 1, "bad CRC packet removed")
    send(8'd2, 16'd12, 0);                  // header only, after a lost number
    expect_pkt(8'd2, 16'd12, 0);
    `TB_CHECK(cnt_lost == 1, $sformatf("one packet lost (%0d)", cnt_lost))
    send(8'd3, 16'd13, 10);                 // larger than the buffer
    repeat (3) @(posedge clk);
    `TB_CHECK(!desc_valid && cnt_ovf == 1, "oversized packet removed")
    send(8'd4, 16'd14, 8);                  // exactly fills the buffer
    expect_pkt(8'd4, 16'd14, 8);
    `TB_CHECK(cnt_lost == 2, "packet 3 counted as lost")
    enable <= 0; @(posedge clk);
    send(8'd5, 16'd15, 1);
    repeat (3) @(posedge clk);
    `TB_CHECK(!desc_valid && cnt_pkts == 3, "disabled port ignores its link")
    `TB_CHECK(cnt_words == sent_words - 4, $sformatf("word counter %0d", cnt_words))
    `TB_FINISH
  end
endmodule
