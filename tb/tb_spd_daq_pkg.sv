// tb_spd_daq_pkg: checks the package's functions and header layouts.
// CRC-32 results are compared with the standard IEEE CRC-32 of the same bytes
// (network byte order): "12345678" gives 0x9AE0DAAF, and the words
// DEADBEEF 01020304 give 0x4DF50F33. extend_lsb is checked on hand-worked
// cases, including wrap-around of the low bits.
module tb_spd_daq_pkg;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] crc_of(input logic [31:0] w [$]);
    logic [31:0] c = CRC32_INIT;
    foreach (w[i]) c = crc32_word(c, w[i]);
    return ~c;
  endfunction

  initial begin
    feb_hdr0_t  h0;
    feb_hdr1_t  h1;
    l1l2_hdr0_t l0;
    check(crc_of('{32'h31323334, 32'h35363738}) == 32'h9AE0DAAF, "crc 12345678");
    check(crc_of('{32'hDEADBEEF, 32'h01020304}) == 32'h4DF50F33, "crc deadbeef");
    // extend_lsb
    check(extend_lsb(32'd1000, 32'd1000 & 32'h3FF, 10) == 32'd1000, "ext equal");
    check(extend_lsb(32'd1030, 32'd1020 & 32'h3FF, 10) == 32'd1020, "ext behind");
    check(extend_lsb(32'd1024, 32'd1023 & 32'h3FF, 10) == 32'd1023, "ext wrap");
    check(extend_lsb(32'd70000, 32'd65535, 16) == 32'd65535, "ext slice wrap");
    check(extend_lsb(32'd5, 32'd5, 16) == 32'd5, "ext small");
    // header bit positions
    h0 = '{pkt_type: 6'h3F, board_id: 10'h000, pkt_num: 8'h00, time_lsb: 8'h00};
    check(32'(h0) == 32'hFC00_0000, "feb type at 31:26");
    h0 = '{pkt_type: 6'h00, board_id: 10'h3FF, pkt_num: 8'h00, time_lsb: 8'h00};
    check(32'(h0) == 32'h03FF_0000, "feb board at 25:16");
    h0 = '{pkt_type: 6'h00, board_id: 10'h000, pkt_num: 8'hA5, time_lsb: 8'h5A};
    check(32'(h0) == 32'h0000_A55A, "feb pkt num/time");
    h1 = '{fmt_id: 6'h01, frame_lsb: 10'h3FF, slice_lsb: 16'h1234};
    check(32'(h1) == 32'h07FF_1234, "feb hdr1");
    l0 = '{pkt_type: 6'h00, l1_port: 4'hF, board_id: 8'h00, fmt_id: 6'h00, pkt_num: 8'h00};
    check(32'(l0) == 32'h03C0_0000, "l1l2 port at 25:22");
    l0 = '{pkt_type: 6'h00, l1_port: 4'h0, board_id: 8'hFF, fmt_id: 6'h3F, pkt_num: 8'h00};
    check(32'(l0) == 32'h003F_FF00, "l1l2 board 21:14 fmt 13:8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
