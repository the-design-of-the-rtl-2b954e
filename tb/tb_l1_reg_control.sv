// tb_l1_reg_control: register block of the L1. Checks reset values, Arm and
// Disarm of single FEE and of all FEE through the ARM register, port enables,
// read-back of every per-port counter at its address, the one-cycle read
// latency, and the alarm: raised by a new CRC error, lost packet or overflow
// of a port, cleared by writing 1 to its bit.
`include "tb_common.svh"
module tb_l1_reg_control;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;
  localparam int NP = 8;

  logic rst, reg_wr, reg_rd, reg_rvalid, alarm;
  logic [11:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata, timeout_cycles;
  logic [NP-1:0] arm, port_en;
  logic [47:0] src_mac, dst_mac;
  logic [31:0] cnt_pkts [NP], cnt_words [NP], cnt_crc_err [NP], cnt_lost [NP], cnt_ovf [NP];

  l1_reg_control dut (.*);

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); reg_rd = 1; reg_addr = a;
    @(negedge clk); reg_rd = 0;
    `TB_CHECK(reg_rvalid, "read data valid one cycle later")
    d = reg_rdata;
  endtask

  `TB_WATCHDOG(2000)

  initial begin
    logic [31:0] d;
    rst = 1; reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0;
    for (int p = 0; p < NP; p++) begin
      cnt_pkts[p] = 32'h1000 + p; cnt_words[p] = 32'h2000 + p; cnt_crc_err[p] = 0;
      cnt_lost[p] = 0; cnt_ovf[p] = 0;
    end
    repeat (3) @(posedge clk); rst = 0;
    `TB_CHECK(arm == 0 && port_en == 8'hFF && timeout_cycles == 100000 && !alarm, "reset values")
    rd(12'h000, d); `TB_CHECK(d == 0, "ARM reads 0")
    wr(12'h000, 32'h0000_00FF);                        // Arm all
    `TB_CHECK(arm == 8'hFF, "arm all")
    wr(12'h000, 32'h0000_00F7);                        // Disarm FEE 3
    `TB_CHECK(arm == 8'hF7, "disarm one")
    wr(12'h001, 32'h0000_0005);
    `TB_CHECK(port_en == 8'h05, "port enable")
    wr(12'h002, 32'd1234);
    rd(12'h002, d); `TB_CHECK(d == 1234, "timeout read back")
    wr(12'h004, 32'hCAFE_BABE); wr(12'h005, 32'h0000_1234);
    `TB_CHECK(src_mac == 48'h1234_CAFE_BABE, "source MAC")
    for (int p = 0; p < NP; p += 3) begin
      rd(12'h100 + 12'(8 * p), d);     `TB_CHECK(d == 32'h1000 + p, $sformatf("packets of port %0d", p))
      rd(12'h100 + 12'(8 * p + 1), d); `TB_CHECK(d == 32'h2000 + p, $sformatf("words of port %0d", p))
    end
    @(negedge clk); cnt_crc_err[3] = 1;
    repeat (2) @(negedge clk);
    `TB_CHECK(alarm, "alarm on CRC error")
    rd(12'h003, d); `TB_CHECK(d == 32'h08, "alarm bit 3")
    rd(12'h102 + 12'(8 * 3), d); `TB_CHECK(d == 1, "CRC error counter port 3")
    wr(12'h003, 32'h08);
    @(negedge clk);
    `TB_CHECK(!alarm, "alarm cleared")
    @(negedge clk); cnt_ovf[6] = 2;
    repeat (2) @(negedge clk);
    rd(12'h003, d); `TB_CHECK(d == 32'h40 && alarm, "alarm bit 6 on overflow")
    `TB_FINISH
  end
endmodule
