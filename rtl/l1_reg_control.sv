// l1_reg_control: register block of the L1 concentrator.
//
// Holds the settings that the control path from the L2 concentrator writes
// and gives back the per-FEE status that the L1 monitors:
//   0x000 ARM        bit p = 1: FEE p armed (its reset line released).
//                    Writing 0 to a bit is the Disarm command for that FEE,
//                    writing 1 is Arm; one write can address any set of the
//                    FEE of this L1. Reset value: all disarmed.
//   0x001 PORT_EN    bit p = 1: port p takes part in the data merge (0xFF).
//   0x002 TIMEOUT    merge wait before a silent port is skipped (cycles).
//   0x003 ALARM      bit p set when port p reports a CRC error, a lost packet
//                    or an overflow; write 1 to clear. alarm = OR of all bits,
//                    the L1's signal to the DAQ control system.
//   0x004/0x005      source MAC, low 32 / high 16 bits
//   0x006/0x007      destination MAC (the L2 port), low 32 / high 16 bits
//   0x100 + 8*p + k  read-only counters of port p: k = 0 packets, 1 words,
//                    2 CRC errors, 3 lost packets, 4 overflows.
// Reads return reg_rdata one cycle after reg_rd (reg_rvalid). The register
// map and the bus are this design's choice: the published text names a
// register control block, Arm/Disarm and per-FEE status and data-rate
// monitoring, but no map and no message format.
module l1_reg_control
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_PORTS         = FEE_PER_L1,
  parameter logic [31:0] TIMEOUT_DEFAULT = 32'd100000,
  parameter logic [47:0] SRC_MAC_DEFAULT = 48'h02_00_00_00_01_00,
  parameter logic [47:0] DST_MAC_DEFAULT = 48'h02_00_00_00_02_00
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [11:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  // settings
  output logic [N_PORTS-1:0] arm,
  output logic [N_PORTS-1:0] port_en,
  output logic [31:0] timeout_cycles,
  output logic [47:0] src_mac,
  output logic [47:0] dst_mac,
  output logic        alarm,
  // status of the ports
  input  logic [31:0] cnt_pkts    [N_PORTS],
  input  logic [31:0] cnt_words   [N_PORTS],
  input  logic [31:0] cnt_crc_err [N_PORTS],
  input  logic [31:0] cnt_lost    [N_PORTS],
  input  logic [31:0] cnt_ovf     [N_PORTS]
);
  logic [N_PORTS-1:0] alarm_bits;
  logic [31:0] err_prev [N_PORTS];
  logic [31:0] err_sum  [N_PORTS];

  always_comb
    for (int p = 0; p < N_PORTS; p++) err_sum[p] = cnt_crc_err[p] + cnt_lost[p] + cnt_ovf[p];

  assign alarm = |alarm_bits;

  always_ff @(posedge clk) begin
    if (rst) begin
      arm <= '0; port_en <= '1; timeout_cycles <= TIMEOUT_DEFAULT;
      src_mac <= SRC_MAC_DEFAULT; dst_mac <= DST_MAC_DEFAULT;
      alarm_bits <= '0; reg_rdata <= '0; reg_rvalid <= 1'b0;
      for (int p = 0; p < N_PORTS; p++) err_prev[p] <= '0;
    end else begin
      for (int p = 0; p < N_PORTS; p++) begin
        err_prev[p] <= err_sum[p];
        if (err_sum[p] != err_prev[p]) alarm_bits[p] <= 1'b1;
      end
      if (reg_wr) begin
        unique case (reg_addr)
          12'h000: arm            <= reg_wdata[N_PORTS-1:0];
          12'h001: port_en        <= reg_wdata[N_PORTS-1:0];
          12'h002: timeout_cycles <= reg_wdata;
          12'h003: alarm_bits     <= alarm_bits & ~reg_wdata[N_PORTS-1:0];
          12'h004: src_mac[31:0]  <= reg_wdata;
          12'h005: src_mac[47:32] <= reg_wdata[15:0];
          12'h006: dst_mac[31:0]  <= reg_wdata;
          12'h007: dst_mac[47:32] <= reg_wdata[15:0];
          default: ;
        endcase
      end
      reg_rvalid <= reg_rd;
      if (reg_rd) begin
        reg_rdata <= '0;
        unique case (reg_addr)
          12'h000: reg_rdata <= 32'(arm);
          12'h001: reg_rdata <= 32'(port_en);
          12'h002: reg_rdata <= timeout_cycles;
          12'h003: reg_rdata <= 32'(alarm_bits);
          12'h004: reg_rdata <= src_mac[31:0];
          12'h005: reg_rdata <= 32'(src_mac[47:32]);
          12'h006: reg_rdata <= dst_mac[31:0];
          12'h007: reg_rdata <= 32'(dst_mac[47:32]);
          default:
            for (int p = 0; p < N_PORTS; p++) begin
              if (reg_addr[11:8] == 4'h1 && reg_addr[7:3] == 5'(p)) begin
                unique case (reg_addr[2:0])
                  3'd0: reg_rdata <= cnt_pkts[p];
                  3'd1: reg_rdata <= cnt_words[p];
                  3'd2: reg_rdata <= cnt_crc_err[p];
                  3'd3: reg_rdata <= cnt_lost[p];
                  3'd4: reg_rdata <= cnt_ovf[p];
                  default: ;
                endcase
              end
            end
        endcase
      end
    end
  end
endmodule
