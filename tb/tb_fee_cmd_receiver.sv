// tb_fee_cmd_receiver: drives the serial command line with a command writer
// of its own and checks the FEE's frame and slice state after each command:
// commands are ignored while the reset line is active; a Start of Frame with
// no next frame defined starts nothing; Set Next Frame + Start of Frame opens
// the frame with slice 0 and a cleared time counter; Start of Slice advances
// the slice and reports the closed one; a Set Next Frame with a corrupted
// parity bit is rejected, so the following Start of Frame ends the frame
// without opening another; Disarm (reset line) clears the state.
`include "tb_common.svh"
module tb_fee_cmd_receiver;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic fee_rst, cmd_in;
  logic in_frame, next_valid, slice_end, parity_err;
  logic [31:0] frame_num, slice_num, time_cnt, next_frame, closed_frame, closed_slice;
  int n_end = 0, n_perr = 0;
  logic [31:0] last_cf, last_cs;

  fee_cmd_receiver dut (.*);

  always @(posedge clk) begin
    if (slice_end) begin n_end++; last_cf = closed_frame; last_cs = closed_slice; end
    if (parity_err) n_perr++;
  end

  task automatic send_bits(input logic b [$]);
    foreach (b[i]) begin cmd_in <= b[i]; @(posedge clk); end
    cmd_in <= 1'b0; @(posedge clk); @(posedge clk);
  endtask
  task automatic sof(); send_bits('{1'b1, 1'b0, 1'b1}); endtask
  task automatic sos(); send_bits('{1'b1, 1'b1, 1'b0}); endtask
  task automatic snf(input logic [31:0] n, input logic bad = 0);
    logic b [$];
    b = '{1'b1, 1'b1, 1'b1};
    for (int i = 31; i >= 0; i--) b.push_back(n[i]);
    b.push_back((^n) ^ bad);
    send_bits(b);
  endtask

  `TB_WATCHDOG(5000)

  initial begin
    int e0;
    logic [31:0] t0;
    fee_rst = 1; cmd_in = 0;
    repeat (3) @(posedge clk);
    // disarmed: ignored
    snf(7); sof();
    `TB_CHECK(!in_frame && !next_valid, "commands ignored while disarmed")
    fee_rst <= 0; @(posedge clk);
    // no next frame: nothing starts
    sof();
    `TB_CHECK(!in_frame, "SOF without next frame starts nothing")
    snf(32'd0);
    `TB_CHECK(next_valid && next_frame == 0, "next frame 0 stored")
    sof();
    `TB_CHECK(in_frame && frame_num == 0 && slice_num == 0, "frame 0 slice 0")
    `TB_CHECK(!next_valid, "next frame consumed")
    `TB_CHECK(time_cnt <= 3, $sformatf("time counter restarted (%0d)", time_cnt))
    t0 = time_cnt;
    repeat (10) @(posedge clk);
    `TB_CHECK(time_cnt == t0 + 10, "time counter counts cycles")
    e0 = n_end;
    sos();
    `TB_CHECK(slice_num == 1 && n_end == e0 + 1 && last_cs == 0 && last_cf == 0, "slice 0 closed")
    sos();
    `TB_CHECK(slice_num == 2 && n_end == e0 + 2 && last_cs == 1, "slice 1 closed")
    // corrupted Set Next Frame
    snf(32'd1, 1'b1);
    `TB_CHECK(!next_valid && n_perr == 1, "bad parity rejected")
    sof();
    `TB_CHECK(!in_frame && n_end == e0 + 3 && last_cs == 2 && last_cf == 0, "frame 0 ended, last slice closed")
    snf(32'h8000_0001);
    `TB_CHECK(next_valid && next_frame == 32'h8000_0001, "next frame with MSB set")
    sof();
    `TB_CHECK(in_frame && frame_num == 32'h8000_0001 && slice_num == 0 && n_end == e0 + 3, "frame opened, no slice closed")
    snf(32'h8000_0002);
    sos();
    `TB_CHECK(next_valid && slice_num == 1, "next frame kept across SOS")
    sof();
    `TB_CHECK(frame_num == 32'h8000_0002 && slice_num == 0 && last_cf == 32'h8000_0001 && last_cs == 1,
              "frame switch closes last slice")
    fee_rst <= 1; @(posedge clk); @(posedge clk);
    `TB_CHECK(!in_frame && frame_num == 0, "disarm resets")
    `TB_FINISH
  end
endmodule
