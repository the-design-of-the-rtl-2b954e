// tb_tss_node: runs a short schedule through the TSS command generator and
// decodes its serial command line with an independent decoder.
// Schedule: first frame 5, slices of 60 cycles, 3 slices per frame; run_stop
// is raised during frame 6, after frame 7 has been preloaded. Expected on the
// line: SNF(5) SOF SNF(6) SOS SOS SOF SNF(7) SOS SOS SOF SOS SOS SOF, then
// silence. Frame 7 runs because it was preloaded, and the final SOF opens
// nothing. Checked: the command order, the frame numbers, the slice
// boundaries exactly 60 cycles apart, the lead time from the first SNF to the
// first SOF, and the node's running flag and frame/slice counters. A second
// run is stopped before its next frame is preloaded, so it holds one frame.
`include "tb_common.svh"
module tb_tss_node;
  import spd_daq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #4 clk = ~clk;

  logic rst, run_start, run_stop;
  logic [31:0] first_frame, slice_len, slices_per_frame;
  logic cmd_out, running, sof_pulse, sos_pulse;
  logic [31:0] cur_frame, cur_slice, prev_frame_slices;

  tss_node dut (.*);

  // independent decoder of the command line
  int unsigned cyc = 0;
  string       seen [$];
  int unsigned when [$];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    forever begin
      logic [1:0] code;
      logic [31:0] num;
      logic par;
      int unsigned t0;
      @(posedge clk);
      if (cmd_out === 1'b1) begin
        t0 = cyc;
        @(posedge clk) code[1] = cmd_out;
        @(posedge clk) code[0] = cmd_out;
        if (code == 2'd3) begin
          for (int i = 31; i >= 0; i--) @(posedge clk) num[i] = cmd_out;
          @(posedge clk) par = cmd_out;
          `TB_CHECK(par == ^num, "SNF parity")
          seen.push_back($sformatf("SNF%0d", num));
        end else if (code == 2'd1) seen.push_back("SOF");
        else if (code == 2'd2) seen.push_back("SOS");
        else seen.push_back("BAD");
        when.push_back(t0);
      end
    end
  end

  `TB_WATCHDOG(20000)

  initial begin
    string exp1 [$] = '{"SNF5","SOF","SNF6","SOS","SOS","SOF","SNF7","SOS","SOS","SOF","SOS","SOS","SOF"};
    string exp2 [$] = '{"SNF20","SOF","SOS","SOS","SOF"};
    int unsigned bnd [$];
    rst = 1; run_start = 0; run_stop = 0;
    first_frame = 5; slice_len = 60; slices_per_frame = 3;
    repeat (5) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    `TB_CHECK(!running && cmd_out == 0, "idle before run")
    run_start <= 1; @(posedge clk); run_start <= 0;
    // into frame 6: wait for the node to report it, then a little more
    wait (running && cur_frame == 6);
    @(posedge clk);
    `TB_CHECK(cur_slice == 0 && prev_frame_slices == 3, "frame 6 slice 0, frame 5 had 3 slices")
    repeat (70) @(posedge clk);
    `TB_CHECK(cur_slice == 1, "slice counter in frame 6")
    run_stop <= 1; @(posedge clk); run_stop <= 0;
    wait (!running);
    repeat (300) @(posedge clk);
    `TB_CHECK(seen.size() == exp1.size(), $sformatf("run 1: %0d commands", seen.size()))
    foreach (exp1[i]) if (i < seen.size()) `TB_CHECK(seen[i] == exp1[i], $sformatf("cmd %0d = %s, want %s", i, seen[i], exp1[i]))
    `TB_CHECK(when[1] - when[0] == 65, $sformatf("lead SNF->SOF %0d", when[1] - when[0]))
    foreach (seen[i]) if (seen[i] == "SOF" || seen[i] == "SOS") bnd.push_back(when[i]);
    for (int i = 1; i < bnd.size(); i++) `TB_CHECK(bnd[i] - bnd[i-1] == 60, $sformatf("boundary spacing %0d", bnd[i] - bnd[i-1]))
    `TB_CHECK(cur_frame == 7, "last frame 7")

    // run 2: stop before the next frame is preloaded
    seen.delete(); when.delete();
    first_frame <= 20;
    run_start <= 1; @(posedge clk); run_start <= 0;
    wait (sof_pulse);
    run_stop <= 1; @(posedge clk); run_stop <= 0;
    wait (!running);
    repeat (300) @(posedge clk);
    `TB_CHECK(seen.size() == exp2.size(), $sformatf("run 2: %0d commands", seen.size()))
    foreach (exp2[i]) if (i < seen.size()) `TB_CHECK(seen[i] == exp2[i], $sformatf("run2 cmd %0d = %s, want %s", i, seen[i], exp2[i]))
    `TB_FINISH
  end
endmodule
