// tss_node: synchronous-command generator of an L1 concentrator.
//
// In the readout chain every L1 concentrator holds a White Rabbit node that
// executes the run schedule broadcast by the TSS controller and turns it into
// three synchronous commands for its FEE: Set Next Frame (carries the number
// of the next frame), Start of Frame (closes the running frame, opens the
// preloaded one and its slice 0) and Start of Slice (closes a slice and opens
// the next). This module is the command generator behind the White Rabbit
// core: the core itself, its clock recovery and the schedule messages are not
// modelled, so the schedule arrives as plain inputs: first frame number,
// slice length in clock cycles and slices per frame, started by run_start and
// ended by run_stop.
//
// Schedule executed (one command at a time on the serial line cmd_out):
//   run_start : Set Next Frame(first_frame), then Start of Frame when the
//               lead time SNF_LEAD cycles has passed;
//   each slice boundary: Start of Slice, or Start of Frame after
//               slices_per_frame slices;
//   one cycle after each Start of Frame, while the run goes on, Set Next
//               Frame(frame+1) preloads the following frame;
//   run_stop  : from then on the next frame is not preloaded. If it was
//               preloaded already, that frame still runs; the Start of
//               Frame that closes the last frame then opens nothing.
// The line format (start bit, 2-bit code, for Set Next Frame 32 number bits and
// an even-parity bit) is this design's choice; the command set and its meaning
// are the published ones. slice_len must be at least MIN_SLICE_LEN so that a
// Start of Frame and a Set Next Frame fit inside one slice.
//
// Also outputs the L1's own view of the current frame and slice numbers,
// which the data merge uses to restore the full numbers of FEE packets,
// and the number of slices of the previous frame.
module tss_node
  import spd_daq_pkg::*;
#(
  parameter int unsigned SNF_LEAD      = 64,   // cycles from run_start to first SOF
  parameter int unsigned MIN_SLICE_LEN = 48
) (
  input  logic        clk,
  input  logic        rst,
  // schedule
  input  logic        run_start,
  input  logic        run_stop,
  input  logic [31:0] first_frame,
  input  logic [31:0] slice_len,         // cycles per slice
  input  logic [31:0] slices_per_frame,
  // serial command line to the FEE
  output logic        cmd_out,
  // status
  output logic        running,           // a frame is open
  output logic [31:0] cur_frame,
  output logic [31:0] cur_slice,
  output logic [31:0] prev_frame_slices, // slices in the frame before cur_frame
  output logic        sof_pulse,         // a Start of Frame begins this cycle
  output logic        sos_pulse          // a Start of Slice begins this cycle
);
  typedef enum logic [1:0] {S_IDLE, S_LEAD, S_RUN} state_e;
  state_e state;

  logic [31:0] cyc;          // cycle within the slice
  logic [31:0] slc;          // slice within the frame
  logic        stop_req;
  logic        snf_due;      // send Set Next Frame when the line is free
  logic        snf_sent;     // the next frame has been preloaded
  logic [31:0] next_frame;

  // serialiser
  logic [CMD_SNF_BITS-1:0] sh;
  logic [5:0]              sh_cnt;
  logic                    send;
  tss_cmd_e                send_cmd;
  logic [31:0]             send_num;

  assign cmd_out = sh[CMD_SNF_BITS-1];

  always_comb begin
    send = 1'b0; send_cmd = CMD_NONE; send_num = next_frame;
    sof_pulse = 1'b0; sos_pulse = 1'b0;
    unique case (state)
      S_LEAD: if (cyc == 32'(SNF_LEAD)) begin send = 1'b1; send_cmd = CMD_SOF; sof_pulse = 1'b1; end
      S_RUN: begin
        if (cyc == slice_len - 1) begin
          send = 1'b1;
          if (slc == slices_per_frame - 1) begin send_cmd = CMD_SOF; sof_pulse = 1'b1; end
          else                             begin send_cmd = CMD_SOS; sos_pulse = 1'b1; end
        end else if (snf_due && sh_cnt == 0) begin
          send = 1'b1; send_cmd = CMD_SNF;
        end
      end
      default: if (run_start) begin send = 1'b1; send_cmd = CMD_SNF; send_num = first_frame; end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; cyc <= '0; slc <= '0; stop_req <= 1'b0; snf_due <= 1'b0; snf_sent <= 1'b0;
      next_frame <= '0; running <= 1'b0; cur_frame <= '0; cur_slice <= '0;
      prev_frame_slices <= '0; sh <= '0; sh_cnt <= '0;
    end else begin
      // serialiser: load or shift
      if (send) begin
        if (send_cmd == CMD_SNF) begin
          sh     <= {1'b1, send_cmd, send_num, ^send_num};
          sh_cnt <= 6'(CMD_SNF_BITS);
        end else begin
          sh     <= {1'b1, send_cmd, {(CMD_SNF_BITS-CMD_SHORT_BITS){1'b0}}};
          sh_cnt <= 6'(CMD_SHORT_BITS);
        end
      end else if (sh_cnt != 0) begin
        sh     <= sh << 1;
        sh_cnt <= sh_cnt - 1'b1;
      end

      if (run_stop && state != S_IDLE) stop_req <= 1'b1;

      unique case (state)
        S_IDLE: begin
          running <= 1'b0; stop_req <= 1'b0;
          if (run_start) begin
            state <= S_LEAD; cyc <= '0; next_frame <= first_frame;
          end
        end
        S_LEAD: begin
          cyc <= cyc + 1;
          if (sof_pulse) begin
            state <= S_RUN; cyc <= '0; slc <= '0; running <= 1'b1;
            cur_frame <= next_frame; cur_slice <= '0;
            prev_frame_slices <= '0;
            snf_due <= !stop_req && !run_stop;
            snf_sent <= 1'b0;
            next_frame <= next_frame + 1;
          end
        end
        default: begin  // S_RUN
          cyc <= cyc + 1;
          if (send && send_cmd == CMD_SNF) begin snf_due <= 1'b0; snf_sent <= 1'b1; end
          else if (stop_req || run_stop)  snf_due <= 1'b0;   // do not preload
          if (sos_pulse) begin
            cyc <= '0; slc <= slc + 1; cur_slice <= cur_slice + 1;
          end else if (sof_pulse) begin
            cyc <= '0; slc <= '0;
            prev_frame_slices <= slc + 1;
            snf_sent <= 1'b0;
            if (snf_sent) begin
              // the FEE open the preloaded frame
              cur_frame <= next_frame; cur_slice <= '0;
              next_frame <= next_frame + 1;
              snf_due <= !stop_req && !run_stop;
            end else begin
              // no next frame defined: the frame ends and none starts
              state <= S_IDLE; running <= 1'b0; stop_req <= 1'b0; snf_due <= 1'b0;
            end
          end
        end
      endcase
    end
  end

  // Commands never overlap on the line.
  assert property (@(posedge clk) disable iff (rst) send |-> (sh_cnt <= 1));
  assert property (@(posedge clk) disable iff (rst) (state == S_RUN) |-> (slice_len >= 32'(MIN_SLICE_LEN)));
endmodule
