// fee_cmd_receiver: the FEE's clock-and-TSS-command receiver.
//
// Decodes the serial synchronous-command line from the L1 concentrator and
// keeps the FEE's time structure:
//   Set Next Frame  - the 32-bit number is stored as "next frame" only when
//                     all its bits and the parity bit have arrived intact,
//                     so the FEE never sees a partly received number;
//   Start of Frame  - closes the running frame (and its last slice). If a
//                     next frame is defined it opens that frame with slice 0
//                     and clears the frame time counter; the next-frame
//                     register is then consumed. With no next frame defined
//                     no frame starts;
//   Start of Slice  - closes the running slice and opens the next one; slice
//                     numbers count from 0 in every frame.
// fee_rst is the reset line that the concentrator drives (active from
// Disarm until Arm). While it is active all commands are ignored and the
// state is cleared.
//
// Timing: a command acts on the cycle after its last bit (3 cycles after its
// start bit for Start of Frame/Slice). slice_end pulses for one cycle when a
// slice closes, with closed_frame/closed_slice naming that slice, so the hit
// framer can send the slice's data. time_cnt counts clock cycles from the
// start of the frame. The line format is this design's choice (see
// spd_daq_pkg); the command semantics follow the published run structure.
module fee_cmd_receiver
  import spd_daq_pkg::*;
(
  input  logic        clk,
  input  logic        fee_rst,        // reset line from L1: Disarm = 1
  input  logic        cmd_in,
  output logic        in_frame,
  output logic [31:0] frame_num,
  output logic [31:0] slice_num,
  output logic [31:0] time_cnt,
  output logic        next_valid,
  output logic [31:0] next_frame,
  output logic        slice_end,      // one-cycle pulse
  output logic [31:0] closed_frame,
  output logic [31:0] closed_slice,
  output logic        parity_err      // one-cycle pulse: Set Next Frame rejected
);
  typedef enum logic [1:0] {R_IDLE, R_CODE, R_NUM} rstate_e;
  rstate_e     rstate;
  logic [5:0]  cnt;       // bits still expected in the current phase
  logic        code_hi;   // first code bit
  logic [31:0] sh;        // frame number being received
  tss_cmd_e    code;      // code complete with the bit on cmd_in

  assign code = tss_cmd_e'({code_hi, cmd_in});

  // Actions of Start of Frame and Start of Slice (shared with reset).
  always_ff @(posedge clk) begin
    slice_end  <= 1'b0;
    parity_err <= 1'b0;
    if (fee_rst) begin
      rstate <= R_IDLE; cnt <= '0; code_hi <= 1'b0; sh <= '0;
      in_frame <= 1'b0; frame_num <= '0; slice_num <= '0; time_cnt <= '0;
      next_valid <= 1'b0; next_frame <= '0;
      closed_frame <= '0; closed_slice <= '0;
    end else begin
      time_cnt <= time_cnt + 1;
      unique case (rstate)
        R_IDLE: if (cmd_in) rstate <= R_CODE;
        R_CODE: begin
          code_hi <= cmd_in;
          if (cnt == 0) cnt <= 6'd1;          // first code bit taken
          else begin
            cnt <= '0;
            rstate <= R_IDLE;
            unique case (code)
              CMD_SNF: begin rstate <= R_NUM; cnt <= 6'd33; end
              CMD_SOF: begin
                if (in_frame) begin
                  slice_end    <= 1'b1;
                  closed_frame <= frame_num;
                  closed_slice <= slice_num;
                end
                in_frame   <= next_valid;
                next_valid <= 1'b0;
                if (next_valid) frame_num <= next_frame;
                slice_num  <= '0;
                time_cnt   <= '0;
              end
              CMD_SOS: if (in_frame) begin
                slice_end    <= 1'b1;
                closed_frame <= frame_num;
                closed_slice <= slice_num;
                slice_num    <= slice_num + 1;
              end
              default: ;
            endcase
          end
        end
        default: begin  // R_NUM: 32 number bits then parity
          cnt <= cnt - 1'b1;
          if (cnt != 1) sh <= {sh[30:0], cmd_in};
          else begin
            rstate <= R_IDLE;
            if ((^sh) == cmd_in) begin
              next_frame <= sh;
              next_valid <= 1'b1;
            end else begin
              parity_err <= 1'b1;
            end
          end
        end
      endcase
    end
  end
endmodule
