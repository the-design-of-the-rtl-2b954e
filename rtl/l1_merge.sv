// l1_merge: data merge and control of the L1 concentrator.
//
// Merges the packets of the N_PORTS FEE receivers into one stream of L1-L2
// packets that is ordered by (frame, slice). An FEE sends at least one packet
// per slice and sends its slices in order, so the merge takes the packet with
// the smallest (frame, slice) among the queue heads (ties go to the lowest
// port) once no enabled port can still deliver something smaller: every
// enabled port either has a packet waiting or has already delivered a
// packet whose (frame, slice) is not below the chosen one. This is a k-way
// merge: the output never goes back in time. The second condition lets the
// last slice of a run go out although no further packets follow it. If a
// port stays silent for timeout_cycles while others wait, the merge goes on
// without it (counted in cnt_timeouts) so that a dead FEE cannot stall the
// concentrator. Such a port is then treated as absent and does not hold up
// the merge again until it delivers a packet; so a dead FEE costs one
// timeout, not one per packet. Packets of a port that comes back may be older
// than what has already gone out; the L2 drops them as late.
//
// The FEE sends only the low 10 frame bits and 16 slice bits. The merge
// restores the full 32-bit numbers from the L1's own frame and slice
// counters (tss_node): the full number is the latest one whose low bits
// match, and a frame that is one behind takes its slice reference from the
// slice count of the previous frame. It then writes the L1-L2 header
// (positions as published):
//   word 0 : type[31:26] L1 port[25:22] board id[21:14] payload format[13:8]
//            packet number[7:0]
//   word 1 : frame number, word 2 : slice number, then the FEB payload.
// The 10-bit FEE board id becomes 8 bits here (the two published layouts
// differ): the low 8 bits are kept. The FEE time-counter LSBs have no field
// in the L1-L2 header and are not passed on.
//
// Output: valid/ready stream, out_last on the final word of each packet.
module l1_merge
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_PORTS = FEE_PER_L1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [N_PORTS-1:0] port_en,
  input  logic [31:0] timeout_cycles,
  // L1 time structure
  input  logic [31:0] cur_frame,
  input  logic [31:0] cur_slice,
  input  logic [31:0] prev_frame_slices,
  // from the receivers
  input  logic        desc_valid [N_PORTS],
  output logic        desc_ready [N_PORTS],
  input  feb_hdr0_t   desc_h0    [N_PORTS],
  input  feb_hdr1_t   desc_h1    [N_PORTS],
  input  logic [15:0] desc_len   [N_PORTS],
  input  logic        pl_valid   [N_PORTS],
  input  word_t       pl_data    [N_PORTS],
  output logic        pl_ready   [N_PORTS],
  // L1-L2 packet stream
  output logic        out_valid,
  output word_t       out_data,
  output logic        out_last,
  input  logic        out_ready,
  output logic [31:0] cnt_timeouts
);
  localparam int unsigned PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;

  logic [31:0] kf [N_PORTS];   // restored frame
  logic [31:0] ks [N_PORTS];   // restored slice
  logic        cand [N_PORTS];
  logic        all_here, any_here, timed_out;
  logic [63:0] last_key [N_PORTS];   // (frame, slice) last taken from each port
  logic        seen     [N_PORTS];
  logic        absent   [N_PORTS];   // timed out, not heard from since
  logic [31:0] wait_cnt;

  always_comb begin
    any_here = 1'b0;
    for (int p = 0; p < N_PORTS; p++) begin
      logic [31:0] sref;
      kf[p] = extend_lsb(cur_frame, 32'(desc_h1[p].frame_lsb), FRAME_LSB_W);
      sref  = (kf[p] == cur_frame) ? cur_slice : prev_frame_slices - 1;
      ks[p] = extend_lsb(sref, 32'(desc_h1[p].slice_lsb), SLICE_LSB_W);
      cand[p] = port_en[p] && desc_valid[p];
      if (cand[p]) any_here = 1'b1;
    end
  end
  assign timed_out = any_here && (wait_cnt >= timeout_cycles);

  // smallest (frame, slice) among the candidates
  logic [PW-1:0] best;
  logic          best_ok;
  always_comb begin
    best = '0; best_ok = 1'b0;
    for (int p = 0; p < N_PORTS; p++) begin
      if (cand[p] && (!best_ok || {kf[p], ks[p]} < {kf[best], ks[best]})) begin
        best = PW'(p); best_ok = 1'b1;
      end
    end
  end

  typedef enum logic [2:0] {M_IDLE, M_H0, M_FR, M_SL, M_PL} mstate_e;
  mstate_e       ms;
  logic [PW-1:0] sel;
  l1l2_hdr0_t    oh0;
  logic [31:0]   ofr, osl;
  logic [15:0]   left;
  logic          go;

  // no enabled, empty port can still send a smaller (frame, slice)
  logic blocking [N_PORTS];
  always_comb begin
    all_here = 1'b1;
    for (int p = 0; p < N_PORTS; p++) begin
      blocking[p] = port_en[p] && !desc_valid[p] && !absent[p]
                    && !(seen[p] && {kf[best], ks[best]} <= last_key[p]);
      if (blocking[p]) all_here = 1'b0;
    end
  end

  assign go = (ms == M_IDLE) && best_ok && (all_here || timed_out);

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      desc_ready[p] = go && (best == PW'(p));
      pl_ready[p]   = (ms == M_PL) && (sel == PW'(p)) && out_ready;
    end
    out_valid = 1'b0; out_data = '0; out_last = 1'b0;
    unique case (ms)
      M_H0: begin out_valid = 1'b1; out_data = oh0; end
      M_FR: begin out_valid = 1'b1; out_data = ofr; end
      M_SL: begin out_valid = 1'b1; out_data = osl; out_last = (left == 0); end
      M_PL: begin out_valid = pl_valid[sel]; out_data = pl_data[sel]; out_last = (left == 1); end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ms <= M_IDLE; sel <= '0; oh0 <= '0; ofr <= '0; osl <= '0; left <= '0;
      wait_cnt <= '0; cnt_timeouts <= '0;
      for (int p = 0; p < N_PORTS; p++) begin last_key[p] <= '0; seen[p] <= 1'b0; absent[p] <= 1'b0; end
    end else begin
      for (int p = 0; p < N_PORTS; p++) begin
        if (desc_valid[p])                                absent[p] <= 1'b0;
        else if (go && blocking[p])                       absent[p] <= 1'b1;
      end
      if (ms != M_IDLE || !any_here || all_here) wait_cnt <= '0;
      else                                        wait_cnt <= wait_cnt + 1;
      unique case (ms)
        M_IDLE: if (go) begin
          sel  <= best;
          oh0  <= '{pkt_type: desc_h0[best].pkt_type, l1_port: 4'(best),
                    board_id: desc_h0[best].board_id[7:0], fmt_id: desc_h1[best].fmt_id,
                    pkt_num: desc_h0[best].pkt_num};
          ofr  <= kf[best];
          osl  <= ks[best];
          left <= desc_len[best];
          ms   <= M_H0;
          last_key[best] <= {kf[best], ks[best]};
          seen[best]     <= 1'b1;
          if (!all_here) cnt_timeouts <= cnt_timeouts + 1;
        end
        M_H0: if (out_ready) ms <= M_FR;
        M_FR: if (out_ready) ms <= M_SL;
        M_SL: if (out_ready) ms <= (left == 0) ? M_IDLE : M_PL;
        default: if (out_ready && pl_valid[sel]) begin
          left <= left - 1'b1;
          if (left == 1) ms <= M_IDLE;
        end
      endcase
    end
  end
endmodule
