// l2_arbitrator: packet arbitration of the L2 concentrator's link inputs.
//
// The N_LINKS L1 links (8 to 16 per L2 board) each deliver whole, checked
// L1-L2 packets. The arbitrator grants one link at a time for a whole packet
// (until its last word) and then moves on round-robin, starting the search at
// the link after the one last served, so every busy link gets one packet in
// turn. out_link names the link of the packet passing through; it stays
// constant from the first to the last word. The first word of a packet
// passes in the cycle after the grant. The published design names the
// arbitrator; round-robin at packet granularity is this design's choice.
// Lint note: the upper bits of the integer candidate index are unused
// (UNUSEDSIGNAL).
module l2_arbitrator
  import spd_daq_pkg::*;
#(
  parameter int unsigned N_LINKS = 8
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid [N_LINKS],
  input  word_t in_data  [N_LINKS],
  input  logic  in_last  [N_LINKS],
  output logic  in_ready [N_LINKS],
  output logic  out_valid,
  output word_t out_data,
  output logic  out_last,
  output logic [$clog2(N_LINKS)-1:0] out_link,
  input  logic  out_ready
);
  localparam int unsigned LW = $clog2(N_LINKS);

  logic          busy;
  logic [LW-1:0] cur, nxt;
  logic          nxt_ok;

  always_comb begin
    nxt = cur; nxt_ok = 1'b0;
    for (int k = 1; k <= N_LINKS; k++) begin
      int unsigned c;
      c = (int'(cur) + k) % N_LINKS;
      if (!nxt_ok && in_valid[c]) begin nxt = LW'(c); nxt_ok = 1'b1; end
    end
  end

  always_comb begin
    out_valid = busy && in_valid[cur];
    out_data  = in_data[cur];
    out_last  = in_last[cur];
    out_link  = cur;
    for (int l = 0; l < N_LINKS; l++) in_ready[l] = busy && (cur == LW'(l)) && out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; cur <= LW'(N_LINKS - 1);
    end else if (!busy) begin
      if (nxt_ok) begin busy <= 1'b1; cur <= nxt; end
    end else if (out_valid && out_ready && out_last) begin
      busy <= 1'b0;
    end
  end
endmodule
