// pkt_fifo: packet FIFO with commit and rollback (store and forward).
//
// Words are written one per cycle while wr_valid is high. They stay invisible
// to the read side until the writer pulses wr_commit, which publishes every
// word written since the last commit or drop. wr_drop instead rewinds the
// write pointer to the last commit, discarding the unfinished packet; this is
// how a packet with a bad checksum, or one that does not fit, is removed.
// wr_commit/wr_drop may come in the same cycle as a write and then include it.
// full is raised when the next write would overwrite unread data; a write
// while full is ignored and the writer is expected to drop the packet.
//
// The read side is a valid/ready stream with one-cycle read latency hidden
// behind a registered output word. Storage is a plain array of DEPTH words.
module pkt_fifo #(
  parameter int unsigned WIDTH = 33,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_valid,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_commit,
  input  logic             wr_drop,
  output logic             full,
  output logic [$clog2(DEPTH):0] free_words,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data,
  input  logic             rd_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, cptr, rptr;          // write, committed, read
  logic [AW:0] wptr_n;
  logic        do_wr, do_rd, out_load;

  assign full       = (wptr - rptr) == (AW+1)'(DEPTH);
  assign free_words = (AW+1)'(DEPTH) - (wptr - rptr);
  assign do_wr      = wr_valid && !full;
  assign wptr_n     = wptr + (AW+1)'(do_wr);

  // Output register: load when empty or being consumed.
  assign out_load = (!rd_valid || rd_ready);
  assign do_rd    = out_load && (rptr != cptr);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0; cptr <= '0; rptr <= '0;
      rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      if (wr_drop)        wptr <= cptr;
      else                wptr <= wptr_n;
      if (wr_commit && !wr_drop) cptr <= wptr_n;
      if (do_rd) begin
        rd_data  <= mem[rptr[AW-1:0]];
        rd_valid <= 1'b1;
        rptr     <= rptr + 1'b1;
      end else if (rd_ready) begin
        rd_valid <= 1'b0;
      end
    end
  end

  // The committed pointer never passes the write pointer.
  assert property (@(posedge clk) disable iff (rst) (wptr - cptr) <= (AW+1)'(DEPTH));
endmodule
