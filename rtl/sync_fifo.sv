// sync_fifo: small synchronous FIFO, valid/ready on both sides.
//
// in_ready is low when DEPTH entries are stored. The output is first-word
// fall-through: out_data shows the oldest entry whenever out_valid is high.
// Used for header descriptors next to the packet FIFOs.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;

  assign in_ready  = (wptr - rptr) != (AW+1)'(DEPTH);
  assign out_valid = (wptr != rptr);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0; rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end
endmodule
