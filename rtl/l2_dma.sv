// l2_dma: transfer of sorted slices into the readout computer's memory.
//
// Writes the slice blocks coming from l2_data_sort, word after word, into a
// ring buffer in host memory of ring_words 32-bit words starting at byte
// address ring_base. Each word becomes one memory-write request
// (req_addr/req_data, valid/ready). The PCIe 3.0 x16 core that would carry
// these requests is not modelled. Two free-running word counters describe the
// ring:
//   wr_count  - words written so far. It is published only at the end of a
//               slice block, so the host never sees part of a slice;
//   rd_count  - input from the host: the words it has consumed.
// When the ring is full (written - rd_count == ring_words) the DMA stops
// taking data, which back-pressures the sort buffer. slice_done pulses when a
// slice block has been written completely. ring_words must be at least the
// largest slice block (BIN_WORDS + 3 of l2_data_sort): the host frees ring
// space only for published slices, so a block larger than the ring would
// never complete.
// The published design says only that the L2 moves the data into the
// computer's RAM over PCIe. The ring and its counters are this design's
// choice. One word moves per cycle.
module l2_dma
  import spd_daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [63:0] ring_base,
  input  logic [31:0] ring_words,
  input  logic [31:0] rd_count,
  input  logic        in_valid,
  input  word_t       in_data,
  input  logic        in_last,
  output logic        in_ready,
  output logic        req_valid,
  output logic [63:0] req_addr,
  output word_t       req_data,
  input  logic        req_ready,
  output logic [31:0] wr_count,
  output logic        slice_done,
  output logic [31:0] cnt_full_cycles
);
  logic [31:0] written;     // words handed to the memory interface
  logic [31:0] offs;        // ring offset of the next word
  logic        ring_full;

  assign ring_full = (written - rd_count) >= ring_words;
  assign req_valid = in_valid && !ring_full;
  assign req_addr  = ring_base + {30'd0, offs, 2'b00};
  assign req_data  = in_data;
  assign in_ready  = req_ready && !ring_full;

  always_ff @(posedge clk) begin
    slice_done <= 1'b0;
    if (rst) begin
      written <= '0; offs <= '0; wr_count <= '0; cnt_full_cycles <= '0;
    end else begin
      if (in_valid && ring_full) cnt_full_cycles <= cnt_full_cycles + 1;
      if (req_valid && req_ready) begin
        written <= written + 1;
        offs    <= (offs == ring_words - 1) ? '0 : offs + 1;
        if (in_last) begin
          wr_count   <= written + 1;
          slice_done <= 1'b1;
        end
      end
    end
  end
endmodule
