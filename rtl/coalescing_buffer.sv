// coalescing_buffer -- one-page staging buffer used by log compaction.
//
// A page that is not in the data cache is loaded from flash into this buffer
// line by line, the dirty lines found in the write log are written over it,
// and the merged page is streamed back to flash.  It holds LINES 64 B lines.
// Alongside the data it keeps a per-line dirty mask that is set by merge
// writes and cleared by clear_mask, so the number of coalesced lines of the
// current page can be read out (merged_lines).  One write port, one read port
// with one cycle of read latency.  The merge role and page size follow the
// paper; the port arrangement and the dirty mask are this design's.
module coalescing_buffer
  import skybyte_pkg::*;
#(
  parameter int unsigned LINES = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic                     wr_merge,     // write comes from the log (counts as coalesced)
  input  logic [$clog2(LINES)-1:0] wr_line,
  input  line_t                    wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(LINES)-1:0] rd_line,
  output line_t                    rd_data,
  input  logic                     clear_mask,
  output logic [$clog2(LINES):0]   merged_lines
);
  line_t            mem [LINES];
  logic [LINES-1:0] mask;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_line] <= wr_data;
    if (rd_en) rd_data <= mem[rd_line];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mask <= '0;
    else if (clear_mask) mask <= '0;
    else if (wr_en && wr_merge) mask[wr_line] <= 1'b1;
  end

  always_comb begin
    merged_lines = '0;
    for (int i = 0; i < LINES; i++) merged_lines += ($clog2(LINES)+1)'(mask[i]);
  end
endmodule
