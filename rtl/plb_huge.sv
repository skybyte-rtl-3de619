// plb_huge -- two-level Promotion Look-aside Buffer for 2 MB huge pages.
//
// When the page offered for promotion belongs to a host huge page, the OS
// copies the whole 2 MB page, one 4 KB chunk after another.  Tracking all
// 32768 lines of a huge page would need a 4 KB bitmap per entry; instead each
// entry keeps a first level of 512 bits (64 B), one per 4 KB chunk already
// copied, and a second level of 64 bits (8 B), one per line of the chunk now
// being copied.  Both levels, the source huge page (SSD address bits 63:21)
// and the host destination huge page live in one entry.
//
//   alloc       src,dst     installs an entry (lowest free slot); copying starts at chunk 0
//   mark        src,line    sets the line's bit in the current chunk
//   chunk_done  src         the current chunk is complete: its first-level bit
//                           is set, the line bitmap cleared, the next chunk becomes current
//   free        src         retires the entry after the promotion
//   lookup      addr,is_wr  combinational: hit, migrated (chunk bit set, or the
//                           line's bit when the chunk is the current one) and
//                           the routing decision to_host with host_addr
//
// The two-level split, the 64 B and 8 B bitmaps and chunk-by-chunk copying
// are the paper's; the command set, the entry count (ENTRIES, not given) and
// routing identical to the 4 KB PLB (writes to copied lines go to host DRAM,
// everything else to the SSD) are this design's choices.  Updates take effect
// at the next clock edge.
module plb_huge
  import skybyte_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              alloc,
  input  logic [42:0]       alloc_src,
  input  logic [42:0]       alloc_dst,
  output logic              alloc_ok,
  input  logic              mark,
  input  logic [42:0]       mark_src,
  input  pgoff_t            mark_line,
  input  logic              chunk_done,
  input  logic [42:0]       chunk_src,
  input  logic              free,
  input  logic [42:0]       free_src,
  input  logic [ADDR_W-1:0] lk_addr,
  input  logic              lk_is_wr,
  output logic              lk_hit,
  output logic              lk_migrated,
  output logic              lk_to_host,
  output logic [ADDR_W-1:0] lk_host_addr,
  output logic [$clog2(ENTRIES):0] active
);
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic         valid;
    logic [42:0]  src;
    logic [42:0]  dst;
    logic [511:0] chunks;     // first level: 4 KB chunks copied
    logic [8:0]   cur;        // chunk being copied
    logic [63:0]  lines;      // second level: lines of chunk cur copied
  } hent_t;

  hent_t ent [ENTRIES];

  logic [42:0]   lk_page;
  logic [8:0]    lk_chunk;
  pgoff_t        lk_line;
  logic          free_found;
  logic [EW-1:0] free_slot, lk_slot;

  assign lk_page  = lk_addr[63:21];
  assign lk_chunk = lk_addr[20:12];
  assign lk_line  = lk_addr[11:6];

  always_comb begin
    free_found = 1'b0; free_slot = '0;
    lk_hit = 1'b0; lk_slot = '0;
    active = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (!ent[i].valid) begin free_found = 1'b1; free_slot = EW'(i); end
      if (ent[i].valid && ent[i].src == lk_page) begin lk_hit = 1'b1; lk_slot = EW'(i); end
      active += ($clog2(ENTRIES)+1)'(ent[i].valid);
    end
    alloc_ok     = free_found;
    lk_migrated  = lk_hit && (ent[lk_slot].chunks[lk_chunk] ||
                              (ent[lk_slot].cur == lk_chunk && ent[lk_slot].lines[lk_line]));
    lk_to_host   = lk_migrated && lk_is_wr;
    lk_host_addr = {ent[lk_slot].dst, lk_addr[20:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (ent[i].valid && mark && ent[i].src == mark_src) ent[i].lines[mark_line] <= 1'b1;
        if (ent[i].valid && chunk_done && ent[i].src == chunk_src) begin
          ent[i].chunks[ent[i].cur] <= 1'b1;
          ent[i].lines <= '0;
          ent[i].cur   <= ent[i].cur + 1'b1;
        end
        if (ent[i].valid && free && ent[i].src == free_src) ent[i].valid <= 1'b0;
      end
      if (alloc && free_found)
        ent[free_slot] <= '{valid: 1'b1, src: alloc_src, dst: alloc_dst, chunks: '0, cur: '0, lines: '0};
    end
  end
endmodule
