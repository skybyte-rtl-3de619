// plb -- Promotion Look-aside Buffer in the host root complex.
//
// Tracks pages that are being copied from the CXL-SSD to host DRAM so that
// host accesses stay consistent while the copy is under way.  Each of the
// ENTRIES entries holds the source page (SSD page number), the destination
// page (host DRAM page number), a 64-bit bitmap of the cachelines already
// copied and a valid bit, i.e. the 8 B + 8 B + 8 B + valid entry of the paper.
//
//   alloc  src,dst      installs an entry in the lowest free slot (alloc_ok=0 when full)
//   mark   src,line     sets the line's bit after the copy engine has moved it
//   free   src          retires the entry when the migration is complete
//   lookup addr,is_wr   combinational: hit, the line's migrated bit, and the
//                       routing decision to_host with host_addr
//
// Routing follows the paper: a write to a line whose migrated bit is set goes
// to the host-DRAM copy; other accesses, including reads of a page under
// promotion, are served by the SSD.  READ_MIGRATED_FROM_HOST=1 also sends reads
// of already-copied lines to host DRAM, which keeps a read after such a write
// coherent; it is off by default because the paper serves those reads from the
// SSD.  Updates take effect at the next clock edge.
module plb
  import skybyte_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter bit          READ_MIGRATED_FROM_HOST = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              alloc,
  input  lpa_t              alloc_src,
  input  lpa_t              alloc_dst,
  output logic              alloc_ok,
  input  logic              mark,
  input  lpa_t              mark_src,
  input  pgoff_t            mark_line,
  input  logic              free,
  input  lpa_t              free_src,
  input  logic [ADDR_W-1:0] lk_addr,
  input  logic              lk_is_wr,
  output logic              lk_hit,
  output logic              lk_migrated,
  output logic              lk_to_host,
  output logic [ADDR_W-1:0] lk_host_addr,
  output logic [$clog2(ENTRIES):0] active
);
  localparam int unsigned EW = $clog2(ENTRIES);

  typedef struct packed {
    logic        valid;
    lpa_t        src;
    lpa_t        dst;
    logic [63:0] bitmap;
  } plb_ent_t;

  plb_ent_t ent [ENTRIES];

  logic          free_found;
  logic [EW-1:0] free_slot;
  logic [EW-1:0] lk_slot;
  lpa_t          lk_page;
  pgoff_t        lk_line;

  assign lk_page = addr_lpa(lk_addr);
  assign lk_line = addr_pgoff(lk_addr);

  always_comb begin
    free_found = 1'b0; free_slot = '0;
    lk_hit = 1'b0; lk_slot = '0;
    active = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (!ent[i].valid) begin free_found = 1'b1; free_slot = EW'(i); end
      if (ent[i].valid && ent[i].src == lk_page) begin lk_hit = 1'b1; lk_slot = EW'(i); end
      active += (EW+1)'(ent[i].valid);
    end
    alloc_ok     = free_found;
    lk_migrated  = lk_hit && ent[lk_slot].bitmap[lk_line];
    lk_to_host   = lk_migrated && (lk_is_wr || READ_MIGRATED_FROM_HOST);
    lk_host_addr = {ent[lk_slot].dst, lk_addr[11:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (ent[i].valid && mark && ent[i].src == mark_src) ent[i].bitmap[mark_line] <= 1'b1;
        if (ent[i].valid && free && ent[i].src == free_src) ent[i].valid <= 1'b0;
      end
      if (alloc && free_found) ent[free_slot] <= '{valid: 1'b1, src: alloc_src, dst: alloc_dst, bitmap: '0};
    end
  end
endmodule
