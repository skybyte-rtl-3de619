// skybyte_pkg -- types and constants shared by the CXL-SSD controller and the
// host-side blocks.
//
// The No Data Response (NDR) layout and its opcode encodings follow the
// CXL.mem NDR format extended with one reserved opcode (111b) that signals a
// long access delay.  The host address split (cacheline offset 5..0, page
// offset 11..6, logical page address 63..12) follows the 4 KB page / 64 B line
// organisation.  Request/response structs, the flash operation enum and the
// widths of data-cache frames and SSD DRAM line addresses are choices of this
// design.
package skybyte_pkg;

  // ---------------- address split ----------------
  localparam int unsigned ADDR_W       = 64;
  localparam int unsigned LPA_W        = 52;   // address bits 63..12
  localparam int unsigned PGOFF_W      = 6;    // address bits 11..6
  localparam int unsigned LINES_PER_PG = 64;   // 4 KB page / 64 B line
  localparam int unsigned CL_BITS      = 512;  // one 64 B cacheline
  localparam int unsigned TAG_W        = 16;   // CXL.mem transaction tag
  localparam int unsigned LOGOFF_W     = 26;   // log offset field of a 2nd-level entry
  localparam int unsigned PPA_W        = 25;   // 128 GB / 4 KB pages
  localparam int unsigned DADDR_W      = 24;   // SSD DRAM cacheline address (512 MB / 64 B = 2^23, one spare bit)

  typedef logic [CL_BITS-1:0] line_t;
  typedef logic [LPA_W-1:0]   lpa_t;
  typedef logic [PGOFF_W-1:0] pgoff_t;
  typedef logic [TAG_W-1:0]   tag_t;

  // ---------------- CXL.mem NDR (S2M) message ----------------
  // Field order and widths: Valid(1) Opcode(3) reserved(4) Tag(16) reserved(16).
  typedef enum logic [2:0] {
    NDR_CMP           = 3'b000,  // completion for writebacks, reads, invalidates
    NDR_CMP_S         = 3'b001,  // CXL.cache coherence opcodes
    NDR_CMP_E         = 3'b010,
    NDR_BI_CONFLICTACK= 3'b100,
    NDR_SKYBYTE_DELAY = 3'b111   // long access delay hint from the SSD
  } ndr_opcode_e;

  typedef struct packed {
    logic        valid;
    logic [2:0]  opcode;
    logic [3:0]  rsvd0;
    tag_t        tag;
    logic [15:0] rsvd1;
  } ndr_msg_t;                   // 40 bits

  // ---------------- simplified CXL.mem request / data response ----------------
  typedef enum logic { M2S_MEMRD = 1'b0, M2S_MEMWR = 1'b1 } m2s_op_e;

  typedef struct packed {
    m2s_op_e             op;
    tag_t                tag;
    logic [ADDR_W-1:0]   addr;
    line_t               data;   // write data (MemWr only)
  } m2s_req_t;

  typedef enum logic { S2M_NDR = 1'b0, S2M_DRS = 1'b1 } s2m_kind_e;

  typedef struct packed {
    s2m_kind_e kind;             // DRS = MemData response carrying data
    ndr_msg_t  ndr;              // valid when kind == S2M_NDR
    tag_t      tag;              // tag of a DRS response
    line_t     data;
  } s2m_rsp_t;

  // ---------------- flash operations ----------------
  typedef enum logic [1:0] { FOP_READ = 2'd0, FOP_WRITE = 2'd1, FOP_ERASE = 2'd2 } flash_op_e;

  // ---------------- controller event counters ----------------
  typedef struct packed {
    logic [31:0] rd_cache_hit;    // R1: read served by the data cache
    logic [31:0] rd_log_hit;      // R2: read served by the write log
    logic [31:0] rd_miss;         // R3: page fetched from flash
    logic [31:0] delay_ndr;       // SkyByte-Delay NDRs sent
    logic [31:0] gc_trigger;      // of those, forced by a GC-blocked channel
    logic [31:0] wr;              // W1: writes appended to the log
    logic [31:0] wr_cache_upd;    // W2: writes that also updated a cached page
    logic [31:0] log_switch;      // log buffer switches (compactions started)
    logic [31:0] cmp_cached;      // L2: compacted pages flushed from the data cache
    logic [31:0] cmp_merged;      // L3-L5: compacted pages merged in the coalescing buffer
    logic [31:0] cmp_lines;       // dirty log lines merged during compaction
    logic [31:0] flash_rd;        // page reads issued to flash
    logic [31:0] flash_wr;        // page programs issued to flash
    logic [31:0] wr_stall;        // cycles a write waited for a free log buffer
    logic [31:0] mig_drop;        // pages dropped after migration to the host
    logic [31:0] fill_overlap;    // requests served while a delayed page fetch was in flight
  } ssd_stats_t;

  function automatic lpa_t addr_lpa(input logic [ADDR_W-1:0] a);
    return a[63:12];
  endfunction
  function automatic pgoff_t addr_pgoff(input logic [ADDR_W-1:0] a);
    return a[11:6];
  endfunction

endpackage
