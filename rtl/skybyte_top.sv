// skybyte_top -- the SkyByte CXL-SSD with its host root-complex logic.
//
// Host side: every CPU memory request to the CXL window first meets the
// Promotion Look-aside Buffers (plb for 4 KB pages, plb_huge for 2 MB pages).  A write to a cacheline that has already
// been copied to host DRAM during a page promotion is forwarded to the host
// DRAM copy (host_fwd_*); every other request goes over CXL.mem to the SSD and
// is recorded by host_cxl_tracker with its tag and core.  Responses come back
// as MemData (read data for the core), Cmp NDR (write done) or SkyByte-Delay
// NDR, which the tracker turns into a Long Delay Exception for the issuing
// core (exc_*): the OS then switches threads and the load is replayed later.
// The OS-side copy engine drives the PLBs (plb_* and hplb_*) after it has
// received an MSI-X interrupt (msix_*) and acknowledges the finished
// promotion with host_ack.
// SSD side: ssd_controller with its write log, log indexes, data cache, flash
// channel queues, trigger policy, coalescing buffer and migration control.
// The SSD DRAM, the flash array, the FTL/GC firmware, the CPU cores and the
// CXL physical link are outside the design and appear as ports.
//
// CPU requests use a valid/ready handshake; tags must be unique among
// outstanding requests.  cpu_rsp_* and exc_* are one-cycle pulses.  The
// composition follows the paper's system figure; the port-level arrangement
// is this design's.
module skybyte_top
  import skybyte_pkg::*;
#(
  parameter int unsigned LOG_ENTRIES = 524288,
  parameter int unsigned FRAMES      = 114688,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned CHANNELS    = 16,
  parameter int unsigned QDEPTH      = 64,
  parameter int unsigned HOT_THRESH  = 8,
  parameter int unsigned PLB_ENTRIES = 64,
  parameter int unsigned HPLB_ENTRIES = 8,
  parameter int unsigned CORE_W      = 3,
  parameter int unsigned DW          = $clog2(2*LOG_ENTRIES + FRAMES*LINES_PER_PG)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CPU side (LLC miss requests to the CXL window)
  input  logic                 cpu_req_valid,
  output logic                 cpu_req_ready,
  input  logic [CORE_W-1:0]    cpu_req_core,
  input  m2s_req_t             cpu_req,
  output logic                 cpu_rsp_valid,
  output logic [CORE_W-1:0]    cpu_rsp_core,
  output tag_t                 cpu_rsp_tag,
  output line_t                cpu_rsp_data,
  output logic                 exc_valid,
  output logic [CORE_W-1:0]    exc_core,
  output tag_t                 exc_tag,
  // writes forwarded to the host DRAM copy of a page under promotion
  output logic                 host_fwd_valid,
  input  logic                 host_fwd_ready,
  output logic                 host_fwd_is_wr,
  output logic [ADDR_W-1:0]    host_fwd_addr,
  output line_t                host_fwd_data,
  // OS page-copy engine
  input  logic                 plb_alloc,
  input  lpa_t                 plb_alloc_src,
  input  lpa_t                 plb_alloc_dst,
  output logic                 plb_alloc_ok,
  input  logic                 plb_mark,
  input  lpa_t                 plb_mark_src,
  input  pgoff_t               plb_mark_line,
  input  logic                 plb_free,
  input  lpa_t                 plb_free_src,
  // OS copy engine, 2 MB huge pages (page numbers are address bits 63:21)
  input  logic                 hplb_alloc,
  input  logic [42:0]          hplb_alloc_src,
  input  logic [42:0]          hplb_alloc_dst,
  output logic                 hplb_alloc_ok,
  input  logic                 hplb_mark,
  input  logic [42:0]          hplb_mark_src,
  input  pgoff_t               hplb_mark_line,
  input  logic                 hplb_chunk_done,
  input  logic [42:0]          hplb_chunk_src,
  input  logic                 hplb_free,
  input  logic [42:0]          hplb_free_src,
  output logic                 msix_valid,
  input  logic                 msix_ready,
  output lpa_t                 msix_lpa,
  input  logic                 host_ack,
  input  lpa_t                 host_ack_lpa,
  input  logic                 pin_valid,
  input  lpa_t                 pin_lpa,
  // configuration
  input  logic                 cs_enable,
  input  logic                 mig_enable,
  input  logic [31:0]          cs_threshold,
  input  logic [31:0]          read_lat,
  input  logic [31:0]          write_lat,
  input  logic [31:0]          erase_lat,
  // SSD DRAM
  output logic                 dram_re,
  output logic [DW-1:0]        dram_raddr,
  input  line_t                dram_rdata,
  output logic                 dram_we,
  output logic [DW-1:0]        dram_waddr,
  output line_t                dram_wdata,
  // flash array
  output logic                 fl_re,
  output logic [PPA_W+PGOFF_W-1:0] fl_raddr,
  input  line_t                fl_rdata,
  output logic                 fl_we,
  output logic [PPA_W+PGOFF_W-1:0] fl_waddr,
  output line_t                fl_wdata,
  // FTL garbage collection
  input  logic [CHANNELS-1:0]  gc_block,
  input  logic [CHANNELS-1:0]  gc_erase_push,
  // observation
  output ssd_stats_t           stats,
  output logic [31:0]          host_fwd_count,
  output logic [31:0]          unknown_rsp
);
  // ---------------- root complex: PLB routing ----------------
  logic              lk4_to_host, lkh_to_host, lk_to_host;
  logic [ADDR_W-1:0] lk4_host_addr, lkh_host_addr, lk_host_addr;

  plb #(.ENTRIES(PLB_ENTRIES)) u_plb (
    .clk, .rst_n, .alloc(plb_alloc), .alloc_src(plb_alloc_src), .alloc_dst(plb_alloc_dst),
    .alloc_ok(plb_alloc_ok), .mark(plb_mark), .mark_src(plb_mark_src), .mark_line(plb_mark_line),
    .free(plb_free), .free_src(plb_free_src), .lk_addr(cpu_req.addr),
    .lk_is_wr(cpu_req.op == M2S_MEMWR), .lk_hit(), .lk_migrated(),
    .lk_to_host(lk4_to_host), .lk_host_addr(lk4_host_addr), .active());

  plb_huge #(.ENTRIES(HPLB_ENTRIES)) u_hplb (
    .clk, .rst_n, .alloc(hplb_alloc), .alloc_src(hplb_alloc_src), .alloc_dst(hplb_alloc_dst),
    .alloc_ok(hplb_alloc_ok), .mark(hplb_mark), .mark_src(hplb_mark_src), .mark_line(hplb_mark_line),
    .chunk_done(hplb_chunk_done), .chunk_src(hplb_chunk_src), .free(hplb_free), .free_src(hplb_free_src),
    .lk_addr(cpu_req.addr), .lk_is_wr(cpu_req.op == M2S_MEMWR), .lk_hit(), .lk_migrated(),
    .lk_to_host(lkh_to_host), .lk_host_addr(lkh_host_addr), .active());

  // a page is promoted either as a 4 KB page or inside a huge page, never both
  assign lk_to_host   = lk4_to_host || lkh_to_host;
  assign lk_host_addr = lkh_to_host ? lkh_host_addr : lk4_host_addr;

  logic     ssd_req_valid, ssd_req_ready, trk_ready;
  logic     ssd_rsp_valid;
  s2m_rsp_t ssd_rsp;

  assign host_fwd_valid = cpu_req_valid && lk_to_host;
  assign host_fwd_is_wr = cpu_req.op == M2S_MEMWR;
  assign host_fwd_addr  = lk_host_addr;
  assign host_fwd_data  = cpu_req.data;
  assign ssd_req_valid  = cpu_req_valid && !lk_to_host && trk_ready;
  assign cpu_req_ready  = lk_to_host ? host_fwd_ready : (ssd_req_ready && trk_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_fwd_count <= '0;
    else if (host_fwd_valid && host_fwd_ready) host_fwd_count <= host_fwd_count + 1'b1;
  end

  // ---------------- host CXL controller ----------------
  logic [CORE_W-1:0] trk_core;
  tag_t              trk_tag;
  logic              trk_cmp;

  host_cxl_tracker #(.ENTRIES(64), .CORE_W(CORE_W)) u_trk (
    .clk, .rst_n, .issue(ssd_req_valid && ssd_req_ready), .issue_tag(cpu_req.tag),
    .issue_core(cpu_req_core), .issue_ready(trk_ready),
    .rsp_valid(ssd_rsp_valid), .rsp_is_drs(ssd_rsp.kind == S2M_DRS), .rsp_drs_tag(ssd_rsp.tag),
    .rsp_ndr(ssd_rsp.ndr), .cmp_valid(trk_cmp), .cmp_core(trk_core), .cmp_tag(trk_tag),
    .exc_valid, .exc_core, .exc_tag, .unknown_rsp, .outstanding());

  // read data follows the tracker's one-cycle completion
  always_ff @(posedge clk) begin
    if (ssd_rsp_valid) cpu_rsp_data <= ssd_rsp.data;
  end
  assign cpu_rsp_valid = trk_cmp;
  assign cpu_rsp_core  = trk_core;
  assign cpu_rsp_tag   = trk_tag;

  // ---------------- the CXL-SSD ----------------
  ssd_controller #(.LOG_ENTRIES(LOG_ENTRIES), .FRAMES(FRAMES), .WAYS(WAYS), .CHANNELS(CHANNELS),
                   .QDEPTH(QDEPTH), .HOT_THRESH(HOT_THRESH), .DW(DW)) u_ssd (
    .clk, .rst_n,
    .req_valid(ssd_req_valid), .req_ready(ssd_req_ready), .req(cpu_req),
    .rsp_valid(ssd_rsp_valid), .rsp_ready(1'b1), .rsp(ssd_rsp),
    .cs_enable, .mig_enable, .cs_threshold, .read_lat, .write_lat, .erase_lat,
    .dram_re, .dram_raddr, .dram_rdata, .dram_we, .dram_waddr, .dram_wdata,
    .fl_re, .fl_raddr, .fl_rdata, .fl_we, .fl_waddr, .fl_wdata,
    .gc_block, .gc_erase_push,
    .msix_valid, .msix_ready, .msix_lpa, .host_ack, .host_ack_lpa, .pin_valid, .pin_lpa,
    .stats, .q_reads(), .q_writes(), .q_erases());
endmodule
