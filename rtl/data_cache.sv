// data_cache -- tag store of the page-granular read-write data cache.
//
// The page data itself sits in SSD DRAM; this block decides where.  The cache
// is WAYS-way set associative over FRAMES 4 KB frames; set = LPA mod SETS and
// frame = set*WAYS + way.  Replacement is LRU, kept as a per-way age
// (a permutation of 0..WAYS-1 within each set).  Every entry also carries a
// saturating access counter: when a counted access takes it past
// HOT_THRESH the block pulses hot with the page's LPA, which makes the page a
// candidate for promotion to host DRAM.
//
// Requests (req_valid, accepted when ready; result one cycle later on
// rsp_valid):
//   LOOKUP lpa [count]  -> hit, frame; on a hit the way becomes MRU and, if
//                          count, its access counter increments
//   ALLOC  lpa          -> frame chosen for the page (an invalid way, else the
//                          LRU way), installed as MRU; evicted/ev_lpa report a
//                          replaced page.  Pages here never hold data that the
//                          write log does not also hold, so eviction needs no
//                          write-back.
//   REMOVE lpa          -> invalidates the page if present (after migration)
// After reset the valid bits are swept clear, one set per cycle, before ready
// rises.
//
// From the paper: page granularity, the 448 MB data-cache capacity, LRU
// eviction, and access counting with a threshold for migration candidates.
// This design's choices: set associativity (the paper's prototype indexes the
// cache with a red-black tree), the number of ways, the counter width and the
// hot threshold.
module data_cache
  import skybyte_pkg::*;
#(
  parameter int unsigned FRAMES     = 114688,  // 448 MB / 4 KB
  parameter int unsigned WAYS       = 16,
  parameter int unsigned HOT_THRESH = 8,
  parameter int unsigned ACC_W      = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        ready,
  input  logic [1:0]  req_op,       // 0 LOOKUP, 1 ALLOC, 2 REMOVE
  input  lpa_t        req_lpa,
  input  logic        req_count,
  output logic        rsp_valid,
  output logic        hit,
  output logic [$clog2(FRAMES)-1:0] frame,
  output logic        evicted,
  output lpa_t        ev_lpa,
  output logic        hot,
  output lpa_t        hot_lpa
);
  localparam int unsigned SETS = FRAMES / WAYS;
  localparam int unsigned SW   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WW   = $clog2(WAYS);
  localparam int unsigned FW   = $clog2(FRAMES);

  typedef struct packed {
    logic             valid;
    lpa_t             lpa;
    logic [WW-1:0]    age;
    logic [ACC_W-1:0] acc;
  } ent_t;
  typedef ent_t [WAYS-1:0] row_t;

  row_t tags [SETS];

  logic          init_busy;
  logic [SW-1:0] init_set;
  logic [SW-1:0] set;
  row_t          row, nrow;
  logic          m_hit, m_inv, hot_c;
  logic [WW-1:0] m_way, inv_way, lru_way, use_way;

  assign ready = !init_busy;
  assign set   = SW'(req_lpa % LPA_W'(SETS));
  assign row   = tags[set];

  always_comb begin
    m_hit = 1'b0; m_way = '0; m_inv = 1'b0; inv_way = '0; lru_way = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (row[w].valid && row[w].lpa == req_lpa) begin m_hit = 1'b1; m_way = WW'(w); end
      if (!row[w].valid) begin m_inv = 1'b1; inv_way = WW'(w); end
      if (row[w].age == WW'(WAYS-1)) lru_way = WW'(w);
    end
    use_way = (req_op == 2'd1) ? (m_hit ? m_way : (m_inv ? inv_way : lru_way)) : m_way;
    // next row: touch use_way (LRU ages stay a permutation)
    nrow = row;
    for (int w = 0; w < WAYS; w++)
      if (row[w].age < row[use_way].age) nrow[w].age = row[w].age + 1'b1;
    nrow[use_way].age = '0;
    hot_c = 1'b0;
    unique case (req_op)
      2'd0: if (m_hit && req_count && row[m_way].acc != '1) begin
              nrow[m_way].acc = row[m_way].acc + 1'b1;
              hot_c = (row[m_way].acc == ACC_W'(HOT_THRESH));
            end
      2'd1: if (!m_hit) begin
              nrow[use_way].valid = 1'b1;
              nrow[use_way].lpa   = req_lpa;
              nrow[use_way].acc   = '0;
            end
      default: begin
              nrow = row;
              nrow[m_way].valid = !m_hit && row[m_way].valid;
            end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1; init_set <= '0;
      rsp_valid <= 1'b0; hit <= 1'b0; frame <= '0; evicted <= 1'b0; ev_lpa <= '0;
      hot <= 1'b0; hot_lpa <= '0;
    end else begin
      rsp_valid <= 1'b0;
      hot       <= 1'b0;
      if (init_busy) begin
        for (int w = 0; w < WAYS; w++) begin
          tags[init_set][w].valid <= 1'b0;
          tags[init_set][w].age   <= WW'(w);
          tags[init_set][w].acc   <= '0;
        end
        init_set <= init_set + 1'b1;
        if (init_set == SW'(SETS-1)) init_busy <= 1'b0;
      end else if (req_valid) begin
        rsp_valid <= 1'b1;
        frame     <= FW'(set) * FW'(WAYS) + FW'(use_way);
        hit       <= m_hit;
        hot       <= hot_c;
        hot_lpa   <= req_lpa;
        evicted   <= (req_op == 2'd1) && !m_hit && row[use_way].valid;
        ev_lpa    <= row[use_way].lpa;
        if (req_op == 2'd1 || m_hit) tags[set] <= nrow;
      end
    end
  end
endmodule
