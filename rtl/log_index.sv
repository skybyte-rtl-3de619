// log_index -- two-level hash index of one write-log buffer.
//
// Level 1 is an open-addressed hash table keyed by the logical page address
// (LPA).  Each valid entry holds the LPA and a pointer to that page's level-2
// table.  Level 2 maps a 6-bit page offset to a 26-bit log offset.  A level-2
// table starts as one chunk of four 4-byte entries (16 bytes) and grows on
// demand: when a page needs a fifth, ninth, ... entry a new four-entry chunk is
// taken from a pool and linked behind the last one.  All level-2 entries of one
// page are therefore found by walking one short chain, which is what read
// merging and log compaction need.  Chunks are taken from the pool by a bump
// pointer and the whole index is dropped at once (clear) after its log buffer
// has been compacted.
//
// Commands (cmd_valid/cmd_ready, one at a time, done pulses at the end):
//   LOOKUP  lpa,off        -> hit, logoff
//   INSERT  lpa,off,logoff -> adds the line, or points an existing one at the newer log offset
//   WALK    lpa            -> one (ent_off, ent_logoff) per cycle on ent_valid, then done
//   SCAN    start index    -> next live level-1 entry at or after start: found, scan_lpa, scan_idx
//   INVAL   lpa            -> marks the page's level-1 entry NULL (kept as a tombstone for probing)
//   CLEAR                  -> sweeps level 1 invalid (L1_ENTRIES cycles), empties the pool
// Each probe or chain step takes one cycle; arrays are read asynchronously.
//
// From the paper: the two levels, LPA-keyed level 1, offset-to-log-offset
// level 2 with 6-bit page offset and 26-bit log offset, four-entry initial
// level-2 tables, traversal per page, NULL invalidation and dropping the index
// after compaction.  This design's choices: linear probing and the hash
// function at level 1, and growth of level 2 by chaining further four-entry
// chunks instead of doubling and rehashing a table when its load factor
// passes 0.75; the worst-case memory stays at one 16 B level-1 entry plus one
// 16 B chunk per logged line, as in the paper.
module log_index
  import skybyte_pkg::*;
#(
  parameter int unsigned L1_ENTRIES = 524288,   // one per log slot (worst case: one line per page)
  parameter int unsigned CHUNKS     = 524288
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [2:0]           cmd_op,        // see localparams below
  input  lpa_t                 cmd_lpa,
  input  pgoff_t               cmd_off,
  input  logic [LOGOFF_W-1:0]  cmd_logoff,
  input  logic [$clog2(L1_ENTRIES)-1:0] cmd_start,
  output logic                 done,
  output logic                 hit,
  output logic [LOGOFF_W-1:0]  logoff,
  output logic                 ent_valid,
  output pgoff_t               ent_off,
  output logic [LOGOFF_W-1:0]  ent_logoff,
  output logic                 found,
  output lpa_t                 scan_lpa,
  output logic [$clog2(L1_ENTRIES)-1:0] scan_idx,
  output logic [$clog2(CHUNKS):0] chunks_used
);
  localparam logic [2:0] OP_LOOKUP = 3'd0, OP_INSERT = 3'd1, OP_WALK = 3'd2,
                         OP_SCAN   = 3'd3, OP_INVAL  = 3'd4, OP_CLEAR = 3'd5;
  localparam int unsigned IW = $clog2(L1_ENTRIES);
  localparam int unsigned CW = $clog2(CHUNKS);
  localparam int unsigned SLOTS = 4;

  typedef struct packed {
    logic            dead;     // NULL after page migration
    lpa_t            lpa;
    logic [CW-1:0]   head;     // first level-2 chunk
  } l1_t;

  typedef struct packed {
    logic [SLOTS-1:0]                 sval;
    logic [SLOTS-1:0][PGOFF_W-1:0]    soff;
    logic [SLOTS-1:0][LOGOFF_W-1:0]   slog;
    logic                             has_next;
    logic [CW-1:0]                    next;
  } chunk_t;

  logic          l1_valid [L1_ENTRIES];
  l1_t           l1       [L1_ENTRIES];
  chunk_t        pool     [CHUNKS];

  typedef enum logic [2:0] {S_IDLE, S_PROBE, S_CHAIN, S_EMIT, S_SCAN, S_CLEAR} state_e;
  state_e state;

  logic [2:0]          op;
  lpa_t                k_lpa;
  pgoff_t              k_off;
  logic [LOGOFF_W-1:0] k_log;
  logic [IW-1:0]       idx;
  logic [IW:0]         probes;
  logic [CW-1:0]       cptr;
  logic [1:0]          slot;
  logic [CW:0]         alloc;

  function automatic logic [IW-1:0] hash(input lpa_t a);
    logic [LPA_W-1:0] h;
    h = a ^ (a >> 17) ^ (a >> 34);
    return h[IW-1:0];
  endfunction

  assign cmd_ready   = (state == S_IDLE);
  assign chunks_used = alloc;

  l1_t    e;
  chunk_t c;
  logic   slot_hit;
  logic [1:0] hit_slot, free_slot;
  logic   has_free;

  always_comb begin
    e = l1[idx];
    c = pool[cptr];
    slot_hit = 1'b0; hit_slot = '0; has_free = 1'b0; free_slot = '0;
    for (int s = SLOTS-1; s >= 0; s--) begin
      if (c.sval[s] && c.soff[s] == k_off) begin slot_hit = 1'b1; hit_slot = 2'(s); end
      if (!c.sval[s]) begin has_free = 1'b1; free_slot = 2'(s); end
    end
  end

  function automatic chunk_t new_chunk(input pgoff_t o, input logic [LOGOFF_W-1:0] l);
    chunk_t n;
    n = '0;
    n.sval[0] = 1'b1; n.soff[0] = o; n.slog[0] = l;
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CLEAR;          // level-1 valid bits are swept clear after reset
      idx <= '0; alloc <= '0; op <= OP_LOOKUP;
      done <= 1'b0; hit <= 1'b0; logoff <= '0;
      ent_valid <= 1'b0; ent_off <= '0; ent_logoff <= '0;
      found <= 1'b0; scan_lpa <= '0; scan_idx <= '0;
      probes <= '0; cptr <= '0; slot <= '0;
      k_lpa <= '0; k_off <= '0; k_log <= '0;
    end else begin
      done      <= 1'b0;
      ent_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op <= cmd_op; k_lpa <= cmd_lpa; k_off <= cmd_off; k_log <= cmd_logoff;
          hit <= 1'b0; found <= 1'b0; probes <= '0;
          unique case (cmd_op)
            OP_SCAN:  begin idx <= cmd_start; state <= S_SCAN; end
            OP_CLEAR: begin idx <= '0; state <= S_CLEAR; end
            default:  begin idx <= hash(cmd_lpa); state <= S_PROBE; end
          endcase
        end
        // ---- level 1: linear probing ----
        S_PROBE: begin
          if (!l1_valid[idx] || probes == (IW+1)'(L1_ENTRIES)) begin
            // page absent
            if (op == OP_INSERT && !l1_valid[idx]) begin
              l1_valid[idx] <= 1'b1;
              l1[idx]       <= '{dead: 1'b0, lpa: k_lpa, head: alloc[CW-1:0]};
              pool[alloc[CW-1:0]] <= new_chunk(k_off, k_log);
              alloc <= alloc + 1'b1;
            end
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (e.lpa == k_lpa) begin
            unique case (op)
              OP_INVAL: begin
                l1[idx].dead <= 1'b1;
                hit <= !e.dead; done <= 1'b1; state <= S_IDLE;
              end
              OP_INSERT: begin
                if (e.dead) begin    // page came back after migration: start a fresh chain
                  l1[idx] <= '{dead: 1'b0, lpa: k_lpa, head: alloc[CW-1:0]};
                  pool[alloc[CW-1:0]] <= new_chunk(k_off, k_log);
                  alloc <= alloc + 1'b1;
                  done <= 1'b1; state <= S_IDLE;
                end else begin
                  cptr <= e.head; state <= S_CHAIN;
                end
              end
              default: begin
                if (e.dead) begin done <= 1'b1; state <= S_IDLE; end
                else begin cptr <= e.head; slot <= '0; state <= (op == OP_WALK) ? S_EMIT : S_CHAIN; end
              end
            endcase
          end else begin
            idx    <= idx + 1'b1;
            probes <= probes + 1'b1;
          end
        end
        // ---- level 2: chain walk for LOOKUP / INSERT ----
        S_CHAIN: begin
          if (slot_hit) begin
            if (op == OP_INSERT) pool[cptr].slog[hit_slot] <= k_log;
            hit    <= 1'b1;
            logoff <= c.slog[hit_slot];
            done   <= 1'b1;
            state  <= S_IDLE;
          end else if (c.has_next) begin
            cptr <= c.next;
          end else begin
            if (op == OP_INSERT) begin
              if (has_free) begin
                pool[cptr].sval[free_slot] <= 1'b1;
                pool[cptr].soff[free_slot] <= k_off;
                pool[cptr].slog[free_slot] <= k_log;
              end else begin
                pool[cptr].has_next <= 1'b1;
                pool[cptr].next     <= alloc[CW-1:0];
                pool[alloc[CW-1:0]] <= new_chunk(k_off, k_log);
                alloc <= alloc + 1'b1;
              end
            end
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        // ---- level 2: stream all entries of a page ----
        S_EMIT: begin
          if (c.sval[slot]) begin
            ent_valid  <= 1'b1;
            ent_off    <= c.soff[slot];
            ent_logoff <= c.slog[slot];
          end
          if (slot == 2'(SLOTS-1)) begin
            slot <= '0;
            if (c.has_next) cptr <= c.next;
            else begin hit <= 1'b1; done <= 1'b1; state <= S_IDLE; end
          end else begin
            slot <= slot + 1'b1;
          end
        end
        // ---- level 1 scan for compaction ----
        S_SCAN: begin
          if (l1_valid[idx] && !e.dead) begin
            found <= 1'b1; scan_lpa <= e.lpa; scan_idx <= idx;
            done <= 1'b1; state <= S_IDLE;
          end else if (idx == IW'(L1_ENTRIES-1)) begin
            done <= 1'b1; state <= S_IDLE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_CLEAR: begin
          l1_valid[idx] <= 1'b0;
          if (idx == IW'(L1_ENTRIES-1)) begin
            alloc <= '0;
            if (op == OP_CLEAR) done <= 1'b1;
            state <= S_IDLE;
          end
          idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_pool: assert property (@(posedge clk) disable iff (!rst_n) alloc <= (CW+1)'(CHUNKS))
    else $error("log_index: level-2 chunk pool exhausted");
endmodule
