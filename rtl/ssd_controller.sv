// ssd_controller -- the CXL-SSD controller: write log, data cache, flash
// channels, context-switch hint, log compaction and migration clean-up.
//
// One sequencer serves the CXL.mem requests one at a time and runs log
// compaction in the background, one page per step, whenever no request is
// waiting.  The SSD DRAM (write-log buffers followed by data-cache frames) and
// the flash array are outside this block; it drives their line-wide ports.
//
// Read (MemRd): the data cache and the index of every live log buffer are
// looked up together.  A cache hit is answered from the cached page (R1);
// otherwise a log hit is answered from the log slot, newest buffer first (R2).
// On a double miss (R3) the trigger policy estimates the queueing delay of
// the flash channel the page maps to; if the estimate passes the threshold
// (or the channel is blocked by GC) and context switching is enabled, a
// SkyByte-Delay NDR goes back at once and the page is still fetched in the
// background (see below), so that the replayed read hits.  Otherwise the host waits and gets MemData.  A fetch
// allocates a cache frame (LRU), reads the page through the channel queue,
// copies it into the frame and merges the page's logged lines into it, older
// buffer first.
// Write (MemWr): the line is appended at the log tail (W1), written into the
// cached page if there is one (W2) and recorded in the active index (W3); a
// Cmp NDR completes it.  When a buffer fills the log switches buffers and
// the full one is compacted: its level-1 index is scanned (L1); a page that is
// cached is programmed straight from its frame (L2); otherwise it is read from
// flash into the coalescing buffer (L3), its dirty lines are merged from the
// log (L4) and it is programmed back (L5).  Then the index is cleared and the
// buffer released.  If both buffers are full, writes stall.
// Migration: hot pages reported by the data cache go to migration_ctrl; after
// the host acknowledges a promotion the page is removed from the data cache and
// its index entries are set to NULL.
//
// Timing model: flash data moves at once through the flash port while the
// channel queue accounts for the operation time; reads wait for their queue
// slot to finish, programs do not.  SSD DRAM and flash ports return read data
// one cycle after the read strobe and may read and write in the same cycle.
// Reads and writes are served one at a time.  The fetch of a read that got
// the delay hint is parked after its flash read is queued: other requests are
// served meanwhile (except those to the same page, which wait at req_ready),
// and when the read completes the copy and merge run before anything else.
// One fetch can be parked; a further miss waits for it to finish and then
// looks up again.  Compaction and page drops wait while a fetch is parked.
// A fetch for a waiting host (no hint) and a compaction step block other
// requests; the paper's controller serves many requests in parallel with
// lock-free structures.  The FTL is outside the design: the
// physical page equals the logical page modulo the flash size and its channel
// is PPA mod CHANNELS.  These are this design's choices; the read/write/
// compaction steps, the trigger rule and the structures follow the paper.
module ssd_controller
  import skybyte_pkg::*;
#(
  parameter int unsigned LOG_ENTRIES = 524288,   // per log buffer (2 x 32 MB)
  parameter int unsigned FRAMES      = 114688,   // 448 MB data cache / 4 KB
  parameter int unsigned WAYS        = 16,
  parameter int unsigned CHANNELS    = 16,
  parameter int unsigned QDEPTH      = 64,
  parameter int unsigned HOT_THRESH  = 8,
  parameter int unsigned DW          = $clog2(2*LOG_ENTRIES + FRAMES*LINES_PER_PG)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CXL.mem M2S requests and S2M responses
  input  logic                 req_valid,
  output logic                 req_ready,
  input  m2s_req_t             req,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output s2m_rsp_t             rsp,
  // configuration (programmed by the host)
  input  logic                 cs_enable,
  input  logic                 mig_enable,
  input  logic [31:0]          cs_threshold,
  input  logic [31:0]          read_lat,
  input  logic [31:0]          write_lat,
  input  logic [31:0]          erase_lat,
  // SSD DRAM port (external LPDDR4)
  output logic                 dram_re,
  output logic [DW-1:0]        dram_raddr,
  input  line_t                dram_rdata,
  output logic                 dram_we,
  output logic [DW-1:0]        dram_waddr,
  output line_t                dram_wdata,
  // flash data port (external NAND array), address = {PPA, line}
  output logic                 fl_re,
  output logic [PPA_W+PGOFF_W-1:0] fl_raddr,
  input  line_t                fl_rdata,
  output logic                 fl_we,
  output logic [PPA_W+PGOFF_W-1:0] fl_waddr,
  output line_t                fl_wdata,
  // garbage collection (FTL firmware, outside)
  input  logic [CHANNELS-1:0]  gc_block,
  input  logic [CHANNELS-1:0]  gc_erase_push,
  // page migration to the host
  output logic                 msix_valid,
  input  logic                 msix_ready,
  output lpa_t                 msix_lpa,
  input  logic                 host_ack,
  input  lpa_t                 host_ack_lpa,
  input  logic                 pin_valid,
  input  lpa_t                 pin_lpa,
  // observation
  output ssd_stats_t           stats,
  output logic [7:0]           q_reads  [CHANNELS],
  output logic [7:0]           q_writes [CHANNELS],
  output logic [7:0]           q_erases [CHANNELS]
);
  localparam int unsigned OW  = $clog2(LOG_ENTRIES);
  localparam int unsigned IW  = $clog2(LOG_ENTRIES);
  localparam int unsigned FW  = $clog2(FRAMES);
  localparam int unsigned CHW = (CHANNELS > 1) ? $clog2(CHANNELS) : 1;
  localparam logic [2:0] IX_LOOKUP = 3'd0, IX_INSERT = 3'd1, IX_WALK = 3'd2,
                         IX_SCAN   = 3'd3, IX_INVAL  = 3'd4, IX_CLEAR = 3'd5;
  localparam logic [1:0] DC_LOOKUP = 2'd0, DC_ALLOC = 2'd1, DC_REMOVE = 2'd2;
  localparam logic [3:0] ID_FG_RD = 4'd0, ID_CMP_RD = 4'd1, ID_CMP_WR = 4'd2, ID_GC = 4'd3;

  typedef enum logic [5:0] {
    S_IDLE, S_RSP,
    S_RD_LOOK, S_RD_WAIT, S_RD_DRAM, S_RD_DATA, S_TRIG, S_TRIG_W,
    S_F_ALLOC, S_F_ALLOCW, S_F_PUSH, S_F_HOLD, S_F_WAIT, S_F_COPY, S_F_MISSUE, S_F_MERGE, S_F_MTAIL,
    S_WR, S_WR_WAIT, S_WR_W2,
    S_C_SCAN, S_C_SCANW, S_C_LOOK, S_C_LOOKW, S_C_L2, S_C_L3PUSH, S_C_L3WAIT, S_C_L3COPY,
    S_C_L4ISSUE, S_C_L4, S_C_L4TAIL, S_C_L5, S_C_WPUSH, S_C_CLEAR, S_C_CLEARW, S_C_REL,
    S_D_CACHE, S_D_IDX, S_D_WAIT, S_D_DONE
  } state_e;
  state_e st, ret_st;

  // ---------------- sub-blocks ----------------
  // write log pointers
  logic               wl_append, wl_ready, wl_act, wl_old, wl_cstart, wl_cbuf, wl_release;
  logic [DW-1:0]      wl_addr;
  logic [OW:0]        wl_fill [2];

  write_log #(.LOG_ENTRIES(LOG_ENTRIES), .DADDR_W(DW)) u_log (
    .clk, .rst_n, .append(wl_append), .append_ready(wl_ready), .append_addr(wl_addr),
    .active_buf(wl_act), .old_valid(wl_old), .compact_start(wl_cstart), .compact_buf(wl_cbuf),
    .release_old(wl_release), .fill(wl_fill));

  // one two-level index per log buffer
  logic                ix_valid [2], ix_ready [2], ix_done [2], ix_hit [2];
  logic [2:0]          ix_op    [2];
  lpa_t                ix_lpa   [2];
  pgoff_t              ix_off   [2];
  logic [LOGOFF_W-1:0] ix_login [2], ix_logoff [2], ix_elog [2];
  logic [IW-1:0]       ix_start [2], ix_sidx [2];
  logic                ix_ev    [2], ix_found [2];
  pgoff_t              ix_eoff  [2];
  lpa_t                ix_slpa  [2];

  for (genvar b = 0; b < 2; b++) begin : g_ix
    log_index #(.L1_ENTRIES(LOG_ENTRIES), .CHUNKS(LOG_ENTRIES)) u_ix (
      .clk, .rst_n, .cmd_valid(ix_valid[b]), .cmd_ready(ix_ready[b]), .cmd_op(ix_op[b]),
      .cmd_lpa(ix_lpa[b]), .cmd_off(ix_off[b]), .cmd_logoff(ix_login[b]), .cmd_start(ix_start[b]),
      .done(ix_done[b]), .hit(ix_hit[b]), .logoff(ix_logoff[b]),
      .ent_valid(ix_ev[b]), .ent_off(ix_eoff[b]), .ent_logoff(ix_elog[b]),
      .found(ix_found[b]), .scan_lpa(ix_slpa[b]), .scan_idx(ix_sidx[b]), .chunks_used());
  end

  // data cache tags
  logic          dc_req, dc_ready, dc_rsp, dc_hit, dc_count, dc_hot, dc_ev;
  logic [1:0]    dc_op;
  lpa_t          dc_lpa, dc_hot_lpa, dc_ev_lpa;
  logic [FW-1:0] dc_frame;

  data_cache #(.FRAMES(FRAMES), .WAYS(WAYS), .HOT_THRESH(HOT_THRESH)) u_dc (
    .clk, .rst_n, .req_valid(dc_req), .ready(dc_ready), .req_op(dc_op), .req_lpa(dc_lpa),
    .req_count(dc_count), .rsp_valid(dc_rsp), .hit(dc_hit), .frame(dc_frame),
    .evicted(dc_ev), .ev_lpa(dc_ev_lpa), .hot(dc_hot), .hot_lpa(dc_hot_lpa));

  // flash channel queues
  logic              q_push [CHANNELS], q_ready [CHANNELS], q_done [CHANNELS], q_pushx [CHANNELS];
  flash_op_e         q_op   [CHANNELS], q_dop [CHANNELS], q_opx [CHANNELS];
  logic [3:0]        q_id   [CHANNELS], q_did [CHANNELS], q_idx [CHANNELS];

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    // a GC erase has priority over the sequencer in the same cycle
    assign q_pushx[c] = gc_erase_push[c] | q_push[c];
    assign q_opx[c]   = gc_erase_push[c] ? FOP_ERASE : q_op[c];
    assign q_idx[c]   = gc_erase_push[c] ? ID_GC : q_id[c];
    flash_channel_queue #(.DEPTH(QDEPTH), .ID_W(4), .CNT_W(8), .LAT_W(32)) u_q (
      .clk, .rst_n, .push(q_pushx[c] && q_ready[c]), .push_op(q_opx[c]), .push_id(q_idx[c]),
      .ready(q_ready[c]), .gc_block(gc_block[c]), .read_lat, .write_lat, .erase_lat,
      .done(q_done[c]), .done_op(q_dop[c]), .done_id(q_did[c]),
      .num_read(q_reads[c]), .num_write(q_writes[c]), .num_erase(q_erases[c]), .busy());
  end

  // trigger policy
  logic        tr_eval, tr_valid, tr_trig;
  logic [41:0] tr_est;
  logic [CHW-1:0] ch, cch;

  ctx_switch_trigger #(.CNT_W(8), .LAT_W(32)) u_trig (
    .clk, .rst_n, .eval(tr_eval), .num_read(q_reads[ch]), .num_write(q_writes[ch]),
    .num_erase(q_erases[ch]), .gc_blocked(gc_block[ch]), .read_lat, .write_lat, .erase_lat,
    .threshold(cs_threshold), .out_valid(tr_valid), .trigger(tr_trig), .est_lat(tr_est));

  // coalescing buffer
  logic        cb_we, cb_merge, cb_re, cb_clr;
  logic [5:0]  cb_wline, cb_rline;
  line_t       cb_wdata, cb_rdata;
  logic [6:0]  cb_merged;

  coalescing_buffer #(.LINES(LINES_PER_PG)) u_cb (
    .clk, .rst_n, .wr_en(cb_we), .wr_merge(cb_merge), .wr_line(cb_wline), .wr_data(cb_wdata),
    .rd_en(cb_re), .rd_line(cb_rline), .rd_data(cb_rdata), .clear_mask(cb_clr),
    .merged_lines(cb_merged));

  // migration
  logic mg_drop, mg_done;
  lpa_t mg_lpa;
  logic [31:0] mg_count;

  migration_ctrl u_mig (
    .clk, .rst_n, .enable(mig_enable), .cand_valid(dc_hot), .cand_lpa(dc_hot_lpa),
    .pin_lpa_valid(pin_valid), .pin_lpa, .msix_valid, .msix_ready, .msix_lpa,
    .host_ack, .host_ack_lpa, .drop_req(mg_drop), .drop_lpa(mg_lpa), .drop_done(mg_done),
    .busy(), .pages_migrated(mg_count));

  // ---------------- sequencer state ----------------
  m2s_req_t      cur;
  lpa_t          lpa, clpa;
  pgoff_t        off;
  logic [PPA_W-1:0] ppa, cppa;
  logic          delayed;
  // parked fill: the page fetch of a delayed read waits for flash in the
  // background while other requests are served
  logic             pf_valid, pf_done, held;
  lpa_t             pf_lpa;
  logic [PPA_W-1:0] pf_ppa;
  logic [CHW-1:0]   pf_ch;
  logic [FW-1:0]    pf_frame;
  m2s_req_t         h_cur;
  logic          got_dc, c_hit;
  logic          pend_ix [2];
  logic          hit_ix  [2];
  logic [LOGOFF_W-1:0] lo_ix [2];
  logic [FW-1:0] frame, cframe;
  logic [DW-1:0] rd_addr;
  logic [6:0]    cnt;
  logic          mb;          // buffer being merged
  logic          merge_second;
  logic          pend;        // a log line read is in flight (merge pipelines)
  pgoff_t        pend_off;
  logic          cbuf, comp_active, scan_end;
  logic [IW-1:0] cursor;
  logic          wr_act;
  s2m_rsp_t      rsp_r;
  ssd_stats_t    st_r;

  function automatic logic [DW-1:0] frame_line(input logic [FW-1:0] f, input logic [5:0] l);
    return DW'(2*LOG_ENTRIES) + DW'(f) * DW'(LINES_PER_PG) + DW'(l);
  endfunction
  function automatic logic [DW-1:0] log_line(input logic b, input logic [LOGOFF_W-1:0] o);
    return DW'(b) * DW'(LOG_ENTRIES) + DW'(o[OW-1:0]);
  endfunction

  logic sys_ready;
  lpa_t req_lpa;
  logic [PPA_W-1:0] req_ppa, scan_ppa;
  assign sys_ready = dc_ready && ix_ready[0] && ix_ready[1];
  assign req_lpa   = addr_lpa(req.addr);
  assign req_ppa   = req_lpa[PPA_W-1:0];
  lpa_t h_lpa;
  logic [PPA_W-1:0] h_ppa;
  assign h_lpa     = addr_lpa(h_cur.addr);
  assign h_ppa     = h_lpa[PPA_W-1:0];
  assign scan_ppa  = ix_slpa[cbuf][PPA_W-1:0];

  assign req_ready = (st == S_IDLE) && sys_ready && !mg_drop && !(pf_valid && pf_done) &&
                     !(req.op == M2S_MEMWR && !wl_ready) && !(pf_valid && req_lpa == pf_lpa);
  assign rsp_valid = (st == S_RSP);
  assign rsp       = rsp_r;
  assign stats     = st_r;

  // ---------------- command and port drive ----------------
  always_comb begin
    wl_append = 1'b0; wl_release = 1'b0;
    for (int b = 0; b < 2; b++) begin
      ix_valid[b] = 1'b0; ix_op[b] = IX_LOOKUP; ix_lpa[b] = lpa; ix_off[b] = off;
      ix_login[b] = '0; ix_start[b] = cursor;
    end
    dc_req = 1'b0; dc_op = DC_LOOKUP; dc_lpa = lpa; dc_count = 1'b0;
    for (int c = 0; c < CHANNELS; c++) begin q_push[c] = 1'b0; q_op[c] = FOP_READ; q_id[c] = ID_FG_RD; end
    tr_eval = 1'b0;
    cb_we = 1'b0; cb_merge = 1'b0; cb_wline = '0; cb_wdata = fl_rdata; cb_re = 1'b0; cb_rline = '0; cb_clr = 1'b0;
    dram_re = 1'b0; dram_raddr = rd_addr; dram_we = 1'b0; dram_waddr = '0; dram_wdata = cur.data;
    fl_re = 1'b0; fl_raddr = '0; fl_we = 1'b0; fl_waddr = '0; fl_wdata = dram_rdata;
    mg_done = 1'b0;
    unique case (st)
      S_RD_LOOK: begin
        dc_req = 1'b1; dc_count = 1'b1;
        ix_valid[wl_act] = 1'b1;
        ix_valid[!wl_act] = wl_old;
      end
      S_RD_DRAM: dram_re = 1'b1;
      S_TRIG: tr_eval = 1'b1;
      S_F_ALLOC: begin dc_req = 1'b1; dc_op = DC_ALLOC; end
      S_F_PUSH: begin q_push[ch] = !gc_erase_push[ch]; q_op[ch] = FOP_READ; q_id[ch] = ID_FG_RD; end
      S_F_COPY: begin
        fl_re = (cnt < 7'd64); fl_raddr = {ppa, cnt[5:0]};
        dram_we = (cnt != 0); dram_waddr = frame_line(frame, 6'(cnt - 1)); dram_wdata = fl_rdata;
      end
      S_F_MISSUE: begin ix_valid[mb] = 1'b1; ix_op[mb] = IX_WALK; end
      S_F_MERGE, S_F_MTAIL: begin
        dram_re    = (st == S_F_MERGE) && ix_ev[mb];
        dram_raddr = log_line(mb, ix_elog[mb]);
        dram_we    = pend; dram_waddr = frame_line(frame, pend_off); dram_wdata = dram_rdata;
      end
      S_WR: begin
        dram_we = 1'b1; dram_waddr = wl_addr; dram_wdata = cur.data;   // W1
        wl_append = 1'b1;
        dc_req = 1'b1; dc_count = 1'b1;
        ix_valid[wl_act] = 1'b1; ix_op[wl_act] = IX_INSERT;             // W3
        ix_login[wl_act] = LOGOFF_W'(wl_addr[OW-1:0]);
      end
      S_WR_W2: begin dram_we = 1'b1; dram_waddr = frame_line(frame, off); dram_wdata = cur.data; end
      S_C_SCAN: begin ix_valid[cbuf] = 1'b1; ix_op[cbuf] = IX_SCAN; end
      S_C_LOOK: begin dc_req = 1'b1; dc_lpa = clpa; end
      S_C_L2: begin
        dram_re = (cnt < 7'd64); dram_raddr = frame_line(cframe, cnt[5:0]);
        fl_we = (cnt != 0); fl_waddr = {cppa, 6'(cnt - 1)}; fl_wdata = dram_rdata;
      end
      S_C_L3PUSH: begin q_push[cch] = !gc_erase_push[cch]; q_op[cch] = FOP_READ; q_id[cch] = ID_CMP_RD; end
      S_C_L3COPY: begin
        fl_re = (cnt < 7'd64); fl_raddr = {cppa, cnt[5:0]};
        cb_we = (cnt != 0); cb_wline = 6'(cnt - 1); cb_wdata = fl_rdata;
      end
      S_C_L4ISSUE: begin ix_valid[cbuf] = 1'b1; ix_op[cbuf] = IX_WALK; ix_lpa[cbuf] = clpa; cb_clr = 1'b1; end
      S_C_L4, S_C_L4TAIL: begin
        dram_re    = (st == S_C_L4) && ix_ev[cbuf];
        dram_raddr = log_line(cbuf, ix_elog[cbuf]);
        cb_we = pend; cb_merge = 1'b1; cb_wline = pend_off; cb_wdata = dram_rdata;
      end
      S_C_L5: begin
        cb_re = (cnt < 7'd64); cb_rline = cnt[5:0];
        fl_we = (cnt != 0); fl_waddr = {cppa, 6'(cnt - 1)}; fl_wdata = cb_rdata;
      end
      S_C_WPUSH: begin q_push[cch] = !gc_erase_push[cch]; q_op[cch] = FOP_WRITE; q_id[cch] = ID_CMP_WR; end
      S_C_CLEAR: begin ix_valid[cbuf] = 1'b1; ix_op[cbuf] = IX_CLEAR; end
      S_C_REL: wl_release = 1'b1;
      S_D_CACHE: begin dc_req = 1'b1; dc_op = DC_REMOVE; dc_lpa = mg_lpa; end
      S_D_IDX: begin
        for (int b = 0; b < 2; b++) begin ix_valid[b] = 1'b1; ix_op[b] = IX_INVAL; ix_lpa[b] = mg_lpa; end
      end
      S_D_DONE: mg_done = 1'b1;
      default: ;
    endcase
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret_st <= S_IDLE;
      cur <= '0; lpa <= '0; off <= '0; ppa <= '0; ch <= '0; clpa <= '0; cppa <= '0; cch <= '0;
      delayed <= 1'b0; got_dc <= 1'b0; c_hit <= 1'b0;
      pend_ix <= '{default: 1'b0}; hit_ix <= '{default: 1'b0}; lo_ix <= '{default: '0};
      frame <= '0; cframe <= '0; rd_addr <= '0; cnt <= '0; mb <= 1'b0; merge_second <= 1'b0;
      pend <= 1'b0; pend_off <= '0; cbuf <= 1'b0; comp_active <= 1'b0; scan_end <= 1'b0;
      cursor <= '0; wr_act <= 1'b0;
      pf_valid <= 1'b0; pf_done <= 1'b0; held <= 1'b0; pf_lpa <= '0; pf_ppa <= '0;
      pf_ch <= '0; pf_frame <= '0; h_cur <= '0;
      rsp_r <= '0; st_r <= '0;
    end else begin
      if (wl_cstart) begin
        comp_active <= 1'b1; cbuf <= wl_cbuf; cursor <= '0; scan_end <= 1'b0;
        st_r.log_switch <= st_r.log_switch + 1'b1;
      end
      if (pf_valid && q_done[pf_ch] && q_did[pf_ch] == ID_FG_RD) pf_done <= 1'b1;
      if (st == S_IDLE && req_valid && req.op == M2S_MEMWR && !wl_ready)
        st_r.wr_stall <= st_r.wr_stall + 1'b1;

      unique case (st)
        S_IDLE: if (sys_ready) begin
          if (pf_valid && pf_done) begin
            // the parked fetch's flash read is done: finish the fill
            pf_valid <= 1'b0; pf_done <= 1'b0;
            lpa <= pf_lpa; ppa <= pf_ppa; ch <= pf_ch; frame <= pf_frame;
            delayed <= 1'b1; cnt <= '0; st <= S_F_COPY;
          end else if (mg_drop && !pf_valid) st <= S_D_CACHE;
          else if (req_valid && req_ready) begin
            if (pf_valid) st_r.fill_overlap <= st_r.fill_overlap + 1'b1;
            cur <= req;
            lpa <= req_lpa;
            off <= addr_pgoff(req.addr);
            ppa <= req_ppa;
            ch  <= CHW'(req_ppa % PPA_W'(CHANNELS));
            delayed <= 1'b0;
            st <= (req.op == M2S_MEMWR) ? S_WR : S_RD_LOOK;
          end else if (comp_active && !wl_cstart && !pf_valid) begin
            st <= scan_end ? S_C_CLEAR : S_C_SCAN;
          end
        end
        S_RSP: if (rsp_ready) st <= ret_st;

        // ---------------- read ----------------
        S_RD_LOOK: begin
          got_dc <= 1'b0;
          pend_ix[wl_act] <= 1'b1; pend_ix[!wl_act] <= wl_old;
          hit_ix <= '{default: 1'b0};
          mb <= wl_act;        // remember which buffer is newest
          st <= S_RD_WAIT;
        end
        S_RD_WAIT: begin
          if (dc_rsp) begin got_dc <= 1'b1; c_hit <= dc_hit; frame <= dc_frame; end
          for (int b = 0; b < 2; b++)
            if (ix_done[b]) begin pend_ix[b] <= 1'b0; hit_ix[b] <= ix_hit[b]; lo_ix[b] <= ix_logoff[b]; end
          if (got_dc && !pend_ix[0] && !pend_ix[1]) begin
            if (c_hit) begin                                          // R1
              rd_addr <= frame_line(frame, off); st <= S_RD_DRAM;
              st_r.rd_cache_hit <= st_r.rd_cache_hit + 1'b1;
            end else if (hit_ix[mb]) begin                            // R2, newest buffer
              rd_addr <= log_line(mb, lo_ix[mb]); st <= S_RD_DRAM;
              st_r.rd_log_hit <= st_r.rd_log_hit + 1'b1;
            end else if (hit_ix[!mb]) begin                           // R2, older buffer
              rd_addr <= log_line(!mb, lo_ix[!mb]); st <= S_RD_DRAM;
              st_r.rd_log_hit <= st_r.rd_log_hit + 1'b1;
            end else if (pf_valid) begin
              // a second miss: finish the parked fill first, then look up again
              h_cur <= cur; held <= 1'b1; st <= S_F_HOLD;
            end else begin                                            // R3
              st <= S_TRIG;
              st_r.rd_miss <= st_r.rd_miss + 1'b1;
            end
          end
        end
        S_RD_DRAM: st <= S_RD_DATA;
        S_RD_DATA: begin
          rsp_r <= '0;
          rsp_r.kind <= S2M_DRS; rsp_r.tag <= cur.tag; rsp_r.data <= dram_rdata;
          ret_st <= S_IDLE; st <= S_RSP;
        end
        S_TRIG: st <= S_TRIG_W;
        S_TRIG_W: if (tr_valid) begin
          if (tr_trig && cs_enable) begin
            rsp_r <= '0;
            rsp_r.kind <= S2M_NDR;
            rsp_r.ndr  <= '{valid: 1'b1, opcode: NDR_SKYBYTE_DELAY, rsvd0: '0, tag: cur.tag, rsvd1: '0};
            delayed <= 1'b1;
            ret_st  <= S_F_ALLOC; st <= S_RSP;
            st_r.delay_ndr <= st_r.delay_ndr + 1'b1;
            if (gc_block[ch]) st_r.gc_trigger <= st_r.gc_trigger + 1'b1;
          end else st <= S_F_ALLOC;
        end

        // ---------------- page fetch into the data cache ----------------
        S_F_ALLOC: st <= S_F_ALLOCW;
        S_F_ALLOCW: if (dc_rsp) begin frame <= dc_frame; st <= S_F_PUSH; end
        S_F_PUSH: if (!gc_erase_push[ch] && q_ready[ch]) begin
          st_r.flash_rd <= st_r.flash_rd + 1'b1;
          if (delayed) begin
            // the host was told to switch threads: park the fill and go on
            pf_valid <= 1'b1; pf_done <= 1'b0;
            pf_lpa <= lpa; pf_ppa <= ppa; pf_ch <= ch; pf_frame <= frame;
            st <= S_IDLE;
          end else st <= S_F_WAIT;
        end
        S_F_HOLD: if (pf_done) begin
          pf_valid <= 1'b0; pf_done <= 1'b0;
          lpa <= pf_lpa; ppa <= pf_ppa; ch <= pf_ch; frame <= pf_frame;
          delayed <= 1'b1; cnt <= '0; st <= S_F_COPY;
        end
        S_F_WAIT: if (q_done[ch] && q_did[ch] == ID_FG_RD) begin cnt <= '0; st <= S_F_COPY; end
        S_F_COPY: begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'd64) begin
            // merge the older buffer first so newer lines overwrite it
            mb <= wl_old ? !wl_act : wl_act;
            merge_second <= wl_old;
            pend <= 1'b0;
            st <= S_F_MISSUE;
          end
        end
        S_F_MISSUE: st <= S_F_MERGE;
        S_F_MERGE: begin
          pend <= ix_ev[mb]; pend_off <= ix_eoff[mb];
          if (ix_done[mb]) st <= S_F_MTAIL;
        end
        S_F_MTAIL: begin
          pend <= 1'b0;
          if (merge_second) begin merge_second <= 1'b0; mb <= wl_act; st <= S_F_MISSUE; end
          else if (delayed && held) begin
            // resume the read that found the fill parked
            held <= 1'b0; delayed <= 1'b0;
            cur <= h_cur; lpa <= addr_lpa(h_cur.addr); off <= addr_pgoff(h_cur.addr);
            ppa <= h_ppa; ch <= CHW'(h_ppa % PPA_W'(CHANNELS));
            st <= S_RD_LOOK;
          end else if (delayed) st <= S_IDLE;
          else begin rd_addr <= frame_line(frame, off); st <= S_RD_DRAM; end
        end

        // ---------------- write ----------------
        S_WR: begin
          got_dc <= 1'b0; pend_ix[0] <= 1'b1;
          wr_act <= wl_act;
          st_r.wr <= st_r.wr + 1'b1;
          st <= S_WR_WAIT;
        end
        S_WR_WAIT: begin
          if (dc_rsp) begin got_dc <= 1'b1; c_hit <= dc_hit; frame <= dc_frame; end
          if (ix_done[wr_act]) pend_ix[0] <= 1'b0;
          if (got_dc && !pend_ix[0]) begin
            if (c_hit) begin st <= S_WR_W2; st_r.wr_cache_upd <= st_r.wr_cache_upd + 1'b1; end
            else begin
              rsp_r <= '0; rsp_r.kind <= S2M_NDR;
              rsp_r.ndr <= '{valid: 1'b1, opcode: NDR_CMP, rsvd0: '0, tag: cur.tag, rsvd1: '0};
              ret_st <= S_IDLE; st <= S_RSP;
            end
          end
        end
        S_WR_W2: begin
          rsp_r <= '0; rsp_r.kind <= S2M_NDR;
          rsp_r.ndr <= '{valid: 1'b1, opcode: NDR_CMP, rsvd0: '0, tag: cur.tag, rsvd1: '0};
          ret_st <= S_IDLE; st <= S_RSP;
        end

        // ---------------- background log compaction ----------------
        S_C_SCAN: st <= S_C_SCANW;
        S_C_SCANW: if (ix_done[cbuf]) begin
          if (ix_found[cbuf]) begin
            clpa   <= ix_slpa[cbuf];
            cppa   <= scan_ppa;
            cch    <= CHW'(scan_ppa % PPA_W'(CHANNELS));
            cursor <= ix_sidx[cbuf] + 1'b1;
            scan_end <= (ix_sidx[cbuf] == IW'(LOG_ENTRIES-1));
            st <= S_C_LOOK;
          end else st <= S_C_CLEAR;
        end
        S_C_LOOK: st <= S_C_LOOKW;
        S_C_LOOKW: if (dc_rsp) begin
          cnt <= '0;
          if (dc_hit) begin cframe <= dc_frame; st <= S_C_L2; st_r.cmp_cached <= st_r.cmp_cached + 1'b1; end
          else st <= S_C_L3PUSH;
        end
        S_C_L2: begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'd64) st <= S_C_WPUSH;
        end
        S_C_L3PUSH: if (!gc_erase_push[cch] && q_ready[cch]) begin
          st <= S_C_L3WAIT; st_r.flash_rd <= st_r.flash_rd + 1'b1;
        end
        S_C_L3WAIT: if (q_done[cch] && q_did[cch] == ID_CMP_RD) begin cnt <= '0; st <= S_C_L3COPY; end
        S_C_L3COPY: begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'd64) begin pend <= 1'b0; st <= S_C_L4ISSUE; end
        end
        S_C_L4ISSUE: st <= S_C_L4;
        S_C_L4: begin
          pend <= ix_ev[cbuf]; pend_off <= ix_eoff[cbuf];
          if (ix_done[cbuf]) st <= S_C_L4TAIL;
        end
        S_C_L4TAIL: begin pend <= 1'b0; cnt <= '0; st <= S_C_L5; end
        S_C_L5: begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'd64) begin
            st_r.cmp_merged <= st_r.cmp_merged + 1'b1;
            st_r.cmp_lines  <= st_r.cmp_lines + 32'(cb_merged);
            st <= S_C_WPUSH;
          end
        end
        S_C_WPUSH: if (!gc_erase_push[cch] && q_ready[cch]) begin
          st_r.flash_wr <= st_r.flash_wr + 1'b1;
          st <= S_IDLE;                     // let waiting requests in between pages
        end
        S_C_CLEAR: st <= S_C_CLEARW;
        S_C_CLEARW: if (ix_done[cbuf]) st <= S_C_REL;
        S_C_REL: begin comp_active <= 1'b0; st <= S_IDLE; end

        // ---------------- migration clean-up ----------------
        S_D_CACHE: st <= S_D_IDX;
        S_D_IDX: begin pend_ix[0] <= 1'b1; pend_ix[1] <= 1'b1; st <= S_D_WAIT; end
        S_D_WAIT: begin
          for (int b = 0; b < 2; b++) if (ix_done[b]) pend_ix[b] <= 1'b0;
          if (!pend_ix[0] && !pend_ix[1]) st <= S_D_DONE;
        end
        S_D_DONE: begin st_r.mig_drop <= st_r.mig_drop + 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp))
    else $error("ssd_controller: response changed before it was taken");
endmodule
