// tb_skybyte_top -- end-to-end test of the whole SkyByte design.
// The top (PLBs + host CXL tracker + CXL-SSD controller) runs at a small
// configuration: 16-slot log buffers, 8 cache frames in 2 ways, 4 channels,
// read/program/erase latency 50/200/500 cycles, delay threshold 60 cycles.
// Behavioural DRAM and flash models sit on the memory ports; this bench plays
// the CPU cores (random core numbers, unique tags), the OS (a Long Delay
// Exception makes the core retry its load 20 cycles later, as after a
// context switch), the page-copy engine that answers the MSI-X promotion
// interrupt by filling the PLB and acknowledging, and the FTL's GC.
// A reference memory predicts every read's data.  Each mechanism of the
// design is counted and a mechanism that never happened counts a failure:
// R1 cache hit, R2 log hit, R3 flash miss, threshold delay, GC-forced delay,
// exception delivery, requests served while a delayed page is being fetched, W1 log append, W2 cache update, log switch, compaction
// of cached (L2) and uncached (L3-L5) pages, double-full write stall,
// promotion interrupt, PLB write forwarding to host DRAM, PLB pass-through of
// reads and of not-yet-copied writes, the SSD-side page drop, and write
// forwarding through the two-level huge-page PLB (copied chunk, copied line of
// the current chunk) next to pass-through of the lines not yet copied.
module tb_skybyte_top;
  import skybyte_pkg::*;
  localparam int LOGN = 16, FR = 8, WY = 2, CH = 4;
  localparam int DW = $clog2(2*LOGN + FR*64);
  localparam int RL = 50, WL = 200, EL = 500, TH = 60;
  logic clk = 0, rst_n = 0;
  logic cpu_req_valid, cpu_req_ready; logic [2:0] cpu_req_core; m2s_req_t cpu_req;
  logic cpu_rsp_valid; logic [2:0] cpu_rsp_core; tag_t cpu_rsp_tag; line_t cpu_rsp_data;
  logic exc_valid; logic [2:0] exc_core; tag_t exc_tag;
  logic hf_valid, hf_ready = 1, hf_is_wr; logic [63:0] hf_addr; line_t hf_data;
  logic pa = 0, pm = 0, pf = 0, pa_ok; lpa_t pa_src = '0, pa_dst = '0, pm_src = '0, pf_src = '0;
  pgoff_t pm_line = '0;
  logic ha = 0, hm = 0, hcd = 0, hf = 0, ha_ok; logic [42:0] h_src = '0, h_dst = '0; pgoff_t hm_line = '0;
  logic msv, msr, hack; lpa_t msl, hal;
  logic cs_en = 1, mig_en = 0;
  logic dre, dwe, fre, fwe; logic [DW-1:0] dra, dwa; line_t drd, dwd, frd, fwd;
  logic [30:0] fra, fwa;
  logic [CH-1:0] gcb = 0, gce = 0;
  ssd_stats_t stats; logic [31:0] hf_count, unk;
  int unsigned programs;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  skybyte_top #(.LOG_ENTRIES(LOGN), .FRAMES(FR), .WAYS(WY), .CHANNELS(CH), .QDEPTH(16),
                .HOT_THRESH(3), .PLB_ENTRIES(4)) dut (
    .clk, .rst_n, .cpu_req_valid, .cpu_req_ready, .cpu_req_core, .cpu_req,
    .cpu_rsp_valid, .cpu_rsp_core, .cpu_rsp_tag, .cpu_rsp_data, .exc_valid, .exc_core, .exc_tag,
    .host_fwd_valid(hf_valid), .host_fwd_ready(hf_ready), .host_fwd_is_wr(hf_is_wr),
    .host_fwd_addr(hf_addr), .host_fwd_data(hf_data),
    .plb_alloc(pa), .plb_alloc_src(pa_src), .plb_alloc_dst(pa_dst), .plb_alloc_ok(pa_ok),
    .plb_mark(pm), .plb_mark_src(pm_src), .plb_mark_line(pm_line), .plb_free(pf), .plb_free_src(pf_src),
    .hplb_alloc(ha), .hplb_alloc_src(h_src), .hplb_alloc_dst(h_dst), .hplb_alloc_ok(ha_ok),
    .hplb_mark(hm), .hplb_mark_src(h_src), .hplb_mark_line(hm_line), .hplb_chunk_done(hcd), .hplb_chunk_src(h_src),
    .hplb_free(hf), .hplb_free_src(h_src),
    .msix_valid(msv), .msix_ready(msr), .msix_lpa(msl), .host_ack(hack), .host_ack_lpa(hal),
    .pin_valid(1'b0), .pin_lpa('0),
    .cs_enable(cs_en), .mig_enable(mig_en), .cs_threshold(32'(TH)), .read_lat(32'(RL)),
    .write_lat(32'(WL)), .erase_lat(32'(EL)),
    .dram_re(dre), .dram_raddr(dra), .dram_rdata(drd), .dram_we(dwe), .dram_waddr(dwa), .dram_wdata(dwd),
    .fl_re(fre), .fl_raddr(fra), .fl_rdata(frd), .fl_we(fwe), .fl_waddr(fwa), .fl_wdata(fwd),
    .gc_block(gcb), .gc_erase_push(gce), .stats, .host_fwd_count(hf_count), .unknown_rsp(unk));

  ssd_dram_model #(.DW(DW)) u_dram (.clk, .re(dre), .raddr(dra), .rdata(drd), .we(dwe), .waddr(dwa), .wdata(dwd));
  flash_model u_flash (.clk, .re(fre), .raddr(fra), .rdata(frd), .we(fwe), .waddr(fwa), .wdata(fwd), .programs);

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // reference memory of the SSD's contents: {lpa, line} -> data
  line_t refm [longint];
  // host DRAM copy written through the PLB: byte address -> data
  line_t hostm [longint];
  function automatic line_t pattern(input logic [30:0] a);
    line_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = {a ^ 31'(i * 32'h9e3779b1), 1'b1};
    return d;
  endfunction
  function automatic line_t expect_line(input lpa_t p, input pgoff_t o);
    longint k; k = longint'({p, o});
    return refm.exists(k) ? refm[k] : pattern({p[PPA_W-1:0], o});
  endfunction

  // mechanism counters seen from outside
  int n_exc = 0, n_hfwd = 0, n_fwd = 0, n_pass_rd = 0, n_pass_wr = 0, n_msix = 0;
  tag_t next_tag = 0;
  // a miss that found a parked fetch and had to wait for it (observed inside)
  int n_hold = 0; logic held_q = 0;
  always @(posedge clk) begin held_q <= dut.u_ssd.held; if (dut.u_ssd.held && !held_q) n_hold++; end

  // one CPU request; delayed = 1 when a Long Delay Exception came back
  task automatic xact(input m2s_op_e op, input lpa_t p, input pgoff_t o, input line_t d,
                      output bit delayed, output bit forwarded);
    logic [2:0] core;
    core = 3'($urandom);
    cpu_req.op = op; cpu_req.tag = next_tag; cpu_req.addr = {p, o, 6'h0}; cpu_req.data = d;
    cpu_req_core = core; cpu_req_valid = 1; #1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    forwarded = hf_valid;
    if (forwarded) begin
      chk(hf_is_wr && hf_data == d, "forwarded write carries the CPU data");
      hostm[longint'(hf_addr)] = d;
    end
    @(posedge clk); #1 cpu_req_valid = 0;
    delayed = 0;
    if (!forwarded) begin
      while (!cpu_rsp_valid && !exc_valid) @(negedge clk);
      if (exc_valid) begin
        chk(op == M2S_MEMRD && exc_core == core && exc_tag == next_tag, "exception reaches the issuing core");
        delayed = 1; n_exc++;
      end else begin
        chk(cpu_rsp_core == core && cpu_rsp_tag == next_tag, "completion routed to the issuing core");
        if (op == M2S_MEMWR) refm[longint'({p, o})] = d;
        else chk(cpu_rsp_data == expect_line(p, o), $sformatf("read data page %0h line %0d", p, o));
      end
    end
    next_tag++;
    @(negedge clk);
  endtask

  task automatic rd(input lpa_t p, input pgoff_t o);
    bit dl, fw;
    xact(M2S_MEMRD, p, o, '0, dl, fw);
    while (dl) begin repeat (20) @(negedge clk); xact(M2S_MEMRD, p, o, '0, dl, fw); end
  endtask
  task automatic wr(input lpa_t p, input pgoff_t o, output bit fw);
    bit dl;
    xact(M2S_MEMWR, p, o, {16{$urandom}}, dl, fw);
  endtask

  // OS page-copy engine: on the MSI-X, allocate a PLB entry, copy the page
  // line by line (marking each line copied), acknowledge, then free the entry
  localparam lpa_t HOST_PAGE = 52'h7_0000;
  bit copy_pause = 0, copy_done = 0;
  pgoff_t copied_upto = 0;
  initial begin
    msr = 0; hack = 0; hal = 0;
    forever begin
      @(negedge clk);
      if (msv) begin
        lpa_t src;
        src = msl; msr = 1; @(negedge clk); msr = 0; n_msix++;
        pa = 1; pa_src = src; pa_dst = HOST_PAGE; @(negedge clk); pa = 0;
        for (int l = 0; l < 64; l++) begin
          while (copy_pause && l >= 4) @(negedge clk);
          pm = 1; pm_src = src; pm_line = pgoff_t'(l); @(negedge clk); pm = 0;
          copied_upto = pgoff_t'(l);
          repeat (4) @(negedge clk);
        end
        hack = 1; hal = src; @(negedge clk); hack = 0;
        repeat (20) @(negedge clk);
        pf = 1; pf_src = src; @(negedge clk); pf = 0;
        copy_done = 1;
      end
    end
  end

  initial begin
    repeat (600000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    bit fw;
    lpa_t pg [10];
    cpu_req_valid = 0; cpu_req = '0; cpu_req_core = 0;
    foreach (pg[i]) pg[i] = lpa_t'(52'h40 + i);
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (200) @(negedge clk);
    // basic read miss, hit, log write and read-back, cache update
    rd(pg[0], 6'd1);
    rd(pg[0], 6'd2);
    wr(pg[1], 6'd5, fw);
    rd(pg[1], 6'd5);
    wr(pg[0], 6'd2, fw);
    rd(pg[0], 6'd2);
    // GC on the channel of pg[2]: the read gets SkyByte-Delay -> exception
    // while its page fetch waits behind GC, other requests are served
    gcb[pg[2][1:0]] = 1;
    begin
      bit dl; longint t0;
      xact(M2S_MEMRD, pg[2], 6'd0, '0, dl, fw);
      chk(dl, "GC-blocked read answered with an exception");
      t0 = cyc;
      rd(pg[0], 6'd1);
      wr(pg[1], 6'd6, fw);
      chk(cyc - t0 < 60 && stats.fill_overlap == 2,
          $sformatf("cache hit and log write served during the parked fetch (%0d cycles, %0d overlapped)", cyc - t0, stats.fill_overlap));
    end
    // a second miss waits for the parked fetch, then is served itself
    fork
      begin repeat (300) @(negedge clk); gcb = 0; end
      begin rd(pg[7], 6'd5); rd(pg[2], 6'd0); end
    join
    gce[2] = 1; @(negedge clk); gce = 0;
    // random traffic: misses under load trigger threshold delays, the log
    // fills and compacts, writes stall on a double-full log
    for (int i = 0; i < 500; i++) begin
      int k; pgoff_t o;
      k = $urandom_range(9, 3); o = pgoff_t'($urandom_range(7, 0));
      if ($urandom_range(9, 0) < 6) wr(pg[k], o, fw); else rd(pg[k], o);
    end
    // a burst of writes to pages the cache does not hold fills both log
    // buffers faster than compaction drains them: several cores issue
    // back to back, so a new request is always waiting
    begin
      int got;
      got = 0;
      fork
        while (got < 48) begin @(negedge clk); if (cpu_rsp_valid) got++; end
        for (int i = 0; i < 48; i++) begin
          lpa_t p; pgoff_t o; line_t d;
          p = lpa_t'(52'h100 + i % 12); o = pgoff_t'(i / 12); d = {16{$urandom}};
          cpu_req.op = M2S_MEMWR; cpu_req.tag = next_tag; cpu_req.addr = {p, o, 6'h0};
          cpu_req.data = d; cpu_req_core = 3'(i); cpu_req_valid = 1; #1;
          while (!cpu_req_ready) begin @(negedge clk); #1; end
          @(posedge clk); #1;
          refm[longint'({p, o})] = d; next_tag++;
        end
      join_any
      cpu_req_valid = 0;
      wait (got == 48);
      @(negedge clk);
    end
    // promotion of a hot page while the host keeps using it
    copy_pause = 1; mig_en = 1;
    for (int i = 0; i < 6; i++) rd(pg[0], pgoff_t'(i));
    wait (n_msix == 1);
    wait (copied_upto == 3); repeat (5) @(negedge clk);
    begin
      pgoff_t hi; line_t d;
      hi = copied_upto;
      // a line already copied: the write goes to host DRAM
      d = {16{$urandom}};
      begin bit dl; xact(M2S_MEMWR, pg[0], 6'd0, d, dl, fw); end
      chk(fw && hostm.exists(longint'({HOST_PAGE, 12'h000})) && hostm[longint'({HOST_PAGE, 12'h000})] == d,
          "write to a copied line forwarded to host page");
      if (fw) n_fwd++;
      // a line not yet copied: the write still goes to the SSD
      wr(pg[0], 6'd63, fw);
      chk(!fw, "write to an uncopied line goes to the SSD");
      if (!fw) n_pass_wr++;
      // reads of the page under promotion are served by the SSD
      rd(pg[0], 6'd1);
      n_pass_rd++;
      chk(hi < 63, "copy still in progress during the checks");
    end
    copy_pause = 0;
    wait (copy_done);
    for (int i = 0; i < 5000 && stats.mig_drop == 0; i++) @(negedge clk);
    mig_en = 0;
    chk(stats.mig_drop == 1, "page dropped from the SSD after the host acknowledged");
    // after the free, writes to the old page reach the SSD again
    wr(pg[0], 6'd0, fw);
    chk(!fw, "PLB entry freed");
    // huge-page promotion: chunk 0 fully copied, line 7 of chunk 1 copied
    begin
      line_t d; bit dl;
      h_src = 43'h100; h_dst = 43'h3;
      ha = 1; @(negedge clk); ha = 0;
      chk(ha_ok, "huge-page PLB had room");
      hm = 1; hm_line = 6'd5; @(negedge clk); hm = 0;
      hcd = 1; @(negedge clk); hcd = 0;
      hm = 1; hm_line = 6'd7; @(negedge clk); hm = 0;
      d = {16{$urandom}};
      xact(M2S_MEMWR, 52'h2_0000, 6'd9, d, dl, fw);
      chk(fw && hostm.exists(longint'({43'h3, 9'd0, 6'd9, 6'd0})), "write into a copied chunk forwarded to the host huge page");
      if (fw) n_hfwd++;
      xact(M2S_MEMWR, 52'h2_0001, 6'd7, d, dl, fw);
      chk(fw && hostm.exists(longint'({43'h3, 9'd1, 6'd7, 6'd0})), "write to a copied line of the current chunk forwarded");
      if (fw) n_hfwd++;
      wr(52'h2_0001, 6'd8, fw);
      chk(!fw, "uncopied line of the current chunk goes to the SSD");
      wr(52'h2_0002, 6'd0, fw);
      chk(!fw, "chunk not yet reached goes to the SSD");
      hf = 1; @(negedge clk); hf = 0;
      wr(52'h2_0000, 6'd9, fw);
      chk(!fw, "huge-page PLB entry freed");
    end
    // drain background compaction and verify everything written
    repeat (20000) @(negedge clk);
    for (int k = 1; k < 10; k++) for (int o = 0; o < 8; o++) rd(pg[k], pgoff_t'(o));
    for (int k = 0; k < 12; k++) for (int o = 0; o < 4; o++) rd(lpa_t'(52'h100 + k), pgoff_t'(o));
    $display("STAT R1=%0d R2=%0d R3=%0d delay=%0d gc=%0d exc=%0d wr=%0d W2=%0d switch=%0d L2=%0d L5=%0d stall=%0d ovl=%0d msix=%0d fwd=%0d passwr=%0d passrd=%0d drop=%0d",
      stats.rd_cache_hit, stats.rd_log_hit, stats.rd_miss, stats.delay_ndr, stats.gc_trigger, n_exc,
      stats.wr, stats.wr_cache_upd, stats.log_switch, stats.cmp_cached, stats.cmp_merged,
      stats.wr_stall, stats.fill_overlap, n_msix, n_fwd, n_pass_wr, n_pass_rd, stats.mig_drop);
    chk(stats.rd_cache_hit > 0, "mechanism R1 data-cache hit");
    chk(stats.rd_log_hit > 0, "mechanism R2 write-log hit");
    chk(stats.rd_miss > 0, "mechanism R3 flash miss");
    chk(stats.gc_trigger > 0, "mechanism GC-forced delay");
    chk(stats.delay_ndr > stats.gc_trigger, "mechanism threshold delay");
    chk(n_exc == int'(stats.delay_ndr), "every delay delivered as an exception");
    chk(stats.wr > stats.wr_cache_upd, "mechanism W1 log append");
    chk(stats.wr_cache_upd > 0, "mechanism W2 cache update");
    chk(stats.log_switch >= 2, "mechanism log buffer switch");
    chk(stats.cmp_cached > 0, "mechanism compaction of cached page");
    chk(stats.cmp_merged > 0, "mechanism compaction with flash read-merge");
    chk(stats.wr_stall > 0, "mechanism write stall");
    chk(stats.fill_overlap > 0, "mechanism requests served during a background fetch");
    chk(n_hold > 0, "mechanism second miss waits for the parked fetch");
    chk(n_msix == 1, "mechanism promotion interrupt");
    chk(n_fwd == 1, "mechanism PLB write forwarding");
    chk(n_hfwd == 2, "mechanism huge-page PLB write forwarding");
    chk(hf_count == 32'(n_fwd + n_hfwd), "forward count");
    chk(n_pass_wr > 0 && n_pass_rd > 0, "mechanism PLB pass-through");
    chk(stats.mig_drop > 0, "mechanism page drop");
    chk(programs == 64 * stats.flash_wr, "flash programs are whole pages");
    chk(unk == 0, "no unmatched responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
