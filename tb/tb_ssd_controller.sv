// tb_ssd_controller -- self-checking test of the CXL-SSD controller.
// Small configuration: 16-slot log buffers, 8 cache frames in 2 ways, 4
// channels, read/program/erase = 50/200/500 cycles, threshold 60 cycles.
// A reference memory kept here (initial contents = the flash model's pattern)
// predicts every MemData.  The test runs directed steps (first read miss
// with its latency, cache hit, log hit, write to a cached page, GC-forced
// delay, migration of a hot page) and then random read/write traffic that
// fills both log buffers, forcing compactions and write stalls.  Reads that
// get a SkyByte-Delay NDR are replayed, as the host would after a context
// switch.  At the end every mechanism counter must be non-zero.
module tb_ssd_controller;
  import skybyte_pkg::*;
  localparam int LOGN = 16, FR = 8, WY = 2, CH = 4;
  localparam int DW = $clog2(2*LOGN + FR*64);
  localparam int RL = 50, WL = 200, EL = 500, TH = 60;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid; m2s_req_t req; s2m_rsp_t rsp;
  logic cs_en = 1, mig_en = 0;
  logic dre, dwe, fre, fwe; logic [DW-1:0] dra, dwa; line_t drd, dwd, frd, fwd;
  logic [30:0] fra, fwa;
  logic [CH-1:0] gcb = 0, gce = 0;
  logic msv, msr, hack; lpa_t msl, hal; ssd_stats_t stats;
  logic [7:0] qr [CH], qw [CH], qe [CH];
  int unsigned programs;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  ssd_controller #(.LOG_ENTRIES(LOGN), .FRAMES(FR), .WAYS(WY), .CHANNELS(CH), .QDEPTH(16),
                   .HOT_THRESH(3)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready(1'b1), .rsp,
    .cs_enable(cs_en), .mig_enable(mig_en), .cs_threshold(32'(TH)), .read_lat(32'(RL)),
    .write_lat(32'(WL)), .erase_lat(32'(EL)),
    .dram_re(dre), .dram_raddr(dra), .dram_rdata(drd), .dram_we(dwe), .dram_waddr(dwa), .dram_wdata(dwd),
    .fl_re(fre), .fl_raddr(fra), .fl_rdata(frd), .fl_we(fwe), .fl_waddr(fwa), .fl_wdata(fwd),
    .gc_block(gcb), .gc_erase_push(gce), .msix_valid(msv), .msix_ready(msr), .msix_lpa(msl),
    .host_ack(hack), .host_ack_lpa(hal), .pin_valid(1'b0), .pin_lpa('0), .stats,
    .q_reads(qr), .q_writes(qw), .q_erases(qe));

  ssd_dram_model #(.DW(DW)) u_dram (.clk, .re(dre), .raddr(dra), .rdata(drd), .we(dwe), .waddr(dwa), .wdata(dwd));
  flash_model u_flash (.clk, .re(fre), .raddr(fra), .rdata(frd), .we(fwe), .waddr(fwa), .wdata(fwd), .programs);

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // reference memory: line address -> data
  line_t refm [longint];
  function automatic line_t pattern(input logic [30:0] a);
    line_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = {a ^ 31'(i * 32'h9e3779b1), 1'b1};
    return d;
  endfunction
  function automatic logic [30:0] faddr(input lpa_t p, input pgoff_t o);
    return {p[PPA_W-1:0], o};
  endfunction
  function automatic line_t expect_line(input lpa_t p, input pgoff_t o);
    longint k; k = longint'({p, o});
    return refm.exists(k) ? refm[k] : pattern(faddr(p, o));
  endfunction

  tag_t next_tag = 0;
  int   delays = 0;
  // one CXL.mem transaction; returns 1 if answered with data (reads) or Cmp (writes)
  task automatic xact(input m2s_op_e op, input lpa_t p, input pgoff_t o, input line_t d,
                      output bit delayed, output longint lat);
    longint t0;
    req.op = op; req.tag = next_tag; req.addr = {p, o, 6'h0}; req.data = d;
    req_valid = 1; #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); t0 = cyc; #1 req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    lat = cyc - t0;
    delayed = 0;
    if (op == M2S_MEMWR) begin
      chk(rsp.kind == S2M_NDR && rsp.ndr.valid && rsp.ndr.opcode == NDR_CMP && rsp.ndr.tag == next_tag, "write Cmp");
      refm[longint'({p, o})] = d;
    end else if (rsp.kind == S2M_NDR) begin
      chk(rsp.ndr.valid && rsp.ndr.opcode == NDR_SKYBYTE_DELAY && rsp.ndr.tag == next_tag, "delay NDR");
      delayed = 1; delays++;
    end else begin
      chk(rsp.tag == next_tag, "DRS tag");
      chk(rsp.data == expect_line(p, o), $sformatf("read data page %0h line %0d", p, o));
    end
    next_tag++;
    @(negedge clk);
  endtask

  task automatic rd(input lpa_t p, input pgoff_t o);
    bit dl; longint lat;
    xact(M2S_MEMRD, p, o, '0, dl, lat);
    while (dl) begin
      repeat (20) @(negedge clk); xact(M2S_MEMRD, p, o, '0, dl, lat);
      if (delays % 1000 == 999) $display("DBG many delays page %0h line %0d st R1=%0d R3=%0d", p, o, stats.rd_cache_hit, stats.rd_miss);
    end
  endtask
  task automatic wr(input lpa_t p, input pgoff_t o);
    bit dl; longint lat;
    xact(M2S_MEMWR, p, o, {16{$urandom}}, dl, lat);
  endtask

  // host side of migration: take the MSI-X, "copy", acknowledge
  lpa_t migrated [$];
  initial begin
    msr = 0; hack = 0; hal = 0;
    forever begin
      @(negedge clk);
      if (msv) begin
        msr = 1; hal = msl; @(negedge clk); msr = 0;
        migrated.push_back(hal);
        repeat (10) @(negedge clk);
        hack = 1; @(negedge clk); hack = 0;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL watchdog: controller state %s, %0d writes, %0d log switches, comp %0d wl_ready %0d old %0d ix %0d %0d dc %0d req_valid %0d", dut.st.name(), stats.wr, stats.log_switch, dut.comp_active, dut.wl_ready, dut.wl_old, dut.ix_ready[0], dut.ix_ready[1], dut.dc_ready, req_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    bit dl; longint lat;
    lpa_t pg [10];
    req_valid = 0; req = '0;
    foreach (pg[i]) pg[i] = lpa_t'(52'h20 + i);
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (200) @(negedge clk);
    // 1. first read misses: idle channel, est = RL < TH, host waits for data
    xact(M2S_MEMRD, pg[0], 6'd3, '0, dl, lat);
    chk(!dl && lat >= RL && lat < RL + 200, $sformatf("miss latency %0d cycles (read_lat %0d)", lat, RL));
    chk(stats.rd_miss == 1, "counted as R3");
    // 2. same page again: data-cache hit, short latency
    xact(M2S_MEMRD, pg[0], 6'd4, '0, dl, lat);
    chk(!dl && lat < 20 && stats.rd_cache_hit == 1, $sformatf("R1 hit in %0d cycles", lat));
    // 3. write to an uncached page, read it back from the log
    wr(pg[1], 6'd7);
    xact(M2S_MEMRD, pg[1], 6'd7, '0, dl, lat);
    chk(!dl && stats.rd_log_hit == 1, "R2 log hit");
    // 4. write into the cached page (W2) and read it back from the cache
    wr(pg[0], 6'd4);
    rd(pg[0], 6'd4);
    chk(stats.wr_cache_upd == 1, "W2 cache update");
    // 5. page 1 fetched from flash must merge the logged line
    rd(pg[1], 6'd8);
    rd(pg[1], 6'd7);
    // 6. GC-blocked channel forces a delay hint
    gcb[pg[2][1:0]] = 1;
    xact(M2S_MEMRD, pg[2], 6'd0, '0, dl, lat);
    chk(dl && stats.gc_trigger == 1, "GC forces SkyByte-Delay");
    repeat (50) @(negedge clk);
    gcb = 0;
    gce[1] = 1; @(negedge clk); gce = 0;       // one erase queued by GC on channel 1
    repeat (RL + 100) @(negedge clk);
    rd(pg[2], 6'd0);
    // 7. random traffic over more pages than the cache holds
    for (int i = 0; i < 400; i++) begin
      int k; pgoff_t o;
      k = $urandom_range(9, 3); o = pgoff_t'($urandom_range(7, 0));
      if ($urandom_range(9, 0) < 6) wr(pg[k], o); else rd(pg[k], o);
    end
    // 8. migration: a page read often enough is promoted and dropped
    mig_en = 1;
    for (int i = 0; i < 6; i++) rd(pg[0], pgoff_t'(i));
    repeat (100) @(negedge clk);
    chk(migrated.size() >= 1 && migrated[0] == pg[0], "hot page offered to the host");
    chk(stats.mig_drop >= 1, "page dropped after acknowledgement");
    mig_en = 0;
    // let background compaction finish, then verify pages written so far
    repeat (20000) @(negedge clk);
    for (int k = 3; k < 10; k++) for (int o = 0; o < 8; o++) rd(pg[k], pgoff_t'(o));
    $display("STAT R1=%0d R2=%0d R3=%0d delay=%0d gc=%0d wr=%0d W2=%0d switch=%0d L2=%0d L5=%0d lines=%0d frd=%0d fwr=%0d stall=%0d drop=%0d prog=%0d",
      stats.rd_cache_hit, stats.rd_log_hit, stats.rd_miss, stats.delay_ndr, stats.gc_trigger, stats.wr,
      stats.wr_cache_upd, stats.log_switch, stats.cmp_cached, stats.cmp_merged, stats.cmp_lines,
      stats.flash_rd, stats.flash_wr, stats.wr_stall, stats.mig_drop, programs);
    chk(stats.rd_cache_hit > 0 && stats.rd_log_hit > 0 && stats.rd_miss > 0, "R1/R2/R3 all seen");
    chk(stats.delay_ndr > stats.gc_trigger, "threshold-triggered delays seen");
    chk(stats.log_switch >= 2 && stats.cmp_cached > 0 && stats.cmp_merged > 0, "compaction L2 and L3-L5 seen");
    chk(stats.wr_stall > 0, "write stall on double-full log seen");
    chk(stats.flash_wr == stats.cmp_cached + stats.cmp_merged && programs == 64 * stats.flash_wr, "flash programs match compacted pages");
    chk(stats.cmp_lines > 0, "coalesced lines counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
