// tb_skybyte_workloads -- synthetic runs of the evaluated workload mixes.
// The evaluated programs are memory traces that cannot be replayed here, so
// each is reduced to what its table entry gives: the share of writes among
// its CXL-SSD accesses.  For each of the seven mixes (bfs-dense 25 %, bc 11 %,
// radix 29 %, srad 24 %, ycsb 5 %, tpcc 36 %, dlrm 32 %) the design, at the
// same small size as the end-to-end bench, serves 400 requests over a
// footprint three times the data cache, skewed so that a quarter of the
// pages get most accesses.  Loads that get the delay hint are replayed.
// Every load is checked against a reference memory; per mix the bench prints
// hit, log-hit, miss, delay, compaction and stall counts and requires that
// reads were served from the cache, that writes were coalesced by compaction
// (fewer pages programmed than lines written) and that nothing was lost.
module tb_skybyte_workloads;
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


  initial begin
    msr = 0; hack = 0; hal = 0;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    string names [7] = '{"bfs-dense", "bc", "radix", "srad", "ycsb", "tpcc", "dlrm"};
    int    wpct  [7] = '{25, 11, 29, 24, 5, 36, 32};
    bit fw;
    cpu_req_valid = 0; cpu_req = '0; cpu_req_core = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (200) @(negedge clk);
    for (int w = 0; w < 7; w++) begin
      ssd_stats_t s0; int nwr;
      s0 = stats; nwr = 0;
      for (int i = 0; i < 400; i++) begin
        lpa_t p; pgoff_t o;
        // 24 pages (3x the cache), a quarter of them hot
        p = lpa_t'(52'h1000 * (w + 1) + (($urandom_range(3, 0) != 0) ? $urandom_range(5, 0) : $urandom_range(23, 6)));
        o = pgoff_t'($urandom_range(15, 0));
        if ($urandom_range(99, 0) < wpct[w]) begin wr(p, o, fw); nwr++; end
        else rd(p, o);
      end
      repeat (5000) @(negedge clk);
      $display("STAT %s writes=%0d%% R1=%0d R2=%0d R3=%0d delay=%0d switch=%0d programmed=%0d lines_written=%0d stall=%0d",
        names[w], wpct[w], stats.rd_cache_hit - s0.rd_cache_hit, stats.rd_log_hit - s0.rd_log_hit,
        stats.rd_miss - s0.rd_miss, stats.delay_ndr - s0.delay_ndr, stats.log_switch - s0.log_switch,
        stats.flash_wr - s0.flash_wr, nwr, stats.wr_stall - s0.wr_stall);
      chk(stats.rd_cache_hit - s0.rd_cache_hit > 0, {names[w], ": reads hit the data cache"});
      chk(stats.flash_wr - s0.flash_wr < 32'(nwr), {names[w], ": compaction coalesced writes"});
    end
    // read back a sample of every mix's pages
    for (int w = 0; w < 7; w++)
      for (int k = 0; k < 24; k += 5) rd(lpa_t'(52'h1000 * (w + 1) + k), pgoff_t'(k % 16));
    chk(unk == 0, "no unmatched responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
