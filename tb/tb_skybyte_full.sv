// tb_skybyte_full -- the whole design at its full default size.
// skybyte_top is instantiated without a parameter list: two 512 Ki-entry log
// buffers (64 MB of log), 114688 cache frames (448 MB) in 16 ways, 16 flash
// channels with 64-deep queues, a 64-entry PLB.  The configuration inputs
// carry the evaluated timing at a 1 GHz controller clock: flash read 3 us =
// 3000 cycles, program 100 us, erase 1 ms, context-switch threshold 2 us.
// After the index sweeps that follow reset, the bench writes one cacheline
// and reads it back from the write log, then reads a line of a page that
// is in neither log nor cache: the estimated 3000-cycle flash read is above
// the 2000-cycle threshold, so the core gets a Long Delay Exception, and the
// replayed load after the page has arrived hits in the data cache with the
// flash contents.  A final write to that cached page updates the cache.
module tb_skybyte_full;
  import skybyte_pkg::*;
  localparam int DW = $clog2(2*524288 + 114688*64);
  logic clk = 0, rst_n = 0;
  logic cpu_req_valid = 0, cpu_req_ready; logic [2:0] cpu_req_core = 0; m2s_req_t cpu_req = '0;
  logic cpu_rsp_valid; logic [2:0] cpu_rsp_core; tag_t cpu_rsp_tag; line_t cpu_rsp_data;
  logic exc_valid; logic [2:0] exc_core; tag_t exc_tag;
  logic hf_valid, hf_is_wr; logic [63:0] hf_addr; line_t hf_data;
  logic pa_ok, msv; lpa_t msl;
  logic dre, dwe, fre, fwe; logic [DW-1:0] dra, dwa; line_t drd, dwd, frd, fwd;
  logic [30:0] fra, fwa;
  ssd_stats_t stats; logic [31:0] hf_count, unk;
  int unsigned programs;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  skybyte_top dut (
    .clk, .rst_n, .cpu_req_valid, .cpu_req_ready, .cpu_req_core, .cpu_req,
    .cpu_rsp_valid, .cpu_rsp_core, .cpu_rsp_tag, .cpu_rsp_data, .exc_valid, .exc_core, .exc_tag,
    .host_fwd_valid(hf_valid), .host_fwd_ready(1'b1), .host_fwd_is_wr(hf_is_wr),
    .host_fwd_addr(hf_addr), .host_fwd_data(hf_data),
    .plb_alloc(1'b0), .plb_alloc_src('0), .plb_alloc_dst('0), .plb_alloc_ok(pa_ok),
    .plb_mark(1'b0), .plb_mark_src('0), .plb_mark_line('0), .plb_free(1'b0), .plb_free_src('0),
    .hplb_alloc(1'b0), .hplb_alloc_src('0), .hplb_alloc_dst('0), .hplb_alloc_ok(),
    .hplb_mark(1'b0), .hplb_mark_src('0), .hplb_mark_line('0), .hplb_chunk_done(1'b0), .hplb_chunk_src('0),
    .hplb_free(1'b0), .hplb_free_src('0),
    .msix_valid(msv), .msix_ready(1'b1), .msix_lpa(msl), .host_ack(1'b0), .host_ack_lpa('0),
    .pin_valid(1'b0), .pin_lpa('0),
    .cs_enable(1'b1), .mig_enable(1'b0), .cs_threshold(32'd2000), .read_lat(32'd3000),
    .write_lat(32'd100000), .erase_lat(32'd1000000),
    .dram_re(dre), .dram_raddr(dra), .dram_rdata(drd), .dram_we(dwe), .dram_waddr(dwa), .dram_wdata(dwd),
    .fl_re(fre), .fl_raddr(fra), .fl_rdata(frd), .fl_we(fwe), .fl_waddr(fwa), .fl_wdata(fwd),
    .gc_block('0), .gc_erase_push('0), .stats, .host_fwd_count(hf_count), .unknown_rsp(unk));

  ssd_dram_model #(.DW(DW)) u_dram (.clk, .re(dre), .raddr(dra), .rdata(drd), .we(dwe), .waddr(dwa), .wdata(dwd));
  flash_model u_flash (.clk, .re(fre), .raddr(fra), .rdata(frd), .we(fwe), .waddr(fwa), .wdata(fwd), .programs);

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask
  function automatic line_t pattern(input logic [30:0] a);
    line_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = {a ^ 31'(i * 32'h9e3779b1), 1'b1};
    return d;
  endfunction

  // issue one request and wait for its completion or exception
  task automatic xact(input m2s_op_e op, input lpa_t p, input pgoff_t o, input line_t d,
                      input tag_t tg, output bit exc, output line_t rdata, output longint lat);
    longint t0;
    cpu_req.op = op; cpu_req.tag = tg; cpu_req.addr = {p, o, 6'h0}; cpu_req.data = d;
    cpu_req_core = 3'd5; cpu_req_valid = 1; #1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    @(posedge clk); t0 = cyc; #1 cpu_req_valid = 0;
    while (!cpu_rsp_valid && !exc_valid) @(negedge clk);
    lat = cyc - t0;
    exc = exc_valid;
    rdata = cpu_rsp_data;
    chk(exc ? (exc_tag == tg && exc_core == 3'd5) : (cpu_rsp_tag == tg && cpu_rsp_core == 3'd5),
        "response tag and core");
    @(negedge clk);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    bit e; line_t rd, d; longint lat;
    lpa_t pa, pb;
    pa = 52'h1234; pb = 52'h5_6789;
    repeat (3) @(negedge clk); rst_n = 1;
    while (!cpu_req_ready) @(negedge clk);
    $display("INFO ready after %0d cycles", cyc);
    d = {16{32'hC0FFEE01}};
    xact(M2S_MEMWR, pa, 6'd9, d, 16'd1, e, rd, lat);
    chk(!e && stats.wr == 1, "write completes with Cmp");
    xact(M2S_MEMRD, pa, 6'd9, '0, 16'd2, e, rd, lat);
    chk(!e && rd == d && stats.rd_log_hit == 1, "read hits the write log");
    xact(M2S_MEMRD, pb, 6'd17, '0, 16'd3, e, rd, lat);
    chk(e && stats.delay_ndr == 1, "flash miss above threshold raises a Long Delay Exception");
    chk(lat < 100, $sformatf("exception returned in %0d cycles, before the flash read", lat));
    repeat (3200) @(negedge clk);
    xact(M2S_MEMRD, pb, 6'd17, '0, 16'd4, e, rd, lat);
    chk(!e && rd == pattern({pb[PPA_W-1:0], 6'd17}) && stats.rd_cache_hit == 1,
        "replayed load hits the data cache with the flash data");
    d = {16{32'h0BADF00D}};
    xact(M2S_MEMWR, pb, 6'd17, d, 16'd5, e, rd, lat);
    xact(M2S_MEMRD, pb, 6'd17, '0, 16'd6, e, rd, lat);
    chk(!e && rd == d && stats.wr_cache_upd == 1, "write to a cached page updates the cache");
    chk(unk == 0, "no unmatched responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
