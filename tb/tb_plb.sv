// tb_plb -- self-checking test of the Promotion Look-aside Buffer.
// Fills all 64 entries (alloc_ok must then drop), marks random lines of
// random entries while keeping a reference bitmap here, and checks lookups:
// hit for pages under promotion, migrated bit per line, writes to migrated
// lines routed to host DRAM at dst page + same offset, reads kept on the SSD,
// and misses after free.
module tb_plb;
  import skybyte_pkg::*;
  logic clk = 0, rst_n = 0, al = 0, mk = 0, fr = 0, isw = 0;
  lpa_t as, ad, ms, fs; pgoff_t mline; logic [63:0] la, lha;
  logic aok, hit, mig, toh; logic [6:0] act;
  int checks = 0, failures = 0;
  lpa_t src [64], dst [64]; logic [63:0] bm [64];
  always #5 clk = ~clk;

  plb dut (.clk, .rst_n, .alloc(al), .alloc_src(as), .alloc_dst(ad), .alloc_ok(aok), .mark(mk),
    .mark_src(ms), .mark_line(mline), .free(fr), .free_src(fs), .lk_addr(la), .lk_is_wr(isw),
    .lk_hit(hit), .lk_migrated(mig), .lk_to_host(toh), .lk_host_addr(lha), .active(act));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    as = 0; ad = 0; ms = 0; fs = 0; mline = 0; la = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      src[i] = lpa_t'(52'h4_0000 + i * 3); dst[i] = lpa_t'(52'h100 + i); bm[i] = '0;
      chk(aok, "free slot available");
      al = 1; as = src[i]; ad = dst[i]; @(negedge clk); al = 0;
    end
    chk(!aok && act == 64, "PLB full");
    for (int k = 0; k < 300; k++) begin
      int e; int l; e = $urandom_range(63, 0); l = $urandom_range(63, 0);
      mk = 1; ms = src[e]; mline = pgoff_t'(l); @(negedge clk); mk = 0;
      bm[e][l] = 1;
    end
    for (int k = 0; k < 400; k++) begin
      int e; int l; e = $urandom_range(63, 0); l = $urandom_range(63, 0);
      la = {src[e], 6'(l), 6'h0}; isw = $urandom_range(1, 0); #1;
      chk(hit && mig == bm[e][l], "migrated bit");
      chk(toh == (bm[e][l] && isw), "routing");
      if (toh) chk(lha == {dst[e], 6'(l), 6'h0}, "host address");
      @(negedge clk);
    end
    la = 64'hdead_0000_0000; #1; chk(!hit && !toh, "unrelated page misses");
    fs = src[5]; fr = 1; @(negedge clk); fr = 0;
    la = {src[5], 12'h0}; isw = 1; #1; chk(!hit && !toh, "freed entry misses");
    chk(aok && act == 63, "slot freed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
