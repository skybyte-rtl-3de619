// tb_plb_huge -- self-checking test of the two-level huge-page PLB.
// Two huge pages are promoted at once with 4 entries.  The bench keeps its
// own record of which 4 KB chunks and which lines of the current chunk were
// copied and, after every step, probes random addresses of both pages (and
// of an unrelated page) with reads and writes, comparing hit, migrated,
// routing and host address with that record.  It also checks a full PLB,
// that completing a chunk clears the line bitmap and advances the chunk,
// and that freeing an entry stops the forwarding.
module tb_plb_huge;
  import skybyte_pkg::*;
  logic clk = 0, rst_n = 0;
  logic al = 0, mk = 0, cd = 0, fr = 0, al_ok, hit, mig, toh, lw = 0;
  logic [42:0] als = '0, ald = '0, mks = '0, cds = '0, frs = '0;
  pgoff_t mkl = '0; logic [63:0] la = '0, ha; logic [3:0] act;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  plb_huge #(.ENTRIES(4)) dut (.clk, .rst_n, .alloc(al), .alloc_src(als), .alloc_dst(ald), .alloc_ok(al_ok),
    .mark(mk), .mark_src(mks), .mark_line(mkl), .chunk_done(cd), .chunk_src(cds), .free(fr), .free_src(frs),
    .lk_addr(la), .lk_is_wr(lw), .lk_hit(hit), .lk_migrated(mig), .lk_to_host(toh), .lk_host_addr(ha), .active(act));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [42:0] src [2], dst [2];
  bit          live [2];
  bit [511:0]  chunks [2];
  int          cur [2];
  bit [63:0]   lines [2];

  task automatic probe(input int n);
    for (int k = 0; k < n; k++) begin
      int p; logic [8:0] c; logic [5:0] l; bit w, em;
      p = $urandom_range(2, 0);
      c = ($urandom_range(1, 0) == 1 && p < 2) ? 9'(cur[p]) : 9'($urandom);
      l = 6'($urandom); w = $urandom_range(1, 0) == 1;
      la = {(p < 2) ? src[p] : 43'h5_5555, c, l, 6'($urandom)}; lw = w; #1;
      em = (p < 2) && live[p] && (chunks[p][c] || (int'(c) == cur[p] && lines[p][l]));
      chk(hit == ((p < 2) && live[p]), "hit");
      chk(mig == em, $sformatf("migrated page %0d chunk %0d line %0d", p, c, l));
      chk(toh == (em && w), "routing");
      if (toh) chk(ha == {dst[p], la[20:0]}, "host address");
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int p = 0; p < 2; p++) begin
      src[p] = 43'h100 + 43'(p) * 43'h777; dst[p] = 43'h40 + 43'(p); live[p] = 0;
      chunks[p] = '0; cur[p] = 0; lines[p] = '0;
    end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    probe(20);
    for (int p = 0; p < 2; p++) begin
      al = 1; als = src[p]; ald = dst[p]; #1 chk(al_ok, "room"); @(negedge clk); al = 0; live[p] = 1;
    end
    chk(act == 2, "two active");
    probe(50);
    // copy: both pages advance, interleaved, a few chunks each
    for (int step = 0; step < 600; step++) begin
      int p; p = $urandom_range(1, 0);
      if ($urandom_range(9, 0) == 0) begin
        cd = 1; cds = src[p]; @(negedge clk); cd = 0;
        chunks[p][cur[p]] = 1; cur[p]++; lines[p] = '0;
      end else begin
        logic [5:0] l; l = 6'($urandom);
        mk = 1; mks = src[p]; mkl = l; @(negedge clk); mk = 0;
        lines[p][l] = 1;
      end
      probe(4);
    end
    chk(cur[0] > 2 && cur[1] > 2, "several chunks completed");
    // fill the remaining entries, then one too many
    al = 1; als = 43'h9000; ald = 43'h9; @(negedge clk);
    als = 43'h9001; @(negedge clk); al = 0; #1;
    chk(act == 4 && !al_ok, "full");
    // free page 0: its writes go back to the SSD
    fr = 1; frs = src[0]; @(negedge clk); fr = 0; live[0] = 0;
    chk(act == 3, "freed");
    probe(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
