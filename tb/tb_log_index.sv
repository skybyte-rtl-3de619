// tb_log_index -- self-checking test of the two-level write-log index.
// Small index (64 level-1 entries, 64 chunks).  Random inserts to a handful
// of pages (so that chains grow past one four-entry chunk and lines are
// rewritten) are mirrored in a reference map kept here; then every
// (page, offset) is looked up, every page is walked and its stream compared
// with the map, the scan must visit each page once, an invalidated page must
// disappear from lookups and scans, and after clear nothing is found.
module tb_log_index;
  import skybyte_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic cv, cr, done, hit, ev, found; logic [2:0] op;
  lpa_t lpa, slpa; pgoff_t off, eoff; logic [25:0] lo, logoff, elog;
  logic [5:0] start, sidx; logic [6:0] used;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  log_index #(.L1_ENTRIES(N), .CHUNKS(N)) dut (.clk, .rst_n, .cmd_valid(cv), .cmd_ready(cr),
    .cmd_op(op), .cmd_lpa(lpa), .cmd_off(off), .cmd_logoff(lo), .cmd_start(start), .done, .hit,
    .logoff, .ent_valid(ev), .ent_off(eoff), .ent_logoff(elog), .found, .scan_lpa(slpa),
    .scan_idx(sidx), .chunks_used(used));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: key = {page, offset} -> log offset
  int unsigned refm [longint];
  lpa_t pages [6];
  int unsigned seen [longint];

  task automatic cmd(input logic [2:0] o, input lpa_t l, input pgoff_t f, input logic [25:0] g, input logic [5:0] s);
    while (!cr) @(negedge clk);
    op = o; lpa = l; off = f; lo = g; start = s; cv = 1;
    @(negedge clk); cv = 0;
    seen.delete();
    while (!done) begin
      @(negedge clk);
      if (ev) seen[longint'(eoff)] = elog;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    int nins;
    cv = 0; op = 0; lpa = 0; off = 0; lo = 0; start = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // pages chosen to collide in the hash (same low bits) and not
    for (int p = 0; p < 6; p++) pages[p] = (p < 3) ? lpa_t'(52'h1_0000_0000 * (p + 1) + 5) : lpa_t'($urandom);
    nins = 0;
    for (int i = 0; i < 40; i++) begin
      int p; pgoff_t f; logic [25:0] g;
      p = $urandom_range(5, 0); f = pgoff_t'($urandom_range(9, 0)); g = 26'(1000 + i);
      cmd(3'd1, pages[p], f, g, 0);
      refm[{pages[p], f}] = g;
    end
    // lookups
    foreach (pages[p]) for (int f = 0; f < 12; f++) begin
      cmd(3'd0, pages[p], pgoff_t'(f), 0, 0);
      if (refm.exists({pages[p], pgoff_t'(f)})) chk(hit && logoff == refm[{pages[p], pgoff_t'(f)}], "lookup hit value");
      else chk(!hit, "lookup miss");
    end
    // walks
    foreach (pages[p]) begin
      int cntref;
      cmd(3'd2, pages[p], 0, 0, 0);
      cntref = 0;
      for (int f = 0; f < 64; f++) if (refm.exists({pages[p], pgoff_t'(f)})) begin
        cntref++;
        chk(seen.exists(f) && seen[f] == refm[{pages[p], pgoff_t'(f)}], "walk entry");
      end
      chk(seen.num() == cntref, "walk count");
    end
    // scan visits every distinct page once
    begin
      int visits; logic [5:0] cur; bit fin;
      visits = 0; cur = 0; fin = 0;
      while (!fin) begin
        cmd(3'd3, 0, 0, 0, cur);
        if (found) begin visits++; if (sidx == 6'(N-1)) fin = 1; else cur = sidx + 1; end
        else fin = 1;
      end
      begin
        int distinct; distinct = 0;
        foreach (pages[p]) begin
          bit any; any = 0;
          for (int f = 0; f < 64; f++) if (refm.exists({pages[p], pgoff_t'(f)})) any = 1;
          for (int q = 0; q < p; q++) if (pages[q] == pages[p]) any = 0;
          distinct += any;
        end
        chk(visits == distinct, $sformatf("scan visits %0d pages, expected %0d", visits, distinct));
      end
    end
    // invalidate page 0
    cmd(3'd4, pages[0], 0, 0, 0);
    cmd(3'd0, pages[0], 0, 0, 0);
    chk(!hit, "invalidated page no longer hits");
    cmd(3'd1, pages[0], 6'd3, 26'd77, 0);
    cmd(3'd0, pages[0], 6'd3, 0, 0);
    chk(hit && logoff == 77, "reinsert after invalidate");
    // clear
    cmd(3'd5, 0, 0, 0, 0);
    chk(used == 0, "pool emptied");
    foreach (pages[p]) begin cmd(3'd0, pages[p], 6'd0, 0, 0); chk(!hit, "cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
