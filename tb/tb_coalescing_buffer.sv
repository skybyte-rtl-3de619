// tb_coalescing_buffer -- self-checking test of the compaction merge buffer.
// Loads a page of known lines, overwrites some as merge writes, then reads
// every line back (one cycle latency) and compares with the expected merged
// page; the merged-line count must equal the distinct merged lines, and
// clear_mask resets it.
module tb_coalescing_buffer;
  import skybyte_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, wm = 0, re = 0, clr = 0;
  logic [5:0] wl, rl; line_t wd, rd; logic [6:0] merged;
  int checks = 0, failures = 0;
  line_t expv [64]; bit mset [64];
  always #5 clk = ~clk;

  coalescing_buffer dut (.clk, .rst_n, .wr_en(we), .wr_merge(wm), .wr_line(wl), .wr_data(wd),
    .rd_en(re), .rd_line(rl), .rd_data(rd), .clear_mask(clr), .merged_lines(merged));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    int nm;
    wl = 0; rl = 0; wd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      expv[i] = {16{32'(i) ^ 32'hA5A5_0000}}; mset[i] = 0;
      we = 1; wm = 0; wl = 6'(i); wd = expv[i]; @(negedge clk);
    end
    chk(merged == 0, "plain loads are not merges");
    for (int k = 0; k < 20; k++) begin
      int i; i = $urandom_range(63, 0);
      expv[i] = {16{$urandom}}; mset[i] = 1;
      we = 1; wm = 1; wl = 6'(i); wd = expv[i]; @(negedge clk);
    end
    // the two end lines are always merged too
    foreach (expv[i]) if (i == 0 || i == 63) begin
      expv[i] = {16{$urandom}}; mset[i] = 1;
      we = 1; wm = 1; wl = 6'(i); wd = expv[i]; @(negedge clk);
    end
    we = 0; wm = 0;
    nm = 0; foreach (mset[i]) nm += mset[i];
    chk(merged == 7'(nm), $sformatf("merged count %0d expected %0d", merged, nm));
    for (int i = 0; i < 64; i++) begin
      re = 1; rl = 6'(i); @(negedge clk);
      chk(rd == expv[i], $sformatf("line %0d", i));
    end
    re = 0; clr = 1; @(negedge clk); clr = 0;
    chk(merged == 0, "clear_mask");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
