// tb_write_log -- self-checking test of the double-buffered log pointers.
// With 8-entry buffers: appends produce consecutive slot addresses of buffer 0,
// the ninth cycle switches to buffer 1 with compact_start for buffer 0,
// appends continue in buffer 1, a full buffer 1 with buffer 0 still busy
// drops append_ready (stall), and release lets the log switch back, with the
// circular tail continuing where it wrapped.
module tb_write_log;
  logic clk = 0, rst_n = 0, append = 0, rel = 0;
  logic ready, act, oldv, cs, cb; logic [4:0] addr; logic [3:0] fill [2];
  int checks = 0, failures = 0, starts = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (cs) starts++;

  write_log #(.LOG_ENTRIES(8), .DADDR_W(5)) dut (.clk, .rst_n, .append, .append_ready(ready),
    .append_addr(addr), .active_buf(act), .old_valid(oldv), .compact_start(cs), .compact_buf(cb),
    .release_old(rel), .fill);

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic app(input int exp_addr);
    chk(ready, "ready before append");
    chk(addr == 5'(exp_addr), $sformatf("append address %0d expected %0d", addr, exp_addr));
    append = 1; @(posedge clk); #1 append = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 8; i++) app(i);
    chk(!ready && fill[0] == 8, "buffer 0 full");
    repeat (2) @(posedge clk); #1;
    chk(act == 1 && oldv && starts == 1 && cb == 0, "switched to buffer 1, compaction of 0");
    for (int i = 0; i < 8; i++) app(8 + i);
    @(posedge clk); #1;
    chk(!ready && act == 1, "both full: writes stall");
    rel = 1; @(posedge clk); #1 rel = 0;
    repeat (2) @(posedge clk); #1;
    chk(act == 0 && starts == 2 && cb == 1 && ready && fill[0] == 0, "released buffer 0 reused");
    app(0);   // circular: tail wrapped to slot 0 of buffer 0
    chk(fill[0] == 1, "fill counts appends");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
