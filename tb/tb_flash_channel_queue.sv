// tb_flash_channel_queue -- self-checking test of one flash channel queue.
// Pushes a burst of read/program/erase operations and checks: FIFO order of
// completions (by id), the exact completion cycle of each (sum of the
// latencies ahead of it, plus one idle cycle per start), the per-type counters
// against a count kept here, that gc_block holds back the next start, and
// that ready drops when the queue is full.
module tb_flash_channel_queue;
  import skybyte_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, gcb = 0;
  flash_op_e op; logic [3:0] id;
  logic ready, done, busy; flash_op_e dop; logic [3:0] did;
  logic [7:0] nr, nw, ne;
  localparam int RL = 7, WL = 20, EL = 45;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  flash_channel_queue #(.DEPTH(8)) dut (.clk, .rst_n, .push, .push_op(op), .push_id(id), .ready,
    .gc_block(gcb), .read_lat(32'(RL)), .write_lat(32'(WL)), .erase_lat(32'(EL)),
    .done, .done_op(dop), .done_id(did), .num_read(nr), .num_write(nw), .num_erase(ne), .busy);

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  flash_op_e ops [8];
  int lat_of [3] = '{RL, WL, EL};
  int er, ew, ee;
  initial begin
    longint t0, texp;
    op = FOP_READ; id = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // fill all 8 slots
    for (int i = 0; i < 8; i++) begin
      ops[i] = flash_op_e'($urandom_range(2, 0));
      op = ops[i]; id = 4'(i); push = 1;
      @(posedge clk); #1;
    end
    push = 0;
    chk(!ready, "queue full -> ready low");
    er = 0; ew = 0; ee = 0;
    foreach (ops[i]) begin er += (ops[i] == FOP_READ); ew += (ops[i] == FOP_WRITE); ee += (ops[i] == FOP_ERASE); end
    chk(nr == 8'(er) && nw == 8'(ew) && ne == 8'(ee), "counters after fill");
    // first op started one cycle after the first push; each later op starts the
    // cycle after the previous one finished
    t0 = cyc - 7;   // the first push was captured 7 edges ago
    texp = 0;
    for (int i = 0; i < 8; i++) begin
      texp += lat_of[ops[i]] + 1;
      while (!done) @(negedge clk);
      chk(did == 4'(i) && dop == ops[i], "FIFO order");
      if (ops[i] == FOP_READ) er--; else if (ops[i] == FOP_WRITE) ew--; else ee--;
      chk(nr == 8'(er) && nw == 8'(ew) && ne == 8'(ee), "counters track completions");
      chk(cyc - t0 == texp, $sformatf("completion cycle %0d expected %0d", cyc - t0, texp));
      @(negedge clk);
    end
    // exact latency of a single read, then GC blocking
    op = FOP_READ; id = 4'd9; push = 1; @(posedge clk); #1 push = 0; t0 = cyc;
    while (!done) @(negedge clk);
    chk(cyc - t0 == RL + 1, $sformatf("read completes RL+1 cycles after push (%0d)", cyc - t0));
    #1 gcb = 1;
    op = FOP_WRITE; id = 4'd10; push = 1; @(posedge clk); #1 push = 0;
    repeat (100) @(posedge clk);
    chk(!busy && nw == 1, "gc_block holds the queue");
    #1 gcb = 0; t0 = cyc;
    while (!done) @(negedge clk);
    chk(did == 4'd10 && cyc - t0 == WL + 1, "released after GC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
