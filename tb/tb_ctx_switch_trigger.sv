// tb_ctx_switch_trigger -- self-checking test of the threshold trigger policy.
// Drives random queue counters with the paper's default latencies (3 us read,
// 100 us program, 1000 us erase, 2 us threshold at 1 cycle = 1 ns) and
// compares est_lat and the decision, one cycle after eval, with the formula
// computed here; also checks the GC-blocked override and the boundary
// est_lat == threshold (no trigger).
module tb_ctx_switch_trigger;
  logic clk = 0, rst_n = 0, eval = 0, gc = 0;
  logic [7:0] nr, nw, ne;
  logic [31:0] rl = 3000, wl = 100000, el = 1000000, th = 2000;
  logic ov, trig; logic [41:0] est;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ctx_switch_trigger dut (.clk, .rst_n, .eval, .num_read(nr), .num_write(nw), .num_erase(ne),
    .gc_blocked(gc), .read_lat(rl), .write_lat(wl), .erase_lat(el), .threshold(th),
    .out_valid(ov), .trigger(trig), .est_lat(est));

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  task automatic one(input int r, input int w, input int e, input bit g);
    longint exp_est;
    nr = 8'(r); nw = 8'(w); ne = 8'(e); gc = g; eval = 1;
    @(posedge clk); #1 eval = 0;
    exp_est = longint'(rl) * (r + 1) + longint'(wl) * w + longint'(el) * e;
    checks++;
    if (!ov || est != 42'(exp_est) || trig != (g || exp_est > longint'(th))) begin
      failures++; $display("FAIL r=%0d w=%0d e=%0d g=%0d est=%0d exp=%0d trig=%0d", r, w, e, g, est, exp_est, trig);
    end
  endtask

  initial begin
    nr = 0; nw = 0; ne = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    one(0, 0, 0, 0);                 // 3000 > 2000: a lone read already triggers
    th = 3000; one(0, 0, 0, 0);      // equal: no trigger
    th = 6000; one(1, 0, 0, 0);      // 6000 == 6000: no trigger
    one(0, 0, 0, 1);                 // GC forces the trigger
    th = 2000;
    for (int i = 0; i < 200; i++) begin
      th = $urandom_range(500000, 0);
      one($urandom_range(255, 0), $urandom_range(3, 0), $urandom_range(1, 0), ($urandom_range(9, 0) == 0));
    end
    @(posedge clk); #1;
    checks++; if (ov) begin failures++; $display("FAIL out_valid without eval"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
