// tb_data_cache -- self-checking test of the data-cache tag store.
// 16 frames, 4 ways (4 sets).  A reference model kept here (per-set list in
// LRU order) predicts hits, the frame of each page, which page an ALLOC
// evicts, and when the access counter of a page passes HOT_THRESH=3.  Random
// LOOKUP/ALLOC/REMOVE traffic over 12 pages is compared step by step.
module tb_data_cache;
  import skybyte_pkg::*;
  localparam int F = 16, W = 4, S = F / W, HT = 3;
  logic clk = 0, rst_n = 0, rv = 0, cnt = 0;
  logic [1:0] rop; lpa_t rl;
  logic ready, rsp, hit, ev, hot; logic [3:0] frame; lpa_t evl, hotl;
  int checks = 0, failures = 0, hots = 0, evs = 0;
  always #5 clk = ~clk;

  data_cache #(.FRAMES(F), .WAYS(W), .HOT_THRESH(HT)) dut (.clk, .rst_n, .req_valid(rv), .ready,
    .req_op(rop), .req_lpa(rl), .req_count(cnt), .rsp_valid(rsp), .hit, .frame, .evicted(ev),
    .ev_lpa(evl), .hot, .hot_lpa(hotl));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: per set, per way: valid, lpa, age, count
  bit   mv [S][W]; lpa_t ml [S][W]; int ma [S][W]; int mc [S][W];

  task automatic touch(input int s, input int w);
    for (int i = 0; i < W; i++) if (ma[s][i] < ma[s][w]) ma[s][i]++;
    ma[s][w] = 0;
  endtask

  task automatic req(input logic [1:0] o, input lpa_t l, input logic c);
    int s, w, hw, vw; bit h, eh, exhot; lpa_t el;
    s = int'(l % S);
    h = 0; hw = 0;
    for (int i = W-1; i >= 0; i--) if (mv[s][i] && ml[s][i] == l) begin h = 1; hw = i; end
    eh = 0; exhot = 0; w = hw;
    if (o == 0 && h) begin
      if (c && mc[s][hw] < 255) begin exhot = (mc[s][hw] == HT); mc[s][hw]++; end
      touch(s, hw);
    end else if (o == 1) begin
      if (!h) begin
        vw = -1;
        for (int i = W-1; i >= 0; i--) if (!mv[s][i]) vw = i;
        if (vw < 0) for (int i = 0; i < W; i++) if (ma[s][i] == W-1) vw = i;
        w = vw; eh = mv[s][w]; el = ml[s][w];
        mv[s][w] = 1; ml[s][w] = l; mc[s][w] = 0;
      end
      touch(s, w);
    end else if (o == 2 && h) mv[s][hw] = 0;
    rop = o; rl = l; cnt = c; rv = 1;
    @(negedge clk); rv = 0;
    chk(rsp && hit == h, $sformatf("op %0d page %0h hit %0d expected %0d", o, l, hit, h));
    if (o == 1 || (o == 0 && h)) chk(frame == 4'(s * W + w), "frame number");
    if (o == 1) begin chk(ev == eh, "evicted flag"); if (eh) begin chk(evl == el, "evicted page"); evs++; end end
    chk(hot == exhot, "hot pulse");
    if (exhot) begin chk(hotl == l, "hot page"); hots++; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    lpa_t pg [12];
    rop = 0; rl = 0;
    for (int s = 0; s < S; s++) for (int w = 0; w < W; w++) begin mv[s][w] = 0; ma[s][w] = w; mc[s][w] = 0; end
    foreach (pg[i]) pg[i] = lpa_t'(i * 8 + (i % 2));   // six pages each in sets 0 and 1
    repeat (2) @(negedge clk); rst_n = 1;
    while (!ready) @(negedge clk);
    for (int i = 0; i < 600; i++) begin
      int k; k = $urandom_range(11, 0);
      case ($urandom_range(9, 0))
        0, 1, 2: req(2'd1, pg[k], 0);
        9:       req(2'd2, pg[k], 0);
        default: req(2'd0, pg[k], 1);
      endcase
    end
    chk(hots > 0 && evs > 0, $sformatf("hot pulses %0d and evictions %0d exercised", hots, evs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
