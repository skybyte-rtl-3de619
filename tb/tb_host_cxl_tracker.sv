// tb_host_cxl_tracker -- self-checking test of the host CXL controller tracker.
// Issues requests from random cores with distinct tags, then answers them out
// of order with MemData, Cmp NDR or SkyByte-Delay NDR (40-bit messages built
// here from the field layout).  Each must produce exactly one completion or
// Long Delay Exception, for the right core and tag, one cycle later; unknown
// tags and coherence opcodes are not taken as completions.
module tb_host_cxl_tracker;
  import skybyte_pkg::*;
  logic clk = 0, rst_n = 0, iss = 0, rv = 0, drs = 0;
  tag_t itag, dtag; logic [2:0] icore; logic [39:0] ndr;
  logic irdy, cv, ev; logic [2:0] cc, ec; tag_t ct, et; logic [31:0] unk; logic [4:0] outst;
  int checks = 0, failures = 0, ncmp = 0, nexc = 0;
  always #5 clk = ~clk;

  host_cxl_tracker #(.ENTRIES(16)) dut (.clk, .rst_n, .issue(iss), .issue_tag(itag), .issue_core(icore),
    .issue_ready(irdy), .rsp_valid(rv), .rsp_is_drs(drs), .rsp_drs_tag(dtag), .rsp_ndr(ndr),
    .cmp_valid(cv), .cmp_core(cc), .cmp_tag(ct), .exc_valid(ev), .exc_core(ec), .exc_tag(et),
    .unknown_rsp(unk), .outstanding(outst));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  tag_t tags [16]; logic [2:0] cores [16];
  initial begin
    itag = 0; icore = 0; dtag = 0; ndr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      tags[i] = tag_t'(16'h100 + i * 7); cores[i] = 3'($urandom);
      iss = 1; itag = tags[i]; icore = cores[i]; @(negedge clk);
    end
    iss = 0;
    chk(!irdy && outst == 16, "all slots used");
    // coherence opcode and unknown tag are ignored
    rv = 1; drs = 0; ndr = {1'b1, 3'b001, 4'b0, tags[0], 16'b0}; @(negedge clk); rv = 0;
    chk(!cv && !ev && outst == 16, "coherence opcode ignored");
    rv = 1; drs = 1; dtag = 16'hffff; @(negedge clk); rv = 0;
    chk(unk == 1 && !cv, "unknown tag counted");
    for (int k = 15; k >= 0; k--) begin
      int kind; kind = k % 3;
      rv = 1;
      if (kind == 0) begin drs = 1; dtag = tags[k]; end
      else begin drs = 0; ndr = {1'b1, (kind == 1) ? 3'b000 : 3'b111, 4'b0, tags[k], 16'b0}; end
      @(negedge clk); rv = 0;
      if (kind == 2) begin
        chk(ev && !cv && ec == cores[k] && et == tags[k], "long delay exception");
        nexc++;
      end else begin
        chk(cv && !ev && cc == cores[k] && ct == tags[k], "completion");
        ncmp++;
      end
    end
    chk(outst == 0 && irdy, "all retired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
