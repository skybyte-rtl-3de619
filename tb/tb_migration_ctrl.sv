// tb_migration_ctrl -- self-checking test of the SSD-side migration handshake.
// A hot candidate must raise an MSI-X request carrying its page and hold it
// until taken; candidates during a migration are ignored; an acknowledgement
// for another page is ignored; the right acknowledgement raises drop_req,
// drop_done completes it and counts one migration; a pinned page is never
// offered; with enable low nothing happens.
module tb_migration_ctrl;
  import skybyte_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, cv = 0, pv = 0, mr = 0, ack = 0, dd = 0;
  lpa_t cl, pl, ml, al, dl; logic mv, dr, busy; logic [31:0] n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  migration_ctrl dut (.clk, .rst_n, .enable(en), .cand_valid(cv), .cand_lpa(cl), .pin_lpa_valid(pv),
    .pin_lpa(pl), .msix_valid(mv), .msix_ready(mr), .msix_lpa(ml), .host_ack(ack), .host_ack_lpa(al),
    .drop_req(dr), .drop_lpa(dl), .drop_done(dd), .busy, .pages_migrated(n));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic cand(input lpa_t l); cl = l; cv = 1; @(negedge clk); cv = 0; endtask

  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    cl = 0; pl = 52'h77; al = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    cand(52'h1234);
    chk(mv && ml == 52'h1234, "MSI-X raised with the page");
    repeat (3) @(negedge clk);
    chk(mv && ml == 52'h1234, "MSI-X held until taken");
    cand(52'h9999);
    chk(ml == 52'h1234, "second candidate ignored while busy");
    mr = 1; @(negedge clk); mr = 0;
    chk(!mv && busy && !dr, "waiting for host");
    al = 52'h9999; ack = 1; @(negedge clk); ack = 0;
    chk(!dr, "ack for another page ignored");
    al = 52'h1234; ack = 1; @(negedge clk); ack = 0;
    chk(dr && dl == 52'h1234, "drop requested after ack");
    repeat (2) @(negedge clk);
    chk(dr, "drop held");
    dd = 1; @(negedge clk); dd = 0;
    chk(!busy && n == 1, "migration counted");
    pv = 1; cand(52'h77);
    chk(!mv && !busy, "pinned page not migrated");
    pv = 0; en = 0; cand(52'h55);
    chk(!mv, "disabled");
    en = 1; cand(52'h55);
    chk(mv && ml == 52'h55, "enabled again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
