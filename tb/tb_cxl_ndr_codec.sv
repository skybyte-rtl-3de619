// tb_cxl_ndr_codec -- self-checking test of the NDR message packing.
// Checks the bit positions of Valid/Opcode/Tag in the 40-bit word, the Cmp and
// SkyByte-Delay encodings, priority of delay over completion, and decoding of
// every 3-bit opcode, against values written out independently here.
module tb_cxl_ndr_codec;
  import skybyte_pkg::*;
  logic cmp_req, delay_req; tag_t tx_tag; logic [39:0] tx_msg, rx_msg;
  logic rx_valid, rx_is_cmp, rx_is_delay, rx_is_coh, rx_is_rsv; tag_t rx_tag;
  int checks = 0, failures = 0;

  cxl_ndr_codec dut (.cmp_req, .delay_req, .tx_tag, .tx_msg, .rx_msg, .rx_valid, .rx_tag,
    .rx_is_cmp, .rx_is_delay, .rx_is_coherence(rx_is_coh), .rx_is_reserved(rx_is_rsv));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int i = 0; i < 20; i++) begin
      tx_tag = 16'($urandom);
      cmp_req = 1; delay_req = 0; rx_msg = '0; #1;
      chk(tx_msg == {1'b1, 3'b000, 4'b0, tx_tag, 16'b0}, "Cmp packing");
      cmp_req = 0; delay_req = 1; #1;
      chk(tx_msg == {1'b1, 3'b111, 4'b0, tx_tag, 16'b0}, "Delay packing");
      cmp_req = 1; delay_req = 1; #1;
      chk(tx_msg[38:36] == 3'b111, "delay has priority");
      cmp_req = 0; delay_req = 0; #1;
      chk(tx_msg[39] == 1'b0, "no request -> invalid");
    end
    for (int op = 0; op < 8; op++) begin
      rx_msg = {1'b1, 3'(op), 4'hf, 16'h1234 + 16'(op), 16'hbeef}; #1;
      chk(rx_valid && rx_tag == 16'h1234 + 16'(op), "tag field");
      chk(rx_is_cmp == (op == 0), "cmp decode");
      chk(rx_is_delay == (op == 7), "delay decode");
      chk(rx_is_coh == (op == 1 || op == 2 || op == 4), "coherence decode");
      chk(rx_is_rsv == (op == 3 || op == 5 || op == 6), "reserved decode");
      rx_msg[39] = 0; #1;
      chk(!rx_is_delay && !rx_is_cmp, "invalid message ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
