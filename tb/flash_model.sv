// flash_model -- behavioural model of the NAND flash array (not synthesizable as
// written: sparse associative storage).
//
// Addressed by {physical page, line}.  Read data appears on the cycle after
// re.  A line never programmed reads as init_pattern(address), so every page
// has known, distinct contents.  Operation timing is modelled by the
// controller's channel queues, not here.  programs counts written lines.
module flash_model
  import skybyte_pkg::*;
#(
  parameter int unsigned AW = PPA_W + PGOFF_W
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output line_t         rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  line_t         wdata,
  output int unsigned   programs
);
  line_t mem [longint unsigned];

  function automatic line_t init_pattern(input logic [AW-1:0] a);
    line_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = {a[AW-1:0] ^ 31'(i * 32'h9e3779b1), 1'b1} ;
    return d;
  endfunction

  initial begin rdata = '0; programs = 0; end
  always @(posedge clk) begin
    if (re) rdata <= mem.exists(longint'(raddr)) ? mem[longint'(raddr)] : init_pattern(raddr);
    if (we) begin mem[longint'(waddr)] = wdata; programs++; end
  end
endmodule
