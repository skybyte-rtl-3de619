// ssd_dram_model -- behavioural model of the SSD-internal DRAM (not synthesizable
// as written: sparse associative storage).
//
// Line-wide memory with one read port and one write port.  Read data appears
// on the cycle after re (registered read); a write lands at the clock edge.
// Lines never written read as zero.  Models capacity only, not LPDDR4 timing.
module ssd_dram_model
  import skybyte_pkg::*;
#(
  parameter int unsigned DW = 23
) (
  input  logic          clk,
  input  logic          re,
  input  logic [DW-1:0] raddr,
  output line_t         rdata,
  input  logic          we,
  input  logic [DW-1:0] waddr,
  input  line_t         wdata
);
  line_t mem [longint unsigned];
  initial rdata = '0;
  always @(posedge clk) begin
    if (re) rdata <= mem.exists(longint'(raddr)) ? mem[longint'(raddr)] : '0;
    if (we) mem[longint'(waddr)] = wdata;
  end
endmodule
