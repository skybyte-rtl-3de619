// host_cxl_tracker -- host CXL controller bookkeeping for the long-delay hint.
//
// Every request (MemRd or MemWr) sent to the CXL-SSD is recorded with its 16-bit tag and the core
// that issued it, in one of ENTRIES slots (issue_ready drops when all are in
// use).  The block watches the S2M responses: a MemData response (DRS) or a
// Cmp NDR retires the slot and reports completion to the core; an NDR with the
// SkyByte-Delay opcode (111b) also retires the slot and raises a Long Delay
// Exception (exc_valid with exc_core and exc_tag).  The CPU then squashes and
// later replays the load, which issues a new MemRd.  The NDR opcodes come from
// the 40-bit message format and are decoded by cxl_ndr_codec.  The paper has
// the CPU find the waiting instructions through the LLC MSHRs; here a tag
// table stands for that lookup, and the slot count and the core-id width are
// this design's choices.  Responses for unknown tags are counted in
// unknown_rsp.  All outputs are registered (one cycle after the response).
module host_cxl_tracker
  import skybyte_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned CORE_W  = 3     // 8 cores
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue,
  input  tag_t              issue_tag,
  input  logic [CORE_W-1:0] issue_core,
  output logic              issue_ready,
  input  logic              rsp_valid,
  input  logic              rsp_is_drs,
  input  tag_t              rsp_drs_tag,
  input  logic [39:0]       rsp_ndr,
  output logic              cmp_valid,
  output logic [CORE_W-1:0] cmp_core,
  output tag_t              cmp_tag,
  output logic              exc_valid,
  output logic [CORE_W-1:0] exc_core,
  output tag_t              exc_tag,
  output logic [31:0]       unknown_rsp,
  output logic [$clog2(ENTRIES):0] outstanding
);
  localparam int unsigned EW = $clog2(ENTRIES);

  logic              v    [ENTRIES];
  tag_t              tagm [ENTRIES];
  logic [CORE_W-1:0] core [ENTRIES];

  logic nd_valid, nd_cmp, nd_delay, nd_coh, nd_rsv;
  tag_t nd_tag;

  cxl_ndr_codec u_dec (
    .cmp_req(1'b0), .delay_req(1'b0), .tx_tag('0), .tx_msg(),
    .rx_msg(rsp_ndr), .rx_valid(nd_valid), .rx_tag(nd_tag),
    .rx_is_cmp(nd_cmp), .rx_is_delay(nd_delay), .rx_is_coherence(nd_coh), .rx_is_reserved(nd_rsv)
  );

  tag_t          r_tag;
  logic          r_act, m_found, f_found;
  logic [EW-1:0] m_slot, f_slot;

  always_comb begin
    r_tag = rsp_is_drs ? rsp_drs_tag : nd_tag;
    r_act = rsp_valid && (rsp_is_drs || nd_cmp || nd_delay);
    m_found = 1'b0; m_slot = '0; f_found = 1'b0; f_slot = '0;
    outstanding = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (v[i] && tagm[i] == r_tag) begin m_found = 1'b1; m_slot = EW'(i); end
      if (!v[i]) begin f_found = 1'b1; f_slot = EW'(i); end
      outstanding += (EW+1)'(v[i]);
    end
    issue_ready = f_found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) v[i] <= 1'b0;
      cmp_valid <= 1'b0; exc_valid <= 1'b0; cmp_core <= '0; exc_core <= '0;
      cmp_tag <= '0; exc_tag <= '0; unknown_rsp <= '0;
    end else begin
      cmp_valid <= 1'b0;
      exc_valid <= 1'b0;
      if (r_act) begin
        if (m_found) begin
          v[m_slot] <= 1'b0;
          if (!rsp_is_drs && nd_delay) begin
            exc_valid <= 1'b1; exc_core <= core[m_slot]; exc_tag <= r_tag;
          end else begin
            cmp_valid <= 1'b1; cmp_core <= core[m_slot]; cmp_tag <= r_tag;
          end
        end else begin
          unknown_rsp <= unknown_rsp + 1'b1;
        end
      end
      if (issue && f_found) begin
        v[f_slot] <= 1'b1; tagm[f_slot] <= issue_tag; core[f_slot] <= issue_core;
      end
    end
  end
endmodule
