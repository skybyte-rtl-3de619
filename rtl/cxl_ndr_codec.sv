// cxl_ndr_codec -- packs and unpacks the 40-bit CXL.mem No Data Response
// (NDR) message.
//
// Encoder side: a completion request (cmp_req) or a long-delay request
// (delay_req) with a 16-bit tag gives a packed message with Valid=1 and opcode
// Cmp (000b) or SkyByte-Delay (111b); delay wins if both are asserted.  The
// reserved fields are driven to zero.  Decoder side: a received 40-bit word is
// split into its fields and the opcode is classified (completion, delay hint,
// CXL.cache coherence opcode, or reserved).  The message layout and the two
// encodings are those of the paper; zeroing the reserved bits is this design's
// choice.  Purely combinational.
module cxl_ndr_codec
  import skybyte_pkg::*;
(
  input  logic        cmp_req,
  input  logic        delay_req,
  input  tag_t        tx_tag,
  output logic [39:0] tx_msg,
  input  logic [39:0] rx_msg,
  output logic        rx_valid,
  output tag_t        rx_tag,
  output logic        rx_is_cmp,
  output logic        rx_is_delay,
  output logic        rx_is_coherence,
  output logic        rx_is_reserved
);
  ndr_msg_t tx, rx;

  always_comb begin
    tx        = '0;
    tx.valid  = cmp_req | delay_req;
    tx.opcode = delay_req ? NDR_SKYBYTE_DELAY : NDR_CMP;
    tx.tag    = tx_tag;
    tx_msg    = tx;
  end

  always_comb begin
    rx              = rx_msg;
    rx_valid        = rx.valid;
    rx_tag          = rx.tag;
    rx_is_cmp       = rx.valid && rx.opcode == NDR_CMP;
    rx_is_delay     = rx.valid && rx.opcode == NDR_SKYBYTE_DELAY;
    rx_is_coherence = rx.valid && (rx.opcode == NDR_CMP_S || rx.opcode == NDR_CMP_E ||
                                   rx.opcode == NDR_BI_CONFLICTACK);
    rx_is_reserved  = rx.valid && !(rx_is_cmp || rx_is_delay || rx_is_coherence);
  end
endmodule
