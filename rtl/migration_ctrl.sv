// migration_ctrl -- SSD side of adaptive page migration.
//
// Hot-page candidates arrive from the data cache (cand_valid with the LPA of a
// page whose access count passed the threshold).  When idle, the block takes
// one candidate, sends it to the host as an MSI-X interrupt carrying the SSD
// page address (msix_valid/msix_ready handshake), and waits.  When the host
// has copied the page and remapped it, it acknowledges (host_ack, with the
// same page); the block then raises drop_req until the controller has removed
// the page from the data cache and set its write-log index entries to NULL
// (drop_done).  Candidates that arrive while a migration is in flight are
// dropped; the page will be offered again when it keeps being accessed.  The
// pages_migrated counter counts completed migrations.  Raising an interrupt
// per candidate and dropping the page after the acknowledgement follow the
// paper; migrating one page at a time and dropping candidates while busy are
// this design's choices.  A pinned page (persistence support) is never offered:
// pin_lpa_valid/pin_lpa name one pinned page.
module migration_ctrl
  import skybyte_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        cand_valid,
  input  lpa_t        cand_lpa,
  input  logic        pin_lpa_valid,
  input  lpa_t        pin_lpa,
  output logic        msix_valid,
  input  logic        msix_ready,
  output lpa_t        msix_lpa,
  input  logic        host_ack,
  input  lpa_t        host_ack_lpa,
  output logic        drop_req,
  output lpa_t        drop_lpa,
  input  logic        drop_done,
  output logic        busy,
  output logic [31:0] pages_migrated
);
  typedef enum logic [1:0] {M_IDLE, M_IRQ, M_WAIT, M_DROP} mstate_e;
  mstate_e st;
  lpa_t    page;

  assign msix_valid = (st == M_IRQ);
  assign msix_lpa   = page;
  assign drop_req   = (st == M_DROP);
  assign drop_lpa   = page;
  assign busy       = (st != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; page <= '0; pages_migrated <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (enable && cand_valid && !(pin_lpa_valid && pin_lpa == cand_lpa)) begin
          page <= cand_lpa; st <= M_IRQ;
        end
        M_IRQ:  if (msix_ready) st <= M_WAIT;
        M_WAIT: if (host_ack && host_ack_lpa == page) st <= M_DROP;
        M_DROP: if (drop_done) begin st <= M_IDLE; pages_migrated <= pages_migrated + 1'b1; end
        default: st <= M_IDLE;
      endcase
    end
  end

  a_msix_hold: assert property (@(posedge clk) disable iff (!rst_n)
    msix_valid && !msix_ready |=> msix_valid && $stable(msix_lpa))
    else $error("migration_ctrl: MSI-X request dropped before it was taken");
endmodule
