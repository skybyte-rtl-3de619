// write_log -- pointer control of the double-buffered cacheline write log.
//
// The SSD DRAM holds two log buffers of LOG_ENTRIES 64 B slots each.  Every
// host write is appended at the tail of the active buffer; append_addr is the
// SSD DRAM line address of that slot (buffer*LOG_ENTRIES + offset) and is
// valid in the same cycle as append.  Each buffer is circular with a head and
// a tail pointer.  When the active buffer becomes full the log switches to the
// other buffer and pulses compact_start with the number of the full buffer,
// which is then "old" and read-only until the controller signals release at
// the end of its compaction; release moves the old buffer's head to its tail,
// emptying it.  If the active buffer fills while the old one is still being
// compacted, append_ready drops and writes stall.  The double buffering,
// circular structure and switching on full follow the paper; the stall on a
// double-full log and the single-cycle switch are this design's choices.
module write_log #(
  parameter int unsigned LOG_ENTRIES = 524288,  // per buffer: 2 x 32 MB = 64 MB of 64 B lines
  parameter int unsigned DADDR_W     = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               append,
  output logic               append_ready,
  output logic [DADDR_W-1:0] append_addr,
  output logic               active_buf,
  output logic               old_valid,      // the non-active buffer holds data awaiting compaction
  output logic               compact_start,
  output logic               compact_buf,
  input  logic               release_old,
  output logic [$clog2(LOG_ENTRIES):0] fill [2]
);
  localparam int unsigned OW = $clog2(LOG_ENTRIES);

  logic [OW-1:0] head [2];
  logic [OW-1:0] tail [2];
  logic [OW:0]   cnt  [2];
  logic          act, old_busy;
  logic          act_full;

  assign act_full     = (cnt[act] == (OW+1)'(LOG_ENTRIES));
  assign append_ready = !act_full;
  assign append_addr  = DADDR_W'({act, tail[act]});
  assign active_buf   = act;
  assign old_valid    = old_busy;
  assign fill         = cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '{default: '0};
      tail <= '{default: '0};
      cnt  <= '{default: '0};
      act  <= 1'b0;
      old_busy <= 1'b0;
      compact_start <= 1'b0;
      compact_buf   <= 1'b0;
    end else begin
      compact_start <= 1'b0;
      if (append && append_ready) begin
        tail[act] <= tail[act] + 1'b1;   // wraps: circular buffer
        cnt[act]  <= cnt[act] + 1'b1;
      end
      if (release_old && old_busy) begin
        head[!act] <= tail[!act];
        cnt[!act]  <= '0;
        old_busy   <= 1'b0;
      end
      // switch when the active buffer is full and the other one is empty
      if (act_full && !old_busy) begin
        act           <= !act;
        old_busy      <= 1'b1;
        compact_start <= 1'b1;
        compact_buf   <= act;
      end
    end
  end

  a_append_ok: assert property (@(posedge clk) disable iff (!rst_n) append |-> append_ready)
    else $error("write_log: append while both buffers are full");
endmodule
