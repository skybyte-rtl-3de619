// ctx_switch_trigger -- threshold-based context-switch trigger policy.
//
// For a read that misses in SSD DRAM the controller samples the read, write
// and erase counters of the flash channel queue the page maps to.  The
// estimated delay is
//     est_lat = read_lat*(num_read+1) + write_lat*num_write + erase_lat*num_erase
// (the +1 is the missed read itself) and a context switch is requested when
// est_lat > threshold, or at once when the channel is blocked by garbage
// collection.  This follows the paper's algorithm; the host-configurable
// threshold and the three latencies are inputs so that the OS can program
// them.  One register stage: the decision and est_lat appear one cycle after
// eval, with out_valid.
module ctx_switch_trigger #(
  parameter int unsigned CNT_W = 8,    // width of one queue counter
  parameter int unsigned LAT_W = 32    // width of latencies and threshold (cycles)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             eval,
  input  logic [CNT_W-1:0] num_read,
  input  logic [CNT_W-1:0] num_write,
  input  logic [CNT_W-1:0] num_erase,
  input  logic             gc_blocked,
  input  logic [LAT_W-1:0] read_lat,
  input  logic [LAT_W-1:0] write_lat,
  input  logic [LAT_W-1:0] erase_lat,
  input  logic [LAT_W-1:0] threshold,
  output logic             out_valid,
  output logic             trigger,
  output logic [LAT_W+CNT_W+1:0] est_lat
);
  localparam int unsigned EW = LAT_W + CNT_W + 2;
  logic [EW-1:0] est_c;

  always_comb begin
    est_c = EW'(read_lat) * EW'({1'b0, num_read} + 1'b1)
          + EW'(write_lat) * EW'(num_write)
          + EW'(erase_lat) * EW'(num_erase);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      trigger   <= 1'b0;
      est_lat   <= '0;
    end else begin
      out_valid <= eval;
      if (eval) begin
        est_lat <= est_c;
        trigger <= gc_blocked || (est_c > EW'(threshold));
      end
    end
  end
endmodule
