// flash_channel_queue -- request queue and service timer of one flash channel.
//
// Operations (read, program, erase) are pushed with a small id and served
// strictly in FIFO order, as the paper assumes for a channel queue.  The head
// operation occupies the channel for read_lat, write_lat or erase_lat cycles;
// when its time has elapsed done pulses for one cycle with the op and id, and
// the entry leaves the queue.  While gc_block is high the channel does not
// start a new operation (an operation already started finishes).  The
// counters num_read/num_write/num_erase count the queued operations of each
// type, including the one in service; these are what the context-switch
// trigger policy reads.  The queue depth, the id field and the timer are this
// design's choices: the paper gives only the FIFO order, the counters and the
// latencies.  push is accepted when ready (queue not full).
module flash_channel_queue
  import skybyte_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned ID_W  = 4,
  parameter int unsigned CNT_W = 8,
  parameter int unsigned LAT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  flash_op_e        push_op,
  input  logic [ID_W-1:0]  push_id,
  output logic             ready,
  input  logic             gc_block,
  input  logic [LAT_W-1:0] read_lat,
  input  logic [LAT_W-1:0] write_lat,
  input  logic [LAT_W-1:0] erase_lat,
  output logic             done,
  output flash_op_e        done_op,
  output logic [ID_W-1:0]  done_id,
  output logic [CNT_W-1:0] num_read,
  output logic [CNT_W-1:0] num_write,
  output logic [CNT_W-1:0] num_erase,
  output logic             busy
);
  localparam int unsigned PW = $clog2(DEPTH);

  typedef struct packed {
    flash_op_e       op;
    logic [ID_W-1:0] id;
  } qent_t;

  qent_t           q [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            in_service;
  logic [LAT_W-1:0] timer;
  logic            finish, do_push;
  qent_t           head;

  assign head    = q[rd_ptr];
  assign ready   = (count != (PW+1)'(DEPTH));
  assign do_push = push && ready;
  assign finish  = in_service && (timer <= 1);
  assign busy    = in_service;

  function automatic logic [LAT_W-1:0] lat_of(input flash_op_e op);
    unique case (op)
      FOP_READ:  return read_lat;
      FOP_WRITE: return write_lat;
      default:   return erase_lat;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) q[wr_ptr] <= '{op: push_op, id: push_id};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      in_service <= 1'b0; timer <= '0;
      done <= 1'b0; done_op <= FOP_READ; done_id <= '0;
      num_read <= '0; num_write <= '0; num_erase <= '0;
    end else begin
      done <= 1'b0;
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(finish);
      // per-type counters
      num_read  <= num_read  + CNT_W'(do_push && push_op == FOP_READ)
                             - CNT_W'(finish && head.op == FOP_READ);
      num_write <= num_write + CNT_W'(do_push && push_op == FOP_WRITE)
                             - CNT_W'(finish && head.op == FOP_WRITE);
      num_erase <= num_erase + CNT_W'(do_push && push_op == FOP_ERASE)
                             - CNT_W'(finish && head.op == FOP_ERASE);
      if (finish) begin
        done       <= 1'b1;
        done_op    <= head.op;
        done_id    <= head.id;
        rd_ptr     <= rd_ptr + 1'b1;
        in_service <= 1'b0;
      end else if (in_service) begin
        timer <= timer - 1'b1;
      end else if (count != 0 && !gc_block) begin
        in_service <= 1'b1;
        timer      <= lat_of(head.op);
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> ready)
    else $error("flash_channel_queue: push while full");
endmodule
