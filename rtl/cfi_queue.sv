// cfi_queue: first-in first-out buffer of commit logs between the commit
// stage and the log writer. It accepts at most one log per cycle (push) and
// hands out the oldest log on log_o while empty_o is low; pop removes it.
// A push and a pop may happen in the same cycle. Pushing into a full queue
// or popping an empty one is a protocol error (checked by assertions); the
// queue controller prevents the first, the log writer the second.
//
// Storage is a DEPTH-entry register array with read and write pointers and
// an occupancy counter. DEPTH defaults to 8, the queue size used for the
// paper's full benchmark evaluation; the paper's comparison runs use depth 1,
// which this module also supports. Reset empties the queue.
module cfi_queue
  import cfi_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        push_i,
  input  commit_log_t log_i,
  input  logic        pop_i,
  output commit_log_t log_o,
  output logic        empty_o,
  output logic        full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  commit_log_t             mem_q [DEPTH];
  logic [PTR_W-1:0]        wr_ptr_q, rd_ptr_q;
  logic [$clog2(DEPTH+1)-1:0] count_q;

  logic do_push, do_pop;
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  assign empty_o = (count_q == '0);
  assign full_o  = (count_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count_o = count_q;
  assign log_o   = mem_q[rd_ptr_q];

  function automatic logic [PTR_W-1:0] incr(input logic [PTR_W-1:0] p);
    if (DEPTH == 1) return '0;
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + PTR_W'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      count_q  <= '0;
    end else begin
      if (do_push) wr_ptr_q <= incr(wr_ptr_q);
      if (do_pop)  rd_ptr_q <= incr(rd_ptr_q);
      if (do_push && !do_pop)      count_q <= count_q + 1'b1;
      else if (do_pop && !do_push) count_q <= count_q - 1'b1;
    end
  end

  // Storage needs no reset: an entry is only read after it was written.
  always_ff @(posedge clk_i) begin
    if (do_push) mem_q[wr_ptr_q] <= log_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> !full_o);
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i  |-> !empty_o);

endmodule
