// cfi_stage: the control-flow-integrity extension of the CVA6 commit stage.
//
// Each cycle the two commit ports offer their scoreboard entries. Two CFI
// filters pick out calls, returns and indirect jumps and build their commit
// logs. The queue controller inhibits a commit port (wait_o) when its
// control-flow instruction cannot be queued: the queue is full, or both
// ports carry one in the same cycle (port 1 then waits). The commit stage
// answers with its acknowledges (commit_ack_i); the V block keeps the hits
// that really retire, and the selected log is pushed into the CFI queue in
// that same cycle. The log writer drains the queue one log at a time into
// the CFI mailbox over AXI, waits for the root of trust's completion and
// raises fault_o when the verdict reports a violation.
//
// Interface: commit_entry_i/commit_ack_i/wait_o towards the CVA6 commit
// stage (commit_ack_i must not be asserted on a port whose wait_o is high,
// and port 1 may only retire together with port 0, as in CVA6);
// completion_i from the mailbox; an AXI master port; fault_o to the core's
// exception logic.
//
// The structure (filters per commit port, log select, queue, queue
// controller, log writer, completion wired to the stage) follows the
// paper's description and block diagram; QUEUE_DEPTH defaults to 8, the
// size used in the paper's benchmark evaluation.
module cfi_stage
  import cfi_pkg::*;
#(
  parameter int unsigned           QUEUE_DEPTH = 8,
  parameter logic [AXI_ADDR_W-1:0] MBOX_BASE   = 64'h0000_0000_1040_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // commit stage
  input  sb_entry_t   commit_entry_i [2],
  input  logic [1:0]  commit_ack_i,
  output logic [1:0]  wait_o,
  // mailbox completion
  input  logic        completion_i,
  // AXI master
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i,
  // violation
  output logic        fault_o,
  output commit_log_t fault_log_o,
  // observation
  output logic        queue_full_o,
  output logic        queue_empty_o,
  output logic        writer_busy_o
);

  commit_log_t log0, log1, log_in, log_out;
  logic [1:0]  hit, retire;
  logic        any_retire, push, select, pop, empty, full;
  cf_kind_e    kind0, kind1;
  logic [$clog2(QUEUE_DEPTH+1)-1:0] count;

  cfi_filter u_filter0 (.entry_i(commit_entry_i[0]), .log_valid_o(hit[0]), .kind_o(kind0), .log_o(log0));
  cfi_filter u_filter1 (.entry_i(commit_entry_i[1]), .log_valid_o(hit[1]), .kind_o(kind1), .log_o(log1));

  cfi_commit_valid #(.NR_COMMIT_PORTS(2)) u_valid (
    .hit_i(hit), .ack_i(commit_ack_i), .retire_o(retire), .any_o(any_retire)
  );

  cfi_queue_ctrl u_ctrl (
    .hit_i(hit), .retire_i(retire), .full_i(full),
    .wait_o(wait_o), .push_o(push), .select_o(select)
  );

  cfi_log_mux u_mux (.log0_i(log0), .log1_i(log1), .select_i(select), .log_o(log_in));

  cfi_queue #(.DEPTH(QUEUE_DEPTH)) u_queue (
    .clk_i, .rst_ni,
    .push_i(push), .log_i(log_in), .pop_i(pop),
    .log_o(log_out), .empty_o(empty), .full_o(full), .count_o(count)
  );

  cfi_log_writer #(.MBOX_BASE(MBOX_BASE)) u_writer (
    .clk_i, .rst_ni,
    .empty_i(empty), .log_i(log_out), .pop_o(pop),
    .completion_i,
    .axi_req_o, .axi_rsp_i,
    .fault_o, .fault_log_o, .busy_o(writer_busy_o)
  );

  assign queue_full_o  = full;
  assign queue_empty_o = empty;

  // Commit-stage contract: a waiting port does not retire; port 1 retires
  // only together with port 0.
  a_wait_respected: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (commit_ack_i & wait_o) == 2'b00);
  a_in_order: assert property (@(posedge clk_i) disable iff (!rst_ni)
    commit_ack_i[1] |-> commit_ack_i[0]);
  a_push_once: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(retire[0] && retire[1]));
  // Internal consistency: a push happens exactly when a CF instruction
  // retires, and a filter hit always comes with a classified CF kind.
  a_push_on_retire: assert property (@(posedge clk_i) disable iff (!rst_ni)
    push == any_retire);
  a_count_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
    count <= ($clog2(QUEUE_DEPTH+1))'(QUEUE_DEPTH));
  a_hit_kind: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (!hit[0] || kind0 != CF_NONE) && (!hit[1] || kind1 != CF_NONE));

endmodule
