// cfi_log_mux: the log-selection path of the CFI stage (box "L" and the
// multiplexer that drives log_in of the queue). The commit logs of both
// filters arrive here; the queue controller's select signal picks the one
// that is pushed into the queue in this cycle (select = 0: port 0,
// select = 1: port 1).
//
// Combinational. The paper prints only the labels (L, log0, log1, log_in,
// select); that L holds no state is this design's choice, so a log is
// pushed in the cycle its instruction retires.
module cfi_log_mux
  import cfi_pkg::*;
(
  input  commit_log_t log0_i,
  input  commit_log_t log1_i,
  input  logic        select_i,
  output commit_log_t log_o
);

  always_comb log_o = select_i ? log1_i : log0_i;

endmodule
