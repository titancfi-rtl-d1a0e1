// cfi_commit_valid: the block marked "V" between the commit stage and the
// queue controller. For each commit port it reports whether a CFI-relevant
// instruction actually retires in this cycle, i.e. the port's filter hit is
// qualified by that port's commit acknowledge (ack0/ack1). Only such
// instructions may be pushed into the CFI queue; an instruction that is held
// back in the commit stage is filtered again when it is retried.
//
// Combinational. Generic in the number of commit ports (CVA6 has two).
// The paper only names this box; its function here is inferred from the
// signal names printed next to it (ack0, ack1) and from the text.
module cfi_commit_valid #(
  parameter int unsigned NR_COMMIT_PORTS = 2
) (
  input  logic [NR_COMMIT_PORTS-1:0] hit_i,     // filter found a CF instruction
  input  logic [NR_COMMIT_PORTS-1:0] ack_i,     // commit port retires its entry
  output logic [NR_COMMIT_PORTS-1:0] retire_o,  // CF instruction retires now
  output logic                       any_o      // at least one retires
);

  always_comb begin
    retire_o = hit_i & ack_i;
    any_o    = |retire_o;
  end

endmodule
