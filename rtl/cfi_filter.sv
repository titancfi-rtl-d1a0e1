// cfi_filter: looks at the scoreboard entry offered by one commit port and
// decides whether it is a control-flow instruction the CFI policy must see:
// a function call (JAL/JALR writing a link register), a function return
// (JALR reading a link register) or any other indirect jump (JALR).
// Plain direct jumps (JAL without link) and branches are not reported.
//
// For a relevant instruction it assembles the 224-bit commit log from the
// entry: program counter, uncompressed encoding, next address (pc + 2 for a
// compressed instruction, pc + 4 otherwise) and target address.
//
// Purely combinational: log_valid_o is valid in the same cycle as the entry.
// An entry that carries an exception is never reported, since it does not
// retire as a control-flow transfer.
//
// The set of instructions and the four log fields follow the paper; the use
// of the x1/x5 link-register convention for telling calls from returns and
// the exception masking are this design's choices.
module cfi_filter
  import cfi_pkg::*;
(
  input  sb_entry_t   entry_i,     // scoreboard entry at this commit port
  output logic        log_valid_o, // entry is a CFI-relevant instruction
  output cf_kind_e    kind_o,      // call / return / indirect jump
  output commit_log_t log_o        // commit log for the entry
);

  cf_kind_e kind;

  always_comb begin
    kind        = classify(entry_i.instr);
    kind_o      = kind;
    log_valid_o = entry_i.valid && !entry_i.ex_valid && (kind != CF_NONE);
    log_o.pc     = entry_i.pc;
    log_o.instr  = entry_i.instr;
    log_o.next   = entry_i.pc + (entry_i.is_compressed ? 64'd2 : 64'd4);
    log_o.target = entry_i.target;
  end

endmodule
