// tb_cfi_filter: self-checking test of the CFI filter. Drives random and
// hand-picked scoreboard entries (JAL/JALR with and without link registers,
// branches, ALU instructions, compressed flags, exceptions) and compares the
// hit flag, the kind and the four commit-log fields with a reference decoder
// written here from the RISC-V encoding.
module tb_cfi_filter;
  import cfi_pkg::*;

  sb_entry_t   entry;
  logic        hit;
  cf_kind_e    kind;
  commit_log_t log;
  int checks = 0, failures = 0;
  int n_call = 0, n_ret = 0, n_jmp = 0;

  cfi_filter dut (.entry_i(entry), .log_valid_o(hit), .kind_o(kind), .log_o(log));

  function automatic logic is_link(input logic [4:0] r);
    return r == 5'd1 || r == 5'd5;
  endfunction

  task automatic check_one();
    logic exp_hit;
    int   exp_kind;   // 0 none 1 call 2 ret 3 jump
    logic [63:0] exp_next;
    exp_kind = 0;
    if (entry.instr[6:0] == 7'h6f && is_link(entry.instr[11:7])) exp_kind = 1;
    if (entry.instr[6:0] == 7'h67 && entry.instr[14:12] == 3'd0) begin
      if (is_link(entry.instr[11:7]))       exp_kind = 1;
      else if (is_link(entry.instr[19:15])) exp_kind = 2;
      else                                  exp_kind = 3;
    end
    exp_hit  = entry.valid && !entry.ex_valid && exp_kind != 0;
    exp_next = entry.pc + (entry.is_compressed ? 2 : 4);
    #1;
    checks++;
    if (hit !== exp_hit || int'(kind) != exp_kind) begin
      failures++;
      $display("FAIL instr=%h hit=%0d/%0d kind=%0d/%0d", entry.instr, hit, exp_hit, kind, exp_kind);
    end
    checks++;
    if (log.pc !== entry.pc || log.instr !== entry.instr || log.next !== exp_next ||
        log.target !== entry.target) begin
      failures++;
      $display("FAIL log fields instr=%h", entry.instr);
    end
    if (exp_hit) begin
      if (exp_kind == 1) n_call++;
      if (exp_kind == 2) n_ret++;
      if (exp_kind == 3) n_jmp++;
    end
  endtask

  function automatic logic [31:0] rand_instr();
    logic [31:0] i;
    i = $urandom;
    case ($urandom_range(0, 5))
      0: i[6:0] = 7'h6f;                          // JAL
      1, 2: begin i[6:0] = 7'h67; i[14:12] = 3'd0; end   // JALR
      3: i[6:0] = 7'h63;                          // branch
      4: i[6:0] = 7'h13;                          // ALU immediate
      default: ;
    endcase
    if ($urandom_range(0, 2) == 0) i[11:7]  = ($urandom_range(0, 1) != 0) ? 5'd1 : 5'd5;
    if ($urandom_range(0, 2) == 0) i[19:15] = ($urandom_range(0, 1) != 0) ? 5'd1 : 5'd5;
    return i;
  endfunction

  initial begin
    // hand-picked: ret (jalr x0,0(x1)), call (jal x1), jalr x0,0(x6), jal x0
    logic [31:0] fixed [5] = '{32'h00008067, 32'h008000ef, 32'h00030067, 32'h0080006f, 32'h000280e7};
    foreach (fixed[k]) begin
      entry = '{valid: 1'b1, ex_valid: 1'b0, pc: 64'h8000_0000 + k*4, instr: fixed[k],
                is_compressed: 1'b0, target: 64'h8000_1000};
      check_one();
    end
    repeat (4000) begin
      entry.valid         = ($urandom_range(0, 7) != 0);
      entry.ex_valid      = ($urandom_range(0, 9) == 0);
      entry.pc            = {$urandom, $urandom};
      entry.instr         = rand_instr();
      entry.is_compressed = $urandom_range(0, 1) != 0;
      entry.target        = {$urandom, $urandom};
      check_one();
    end
    checks++;
    if (n_call == 0 || n_ret == 0 || n_jmp == 0) begin
      failures++;
      $display("FAIL coverage call=%0d ret=%0d jmp=%0d", n_call, n_ret, n_jmp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
