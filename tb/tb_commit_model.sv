// tb_commit_model: behavioural model of the two commit ports of the host
// core, for testbenches only. It generates a random but consistent program
// trace (ALU instructions, branches, direct jumps, direct and indirect calls,
// returns to the address of the matching call, other indirect jumps) and
// offers the oldest two not-yet-retired instructions on commit ports 0 and
// 1, each ready with probability READY_PCT. It acknowledges a port exactly
// as the CVA6 commit stage does with the CFI inhibit: a port retires when
// its entry is ready and not inhibited, port 1 only together with port 0.
// With probability ATTACK_PCT a return jumps to a corrupted address, which a
// return-address policy must flag.
//
// For checking, every retired CFI-relevant instruction is appended to
// exp_logs (with exp_bad = 1 for a corrupted return), and stall statistics
// are counted. done goes high after N_INSTR instructions have retired.
module tb_commit_model
  import cfi_pkg::*;
#(
  parameter int unsigned N_INSTR    = 2000,
  parameter int unsigned CF_PCT     = 30,
  parameter int unsigned READY_PCT  = 85,
  parameter int unsigned ATTACK_PCT = 3
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [1:0] wait_i,
  output sb_entry_t  entry_o [2],
  output logic [1:0] ack_o,
  output logic       done_o
);

  typedef struct {
    sb_entry_t   e;
    logic        cf;    // CFI-relevant
    logic        bad;   // corrupted return
  } item_t;

  item_t       buf_q[$];
  logic [63:0] pc;
  logic [63:0] call_stack[$];
  int          generated = 0;
  int          retired = 0;
  int          cycles = 0;
  int          stall_cycles = 0;     // cycles in which a ready port was inhibited
  int          dual_cf = 0;          // both ports offered a CF instruction
  int          port1_cf = 0;         // CF instruction retired on port 1
  int          dual_retire = 0;      // both ports retired in one cycle
  logic [1:0]  ready;

  commit_log_t exp_logs[$];
  logic        exp_bad[$];

  function automatic item_t gen();
    item_t it;
    int    r;
    logic  comp;
    logic [63:0] tgt;
    comp = ($urandom_range(0, 4) == 0);
    it.cf = 0; it.bad = 0;
    it.e.valid = 1'b1; it.e.ex_valid = 1'b0; it.e.pc = pc; it.e.is_compressed = comp;
    r = $urandom_range(0, 99);
    if (r < CF_PCT) begin
      r = $urandom_range(0, 9);
      if (r < 4 || (r < 8 && call_stack.size() == 0)) begin
        // call: direct (jal ra) or indirect (jalr ra, 0(t1))
        it.e.instr = (r % 2 == 0) ? 32'h008000ef : 32'h000300e7;
        tgt = 64'h8000_0000 + 64'($urandom_range(0, 4095) * 4);
        if (call_stack.size() > 200) void'(call_stack.pop_back());
        call_stack.push_front(pc + (comp ? 64'd2 : 64'd4));
        it.cf = 1;
      end else if (r < 8) begin
        // return: jalr x0, 0(ra)
        it.e.instr = 32'h00008067;
        tgt = call_stack.pop_front();
        if ($urandom_range(0, 99) < ATTACK_PCT) begin
          tgt = tgt + 64'(4 * $urandom_range(1, 64));
          it.bad = 1;
        end
        it.cf = 1;
      end else begin
        // other indirect jump: jalr x0, 0(t1)
        it.e.instr = 32'h00030067;
        tgt = 64'h8000_0000 + 64'($urandom_range(0, 4095) * 4);
        it.cf = 1;
      end
    end else begin
      r = $urandom_range(0, 2);
      it.e.instr = (r == 0) ? 32'h00000013 : (r == 1) ? 32'h00000063 : 32'h0000006f;
      tgt = pc + (comp ? 64'd2 : 64'd4);
    end
    it.e.target = tgt;
    pc = tgt;
    return it;
  endfunction

  always_comb begin
    entry_o[0] = '0;
    entry_o[1] = '0;
    if (buf_q.size() > 0) begin entry_o[0] = buf_q[0].e; entry_o[0].valid = ready[0]; end
    if (buf_q.size() > 1) begin entry_o[1] = buf_q[1].e; entry_o[1].valid = ready[1]; end
  end

  always_comb begin
    ack_o[0] = entry_o[0].valid && !wait_i[0];
    ack_o[1] = entry_o[1].valid && !wait_i[1] && ack_o[0];
  end

  assign done_o = (retired >= N_INSTR);

  initial begin
    pc = 64'h8000_0000;
    ready = 2'b00;
    buf_q.delete();
  end

  // Decisions are sampled at the rising edge (the value the design saw) and
  // applied at the falling edge, so the offered entries never change at the
  // edge where the design registers them.
  logic [1:0] ack_s = 2'b00;
  logic       sampled = 1'b0;
  always @(posedge clk_i) begin
    ack_s   <= ack_o;
    sampled <= rst_ni;
    if (rst_ni && !done_o) begin
      cycles++;
      if ((entry_o[0].valid && wait_i[0]) || (entry_o[1].valid && wait_i[1])) stall_cycles++;
      if (buf_q.size() > 1 && ready == 2'b11 && buf_q[0].cf && buf_q[1].cf) dual_cf++;
      if (ack_o == 2'b11) dual_retire++;
    end
  end

  always @(negedge clk_i) begin
    if (sampled) begin
      for (int p = 0; p < 2; p++) begin
        if (ack_s[p] && buf_q[p].cf) begin
          exp_logs.push_back({buf_q[p].e.target,
                              buf_q[p].e.pc + (buf_q[p].e.is_compressed ? 64'd2 : 64'd4),
                              buf_q[p].e.instr, buf_q[p].e.pc});
          exp_bad.push_back(buf_q[p].bad);
          if (p == 1) port1_cf++;
        end
      end
      if (ack_s[1])      begin void'(buf_q.pop_front()); void'(buf_q.pop_front()); retired += 2; end
      else if (ack_s[0]) begin void'(buf_q.pop_front()); retired += 1; end
    end
    if (rst_ni) begin
      while (buf_q.size() < 2 && generated < N_INSTR + 2) begin
        buf_q.push_back(gen());
        generated++;
      end
      ready[0] = ($urandom_range(0, 99) < READY_PCT);
      ready[1] = ($urandom_range(0, 99) < READY_PCT);
    end
  end

endmodule
