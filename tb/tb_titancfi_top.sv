// tb_titancfi_top: end-to-end test of the TitanCFI hardware at its default
// parameters (queue depth 8). Two copies of the design run side by side:
//   A: the root of trust is woken by the doorbell interrupt and needs 267
//      cycles per check (the average cost of the interrupt-driven firmware),
//   B: the root of trust polls the doorbell register over AXI and needs 112
//      cycles per check (the polling firmware).
// A commit-port model retires a random program with calls, returns,
// indirect jumps and a few corrupted returns; a root-of-trust model runs a
// shadow stack on what it receives through the mailbox.
//
// Checked: every CFI-relevant instruction reaches the root of trust exactly
// once and in program order with the right four fields; a fault is raised
// exactly for each corrupted return, carrying that instruction's log; the
// commit stage is never allowed to retire into a full queue. Mechanisms that
// must each occur at least once: queue-full stall, two control-flow
// instructions offered together (port 1 held), a log pushed from port 1,
// fault, doorbell interrupt, doorbell polling, queue drained to empty while
// the writer waits.
module tb_titancfi_top;
  import cfi_pkg::*;

  localparam int unsigned N_INSTR = 3000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- design A (interrupt) ----------------
  sb_entry_t   a_entry [2];
  logic [1:0]  a_ack, a_wait;
  logic        a_fault, a_db, a_cp, a_full, a_empty, a_busy, a_done;
  commit_log_t a_flog;
  axi_req_t    a_rreq;
  axi_rsp_t    a_rrsp;

  titancfi_top dut_a (
    .clk_i(clk), .rst_ni(rst_n),
    .commit_entry_i(a_entry), .commit_ack_i(a_ack), .commit_wait_o(a_wait),
    .cfi_fault_o(a_fault), .cfi_fault_log_o(a_flog),
    .rot_axi_req_i(a_rreq), .rot_axi_rsp_o(a_rrsp),
    .doorbell_cfi_o(a_db), .completion_cfi_o(a_cp),
    .queue_full_o(a_full), .queue_empty_o(a_empty), .writer_busy_o(a_busy));
  tb_commit_model #(.N_INSTR(N_INSTR), .CF_PCT(30)) cm_a (
    .clk_i(clk), .rst_ni(rst_n), .wait_i(a_wait), .entry_o(a_entry), .ack_o(a_ack), .done_o(a_done));
  tb_rot_fw_model #(.CHECK_CYCLES(267), .POLLING(1'b0)) rot_a (
    .clk_i(clk), .rst_ni(rst_n), .doorbell_i(a_db), .axi_req_o(a_rreq), .axi_rsp_i(a_rrsp));

  // ---------------- design B (polling) ----------------
  sb_entry_t   b_entry [2];
  logic [1:0]  b_ack, b_wait;
  logic        b_fault, b_db, b_cp, b_full, b_empty, b_busy, b_done;
  commit_log_t b_flog;
  axi_req_t    b_rreq;
  axi_rsp_t    b_rrsp;

  titancfi_top dut_b (
    .clk_i(clk), .rst_ni(rst_n),
    .commit_entry_i(b_entry), .commit_ack_i(b_ack), .commit_wait_o(b_wait),
    .cfi_fault_o(b_fault), .cfi_fault_log_o(b_flog),
    .rot_axi_req_i(b_rreq), .rot_axi_rsp_o(b_rrsp),
    .doorbell_cfi_o(b_db), .completion_cfi_o(b_cp),
    .queue_full_o(b_full), .queue_empty_o(b_empty), .writer_busy_o(b_busy));
  tb_commit_model #(.N_INSTR(N_INSTR), .CF_PCT(30)) cm_b (
    .clk_i(clk), .rst_ni(rst_n), .wait_i(b_wait), .entry_o(b_entry), .ack_o(b_ack), .done_o(b_done));
  tb_rot_fw_model #(.CHECK_CYCLES(112), .POLLING(1'b1)) rot_b (
    .clk_i(clk), .rst_ni(rst_n), .doorbell_i(b_db), .axi_req_o(b_rreq), .axi_rsp_i(b_rrsp));

  // ---------------- monitors ----------------
  function automatic logic is_cf(input sb_entry_t e);
    logic l_rd;
    l_rd  = e.instr[11:7] == 5'd1 || e.instr[11:7] == 5'd5;
    if (!e.valid || e.ex_valid) return 0;
    if (e.instr[6:0] == 7'h6f) return l_rd;
    return e.instr[6:0] == 7'h67 && e.instr[14:12] == 3'd0;
  endfunction

  int n_full_stall = 0, n_db_rise = 0, n_empty_wait = 0;
  commit_log_t fault_logs_a[$], fault_logs_b[$];
  logic a_db_q = 0;

  always @(posedge clk) if (rst_n) begin
    if ((a_full && a_wait != 0) || (b_full && b_wait != 0)) n_full_stall++;
    if (a_db && !a_db_q) n_db_rise++;
    a_db_q <= a_db;
    if ((a_empty && a_busy) || (b_empty && b_busy)) n_empty_wait++;
    if (a_fault) fault_logs_a.push_back(a_flog);
    if (b_fault) fault_logs_b.push_back(b_flog);
    // the commit stage must never retire a CF instruction into a full queue
    if ((a_full && ((a_ack[0] && is_cf(a_entry[0])) || (a_ack[1] && is_cf(a_entry[1])))) ||
        (b_full && ((b_ack[0] && is_cf(b_entry[0])) || (b_ack[1] && is_cf(b_entry[1]))))) begin
      failures++;
      $display("FAIL retired into full queue");
    end
  end

  task automatic compare(input string nm, ref commit_log_t exp_l[$], ref logic exp_b[$],
                         ref commit_log_t got[$], ref commit_log_t flogs[$], input int viol);
    int nbad;
    commit_log_t bad_l[$];
    checks++;
    if (got.size() != exp_l.size()) begin
      failures++;
      $display("FAIL %s: %0d logs received, %0d expected", nm, got.size(), exp_l.size());
    end
    for (int k = 0; k < exp_l.size() && k < got.size(); k++) begin
      checks++;
      if (got[k] !== exp_l[k]) begin
        failures++;
        $display("FAIL %s: log %0d got pc=%h exp pc=%h", nm, k, got[k].pc, exp_l[k].pc);
      end
      if (exp_b[k]) bad_l.push_back(exp_l[k]);
    end
    nbad = bad_l.size();
    checks++;
    if (flogs.size() != nbad || viol != nbad || nbad == 0) begin
      failures++;
      $display("FAIL %s: faults=%0d rot_violations=%0d corrupted_returns=%0d", nm, flogs.size(), viol, nbad);
    end
    for (int k = 0; k < nbad && k < flogs.size(); k++) begin
      checks++;
      if (flogs[k] !== bad_l[k]) begin
        failures++;
        $display("FAIL %s: fault %0d reports pc=%h, expected pc=%h", nm, k, flogs[k].pc, bad_l[k].pc);
      end
    end
    $display("%s: %0d CF logs checked, %0d violations flagged", nm, got.size(), nbad);
  endtask

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end else $display("mechanism %-34s %0d", what, n);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (a_done && b_done);
    // let the queues drain
    while (!(a_empty && !a_busy && b_empty && !b_busy)) @(posedge clk);
    repeat (20) @(posedge clk);
    compare("irq", cm_a.exp_logs, cm_a.exp_bad, rot_a.got_logs, fault_logs_a, rot_a.n_violations);
    compare("poll", cm_b.exp_logs, cm_b.exp_bad, rot_b.got_logs, fault_logs_b, rot_b.n_violations);
    need("queue-full stall cycles", n_full_stall);
    need("dual control-flow commit (port 1 held)", cm_a.dual_cf + cm_b.dual_cf);
    need("log pushed from port 1", cm_a.port1_cf + cm_b.port1_cf);
    need("dual retire", cm_a.dual_retire + cm_b.dual_retire);
    need("fault raised", fault_logs_a.size() + fault_logs_b.size());
    need("doorbell interrupt", n_db_rise);
    need("doorbell polls", rot_b.n_polls);
    need("writer busy with empty queue", n_empty_wait);
    $display("irq : %0d instructions in %0d cycles, %0d stall cycles", N_INSTR, cm_a.cycles, cm_a.stall_cycles);
    $display("poll: %0d instructions in %0d cycles, %0d stall cycles", N_INSTR, cm_b.cycles, cm_b.stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
