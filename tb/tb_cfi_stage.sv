// tb_cfi_stage: self-checking test of the CFI stage (filters, V block, log
// select, queue, queue controller, log writer) at its default queue depth
// of 8. The commit-port model retires a random program; an AXI slave model
// written here plays mailbox and root of trust: it collects the four chunks
// of each log and, some time after the doorbell write (up to 150 cycles, or
// up to 4 cycles in every other run of 100 logs, so that the queue both
// fills and drains), raises completion and answers the verdict read. The
// verdict is 1 exactly for the corrupted returns planted by the commit model.
//
// Checked every cycle: the inhibit outputs against a reference of the two
// stall rules (queue full; two CF instructions offered together). At the
// end: all CF logs arrived once, in program order, with the right fields,
// and fault pulsed exactly for the corrupted returns with their logs.
module tb_cfi_stage;
  import cfi_pkg::*;

  localparam logic [63:0] BASE = 64'h0000_0000_1040_0000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sb_entry_t   entry [2];
  logic [1:0]  ack, wt;
  logic        completion, fault, full, empty, busy, done;
  commit_log_t flog;
  axi_req_t    req;
  axi_rsp_t    rsp;

  cfi_stage #(.MBOX_BASE(BASE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .commit_entry_i(entry), .commit_ack_i(ack), .wait_o(wt),
    .completion_i(completion), .axi_req_o(req), .axi_rsp_i(rsp),
    .fault_o(fault), .fault_log_o(flog),
    .queue_full_o(full), .queue_empty_o(empty), .writer_busy_o(busy));

  tb_commit_model #(.N_INSTR(8000), .CF_PCT(8), .READY_PCT(30), .ATTACK_PCT(5)) cm (
    .clk_i(clk), .rst_ni(rst_n), .wait_i(wt), .entry_o(entry), .ack_o(ack), .done_o(done));

  // ---------------- reference for the inhibit rules ----------------
  function automatic logic is_cf(input sb_entry_t e);
    logic l_rd;
    l_rd  = e.instr[11:7] == 5'd1 || e.instr[11:7] == 5'd5;
    if (!e.valid || e.ex_valid) return 0;
    if (e.instr[6:0] == 7'h6f) return l_rd;
    return e.instr[6:0] == 7'h67 && e.instr[14:12] == 3'd0;
  endfunction

  int n_full_stall = 0, n_dual_stall = 0;
  always @(posedge clk) if (rst_n) begin
    logic c0, c1;
    logic [1:0] exp_w;
    c0 = is_cf(entry[0]); c1 = is_cf(entry[1]);
    exp_w[0] = c0 && full;
    exp_w[1] = c1 && (full || c0);
    checks++;
    if (wt !== exp_w) begin
      failures++;
      $display("FAIL wait=%b expected %b (cf=%b%b full=%0d)", wt, exp_w, c1, c0, full);
    end
    if (full && (c0 || c1)) n_full_stall++;
    if (!full && c0 && c1) n_dual_stall++;
  end

  // ---------------- mailbox / root-of-trust model ----------------
  logic [63:0] regs [4];
  commit_log_t got[$];
  commit_log_t flogs[$];
  int   answer_at = -1, cyc = 0;
  logic b_pend = 0, r_pend = 0, verdict = 0;

  always_comb begin
    rsp = '0;
    rsp.aw_ready = req.aw_valid && req.w_valid && !b_pend;
    rsp.w_ready  = rsp.aw_ready;
    rsp.b_valid  = b_pend;
    rsp.ar_ready = req.ar_valid && !r_pend;
    rsp.r_valid  = r_pend;
    rsp.r_data   = {63'b0, verdict};
    rsp.r_last   = 1'b1;
  end

  always @(posedge clk) begin
    cyc++;
    if (b_pend && req.b_ready) b_pend = 0;
    if (r_pend && req.r_ready) r_pend = 0;
    if (rsp.aw_ready) begin
      b_pend = 1;
      if (req.aw_addr == BASE + 64'h20) begin
        logic [255:0] flat;
        flat = {regs[3], regs[2], regs[1], regs[0]};
        got.push_back(flat[LOG_W-1:0]);
        verdict = (got.size() <= cm.exp_bad.size()) ? cm.exp_bad[got.size() - 1] : 1'b0;
        completion <= 1'b0;
        answer_at = cyc + ((got.size() % 200 < 100) ? $urandom_range(1, 150) : $urandom_range(1, 4));
      end else begin
        regs[2'(req.aw_addr >> 3)] = req.w_data;
      end
    end
    if (rsp.ar_ready) r_pend = 1;
    if (cyc == answer_at) completion <= 1'b1;
    if (rst_n && fault) flogs.push_back(flog);
  end

  initial begin
    completion = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (done);
    while (!(empty && !busy)) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (got.size() != cm.exp_logs.size()) begin
      failures++;
      $display("FAIL %0d logs received, %0d expected", got.size(), cm.exp_logs.size());
    end
    begin
      commit_log_t bad_l[$];
      for (int k = 0; k < got.size() && k < cm.exp_logs.size(); k++) begin
        checks++;
        if (got[k] !== cm.exp_logs[k]) begin
          failures++;
          $display("FAIL log %0d pc=%h expected pc=%h", k, got[k].pc, cm.exp_logs[k].pc);
        end
        if (cm.exp_bad[k]) bad_l.push_back(cm.exp_logs[k]);
      end
      checks++;
      if (flogs.size() != bad_l.size() || bad_l.size() == 0) begin
        failures++;
        $display("FAIL %0d faults, %0d corrupted returns", flogs.size(), bad_l.size());
      end
      for (int k = 0; k < flogs.size() && k < bad_l.size(); k++) begin
        checks++;
        if (flogs[k] !== bad_l[k]) begin failures++; $display("FAIL fault log %0d pc=%h expected pc=%h", k, flogs[k].pc, bad_l[k].pc); end
      end
    end
    checks++;
    if (n_full_stall == 0 || n_dual_stall == 0 || cm.port1_cf == 0) begin
      failures++;
      $display("FAIL coverage full=%0d dual=%0d port1=%0d", n_full_stall, n_dual_stall, cm.port1_cf);
    end
    $display("%0d logs, %0d faults, full stalls %0d, dual stalls %0d, port-1 pushes %0d",
             got.size(), flogs.size(), n_full_stall, n_dual_stall, cm.port1_cf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
