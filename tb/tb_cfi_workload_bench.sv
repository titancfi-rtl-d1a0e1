// tb_cfi_workload_bench: one trace-driven slowdown bench, used by
// tb_cfi_workload. It holds a complete titancfi_top with the queue depth
// given by QUEUE_DEPTH, a behavioural root of trust and a trace driver on
// commit port 0, and runs either the benchmark-table set (queue depth 8
// in the published evaluation) or the set used for comparison with
// hardware monitors (queue depth 1). For each benchmark the control-flow
// density (CF instructions per baseline cycle) is taken from its published
// cycle and CF counts, and a synthetic trace of BASE_CYCLES instructions
// is retired one per cycle (so the baseline is one instruction per cycle),
// with calls and matching returns placed at random with that density. The
// root of trust is modelled with the per-check costs used in the
// evaluation: 73 (optimised), 112 (polling) and 267 (interrupt) cycles.
//
// Checked per run: every CF instruction reaches the root of trust, no
// fault is raised (the trace has no attack), and the run time lies between
// bounds that follow from the costs alone: at least the baseline and at
// least the root of trust's busy time for all but the QUEUE_DEPTH + 1 logs
// that can still be queued or in flight at the end, at most the baseline
// plus one fully serialised check (cost + 40 cycles of bus traffic) per CF
// instruction. The measured slowdown is printed next to the published one;
// the two are not expected to agree exactly, since real traces are bursty
// and this one is uniform. The bench raises done_o when its set is over;
// checks and failures are read by the enclosing testbench.
module tb_cfi_workload_bench
  import cfi_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = 8,
  parameter bit          SOA_SET     = 1'b0,  // 0: benchmark table runs, 1: comparison runs
  parameter int          BASE_CYCLES = 40000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done_o
);
  int checks = 0, failures = 0;

  sb_entry_t   entry [2];
  logic [1:0]  ack, wt;
  logic        fault, db, cp, full, empty, busy;
  commit_log_t flog;
  axi_req_t    rreq;
  axi_rsp_t    rrsp;

  titancfi_top #(.QUEUE_DEPTH(QUEUE_DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .commit_entry_i(entry), .commit_ack_i(ack), .commit_wait_o(wt),
    .cfi_fault_o(fault), .cfi_fault_log_o(flog),
    .rot_axi_req_i(rreq), .rot_axi_rsp_o(rrsp),
    .doorbell_cfi_o(db), .completion_cfi_o(cp),
    .queue_full_o(full), .queue_empty_o(empty), .writer_busy_o(busy));

  tb_rot_fw_model #(.CHECK_CYCLES(73)) rot (
    .clk_i(clk), .rst_ni(rst_n), .doorbell_i(db), .axi_req_o(rreq), .axi_rsp_i(rrsp));

  // ---------------- trace driver (commit port 0 only) ----------------
  sb_entry_t   cur;
  logic [63:0] pc = 64'h8000_0000;
  logic [63:0] stack[$];
  real         cf_prob = 0.0;
  int          n_cf = 0, n_faults = 0;

  function automatic sb_entry_t next_instr();
    sb_entry_t e;
    e = '0;
    e.valid = 1'b1;
    e.pc = pc;
    if (real'($urandom_range(0, 999999)) < cf_prob * 1.0e6) begin
      if (stack.size() == 0 || $urandom_range(0, 1) == 0) begin
        e.instr  = 32'h008000ef;                       // jal ra, f
        e.target = 64'h8000_0000 + 64'($urandom_range(0, 8191) * 4);
        stack.push_back(pc + 4);
      end else begin
        e.instr  = 32'h00008067;                       // ret
        e.target = stack.pop_back();
      end
    end else begin
      e.instr  = 32'h00000013;                         // addi x0, x0, 0
      e.target = pc + 4;
    end
    pc = e.target;
    return e;
  endfunction

  assign entry[0] = cur;
  assign entry[1] = '0;
  always_comb begin
    ack[0] = cur.valid && !wt[0];
    ack[1] = 1'b0;
  end

  int   retired = 0;
  logic ack_s = 0;
  always @(posedge clk) begin
    ack_s <= ack[0];
    if (rst_n && fault) n_faults++;
  end

  task automatic run(input string name, input real cycles, input real cf, input int cost,
                     input int paper_pct);
    int t0, t, ncf0, got0, lo, hi;
    real sd;
    cf_prob = cf / cycles;
    rot.check_cycles = cost;
    ncf0 = n_cf;
    got0 = rot.got_logs.size();
    retired = 0;
    @(negedge clk);
    cur = next_instr();
    t0 = rot.cyc;
    while (retired < BASE_CYCLES) begin
      @(negedge clk);
      if (ack_s) begin
        if (cur.instr != 32'h00000013) n_cf++;
        retired++;
        cur = (retired < BASE_CYCLES) ? next_instr() : '0;
      end
    end
    t = rot.cyc - t0;
    cur = '0;
    while (!(empty && !busy)) @(posedge clk);
    repeat (5) @(posedge clk);
    sd = 100.0 * real'(t - BASE_CYCLES) / real'(BASE_CYCLES);
    lo = (n_cf - ncf0 - int'(QUEUE_DEPTH) - 1) * (cost - 4);
    if (lo < BASE_CYCLES) lo = BASE_CYCLES;
    hi = BASE_CYCLES + (n_cf - ncf0) * (cost + 40);
    checks++;
    if (rot.got_logs.size() - got0 != n_cf - ncf0) begin
      failures++;
      $display("FAIL %s/%0d: %0d logs checked, %0d CF retired", name, cost, rot.got_logs.size() - got0, n_cf - ncf0);
    end
    checks++;
    if (t < lo || t > hi) begin
      failures++;
      $display("FAIL %s/%0d: %0d cycles outside [%0d, %0d]", name, cost, t, lo, hi);
    end
    $display("depth %0d %-10s cost %3d: %5d CF, %7d cycles, slowdown %6.0f %% (published %0d %%)",
             QUEUE_DEPTH, name, cost, n_cf - ncf0, t, sd, paper_pct);
  endtask

  initial begin
    done_o = 1'b0;
    cur = '0;
    @(negedge rst_n);
    @(posedge rst_n);
    repeat (5) @(posedge clk);
    // name, baseline cycles and CF count (published), cost, published slowdown
    if (!SOA_SET) begin
      run("nbody",     1.21e5, 4.29e3,  73,  163);
      run("nbody",     1.21e5, 4.29e3, 112,  301);
      run("nbody",     1.21e5, 4.29e3, 267,  849);
      run("cubic",     1.10e6, 2.01e4,  73,   46);
      run("cubic",     1.10e6, 2.01e4, 112,  107);
      run("cubic",     1.10e6, 2.01e4, 267,  390);
      run("wikisort",  4.38e5, 7.69e3,  73,   94);
      run("wikisort",  4.38e5, 7.69e3, 112,  158);
      run("wikisort",  4.38e5, 7.69e3, 267,  418);
      run("dhrystone", 4.57e5, 2.25e4,  73,  260);
      run("dhrystone", 4.57e5, 2.25e4, 112,  452);
      run("dhrystone", 4.57e5, 2.25e4, 267, 1215);
      run("huffbench", 3.49e6, 2.28e3,  73,    1);
      run("huffbench", 3.49e6, 2.28e3, 112,    3);
      run("huffbench", 3.49e6, 2.28e3, 267,   11);
    end else begin
      // entries the published table leaves blank (below 1 %) are not run
      run("edn",       4.23e6, 3.67e2,  73,    1);
      run("edn",       4.23e6, 3.67e2, 267,    2);
      run("ud",        1.87e6, 2.98e3,  73,   12);
      run("ud",        1.87e6, 2.98e3, 112,   18);
      run("ud",        1.87e6, 2.98e3, 267,   43);
      run("median",    2.53e4, 1.10e1, 267,   12);
      run("multiply",  3.72e4, 9.00e0, 267,    6);
      run("dhrystone", 4.57e5, 2.25e4,  73,  360);
      run("dhrystone", 4.57e5, 2.25e4, 112,  553);
      run("dhrystone", 4.57e5, 2.25e4, 267, 1318);
    end
    checks++;
    if (n_faults != 0) begin
      failures++;
      $display("FAIL %0d faults on an attack-free trace", n_faults);
    end
    done_o = 1'b1;
  end
endmodule
