// tb_cfi_log_writer: self-checking test of the log writer FSM against an AXI
// slave model of the mailbox written here. A queue model feeds random logs.
// For every log the test checks that exactly four 64-bit chunk writes reach
// the data registers with the right contents and addresses, that the
// doorbell write comes last, that the writer waits for completion, reads
// data register 0 and pulses fault exactly when the verdict bit is 1.
// Phase 1 uses a zero-wait slave and checks the cycle count from pop to
// doorbell write (9 clock edges after the pop edge: 5 writes of 2 cycles,
// the first address handshake one edge after the pop); phase 2 adds random
// ready and response delays.
module tb_cfi_log_writer;
  import cfi_pkg::*;

  localparam logic [63:0] BASE = 64'h0000_0000_1040_0000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic empty, pop, completion, fault, busy;
  commit_log_t log_in, fault_log;
  axi_req_t req;
  axi_rsp_t rsp;

  cfi_log_writer #(.MBOX_BASE(BASE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .empty_i(empty), .log_i(log_in), .pop_o(pop),
    .completion_i(completion), .axi_req_o(req), .axi_rsp_i(rsp),
    .fault_o(fault), .fault_log_o(fault_log), .busy_o(busy));

  // ---------------- queue model ----------------
  commit_log_t src[$];
  assign empty  = (src.size() == 0);
  assign log_in = empty ? '0 : src[0];
  commit_log_t sent[$];
  // the pop is applied half a cycle later, so the writer samples the head
  // log at the clock edge before it leaves the model queue
  logic pop_d = 0;
  always @(posedge clk) pop_d <= rst_n && pop;
  always @(negedge clk) if (pop_d) sent.push_back(src.pop_front());

  // ---------------- AXI slave model ----------------
  bit   random_delay = 0;
  logic [63:0] regs [6];
  logic verdict;
  int   wr_count = 0, rd_count = 0, doorbell_cycle = 0, pop_cycle = 0, cycle = 0;
  logic [63:0] wr_addr_log[$];
  int   b_wait = 0, r_wait = 0;
  logic b_pend = 0, r_pend = 0;
  logic aw_rdy, ar_rdy;

  always_comb begin
    rsp = '0;
    rsp.aw_ready = aw_rdy && req.aw_valid && req.w_valid && !b_pend;
    rsp.w_ready  = rsp.aw_ready;
    rsp.b_valid  = b_pend && b_wait == 0;
    rsp.ar_ready = ar_rdy && req.ar_valid && !r_pend;
    rsp.r_valid  = r_pend && r_wait == 0;
    rsp.r_data   = {63'b0, verdict};
    rsp.r_last   = 1'b1;
  end

  always @(posedge clk) begin
    cycle++;
    if (pop) pop_cycle = cycle;
    aw_rdy <= random_delay ? ($urandom_range(0, 2) == 0) : 1'b1;
    ar_rdy <= random_delay ? ($urandom_range(0, 2) == 0) : 1'b1;
    if (b_pend && b_wait > 0) b_wait--;
    if (r_pend && r_wait > 0) r_wait--;
    if (rsp.b_valid && req.b_ready) b_pend = 0;
    if (rsp.r_valid && req.r_ready) r_pend = 0;
    if (rsp.aw_ready) begin
      wr_count++;
      wr_addr_log.push_back(req.aw_addr);
      if (req.aw_addr == BASE + 64'h20) begin
        doorbell_cycle = cycle;
        completion <= 1'b0;
      end else if (req.aw_addr >= BASE && req.aw_addr < BASE + 64'h20) begin
        regs[3'((req.aw_addr - BASE) >> 3)] = req.w_data;
      end
      b_pend = 1; b_wait = random_delay ? $urandom_range(0, 3) : 0;
    end
    if (rsp.ar_ready) begin
      rd_count++;
      checks++;
      if (req.ar_addr != BASE) begin
        failures++;
        $display("FAIL read address %h", req.ar_addr);
      end
      r_pend = 1; r_wait = random_delay ? $urandom_range(0, 3) : 0;
    end
  end

  int fault_count = 0;
  always @(posedge clk) if (fault) fault_count++;

  task automatic one_log(input logic bad, input bit check_timing);
    commit_log_t l;
    logic [255:0] padded;
    int wr0, rd0, f0;
    l = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    padded = {32'b0, l};
    wr0 = wr_count; rd0 = rd_count; f0 = fault_count;
    wr_addr_log.delete();
    verdict = bad;
    src.push_back(l);
    // wait for the doorbell write
    wait (wr_count == wr0 + 5);
    @(posedge clk);
    repeat ($urandom_range(3, 30)) begin
      @(posedge clk);
      checks++;
      if (rd_count != rd0 || !busy) begin
        failures++;
        $display("FAIL writer did not wait for completion");
      end
    end
    completion <= 1'b1;
    wait (!busy);
    repeat (2) @(posedge clk);
    checks++;
    if (wr_addr_log.size() != 5 || wr_addr_log[4] != BASE + 64'h20) begin
      failures++;
      $display("FAIL write sequence size=%0d", wr_addr_log.size());
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (wr_addr_log[k] != BASE + 64'(8 * k) || regs[k] !== padded[64*k +: 64]) begin
        failures++;
        $display("FAIL chunk %0d addr=%h data=%h exp=%h", k, wr_addr_log[k], regs[k], padded[64*k +: 64]);
      end
    end
    checks++;
    if (rd_count != rd0 + 1 || (fault_count - f0) != int'(bad)) begin
      failures++;
      $display("FAIL read/fault rd=%0d faults=%0d bad=%0d", rd_count - rd0, fault_count - f0, bad);
    end
    if (bad) begin
      checks++;
      if (fault_log !== l) begin
        failures++;
        $display("FAIL fault log");
      end
    end
    if (check_timing) begin
      checks++;
      if (doorbell_cycle - pop_cycle != 9) begin
        failures++;
        $display("FAIL pop-to-doorbell %0d cycles (expected 9)", doorbell_cycle - pop_cycle);
      end
    end
  endtask

  initial begin
    completion = 0; verdict = 0; aw_rdy = 1; ar_rdy = 1;
    for (int k = 0; k < 6; k++) regs[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 20; n++) one_log(n % 3 == 1, 1'b1);
    random_delay = 1;
    for (int n = 0; n < 60; n++) one_log($urandom_range(0, 3) == 0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
