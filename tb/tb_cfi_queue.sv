// tb_cfi_queue: self-checking test of the CFI queue at depth 8 (default)
// and depth 1. Random pushes and pops (never into a full or out of an empty
// queue, as the controller and log writer guarantee) are mirrored in a
// reference queue; head log, empty, full and count are compared every cycle.
// The test requires that both instances were seen full and that
// simultaneous push and pop happened.
module tb_cfi_queue;
  import cfi_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // depth 8
  logic push8, pop8, empty8, full8;
  commit_log_t din8, dout8;
  logic [3:0] cnt8;
  cfi_queue dut8 (.clk_i(clk), .rst_ni(rst_n), .push_i(push8), .log_i(din8), .pop_i(pop8),
                  .log_o(dout8), .empty_o(empty8), .full_o(full8), .count_o(cnt8));
  // depth 1
  logic push1, pop1, empty1, full1;
  commit_log_t din1, dout1;
  logic [0:0] cnt1;
  cfi_queue #(.DEPTH(1)) dut1 (.clk_i(clk), .rst_ni(rst_n), .push_i(push1), .log_i(din1), .pop_i(pop1),
                  .log_o(dout1), .empty_o(empty1), .full_o(full1), .count_o(cnt1));

  commit_log_t ref8[$], ref1[$];
  int n_full8 = 0, n_full1 = 0, n_both = 0;

  function automatic commit_log_t rnd_log();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic compare(input string nm, input commit_log_t q[$], input int depth,
                         input logic e, input logic f, input int c, input commit_log_t head);
    checks++;
    if (e !== (q.size() == 0) || f !== (q.size() == depth) || c != q.size() ||
        (q.size() > 0 && head !== q[0])) begin
      failures++;
      $display("FAIL %s size=%0d empty=%0d full=%0d count=%0d", nm, q.size(), e, f, c);
    end
  endtask

  initial begin
    push8 = 0; pop8 = 0; push1 = 0; pop1 = 0; din8 = '0; din1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      // bias towards filling in the first half, draining in the second
      int pp;
      pp = (cyc % 1000 < 500) ? 70 : 30;
      @(negedge clk);
      compare("d8", ref8, 8, empty8, full8, int'(cnt8), dout8);
      compare("d1", ref1, 1, empty1, full1, int'(cnt1), dout1);
      push8 = !full8  && ($urandom_range(0, 99) < pp);
      pop8  = !empty8 && ($urandom_range(0, 99) >= pp);
      push1 = !full1  && ($urandom_range(0, 1) != 0);
      pop1  = !empty1 && ($urandom_range(0, 1) != 0);
      din8 = rnd_log(); din1 = rnd_log();
      if (full8) n_full8++;
      if (full1) n_full1++;
      if (push8 && pop8) n_both++;
      @(posedge clk);
      if (pop8)  void'(ref8.pop_front());
      if (push8) ref8.push_back(din8);
      if (pop1)  void'(ref1.pop_front());
      if (push1) ref1.push_back(din1);
    end
    checks++;
    if (n_full8 == 0 || n_full1 == 0 || n_both == 0) begin
      failures++;
      $display("FAIL coverage full8=%0d full1=%0d both=%0d", n_full8, n_full1, n_both);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
