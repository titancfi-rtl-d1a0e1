// tb_cfi_workload: trace-driven slowdown runs of the TitanCFI hardware in
// the manner of the published evaluation. Two benches run side by side on
// one clock: one at the default queue depth of 8 replays the benchmark-
// table set (nbody, cubic, wikisort, dhrystone, huffbench), and one with
// the queue constrained to depth 1, so that the core stalls as soon as a
// control-flow instruction is waiting, replays the set used for
// comparison with hardware CFI monitors (edn, ud, median, multiply,
// dhrystone). See tb_cfi_workload_bench for the trace model and the
// checks. The testbench ends when both benches are done and adds up their
// checks and failures.
module tb_cfi_workload;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int   checks = 0, failures = 0;
  logic done8, done1;

  tb_cfi_workload_bench #(.QUEUE_DEPTH(8), .SOA_SET(1'b0)) q8 (
    .clk(clk), .rst_n(rst_n), .done_o(done8));
  tb_cfi_workload_bench #(.QUEUE_DEPTH(1), .SOA_SET(1'b1)) q1 (
    .clk(clk), .rst_n(rst_n), .done_o(done1));

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (done8 && done1);
    checks   = q8.checks + q1.checks;
    failures = q8.failures + q1.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures = q8.failures + q1.failures + 1;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", q8.checks + q1.checks, failures);
    $finish;
  end
endmodule
