// tb_cfi_axi_mux: self-checking test of the two-master AXI path. Two
// concurrent master processes issue random single-beat writes and reads
// (with their own IDs and address ranges) to a memory-like slave model with
// random ready and response delays. Every read must return the last value
// the same master wrote to that address, every B and R must reach the master
// that issued the request with its own ID, and both masters must have been
// granted while the other was also requesting (round robin).
module tb_cfi_axi_mux;
  import cfi_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t mreq [2];
  axi_rsp_t mrsp [2];
  axi_req_t sreq;
  axi_rsp_t srsp;

  cfi_axi_mux dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
                   .slv_req_o(sreq), .slv_rsp_i(srsp));

  // ---------------- slave model ----------------
  logic [63:0] mem [64];
  logic b_pend = 0, r_pend = 0;
  int   b_wait = 0, r_wait = 0;
  logic [3:0] b_id, r_id;
  logic [63:0] r_data;
  logic aw_rdy = 1, ar_rdy = 1;

  always_comb begin
    srsp = '0;
    srsp.aw_ready = aw_rdy && sreq.aw_valid && sreq.w_valid && !b_pend;
    srsp.w_ready  = srsp.aw_ready;
    srsp.b_valid  = b_pend && b_wait == 0;
    srsp.b_id     = b_id;
    srsp.ar_ready = ar_rdy && sreq.ar_valid && !r_pend;
    srsp.r_valid  = r_pend && r_wait == 0;
    srsp.r_id     = r_id;
    srsp.r_data   = r_data;
    srsp.r_last   = 1'b1;
  end

  always @(posedge clk) begin
    aw_rdy <= $urandom_range(0, 1) != 0;
    ar_rdy <= $urandom_range(0, 1) != 0;
    if (b_pend && b_wait > 0) b_wait--;
    if (r_pend && r_wait > 0) r_wait--;
    if (srsp.b_valid && sreq.b_ready) b_pend = 0;
    if (srsp.r_valid && sreq.r_ready) r_pend = 0;
    if (srsp.aw_ready) begin
      mem[6'(sreq.aw_addr >> 3)] = sreq.w_data;
      b_pend = 1; b_wait = $urandom_range(0, 3); b_id = sreq.aw_id;
    end
    if (srsp.ar_ready) begin
      r_pend = 1; r_wait = $urandom_range(0, 3); r_id = sreq.ar_id;
      r_data = mem[6'(sreq.ar_addr >> 3)];
    end
  end

  // ---------------- contention coverage ----------------
  int grant_contended [2] = '{0, 0};
  always @(posedge clk) begin
    if (mreq[0].aw_valid && mreq[1].aw_valid) begin
      if (mrsp[0].aw_ready) grant_contended[0]++;
      if (mrsp[1].aw_ready) grant_contended[1]++;
    end
    if (mrsp[0].b_valid && mrsp[1].b_valid) begin
      failures++;
      $display("FAIL B to both masters");
    end
  end

  // ---------------- master processes ----------------
  logic [63:0] shadow [2][32];
  logic [3:0]  ids [2] = '{4'h1, 4'h9};

  task automatic mwrite(input int m, input int idx, input logic [63:0] d);
    @(negedge clk);
    mreq[m].aw_valid = 1; mreq[m].aw_addr = 64'((m * 32 + idx) * 8); mreq[m].aw_id = ids[m];
    mreq[m].w_valid = 1; mreq[m].w_data = d; mreq[m].w_strb = '1; mreq[m].w_last = 1;
    mreq[m].b_ready = 1;
    do @(posedge clk); while (!mrsp[m].aw_ready);
    @(negedge clk);
    mreq[m].aw_valid = 0; mreq[m].w_valid = 0;
    while (!mrsp[m].b_valid) @(negedge clk);
    checks++;
    if (mrsp[m].b_id != ids[m]) begin failures++; $display("FAIL m%0d b_id %h", m, mrsp[m].b_id); end
    @(posedge clk);
    @(negedge clk);
    mreq[m].b_ready = 0;
    shadow[m][idx] = d;
  endtask

  task automatic mread(input int m, input int idx);
    @(negedge clk);
    mreq[m].ar_valid = 1; mreq[m].ar_addr = 64'((m * 32 + idx) * 8); mreq[m].ar_id = ids[m];
    mreq[m].r_ready = 1;
    do @(posedge clk); while (!mrsp[m].ar_ready);
    @(negedge clk);
    mreq[m].ar_valid = 0;
    while (!mrsp[m].r_valid) @(negedge clk);
    checks++;
    if (mrsp[m].r_id != ids[m] || mrsp[m].r_data !== shadow[m][idx]) begin
      failures++;
      $display("FAIL m%0d read idx %0d got %h exp %h id %h", m, idx, mrsp[m].r_data, shadow[m][idx], mrsp[m].r_id);
    end
    @(posedge clk);
    @(negedge clk);
    mreq[m].r_ready = 0;
  endtask

  task automatic master_run(input int m);
    for (int k = 0; k < 32; k++) mwrite(m, k, {$urandom, $urandom});
    repeat (300) begin
      if ($urandom_range(0, 1) != 0) mwrite(m, $urandom_range(0, 31), {$urandom, $urandom});
      else                           mread(m, $urandom_range(0, 31));
    end
  endtask

  initial begin
    mreq[0] = '0; mreq[1] = '0;
    for (int k = 0; k < 64; k++) mem[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      master_run(0);
      master_run(1);
    join
    checks++;
    if (grant_contended[0] == 0 || grant_contended[1] == 0) begin
      failures++;
      $display("FAIL contention coverage %0d %0d", grant_contended[0], grant_contended[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
