// tb_cfi_mailbox: self-checking test of the CFI mailbox through its AXI
// port. Random writes (with random byte strobes) and reads of the four data
// registers are compared with a reference register file; the doorbell and
// completion outputs are checked after every write, including the rule
// that ringing the doorbell clears completion; an unmapped offset must
// answer SLVERR. Response latency (B and R one cycle after acceptance) is
// checked as well.
module tb_cfi_mailbox;
  import cfi_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t req;
  axi_rsp_t rsp;
  logic doorbell, completion;

  cfi_mailbox dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
                   .doorbell_o(doorbell), .completion_o(completion));

  logic [63:0] model [6];
  int n_clear = 0;

  task automatic axi_write(input logic [7:0] off, input logic [63:0] data, input logic [7:0] strb,
                           output logic [1:0] resp, output int lat);
    @(negedge clk);
    req.aw_valid = 1; req.aw_addr = 64'h1040_0000 + 64'(off); req.aw_id = 4'h3;
    req.w_valid = 1; req.w_data = data; req.w_strb = strb; req.w_last = 1;
    req.b_ready = 1;
    do @(posedge clk); while (!rsp.aw_ready);
    @(negedge clk);
    req.aw_valid = 0; req.w_valid = 0;
    lat = 1;
    while (!rsp.b_valid) begin @(negedge clk); lat++; end
    resp = rsp.b_resp;
    checks++;
    if (rsp.b_id != 4'h3) begin failures++; $display("FAIL b_id"); end
    @(posedge clk);
    @(negedge clk);
    req.b_ready = 0;
  endtask

  task automatic axi_read(input logic [7:0] off, output logic [63:0] data, output logic [1:0] resp);
    @(negedge clk);
    req.ar_valid = 1; req.ar_addr = 64'h1040_0000 + 64'(off); req.ar_id = 4'h5; req.r_ready = 1;
    do @(posedge clk); while (!rsp.ar_ready);
    @(negedge clk);
    req.ar_valid = 0;
    checks++;
    if (!rsp.r_valid) begin failures++; $display("FAIL read latency"); end
    while (!rsp.r_valid) @(negedge clk);
    data = rsp.r_data; resp = rsp.r_resp;
    @(posedge clk);
    @(negedge clk);
    req.r_ready = 0;
  endtask

  function automatic logic [63:0] mrg(input logic [63:0] o, input logic [63:0] d, input logic [7:0] s);
    logic [63:0] r;
    for (int b = 0; b < 8; b++) r[8*b +: 8] = s[b] ? d[8*b +: 8] : o[8*b +: 8];
    return r;
  endfunction

  initial begin
    logic [1:0] resp;
    logic [63:0] rd;
    int lat;
    req = '0;
    for (int k = 0; k < 6; k++) model[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // after reset everything reads zero
    for (int k = 0; k < 6; k++) begin
      axi_read(8'(8 * k), rd, resp);
      checks++;
      if (rd !== 64'd0 || resp != AXI_RESP_OKAY) begin failures++; $display("FAIL reset value %0d", k); end
    end
    repeat (600) begin
      int r, kind;
      logic [63:0] d;
      logic [7:0] s;
      kind = $urandom_range(0, 9);
      r = (kind < 6) ? $urandom_range(0, 3) : (kind < 8 ? 5 : 4);   // data, completion, doorbell
      d = {$urandom, $urandom};
      s = ($urandom_range(0, 2) == 0) ? 8'($urandom) : 8'hff;
      if ($urandom_range(0, 1) != 0) begin
        axi_write(8'(8 * r), d, s, resp, lat);
        checks++;
        if (resp != AXI_RESP_OKAY || lat != 1) begin failures++; $display("FAIL write resp/latency"); end
        if (r < 4) model[r] = mrg(model[r], d, s);
        else begin
          logic [63:0] m;
          m = mrg(model[r], d, s);
          model[r] = {63'b0, m[0]};
          if (r == 4 && m[0]) begin
            if (model[5][0]) n_clear++;
            model[5] = '0;
          end
        end
        checks++;
        if (doorbell !== model[4][0] || completion !== model[5][0]) begin
          failures++;
          $display("FAIL irq lines db=%0d/%0d cp=%0d/%0d", doorbell, model[4][0], completion, model[5][0]);
        end
      end else begin
        axi_read(8'(8 * r), rd, resp);
        checks++;
        if (rd !== model[r] || resp != AXI_RESP_OKAY) begin
          failures++;
          $display("FAIL read reg %0d got %h exp %h", r, rd, model[r]);
        end
      end
    end
    // unmapped offset
    axi_write(8'h40, 64'hdead, 8'hff, resp, lat);
    checks++;
    if (resp != AXI_RESP_SLVERR) begin failures++; $display("FAIL unmapped write resp"); end
    axi_read(8'h40, rd, resp);
    checks++;
    if (resp != AXI_RESP_SLVERR) begin failures++; $display("FAIL unmapped read resp"); end
    checks++;
    if (n_clear == 0) begin failures++; $display("FAIL doorbell never cleared completion"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
