// tb_rot_fw_model: behavioural model of the root of trust running the
// return-address (shadow stack) policy, for testbenches only. It stands in
// for the Ibex core, its firmware and the TileLink-to-AXI bridge, and acts as
// an AXI master on the host interconnect.
//
// Per request it: waits for the doorbell (IRQ mode: the doorbell wire;
// POLLING mode: repeated AXI reads of the doorbell register), reads the four
// data registers, clears the doorbell, decodes the instruction (call:
// JAL/JALR writing x1/x5; return: JALR reading x1/x5; anything else is an
// indirect jump and passes), pushes the next address on a call, pops and
// compares with the target on a return, stalls so that the whole check
// takes check_cycles (default CHECK_CYCLES) cycles from the doorbell, writes the verdict (1 =
// violation) into data register 0 and sets completion. A return on an empty
// shadow stack is a violation. Received logs are kept in got_logs.
module tb_rot_fw_model
  import cfi_pkg::*;
#(
  parameter int unsigned           CHECK_CYCLES = 73,
  parameter bit                    POLLING      = 1'b0,
  parameter logic [AXI_ADDR_W-1:0] MBOX_BASE    = 64'h0000_0000_1040_0000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     doorbell_i,
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i
);

  commit_log_t got_logs[$];
  logic [63:0] shadow[$];
  int          n_checks = 0, n_violations = 0, n_polls = 0;
  int          max_depth = 0;
  int          cyc = 0;
  int          check_cycles = CHECK_CYCLES;  // may be changed between runs

  always @(posedge clk_i) cyc++;

  task automatic wr(input logic [7:0] off, input logic [63:0] d);
    @(negedge clk_i);
    axi_req_o.aw_valid = 1; axi_req_o.aw_addr = MBOX_BASE + 64'(off); axi_req_o.aw_id = 4'h2;
    axi_req_o.w_valid = 1; axi_req_o.w_data = d; axi_req_o.w_strb = '1; axi_req_o.w_last = 1;
    axi_req_o.b_ready = 1;
    do @(posedge clk_i); while (!axi_rsp_i.aw_ready);
    @(negedge clk_i);
    axi_req_o.aw_valid = 0; axi_req_o.w_valid = 0;
    while (!axi_rsp_i.b_valid) @(negedge clk_i);
    @(posedge clk_i);
    @(negedge clk_i);
    axi_req_o.b_ready = 0;
  endtask

  task automatic rd(input logic [7:0] off, output logic [63:0] d);
    @(negedge clk_i);
    axi_req_o.ar_valid = 1; axi_req_o.ar_addr = MBOX_BASE + 64'(off); axi_req_o.ar_id = 4'h2;
    axi_req_o.r_ready = 1;
    do @(posedge clk_i); while (!axi_rsp_i.ar_ready);
    @(negedge clk_i);
    axi_req_o.ar_valid = 0;
    while (!axi_rsp_i.r_valid) @(negedge clk_i);
    d = axi_rsp_i.r_data;
    @(posedge clk_i);
    @(negedge clk_i);
    axi_req_o.r_ready = 0;
  endtask

  function automatic logic is_link(input logic [4:0] r);
    return r == 5'd1 || r == 5'd5;
  endfunction

  initial begin
    logic [63:0] d [4];
    logic [63:0] db;
    logic [255:0] flat;
    commit_log_t lg;
    logic bad;
    int t0;
    axi_req_o = '0;
    wait (!rst_ni);
    wait (rst_ni);
    forever begin
      if (POLLING) begin
        db = 0;
        while (db[0] == 1'b0) begin
          rd(MBOX_DOORBELL, db);
          n_polls++;
        end
      end else begin
        while (!doorbell_i) @(posedge clk_i);
      end
      t0 = cyc;
      for (int k = 0; k < 4; k++) rd(8'(8 * k), d[k]);
      wr(MBOX_DOORBELL, 64'd0);
      flat = {d[3], d[2], d[1], d[0]};
      lg = flat[LOG_W-1:0];
      got_logs.push_back(lg);
      bad = 0;
      if (lg.instr[6:0] == 7'h6f || lg.instr[6:0] == 7'h67) begin
        if (is_link(lg.instr[11:7])) begin
          shadow.push_back(lg.next);
          if (shadow.size() > max_depth) max_depth = shadow.size();
        end else if (lg.instr[6:0] == 7'h67 && is_link(lg.instr[19:15])) begin
          if (shadow.size() == 0) bad = 1;
          else if (shadow.pop_back() != lg.target) bad = 1;
        end
      end
      while (cyc - t0 < check_cycles - 4) @(posedge clk_i);
      wr(MBOX_DATA0, {63'd0, bad});
      wr(MBOX_COMPLETION, 64'd1);
      n_checks++;
      if (bad) n_violations++;
    end
  end

endmodule
