// titancfi_top: the hardware TitanCFI adds to a RISC-V SoC with a
// root-of-trust (RoT), wired together.
//
//   commit ports --> cfi_stage (filters, queue, queue controller, log writer)
//                      |  AXI master 0
//   RoT (via TileLink-to-AXI bridge) --AXI master 1--> cfi_axi_mux --> cfi_mailbox
//                                                         doorbell_o --> RoT interrupt
//                      completion (mailbox) --> cfi_stage
//
// The host core (CVA6) and the RoT (OpenTitan with its Ibex core and the CFI
// firmware) are outside this module: the core's commit ports, acknowledges,
// inhibit and fault signals, and the RoT's AXI master port and doorbell
// interrupt are ports here. A control-flow instruction retired by the core is
// turned into a commit log, queued, written to the mailbox, and the doorbell
// wakes the RoT; the RoT reads the log, applies its policy (for example a
// shadow stack), writes its verdict into mailbox data register 0 and sets
// completion, after which the log writer reads the verdict and signals
// fault_o on a violation.
//
// Parameters default to the paper's configuration (queue depth 8); the
// mailbox base address is this design's choice.
module titancfi_top
  import cfi_pkg::*;
#(
  parameter int unsigned           QUEUE_DEPTH = 8,
  parameter logic [AXI_ADDR_W-1:0] MBOX_BASE   = 64'h0000_0000_1040_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // CVA6 commit stage
  input  sb_entry_t   commit_entry_i [2],
  input  logic [1:0]  commit_ack_i,
  output logic [1:0]  commit_wait_o,
  output logic        cfi_fault_o,
  output commit_log_t cfi_fault_log_o,
  // RoT side: AXI master port (through the TileLink-to-AXI bridge) and IRQ
  input  axi_req_t    rot_axi_req_i,
  output axi_rsp_t    rot_axi_rsp_o,
  output logic        doorbell_cfi_o,
  output logic        completion_cfi_o,
  // observation
  output logic        queue_full_o,
  output logic        queue_empty_o,
  output logic        writer_busy_o
);

  axi_req_t mst_req [2];
  axi_rsp_t mst_rsp [2];
  axi_req_t mbox_req;
  axi_rsp_t mbox_rsp;
  logic     completion;

  cfi_stage #(.QUEUE_DEPTH(QUEUE_DEPTH), .MBOX_BASE(MBOX_BASE)) u_cfi_stage (
    .clk_i, .rst_ni,
    .commit_entry_i, .commit_ack_i, .wait_o(commit_wait_o),
    .completion_i(completion),
    .axi_req_o(mst_req[0]), .axi_rsp_i(mst_rsp[0]),
    .fault_o(cfi_fault_o), .fault_log_o(cfi_fault_log_o),
    .queue_full_o, .queue_empty_o, .writer_busy_o
  );

  assign mst_req[1]    = rot_axi_req_i;
  assign rot_axi_rsp_o = mst_rsp[1];

  cfi_axi_mux u_xbar (
    .clk_i, .rst_ni,
    .mst_req_i(mst_req), .mst_rsp_o(mst_rsp),
    .slv_req_o(mbox_req), .slv_rsp_i(mbox_rsp)
  );

  cfi_mailbox u_mailbox (
    .clk_i, .rst_ni,
    .axi_req_i(mbox_req), .axi_rsp_o(mbox_rsp),
    .doorbell_o(doorbell_cfi_o), .completion_o(completion)
  );

  assign completion_cfi_o = completion;

endmodule
