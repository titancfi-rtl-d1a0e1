// cfi_pkg: types and constants shared by the control-flow-integrity (CFI)
// path between the host core's commit stage and the root-of-trust mailbox.
//
// * sb_entry_t   - the part of a retired scoreboard entry the CFI filters
//                  look at (one per commit port).
// * commit_log_t - the 224-bit record sent for one control-flow instruction:
//                  program counter, uncompressed encoding, next (fall-through)
//                  address and target address, 64+32+64+64 bits.
// * axi_req_t / axi_rsp_t - a single-beat subset of AXI4 (64-bit data) used
//                  by the log writer, the crossbar path and the mailbox.
// * mailbox register map (byte offsets of 64-bit registers).
//
// The field list of the commit log and the 224-bit size follow the paper's
// description; the order of the fields inside the packed struct, the
// scoreboard-entry fields, the AXI widths other than the 64-bit data bus and
// the register offsets are this design's choices.
package cfi_pkg;

  localparam int unsigned XLEN        = 64;   // CVA6 is RV64
  localparam int unsigned ILEN        = 32;   // uncompressed encoding
  localparam int unsigned LOG_W       = 224;  // commit log size in bits
  localparam int unsigned AXI_DATA_W  = 64;   // SoC interconnect data bus
  localparam int unsigned AXI_ADDR_W  = 64;
  localparam int unsigned AXI_ID_W    = 4;
  localparam int unsigned AXI_STRB_W  = AXI_DATA_W / 8;
  localparam int unsigned LOG_CHUNKS  = (LOG_W + AXI_DATA_W - 1) / AXI_DATA_W; // 4

  // Mailbox register offsets (64-bit registers, byte addresses).
  // DATA0..DATA3 hold the commit log chunks; DATA0 bit 0 also carries the
  // check result written back by the root of trust (1 = violation).
  localparam logic [7:0] MBOX_DATA0      = 8'h00;
  localparam logic [7:0] MBOX_DOORBELL   = 8'h20;
  localparam logic [7:0] MBOX_COMPLETION = 8'h28;
  localparam int unsigned MBOX_NREGS     = 6;

  // RISC-V opcodes and link registers used for classification.
  localparam logic [6:0] OPC_JAL  = 7'b1101111;
  localparam logic [6:0] OPC_JALR = 7'b1100111;

  // Retired scoreboard entry, as seen by a commit port.
  typedef struct packed {
    logic             valid;          // entry is at the head and ready to retire
    logic             ex_valid;       // entry carries an exception
    logic [XLEN-1:0]  pc;             // instruction address
    logic [ILEN-1:0]  instr;          // uncompressed encoding
    logic             is_compressed;  // original instruction was 16 bit
    logic [XLEN-1:0]  target;         // resolved address of the next executed instruction
  } sb_entry_t;

  // Commit log (224 bits). Bit 0 of the packed struct is bit 0 of chunk 0.
  typedef struct packed {
    logic [XLEN-1:0]  target;   // bits 223:160
    logic [XLEN-1:0]  next;     // bits 159:96
    logic [ILEN-1:0]  instr;    // bits  95:64
    logic [XLEN-1:0]  pc;       // bits  63:0
  } commit_log_t;

  typedef enum logic [1:0] {
    CF_NONE   = 2'd0,
    CF_CALL   = 2'd1,
    CF_RETURN = 2'd2,
    CF_JUMP   = 2'd3   // indirect jump that is neither call nor return
  } cf_kind_e;

  // Single-beat AXI4 request (master to slave).
  typedef struct packed {
    logic                  aw_valid;
    logic [AXI_ID_W-1:0]   aw_id;
    logic [AXI_ADDR_W-1:0] aw_addr;
    logic                  w_valid;
    logic [AXI_DATA_W-1:0] w_data;
    logic [AXI_STRB_W-1:0] w_strb;
    logic                  w_last;
    logic                  b_ready;
    logic                  ar_valid;
    logic [AXI_ID_W-1:0]   ar_id;
    logic [AXI_ADDR_W-1:0] ar_addr;
    logic                  r_ready;
  } axi_req_t;

  // Single-beat AXI4 response (slave to master).
  typedef struct packed {
    logic                  aw_ready;
    logic                  w_ready;
    logic                  b_valid;
    logic [AXI_ID_W-1:0]   b_id;
    logic [1:0]            b_resp;
    logic                  ar_ready;
    logic                  r_valid;
    logic [AXI_ID_W-1:0]   r_id;
    logic [AXI_DATA_W-1:0] r_data;
    logic [1:0]            r_resp;
    logic                  r_last;
  } axi_rsp_t;

  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

  // Classify an uncompressed RISC-V instruction following the standard
  // calling convention (link registers x1/ra and x5/t0).
  function automatic cf_kind_e classify(input logic [ILEN-1:0] instr);
    logic [4:0] rd, rs1;
    logic       rd_link, rs1_link;
    rd       = instr[11:7];
    rs1      = instr[19:15];
    rd_link  = (rd == 5'd1) || (rd == 5'd5);
    rs1_link = (rs1 == 5'd1) || (rs1 == 5'd5);
    classify = CF_NONE;
    if (instr[6:0] == OPC_JAL) begin
      if (rd_link) classify = CF_CALL;          // direct call
    end else if (instr[6:0] == OPC_JALR && instr[14:12] == 3'b000) begin
      if (rd_link)       classify = CF_CALL;    // indirect call
      else if (rs1_link) classify = CF_RETURN;  // return
      else               classify = CF_JUMP;    // other indirect jump
    end
  endfunction

endpackage
