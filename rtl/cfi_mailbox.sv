// cfi_mailbox: shared register file through which the host core's CFI
// stage hands one commit log at a time to the root of trust (RoT).
//
// Registers (64 bit, byte offsets from the mailbox base):
//   0x00-0x18  DATA0..DATA3  commit log, 64-bit chunks (chunk 0 = bits 63:0).
//                            The RoT writes its verdict into DATA0 (bit 0:
//                            1 = control-flow violation).
//   0x20       DOORBELL      bit 0 drives doorbell_o, the interrupt to the
//                            RoT. Writing 1 also clears COMPLETION, so a new
//                            request never sees the previous answer.
//   0x28       COMPLETION    bit 0 drives completion_o, wired straight to the
//                            CFI stage of the core (not to an interrupt
//                            controller).
// Any other offset answers SLVERR and reads as zero. Byte strobes are honoured.
//
// Bus: one AXI4 slave port taking single-beat transactions, used by both the
// core's log writer and the RoT (through the interconnect). A write is
// accepted when address and data are both valid and no response is pending;
// B follows one cycle later. A read answers one cycle after the address.
// Reset clears every register.
//
// The register roles (data registers sized for one commit log, doorbell to
// the RoT, completion to the commit stage, verdict in the first entry) follow
// the paper; offsets, bit positions and the clear-on-doorbell rule are this
// design's choices.
module cfi_mailbox
  import cfi_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output logic     doorbell_o,    // interrupt to the RoT (doorbell-cfi)
  output logic     completion_o   // check done, to the CFI stage (completion-cfi)
);

  localparam int unsigned NDATA = LOG_CHUNKS;

  logic [AXI_DATA_W-1:0] data_q [NDATA];
  logic                  doorbell_q, completion_q;

  logic                  b_valid_q, r_valid_q;
  logic [AXI_ID_W-1:0]   b_id_q, r_id_q;
  logic [1:0]            b_resp_q, r_resp_q;
  logic [AXI_DATA_W-1:0] r_data_q;

  logic wr_en, rd_en;
  assign wr_en = axi_req_i.aw_valid && axi_req_i.w_valid && !b_valid_q;
  assign rd_en = axi_req_i.ar_valid && !r_valid_q;

  logic [4:0] wr_idx, rd_idx;   // register index = offset / 8
  assign wr_idx = axi_req_i.aw_addr[7:3];
  assign rd_idx = axi_req_i.ar_addr[7:3];

  function automatic logic [AXI_DATA_W-1:0] merge(input logic [AXI_DATA_W-1:0] old,
                                                  input logic [AXI_DATA_W-1:0] wd,
                                                  input logic [AXI_STRB_W-1:0] strb);
    for (int b = 0; b < AXI_STRB_W; b++)
      merge[8*b +: 8] = strb[b] ? wd[8*b +: 8] : old[8*b +: 8];
  endfunction

  logic [AXI_DATA_W-1:0] rd_val;
  logic                  rd_ok, wr_ok;
  always_comb begin
    rd_val = '0;
    rd_ok  = 1'b1;
    if (rd_idx < 5'(NDATA))                               rd_val = data_q[rd_idx[1:0]];
    else if (rd_idx == 5'(MBOX_DOORBELL >> 3))            rd_val = {63'b0, doorbell_q};
    else if (rd_idx == 5'(MBOX_COMPLETION >> 3))          rd_val = {63'b0, completion_q};
    else                                                  rd_ok  = 1'b0;
    wr_ok = (wr_idx < 5'(MBOX_NREGS));
  end

  logic [AXI_DATA_W-1:0] wmerged_db, wmerged_cp;
  assign wmerged_db = merge({63'b0, doorbell_q},   axi_req_i.w_data, axi_req_i.w_strb);
  assign wmerged_cp = merge({63'b0, completion_q}, axi_req_i.w_data, axi_req_i.w_strb);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NDATA; i++) data_q[i] <= '0;
      doorbell_q   <= 1'b0;
      completion_q <= 1'b0;
      b_valid_q    <= 1'b0;
      b_id_q       <= '0;
      b_resp_q     <= AXI_RESP_OKAY;
      r_valid_q    <= 1'b0;
      r_id_q       <= '0;
      r_resp_q     <= AXI_RESP_OKAY;
      r_data_q     <= '0;
    end else begin
      // write channel
      if (b_valid_q && axi_req_i.b_ready) b_valid_q <= 1'b0;
      if (wr_en) begin
        b_valid_q <= 1'b1;
        b_id_q    <= axi_req_i.aw_id;
        b_resp_q  <= wr_ok ? AXI_RESP_OKAY : AXI_RESP_SLVERR;
        if (wr_idx < 5'(NDATA)) begin
          data_q[wr_idx[1:0]] <= merge(data_q[wr_idx[1:0]], axi_req_i.w_data, axi_req_i.w_strb);
        end else if (wr_idx == 5'(MBOX_DOORBELL >> 3)) begin
          doorbell_q <= wmerged_db[0];
          if (wmerged_db[0]) completion_q <= 1'b0;
        end else if (wr_idx == 5'(MBOX_COMPLETION >> 3)) begin
          completion_q <= wmerged_cp[0];
        end
      end
      // read channel
      if (r_valid_q && axi_req_i.r_ready) r_valid_q <= 1'b0;
      if (rd_en) begin
        r_valid_q <= 1'b1;
        r_id_q    <= axi_req_i.ar_id;
        r_data_q  <= rd_val;
        r_resp_q  <= rd_ok ? AXI_RESP_OKAY : AXI_RESP_SLVERR;
      end
    end
  end

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = wr_en;
    axi_rsp_o.w_ready  = wr_en;
    axi_rsp_o.b_valid  = b_valid_q;
    axi_rsp_o.b_id     = b_id_q;
    axi_rsp_o.b_resp   = b_resp_q;
    axi_rsp_o.ar_ready = rd_en;
    axi_rsp_o.r_valid  = r_valid_q;
    axi_rsp_o.r_id     = r_id_q;
    axi_rsp_o.r_data   = r_data_q;
    axi_rsp_o.r_resp   = r_resp_q;
    axi_rsp_o.r_last   = 1'b1;
  end

  assign doorbell_o   = doorbell_q;
  assign completion_o = completion_q;

endmodule
