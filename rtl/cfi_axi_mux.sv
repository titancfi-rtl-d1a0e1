// cfi_axi_mux: the part of the host-domain AXI crossbar that TitanCFI uses:
// two AXI masters - the core's CFI log writer (port 0) and the root of
// trust, reaching the host domain through its TileLink-to-AXI bridge
// (port 1) - share one slave, the CFI mailbox.
//
// Write and read channels are arbitrated independently, round robin when
// both masters ask in the same cycle. A master's address request is routed
// straight through in the cycle it is granted; once the slave accepts the
// address the channel stays locked to that master until its response (B for
// writes, the last R beat for reads) has been taken, so data and responses
// always return to the master that issued the address. Transactions are
// single beat. No state other than the locks and round-robin pointers.
//
// The paper's crossbar is an existing full AXI4 crossbar of the host SoC;
// only the routing needed between these two masters and the mailbox is
// given here, which is this design's simplification.
module cfi_axi_mux
  import cfi_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t mst_req_i [2],
  output axi_rsp_t mst_rsp_o [2],
  output axi_req_t slv_req_o,
  input  axi_rsp_t slv_rsp_i
);

  logic wr_lock_q, wr_sel_q, wr_prio_q, wr_sel;
  logic rd_lock_q, rd_sel_q, rd_prio_q, rd_sel;
  logic wr_req0, wr_req1, rd_req0, rd_req1;

  assign wr_req0 = mst_req_i[0].aw_valid;
  assign wr_req1 = mst_req_i[1].aw_valid;
  assign rd_req0 = mst_req_i[0].ar_valid;
  assign rd_req1 = mst_req_i[1].ar_valid;

  always_comb begin
    if (wr_lock_q)               wr_sel = wr_sel_q;
    else if (wr_req0 && wr_req1) wr_sel = wr_prio_q;
    else                         wr_sel = wr_req1;
    if (rd_lock_q)               rd_sel = rd_sel_q;
    else if (rd_req0 && rd_req1) rd_sel = rd_prio_q;
    else                         rd_sel = rd_req1;
  end

  always_comb begin
    slv_req_o = '0;
    // write address, data and response routing
    slv_req_o.aw_valid = mst_req_i[wr_sel].aw_valid && !(wr_lock_q);
    slv_req_o.aw_id    = mst_req_i[wr_sel].aw_id;
    slv_req_o.aw_addr  = mst_req_i[wr_sel].aw_addr;
    slv_req_o.w_valid  = mst_req_i[wr_sel].w_valid;
    slv_req_o.w_data   = mst_req_i[wr_sel].w_data;
    slv_req_o.w_strb   = mst_req_i[wr_sel].w_strb;
    slv_req_o.w_last   = mst_req_i[wr_sel].w_last;
    slv_req_o.b_ready  = mst_req_i[wr_sel].b_ready && wr_lock_q;
    // read address and data routing
    slv_req_o.ar_valid = mst_req_i[rd_sel].ar_valid && !(rd_lock_q);
    slv_req_o.ar_id    = mst_req_i[rd_sel].ar_id;
    slv_req_o.ar_addr  = mst_req_i[rd_sel].ar_addr;
    slv_req_o.r_ready  = mst_req_i[rd_sel].r_ready && rd_lock_q;

    for (int m = 0; m < 2; m++) begin
      mst_rsp_o[m] = '0;
      if (wr_sel == m[0]) begin
        mst_rsp_o[m].aw_ready = slv_rsp_i.aw_ready && !wr_lock_q;
        mst_rsp_o[m].w_ready  = slv_rsp_i.w_ready;
        mst_rsp_o[m].b_valid  = slv_rsp_i.b_valid && wr_lock_q;
        mst_rsp_o[m].b_id     = slv_rsp_i.b_id;
        mst_rsp_o[m].b_resp   = slv_rsp_i.b_resp;
      end
      if (rd_sel == m[0]) begin
        mst_rsp_o[m].ar_ready = slv_rsp_i.ar_ready && !rd_lock_q;
        mst_rsp_o[m].r_valid  = slv_rsp_i.r_valid && rd_lock_q;
        mst_rsp_o[m].r_id     = slv_rsp_i.r_id;
        mst_rsp_o[m].r_data   = slv_rsp_i.r_data;
        mst_rsp_o[m].r_resp   = slv_rsp_i.r_resp;
        mst_rsp_o[m].r_last   = slv_rsp_i.r_last;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_lock_q <= 1'b0; wr_sel_q <= 1'b0; wr_prio_q <= 1'b0;
      rd_lock_q <= 1'b0; rd_sel_q <= 1'b0; rd_prio_q <= 1'b0;
    end else begin
      if (!wr_lock_q && slv_req_o.aw_valid && slv_rsp_i.aw_ready) begin
        wr_lock_q <= 1'b1;
        wr_sel_q  <= wr_sel;
        wr_prio_q <= !wr_sel;
      end else if (wr_lock_q && slv_rsp_i.b_valid && slv_req_o.b_ready) begin
        wr_lock_q <= 1'b0;
      end
      if (!rd_lock_q && slv_req_o.ar_valid && slv_rsp_i.ar_ready) begin
        rd_lock_q <= 1'b1;
        rd_sel_q  <= rd_sel;
        rd_prio_q <= !rd_sel;
      end else if (rd_lock_q && slv_rsp_i.r_valid && slv_req_o.r_ready && slv_rsp_i.r_last) begin
        rd_lock_q <= 1'b0;
      end
    end
  end

endmodule
