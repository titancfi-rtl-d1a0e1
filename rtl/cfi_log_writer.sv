// cfi_log_writer: moves commit logs from the CFI queue to the CFI mailbox
// and brings the root of trust's verdict back to the core.
//
// Finite state machine, one log at a time:
//   IDLE       wait until the queue holds a log; pop it into a local register.
//   WRITE      write the log to the mailbox data registers in LOG_CHUNKS
//              (= 4) single-beat 64-bit AXI writes, chunk k to address
//              MBOX_BASE + 8*k. Chunk 3 carries the upper 32 bits of the
//              224-bit log in its low half and zeros above.
//   DOORBELL   a final AXI write of 1 to the doorbell register, which
//              interrupts the root of trust.
//   WAIT       wait for the mailbox completion signal (completion_i).
//   READ       one AXI read of data register 0; bit 0 is the verdict.
//   then fault_o pulses for one cycle if the verdict reports a violation,
//   and the machine returns to IDLE.
// Every AXI write waits for its B response before the next one starts
// (aw and w are offered together). busy_o is high outside IDLE.
//
// Timing without back-pressure: each write takes 2 cycles (address/data
// handshake, then response), so the doorbell write is accepted 9 clock
// edges after the edge at which the log is popped; after completion the
// verdict read takes 2 cycles and fault_o follows one cycle later.
//
// The FSM sequence (pop, chunked 64-bit writes, doorbell as the final
// write, wait for completion, read verdict, fault) follows the paper. The
// register addresses, the separate doorbell write, the single-beat
// transactions and the verdict encoding are this design's choices. The
// "mailbox ready" condition of the paper is met by construction: the FSM
// only returns to IDLE after the previous check completed.
module cfi_log_writer
  import cfi_pkg::*;
#(
  parameter logic [AXI_ADDR_W-1:0] MBOX_BASE = 64'h0000_0000_1040_0000,
  parameter logic [AXI_ID_W-1:0]   AXI_ID    = '0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // CFI queue side
  input  logic        empty_i,
  input  commit_log_t log_i,
  output logic        pop_o,
  // mailbox completion (root of trust finished the check)
  input  logic        completion_i,
  // AXI master port
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i,
  // to the core
  output logic        fault_o,     // one-cycle pulse: violation detected
  output commit_log_t fault_log_o, // log of the instruction that failed
  output logic        busy_o
);

  typedef enum logic [2:0] {
    S_IDLE, S_WR_REQ, S_WR_RESP, S_WAIT, S_RD_REQ, S_RD_RESP
  } state_e;

  // write index: 0..LOG_CHUNKS-1 are data chunks, LOG_CHUNKS is the doorbell
  localparam int unsigned IDX_W = $clog2(LOG_CHUNKS + 1);

  state_e               state_q, state_d;
  commit_log_t          log_q;
  logic [IDX_W-1:0]     idx_q;
  logic                 aw_done_q, w_done_q;
  logic                 fault_q;
  logic [LOG_CHUNKS*AXI_DATA_W-1:0] log_padded;

  assign log_padded = {{(LOG_CHUNKS*AXI_DATA_W-LOG_W){1'b0}}, log_q};

  logic [AXI_DATA_W-1:0] wdata;
  logic [AXI_ADDR_W-1:0] waddr;
  always_comb begin
    if (idx_q == IDX_W'(LOG_CHUNKS)) begin
      waddr = MBOX_BASE + AXI_ADDR_W'(MBOX_DOORBELL);
      wdata = 64'd1;
    end else begin
      waddr = MBOX_BASE + AXI_ADDR_W'({idx_q, 3'b000});
      wdata = log_padded[idx_q*AXI_DATA_W +: AXI_DATA_W];
    end
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.aw_id    = AXI_ID;
    axi_req_o.ar_id    = AXI_ID;
    axi_req_o.aw_addr  = waddr;
    axi_req_o.w_data   = wdata;
    axi_req_o.w_strb   = '1;
    axi_req_o.w_last   = 1'b1;
    axi_req_o.ar_addr  = MBOX_BASE + AXI_ADDR_W'(MBOX_DATA0);
    axi_req_o.aw_valid = (state_q == S_WR_REQ) && !aw_done_q;
    axi_req_o.w_valid  = (state_q == S_WR_REQ) && !w_done_q;
    axi_req_o.b_ready  = (state_q == S_WR_RESP);
    axi_req_o.ar_valid = (state_q == S_RD_REQ);
    axi_req_o.r_ready  = (state_q == S_RD_RESP);
  end

  logic aw_hs, w_hs;
  assign aw_hs = axi_req_o.aw_valid && axi_rsp_i.aw_ready;
  assign w_hs  = axi_req_o.w_valid  && axi_rsp_i.w_ready;

  assign pop_o = (state_q == S_IDLE) && !empty_i;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_IDLE:    if (!empty_i) state_d = S_WR_REQ;
      S_WR_REQ:  if ((aw_done_q || aw_hs) && (w_done_q || w_hs)) state_d = S_WR_RESP;
      S_WR_RESP: if (axi_rsp_i.b_valid) begin
                   if (idx_q == IDX_W'(LOG_CHUNKS)) state_d = S_WAIT;
                   else                             state_d = S_WR_REQ;
                 end
      S_WAIT:    if (completion_i) state_d = S_RD_REQ;
      S_RD_REQ:  if (axi_rsp_i.ar_ready) state_d = S_RD_RESP;
      S_RD_RESP: if (axi_rsp_i.r_valid) state_d = S_IDLE;
      default:   state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      log_q     <= '0;
      idx_q     <= '0;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
      fault_q   <= 1'b0;
    end else begin
      state_q <= state_d;
      fault_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (!empty_i) begin
          log_q <= log_i;
          idx_q <= '0;
        end
        S_WR_REQ: begin
          if (state_d == S_WR_RESP) begin
            aw_done_q <= 1'b0;
            w_done_q  <= 1'b0;
          end else begin
            if (aw_hs) aw_done_q <= 1'b1;
            if (w_hs)  w_done_q  <= 1'b1;
          end
        end
        S_WR_RESP: if (axi_rsp_i.b_valid) idx_q <= idx_q + 1'b1;
        S_RD_RESP: if (axi_rsp_i.r_valid) fault_q <= axi_rsp_i.r_data[0];
        default: ;
      endcase
    end
  end

  assign fault_o     = fault_q;
  assign fault_log_o = log_q;
  assign busy_o      = (state_q != S_IDLE);

  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_o.aw_valid && !axi_rsp_i.aw_ready |=> axi_req_o.aw_valid && $stable(axi_req_o.aw_addr));
  a_w_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_o.w_valid && !axi_rsp_i.w_ready |=> axi_req_o.w_valid && $stable(axi_req_o.w_data));

endmodule
