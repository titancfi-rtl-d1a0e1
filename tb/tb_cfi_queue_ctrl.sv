// tb_cfi_queue_ctrl: exhaustive test of the queue controller. For every
// combination of hits and the full flag it models the commit stage (a port
// retires unless inhibited; port 1 only together with port 0) and checks
// the inhibit, push and select outputs against the rules: hold a CF
// instruction when the queue is full, hold port 1 when both ports carry one,
// push exactly the retiring CF instruction.
module tb_cfi_queue_ctrl;
  logic [1:0] hit, retire, wt;
  logic full, push, sel;
  int checks = 0, failures = 0;
  int n_dual = 0, n_full = 0;

  cfi_queue_ctrl dut (.hit_i(hit), .retire_i(retire), .full_i(full), .wait_o(wt), .push_o(push), .select_o(sel));

  initial begin
    for (int h = 0; h < 4; h++) begin
      for (int f = 0; f < 2; f++) begin
        logic [1:0] exp_wait, ack;
        logic exp_push, exp_sel;
        hit = 2'(h); full = f[0];
        retire = 2'b00;
        #1;
        // reference
        exp_wait[0] = hit[0] && full;
        exp_wait[1] = hit[1] && (full || hit[0]);
        checks++;
        if (wt !== exp_wait) begin
          failures++;
          $display("FAIL wait hit=%b full=%0d wait=%b exp=%b", hit, full, wt, exp_wait);
        end
        // commit stage reaction
        ack[0] = !wt[0];
        ack[1] = !wt[1] && ack[0];
        retire = hit & ack;
        #1;
        exp_push = (retire != 2'b00);
        exp_sel  = (retire == 2'b10);
        checks++;
        if (push !== exp_push || (exp_push && sel !== exp_sel)) begin
          failures++;
          $display("FAIL push hit=%b full=%0d push=%0d sel=%0d", hit, full, push, sel);
        end
        checks++;
        if (full && push) begin
          failures++;
          $display("FAIL push into full queue");
        end
        if (hit == 2'b11 && !full) n_dual++;
        if (full && hit != 0) n_full++;
      end
    end
    checks++;
    if (n_dual == 0 || n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
