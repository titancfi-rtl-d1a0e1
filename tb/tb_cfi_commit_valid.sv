// tb_cfi_commit_valid: exhaustive test of the V block for two commit ports:
// every combination of filter hits and commit acknowledges.
module tb_cfi_commit_valid;
  logic [1:0] hit, ack, retire;
  logic any;
  int checks = 0, failures = 0;

  cfi_commit_valid #(.NR_COMMIT_PORTS(2)) dut (.hit_i(hit), .ack_i(ack), .retire_o(retire), .any_o(any));

  initial begin
    for (int h = 0; h < 4; h++) begin
      for (int a = 0; a < 4; a++) begin
        logic [1:0] exp;
        hit = 2'(h); ack = 2'(a);
        for (int p = 0; p < 2; p++) exp[p] = (hit[p] == 1'b1) && (ack[p] == 1'b1);
        #1;
        checks++;
        if (retire !== exp || any !== (exp != 2'b00)) begin
          failures++;
          $display("FAIL hit=%b ack=%b retire=%b any=%b", hit, ack, retire, any);
        end
      end
    end
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
