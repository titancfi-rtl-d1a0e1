// tb_cfi_log_mux: self-checking test of the log selection: random logs on
// both inputs and random select, output compared with the chosen input.
module tb_cfi_log_mux;
  import cfi_pkg::*;
  commit_log_t l0, l1, lo;
  logic sel;
  int checks = 0, failures = 0;

  cfi_log_mux dut (.log0_i(l0), .log1_i(l1), .select_i(sel), .log_o(lo));

  initial begin
    repeat (2000) begin
      l0  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      l1  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      sel = $urandom_range(0, 1) != 0;
      #1;
      checks++;
      if (lo !== (sel ? l1 : l0)) begin
        failures++;
        $display("FAIL sel=%0d", sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
