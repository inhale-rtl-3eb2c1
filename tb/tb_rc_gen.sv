// tb_rc_gen: compares all 24 round constants with the published FIPS 202 values.
module tb_rc_gen;
  import keccak_ref_pkg::*;
  logic [4:0]  round_idx;
  logic [63:0] rc;
  int checks = 0, failures = 0;

  rc_gen dut (.round_idx, .rc);

  initial begin
    for (int i = 0; i < 24; i++) begin
      round_idx = 5'(i); #1;
      checks++;
      if (rc !== RC_REF[i]) begin
        failures++; $display("FAIL RC[%0d]=%h exp %h", i, rc, RC_REF[i]);
      end
    end
    round_idx = 5'd30; #1;
    checks++;
    if (rc !== '0) begin failures++; $display("FAIL out-of-range index"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
