// tb_row_decoder: exhaustive check of the 5:32 row decoder, enabled and disabled.
module tb_row_decoder;
  logic [4:0]  addr;
  logic        en;
  logic [31:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.AW(5)) dut (.addr, .en, .wl);

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 32; a++) begin
        logic [31:0] exp;
        addr = 5'(a);
        en   = e[0];
        #1;
        exp = (e == 1) ? (32'd1 << a) : 32'd0;
        checks++;
        if (wl !== exp) begin
          failures++;
          $display("FAIL addr=%0d en=%0d wl=%h exp=%h", a, e, wl, exp);
        end
      end
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
