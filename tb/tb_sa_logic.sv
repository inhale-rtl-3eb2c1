// tb_sa_logic: drives the sense logic with the bitline values of two random rows A and B
// (BL = A AND B, BLB = NOR) and of one row, and checks AND, NOR and XOR per column.
module tb_sa_logic;
  import inhale_pkg::*;
  localparam int COLS = 256;
  logic [COLS-1:0] bl_and, bl_nor, out, a, b;
  sa_fn_e fn;
  int checks = 0, failures = 0;

  sa_logic #(.COLS(COLS)) dut (.bl_and, .bl_nor, .fn, .out);

  task automatic check(logic [COLS-1:0] exp, string what);
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int it = 0; it < 50; it++) begin
      for (int w = 0; w < COLS / 32; w++) begin
        a[w*32 +: 32] = $urandom();
        b[w*32 +: 32] = $urandom();
      end
      // two rows raised
      for (int c = 0; c < COLS; c++) begin
        bl_and[c] = a[c] && b[c];
        bl_nor[c] = !a[c] && !b[c];
      end
      fn = SA_AND; #1; check(a & b, "AND");
      fn = SA_NOR; #1; check(~(a | b), "NOR");
      fn = SA_XOR; #1; check(a ^ b, "XOR");
      // one row raised: NOR is NOT, XOR with itself is 0
      bl_and = a;
      bl_nor = ~a;
      fn = SA_NOR; #1; check(~a, "NOT");
      fn = SA_AND; #1; check(a, "READ");
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
