// tb_barrel_shifter: every amount in both directions on random lanes, checked against
// bit-by-bit index arithmetic (left: bit z goes to z+n; right: to z-n, modulo 64).
module tb_barrel_shifter;
  localparam int W = 64;
  logic [W-1:0] din, dout, exp;
  logic [5:0]   amt;
  logic         dir_right;
  int checks = 0, failures = 0;

  barrel_shifter #(.W(W)) dut (.din, .amt, .dir_right, .dout);

  initial begin
    for (int it = 0; it < 8; it++) begin
      din = {$urandom(), $urandom()};
      for (int d = 0; d < 2; d++)
        for (int n = 0; n < W; n++) begin
          amt = 6'(n);
          dir_right = d[0];
          #1;
          for (int z = 0; z < W; z++)
            exp[(d == 0) ? (z + n) % W : (z - n + W) % W] = din[z];
          checks++;
          if (dout !== exp) begin
            failures++;
            $display("FAIL n=%0d dir=%0d din=%h dout=%h exp=%h", n, d, din, dout, exp);
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
