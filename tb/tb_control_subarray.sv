// tb_control_subarray: writes every row of the 256x256 command store, reads them back in
// random order with the one-cycle latency, and checks a read is held while re is low.
module tb_control_subarray;
  localparam int ROWS = 256, COLS = 256;
  logic clk = 0;
  logic we, re;
  logic [7:0] waddr, raddr;
  logic [COLS-1:0] wdata, rdata;
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  control_subarray #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++) begin
      for (int w = 0; w < COLS / 32; w++) shadow[r][w*32 +: 32] = $urandom();
      @(negedge clk);
      we = 1; waddr = 8'(r); wdata = shadow[r];
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 300; it++) begin
      int r;
      r = $urandom_range(ROWS - 1);
      re = 1; raddr = 8'(r);
      @(negedge clk);
      re = 0; raddr = 8'($urandom());
      checks++;
      if (rdata !== shadow[r]) begin failures++; $display("FAIL row %0d", r); end
      @(negedge clk);
      checks++;
      if (rdata !== shadow[r]) begin failures++; $display("FAIL hold row %0d", r); end
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
