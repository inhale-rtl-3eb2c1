// tb_sram_array: fills the 32x256 array with random rows through single-row writes, then
// raises one and two wordlines and compares BL/BLB sensing with AND / NOR of the stored
// copies; also checks that a write with no wordline raised changes nothing.
module tb_sram_array;
  localparam int ROWS = 32, COLS = 256;
  logic clk = 0;
  logic [ROWS-1:0] wl;
  logic wr_en;
  logic [COLS-1:0] wdata, bl_and, bl_nor;
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  sram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .wl, .wr_en, .wdata, .bl_and, .bl_nor);

  always #5 clk = ~clk;

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    wl = '0; wr_en = 0; wdata = '0;
    for (int r = 0; r < ROWS; r++) begin
      shadow[r] = rnd();
      @(negedge clk);
      wl = ROWS'(1) << r; wr_en = 1; wdata = shadow[r];
    end
    @(negedge clk);
    wr_en = 1; wl = '0; wdata = '0;          // no wordline: no write
    @(negedge clk);
    wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      wl = ROWS'(1) << r; #1;
      checks++;
      if (bl_and !== shadow[r] || bl_nor !== ~shadow[r]) begin
        failures++; $display("FAIL single row %0d", r);
      end
    end
    for (int it = 0; it < 200; it++) begin
      int a, b;
      a = $urandom_range(ROWS - 1);
      b = $urandom_range(ROWS - 1);
      wl = (ROWS'(1) << a) | (ROWS'(1) << b); #1;
      checks++;
      if (bl_and !== (shadow[a] & shadow[b]) || bl_nor !== ~(shadow[a] | shadow[b])) begin
        failures++; $display("FAIL rows %0d,%0d", a, b);
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
