// tb_compute_subarray: fills the 32x256 subarray through the host port, then streams 400
// random broadcast commands back to back (XOR, AND, NOT, SHIFT either way, LOAD; result
// row often equal to an operand) and checks
//   - the number of cycles each command occupies: 4 for XOR/AND/NOT, 2 for SHIFT, 1 for LOAD;
//   - every row, read back through the host port, against a row-level model of the
//     commands applied in order (each 64-bit Tile rotated on its own).
module tb_compute_subarray;
  import inhale_pkg::*;
  localparam int ROWS = 32, COLS = 256, TILES = COLS / 64;
  logic clk = 0, rst_n = 0;
  sub_cmd_t cmd;
  logic ready;
  logic host_we = 0, host_re = 0;
  logic [4:0] host_row = 0;
  logic [COLS-1:0] host_wdata = 0, host_rdata;
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;
  int cyc = 0;

  compute_subarray #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .cmd, .ready, .host_we, .host_re, .host_row, .host_wdata, .host_rdata
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom();
    return v;
  endfunction

  function automatic logic [63:0] rot(logic [63:0] v, int n, bit right);
    logic [63:0] o;
    for (int z = 0; z < 64; z++) o[right ? (z - n + 64) % 64 : (z + n) % 64] = v[z];
    return o;
  endfunction

  function automatic int dur(sub_op_e op);
    case (op)
      OP_SHIFT: return 2;
      OP_LOAD:  return 1;
      default:  return 4;
    endcase
  endfunction

  task automatic apply(sub_cmd_t c);
    logic [COLS-1:0] r;
    case (c.op)
      OP_XOR: r = shadow[c.src1] ^ shadow[c.src2];
      OP_AND: r = shadow[c.src1] & shadow[c.src2];
      OP_NOT: r = ~shadow[c.src1];
      OP_SHIFT: for (int t = 0; t < TILES; t++)
                  r[t*64 +: 64] = rot(shadow[c.src1][t*64 +: 64], int'(c.sh_amt), c.sh_right);
      default: r = {TILES{c.rc}};
    endcase
    shadow[c.dst] = r;
  endtask

  task automatic read_all_and_check(string tag);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      host_re = 1; host_row = 5'(r);
      @(negedge clk);
      host_re = 0;
      checks++;
      if (host_rdata !== shadow[r]) begin
        failures++; $display("FAIL %s row %0d", tag, r);
      end
    end
  endtask

  sub_cmd_t cmds [400];
  int acc_cyc [400];

  initial begin
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      shadow[r] = rnd();
      @(negedge clk);
      host_we = 1; host_row = 5'(r); host_wdata = shadow[r];
    end
    @(negedge clk); host_we = 0;
    read_all_and_check("load");

    for (int i = 0; i < 400; i++) begin
      sub_cmd_t c;
      c = '0;
      c.valid = 1;
      c.op = sub_op_e'($urandom_range(4));
      c.dst  = 8'($urandom_range(ROWS - 1));
      c.src1 = ($urandom_range(2) == 0) ? c.dst : 8'($urandom_range(ROWS - 1));
      c.src2 = 8'($urandom_range(ROWS - 1));
      c.sh_amt = 6'($urandom());
      c.sh_right = 1'($urandom());
      c.rc = {$urandom(), $urandom()};
      cmds[i] = c;
    end
    // stream back to back
    for (int i = 0; i < 400; i++) begin
      cmd = cmds[i];
      @(posedge clk);
      while (!ready) @(posedge clk);
      acc_cyc[i] = cyc;
      apply(cmds[i]);
      @(negedge clk);
    end
    cmd = '0;
    @(negedge clk);
    while (!ready) @(negedge clk);
    @(negedge clk);
    for (int i = 1; i < 400; i++) begin
      checks++;
      if (acc_cyc[i] - acc_cyc[i-1] != dur(cmds[i-1].op)) begin
        failures++;
        $display("FAIL timing cmd %0d op %s took %0d", i - 1, cmds[i-1].op.name(),
                 acc_cyc[i] - acc_cyc[i-1]);
      end
    end
    read_all_and_check("after commands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
