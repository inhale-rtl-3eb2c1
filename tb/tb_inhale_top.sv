// tb_inhale_top: end-to-end test of the Inhale-Opt engine at its default size (7
// computing subarrays x 4 Tiles = 28 States, 24 rounds), driven only through the host
// ports.
//   - loads the 157-command round program into the control subarray;
//   - Tile 0 of subarray 0 gets the padded empty message of SHA3-256, whose digest is
//     the published a7ffc6f8...434a; the other 27 Tiles get random States;
//   - runs Keccak-f[1600], reads all 25 lanes of every Tile back and compares them with
//     the software model (and the digest with the published value);
//   - absorbs a second random 1088-bit block into every State (read, XOR into the 17
//     rate lanes, write back) and runs again, as the sponge does for longer messages;
//   - checks the latency: 565 cycles per round, 24 x 565 + 3 from start to done.
// It counts each mechanism of the design seen on the broadcast bus and fails if one
// never occurs: two-row bitline XOR, bitline AND, single-row NOT, SHIFT in each use
// (theta 1-bit and rho), LOAD of the round constant, in-place result (result row = an
// operand row), LOAD followed by XOR with no gap, rounds run with a permuted lane map
// (implicit pi), and multi-block absorption.
module tb_inhale_top;
  import inhale_pkg::*;
  import keccak_ref_pkg::*;
  import inhale_prog_pkg::*;

  localparam int N_SUB = 7, TILES = 4;

  logic clk = 0, rst_n = 0;
  logic prog_we = 0;
  logic [7:0] prog_row = 0;
  logic [255:0] prog_wdata = 0;
  logic start = 0;
  logic [11:0] prog_len = 0;
  logic busy, done;
  logic data_we = 0, data_re = 0;
  logic [2:0] data_sub = 0;
  logic [4:0] data_row = 0;
  logic [255:0] data_wdata = 0, data_rdata;
  int checks = 0, failures = 0;
  int cyc = 0;

  inhale_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // ---- mechanism counters, from the broadcast bus ----
  int n_xor = 0, n_and = 0, n_not = 0, n_shift1 = 0, n_shift_rho = 0, n_load = 0;
  int n_inplace = 0, n_load_xor = 0, n_remap_rounds = 0, n_absorb = 0;
  bit last_was_load = 0;
  int last_issue = 0;
  sub_cmd_t bc;
  logic issue;
  assign bc = dut.bcast;
  assign issue = bc.valid && (&dut.sub_ready);
  always @(posedge clk) if (issue) begin
    case (bc.op)
      OP_XOR:   n_xor++;
      OP_AND:   n_and++;
      OP_NOT:   n_not++;
      OP_SHIFT: if (bc.sh_amt == 1 && bc.dst >= 25) n_shift1++; else n_shift_rho++;
      OP_LOAD:  n_load++;
      default: ;
    endcase
    if (bc.op != OP_LOAD && bc.dst == bc.src1) n_inplace++;
    if (last_was_load && bc.op == OP_XOR && cyc - last_issue == 1) n_load_xor++;
    last_was_load = (bc.op == OP_LOAD);
    last_issue = cyc;
  end
  // a round whose lane map is not the identity runs pi without moving data
  always @(posedge clk) if (issue && dut.u_ctrl.q[0].last_rnd) begin
    for (int i = 0; i < 25; i++)
      if (dut.u_ctrl.lmap[i] != 8'(i)) begin n_remap_rounds++; break; end
  end

  kstate_t st [N_SUB][TILES];

  task automatic write_states();
    for (int s = 0; s < N_SUB; s++)
      for (int l = 0; l < 25; l++) begin
        @(negedge clk);
        data_we = 1; data_sub = 3'(s); data_row = 5'(l);
        for (int t = 0; t < TILES; t++) data_wdata[t*64 +: 64] = st[s][t][l];
      end
    @(negedge clk); data_we = 0;
  endtask

  task automatic read_lane(int s, int l, output logic [255:0] v);
    @(negedge clk);
    data_re = 1; data_sub = 3'(s); data_row = 5'(l);
    @(negedge clk);
    data_re = 0;
    v = data_rdata;
  endtask

  task automatic run_perm();
    int t0;
    @(negedge clk);
    prog_len = 12'(PROG_LEN); start = 1;
    @(negedge clk); start = 0;
    t0 = cyc - 1;
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != 24 * 565 + 3 + 1) begin
      failures++; $display("FAIL permutation took %0d cycles", cyc - t0 - 1);
    end else $display("permutation: %0d cycles from start to done", cyc - t0 - 1);
  endtask

  task automatic check_states(string tag);
    logic [255:0] v;
    for (int s = 0; s < N_SUB; s++)
      for (int l = 0; l < 25; l++) begin
        read_lane(s, l, v);
        for (int t = 0; t < TILES; t++) begin
          checks++;
          if (v[t*64 +: 64] !== st[s][t][l]) begin
            failures++;
            if (failures < 10) $display("FAIL %s sub %0d tile %0d lane %0d got %h exp %h",
                                        tag, s, t, l, v[t*64 +: 64], st[s][t][l]);
          end
        end
      end
  endtask

  initial begin
    prog_t p;
    logic [255:0] v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    p = build_round_program();
    for (int r = 0; r < (PROG_LEN + 7) / 8; r++) begin
      @(negedge clk);
      prog_we = 1; prog_row = 8'(r); prog_wdata = '0;
      for (int k = 0; k < 8; k++) if (r*8 + k < PROG_LEN) prog_wdata[k*32 +: 32] = p[r*8+k];
    end
    @(negedge clk); prog_we = 0;

    for (int s = 0; s < N_SUB; s++)
      for (int t = 0; t < TILES; t++)
        for (int l = 0; l < 25; l++) st[s][t][l] = rand64();
    // SHA3-256 of the empty message: pad 0x06 ... 0x80 over the 136-byte rate
    st[0][0] = '0;
    st[0][0][0]  = 64'h06;
    st[0][0][16] = 64'h8000000000000000;
    write_states();
    run_perm();
    for (int s = 0; s < N_SUB; s++)
      for (int t = 0; t < TILES; t++) st[s][t] = keccak_f(st[s][t], 24);
    check_states("block 1");
    // digest of the empty message, bytes in lane order, little-endian within a lane
    checks++;
    if ({st[0][0][0], st[0][0][1], st[0][0][2], st[0][0][3]} !==
        {64'h66d71ebff8c6ffa7, 64'h62d661a05647c151, 64'hfa493be44dff80f5, 64'h4a43f8804b0ad882}) begin
      failures++; $display("FAIL SHA3-256 of the empty message");
    end

    // second block: absorb through the host, permute again
    for (int s = 0; s < N_SUB; s++)
      for (int l = 0; l < RATE_LANES; l++) begin
        logic [255:0] blk;
        read_lane(s, l, v);
        for (int t = 0; t < TILES; t++) begin
          blk[t*64 +: 64] = rand64();
          st[s][t][l] = st[s][t][l] ^ blk[t*64 +: 64];
        end
        @(negedge clk);
        data_we = 1; data_sub = 3'(s); data_row = 5'(l); data_wdata = v ^ blk;
        @(negedge clk); data_we = 0;
      end
    n_absorb++;
    run_perm();
    for (int s = 0; s < N_SUB; s++)
      for (int t = 0; t < TILES; t++) st[s][t] = keccak_f(st[s][t], 24);
    check_states("block 2");

    $display("mechanisms: xor=%0d and=%0d not=%0d shift1=%0d shift_rho=%0d load=%0d inplace=%0d load_xor=%0d remap_rounds=%0d absorb=%0d",
             n_xor, n_and, n_not, n_shift1, n_shift_rho, n_load, n_inplace, n_load_xor,
             n_remap_rounds, n_absorb);
    checks++;
    if (n_xor == 0 || n_and == 0 || n_not == 0 || n_shift1 == 0 || n_shift_rho == 0 ||
        n_load == 0 || n_inplace == 0 || n_load_xor == 0 || n_remap_rounds == 0 || n_absorb == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
