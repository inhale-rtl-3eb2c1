// tb_inter_bank_controller: the controller with a real control subarray and a model of
// the computing subarrays' ready signal (busy for 4 / 2 / 1 cycles after XOR-AND-NOT /
// SHIFT / LOAD). Two runs:
//   1. the 157-command Keccak round program for 24 rounds: every broadcast command is
//      compared with the program word, with lane rows moved by the forward pi mapping
//      (the row holding A[x,y] holds lane (y, 2x+3y) next round) and with RC of the round
//      on LOAD; commands must follow each other with no idle cycle, so a round takes
//      exactly 565 cycles, and the lane map must be the identity again after 24 rounds.
//   2. a random 13-command program (rows not full) with random extra busy cycles, to
//      exercise the prefetch queue when the subarrays stall.
module tb_inter_bank_controller;
  import inhale_pkg::*;
  import keccak_ref_pkg::*;
  import inhale_prog_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [11:0] prog_len;
  logic busy, done;
  logic cs_re;
  logic [7:0] cs_raddr;
  logic [255:0] cs_rdata;
  logic prog_we = 0;
  logic [7:0] prog_row = 0;
  logic [255:0] prog_wdata = 0;
  sub_cmd_t sub_cmd;
  logic sub_ready;
  int rem = 0;
  bit stall_mode = 0;
  int checks = 0, failures = 0;
  int cyc = 0;

  control_subarray u_mem (.clk, .we(prog_we), .waddr(prog_row), .wdata(prog_wdata),
                          .re(cs_re), .raddr(cs_raddr), .rdata(cs_rdata));
  inter_bank_controller dut (.clk, .rst_n, .start, .prog_len, .busy, .done,
                             .cs_re, .cs_raddr, .cs_rdata, .sub_cmd, .sub_ready);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  assign sub_ready = (rem == 0);
  always @(posedge clk) begin
    if (sub_cmd.valid && sub_ready)
      rem <= ((sub_cmd.op == OP_SHIFT) ? 2 : (sub_cmd.op == OP_LOAD) ? 1 : 4) - 1
             + (stall_mode ? $urandom_range(3) : 0);
    else if (rem > 0) rem <= rem - 1;
  end

  // record the broadcast stream
  sub_cmd_t got [$];
  int       got_cyc [$];
  always @(posedge clk) if (sub_cmd.valid && sub_ready) begin
    got.push_back(sub_cmd);
    got_cyc.push_back(cyc);
  end

  cmd_t prog [256];

  task automatic load_prog(int n);
    for (int r = 0; r < (n + 7) / 8; r++) begin
      @(negedge clk);
      prog_we = 1; prog_row = 8'(r);
      for (int k = 0; k < 8; k++) prog_wdata[k*32 +: 32] = (r*8 + k < n) ? prog[r*8+k] : 32'hFFFF_FFFF;
    end
    @(negedge clk); prog_we = 0;
  endtask

  task automatic run_and_check(int n, bit check_timing);
    int unsigned m [25], nm [25];
    int idx, t0;
    got.delete(); got_cyc.delete();
    @(negedge clk);
    prog_len = 12'(n); start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    checks++;
    if (got.size() != n * 24) begin
      failures++; $display("FAIL issued %0d commands, expected %0d", got.size(), n * 24);
    end
    for (int i = 0; i < 25; i++) m[i] = i;
    idx = 0;
    for (int r = 0; r < 24; r++) begin
      for (int k = 0; k < n; k++) begin
        cmd_t c;
        sub_cmd_t e, g;
        c = prog[k];
        e = '0;
        e.valid = 1;
        e.dst  = (c.dst  < 25) ? 8'(m[c.dst])  : c.dst;
        e.src1 = (c.src1 < 25) ? 8'(m[c.src1]) : c.src1;
        e.sh_amt = c.src2[5:0];
        e.sh_right = c.src2[6];
        case (c.typ)
          CMD_LOAD:   begin e.op = OP_LOAD; e.rc = RC_REF[r]; end
          CMD_UNARY:  e.op = OP_NOT;
          CMD_SHIFT:  e.op = OP_SHIFT;
          default: begin
            e.op = c.is_and ? OP_AND : OP_XOR;
            e.src2 = (c.src2 < 25) ? 8'(m[c.src2]) : c.src2;
          end
        endcase
        if (idx < got.size()) begin
          g = got[idx];
          checks++;
          if (g !== e) begin
            failures++;
            if (failures < 10) $display("FAIL round %0d cmd %0d got %h exp %h", r, k, g, e);
          end
        end
        idx++;
      end
      for (int y = 0; y < 5; y++)
        for (int x = 0; x < 5; x++)
          nm[y + 5 * ((2 * x + 3 * y) % 5)] = m[x + 5 * y];
      m = nm;
    end
    checks++;
    for (int i = 0; i < 25; i++) if (m[i] != i) begin
      failures++; $display("FAIL lane map not identity after 24 rounds"); break;
    end
    if (check_timing) begin
      int exp_round;
      prog_t p;
      for (int k = 0; k < PROG_LEN; k++) p[k] = prog[k];
      exp_round = int'(round_cycles(p));
      checks++;
      if (exp_round != 565) begin failures++; $display("FAIL program round cycles %0d", exp_round); end
      for (int r = 0; r + 1 < 24; r++) begin
        checks++;
        if (got_cyc[(r+1)*n] - got_cyc[r*n] != exp_round) begin
          failures++;
          $display("FAIL round %0d took %0d cycles", r, got_cyc[(r+1)*n] - got_cyc[r*n]);
        end
      end
      checks++;
      if (got_cyc[0] - t0 > 3) begin failures++; $display("FAIL first issue after %0d", got_cyc[0]-t0); end
      $display("run: first command %0d cycles after start, %0d cycles start to done",
               got_cyc[0] - t0, cyc - t0);
    end
  endtask

  initial begin
    prog_t p;
    repeat (2) @(negedge clk);
    rst_n = 1;
    p = build_round_program();
    for (int k = 0; k < PROG_LEN; k++) prog[k] = p[k];
    load_prog(PROG_LEN);
    run_and_check(PROG_LEN, 1);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end

    stall_mode = 1;
    for (int k = 0; k < 13; k++) begin
      prog[k] = cmd_t'($urandom());
      prog[k].dst = 8'($urandom_range(30));
      prog[k].src1 = 8'($urandom_range(30));
      if (prog[k].typ == CMD_BINARY) prog[k].src2 = 8'($urandom_range(30));
      prog[k].rsvd = '0;
    end
    load_prog(13);
    run_and_check(13, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
