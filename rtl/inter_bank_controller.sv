// inter_bank_controller: the in-situ controller of Inhale.
//
// Replays the command program held in the control subarray N_ROUNDS times (one Keccak
// round per pass) and broadcasts every command to all computing subarrays, which execute
// it in lockstep.
//
// Fetch: commands are read ahead of use. A fetch reads the control row holding command
// fpc (eight commands per row) and, one cycle later, pushes the selected 32-bit word into
// a two-entry queue, tagged with its round and with end-of-round / end-of-run flags. The
// fetch is issued whenever the queue would still have room, counting the entry leaving
// in the same cycle, so the queue can feed one command per cycle and a one-cycle LOAD
// followed by a four-cycle XOR never waits.
//
// Issue: when every subarray is ready, the queue head is decoded (Fig. 3(g) layout, see
// inhale_pkg::cmd_t) and broadcast. Row fields below N_LANES name lanes (x + 5y) and are
// translated to physical rows through the lane map; other row fields are used as they
// are. LOAD carries the round's constant from rc_gen.
//
// Implicit pi: the program's chi step reads B[x,y] = A[(x+3y) mod 5, x] by naming that
// lane and writes the chi result back into the row it read B[x,y] from. Lane (x,y) of
// the next round therefore lives where lane pi_src(x,y) lived, and after the last
// command of each round the map is updated to map'[x+5y] = map[pi_src(x,y)]. No data
// moves for pi. Pi permutes the 24 lanes other than (0,0) in one cycle of length 24, so
// after 24 rounds the map is the identity again and the States are back in order.
//
// Interface: start (one cycle, while idle) with prog_len = commands per round; busy is
// high from start until the last command's write-back; done is high from then until the
// next start. cs_re/cs_raddr/cs_rdata read the control subarray (one-cycle latency).
// From the paper: the command format and kinds, broadcasting from the control subarray,
// pi done by row selection, prefetching. This design's own: the lane map register, the
// two-entry queue, replaying one round's program per round.
module inter_bank_controller
  import inhale_pkg::*;
#(
  parameter int unsigned CTRL_ROWS = 256,
  parameter int unsigned CTRL_COLS = 256,
  parameter int unsigned N_RND     = inhale_pkg::N_ROUNDS,
  localparam int unsigned WPR      = CTRL_COLS / CMD_W,            // commands per row
  localparam int unsigned PC_W     = $clog2(CTRL_ROWS * WPR) + 1   // holds the program length
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [PC_W-1:0]         prog_len,
  output logic                    busy,
  output logic                    done,
  output logic                    cs_re,
  output logic [$clog2(CTRL_ROWS)-1:0] cs_raddr,
  input  logic [CTRL_COLS-1:0]    cs_rdata,
  output sub_cmd_t                sub_cmd,
  input  logic                    sub_ready
);
  localparam int unsigned WS_W = $clog2(WPR);

  typedef struct packed {
    cmd_t        c;
    logic [4:0]  rnd;
    logic        last_rnd;  // last command of a round
    logic        last_all;  // last command of the run
  } qent_t;

  // ---- fetch state ----
  logic            fetching;
  logic [PC_W-1:0] fpc;
  logic [4:0]      fround;
  logic            infl;        // a row read is returning this cycle
  logic [WS_W-1:0] infl_ws;
  logic [4:0]      infl_rnd;
  logic            infl_lr, infl_la;

  // ---- queue ----
  qent_t      q [2];
  logic [1:0] q_cnt;
  logic       push, pop;
  qent_t      push_ent;

  // ---- issue state ----
  logic             running, draining;
  logic [IDX_W-1:0] lmap [N_LANES];
  logic [LANE_W-1:0] rc;

  logic fetch_go, f_last_rnd, f_last_all;

  assign f_last_rnd = (fpc == prog_len - 1'b1);
  assign f_last_all = f_last_rnd && (int'(fround) == N_RND - 1);
  assign pop        = running && (q_cnt != 2'd0) && sub_ready;
  assign fetch_go   = fetching && ((int'(q_cnt) - int'(pop) + int'(infl)) < 2);

  assign cs_re    = fetch_go;
  assign cs_raddr = $clog2(CTRL_ROWS)'(fpc >> WS_W);

  always_comb begin
    push_ent.c        = cmd_t'(cs_rdata[int'(infl_ws)*CMD_W +: CMD_W]);
    push_ent.rnd      = infl_rnd;
    push_ent.last_rnd = infl_lr;
    push_ent.last_all = infl_la;
  end
  assign push = infl;

  // ---- fetch ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetching <= 1'b0;
      fpc      <= '0;
      fround   <= '0;
      infl     <= 1'b0;
      infl_ws  <= '0;
      infl_rnd <= '0;
      infl_lr  <= 1'b0;
      infl_la  <= 1'b0;
    end else begin
      infl <= fetch_go;
      if (start && !busy) begin
        fetching <= 1'b1;
        fpc      <= '0;
        fround   <= '0;
      end else if (fetch_go) begin
        infl_ws  <= WS_W'(fpc);
        infl_rnd <= fround;
        infl_lr  <= f_last_rnd;
        infl_la  <= f_last_all;
        if (f_last_rnd) begin
          fpc    <= '0;
          fround <= fround + 5'd1;
        end else begin
          fpc <= fpc + 1'b1;
        end
        if (f_last_all) fetching <= 1'b0;
      end
    end
  end

  // ---- queue ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0;
      q[0]  <= '0;
      q[1]  <= '0;
    end else if (start && !busy) begin
      q_cnt <= '0;
    end else begin
      unique case ({push, pop})
        2'b10: begin
          q[q_cnt[0]] <= push_ent;
          q_cnt       <= q_cnt + 2'd1;
        end
        2'b01: begin
          q[0]  <= q[1];
          q_cnt <= q_cnt - 2'd1;
        end
        2'b11: begin
          if (q_cnt == 2'd1) q[0] <= push_ent;
          else begin
            q[0] <= q[1];
            q[1] <= push_ent;
          end
        end
        default: ;
      endcase
    end
  end

  // ---- decode and broadcast ----
  rc_gen #(.N_RC(N_RND)) u_rc (.round_idx(q[0].rnd), .rc);

  function automatic logic [IDX_W-1:0] xlate(logic [IDX_W-1:0] idx,
                                             logic [IDX_W-1:0] m [N_LANES]);
    if (int'(idx) < N_LANES) return m[idx[4:0]];
    return idx;
  endfunction

  always_comb begin
    cmd_t c;
    c = q[0].c;
    sub_cmd          = '0;
    sub_cmd.valid    = running && (q_cnt != 2'd0);
    sub_cmd.dst      = xlate(c.dst, lmap);
    sub_cmd.src1     = xlate(c.src1, lmap);
    sub_cmd.sh_amt   = c.src2[SH_AMT_W-1:0];
    sub_cmd.sh_right = c.src2[SH_DIR_BIT];
    unique case (c.typ)
      CMD_LOAD: begin
        sub_cmd.op = OP_LOAD;
        sub_cmd.rc = rc;
      end
      CMD_UNARY:  sub_cmd.op = OP_NOT;
      CMD_SHIFT:  sub_cmd.op = OP_SHIFT;
      CMD_BINARY: begin
        sub_cmd.op   = c.is_and ? OP_AND : OP_XOR;
        sub_cmd.src2 = xlate(c.src2, lmap);
      end
      default: ;
    endcase
  end

  // ---- run control and lane map ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      draining <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      for (int i = 0; i < N_LANES; i++) lmap[i] <= IDX_W'(i);
    end else if (start && !busy) begin
      running  <= 1'b1;
      draining <= 1'b0;
      busy     <= 1'b1;
      done     <= 1'b0;
      for (int i = 0; i < N_LANES; i++) lmap[i] <= IDX_W'(i);
    end else begin
      if (pop) begin
        if (q[0].last_rnd)
          for (int y = 0; y < 5; y++)
            for (int x = 0; x < 5; x++)
              lmap[lane_idx(x, y)] <= lmap[pi_src(x, y)];
        if (q[0].last_all) begin
          running  <= 1'b0;
          draining <= 1'b1;
        end
      end
      if (draining && sub_ready) begin
        draining <= 1'b0;
        busy     <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  // ---- rules ----
  a_nonempty_prog: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> prog_len != '0)
    else $error("inter_bank_controller: start with an empty program");
  a_queue_bound: assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= 2'd2)
    else $error("inter_bank_controller: queue overflow");
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(push && q_cnt == 2'd2 && !pop))
    else $error("inter_bank_controller: push into a full queue");
endmodule
