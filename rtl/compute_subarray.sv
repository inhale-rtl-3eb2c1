// compute_subarray: one computing subarray of Inhale-Opt.
//
// Holds TILES = COLS/64 Keccak States side by side: in each 64-column Tile, rows 0..24
// hold the 25 lanes (lane x+5y in row x+5y, lane bit z in column 64*tile + z) and the
// following rows are intermediate storage. Every command acts on whole rows, so all
// Tiles compute in parallel.
//
// Datapath: two row decoders raise up to two wordlines of the cell array; the column
// sense logic returns AND, NOR or XOR of the raised rows; a 64-bit barrel shifter per
// Tile can rotate a read lane; a result latch holds the value that the write-back cycle
// stores into the result row through decoder 1. Since the operands are sensed before the
// write-back, the result row may be one of the operands (in-place update).
//
// Command timing (cycles from acceptance to the next acceptance):
//   BINARY XOR/AND, UNARY NOT : T_SENSE sensing cycles + 1 write-back  (4 by default)
//   SHIFT                     : 1 read through the shifter + 1 write-back (2)
//   LOAD                      : 1 write-back of the round constant, copied to all Tiles
// `ready` is high when idle and during a write-back cycle, so commands issued back to
// back overlap the next command's first cycle with the previous write-back.
// Host port: while idle and no command arrives, host_we writes host_wdata into host_row
// and host_re reads host_row into host_rdata at the next edge (through decoder 1 and the
// AND sense path, as an ordinary read).
//
// From the paper: the array size, the lane-per-row layout with 6 intermediate rows, two
// decoders, the SA logic, a 64-bit shifter, the 3x-access bitline XOR, the 4-cycle
// XOR/NOT/AND and 2-cycle shift. This design's own: the one-shifter-per-Tile split, the
// ready handshake, the host port, and the one-cycle LOAD.
module compute_subarray
  import inhale_pkg::*;
#(
  parameter int unsigned ROWS    = 32,
  parameter int unsigned COLS    = 256,
  parameter int unsigned T_SENSE = inhale_pkg::SENSE_CYCLES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sub_cmd_t                cmd,
  output logic                    ready,
  input  logic                    host_we,
  input  logic                    host_re,
  input  logic [$clog2(ROWS)-1:0] host_row,
  input  logic [COLS-1:0]         host_wdata,
  output logic [COLS-1:0]         host_rdata
);
  localparam int unsigned AW    = $clog2(ROWS);
  localparam int unsigned TILES = COLS / LANE_W;

  typedef enum logic [1:0] {S_IDLE, S_SENSE, S_READ, S_WRITE} state_e;

  state_e          st;
  logic [3:0]      cnt;
  sub_op_e         op_q;
  logic [AW-1:0]   dst_q, src1_q, src2_q;
  logic [SH_AMT_W-1:0] amt_q;
  logic            right_q;
  logic [COLS-1:0] res_q;

  logic [AW-1:0]   a_addr, b_addr;
  logic            a_en, b_en;
  logic [ROWS-1:0] wl_a, wl_b, wl;
  logic            wr_en;
  logic [COLS-1:0] wdata;
  logic [COLS-1:0] bl_and, bl_nor, sa_out, sh_out;
  sa_fn_e          fn;
  logic            accept, host_idle;

  assign ready     = (st == S_IDLE) || (st == S_WRITE);
  assign accept    = cmd.valid && ready;
  assign host_idle = (st == S_IDLE) && !cmd.valid;

  // ---- decoder and write control ----
  always_comb begin
    a_addr = host_row;
    a_en   = 1'b0;
    b_addr = src2_q;
    b_en   = 1'b0;
    wr_en  = 1'b0;
    wdata  = res_q;
    fn     = SA_AND;
    unique case (st)
      S_IDLE: begin
        a_en  = host_idle && (host_we || host_re);
        wr_en = host_idle && host_we;
        wdata = host_wdata;
      end
      S_SENSE: begin
        a_addr = src1_q;
        a_en   = 1'b1;
        b_en   = (op_q == OP_XOR) || (op_q == OP_AND);
        fn     = (op_q == OP_XOR) ? SA_XOR : (op_q == OP_AND) ? SA_AND : SA_NOR;
      end
      S_READ: begin
        a_addr = src1_q;
        a_en   = 1'b1;
      end
      S_WRITE: begin
        a_addr = dst_q;
        a_en   = 1'b1;
        wr_en  = 1'b1;
      end
      default: ;
    endcase
  end

  row_decoder #(.AW(AW)) u_dec1 (.addr(a_addr), .en(a_en), .wl(wl_a));
  row_decoder #(.AW(AW)) u_dec2 (.addr(b_addr), .en(b_en), .wl(wl_b));
  assign wl = wl_a | wl_b;

  sram_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl, .wr_en, .wdata, .bl_and, .bl_nor
  );

  sa_logic #(.COLS(COLS)) u_sa (.bl_and, .bl_nor, .fn, .out(sa_out));

  for (genvar t = 0; t < TILES; t++) begin : g_shift
    barrel_shifter #(.W(LANE_W)) u_shift (
      .din      (sa_out[t*LANE_W +: LANE_W]),
      .amt      (amt_q),
      .dir_right(right_q),
      .dout     (sh_out[t*LANE_W +: LANE_W])
    );
  end

  // ---- command sequencing ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cnt     <= '0;
      op_q    <= OP_XOR;
      dst_q   <= '0;
      src1_q  <= '0;
      src2_q  <= '0;
      amt_q   <= '0;
      right_q <= 1'b0;
      res_q   <= '0;
    end else begin
      unique case (st)
        S_SENSE: begin
          if (int'(cnt) == T_SENSE - 1) begin
            res_q <= sa_out;
            st    <= S_WRITE;
          end
          cnt <= cnt + 4'd1;
        end
        S_READ: begin
          res_q <= sh_out;
          st    <= S_WRITE;
        end
        default: st <= S_IDLE;  // S_WRITE and S_IDLE, unless a command is accepted
      endcase
      if (accept) begin
        op_q    <= cmd.op;
        dst_q   <= cmd.dst[AW-1:0];
        src1_q  <= cmd.src1[AW-1:0];
        src2_q  <= cmd.src2[AW-1:0];
        amt_q   <= cmd.sh_amt;
        right_q <= cmd.sh_right;
        cnt     <= '0;
        unique case (cmd.op)
          OP_SHIFT: st <= S_READ;
          OP_LOAD: begin
            st    <= S_WRITE;
            res_q <= {TILES{cmd.rc}};
          end
          default:  st <= S_SENSE;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (host_idle && host_re) host_rdata <= bl_and;
  end

  // ---- rules of the command interface ----
  a_rows_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.valid |-> (int'(cmd.dst) < ROWS && int'(cmd.src1) < ROWS))
    else $error("compute_subarray: row index out of range");
  a_src2_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.valid && (cmd.op == OP_XOR || cmd.op == OP_AND)) |-> int'(cmd.src2) < ROWS)
    else $error("compute_subarray: second operand out of range");
  a_no_host_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (host_we || host_re) |-> (st == S_IDLE))
    else $error("compute_subarray: host access while a command runs");
endmodule
