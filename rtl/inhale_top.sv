// inhale_top: the Inhale-Opt in-SRAM SHA-3 engine.
//
// Two adjacent banks of four subarrays each. One subarray (the control subarray) holds
// the command program; the other N_SUB = 7 are computing subarrays of 32 rows x 256
// columns, each holding four Keccak-f[1600] States (one per 64-column Tile). The
// inter-bank controller reads the program and broadcasts each command to all seven
// computing subarrays, so 7 x 4 = 28 States are permuted at once. One Keccak round is
// the stored program; the controller replays it for all 24 rounds.
//
// Host side (plain ports, meant for the processor that owns the engine):
//   prog_we/prog_row/prog_wdata  write one 256-bit row (eight commands) of the program
//   data_we/data_re/data_sub/data_row/data_wdata/data_rdata
//                                write or read one 256-bit row of computing subarray
//                                data_sub; data_rdata is valid the cycle after data_re
//   start/prog_len/busy/done     run the 24-round permutation with prog_len commands
//                                per round; busy until the last write-back, then done
// Host writes are ignored while busy. Absorbing message blocks (XOR into the rate lanes)
// and reading the digest are host reads and writes of lane rows.
// The bank/subarray counts follow the paper's figure of two banks of four subarrays with
// one holding commands; the host port is this design's own.
module inhale_top
  import inhale_pkg::*;
#(
  parameter int unsigned N_SUB     = 7,
  parameter int unsigned SUB_ROWS  = 32,
  parameter int unsigned SUB_COLS  = 256,
  parameter int unsigned CTRL_ROWS = 256,
  parameter int unsigned CTRL_COLS = 256,
  parameter int unsigned N_RND     = inhale_pkg::N_ROUNDS,
  localparam int unsigned PC_W     = $clog2(CTRL_ROWS * (CTRL_COLS / CMD_W)) + 1,
  localparam int unsigned SUB_W    = (N_SUB > 1) ? $clog2(N_SUB) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // program loading
  input  logic                         prog_we,
  input  logic [$clog2(CTRL_ROWS)-1:0] prog_row,
  input  logic [CTRL_COLS-1:0]         prog_wdata,
  // run control
  input  logic                         start,
  input  logic [PC_W-1:0]              prog_len,
  output logic                         busy,
  output logic                         done,
  // State access
  input  logic                         data_we,
  input  logic                         data_re,
  input  logic [SUB_W-1:0]             data_sub,
  input  logic [$clog2(SUB_ROWS)-1:0]  data_row,
  input  logic [SUB_COLS-1:0]          data_wdata,
  output logic [SUB_COLS-1:0]          data_rdata
);
  logic                         cs_re;
  logic [$clog2(CTRL_ROWS)-1:0] cs_raddr;
  logic [CTRL_COLS-1:0]         cs_rdata;
  sub_cmd_t                     bcast;
  logic [N_SUB-1:0]             sub_ready;
  logic [SUB_COLS-1:0]          sub_rdata [N_SUB];
  logic [SUB_W-1:0]             rd_sel;

  control_subarray #(.ROWS(CTRL_ROWS), .COLS(CTRL_COLS)) u_ctrl_mem (
    .clk,
    .we   (prog_we && !busy),
    .waddr(prog_row),
    .wdata(prog_wdata),
    .re   (cs_re),
    .raddr(cs_raddr),
    .rdata(cs_rdata)
  );

  inter_bank_controller #(
    .CTRL_ROWS(CTRL_ROWS), .CTRL_COLS(CTRL_COLS), .N_RND(N_RND)
  ) u_ctrl (
    .clk, .rst_n, .start, .prog_len, .busy, .done,
    .cs_re, .cs_raddr, .cs_rdata,
    .sub_cmd  (bcast),
    .sub_ready(&sub_ready)
  );

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    compute_subarray #(.ROWS(SUB_ROWS), .COLS(SUB_COLS)) u_sub (
      .clk, .rst_n,
      .cmd       (bcast),
      .ready     (sub_ready[s]),
      .host_we   (data_we && !busy && int'(data_sub) == s),
      .host_re   (data_re && !busy && int'(data_sub) == s),
      .host_row  (data_row),
      .host_wdata(data_wdata),
      .host_rdata(sub_rdata[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_sel <= '0;
    else if (data_re) rd_sel <= data_sub;
  end

  assign data_rdata = sub_rdata[rd_sel];
endmodule
