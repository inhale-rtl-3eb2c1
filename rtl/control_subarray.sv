// control_subarray: the subarray that holds the pre-generated command program.
//
// A ROWS x COLS SRAM (256 x 256 by default); each row holds COLS/32 = 8 commands of 32
// bits, command k of a row in bits [32k+31:32k]. The host writes whole rows (we, waddr,
// wdata); the inter-bank controller reads one row per request (re, raddr) and gets it on
// rdata one clock later, held until the next read. A write and a read may share a cycle.
// The 256 x 256 size follows the paper; the single read and write port and the one-cycle
// read latency are this design's choices.
module control_subarray #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [COLS-1:0]         wdata,
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output logic [COLS-1:0]         rdata
);
  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
