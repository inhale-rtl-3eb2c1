// sram_array: the 6T SRAM cell array of an Inhale subarray, with bitline computing.
//
// ROWS x COLS cells. Any set of wordlines may be raised (in use: one or two). On every
// column the bitline BL stays high only if all activated cells hold 1, and the
// complementary bitline BLB only if all of them hold 0; the array presents these two
// sensed values as bl_and and bl_nor (combinational, from the current wordlines). A write
// (wr_en) stores wdata into every activated row at the clock edge; the subarray raises a
// single wordline for writes.
// Ports: clk, wl (ROWS), wr_en, wdata (COLS); bl_and, bl_nor (COLS).
// The analog sensing is written as its logical outcome. The cells have no reset, like
// an SRAM. Sizes default to the paper's 32x256 Inhale-Opt subarray.
module sram_array #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 256
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl,
  input  logic            wr_en,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] bl_and,
  output logic [COLS-1:0] bl_nor
);
  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      if (wr_en && wl[r]) cells[r] <= wdata;
  end

  // a non-activated row does not pull its bitlines
  always_comb begin
    bl_and = '1;
    bl_nor = '1;
    for (int r = 0; r < ROWS; r++) begin
      if (wl[r]) begin
        bl_and = bl_and & cells[r];
        bl_nor = bl_nor & ~cells[r];
      end
    end
  end
endmodule
