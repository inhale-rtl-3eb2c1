// sa_logic: column sense logic of an Inhale subarray, one slice per bitline pair.
//
// Each column has one sense amplifier on BL, which reads 1 only when all activated cells
// hold 1 (AND), and one on BLB, which reads 1 only when all activated cells hold 0 (NOR).
// A NOR gate over those two outputs gives XOR of two activated cells: the result is 1
// exactly when the cells neither are both 1 nor both 0. With a single row raised, the
// NOR output is that row inverted, which is how the UNARY (NOT) command is done.
// Ports: bl_and, bl_nor (COLS bits, from the array), fn (sa_fn_e) selects the output.
// Combinational. The AND/NOR/XOR structure follows the paper; the fn select is this
// design's own way of choosing which value the write-back path takes.
module sa_logic
  import inhale_pkg::*;
#(
  parameter int unsigned COLS = 256
) (
  input  logic [COLS-1:0] bl_and,
  input  logic [COLS-1:0] bl_nor,
  input  sa_fn_e          fn,
  output logic [COLS-1:0] out
);
  logic [COLS-1:0] xor_v;

  // XOR = NOR(AND, NOR), one gate per column
  assign xor_v = ~(bl_and | bl_nor);

  always_comb begin
    unique case (fn)
      SA_AND:  out = bl_and;
      SA_NOR:  out = bl_nor;
      SA_XOR:  out = xor_v;
      default: out = bl_and;
    endcase
  end
endmodule
