// barrel_shifter: bidirectional rotator for one 64-bit lane.
//
// Performs the intra-lane rotations of Keccak: the 1-bit rotations of theta and the
// r(x,y)-bit rotations of rho. It is a crossbar barrel shifter: the amount is decoded
// into one-hot select lines RS[0..W-1], and output bit Y[j] is the OR over s of
// (RS[s] AND X[(j - s) mod W]), so each select line joins every input to the output s
// places above it. A right rotation by n is done as a left rotation by W - n.
// Ports: din (X), amt, dir_right; dout (Y). Combinational.
// dir_right = 0 moves bit z to bit z + amt, the rotation Keccak's rho uses.
// The 64-bit width and the crossbar form follow the paper; the direction encoding is
// this design's own.
module barrel_shifter #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0]         din,
  input  logic [$clog2(W)-1:0] amt,
  input  logic                 dir_right,
  output logic [W-1:0]         dout
);
  localparam int unsigned SW = $clog2(W);

  logic [SW-1:0] left_amt;
  logic [W-1:0]  rs;

  // a right rotation by n equals a left rotation by W - n (mod W)
  assign left_amt = dir_right ? SW'(W - int'(amt)) : amt;

  always_comb begin
    rs = '0;
    rs[left_amt] = 1'b1;
  end

  // crossing point (s, j) joins input X[(j - s) mod W] to output Y[j]
  for (genvar j = 0; j < W; j++) begin : g_col
    logic [W-1:0] x_at;
    for (genvar s = 0; s < W; s++) begin : g_row
      assign x_at[s] = din[(j - s + W) % W];
    end
    assign dout[j] = |(rs & x_at);
  end
endmodule
