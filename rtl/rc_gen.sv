// rc_gen: Keccak-f[1600] round-constant source for the LOAD command.
//
// Returns RC[round_idx], the 64-bit constant that iota XORs into lane (0,0) in that
// round. The 24 constants are not stored as literals: they are computed at elaboration
// from the Keccak LFSR (see inhale_pkg::gen_rc_table) and indexed here, so the block is
// a small ROM. Combinational. Ports: round_idx; rc. An index past the last round gives 0.
// The paper says only that the controller creates the 64-bit RC and sends it with LOAD;
// building it as a table computed from the LFSR is this design's choice.
module rc_gen
  import inhale_pkg::*;
#(
  parameter int unsigned N_RC = inhale_pkg::N_ROUNDS
) (
  input  logic [4:0]        round_idx,
  output logic [LANE_W-1:0] rc
);
  always_comb begin
    rc = '0;
    for (int i = 0; i < N_RC; i++)
      if (int'(round_idx) == i) rc = RC_TABLE[i];
  end
endmodule
