// inhale_pkg: types and constants shared by the Inhale-Opt in-SRAM Keccak engine.
//
// The engine keeps each Keccak-f[1600] State "lane per row": the 25 64-bit lanes of a
// State sit in 25 rows of a subarray, followed by 6 intermediate rows, and four States
// (Tiles) sit side by side in the 256 columns. A controller replays a stored program of
// 32-bit commands (LOAD, UNARY, SHIFT, BINARY) that every computing subarray executes in
// lockstep.
//
// From the paper: the 32-bit command layout (type in bits [0:1], result row [2:9],
// operand 1 [10:17], operand 2 or shift offset [18:25], XOR/AND select in bit 26, five
// unused bits), the four command kinds, the 32x256 subarray, 64-bit lanes, 6 intermediate
// rows, 24 rounds and a 3-cycle bitline XOR. This design's own choices: the numeric
// encodings of the type and select fields, the shift-offset sub-fields (amount in [5:0]
// of the field, direction in bit 6), and the internal broadcast bundle sub_cmd_t.
// The command is a packed struct whose first field is the most significant, so the
// paper's big-endian bit numbering [0:31] is the struct's declaration order.
package inhale_pkg;

  // ---- Keccak-f[1600] geometry ----
  localparam int unsigned LANE_W    = 64;  // bits per lane (w)
  localparam int unsigned N_LANES   = 25;  // lanes per State
  localparam int unsigned N_INTER   = 6;   // intermediate rows per Tile
  localparam int unsigned N_ROUNDS  = 24;  // rounds of Keccak-f[1600]
  localparam int unsigned RATE_LANES = 17; // 1088-bit rate of SHA3-256

  // ---- Command word (Fig. 3(g) of the paper) ----
  localparam int unsigned CMD_W        = 32;
  localparam int unsigned IDX_W        = 8;   // row-index fields, sized for 256-row arrays
  localparam int unsigned CMDS_PER_ROW = 8;   // 256-bit control row / 32-bit command

  typedef enum logic [1:0] {
    CMD_LOAD   = 2'd0,  // write the round constant into a row of every Tile
    CMD_UNARY  = 2'd1,  // NOT of one row (single-row NOR sense)
    CMD_SHIFT  = 2'd2,  // rotate every lane of a row through the shifters
    CMD_BINARY = 2'd3   // XOR or AND of two rows (two wordlines raised)
  } cmd_type_e;

  typedef struct packed {
    cmd_type_e          typ;     // [0:1]
    logic [IDX_W-1:0]   dst;     // [2:9]   result row
    logic [IDX_W-1:0]   src1;    // [10:17] first operand row
    logic [IDX_W-1:0]   src2;    // [18:25] second operand row or shift offset
    logic               is_and;  // [26]    BINARY: 0 = XOR, 1 = AND
    logic [4:0]         rsvd;    // [27:31] unused
  } cmd_t;

  // Shift-offset field: [5:0] amount, [6] direction (1 = towards lower bit index).
  localparam int unsigned SH_AMT_W  = 6;
  localparam int unsigned SH_DIR_BIT = 6;

  // ---- Broadcast bundle from the controller to every computing subarray ----
  typedef enum logic [2:0] {
    OP_XOR   = 3'd0,
    OP_AND   = 3'd1,
    OP_NOT   = 3'd2,
    OP_SHIFT = 3'd3,
    OP_LOAD  = 3'd4
  } sub_op_e;

  typedef struct packed {
    logic                 valid;
    sub_op_e              op;
    logic [IDX_W-1:0]     dst;      // physical result row
    logic [IDX_W-1:0]     src1;     // physical operand rows
    logic [IDX_W-1:0]     src2;
    logic [SH_AMT_W-1:0]  sh_amt;
    logic                 sh_right;
    logic [LANE_W-1:0]    rc;       // round constant carried by LOAD
  } sub_cmd_t;

  // ---- Sense-amplifier output select ----
  typedef enum logic [1:0] {
    SA_AND = 2'd0,
    SA_NOR = 2'd1,
    SA_XOR = 2'd2
  } sa_fn_e;

  // ---- Command timing in clock cycles ----
  localparam int unsigned SENSE_CYCLES = 3;  // bitline XOR/AND/NOT sensing, 3x an access

  // ---- Round constants ----
  // RC[i] bit (2^j - 1) = rc(j + 7i), j = 0..6, where rc(t) is the output of the
  // degree-8 LFSR x^8 + x^6 + x^5 + x^4 + 1 started at 1 (FIPS 202, Algorithm 5).
  typedef logic [N_ROUNDS-1:0][LANE_W-1:0] rc_table_t;

  function automatic rc_table_t gen_rc_table();
    rc_table_t  t;
    logic [7:0] r;
    logic [N_ROUNDS*7-1:0] bitv;
    r = 8'h01;
    for (int n = 0; n < N_ROUNDS * 7; n++) begin
      bitv[n] = r[0];
      // shift towards higher index of the FIPS bit string R = R[0..7]
      r = {r[6:0], 1'b0} ^ (r[7] ? 8'b0111_0001 : 8'b0);
    end
    for (int i = 0; i < N_ROUNDS; i++) begin
      t[i] = '0;
      for (int j = 0; j < 7; j++) t[i][(1 << j) - 1] = bitv[j + 7 * i];
    end
    return t;
  endfunction

  localparam rc_table_t RC_TABLE = gen_rc_table();

  // ---- Lane geometry ----
  // Lane index of (x, y) is x + 5y: A0..E0 are plane y = 0, F0..J0 plane y = 1, ...
  function automatic int unsigned lane_idx(int unsigned x, int unsigned y);
    return (x % 5) + 5 * (y % 5);
  endfunction

  // Pi: B[x, y] = A[(x + 3y) mod 5, x]. Returns the lane of A that becomes B[x, y].
  function automatic int unsigned pi_src(int unsigned x, int unsigned y);
    return lane_idx((x + 3 * y) % 5, x);
  endfunction

endpackage
