// inhale_prog_pkg: the host-side program that makes Inhale compute one Keccak-f[1600]
// round, as stored in the control subarray. Row names: lanes 0..24 (lane x + 5y),
// intermediate rows I0..I5 = 25..30.
//
//   theta (55 commands): 15 steps, each 4 XORs forming a column parity, one 1-bit
//     rotation, or one XOR forming D[x] = C[x-1] ^ rot(C[x+1], 1) over a rotated parity
//     (in place), leaving D[x] in I_x; then lane x+5y ^= I_x for all 25 lanes.
//   rho   (25): SHIFT each lane in place by r(x, y).
//   pi    (0):  none; chi names the lanes that pi would have moved.
//   chi   (75): per plane y, with b_x = lane (x+3y mod 5) + 5x (that is B[x,y]):
//     I_x = NOT b_x; I_x = I_x AND b_(x+1); b_x = b_x XOR I_(x+1).
//   iota  (2):  LOAD RC into I5; lane 0 ^= I5.
// 157 commands per round.
package inhale_prog_pkg;
  import inhale_pkg::*;
  import keccak_ref_pkg::*;

  localparam int unsigned PROG_LEN = 157;
  localparam int unsigned I0 = 25;

  typedef cmd_t prog_t [PROG_LEN];

  function automatic cmd_t mk(cmd_type_e typ, int unsigned dst, int unsigned s1,
                              int unsigned s2, logic is_and = 1'b0);
    cmd_t c;
    c.typ    = typ;
    c.dst    = IDX_W'(dst);
    c.src1   = IDX_W'(s1);
    c.src2   = IDX_W'(s2);
    c.is_and = is_and;
    c.rsvd   = '0;
    return c;
  endfunction

  function automatic prog_t build_round_program();
    prog_t p;
    int unsigned k;
    int unsigned b [5];
    // Column parities are formed in sheet order 4, 2, 0, 3, 1. Each new parity C_a is
    // XORed with the rotated previous one, rot(C_(a+2)), giving D_(a+1) = C_a ^ rot(C_(a+2))
    // in the previous parity's row; the last rotated parity meets the first, unrotated
    // one (C_4) to give D_0. D_x ends in row I_x.
    int unsigned par_x   [5] = '{4, 2, 0, 3, 1};
    int unsigned par_row [5] = '{I0+5, I0+1, I0+4, I0+2, I0+0};
    int unsigned rot_row [5] = '{I0+3, I0+1, I0+4, I0+2, I0+0};
    k = 0;
    for (int i = 0; i < 5; i++) begin
      int unsigned x;
      x = par_x[i];
      begin p[k] = mk(CMD_BINARY, par_row[i], x, x + 5); k++; end
      begin p[k] = mk(CMD_BINARY, par_row[i], par_row[i], x + 10); k++; end
      begin p[k] = mk(CMD_BINARY, par_row[i], par_row[i], x + 15); k++; end
      begin p[k] = mk(CMD_BINARY, par_row[i], par_row[i], x + 20); k++; end
      if (i > 0) begin
        // D = C_new XOR rot(C_prev), written over rot(C_prev)
        p[k] = mk(CMD_BINARY, rot_row[i-1], par_row[i], rot_row[i-1]); k++;
      end
      // rot(C, 1): the first parity is copied rotated, the others rotated in place
      begin p[k] = mk(CMD_SHIFT, rot_row[i], par_row[i], 1); k++; end
    end
    begin p[k] = mk(CMD_BINARY, I0 + 0, I0 + 5, I0 + 0); k++; end   // D_0 = C_4 ^ rot(C_1)
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        begin p[k] = mk(CMD_BINARY, x + 5*y, x + 5*y, I0 + x); k++; end
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        begin p[k] = mk(CMD_SHIFT, x + 5*y, x + 5*y, rho_ref(x, y)); k++; end
    for (int y = 0; y < 5; y++) begin
      for (int x = 0; x < 5; x++) b[x] = ((x + 3*y) % 5) + 5*x;
      for (int x = 0; x < 5; x++) begin p[k] = mk(CMD_UNARY, I0 + x, b[x], 0); k++; end
      for (int x = 0; x < 5; x++) begin p[k] = mk(CMD_BINARY, I0 + x, I0 + x, b[(x+1)%5], 1'b1); k++; end
      for (int x = 0; x < 5; x++) begin p[k] = mk(CMD_BINARY, b[x], b[x], I0 + (x+1)%5); k++; end
    end
    begin p[k] = mk(CMD_LOAD, I0 + 5, 0, 0); k++; end
    begin p[k] = mk(CMD_BINARY, 0, 0, I0 + 5); k++; end
    return p;
  endfunction

  // cycles one round takes: 4 per XOR/AND/NOT, 2 per SHIFT, 1 per LOAD
  function automatic int unsigned round_cycles(prog_t p);
    int unsigned n;
    n = 0;
    for (int i = 0; i < int'(PROG_LEN); i++)
      unique case (p[i].typ)
        CMD_LOAD:  n += 1;
        CMD_SHIFT: n += 2;
        default:   n += 4;
      endcase
    return n;
  endfunction
endpackage
