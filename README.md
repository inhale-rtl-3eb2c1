# Inhale-Opt: SHA-3 computed inside SRAM subarrays

Keccak-f[1600], the permutation behind SHA-3, is dominated by data movement: three of its
five steps (theta, pi, chi) combine lanes that sit in different places, and two (theta,
rho) rotate bits inside a lane. Inhale computes the permutation with the memory arrays
themselves. It raises two wordlines at once and reads XOR or AND of two rows off the
bitlines. Its key trick is the **lane-per-row** layout: every 64-bit lane of the State
gets a row of its own. Moving a lane to another position then needs no shifter. The
controller just names a different row in the next command. Only rotations inside a lane
need a shifter, and one 64-bit barrel shifter per Tile does them.

This RTL implements the *Inhale-Opt* configuration: a dedicated engine of 32×256
subarrays. Two banks of four subarrays form the engine. One subarray stores the command
program. The other seven each hold four Keccak States, so a run permutes 28 States at
once.

The design follows the Inhale paper (Zhang and Sadredini). Its cell array, command set,
command format and cycle costs come from that paper. Many details the paper leaves open
were decided here. Each source file says which parts are the paper's and which are this
design's. The section "Departures from the paper" lists every place where the two
differ.

## 1. How a State sits in a subarray

```
               Tile 0        Tile 1        Tile 2        Tile 3
 column      0 ....  63   64 ... 127   128 ... 191   192 ... 255
 row  0      lane (0,0)   lane (0,0)    lane (0,0)    lane (0,0)      "A"
 row  1      lane (1,0)   ...                                         "B"
  ...        lane x+5y  (row index = x + 5y)
 row 24      lane (4,4)                                               "Y"
 rows 25-30  intermediate rows I0..I5
 row 31      unused
```

* Bit *z* of a lane is in column 64·tile + *z*.
* All four Tiles see the same wordlines, so every command acts on all four States of a
  subarray at once. Seven subarrays get the same command at the same time.

## 2. What one subarray can do

Each computing subarray (`compute_subarray`) contains these parts:

| part | module | role |
|---|---|---|
| cell array | `sram_array` | 32×256 cells. With one or two wordlines raised it reports, per column, the bitline value (AND of the raised cells) and the complementary-bitline value (NOR of the raised cells). |
| two row decoders | `row_decoder` | 5:32 decoders. Decoder 1 drives operand 1 and the write row; decoder 2 drives operand 2. |
| sense logic | `sa_logic` | Passes on AND or NOR. XOR is formed as NOR(AND, NOR): two cells differ exactly when they are neither both 1 nor both 0. With one row raised, NOR is NOT. |
| shifters | `barrel_shifter` ×4 | One 64-bit crossbar rotator per Tile, for either direction. |
| result latch | — | Holds the value for the write-back cycle. |

Every command first senses its operands and then writes back in a separate cycle, so
the result row may be an operand row. The program relies heavily on this *in-place*
update. The commands and their costs:

| command | what it does | cycles |
|---|---|---|
| BINARY, XOR or AND | raise two rows, sense for 3 cycles, write the result | 4 |
| UNARY (NOT) | raise one row, sense the NOR side for 3 cycles, write | 4 |
| SHIFT | read one row, rotate each Tile's lane, write | 2 |
| LOAD | write the round constant into every Tile of a row | 1 |

Sensing takes 3 cycles because the paper rates the bitline XOR at three times a plain
array access. A subarray asserts `ready` when idle and in its write-back cycle, so
back-to-back commands leave no gap.

### Command word

Commands are 32 bits. Bits are numbered 0..31 from the most significant end, as in
`inhale_pkg::cmd_t`:

| bits | field | use |
|---|---|---|
| 0:1 | type | LOAD = 0, UNARY = 1, SHIFT = 2, BINARY = 3 |
| 2:9 | result row | |
| 10:17 | operand 1 row | |
| 18:25 | operand 2 row, or shift offset | offset: bits [5:0] of the field hold the amount; bit 6 of the field gives the direction (1 = towards lower bit index) |
| 26 | BINARY select | 0 = XOR, 1 = AND |
| 27:31 | unused | |

The row fields are 8 bits wide, enough for 256-row arrays. A 32-row subarray uses their
low 5 bits.

## 3. One Keccak round as a program

The host stores one round as 157 commands. Rows 0..24 are lanes and I0..I5 are rows
25..30. The testbench package `tb/inhale_prog_pkg.sv` builds exactly this program.

**Theta (55 commands, 210 cycles).** Theta needs the five column parities C[x]. From
them it forms D[x] = C[x−1] ⊕ rot(C[x+1], 1) and XORs D[x] into every lane of sheet
*x*. Only six intermediate rows are available, so the work is done as 15 steps that
reuse rows in place:

```
step  action                                    rows after the step
 0    C4 = A4^A9^A14^A19^A24   (4 XORs)          I5 = C4
 1    I3 = rot(I5, 1)                            I3 = rot C4
 2    C2 -> I1                 (4 XORs)
 3    I3 = I1 ^ I3             = D3              I3 = D3
 4    I1 = rot(I1, 1)                            I1 = rot C2
 5    C0 -> I4                 (4 XORs)
 6    I1 = I4 ^ I1             = D1
 7    I4 = rot(I4, 1)
 8    C3 -> I2                 (4 XORs)
 9    I4 = I2 ^ I4             = D4
10    I2 = rot(I2, 1)
11    C1 -> I0                 (4 XORs)
12    I2 = I0 ^ I2             = D2
13    I0 = rot(I0, 1)
14    I0 = I5 ^ I0             = D0              D_x now in I_x
```

After step 14, 25 in-place XORs do `lane x+5y ^= I_x`. Each XOR of a parity is chained
(a ⊕ b, then ⊕ c, ...), so a 5-input parity costs four 2-input XORs.

**Rho (25 commands, 50 cycles).** Each lane is rotated in place by its offset r(x,y).
Lane (0,0) also gets its (zero-offset) SHIFT, so all 25 lanes are handled alike.

**Pi (no commands).** Pi would move lane A[x,y] to position B[y, 2x+3y]. Nothing is
moved. Instead, chi names, for each B[x,y], the row where its source lane
A[(x+3y) mod 5, x] lives.

**Chi (75 commands, 300 cycles).** Chi works one plane *y* at a time. Let b_x be the row
holding B[x,y]. The plane takes three groups of five commands:

```
I_x  = NOT b_x                    (5 UNARY)
I_x  = I_x AND b_(x+1)            (5 BINARY AND)   = ¬B[x] ∧ B[x+1]
b_x  = b_x XOR I_(x+1)            (5 BINARY XOR)   = B[x] ⊕ (¬B[x+1] ∧ B[x+2])
```

The chi result for position (x,y) is written back into the row the lane was read from.
Every lane of A is read by exactly one plane of B, so this never overwrites a lane that
a later plane still needs.

**Iota (2 commands, 5 cycles).** `LOAD I5` writes the round constant, then
`lane0 ^= I5`.

A round therefore takes 210 + 50 + 300 + 5 = **565 cycles**.

### Why the lanes end up in the right rows: the lane map

Chi writes its results into "wherever B[x,y] came from". After round 1, lane (x,y) is
therefore no longer in row x+5y. The next round must find it. The controller keeps a
25-entry lane map, which starts as the identity. Any row field below 25 in a command
names a lane and is translated through the map before broadcast. After the last command
of each round, the controller updates the map:

```
map'[x + 5y] = map[(x + 3y) mod 5 + 5x]
```

This lets the same 157-command program serve all 24 rounds. Pi permutes the 24 lanes
other than (0,0) in a single cycle of length 24. So after the 24th round the map is the
identity again, and the host finds the result lanes in rows 0..24 in order.

## 4. The controller (`inter_bank_controller`)

* **Replay.** The controller runs the `prog_len` commands of the control subarray, then
  runs them again, `N_RND` = 24 times in all. It attaches RC[round] from `rc_gen` to
  each LOAD. `rc_gen` holds the 24 round constants, computed at elaboration from the
  Keccak LFSR.
* **Prefetch.** Each control row holds eight commands and is read with one cycle of
  latency. A two-entry queue is refilled whenever it would otherwise run dry, counting an
  entry that leaves in the same cycle. A one-cycle LOAD followed at once by a XOR
  therefore never waits.
* **Broadcast.** When all computing subarrays are ready, the controller decodes the queue
  head into `sub_cmd_t`. Decoding means translating the lane rows and splitting the shift
  field. It sends the result to every subarray.
* **Timing.** The first command issues 3 cycles after `start`. `done` rises at the last
  write-back: 24 × 565 + 3 = 13 563 cycles after `start`.

## 5. The engine and how to use it (`inhale_top`)

```
 host ──prog_we/row/wdata──► control_subarray (256×256, 2048 commands)
                                   │ row reads
                                   ▼
 host ──start/prog_len──►  inter_bank_controller ──sub_cmd_t broadcast──┐
      ◄──busy/done───                    ▲ AND of ready               │
                                         │                             ▼
 host ──data_we/re/sub/row/wdata──► compute_subarray ×7 (32×256, 4 States each)
      ◄──data_rdata (one cycle after data_re)
```

To hash messages with SHA3-256:

1. **Load the program.** Write the 157 commands into rows 0..19 of the control subarray,
   eight per row, command *k* of a row in bits [32k+31:32k].
2. **Load the States.** For each of the 28 States, write the first padded 1088-bit block
   into lanes 0..16 and zeros into lanes 17..24. Each write of row *l* of subarray *s*
   fills lane *l* of all four Tiles.
3. **Run.** Pulse `start` with `prog_len = 157`, then wait for `done`.
4. **Absorb further blocks.** For each later block, read lanes 0..16, XOR in the block,
   write them back, and run again.
5. **Read the digest.** The digest is lanes 0..3, least significant byte first.

Host writes are ignored while `busy` is high.

## 6. Departures from the paper

* **Theta order.** In the paper's theta schedule figure, each D value is built as
  C[x+1] ⊕ rot(C[x−1]). That differs from the theta equation the paper's text gives (and
  from FIPS 202), which is C[x−1] ⊕ rot(C[x+1]); the figure's version does not give
  SHA-3. The program here keeps the figure's structure: 15 steps, six rows, the same
  in-place reuse, 20 + 5 XORs and 5 rotations. It takes the parities in sheet order
  4, 2, 0, 3, 1 instead of 4, 1, 3, 0, 2, which makes the equation come out right.
* **Round latency is 565, not 564 cycles.** The paper's counts (theta 210, rho 50,
  chi 300, iota 4) leave out the LOAD of the round constant, which costs one write here.
  The paper also states elsewhere that a 5-input XOR costs 12 cycles (3 per 2-input
  XOR). That figure leaves out the write-backs, which its own stage totals include. The
  RTL follows the stage totals: 4 cycles per XOR.
* **One round's program, replayed, with a lane map.** The paper stores "pre-generated
  control signals" in a 256×256 control subarray. A full 24-round program would be
  3768 commands, against 2048 slots. So the controller replays one round and tracks where
  the lanes are, as described above. The lane map register is this design's own. The
  paper only says that the controller implements pi by selecting rows.
* **Four shifters per subarray.** The paper speaks of "a 64-bit barrel shifter". Here
  each Tile has its own, so that a SHIFT command moves all four States at once.
* **Absorption by the host.** The paper shows longer messages kept in extra rows. That
  applies to 256-row arrays; a 32-row Inhale-Opt subarray has no room for them. Message
  blocks are XORed in through the host port.
* **Choices the paper leaves open.** This design fixes the following on its own: the
  numeric command encodings, the shift-field layout, the host port, the start/busy/done
  and valid/ready handshakes, the reset values, and the order of bits within a lane.
* **Not modelled.** The analog behaviour of multi-row activation (it is written as its
  logical result), clock frequency, energy and area, and the Inhale-Flex configuration.
  Inhale-Flex uses 256×256 subarrays repurposed from a cache. It is reachable through
  the `SUB_ROWS` parameter, since the row fields are 8 bits, but it is untested.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_row_decoder` | all addresses, enabled and disabled |
| `tb_sa_logic` | AND/NOR/XOR/NOT against bitline values of random rows |
| `tb_barrel_shifter` | every amount, both directions |
| `tb_sram_array` | one- and two-row sensing against a copy of the contents |
| `tb_rc_gen` | the 24 constants against the published FIPS 202 values |
| `tb_control_subarray` | writes, one-cycle reads, hold |
| `tb_compute_subarray` | 400 random back-to-back commands: results row by row, 4/2/1-cycle timing |
| `tb_inter_bank_controller` | the broadcast stream of a 24-round run against the program, translated through an independently computed lane map; 565 cycles per round; stalls |
| `tb_inhale_top` | all 28 States through two absorbed blocks, compared with a software Keccak-f[1600]; checks SHA3-256("") = a7ffc6f8…80f8434a and 13 563 cycles per permutation; counts every mechanism (bitline XOR/AND/NOT, theta and rho shifts, LOAD, in-place writes, LOAD→XOR back to back, remapped rounds, absorption) |

The reference model `tb/keccak_ref_pkg.sv` shares no code with the RTL. It uses literal
round constants and derives the rho offsets from the (t+1)(t+2)/2 walk.

To simulate, for example the whole engine at full size:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/inhale_pkg.sv tb/keccak_ref_pkg.sv tb/inhale_prog_pkg.sv rtl/*.sv \
  tb/tb_inhale_top.sv --top-module tb_inhale_top -o sim
./obj_dir/sim
```

Building takes about a minute; the run takes about 20 seconds. Other testbenches are
built the same way with their own top module.
