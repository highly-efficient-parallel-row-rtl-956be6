# L-parallel row-layered Min-sum decoder for QC-MDPC codes

This is synthesizable SystemVerilog for a decoder for the quasi-cyclic
moderate-density parity-check (QC-MDPC) codes used in the McEliece public-key
cryptosystem. The decoder runs scaled Min-sum belief propagation with a
row-layered schedule, and it processes L rows of the parity-check matrix H in
every clock cycle.

Two things make an L-fold speed-up possible for MDPC codes, whose rows are far
denser than those of an LDPC code:

- **A constraint on the secret key.** In the first column of each circulant,
  any two nonzero positions must be at least L apart, measured circularly.
- **Dynamic identity-block division.** Under that constraint, the L rows of
  each layer are covered by L x L *identity* blocks, one per nonzero position
  of the circulant's first row. The blocks do not sit on a fixed grid; each
  starts exactly where a '1' is. Every block has exactly L ones, so L lanes
  always have work.

The defaults are the configuration the decoder was evaluated at:

| Parameter | Default |
|---|---|
| Circulants n0 | 2 |
| Circulant size r | 4801 |
| Weight w per circulant | 45, so a row has n0·w = 90 ones |
| Parallelism L | 2 |
| c2v/v2c magnitude q | 4 bits |
| A-posteriori width p+1 | 11 bits, 2 of them fractional |
| Scalar α | 0.21875 = 2^-2 − 2^-5 |
| Channel magnitude C | 9 |
| Maximum iterations I_max | 30 |

## The code and the layers

H = [H_0 | H_1 | … | H_{n0-1}]. Each H_i is an r x r circulant: row j of H_i
has ones at columns (s + j) mod r, for s in the support S_i of row 0. The
decoder only needs the supports.

Layer l is rows lL … lL+L−1. For a support entry s, the L rows of layer l
have their ones at columns s+lL, s+lL+1, …, s+lL+L−1 (mod r). That is an
identity block whose top-left *corner* is column s + lL.

- The spacing constraint guarantees that no two blocks of a layer share a
  row or a column.
- A layer is therefore n0·w blocks, and it is processed one block per clock
  cycle: lane m handles row lL+m and column corner+m of every block.
- Since r is prime, the last layer has only r − (⌈r/L⌉−1)·L rows; the
  remaining lanes are disabled. For r = 4801, L = 2 this is 1 row.
- A block whose corner is near r−1 wraps around to column 0 of the same
  circulant.

**RAM I** (`ram_i`) holds the n0·w corners of the current layer.

- Before decoding, the host writes the layer-0 corners, which are the
  supports. They must be sorted ascending within each circulant, circulant 0
  first.
- After a layer has been processed, the **H-matrix shifting** adder
  (`h_shift`) adds L modulo r to each corner and writes it back.
- After the last, shorter layer it adds that layer's row count, which brings
  the corners back to layer 0 for the next iteration.

A column index is stored as {circulant number, column within the circulant}.
For the default code that is 1 + 13 = 14 bits, the same width as
⌈log2(n0·r)⌉.

## A-posteriori storage: two banks, a shifter and tail registers

A block can start at any column, but the L a-posteriori values of a block must
be read in one cycle. `apost_mem` solves this as follows.

**Banks.**
- Columns are grouped into *block columns* of L consecutive columns.
- Even block columns go to bank U0 and odd ones to bank U1, one block column
  per word, ⌊r/(2L)⌋ words per circulant in each bank.
- Any L consecutive columns then lie in two neighbouring block columns, one
  in each bank.

**Addresses.** For a corner c:
- the U1 address is c >> log2(2L);
- the U0 address is that plus bit log2(L) of c;
- both are offset by the circulant's base address.

**Shifter.** The two words form a 2L-entry vector {U1, U0}. The `shifter`
rotates it left by the low log2(2L) bits of c, leaving the block's L values
in the lower half. It has log2(2L) levels of 2:1 multiplexers, the level for
the most significant shift bit first.

**Write-back.** Updated values go back through the `rev_shifter` (the same
structure, rotating right).
- Per-lane write enables, rotated by a 1-bit copy of the reverse shifter,
  make sure only the block's own L entries are written.
- The other entries of the two words are never rewritten.

**Tail registers.** r is not a multiple of 2L, so the last
r − 2L·⌊r/(2L)⌋ columns of each circulant (1 for the defaults) do not fill a
bank pair. They are kept in registers.
- A block that reaches into this tail takes those lanes from the registers.
- A block that runs past column r−1 takes its wrapped lanes from U0 block
  column 0, whose address is forced to the circulant's base in that case.
- The choice is made per lane, after the shifter.

**Loading and reading out.**
- Loading writes one block column per cycle, mapping a received bit 0/1 to
  +C/−C.
- Reading out returns the sign bits of one block column, which are the
  decoded bits.

## Number formats and the lane arithmetic

The a-posteriori value γ̃ and the v2c value u are 11-bit two's complement
numbers in units of 1/4 (2 fractional bits), saturated at ±255.75. The c2v
message v is a sign and a 4-bit integer magnitude.

**Compressed c2v.** The c2v messages of a row are stored in compressed form:
{s, min1, min2, idx}, 1 + 4 + 4 + 14 = 23 bits.
- `cnu_b` (used as CNU B and CNU B') expands it for one column: magnitude
  min2 if the column is idx, otherwise min1.
- The sign is s XOR the sign of that column's own v2c message.

**Scaling.** `alpha_scaler` multiplies a magnitude by α using two shifted
copies (α has two signed power-of-two digits). It rounds half-up to 2
fractional bits, then applies the sign. Keeping those two fractional bits in
αv and in γ̃ is what keeps the finite-precision decoder close to
full-precision performance.

Each of the L `layer_lane` instances does, for its row:

**Check-node phase** (row of layer l, iteration k), one block per cycle:
- v_old = CNU B(compressed row from iteration k−1, column, old v2c sign
  from RAM S). It is forced to 0 in iteration 1, instead of clearing RAM M.
- u = sat(γ̃ − α·v_old).
- u goes to the lane's RAM T, and its sign goes to RAM S.
- CNU A receives sign(u) and the magnitude min(15, round(|u|)).
- `cnu_a` keeps min1, min2, idx and the sign parity s in registers. A new
  magnitude below min1 pushes min1 into min2; one below min2 replaces min2;
  ties keep the earlier column.

**Update phase** (the same row, during the next layer's check-node phase):
- γ̃' = sat(u + α·v_new), with u read back from RAM T and v_new from CNU B'
  on the new compressed row.
- γ̃' is written to RAM U.

The compressed rows of a layer are written to RAM M (L rows per word). They
are also captured in a holding register, because the update of that layer
overlaps the next layer's check-node phase, during which CNU A already works
on new rows.

## Schedule: overlapping layers without hazards

This is the subtle part of the design. Layer l+1 cannot wait for layer l's
updates to finish, or half the cycles would be lost. So `dec_ctrl` runs two
streams in every period of T = n0·w + 7 cycles:

| Stream | Issue time | Pipeline stages |
|---|---|---|
| Update of the previous layer | slot j at cycle j | W0 (RAM T and RAM I port B read), W1 (CNU B', add, corner shift written back to RAM I), W2 (reverse shifter, RAM U write) |
| Check-node pass of the current layer | slot j at cycle 3 + j | R0 (RAM I port A and RAM S read), R1 (RAM U read), R2 (shifter, CNU B, subtraction), R3 (RAM T/S write, CNU A) |

**Why the offset of 3 cycles is enough.**
- Block j of layer l covers columns s_j + lL … s_j + lL + L − 1.
- A block j' of layer l−1 covers s_j' + (l−1)L … s_j' + lL − 1.
- These overlap only if s_j' − s_j lies in 1 … 2L−1.
- With spacing at least L, only one entry can be that close: the next
  support entry in ascending cyclic order, j' = j+1 (or entry 0 after the
  last one).
- Block j+1 is issued for update at cycle j+1 and reaches RAM U at the end
  of cycle j+3.
- Block j reads RAM U in cycle j+4, so it always sees the updated values.

This argument is why the corners must be sorted ascending within each
circulant. It also explains the cost: the 3-cycle offset, plus 4 cycles for
the check-node pipeline and CNU A to finish, give 7 cycles per layer on top
of the n0·w blocks.

**Iteration boundaries and the end of decoding.**
- The update of the last layer of iteration k runs in period 0 of iteration
  k+1.
- After I_max iterations, one more update-only period completes the last
  layer.
- Latency from `start` to `done` is (iterations·⌈r/L⌉ + 1)·T + 1 cycles on
  success, and (I_max·⌈r/L⌉ + 1)·T + 1 on failure.
- For the defaults T = 97 and an iteration takes 2401·97 = 232 897 cycles.
  An ideal schedule would take 2401·90 = 216 090.

## Stopping test

Decoding stops when the hard decisions sign(γ̃) form a codeword. `term_check`
tests this without a separate syndrome pass:

- **Row parity.** While a layer is read in the check-node phase, the sign
  bits of each row's columns are XORed per lane, which gives that row's
  parity.
- **Sign changes.** The signs read are kept per slot and lane. Each value
  written back in the update phase is compared with them.
- **The test.** An iteration passes if every row had even parity and no
  written value changed sign. If nothing changed sign, every parity seen
  during the iteration still holds at its end.
- **Evaluation point.** The test is evaluated at the end of period 0 of the
  next iteration, when the last layer's update is complete.

This is exact, but it lags one iteration behind a check made right after each
iteration. A decode whose last correction happens in iteration k reports k+1
iterations, and stops one layer into iteration k+2. A received word that is
already a codeword is reported after 1 iteration.

## Memories

For the defaults (n0 = 2, r = 4801, w = 45, q = 4, p+1 = 11, L = 2):

| Memory | Organisation | Bits |
|---|---|---|
| RAM I | 90 x 14, 1 write + 2 read ports | 1 260 |
| RAM M | 2401 words x 2 rows x 23 | 110 446 |
| RAM S | 216 090 words x 2 signs | 432 180 |
| RAM U0 + U1 | 2 banks x 2400 words x 2 x 11 | 105 600 |
| Tail registers | 2 circulants x 1 x 11 | 22 |
| RAM T | 2 lanes x 90 x 11 | 1 980 |

All RAMs are instances of `sdp_ram`: one write port, one synchronous read
port and a per-lane write mask. RAM S and RAM M are addressed by counters,
RAM U by the corners read from RAM I.

At L = 8, 16 and 32 the same formulas give:

| L | RAM M (bits) | RAM S (bits) | RAM T (bits) |
|---|---|---|---|
| 8 | 110 584 | 432 720 | 7 920 |
| 16 | 110 768 | 433 440 | 15 840 |
| 32 | 111 136 | 434 880 | 31 680 |

RAM I and RAM U do not change with L.

## Interface (`mdpc_decoder`)

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset. Load and read out only while `busy` is low.

| Signals | Use |
|---|---|
| `hi_we`, `hi_addr`, `hi_col` | write corner `hi_addr` (0 … n0·w−1) of layer 0 |
| `ld_en`, `ld_sub`, `ld_blk`, `ld_bits` | load L received bits of block column `ld_blk` of circulant `ld_sub` |
| `start` | one-cycle pulse; clears the stopping state and starts decoding |
| `busy`, `done`, `success`, `iters` | status; `done` stays high until the next `start` |
| `ro_en`, `ro_sub`, `ro_blk`, `ro_bits` | read out L decoded bits, one cycle after `ro_en` |

Parameters of the top:

| Parameter | Meaning |
|---|---|
| `NSUB` | n0 |
| `RSZ` | r |
| `WCOL` | w |
| `LANES` | L, a power of two |
| `IMAXP` | I_max |

The number formats (q, p+1, fractional bits, α, C) are in `mdpc_pkg`. The
spacing constraint and the sorted order of the corners are the caller's
responsibility. Nothing in the hardware checks them.

## Where this design departs from the published architecture

- **7 extra cycles per layer** for the hazard-free overlap described above:
  232 897 instead of 216 090 cycles per iteration for the defaults.
- **No pause at iteration boundaries.** The published schedule starts the
  check-node pass of layer 0 of the next iteration only after the last layer
  of the current iteration has been updated. Here that boundary overlaps
  like any other, because the same hazard argument holds. This saves one
  period per iteration.
- **RAM I has a second read port.** The update stream needs the previous
  layer's corners while the current layer is being read. The shifted corner
  is written back during the update phase.
- **RAM U write-back uses per-lane write enables** instead of passing the
  untouched half of the two words back through the reverse shifter.
- **The stopping test is this design's own** and costs about one extra
  iteration, as described above. The published average of 2.05 iterations
  assumes an immediate check; this design reports about one more for the
  same words.
- **Unspecified details are this design's choices:**
  - C = 9;
  - rounding of u to an integer for CNU A;
  - saturation points;
  - two's complement instead of sign and magnitude;
  - a column index stored as {circulant, column} with the bank address
    computed per circulant;
  - the host interface;
  - the update-only period after I_max;
  - the zero-forcing of the old c2v message in iteration 1.
- **Code sizes are parameters, fixed at elaboration.** They are not
  run-time configurable, so one build supports only the code it was built
  for.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. The reference for the end-to-end tests is
`tb/mdpc_ref_pkg.sv`, a plain sequential model of the same arithmetic and
stopping rule, with no pipeline. It also builds codewords without any matrix
inversion, as x0 = u·h1, x1 = u·h0 (circular products), and computes true
syndromes.

| Testbench | What it covers |
|---|---|
| `tb_cnu_a`, `tb_cnu_b`, `tb_alpha_scaler`, `tb_h_shift`, `tb_shifter`, `tb_rev_shifter`, `tb_ram_i`, `tb_sdp_ram` | the building blocks against independent computations |
| `tb_apost_mem` | r = 67, L = 4: three tail columns, wrapping blocks, masked writes |
| `tb_layer_lane` | one lane against the reference arithmetic |
| `tb_term_check` | parity, sign-change and idle-lane cases |
| `tb_dec_ctrl` | the exact schedule |
| `tb_mdpc_decoder` | small code (n0 = 2, r = 67, w = 5, L = 4) against the reference, bit for bit, including cycle counts; requires every mechanism to occur: tail registers, wrapped blocks, idle lanes, iteration-1 zero c2v, sign changes, early stop and failure at I_max |
| `tb_mdpc_full` | the default configuration with no parameter overrides: a random L = 2-constrained code, 84 errors (3 iterations), a single error, and a random word that fails after 30 iterations; all checked bit for bit |
| `tb_mdpc_workloads` | the same r = 4801 code with 84 errors at L = 8, 16 and 32, and at L = 1 (the serial decoder) |

Simulate with Verilator 5 from the top of the tree. For example:

    verilator --binary --timing -Irtl -Itb rtl/mdpc_pkg.sv tb/mdpc_ref_pkg.sv \
        tb/tb_mdpc_full.sv --top-module tb_mdpc_full
    ./obj_dir/Vtb_mdpc_full

Replace the testbench name for any other test. `tb_mdpc_workloads` also
needs `tb/mdpc_lrun.sv`. The full-size run simulates about 8 million cycles
and takes seconds.

## Changing the design

**A different code.** Set `NSUB`, `RSZ`, `WCOL` and `IMAXP` on `mdpc_decoder`.
- The RAM sizes follow from these parameters.
- `LANES` must be a power of two, at most about r/w, and the key must be
  constrained by it.
- The reference model builds codewords only for n0 = 2.

**Different precision.** Change `Q`, `PW`, `FRAC`, `CH` or the two digits of
α (`AE1`, `AD1`, `AE2`, `AD2`) in `mdpc_pkg`. The reference model reads the
same package.
