# AES-IMC: AES-128 on two 64-bit nibble-plane processing units

AES-IMC is an AES-128 encryption core built the way an in-memory computing
array would hold the cipher. Each storage element is a 4-bit multi-level
memristor, and the state and round key sit in 4x4 crossbars of these cells.
One 4x4 crossbar of 4-bit cells holds 64 bits, so a 128-bit AES block needs two
of them. The design therefore runs the cipher as two 64-bit processing units
working side by side. The AES transformations are done at the edge of the
arrays: sense-amplifier XOR, an S-box lookup table, address offsets and
multiply-by-2 logic. A full 128-bit block is encrypted in 26 clock cycles.

This RTL is a synthesizable model of that architecture. The memristor cells are
replaced by digital 16-state emulators, as in an FPGA prototype. The core has
two engines that produce the same ciphertext:

* a **pipelined engine** that does one whole AES round per step, 26 cycles
  per block;
* a **row-sequential engine** that works one crossbar row at a time, the way
  the operations would run inside a memristive array, 232 cycles per block.

Both are verified bit-exactly against FIPS-197.

## The nibble-plane split

This is the least obvious part of the design. The 128-bit block is **not** cut
into two 64-bit halves of bytes. It is cut by nibble:

* **plane 1** (`input1`, `key1`, `finalout1`) holds the **high** nibble of all
  16 bytes;
* **plane 2** (`input2`, `key2`, `finalout2`) holds the **low** nibble of all
  16 bytes.

Nibble `n` of a plane (bits `[63-4n -: 4]`) belongs to byte `n` of the FIPS-197
block, byte 0 being the first byte (bits `[127:120]`). Inside a crossbar,
nibble `n` sits at row `n % 4`, column `n / 4`. This is the usual column-major
AES state, so crossbar row `r` is AES state row `r`.

Example (FIPS-197 appendix C.1):

| | 128-bit value | plane 1 | plane 2 |
|---|---|---|---|
| plaintext | `00112233445566778899aabbccddeeff` | `0123456789abcdef` | `0123456789abcdef` |
| key | `000102030405060708090a0b0c0d0e0f` | `0000000000000000` | `0123456789abcdef` |
| ciphertext | `69c4e0d86a7b0430d8cdb78070b4c55a` | `6ced6703dcb87bc5` | `9408ab408d70045a` |

The split has a cost. A byte-wise step needs both halves of a byte, so for
those steps the two units are not independent:

| step | per plane? | why |
|---|---|---|
| Addroundkey | yes | XOR is bitwise |
| Shiftrow | yes | both planes use the same address offsets |
| Subbyte | no | the S-box address is `{plane-1 nibble, plane-2 nibble}` and the 8-bit result is split back |
| Mixcolumn | no | multiply-by-2 moves bit 3 of the low nibble into the high nibble, and bit 7 (bit 3 of the plane-1 nibble) decides whether 0x1B is XORed in |
| key expansion | mostly | the XOR chain is per plane; SubWord is not |

Within each plane everything else is local to the crossbar.

## Block structure

The diagram shows the pipelined engine. The row-sequential engine is
described in its own section below.

```
            +-------------------- aes_imc_controller -----------------------+
            | IDLE -> LOAD -> K00 -> K01 ... K10 -> OUT -> READY           |
            +--------------------------------------------------------------+
input1 --> State1 crossbar --+                                       +--> finalout1
input2 --> State2 crossbar --+--> Subbyte --> Shiftrow x2 --> Mixcolumn --+
                             |    (16 S-boxes)                 (rounds 1-9)|
key1  --> Key1 crossbar  --+ |                                           v
key2  --> Key2 crossbar  --+-+--> key generator --> next round key --> Addroundkey x2
                                   (4 S-boxes, rcon)                      |
                 write back: new state -> State1/2, new key -> Key1/2 <---+
```

| module | role |
|---|---|
| `aes_imc_pkg` | types, the plane/byte mapping, GF(2^8) helpers, S-box table generator, rcon |
| `mr_cell` | one 4-bit memristor emulator: a 16-state Moore machine (transition logic, state memory, output logic) |
| `mr_crossbar` | 4x4 `mr_cell` array with word-line write select, a full parallel read-out and a bit-line column read port |
| `aes_imc_sbox` | 256 x 8 S-box ROM; its contents are computed at elaboration |
| `aes_imc_addroundkey` | sense-amplifier XOR of a state plane and a key plane |
| `aes_imc_subbyte` | 16 S-boxes that pair the nibbles of the two planes |
| `aes_imc_shiftrow` | address-offset decoder: row `r` is rotated left by `r` cells |
| `aes_imc_mixcolumn` | MixColumns written with multiply-by-2 (M-2) and XOR only |
| `aes_imc_keygen` | next AES-128 round key in plane form |
| `aes_imc_m2lut` | 256 x 8 multiply-by-2 table (M-2 LUT) used by the row-sequential engine |
| `aes_imc_controller` | chain of start/done handshaked Moore states (pipelined engine) |
| `aes_imc_rowseq` | the row-sequential engine, with its own crossbars, sequencer, 4 S-boxes and 4 M-2 LUTs |
| `aes_imc_top` | the core: both engines and the mode select |
| `aes_imc_multibank` | `NBANKS` state banks sharing one pair of key crossbars, one key generator and one controller; the core's pipelined engine is this block with one bank |

### Mixcolumn without multiply-by-3

With `Tj = S0 ^ S1 ^ S2 ^ S3` for column `j`, the MixColumns outputs are

```
S'0 = Tj ^ 2*S0 ^ 2*S1 ^ S0      S'1 = Tj ^ 2*S1 ^ 2*S2 ^ S1
S'2 = Tj ^ 2*S2 ^ 2*S3 ^ S2      S'3 = Tj ^ 2*S0 ^ 2*S3 ^ S3
```

This equals the standard 2-3-1-1 matrix, because `3*S = 2*S ^ S`. The only
multiplier left is M-2, four per column. M-2 is `(S << 1) ^ (S[7] ? 0x1B : 0)`.
In an array, `Tj` is shared by the column and can be formed by XOR-ing stored
rows in parallel. Here all of it is evaluated in one step.

### Shiftrow as addressing

Shiftrow does no arithmetic. When the row is written back, the column address
of row `r` gets an offset of `r`. The value read from row `r`, column `c` is
written to column `(c - r) mod 4`. Both planes use the same offsets, so the two
halves of each byte stay together.

## The row-sequential engine

`aes_imc_rowseq` runs the same cipher using only row-wide operations. Each
step activates one word line, or two, and works through the column sense
amplifiers. Results are written back into crossbar rows. Besides the state
array `S` and key array `K` of each plane, the engine uses spare arrays as
buffer rows:

* `B` holds the four M-2 rows;
* row 0 of `T` holds `Tj`.

Each round runs these phases:

| phase | per row `i` | cycles |
|---|---|---|
| A | SAs XOR `S[i]` with `K[i]` (Addroundkey with the previous key); four S-boxes substitute the row at once; each result goes into the row buffer at column `(c - i) mod 4` (Shiftrow); the row buffer is written back to `S[i]` | 2 per row |
| KEY | the key generator overwrites `K` with the new round key | 1 |
| M2 (rounds 1-9) | four M-2 LUTs map `S[i]` to `2*S[i]` in the row buffer, which is written to `B[i]` | 2 per row |
| TJ (rounds 1-9) | `T[0] = S[0]^S[1]`, then `^S[2]`, then `^S[3]` | 3 |
| MIX (rounds 1-9) | `S[i] = T[0] ^ B[i] ^ B[(i+1)%4] ^ S[i]`, written over `S[i]` | 1 per row |

After round 10, a last row pass adds round key 10 (4 cycles), and the state
is copied to the output (1 cycle). A block takes
1 + 1 + 9x24 + 9 + 4 + 1 = **232** cycles from start to ready.

Addroundkey is folded into the next round's first phase. Because of this,
`K` still holds the previous round key during phase A, and is updated only
after it.

## Selecting the engine

`row_mode` is sampled together with every accepted `start`:

* 0 selects the pipelined engine (26 cycles);
* 1 selects the row-sequential engine (232 cycles).

`ready` and `finalout1/2` follow the engine of the last accepted block. A
`start` is ignored while that engine is busy.

## Several banks with one key generator

`aes_imc_multibank` encrypts `NBANKS` blocks at once under one key. Each bank
has its own State1/State2 crossbars and its own Subbyte, Shiftrow, Mixcolumn
and Addroundkey. There is one pair of key crossbars and one key generator.
Each round key is sent to every bank and then overwrites the stored key.
Each bank runs one full round per step, so `ready` rises 26 cycles after
`start` for any `NBANKS`. The core's pipelined engine is this block with
`NBANKS = 1`.

## Timing and control of the pipelined engine

The controller is a chain of Moore states. Each working state raises
`op_start` and holds until the round hardware answers `op_done`. In the core,
that answer is a one-cycle done flop, so every working step takes two cycles.

| step | cycles | what is written |
|---|---|---|
| IDLE, `start` sampled | 1 | – |
| LOAD | 1 | plaintext planes into State1/2, key planes into Key1/2 |
| K00 | 2 | State := State ^ Key (initial Addroundkey) |
| K01 .. K09 | 2 each | Key := next key; State := MixColumns(ShiftRows(SubBytes(State))) ^ Key |
| K10 | 2 | same, with Mixcolumn bypassed |
| OUT | 2 | `finalout1/2` := State1/2 |
| **total** | **26** | `ready` goes high on the 26th rising edge, counting the edge that samples `start` as the first |

While `ready` is high, `finalout1/2` hold the ciphertext. A `start` in READY
begins the next block at once; with back-to-back blocks, a new block is
accepted every 26 cycles. A `start` while a block is in flight is ignored.
`reset` is synchronous and active high; it clears the crossbars and the output
register. `current_state` (IDLE=0, LOAD=1, K00=2, round=3, OUT=4, READY=5) and
`current_round` (0..10) show the state of the pipelined engine's controller.

Throughput is 128 bits per 26 cycles: 66.76 Mbit/s at 13.56 MHz (an RFID
clock), and 536 Mbit/s at 108.9 MHz. 108.9 MHz is the maximum clock reported
for the architecture's FPGA prototype; the maximum clock of this RTL has not
been measured. The row-sequential engine gives 128 bits per 232 cycles,
7.5 Mbit/s at 13.56 MHz. The 26-cycle total is part of the architecture. How
those cycles are divided among the steps above is a choice of this
implementation.

## Where this RTL departs from the architecture description

* **Two engines.** The 26-cycle figure belongs to the whole-round pipelined
  datapath, which uses 16 S-boxes in parallel. The row-by-row in-array
  operations are given only as a sequence of steps, without unit counts or
  cycle counts. The row-sequential engine fixes those counts itself:
  * four S-boxes and four M-2 LUTs per row;
  * one array operation per cycle;
  * the four-operand Mixcolumn XOR done in one SA step, where the in-array
    description counts six steps.

  Offering both engines behind `row_mode` is a choice of this design.
* **Buffer rows are separate arrays.** The spare rows that hold M-2 and `Tj`
  values are modelled as extra 4x4 crossbars (`B`, `T`), not as extra rows of
  the state array.
* **Memristors are emulated.** `mr_cell` is a digital 16-state register-based
  state machine. No resistance, sensing margin or write endurance is modelled.
  The sense amplifiers appear only as their logic function.
* **The S-box ROM is computed.** It is built from the inverse-plus-affine
  definition instead of being loaded from a vendor coefficient file.
* **One key generator serves both planes.** SubWord needs whole bytes, so
  the two 64-bit key halves cannot be expanded separately. The key generator
  runs before the Addroundkey XOR, in the usual AES order.
* **Separate address paths for the S-boxes and M-2 LUTs.** In the
  row-sequential engine, the S-boxes and M-2 LUTs each have their own address
  path. The architecture describes one address decoder shared by both
  through a multiplexer.
* **Banks run in lockstep.** The architecture shares one key generator among
  many memory banks, each encrypting its own block. The core is one bank.
  `aes_imc_multibank` has `NBANKS` banks (default 4) with one key generator.
  All banks run under one controller, so they start and finish together. No
  bank count or bank sequencing is given for the architecture.
* **The column read port of `mr_crossbar` is unused by the core.** It is
  there to model the bit-line switch and is tested on its own.

## Verification

Each module has a self-checking testbench in `tb/` ending with a
`TB_RESULT checks=N failures=M` line. The reference values come from
`tb/aes_ref_pkg.sv`, a byte-oriented AES-128 model whose S-box is found by
brute-force inversion, so it shares no code with the RTL.

* `aes_imc_top_tb` runs the whole core and checks:
  * FIPS-197 C.1 in both modes, with the exact plane values of the table above;
  * FIPS-197 appendix B;
  * 200 random blocks against the reference, mixing the two modes;
  * the latency of every block, 26 or 232 cycles.

  It also forces and counts each control mechanism: Mixcolumn rounds, the
  round-10 bypass, back-to-back blocks, a `start` while busy, a reset in the
  middle of a block, row-sequential blocks and mode switches.
* `aes_imc_rowseq_tb` tests the row-sequential engine on its own.
* `aes_imc_multibank_tb` runs four banks with different plaintexts under
  one key. It checks every bank against the reference, the latency, a
  `start` while busy, and that the outputs hold while `ready` is high.
* The unit testbenches check:
  * the full S-box and M-2 tables;
  * key schedules, including the FIPS-197 round keys;
  * MixColumns, including the FIPS-197 column `db135345 -> 8e4da1bc`;
  * Shiftrow addressing;
  * word-line and bit-line behaviour of the crossbar;
  * every level of the cell;
  * the controller's step order and latency, also with a slower done answer.

Simulate any of them with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/aes_imc_pkg.sv tb/aes_ref_pkg.sv tb/aes_imc_top_tb.sv \
    --top-module aes_imc_top_tb -o sim && ./obj_dir/sim
```

The core has no size parameters. `aes_imc_subbyte` has `NSBOX`, which must be
16. `aes_imc_multibank` has `NBANKS`, tested at its default of 4. The end-to-end test runs the core exactly as synthesized.
