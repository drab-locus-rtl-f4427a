# DRAB-LOCUS: an AES-128 core built around block RAMs and DSP slices

DRAB-LOCUS is an AES-128 encryption and decryption core for FPGAs. It is meant
to leave most of the fabric logic (LUTs and flip-flops) to other accelerators
on the same device. Most of its work is done in block RAMs and DSP slices,
which AES designs usually leave idle:

* **SubBytes** is a look-up in dual-port block RAM.
* **MixColumns** is a block-RAM look-up of GF(2^8) products, followed by a
  cascade of wide XORs in DSP slices.
* **AddRoundKey** is a 128-bit XOR spread over three DSP slices.

The design is iterative: there is one instance of each round function, and a
block passes through it nine times. The registers built into the RAMs and
DSP slices divide that one round into 12 pipeline stages. Only shift rows and
one delay line use fabric flip-flops. Because the round is 12 stages deep, 12
independent blocks can be in flight at once. Each of them may be encrypting
or decrypting, chosen per block at the input.

This repository holds synthesizable SystemVerilog for the whole core. FPGA
primitives (block RAM, DSP48E1) are written as plain RTL that behaves like the
way the design uses them. No vendor primitives are instantiated.

## The round loop

```
               +------------------------------------------------------------------+
               |                                                                  |
 in_block -> ARK_init --OR--> SUB BYTES ---> SHIFT ROWS --OR--> MIX COLUMNS ---> ARK_loop
   (2 stages)   ^     (2)            (1)    |   ^       (6)              (3)
 key sched -----+                     |            |   +--- key sched
                 key sched <----------+            +--> ARK_final (2) --> out_block
```

| loop stage | unit | what holds the register |
|---|---|---|
| 1 | sub bytes | block RAM synchronous read |
| 2 | sub bytes | block RAM output register |
| 3 | shift rows | 128 fabric flip-flops |
| 4 | mix columns | block RAM read |
| 5 | mix columns | block RAM output register |
| 6 | mix columns | DSP 1 A/B input register (Vec_3 in a fabric register) |
| 7 | mix columns | DSP 1 P register |
| 8 | mix columns | DSP 2 P register |
| 9 | mix columns | DSP 3 P register |
| 10 | add round key | DSP A1/B1 input register |
| 11 | add round key | DSP A2/B2 input register |
| 12 | add round key | DSP P register, fed back to the loop entry |

The two multiplexers in the loop are plain OR gates:

* The one in front of sub bytes merges the initial add round key, the fed-back
  loop add round key and the key schedule.
* The one in front of mix columns merges shift rows and the key schedule.

This works because every source except the one in use is held at zero. The
add round key instances and shift rows have synchronous output resets, and
the controller drives them. The key schedule drives its taps to zero except
during key expansion.

A block goes through these steps:

1. The initial add round key takes it (2 stages: one input register, P
   register).
2. It makes nine passes round the loop: rounds 1 to 9.
3. On a tenth pass it gets as far as shift rows. The shift rows output also
   feeds the final add round key (2 stages), which produces the result.

Its slot still carries data on into mix columns and the loop add round key.
The loop add round key is held in reset for that slot, so the slot comes back
to the loop entry empty. The latency is 2 + 9 x 12 + 3 + 2 = **115 cycles**.

## One datapath for both directions

Decryption uses the *equivalent inverse cipher* of FIPS-197. In it,
InvSubBytes, InvShiftRows, InvMixColumns and AddRoundKey come in the same
order as the encryption steps. The only cost is that the decryption round keys
for rounds 1..9 must be InvMixColumns(K(10-r)). Each unit therefore only needs
the block's mode bit:

* **Sub bytes.** Each 512 x 8 RAM holds the S-box at addresses 0..255 and the
  inverse S-box at 256..511. The address is `{mode, byte}`. Each RAM serves
  two state bytes through its two ports, so eight RAMs cover the state.
* **Shift rows.** Each output byte picks between the rotate-left and
  rotate-right source, depending on the mode.
* **Mix columns.** The product RAM has the same layout for both modes (see
  below). The address is `{mode, byte}`.
* **Round keys.** The key RAM address is `{mode, round}`:

| address | contents |
|---|---|
| `{0, r}`, r = 1..10 | K(r) |
| `{1, r}`, r = 1..9 | InvMixColumns(K(10-r)) |
| `{1, 10}` | K0 |

  A block in loop round r reads `{mode, r}`, and its final round reads
  `{mode, 10}`. The initial key is K0 for encryption and K10 for decryption.
  Both are held in registers.

The state is a 128-bit vector in FIPS-197 byte order: byte s(r,c) is at bits
`[127-8*(4c+r) -: 8]`.

## Mix columns as a look-up and an XOR tree

Both MixColumns matrices are circulant. Each input byte x is therefore only
ever multiplied by four constants. The product RAM stores them as one 32-bit
word, p0..p3 from the top byte down:

| address | word |
|---|---|
| x | `{x*02, x*01, x*01, x*03}` |
| 256 + x | `{x*0E, x*09, x*0D, x*0B}` |

The coefficient order is the same in both halves. As a result, one fixed
wiring builds four 128-bit vectors whose XOR is the result in either mode:

```
byte (r,c) of Vec_i  =  p[(r - i) mod 4]  of  RAM[s(i,c)]       i = 0..3
MixColumns(s)(r,c)   =  Vec_0 ^ Vec_1 ^ Vec_2 ^ Vec_3  at byte (r,c)
```

For example, output byte (0,0) in encryption mode is
`02*s00 ^ 03*s10 ^ 01*s20 ^ 01*s30`. These are p0 of s00, p3 of s10, p2 of s20
and p1 of s30.

The vectors are cut into a high 48-bit, a middle 48-bit and a low 32-bit
lane. Each lane is a cascade of three DSP slices, using the P-to-PCIN route:

* DSP 1 computes Vec_0 ^ Vec_1, with one register on A and one on B.
* DSP 2 adds Vec_2, which passes through both of its A registers.
* DSP 3 adds Vec_3, which needs three delay cycles. A slice has only two
  input registers, so the third delay is a 128-bit fabric register.

Together that is 9 DSP slices and 6 stages (2 RAM + 4 DSP).

## Slots, tracking and stalls

The controller treats the 12-stage loop as 12 time slots. A free-running
counter (0..11) names the slot at the loop entry, so the slot in loop stage k
is (phase − k) mod 12. The controller keeps:

* **Occupancy and mode shift registers.** Both are 12 bits, one bit per loop
  stage. They give each unit the mode of the block it is working on now.
* **Twelve 113-bit completion shift registers**, one per slot.
  * A 1 is shifted in when a block is accepted. It comes out exactly when that
    block's last shift rows result is in stage 3.
  * At that moment the final add round key is released, and the block's
    occupancy bit is cleared.
  * Only the last bit is read, so on an FPGA these map to LUT shift registers.
    LUT shift registers cannot be reset, so after reset a FLUSH state shifts
    zeros through them for 113 cycles.
* **Twelve round counters**, one per slot, in the key schedule. A counter is
  set to 1 when a new block enters its slot and incremented on each later
  pass. It gives the `{mode, round}` address of the loop round key, which is
  read while the block is in stage 8 and used at stage 10.

The controller applies these rules:

* **Stall.** A block accepted now reaches the loop entry two cycles later, so
  it may be accepted only if the block now in stage 10 is not live:
  `in_ready = RUN & !occ[10]`.
* **Initial add round key reset.** Its output stays at zero except in the
  cycle it delivers an accepted block.
* **Loop add round key reset.** Its output stays at zero whenever its slot is
  free. This covers a block that has just finished.
* **Key expansion.** Shift rows and all three add round key instances are
  held in reset throughout expansion.

A consequence worth knowing is how soon a slot can be reused. A finished
block's slot becomes usable again only when it reaches the loop entry. That
happens 120 cycles after the previous block entered the slot, not 115. A
saturated stream therefore runs at **12 blocks per 120 cycles**. At the
528 MHz clock quoted for the original FPGA implementation that is about
6.76 Gbit/s. The original authors' 7.055 Gbit/s figure assumes 12 blocks per
115 cycles.

## Key expansion through the datapath

Round keys are computed once per key, before any block is accepted, because
at any moment the pipeline may need any round's key in either mode. The key
schedule has no S-box or InvMixColumns of its own. It borrows the datapath:

* **SubWord.** RotWord(w3) is ORed into the top word of the sub bytes input.
  SubWord(RotWord(w3)) is read from the sub bytes output two cycles later.
  The other 12 byte lanes see zeros, and their results are ignored.
* **InvMixColumns.** A new key K(i), i ≤ 9, is ORed into the mix columns
  input with decryption mode. InvMixColumns(K(i)) is read six cycles later
  and written to `{1, 10-i}`.

The full sequence is:

1. LOAD writes K0 to `{1,10}`.
2. For i = 1..10:
   1. Do a SubWord request (3 cycles), then write K(i) to `{0,i}`.
   2. If i ≤ 9, do an InvMixColumns request (7 cycles).

Expansion takes 94 cycles. At its end the working key register holds K10,
which is the decryption initial key. A separate register holds K0.

## Interface and timing (`drab_locus_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `key_valid`, `key_ready`, `key` | in/out/in | 1/1/128 | load an AES-128 key |
| `in_valid`, `in_ready`, `in_mode`, `in_block` | in/out/in/in | 1/1/1/128 | one block per handshake; `in_mode` 0 = encrypt, 1 = decrypt |
| `out_valid`, `out_mode`, `out_block` | out | 1/1/128 | one cycle per finished block |
| `idle` | out | 1 | nothing in flight and no expansion running |

* **After reset.** The core flushes for 113 cycles, then raises `key_ready`.
  After a key is taken it expands it (94 cycles), then raises `in_ready`.
* **Blocks.** A block presented with `in_valid & in_ready` in cycle c appears
  with `out_valid` in cycle c + 115. Results leave in input order.
* **Changing keys.** A new key is taken only when the pipeline is empty.
  While `key_valid` is high no new block is accepted, so the pipeline drains.

## Where this RTL departs from the original description, and what it adds

* **Throughput.** Slots are reused after 120 cycles rather than 115 (see
  above). The pipeline structure is the published one. The 115-cycle
  throughput figure does not follow from it.
* **Sub bytes RAM count.** Eight two-byte RAMs are used, as the prose
  describes. The original resource table lists four block RAM tiles for sub
  bytes. Eight half-size (18 Kb) RAMs would fill four tiles, which may be how
  the two counts agree.
* **Initial key for decryption.** The original description mentions one
  register for the initial round key. Decryption needs K10 as its initial
  key. Here K10 comes from the expansion's working register, which ends up
  holding it.
* **The product-table figure.** One row (255) of the published table prints
  the first product as `02*02`. It was read as `FF*02`, the pattern of every
  other row.
* **Choices of this design, not given in the original description:**
  * the valid/ready handshakes, `idle` and the rekey policy;
  * the slot numbering by a phase counter;
  * the sequential key-expansion order and its length (94 cycles);
  * the length of the flush (113 cycles);
  * the key RAM's depth (32) and its one-cycle read;
  * modes of free slots are forced to 0, so a rekey while running cannot
    select the inverse tables by accident;
  * ROM contents are computed at elaboration from GF(2^8) arithmetic, not
    loaded from files. The S-box is built with exp/log tables of the
    generator 03 plus the FIPS-197 affine map. The products are built by
    repeated doubling.
* **Scope.** Only AES-128 is built. Modes of operation (CTR, GCM, ...) are
  not part of the core, and neither is a bus interface to a host processor.

## Files

`rtl/` (one module or package per file):

| file | contents |
|---|---|
| `aes_pkg.sv` | types, constants, GF(2^8) helpers |
| `sbox_bram.sv`, `sub_bytes.sv` | S-box RAM, sub bytes (8 RAMs) |
| `shift_rows.sv` | shift rows switch and register |
| `mc_bram.sv`, `dsp_xor.sv`, `mix_columns.sv` | product RAM, DSP XOR slice model, mix columns |
| `add_round_key.sv` | three-slice add round key, 1 or 2 input register stages |
| `aes_datapath.sv` | the loop plus initial and final add round key, OR merging, key schedule taps |
| `aes_controller.sv` | slots, trackers, stalls, resets, FLUSH/IDLE/KEYINIT/RUN states |
| `key_ram.sv`, `key_schedule.sv` | round-key RAM; key expansion, round counters, initial key |
| `drab_locus_top.sv` | the core |

`tb/`:

* `aes_ref_pkg.sv` is an independent AES-128 reference. Its S-box is found by
  search, and it decrypts with the standard (not the equivalent) inverse
  cipher.
* There is one self-checking testbench per module, named `tb_<module>.sv`.
* `tb_drab_locus_top.sv` is the end-to-end test. It runs:
  * the FIPS-197 C.1 known answer in both directions, with latency checked;
  * a saturating stream of 120 random blocks with random modes, checked
    against the reference, with a throughput check;
  * a key change, then a stream with random gaps.

  It counts stalls, mode switches, full occupancy (12 blocks) and rekeys, and
  fails if any of them never happened.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aes_pkg.sv tb/aes_ref_pkg.sv \
          tb/tb_drab_locus_top.sv --top-module tb_drab_locus_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. Modules are found through
`-Irtl` by file name. All simulations finish in well under a second of wall
time. Lint with `verilator --lint-only -Wall -Irtl rtl/aes_pkg.sv rtl/<module>.sv`.

The RAM models have no reset, and the 113-bit trackers are cleared only by
the FLUSH state. A simulator that starts registers at random values therefore
behaves like the hardware.

## How far it has been checked

* Every unit is checked in isolation against the reference:
  * all 512 entries of both ROMs;
  * hundreds of random states per transformation, in both modes;
  * the exact latency of each unit.
* The datapath alone is driven by a hand-written schedule, with four blocks
  in different slots and modes.
* The whole core passes the FIPS-197 known answer and several hundred random
  encryptions and decryptions under two keys.
* For each module there is a deliberately broken copy, and its testbench
  fails on it.

Nothing has been placed and routed. Clock frequency, resource counts and
power were not measured.
