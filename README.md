# A FrodoKEM crypto-processor in SystemVerilog

FrodoKEM is a post-quantum key encapsulation scheme built on the plain
Learning-With-Errors problem. Almost all of its work is one kind of matrix
product, `B = A·S + E (mod q)`, where `A` is an `n × n` public matrix
(n = 640, 976 or 1344) and `S`, `E` are `n × 8` matrices of small samples.
`A` holds up to 1.8 million 16-bit entries. It is too big to store, so it is
regenerated row by row from a 16-byte seed with SHAKE128 every time it is
needed.

The processor described here rests on one observation. A single Keccak core
with a 64-bit output port produces four 16-bit entries of `A` per clock.
Each entry of `A` takes part in exactly eight multiplications, because the
other matrix always has 8 columns. An array of 32 multipliers therefore uses
entries exactly as fast as the hash makes them. The design keeps a small
four-partition buffer of `A` rows. While the hash writes the next two rows
into free partitions, the array consumes the previous two. A dual-issue
instruction dispatcher lets a hash instruction and a matrix instruction run
at the same time. KeyGen at n = 640 then takes 158,762 clocks, close to the
time the hash alone needs to expand `A`.

All three FrodoKEM security levels run on the same hardware. The level is an
input.

| level | n | D = log2 q | B (bits per message entry) | SHAKE for seeds, sampling and digests |
|---|---|---|---|---|
| FrodoKEM-640 | 640 | 15 | 2 | SHAKE128 |
| FrodoKEM-976 | 976 | 16 | 3 | SHAKE256 |
| FrodoKEM-1344 | 1344 | 16 | 4 | SHAKE256 |

The rows of `A` are always generated with SHAKE128.

## Blocks

```
             inst/valid/ready                      host port (128-bit rows)
                   |                                        |
          +--------v--------+   start/done x6    +----------v-----------------------------+
          | dispatch_unit   |<------------------>| central_controller                     |
          | IF0, IF1,       |                    |  hash seq.   array seq.  EDU seq.  CMP |
          | conflict check  |                    |  address generators, port selector     |
          +-----------------+                    +--+------+-------+-------+--------+-----+
                                                    |      |       |       |        |
                      +-----------+  +-----------+  |  +---v----+  |  +----v----+   |
                      | hash_unit |<-| pack_unit |<-+  |mul_array| |  |   edu   |   |
                      | (Keccak)  |--+-----------+     | 32 mult. | |  | 72-bit  |   |
                      +-----+-----+--> cdf_sampler --> +---------+ |  +---------+   |
                            |                                      |                |
                            +------> controller            +-------v------+ +-------v------+
                                                           | mem_bank 0   | | mem_bank 1   |
                                                           | 4 x 32 x 2048| | 4 x 32 x 1536|
                                                           +--------------+ +--------------+
```

| module | what it is |
|---|---|
| `frodo_pkg` | Level tables, CDF tables, opcodes, the 48-bit instruction word, the memory map |
| `frodo_top` | Wires everything together. Instructions and data enter through ports. |
| `dispatch_unit` | Two instruction containers (IF0, IF1). Issues up to two non-conflicting instructions at once. |
| `central_controller` | Runs each instruction. Generates all memory addresses and steers data between units and banks. |
| `hash_unit` + `keccak_round` | SHAKE128/256 sponge. One Keccak round per clock. Shared 1344-bit I/O buffer moved 64 bits per clock. |
| `pack_unit` | Packs 15-bit entries into a continuous bit string before hashing (the "60-to-64" converter) |
| `cdf_sampler` | Four constant-time CDF samplers. Each has 13 comparators and an adder tree. |
| `mul_array` | 32 multipliers of 16 × 5 bits and eight adder trees. Computes one 2×4 · 4×4 + 2×4 block per clock. |
| `edu` | Encode/Decode between a message and an 8×8 matrix, through a 72-bit shift register |
| `mem_bank` | One bank of four 32-bit RAMs with separate addresses. Two read ports and one write port. |

## How a matrix product is cut into blocks

Every matrix product is built from one operation that the array performs
each clock:

```
B(2x4) = A(2x4) · S(4x4) + E(2x4)        (16-bit entries, mod 2^16)
```

Here `S` is always a matrix of samples (entries −12..12, sent as 5-bit
two's complement). All products are rewritten so that the sample matrix is
the right operand:

* `B = A S + E`: `S` is n × 8.
* `B'ᵀ = Aᵀ S'ᵀ + E'ᵀ`: the transpose of `B' = S'A + E'`.
* `C = S' B + Eu`: computed as `Cᵀ = Bᵀ S'ᵀ + Euᵀ`.
* `M = C − B' S`: uses subtraction.

The result has eight columns, so it splits into two 4-column blocks, j = 0
and j = 1. It also splits into n/2 row pairs, i.

**MAC mode** finishes one result block per pass. A pass works as follows:

1. MBR preloads `E(i,j)` into the accumulation registers.
2. MUL streams the n/4 blocks `A(i,k)` and `S(k,j)` for k = 0..n/4−1 and
   accumulates them.
3. MBW writes the finished block back.

`B`, `C` and `M` are computed this way.

**MA mode** keeps one `S(k,j)` block loaded and sweeps i. Each beat:

1. reads `A(i,k)` and the running partial sum `E(i,j)`;
2. adds one product term;
3. writes the partial sum straight back.

This is the mode for `B'`. For `B'` the left operand is `Aᵀ`, and the rows
of `A` arrive one at a time. Four rows of `A` (two partitions) hold a full
4-wide strip of `Aᵀ`. A pass over all i uses up those four rows.

**Subtraction** (`M = C − B'S`) costs nothing extra. Each multiplier splits
its sample into a sign and a 4-bit magnitude, multiplies the 16-bit operand
by the magnitude, and complements the product when `sign XOR sub_en` is set.

**Block addition** (`Eu = E'' + Encode(u)`) reuses the MAC path. MBR
preloads one addend. MUL then runs one beat, with the other addend as the
left operand and the 4 × 4 identity as `S`.

## Memory organisation

This is the least obvious part of the design. Everything else depends on
it.

### Banks and RAMs

There are two banks. Each bank is four 32-bit RAMs side by side (RAM0–RAM3),
128 bits per row. Every RAM has its own address, so one bank access may read
four different rows, one from each RAM. Each bank has:

* two read ports with one clock of latency;
* one write port with a separate enable for each 16-bit half of each RAM.

A RAM word holds two 16-bit entries or four 8-bit entries.

| bank | rows | contents |
|---|---|---|
| 0 | 0 .. 1343 | space E: `E`, then `B` in its place (n ≤ 1344 rows). In Encaps, the A buffer after `C` is done. |
| 0 | 1344 .. 2015 | space S: `Sᵀ` or `S'` (8-bit entries, n/2 ≤ 672 rows) |
| 0 | 2016 .. 2047 | up to four 8×8 matrices at a time, 8 rows each (`Encode(u)`, `E''`, `Eu`, `C`, `M`) |
| 1 | 0 .. 1343 | space E': `E'ᵀ`, then `B'ᵀ`. In KeyGen, the A buffer. |
| 1 | 1344 .. 1535 | byte strings: seeds, pkh, salt, u, k, ss0/ss1/ss2 |

Bank 0 is 2048 rows and bank 1 is 1536 rows. On a device whose block RAM is
1024 × 32, this is 8 + 6 = 14 block RAMs.

### 16-bit matrices: the interleaved layout

A 16-bit matrix with `C` rows of the bank per row pair (C = 2 for an n × 8
matrix, C = n/4 for a row pair of `A`) stores entry (R, c) here:

```
u = R / 2      rr = R % 2      v = c / 4      h = (c / 2) % 2      e = c % 2
RAM     = 2·rr + (h XOR (u % 2))
address = base + u·C + v
half    = e                     (bits 16e+15 : 16e of the RAM word)
```

Reading along a row, four consecutive entries (one 2×4 block row) fall into
two RAMs. Two rows fall into all four RAMs at the **same** address. A 2×4
block is therefore one access with one address:

```
2x4 block rows 0-1, cols 0-3, u = 0:      RAM0: (0,0)(0,1)   RAM1: (0,2)(0,3)
                                          RAM2: (1,0)(1,1)   RAM3: (1,2)(1,3)   all at address base+0
```

The XOR with `u % 2` swaps the column halves on every other row pair. A 4×2
block, rows 4t..4t+3 and two columns, spans row pairs `u = 2t` and
`u = 2t+1`. Because of the swap, those two row pairs put the same columns
into different RAMs. The whole 4×2 block is therefore one access as well,
with two addresses. For block (0,0) of an n × 8 matrix:

```
RAM0, RAM2 -> address base + 0   (rows 0, 1; columns 0, 1)
RAM1, RAM3 -> address base + 2   (rows 2, 3; columns 0, 1; swapped into RAM 1/3)
```

This is how one stored matrix serves both as a direct and as a transposed
operand. `B` is written in 2×4 blocks during KeyGen. During the `C`
computation the same `B` is read as `Bᵀ` in 2×4 blocks, which are 4×2
blocks of `B`. No data is moved. The same trick reads `Aᵀ` out of the A
buffer for the MA pass: partitions p and p+1 hold rows 4t..4t+3 of `A`.

### The A buffer

The A buffer is n rows of a bank, split into four partitions. Each partition
holds two rows of `A` (C = n/4). HOS with destination A writes one row: the
even or odd row of a partition, chosen by a flag. While MUL reads partition
p for the MAC passes of row pair u, HOS fills partition p+1 (mod 4) with the
next two rows. In MA mode, MUL reads partitions p and p+1 while the hash
fills the other two. The dispatch unit enforces these rules (see below).

### 8-bit matrices (`Sᵀ`, `S'`)

These are 8 × n with 8-bit entries. Row r, columns 4t..4t+3 sit in RAM
`r % 4` at address `S_BASE + 2t + r/4`. The sampler delivers four entries
per clock, which are one RAM word. The 4×4 block (k, j) of `S` (rows 4k..4k+3,
columns 4j..4j+3) is then address `S_BASE + 2k + j` in all four RAMs: one
read per beat.

### Byte strings

Byte strings (seeds, digests, messages) are stored as 64-bit little-endian
words. Word W is at row `base + W/2`, in RAMs 0–1 for even W and RAMs 2–3 for
odd W.

### `E'` is stored transposed

`E'` (8 × n) is sampled row by row, but it is stored as `E'ᵀ` (n × 8) in the
interleaved layout. `B'ᵀ` then uses the same block pattern as `B`.

## Instruction set

Eight instructions, one 48-bit word each:

```
 47..45  44..40  39..38  37    36..26  25..14  13..0
 op      fl      part    bank  base    idx     cnt
```

| op | name | function unit |
|---|---|---|
| 0 | HIA: hash input absorption | hash |
| 1 | HOS: hash output squeezing | hash |
| 2 | MBR: matrix block read (preload) | MBR |
| 3 | MBW: matrix block write-back | MBW |
| 4 | MUL: one innermost-loop pass of the array | MUL |
| 5 | ENC: encode message to 8×8 matrix | EDU |
| 6 | DEC: decode 8×8 matrix to message | EDU |
| 7 | CMP: hash-packed ciphertext check | CMP |

**HIA** absorbs `cnt` words from (bank, base). Flags:

* `fl[0]`: start a new hash. SHAKE128 is used if `part[0]` is set; otherwise
  the level's SHAKE.
* `fl[1]`: this is the end of the message, so pad.
* `fl[2]`: prefix the 2-byte little-endian row index `idx` (used for `A`).
* `fl[3]`: prefix the byte 0x5F (used for sampling).
* `fl[4]`: the source is a 16-bit matrix. `cnt` counts groups of four
  entries, which go through the packer. If `idx[0]` is set, the matrix is
  stored transposed and is read column-wise.

A message may span several HIAs.

**HOS** squeezes `cnt` 64-bit words into a destination given by `fl[2:0]`:

* RAW (0): words to a byte string.
* A (1): uniform entries to A-buffer partition `part`. `fl[3]` selects the
  odd row.
* S (2): samples to the `Sᵀ`/`S'` layout.
* E (3): samples, sign-extended to 16 bits, to an n × 8 matrix.
* ET (4): samples to the transposed layout.

Sampling one 8 × n or n × 8 matrix takes `cnt = 2n` words.

**MBR** preloads one block:

* MAC mode (`fl[0] = 0`): addend block (i = idx, j = fl[4]) of (bank, base).
  With `fl[2]` set, it is read as a transposed block.
* MA mode (`fl[0] = 1`): the S block (k = idx, j = fl[4]).

**MUL** runs `cnt` beats.

* MAC mode: the left operand is chosen by the flags.
  * `fl[3]` set: A-buffer partition `part`.
  * `fl[2]` set: the transposed matrix at (bank, base), row pair idx.
  * neither set: the block (idx, fl[4]) itself, with the identity as `S`
    (block addition).

  The right operand is `S(k, fl[4])`, read from space S.
* MA mode (`fl[0]`): the left operand is `Aᵀ` read from partitions `part`
  and `part+1`. The addend and result block (i, fl[4]) sit at `idx` in the
  other bank.

`fl[1]` subtracts the products.

**MBW** writes the result block (idx, fl[4]) to (bank, base). `fl[2]` writes
it transposed.

**ENC** reads the message at (bank, base) and writes the 8×8 matrix to row
`idx` of the other bank. **DEC** goes the other way.

**CMP** reads three `cnt`-word strings ss0, ss1, ss2, stored one after
another at (bank, base). It writes the result string after them:
`ss = (ss0 == ss2) ? ss0 : ss1`. The comparison result is also on `cmp_eq`.

### Example: KeyGen

```
HIA  z, first+last                       ; seedA = SHAKE(z)
HOS  RAW -> seedA
HIA  seedSE, 0x5F prefix, first+last     ; r = SHAKE(0x5F || seedSE)
HOS  S  -> space S   (2n words)          ; S^T
HOS  E  -> space E   (2n words)          ; E
HIA/HOS row 0, row 1 -> partition 0      ; SHAKE128(i || seedA), forced 128
for u = 0 .. n/2-1, j = 0, 1:
    MBR  E(u, j)
    MUL  A partition u%4 x S(k, j), n/4 beats
    HIA/HOS  next row (2u+2+j) -> partition (u+1)%4   ; overlaps the MUL
    MBW  B(u, j) -> space E
HIA  seedA, first; HIA Pack(B), last; HOS RAW -> pkh
```

Encaps and Decaps follow the same pattern. They use the transposed MAC
passes for `C` and `M`, the identity addition for `Eu`, MA passes for `B'`,
ENC/DEC and CMP. Following the order used in the reference design, `C` is
computed before `B'`. `B` is then dead and its rows can hold the A buffer.

## Dual-instruction dispatch

Instructions enter container IF0. Each of IF0 and IF1 has a small state
machine.

* **IF1**: when idle and IF0 holds an instruction, IF1 takes it and starts
  it (IDLE → WORK). It returns to IDLE on its unit's done.
* **IF0**: goes IDLE → WAIT when it receives an instruction. From WAIT:
  * if IF1 is free, the instruction moves there;
  * if IF1 is busy and there is no conflict, IF0 starts the instruction
    itself (WAIT → WORK);
  * otherwise it waits.

  `inst_ready` is low while IF0 is occupied.

Instructions therefore start in program order. At most two run at a time.
The only overlap allowed is a hash instruction next to a matrix instruction
(MBR, MUL, MBW) that cannot disturb each other:

* an HIA that absorbs a row index plus seed (the A-row form), or
* an HOS that writes A rows into a partition the running MUL does not read.
  A MAC pass reads partition `part`; an MA pass reads `part` and `part+1`.

Everything else is serialised. The hash sequencer reads memory through the
banks' second read port. Its seed reads therefore never meet the array's
operand reads, and the controller asserts that no bank port ever has two
users in one clock.

## Hash unit, packer and sampler

**Hash unit.** The sponge is a 1600-bit state register with one Keccak round
in its feedback loop: one round per clock, 24 clocks per permutation. Next to
it is a 21-word (1344-bit) I/O buffer that shifts one 64-bit word per clock.

* Absorbing: the buffer fills with block k+1 while the core permutes block k.
  When the core finishes, the full buffer is XORed into the state in the
  same clock as round 0 of the next permutation.
* Squeezing: the rate part is copied into the buffer and a new permutation
  starts at once. The buffer drains while the core works.

A 21-word (SHAKE128) or 17-word (SHAKE256) block therefore costs 24 clocks
in steady state. Padding (0x1F … 0x80) is inserted on the fly. A four-word
input FIFO takes the memory read latency.

**Packer.** For n = 640 (D = 15) a packed matrix is a continuous bit string
of 15-bit entries, most significant bit first. Four entries make 60 bits, so
the packer collects them in a 192-bit register and releases 64-bit words.
For D = 16 it only reorders bytes.

**Sampler.** Four lanes turn each 64-bit word into four samples in one clock.
Each lane works like this:

1. Bits 15:1 of a 16-bit value are compared with all 13 entries of the
   level's CDF table at once.
2. An adder tree counts how many entries are exceeded. That count is the
   magnitude.
3. Bit 0 is the sign. The output is sign-extended to 16 bits.

All comparators run for every input, so the time does not depend on the
data.

## Multiplier array timing

The array has three pipeline stages:

1. input registers, including the S register, which loads only when `upd_en`
   is high and so can hold a preloaded block;
2. products and signs;
3. complement, adder tree, addend selection and accumulation register.

`acc_en` selects the addend: PortE, or the accumulation register. A MAC pass
is one preload beat and n/4 streaming beats. The block appears on PortB
three clocks after the last beat. In MA mode a result block leaves every
clock, three clocks after its beat.

## Encode/Decode unit

Encode maps each B-bit message group k to the entry `k · 2^(D−B)`. Decode
rounds an entry back: `((x + 2^(D−B−1)) >> (D−B)) mod 2^B`. Both go through
one 72-bit shift register and produce or consume one 1×4 block (4B bits)
per clock, 16 blocks in all.

For B = 3, 4B = 12 does not divide 64. A new 64-bit word may therefore
arrive while up to eight bits are still held, and the 8 bits above 64 hold
the overflow. The EDU reads the message through the same 64-bit word path as
the hash unit.

## Host interface

`frodo_top` has no instruction ROM and no data source of its own. A program
arrives on `inst` / `inst_valid` / `inst_ready`. Seeds, keys and ciphertext
parts are written, and results read, through `host_*`. The host port reads
or writes one 128-bit bank row per clock, with read data one clock later,
and is used only while `idle` is high.

There is no unpack hardware. A public key or ciphertext must be written in
unpacked form (the layouts above) before Encaps or Decaps. `dual` and `stall`
are status outputs for performance counting.

## Performance

All runs use the default (full) sizes and complete programs:

| workload | clocks (simulated) | published figure for this architecture |
|---|---|---|
| KeyGen-640 | 158,762 | 178.5 k |
| KeyGen-976 | 335,842 | 371.4 k |
| KeyGen-1344 | 602,220 | 656.6 k |
| Encaps-640 | 157,734 | 182.0 k |
| Decaps-640 | 164,109 | 183.5 k |

The simulated counts come from the schedules in the testbenches (the KeyGen
example above, the Encaps order `C` before `B'`, and for Decaps `M`, ss0 and
ss1 before the re-encryption overwrites `B'`). The published
description does not give its exact schedule, so the difference cannot be
attributed further. Encaps and Decaps at n = 976 and 1344 were not
simulated as whole programs.

## Simulating

Any Verilator 5 build works. Every testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops by itself. Run each one from
the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/frodo_pkg.sv tb/frodo_ref_pkg.sv tb/<testbench>.sv \
    --top-module <testbench> -o sim
./obj_dir/sim
```

| testbench | covers |
|---|---|
| `tb_hash_unit` | SHAKE128/256 known answers, multi-block absorb and squeeze, 24-clock blocks (also covers `keccak_round`) |
| `tb_pack_unit` | bit-exact packing for D = 15 and D = 16 |
| `tb_cdf_sampler` | all levels, random and boundary inputs, latency |
| `tb_mul_array` | MAC with and without subtraction, MA mode, latency |
| `tb_edu` | Encode and Decode at all levels, 16-clock shifting |
| `tb_dispatch_unit` | program order, overlap only when allowed, no lost instructions |
| `tb_mem_bank` | per-RAM addressing, half-word writes, both read ports |
| `tb_frodo_top` | full-size processor: KeyGen-640 (seedA, `Sᵀ`, every entry of `B`, pkh), then transposed packing, Encode, transposed MAC, identity addition, Decode, an MA pass, `E'ᵀ` sampling and CMP both ways. It counts every mechanism: dual issue, hash/matrix overlap, stalls, MAC/MA beats and mode switches, transposed beats, packing, sampling, ENC/DEC/CMP. Under a second of simulation. |
| `tb_frodo_encaps` | full-size Encaps-640 from a given public key: seedSE and k, `S'`, Encode, `Eu`, `C`, all of `B'` through MA passes with `A` generated into bank 0 alongside, and ss |
| `tb_frodo_decaps` | full-size Decaps-640 on a key pair and ciphertext made by the models: `M = C - B'S`, Decode, seedSE' and k', ss0 and ss1, the whole re-encryption (`B''` and `C'` checked against the ciphertext), ss2 and CMP choosing ss0 |
| `tb_frodo_keygen_levels` | full KeyGen at n = 976 and 1344 on two full-size processors, every result checked, cycle counts compared with the published ones |

`tb_frodo_keygen_levels` also needs `tb/frodo_keygen_run.sv`, which the
`-y tb` option finds. The reference models in `tb/frodo_ref_pkg.sv` (SHAKE,
sampler, packing, encoding) are written independently of the RTL.

## Where this RTL departs from or goes beyond the published description

* **Instruction encoding.** The eight instruction names and their roles are
  published. The bit fields, flags and exact semantics above are this
  design's own.
* **Multiplier-array modes.** The published timing diagram and its text
  disagree on which mode preloads `E`. This RTL follows the text: MAC
  preloads `E`, MA preloads `S`.
* **Second read port per bank.** A MAC beat reads the left operand and the S
  block from the same bank in one clock, and the hash reads seeds while the
  array runs. On an FPGA, true-dual-port block RAM gives two ports. Here the
  write port is a third, so a real mapping must schedule writes apart from
  two reads or duplicate the RAMs. The published design does not say how it
  shares ports.
* **`E'` layout.** `E'` is stored transposed, which differs from the
  published element-to-RAM drawing, so that `B'ᵀ` uses the same layout as
  `B`.
* **Interleaving formula.** The formula above is a reconstruction. It
  matches the published example (a 4×2 block at relative address 0 in RAM0
  and RAM2, and 2 in RAM1 and RAM3), but the published figure is not copied
  cell by cell.
* **Not built.**
  * The instruction ROM and the data driver: the programs would be invented,
    so instructions and data enter through ports.
  * Unpack hardware.
  * Complete Encaps and Decaps programs at n = 976 and 1344. All their
    building blocks are simulated, and Encaps-640 and Decaps-640 run as a
    whole. The Decaps run only covers a valid ciphertext; `tb_frodo_top`
    exercises CMP choosing ss1.
* **Bank 1 depth.** 1536 rows is this design's choice. It holds space E' and
  the byte strings, and gives the published total of 14 block RAMs.
* **Sampling lengths.** seedSE and pkh lengths follow the FrodoKEM
  specification (16/24/32 bytes). The testbenches use them; nothing in the
  RTL depends on them.
