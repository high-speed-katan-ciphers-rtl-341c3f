# A three-stage pipelined KATAN encryption core

KATAN is a family of lightweight block ciphers with an 80-bit key and a
32-, 48- or 64-bit block. Its reference hardware is as small as possible:
the state sits in two shift registers and one round is computed per clock,
so a block takes 254 clocks or more. This core goes the other way. All 254
rounds, and the whole key expansion, are unrolled into one combinational
stage between two sets of registers. The result is a three-stage pipeline
that takes a new block at every clock edge and returns each ciphertext
three edges after its plaintext went in.

The default configuration is KATAN-32. A single parameter, `BLOCK`, builds
KATAN-48 or KATAN-64 from the same RTL.

## The cipher in brief

The plaintext is split over two registers, L1 and L2:

| variant  | \|L1\| | \|L2\| | steps per round | fa taps x1..x5   | fb taps y1..y6       |
|----------|------|------|-----------------|------------------|----------------------|
| KATAN-32 | 13   | 19   | 1               | 12, 7, 8, 5, 3   | 18, 7, 12, 10, 8, 3  |
| KATAN-48 | 19   | 29   | 2               | 18, 12, 15, 7, 6 | 28, 19, 21, 13, 15, 6|
| KATAN-64 | 25   | 39   | 3               | 24, 15, 20, 11, 9| 38, 25, 33, 21, 14, 9|

Plaintext bit i goes to L2[i] for i < |L2|, and bit i+|L2| goes to L1[i]. The
ciphertext is read out the same way. In every round r:

    fa = L1[x1] ^ L1[x2] ^ (L1[x3] & L1[x4]) ^ (L1[x5] & IR[r]) ^ ka
    fb = L2[y1] ^ L2[y2] ^ (L2[y3] & L2[y4]) ^ (L2[y5] & L2[y6]) ^ kb
    L1 = {L1 << 1, fb}        L2 = {L2 << 1, fa}

Each register shifts toward its MSB. fb enters L1 at bit 0 and fa enters L2
at bit 0, so the two registers feed each other. KATAN-48 and KATAN-64 do this
step two or three times per round. Each step uses the state the step before
it produced, and all steps of a round use the same ka, kb and IR.

Key bits: k[i] is key bit i for i < 80. After that,
`k[i] = k[i-80] ^ k[i-61] ^ k[i-50] ^ k[i-13]`, up to i = 507. Round r uses
ka = k[2r] and kb = k[2r+1].

IR[r] is the "irregular update" bit. It switches the `L1[x5]` term of fa on
or off. It is the MSB of the 8-bit LFSR `s <= {s[6:0], s[7]^s[6]^s[4]^s[2]}`
(polynomial x^8+x^7+x^5+x^3+1), which starts at 8'hFE. `katan_pkg::ir_sequence`
evaluates this at elaboration, so the 254 IR bits are constants in the
netlist.

Known answers, which the testbenches check: with key = all ones and
plaintext = 0, the ciphertexts are 7E1FF945 (KATAN-32), 4B7EFCFB8659
(KATAN-48) and 21F2E99C0FAB828A (KATAN-64). KATAN-32 with key = 0 and
plaintext = FFFFFFFF gives 432E61DA.

## Pipeline structure

```
 plain, key1..3 ──► U0 init stage ──► U1 (L1) ─┐
   (registered)                 ├──► U2 (L2) ─┼─► U4 round stage ──► U5 (L1) ─┐
                                └──► U3 (key)─┘   (254 rounds +     ─► U6 (L2) ─┴─► U7 ──► cipher
                                                   key schedule,
                                                   combinational)
                    load ──► enable of U1, U2, U3, U5, U6
```

The unit names U0..U7 are those of the source design's RTL view.

| unit | module | what it does |
|------|--------|--------------|
| U0 | `katan_init_stage` | At every clock edge, registers the plaintext split into L1/L2 and the 80-bit key assembled from `key1` (bits 31..0), `key2` (63..32) and `key3` (79..64). |
| U1, U2, U3 | `katan_reg` | Buffer registers for L1, L2 and the key. Each takes its input on an edge where `load` is high. |
| U4 | `katan_round_stage` | `katan_key_schedule` expands the key to 508 subkey bits. A chain of 254 `katan_round` instances applies the rounds. Purely combinational. |
| U5, U6 | `katan_reg` | Buffer registers for L1 and L2 after the last round. |
| U7 | (wiring in `katan_pipeline`) | `cipher = {L1, L2}`. This unit has no logic, so it is not a module. |

Constants and constant functions (register lengths, taps, steps per round,
IR) live in `katan_pkg`.

The round stage is by far the largest part. After coarse synthesis of
KATAN-32 it comes to about 3,950 cells: 3,189 one-bit XORs and 762 ANDs. The
key schedule accounts for about 1,280 of the XORs. The whole core holds 259
flip-flop bits: U0 has 13+19+80 plus a valid bit, U1..U3 have 112 plus a
valid bit, and U5/U6 have 32 plus a valid bit. The critical path runs
through all 254 rounds. Expect a low clock frequency and a high throughput
per clock.

## Timing and flow control

These rules matter when the core is connected to other logic.

* **Latency.** Suppose a block is on `plain`/`key*` at rising edge *e* and
  `load` is high. It reaches U1..U3 at edge *e+1* and U5/U6 at edge *e+2*.
  After edge *e+2*, that block's ciphertext is on `cipher` with
  `cipher_valid` high. That is three clock edges, counting the one that
  captured the input.
* **Throughput.** With `load` held high, a new block can be applied at every
  edge, and one ciphertext comes out per clock.
* **Stalling with `load`.** `load` is the shared enable of U1..U3 and U5/U6.
  While it is low, those registers hold. U0 has no enable and samples its
  inputs at every edge. A source must therefore keep a block on the inputs
  until an edge with `load` high has moved it from U0 into U1..U3. In
  practice: whenever `load` is low at an edge, present the same block again
  at that edge.
* **Delivery.** The block in U5/U6 is consumed at the next edge where
  `load` is high, because U5/U6 are overwritten there. A consumer should
  take `cipher` when `cipher_valid && load` at a rising edge.
* **Valid flag.** `plain_valid` travels with each block through 1-bit
  buffer registers and comes out as `cipher_valid`. Use it to tell real
  blocks from idle slots.
* **Reset.** `reset` is asynchronous and active high. It clears every
  register, including the valid flags.

## Where this RTL departs from, or goes beyond, its source

The source design is the pipelined KATAN-32 of the paper *High-speed KATAN
Ciphers on-a-Chip*. That paper shows the three stages as flowcharts and
gives an RTL view with unit names, port names and widths. It also reports
3 clock cycles per block. The points below were not settled there and are
this implementation's own choices:

* **Constants from the KATAN specification.** The source leaves out the tap
  positions, the IR sequence and the register lengths of KATAN-48/64. All of
  them come from the original KATAN specification, and the known-answer
  tests above confirm them.
* **Shift loops.** The source flowchart writes the register shifts as loops
  that would not terminate as printed (`L2[k] = L2[k]; ++k` starting from
  k = 18). They are read as the ordinary shift toward the MSB, which is what
  the accompanying text describes.
* **Which units hold state.** The source does not say which units are
  registers. Here U0, U1..U3 and U5/U6 are registers and U4/U7 are
  combinational, which gives the reported 3 clock cycles. In the source's
  RTL view, U4 and U7 also have `clk` and `reset` pins. They would be
  unused here, so they are left out.
* **Meaning of `load`.** The source only names `load` as the input of every
  buffer register. Its use as a pipeline stall, and the hold rule for U0
  that follows from it, are this design's reading.
* **Added valid flag.** `plain_valid`/`cipher_valid` are additions.
* **Reset style.** The source does not give it. It is assumed to be
  asynchronous and active high.
* **Merged register entities.** The separate 13-, 19- and 80-bit register
  entities of the source are one parameterized `katan_reg`. Its ports
  `input`/`output` are renamed `din`/`dout`, because those names are
  SystemVerilog keywords.
* **Throughput figures.** The source's throughput numbers are block size
  divided by the execution time of one block. This pipeline also overlaps
  blocks, one per clock.
* **Out of scope.** KTANTAN, the behavioural (35-cycle) variant and the
  software versions are not built. They are the source's points of
  comparison, and KTANTAN's different key schedule is not described there.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_katan_reg` | Takes data on `load`, holds without it, asynchronous reset. |
| `tb_katan_init_stage` | Bit mapping of plaintext and key into L1/L2/K. Valid flag. Reset values. |
| `tb_katan_key_schedule` | All 508 subkey bits for 104 keys, against a forward-running 80-bit key register. |
| `tb_katan_round` | One round for all three block sizes, 1,000 random states/subkeys/IR values. |
| `tb_katan_round_stage` | Known answers for all sizes, plus random blocks against the reference model. |
| `tb_katan_pipeline` | The default KATAN-32 core end to end. Known answers, measured 3-edge latency, a 200-block back-to-back stream, random stalls and bubbles, and a reset in mid-stream. Each mechanism must occur at least once. |
| `tb_katan_workloads` | KATAN-32, -48 and -64 cores side by side, through `katan_workload_run`. Known answers, latency, one block per clock, and streams with stalls. |

The reference model, `tb/katan_ref_pkg.sv`, is written differently from the
RTL on purpose:

* it runs the key forward through an 80-bit shift register;
* it takes IR from a stored 254-bit constant;
* it updates the state one step at a time.

Simulating a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/katan_pkg.sv tb/katan_ref_pkg.sv tb/tb_katan_pipeline.sv \
    --top-module tb_katan_pipeline
./obj_dir/Vtb_katan_pipeline
```

Every testbench finishes in well under a second. To build another
variant, set `BLOCK` on `katan_pipeline` (32, 48 or 64). Any other value
stops elaboration with an error.
