# SPiME: an array of small AES-128 processor-in-memory units

SPiME (Secure Processor-in-Memory Encryption) encrypts data next to the
memory that holds it instead of shipping it to a CPU. Its idea is simple:
rather than one fast, deeply pipelined AES engine, it places many small
ones, one per memory block, each with its own minimal controller. Every unit
encrypts one 128-bit block with AES-128 in a fixed 11 clock cycles, and all
units work at the same time, so throughput grows with the number of units
while each unit stays tiny and its latency stays constant. The reference
configuration has 4096 units and encrypts 4096 x 128 = 524,288 bits per
operation.

This repository gives synthesizable SystemVerilog for the SPiME array, its
units and their AES datapath, with self-checking testbenches. It follows
the SPiME architecture paper ("Toward a Lightweight, Scalable, and Parallel
Secure Encryption Engine", Karakchi et al.). Where that description is
silent, contradicts itself, or would not give correct AES, the choice made
here is stated below.

## Organisation

```
                 clk, rst, start (global)
                          |
   data_in[i], key[i] --> +------------------------- pim_unit[i] ---------+
   (host buffers)         |  pim_controller                               |
                          |   - start/done FSM     aes_start ---------+   |
                          |   - aes_key_expansion  round_keys (1408b) |   |
                          |   - routes data/key    data_in, key       v   |
                          |                                 +-----------+ |
                          |   data_out capture <-- aes_done | aes_core  | |
                          |                   <-- aes_data_out (FSM +  | |
                          |                                 | datapath) | |
                          +-----------------------------------------------+
                                   |                 |
                              done[i]          data_out[i] --> host buffer
```

| Module | Role |
|---|---|
| `spime_top` | `NUM_PIMS` copies of `pim_unit` (default 4096) sharing clock, reset and start |
| `pim_unit` | one controller plus one AES core |
| `pim_controller` | start/done handshake, key schedule, routing of plaintext and key, capture of the ciphertext |
| `aes_core` | iterative AES-128, one round per clock, FSM `IDLE`/`INIT`/`ROUND`/`FINAL` |
| `aes_sub_bytes`, `aes_shift_rows`, `aes_mix_columns`, `aes_add_round_key` | the four AES round steps, all combinational |
| `aes_key_expansion` | combinational AES-128 key schedule producing all 11 round keys |
| `spime_pkg` | shared types, timing constants, GF(2^8) helpers, the S-box |

The host side is not part of the RTL: the CPU that writes plaintexts and
keys into buffers, drives the control lines and reads back ciphertexts, and
the buffers themselves. Their contents appear directly as the array ports
`data_in[NUM_PIMS]`, `key[NUM_PIMS]` and `data_out[NUM_PIMS]`.

## One encryption, cycle by cycle

The core's FSM is the heart of the design. Round key *i* is bits
`[128*i +: 128]` of the round-key bus. Edge numbers count rising clock
edges from the one that samples `start` at the unit's input.

| Edge | Controller | Core state during the cycle before the edge | What the edge stores |
|---|---|---|---|
| 0 | `IDLE`, sees `start` | `IDLE` | `aes_start <= 1` |
| 1 | `START_AES` | `IDLE`, sees `aes_start` | core goes to `INIT`; `aes_start <= 0` |
| 2 | `WAIT_AES` | `INIT` | `state <= data_in ^ rk[0]`, `round <= 0` |
| 3..11 | `WAIT_AES` | `ROUND`, round = 0..8 | `state <= MixColumns(ShiftRows(SubBytes(state))) ^ rk[round+1]`, `round++` |
| 12 | `WAIT_AES` | `FINAL` | `state, data_out <= ShiftRows(SubBytes(state)) ^ rk[10]`, core `done <= 1` |
| 13 | `WAIT_AES`, sees `aes_done` | `IDLE` | unit `data_out <= aes_data_out`, unit `done <= 1`; core `done <= 0` |
| 14 | `DONE` | `IDLE` | unit `done <= 0`, controller back to `IDLE` |

So:

* The core needs exactly 11 cycles (1 `INIT`, 9 `ROUND`, 1 `FINAL`) from
  the edge that takes its start to the edge that raises its `done`: 110 ns
  at 100 MHz, 22 ns at 500 MHz. The count does not depend on data or key.
* A unit raises `done` 13 edges after it samples `start` (one edge for the
  controller to launch the core, one to capture the result).
* With `start` held high, a unit starts a new block every 15 cycles: the
  controller spends one cycle in `DONE` and samples `start` again in
  `IDLE` on the next one.
* `done` is a one-cycle pulse at both levels; `data_out` keeps the last
  ciphertext until the next one replaces it.

The round datapath is SubBytes -> ShiftRows -> MixColumns -> AddRoundKey,
all combinational between the `state` register and itself. A single XOR
(`aes_add_round_key`) serves all three kinds of cycle; the FSM state picks
its operands (`data_in` and rk[0] in `INIT`, the MixColumns output and
rk[round+1] in `ROUND`, the ShiftRows output and rk[10] in `FINAL`).

## Interface rules

* `clk` and `rst` are shared; `rst` is synchronous and active high. It
  returns every FSM to idle and clears the round counter, `state`, both
  `done` flags and both `data_out` registers. A reset during an encryption
  aborts it; no `done` follows.
* `start` is global. One pulse launches every unit, and since the schedule
  is data-independent every unit raises `done[i]` in the same cycle.
* `start` is only looked at while the controller is idle. A `start` seen
  during an encryption is ignored; it neither restarts nor queues one.
* `data_in[i]` and `key[i]` are **not latched**. The host buffers must hold
  them from `start` until `done`: the core reads `data_in` in `INIT` and
  the round keys, computed combinationally from `key`, in every cycle up to
  `FINAL`.
* Each unit has its own key. A shared key is just every `key[i]` equal.

## Data layout

The 128-bit vectors use FIPS-197 byte order: byte *k* of a block (the
*k*-th byte of the plaintext) is bits `[127-8k -: 8]`, and the AES state
matrix element `[row][col]` is byte `4*col + row`. So the FIPS-197 example
key `2b7e1516 28aed2a6 abf71588 09cf4f3c` and plaintext
`3243f6a8 885a308d 313198a2 e0370734` are written exactly as those hex
strings and give `3925841d 02dc09fb dc118597 196a0b32`.

The round-key bus is 11 x 128 = 1408 bits with round key *i* in
`[128*i +: 128]`; round key 0 is the cipher key itself.

## The AES steps

* **SubBytes** looks every byte up in a 256 x 8 constant array
  (`spime_pkg::SBOX_ROM`). The array is not typed in: a constant function
  computes each entry at elaboration as the multiplicative inverse in
  GF(2^8) modulo x^8+x^4+x^3+x+1 (computed as a^254, with 0 -> 0) followed
  by the affine map b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
  Synthesis sees a ROM and may map it to LUTs or block memory.
* **ShiftRows** rotates row *r* left by *r* bytes:
  `out[row][col] = in[row][(col+row) mod 4]`.
* **MixColumns** computes per column `m0 = 2s0^3s1^s2^s3`,
  `m1 = s0^2s1^3s2^s3`, `m2 = s0^s1^2s2^3s3`, `m3 = 3s0^s1^s2^2s3`, with
  2b = shift left and XOR 0x1b if the top bit was set, 3b = 2b ^ b.
* **Key schedule**: the standard AES-128 recurrence
  `w[i] = w[i-4] ^ SubWord(RotWord(w[i-1])) ^ Rcon` every fourth word,
  `w[i] = w[i-4] ^ w[i-1]` otherwise, Rcon = 01, 02, 04, ... 1b, 36. It is
  one block of combinational logic (40 S-box lookups) inside the controller.

## Where this RTL departs from, or fills in, the published description

* **Number of full rounds.** The published FSM pseudo-code leaves `ROUND`
  when the counter *before* incrementing equals 9, which would run 10
  MixColumns rounds; the text elsewhere states 1 + 9 + 1 = 11 cycles. AES-128
  has 9 full rounds before the final one, so the exit test here is on the
  incremented value (`round + 1 == 9`).
* **Output of the final round.** The pseudo-code assigns the final state
  and then `data_out <= state`, which with register semantics would emit
  the previous round's state. Here `data_out` takes the final AddRoundKey
  result directly.
* **SubBytes as a packet stage.** The description also gives SubBytes a
  clocked wrapper (`input_valid`, `packet_type == 2`, a registered
  `temp_data`, `output_valid`). Such a stage would cost a cycle per round,
  which the 11-cycle schedule has no room for, and as described it does
  not apply the S-box. It is not built; `aes_sub_bytes` is the combinational
  substitution the core needs.
* **Where the key schedule lives.** The core takes precomputed round keys
  on `round_keys_flat`. The schedule is placed in the controller, which is
  described as responsible for "key scheduling and I/O". The core keeps a
  `key` port only to assert that round key 0 equals the key.
* **Per-unit data and key.** The block diagram draws one `Din` and one
  `Key` line running past all units, while the text has each unit fed from
  its own buffer entries. The ports here are per-unit arrays; a broadcast is
  a special case.
* **Reset of `data_out`.** The controller also clears its `data_out` on
  reset, which the published controller does not say.
* **No inter-block pipelining.** The core is called pipelined in the
  description, but the FSM it gives handles one block at a time; that is
  what is built.
* **Not built:** the host CPU, the plaintext/key/ciphertext buffers and any
  memory interface, which the description leaves outside SPiME; optional
  "control flow management" (buffering, result distribution) that it only
  mentions as a possible extension.

## Throughput arithmetic

With *N* units at clock *f*, one operation moves *N* x 128 bits in 13
cycles of unit latency (11 of them in the core). Issued back to back the
array sustains *N* x 128 bits every 15 cycles: for *N* = 4096 that is
about 35,000 bits per cycle, 17.5 Tbit/s at 500 MHz in principle (no
memory system could feed it; the I/O of the surrounding system, not
modelled here, is the real limit). The throughput numbers reported for the
architecture divide a message size by the 11-cycle latency, a different
measure. A message of 1, 4, 16 or 64 Kbit (8 to 512 AES blocks) fits in a
single operation of the 4096-unit array.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs. `tb/aes_ref_pkg.sv` is a separate software AES-128 model (S-box from
exponent/log tables, state as a byte matrix) used as the reference; the
testbenches also check the FIPS-197 example vectors directly.

| Testbench | What it checks |
|---|---|
| `tb_aes_sub_bytes` | S-box values, all 256 inputs in all lanes, random states |
| `tb_aes_shift_rows` | byte permutation 0..15, random states |
| `tb_aes_mix_columns` | known test columns (db135345 -> 8e4da1bc, ...), random states |
| `tb_aes_add_round_key` | FIPS-197 first AddRoundKey, random pairs |
| `tb_aes_key_expansion` | FIPS-197 round keys 1 and 10, all 11 round keys for random keys |
| `tb_aes_core` | FIPS-197 vectors and 50 random blocks, 11-cycle latency, one-cycle `done`, 12-cycle back-to-back period, reset abort |
| `tb_pim_controller` | handshake timing against a stand-in core, routing, round keys, capture, busy `start` ignored, reset while waiting |
| `tb_pim_unit` | ciphertexts, 13-cycle unit latency, `start` held high, reset abort |
| `tb_spime_top` | 16-unit array end to end: distinct and shared keys, all units finishing together, busy `start`, back-to-back operation (15-cycle period), reset abort; counts each of these and fails if one never happened |
| `tb_spime_workload` | 1, 4, 16 and 64 Kbit messages on a 64-unit array, split into as many operations as needed, with the cycle count of each message checked |

The array at its default 4096 units compiles and lints cleanly, but it was
not simulated end to end: Verilator flattens every unit, and 4096 of them
produce over a gigabyte of C++. The largest arrays simulated were 512
units (a one-off run of the workload test) and 64 units (the workload test
as shipped). Since the units are identical and never interact, a small
array exercises the same logic as a large one.

## Simulating and changing the design

All RTL files are in `rtl/`; `spime_pkg.sv` must be read first. With plain
Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/spime_pkg.sv tb/aes_ref_pkg.sv rtl/*.sv tb/tb_spime_top.sv \
  --top-module tb_spime_top
./obj_dir/Vtb_spime_top
```

(`rtl/*.sv` repeats the package; either drop it from the glob or add
`-Wno-MODDUP`.) Any other testbench is built the same way with its own
file and top name. The 16-unit array test builds and runs in well under a
minute; build time grows linearly with `NUM_PIMS`.

* `NUM_PIMS` (on `spime_top`) sets the array size; the architecture was
  evaluated at 256, 512, 1024, 2048 and 4096.
* `spime_pkg::CORE_CYCLES` and `PIM_LATENCY` document the schedule; the
  testbenches use them, so a change to the FSM that alters the cycle count
  shows up as a failed latency check.
* Assertions in `aes_core` and `pim_controller` check that `done` and
  `aes_start` are single-cycle pulses and that the round-key bus belongs to
  the key presented with `start`; build with `--assert` to enable them.
