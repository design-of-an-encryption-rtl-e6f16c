# Dual-engine AES and 3DES encryption core

This is an encryption block for a network-security system-on-chip. One
module, `crypto_top`, holds two independent cores that share only the clock
and reset:

* an **AES core** for the ECB, CBC, CTR, GCM (counter part) and XTS modes
  with 128-, 192- and 256-bit keys;
* a **3DES core** (encrypt-decrypt-encrypt with three 64-bit keys) with a
  key-parity check.

The main idea of the AES side is throughput. An iterative AES engine does one
round per clock, so a 128-bit block takes 10, 12 or 14 cycles. This core has
**two** such engines. Their start times are offset by half a block time, so
between them they finish one block every Nr/2 cycles. CBC encryption is the
exception. Each block there depends on the previous result, so only engine 0
runs.

Everything is plain synthesizable SystemVerilog. The S-box tables are
computed from their mathematical definition when the design is elaborated.
The tests run with Verilator alone.

## Block diagram

```
 crypto_top
 ├── aes_core ─────────────────────────────────────────────────────────┐
 │    aes_mode_ctl   state machine, input mux, output XOR, CBC chain,  │
 │                   CTR/GCM counter, XTS tweak, ciphertext stealing   │
 │    dual_aes_ctl   which engine gets the next block and when,        │
 │                   round count, output multiplexer select            │
 │    aes_key_expand ×2  (KX0: K1;  KX1: K1, or K2 for the XTS tweak)  │
 │    aes_cipher     ×2  (AES0, AES1: one round per cycle)             │
 └──────────────────────────────────────────────────────────────────────┘
 └── des3_core   48-round Feistel network, 6 rounds per cycle, CBC
```

Shared definitions live in `aes_pkg` (round transforms, XTS alpha multiply,
encodings) and `des_pkg` (the FIPS 46-3 tables, round function and key
schedule).

## Round keys: one 128-bit word per cycle for every key size

The engines use one 128-bit round key per round. The AES key schedule,
however, makes Nk = 4, 6 or 8 words at a time. `aes_key_expand` reconciles
the two as follows:

* **128-bit keys.** One schedule step gives one round key. The unit emits
  one key per cycle.
* **256-bit keys.** One step gives 8 words, which is two round keys. The
  step runs every second cycle: the first cycle outputs the upper half and
  the second the lower half. Steps alternate between the full step (with
  RotWord and Rcon) and the SubWord-only step.
* **192-bit keys.** This case is the awkward one, because one step gives
  6 words, which is 1.5 round keys. A modulo-3 phase counter and a holding
  register (Reg3) regroup them:

| phase | output round key | Reg3 after | schedule register |
|---|---|---|---|
| 0 | upper 128 bits of the current 192-bit group | its low 64 bits | advances to the next group |
| 1 | Reg3 (64) ‖ upper 64 bits of the new group | the new group's low 128 bits | holds |
| 2 | Reg3 (128) | — | advances |

So every three cycles, two 192-bit groups become three round keys.

The round keys are written into a 15 × 128-bit table with two read ports,
one for each engine. Because of the table, decryption can read the keys in
reverse order, and both engines can work on different rounds. `ready` rises
Nr + 2 cycles after `load`.

`fk` is the last Nk words of the schedule, left-aligned like the key inputs.
It is the starting key of a decryption key schedule, or a check value.

## The AES engine

`aes_cipher` performs the initial AddRoundKey in the cycle that loads the
block. After that it does one round per cycle, so the result appears (`done`)
exactly Nr cycles after `load`. An engine is free again in the cycle its
result leaves.

Decryption uses the straight inverse cipher: InvShiftRows, InvSubBytes,
AddRoundKey and InvMixColumns, with the round keys read backwards.
InvMixColumns is implemented as a small pre-multiplication followed by the
forward MixColumns.

## Scheduling the two engines

`dual_aes_ctl` counts cycles since the last load. It allows the next load
only when both of these hold:

* the engine whose turn it is is free;
* at least Nr/2 cycles have passed since the last load (Nr cycles in CBC).

With data always available, this gives the following steady state for a
256-bit key:

```
cycle    0        7        14       21       28
AES0     load B0 ─────────► B0 out / load B2 ─────────► B2 out / load B4
AES1              load B1 ─────────► B1 out / load B3 ...
```

Results leave in the order the blocks came in, through one 2:1 multiplexer
selected by the engine that just finished. Two engines never finish in the
same cycle (an assertion checks this).

| key | rounds Nr | ECB/CTR/GCM/XTS: cycles per block | CBC: cycles per block |
|---|---|---|---|
| 128 | 10 | 5 | 10 |
| 192 | 12 | 6 | 12 |
| 256 | 14 | 7 | 14 |

For the XTS tweak, the controller can also force the next load onto
engine 1. That engine's key expander holds K2 for this one block.

## Mode data path and stream protocol (`aes_mode_ctl`)

A stream begins with a one-cycle `start`. At that point mode, direction, key
size, keys and `iv` are sampled. The key expanders then run, and in XTS the
first tweak T0 = E_K2(iv) is computed. After that the core raises `read`.

A block moves into the core in any cycle with `read && cen`. Its flags
`endc`, `newiv`, `cts` and `be` move with it. The source may drop `cen` at
any time. Each result appears on `q` with `write`. `done` pulses one cycle
after the last `write`.

| mode | to the engine | result |
|---|---|---|
| ECB | D | E(D) |
| CBC encrypt | D ⊕ C(i−1) | C(i) |
| CBC decrypt | D | D(D) ⊕ C(i−1) |
| CTR | counter | D ⊕ E(counter); the counter steps as one 128-bit number |
| GCM | counter | D ⊕ E(counter); only the low 32 bits step; the last block keeps `be`+1 bytes |
| XTS | D ⊕ T | E(D ⊕ T) ⊕ T; then T ← T·α |

The first counter value is `iv` itself. A value that must be XORed after the
engine (the plaintext in CTR/GCM, T in XTS, the previous ciphertext in CBC
decryption) cannot wait on the input port. It travels in a side register
belonging to the engine that took the block, together with flags saying what
to do with the result.

**XTS details** (IEEE 1619 conventions):

* α multiplication treats the tweak as a little-endian 128-bit number,
  shifts it left by one bit and reduces with 0x87.
* `newiv` marks the last block of a data unit. The `iv` present with that
  block is the next unit's tweak input. The core lets both engines drain,
  computes the new T0, and continues.
* `cts` marks the last full block before a short final block of `be`+1 bytes.
  The full block's result is kept in a "save" register. Its first `be`+1
  bytes become the short output. The rest is stolen to fill the short block,
  which is processed with the next tweak (on encryption) or with the current
  one (on decryption, where the order of the two tweaks swaps).
* Both results are written in stream order, and the short one is padded with
  zeros.

## 3DES core (`des3_core`)

`des3_core` encrypts with C = E_K3(D_K2(E_K1(P))) and decrypts with
P = D_K1(E_K2(D_K3(C))).

The three DES passes are built as one 48-round Feistel network. IP is applied
once at the start and FP once at the end. Between passes, the halves are
swapped back, because FP and IP cancel. `ROUNDS_PER_CYCLE` (default 6) rounds
are unrolled per clock, so a block takes 48 / 6 = 8 cycles plus one cycle to
take it in. The subkeys of all three keys are computed when `start` arrives.

Blocks are chained in CBC with `iv`. `write_error[i]` is set when key i+1 has
a byte with even parity. `done` comes with the last `write_enable`.

## Ports of `crypto_top`

The ports are the two cores' interfaces, prefixed `aes_` and `des_`, plus
`clk` and `reset_n` (low active).

**AES side:**

* `cen`: the input block is valid.
* `mode[2:0]`: 000 GCM, 001 CBC, 010 CTR, 011 ECB, 100 XTS.
* `encrypt`: 1 to encrypt, 0 to decrypt.
* `ks[1:0]`: key size, 00 / 01 / 10 for 128 / 192 / 256 bits.
* `newiv`, `cts`: XTS data-unit markers (see above).
* `start`: begins a stream.
* `read`: the core takes the block this cycle.
* `d[127:0]`: input block.
* `k1`, `k2[255:0]`: keys, left-aligned. A 128-bit key uses [255:128] and a
  192-bit key uses [255:64].
* `iv[127:0]`: CBC IV, CTR/GCM initial counter, or XTS tweak input.
* `be[3:0]`: length of the last block in bytes, minus 1.
* `endc`: marks the last block.
* `q[127:0]`, `write`: result block and its strobe.
* `fk[255:0]`, `fkvalid`: final round key and its strobe.
* `done`: pulses after the last result.
* `icg_disable`: accepted but has no effect. There are no clock-gating cells
  in this RTL.

**3DES side:**

* `d`, `k1`, `k2`, `k3`, `iv`: 64 bits each.
* `encrypt`, `start`, `endc`.
* `pt_valid` / `pt_ready`: a block is taken when both are high.
* `q`, `write_enable`, `done`.
* `write_error[2:0]`: key parity errors.

## Throughput against the published figures

The figures below are for the 450 MHz clock the design was reported at.

| algorithm | key | built (Mbit/s) | published (Mbit/s) |
|---|---|---|---|
| AES ECB/CTR/GCM/XTS | 128 | 11520 | 12566.5 (ECB), 11759.6 (CTR, GCM) |
| | 192 | 9600 | 10478.6, 9803.8 |
| | 256 | 8228.6 | 9373.7, 8406.0 |
| AES CBC | 128 | 5760 | 6949.9 |
| | 192 | 4800 | 5887.0 |
| | 256 | 4114.3 | 5168.1 |
| 3DES | 192 | 3200 | 3297.3 |

The "built" column is 128 bits × (2 or 1) / Nr cycles × 450 MHz. The
published AES numbers are 4–26 % higher. That would need fewer than one
cycle per round, and the published text says an engine takes 14 cycles for a
256-bit block. The published 3DES number works out to about 8.7 cycles per
block. The 6-rounds-per-cycle default (9 cycles) is this design's estimate
from that figure.

## Departures and own choices

* **GCM is the counter-mode encryption only.** There is no GHASH and no
  authentication tag. The interface has no ports for additional data or for
  a tag.
* **EndC.** `endc` ends the stream in every mode (the interface describes it
  for GCM/CTR only). XTS streams end with `endc` on their last block.
* **3DES chaining.** The 3DES core always chains in CBC, since it has an IV
  input and no mode input.
* **Timing details are this design's own.** These are not specified anywhere
  and were chosen here:
  * Nr cycles per block;
  * the key-expander latency;
  * the side registers;
  * zero padding of short outputs;
  * `done` one cycle after the last AES result.
* **Round keys are stored in a table.** The expanders write the round keys
  into a table. The published 192-bit description instead streams them
  straight to the engine, three keys per three cycles. Here the same
  three-phase regrouping feeds the table, which lets the two engines and
  decryption read keys in any order.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The AES reference model
(`tb/aes_ref_pkg.sv`) is an independent byte-level implementation. It is
checked against the FIPS-197 example vectors. The DES reference model
(`tb/des_ref_pkg.sv`) is a textbook 16-round DES. It is checked against the
well-known example with key 133457799BBCDFF1.

| testbench | what it covers |
|---|---|
| `tb_aes_key_expand` | all round keys for 3 key sizes, FIPS-197 key vectors, `ready` timing, `fk` |
| `tb_aes_cipher` | FIPS-197 C.1–C.3 both ways, random blocks, Nr-cycle latency |
| `tb_dual_aes_ctl` | round count, Nr/2 stagger, alternation, CBC single engine, forced engine 1, output select |
| `tb_aes_core` | every mode × key size × direction against the model, XTS with stealing and data-unit changes, source pauses, block rate, `done`, `fk` |
| `tb_des3_core` | DES example through the core, random 3DES-CBC both ways, parity flags, 9-cycle rate |
| `tb_crypto_top` | the whole top at default parameters, with AES streams and 3DES jobs running at the same time |

`tb_crypto_top` counts how often each mechanism happens and fails if any
count is zero. The mechanisms counted are:

* both engines busy at once;
* a CBC load onto engine 0 alone;
* 192-bit and 256-bit key expansion;
* the tweak on engine 1;
* ciphertext stealing;
* NewIV;
* GCM last-block masking;
* CTR blocks;
* decryption;
* source pauses;
* 3DES blocks and 3DES decryption;
* parity errors;
* AES and 3DES busy together.

To simulate, for example the top:

```
verilator --binary --timing --assert --top-module tb_crypto_top \
  rtl/aes_pkg.sv rtl/des_pkg.sv rtl/aes_key_expand.sv rtl/aes_cipher.sv \
  rtl/dual_aes_ctl.sv rtl/aes_mode_ctl.sv rtl/aes_core.sv rtl/des3_core.sv \
  rtl/crypto_top.sv tb/aes_ref_pkg.sv tb/des_ref_pkg.sv tb/tb_crypto_top.sv
./obj_dir/Vtb_crypto_top
```

The testbenches call `aes_ref_pkg::init_tables()` first. The model's S-box
tables are filled there once instead of on every lookup, which keeps
Verilator's build time short.
