# Brute-force DES key search with rolled decryption engines

Given one 64-bit block of DES ciphertext and the plaintext it came from, the
key can be found by trying every 56-bit key in turn. Each trial is
independent of the others, so the search splits cleanly over many identical
engines. This RTL builds such a search machine. It holds 256 small DES
decryption engines. Each engine owns a fixed 1/256 of the key space. One
shared counter paces them all. Each engine decrypts the captured ciphertext
under its current key, compares the result with the known plaintext, and an
OR over all compare flags says that the key has been found.

Each engine is *rolled*: it contains one DES round and runs it sixteen times
per key. That costs throughput per engine but makes an engine small, so many
of them fit in one device. The alternative, a fully unrolled and pipelined
16-round datapath, can take a new key every clock once pipelined, but is
several times larger. It
is not part of this design.

## Block diagram

```
              reset        ctref (ciphertext)        pt (known plaintext)
                |                |                          |
          +-----v------+   +-----v------+            +------v-----+
          | key_counter|   | ct register|            | pt register|
          +--+------+--+   +-----+------+            +------+-----+
        start|      |count       |                          |
             |      |            |                          |
      +------v------v------------v---+                      |
      | des_decrypt_rolled  (x256)   |  key = {engine i, count}
      |  subkey gen -> 2 x srl16     |                      |
      |  IP -> mux -> f -> LR/RR     |                      |
      |  -> IP^-1 register           |                      |
      +--------------+---------------+                      |
                     | pt, pt_valid                         |
              +------v------+                               |
              | des_compare | <-----------------------------+   (x256)
              +------+------+
                     | match[255:0]
              +------v-------+
              | key_found_or |--> key_found, engine index
              +------+-------+
                     v
         keyout / done / exhausted registers
```

## Files

| File | Contents |
|---|---|
| `rtl/des_pkg.sv` | DES tables (IP, IP^-1, E, P, PC1, PC2), permutation functions, shared types and constants |
| `rtl/des_sboxes.sv` | the eight S-boxes |
| `rtl/des_round_f.sv` | round function f: E, key XOR, S-boxes, P |
| `rtl/des_subkey_gen.sv` | iterative key schedule, one round key per clock |
| `rtl/srl16.sv` | 16-deep addressable shift register that reverses the round keys |
| `rtl/des_decrypt_rolled.sv` | one rolled decryption engine |
| `rtl/des_compare.sv` | per-engine compare with the known plaintext |
| `rtl/key_counter.sv` | shared key counter and pacing |
| `rtl/key_found_or.sv` | OR of all match flags plus engine-index encoder |
| `rtl/des_cracker_top.sv` | the search machine (top) |
| `tb/des_ref_pkg.sv` | software DES model used as the reference by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_des_cracker_full.sv` |

## DES as used here

DES works on 64-bit blocks with a 56-bit key. A block passes through the
initial permutation IP and is split into halves L and R. Sixteen Feistel
rounds follow, each computing `L' = R` and `R' = L ^ f(R, K_i)`. The output
is IP^-1 of `R16 || L16`, with the halves not swapped after the last round.
The round function f expands R from 32 to 48 bits (E), XORs the round key,
passes the result through eight 6-to-4-bit S-boxes, and permutes the 32-bit
result (P). The key schedule applies PC1 to the key, giving two 28-bit halves
C and D. Before each round both halves rotate left, by one place in rounds
1, 2, 9 and 16 and by two places in all other rounds. PC2 then picks the 48
round-key bits. Decryption is the same computation with the round keys in
reverse order, Key16 first. All tables are those of FIPS-46.

**Bit order.** A vector `[N-1:0]` holds DES bits 1..N, with bit 1 in the most
significant position. The 56-bit search key becomes a 64-bit DES key by
appending a 0 parity bit to every group of 7 key bits
(`des_pkg::key56_to_key64`). So a key is written as 14 hex digits, and
`keyout[55]` is the first key bit.

## The rolled engine (`des_decrypt_rolled`)

This module is the heart of the design, and its timing is the part most worth
understanding.

**Datapath.** One round of logic sits between two 32-bit registers, LR and
RR. On the first round, two input multiplexers feed IP(ct) into the round.
On the other fifteen rounds they feed back LR/RR. After the sixteenth round
an output register captures IP^-1(RR || LR).

**Round keys.** The key schedule (`des_subkey_gen`) naturally produces Key1
first, but decryption needs Key16 first. The generator therefore shifts its
round keys into an `srl16` shift register. Tap 0 of that register always
holds the newest word, so after sixteen shifts, reading taps 0, 1, ..., 15
yields Key16, Key15, ..., Key1. This is the job of an FPGA LUT used in SRL16
mode. There are two such buffers, used alternately. While the rounds read the
round keys of key *j* from one buffer, the generator writes those of key
*j+1* into the other. Key generation is thereby hidden behind decryption.

**Schedule.** A `start` pulse does two things in the same cycle. It hands a
new key to the key schedule, and it begins decrypting with the key handed
over at the previous start. With the start in cycle *s*:

| cycle | key schedule (other buffer) | rounds (read buffer) |
|---|---|---|
| s | load C0,D0 = PC1(key j+1) | select IP(ct) next |
| s+1 .. s+16 | Key1..Key16 of key j+1 shifted in | rounds 1..16 with Key16..Key1 of key j |
| s+17 | idle | IP^-1 into output register |
| s+18 | (next start) | `pt_valid` pulse, `pt` = decryption under key j |

One key therefore takes 18 cycles per engine, and starts may be no closer
than 18 cycles apart (an assertion checks this). A key's result appears two
start periods after the key is handed over. The first start after reset
yields no result. The figure of 18 cycles is not stated as such by the source
of this design. It is inferred from the throughput the source reports for the
rolled engine: 64 bits x 230.063 MHz / 18 = 818 Mbit/s, matching the quoted
0.817 Gbit/s.

## Splitting the key space and pacing (`key_counter`, `des_cracker_top`)

Engine *i* (0..255) tries the keys whose upper 8 bits equal *i*. The shared
counter supplies the lower 48 bits, so the key of engine *i* at count *c* is
`{i[7:0], c[47:0]}`. Every engine gets the same `start` and the same count,
so all engines run in lockstep. The pipeline registers of the top record
which count each stage holds: counter, decryption and compare. When some
engine matches, `key_found_or` returns the lowest-numbered matching engine.
The key is then rebuilt as `{engine, count}` and latched into `keyout`.

**Ports of the top.**

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `reset` | in | 1 | synchronous, active high; while it is high, `pt` and `ctref` are loaded |
| `pt` | in | 64 | known plaintext |
| `ctref` | in | 64 | captured ciphertext |
| `keyout` | out | 56 | key found; 0 until then |
| `key_found` | out | 1 | one-cycle pulse, the OR of all compare flags |
| `done` | out | 1 | set once a key is found; the search then halts |
| `exhausted` | out | 1 | set if the whole space was searched without a match |

**Operation.** Hold `reset` high for at least one clock edge with the block
pair on `pt`/`ctref`, then release it. The inputs may change afterwards.
Edge 0 is the first rising edge at which `reset` is low. The key of count
*c* is handed over at edge 18c and decrypted from edge 18(c+1). Its result
is compared at edge 18(c+2), and `key_found` is high in the cycle after that
edge. `keyout` and `done` change at the next edge. If nothing matches,
`exhausted` is set at edge 18(2^CTR_W + 1) + 1. A new search needs a new
reset.

**Parameters.** `N_ENGINES` (default 256) must be a power of two.
`KEY_W_P` (default 56) is the width of the searched key space. A smaller
value searches only the keys 0 .. 2^KEY_W_P - 1, with the upper key bits
zero. It exists so that a whole search, including exhaustion, can be
simulated. The counter width is `KEY_W_P - log2(N_ENGINES)`.

## Performance

At full size the machine tries 256 keys every 18 cycles. At the reported
clock of 323.515 MHz, a full sweep of 2^56 keys takes 2^48 x 18 / 323.515 MHz,
about 181 days, and the average search takes half of that. The source of
this design quotes "about 5 days" for the same device count and clock. That
figure equals the average search time at one key per engine per clock, which
a 16-round rolled engine cannot reach. The two statements cannot both hold;
this RTL follows the rolled architecture, and its 18-cycle figure matches the
reported rolled throughput.

## Published example pairs

The example pairs given with the original design are reproduced as
follows:

| key (56 bit) | x | y = DES_decrypt(x, key) | engine, count | `key_found` high after edge |
|---|---|---|---|---|
| 00000000000001 | 12cf4d587bf4eb08 | b6060c26730925bc | 0, 1 | 54 |
| f0000000000011 | 12cf4d587bf4eb08 | 91dbf8a0e3f63324 | 240, 17 | 342 |

In the original material, `12cf4d587bf4eb08` is labelled the plaintext and
the other block the ciphertext. Under standard DES the relation holds only
the other way round: encrypting `12cf...` does not give `b606...`, but
decrypting it does. This design decrypts the ciphertext, as the key search
requires. So the examples are run with `ctref = 12cf4d587bf4eb08` and
`pt = b6060c26730925bc` (or `91dbf8a0e3f63324`). The reported search times
(730 and 5,850 cycles at a 10 ns clock, with four engines) came from a key
partition that is not described, so the cycle counts above are not expected
to match them.

## Where this RTL departs from, or adds to, the original description

- **Taken from the original:** the DES structure; the rolled engine with
  input multiplexers, a single round, LR/RR registers and IP^-1; the
  iterative key schedule with the rotation amounts; the SRL16 reversal of
  the round keys; the engine count of 256; the key counter driven by reset;
  per-engine compare stages; the OR producing "key found"; and the port
  names `pt`, `ctref`, `keyout`, `done`.
- **This design's own choices:** 18 cycles per key, inferred from the
  reported throughput; the two alternating SRL16 buffers; the registered
  IP^-1 output and compare; the key partition by upper key bits; lockstep
  pacing; the lowest-index encoder for `keyout`; stopping at the first
  match; the `exhausted` flag and the drain start after the last count; the
  reduced `KEY_W_P` option; and reset clearing control state only.
- **Not included:** the unrolled and pipelined alternative architecture,
  which was only compared against; FPGA-specific mapping (SRL16 primitives
  are written as plain shift registers); and any host interface for loading
  pairs or reading the key, which is not described.
- A false match is possible when one plaintext/ciphertext pair fits more
  than one key. The machine reports the first key it meets; checking the
  key against a second pair is left to the user.

## Verification

Every module has a self-checking testbench in `tb/`. It compares the module
against `des_ref_pkg`, a separately written software DES, and against
known-answer vectors: the FIPS-46 worked example (key `133457799bbcdff1`,
Key1 `1b02effc7072`, Key16 `cb3d8b0e17f5`, f(R0, K1) = `234aa9bb`,
`0123456789abcdef` <-> `85e813540f0ab405`) and the published pairs above.

- `tb_des_decrypt_rolled` checks 40 decryptions and the 18-cycle latency, at
  both the minimum and a longer start spacing.
- `tb_des_cracker_top` runs 4 engines over a 12-bit key space. It finds keys
  in several engines and at several counts, runs one search to exhaustion,
  changes the inputs mid-search, and checks the halt and the exact cycle of
  each event.
- `tb_des_cracker_full` runs the top at its default size (256 engines, 56-bit
  keys) on both published pairs.

With Verilator 5, for example:

```
verilator --binary --timing --assert rtl/des_pkg.sv tb/des_ref_pkg.sv rtl/*.sv \
    tb/tb_des_cracker_top.sv --top-module tb_des_cracker_top -o sim
obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and finishes. The
full-size build takes a minute or two to compile; its simulation is short.
The design needs no initial values: all state that is read is either reset or
written before it is read.
