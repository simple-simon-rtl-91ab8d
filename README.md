# SIMON64/128 in seven hardware architectures

SIMON is a lightweight Feistel block cipher built only from AND, XOR and
rotations. That makes it cheap in logic, and the same circuit can be arranged
anywhere from one round per clock to a block per clock. This RTL implements
SIMON64/128 (64-bit block, 128-bit key, 44 rounds) in seven arrangements. Each
is a complete cipher component: encryption, decryption and on-chip key
expansion from the master key, with no precomputed round keys supplied from
outside:

| architecture | module | clocks per block | new block every | registers (data path) |
|---|---|---|---|---|
| iterative, cache-routing, integrated pre-expansion | `simon_iter_cache` | 45 enc / 90 dec | operation | 64 state + 128 key cache + 44x32 RAM |
| iterative, RAM-routing, integrated pre-expansion | `simon_iter_ram_int` | 46 enc / 89 dec | operation | 64 + 128 + RAM |
| iterative, RAM-routing, separate pre-expansion | `simon_iter_ram_sep` | 89 / 89 | operation | 64 + 128 + RAM |
| iterative with inner-round pipelined round | `simon_iter_inner` | 89 enc / 134 dec | operation | as cache-routing + 96 inside the round |
| full loop unrolling | `simon_unrolled` | combinational | — | none |
| full outer-round pipelining | `simon_outer_pipe` | 43 clock edges latency | clock | 43 x 64 |
| mixed inner/outer pipelining | `simon_mixed_pipe` | 87 clock edges latency | clock | 43 x 64 + 44 x 96 |

The architectures, their names and most of their internal structure come from
a published study of SIMON64/128 on FPGAs. That study builds each architecture
separately and compares area and throughput. `simon_top` instantiates all seven
side by side on one shared input, so that one testbench exercises the whole
family. A real system would instantiate the one it needs.

## The cipher

The block is two 32-bit words `{l, r}`: `l` is in bits 63:32 and `r` in bits
31:0. One round is

    R(l, r, k) = ( f(l) ^ r ^ k , l ),    f(l) = (S^1(l) & S^8(l)) ^ S^2(l)

where `S^j` rotates left by `j`. Encryption applies 44 rounds with round keys
k0 … k43.

Decryption reuses the same round: swap the two words, apply 44 rounds with keys
k43 … k0, and swap back. So no architecture has a separate inverse round. They
differ only in how they get the keys in reverse order.

The key is four words `{k3, k2, k1, k0}`, with k0 in bits 31:0. Those are the
first four round keys. Each later key is

    t    = S^-3(k[i-1]) ^ k[i-3]
    k[i] = t ^ S^-1(t) ^ k[i-4] ^ C_i,     C_i = 0xFFFFFFFC ^ z3[i-4]

The constant `c = 2^32 - 4` and the one-bit sequence `z3` are folded into one
constant `C_i`. `z3` is the 62-bit sequence

    11110000101100111001010001001000000111101001100011010111011011

read little-endian: bit 0 is the rightmost digit. Read the other way round, the
cipher gives wrong results. The published test vector pins the order down:
key `1b1a1918 13121110 0b0a0908 03020100`, plaintext `656b696c 20646e75`,
ciphertext `44c8fc20 b9dfa07a`. All cipher-level testbenches check it.

Shared pieces:

- `simon_pkg`: sizes, types, `z3`, `c`, rotations, the word swap, and the state
  encoding of the iterative controllers.
- `simon_round`: one combinational round.
- `simon_key_expand`: one combinational key-schedule step. Given a round index
  and the four previous keys, it produces the next key. For indices 0..3 it
  passes the master-key word through.
- `simon_key_ram`: 44 x 32 round-key RAM. Registered read, write-first.
- `simon_round_keys`: the whole key schedule unrolled, with all 44 keys
  available at once.
- `simon_round_inner`: a round with pipeline registers inside it.

## Round keys in the iterative architectures

An iterative design keeps one round in logic and a 64-bit state register around
it. It loads the block, then runs 44 clocks of `state <= R(state, key)`.

Encryption is easy: the key schedule only ever needs the four previous keys. It
can run one step ahead of the rounds in a four-word shift register, the key
cache.

Decryption needs k43 first, and k43 exists only after all the others have been
computed. So every iterative variant stores the 44 round keys in a RAM. The
variants differ on two axes.

**When the RAM is filled.** *Integrated* pre-expansion writes each key into the
RAM as an encryption uses it. Encryptions cost nothing extra. A decryption
first runs the key schedule for 44 cycles to fill the RAM, in the place of an
encryption of a dummy block. *Separate* pre-expansion runs those 44 fill cycles
before every operation, and then both directions read their keys from the RAM.

**Where the round takes its key from.**

- *RAM-routing*: the key schedule output goes into the RAM, and the RAM output
  feeds the round. The key schedule produces all 44 keys, k0..k3 included. The
  RAM read takes one clock, so rounds run one cycle behind key generation. A
  write-first RAM makes a key written in one cycle readable in the next.
  Encryption therefore needs two initialisation cycles: load, then generate k0.
- *Cache-routing*: the round takes its key from the first word of the cache. The
  key schedule only produces k4..k43, shifted into the last cache word. During
  encryption the first cache word is also written into the RAM. During
  decryption the first cache word is loaded from the RAM output instead of from
  the second word. Because the RAM read is registered, moving k43 into the cache
  costs one alignment cycle after pre-expansion.

Cycle by cycle, counting the clock that samples `start` as clock 1:

| unit, direction | clock 1 | then | then | total |
|---|---|---|---|---|
| cache, encrypt | load block and key | 44 rounds (cache shifts, RAM written) | | 45 |
| cache, decrypt | load | 44 key-schedule steps into RAM | 1 alignment, then 44 rounds reading k43..k0 | 90 |
| RAM-int, encrypt | load | 1 cycle: generate k0 | 44 rounds, key schedule one step ahead | 46 |
| RAM-int, decrypt | load | 44 key-schedule steps (the last already reads k43 back) | 44 rounds | 89 |
| RAM-sep, either | load | 44 key-schedule steps (the last reads k0 or k43) | 44 rounds | 89 |
| inner, encrypt | load | 44 rounds of two clocks each | | 89 |
| inner, decrypt | load | 44 key-schedule steps, 1 alignment | 44 two-clock rounds | 134 |

During pre-expansion the state register keeps the input block rather than
encrypting a dummy block. The dummy result would be thrown away, so the only
difference is less switching.

## Inner-round pipelining and why it does not speed up one block

The round splits into `gamma = r ^ k`, `phi = f(l)` and `psi = phi ^ gamma`.
Registers can go after `gamma` alone (K = 1) or after both `gamma` and `phi`
(K = 2). A register after `phi` alone would leave the two halves out of step.

`simon_round_inner` provides both forms. Its `INNER_K` parameter defaults to 2.
It also registers the left word, which becomes the right word of the output.

In an iterative Feistel design the next round needs this round's whole result.
Splitting the round therefore does not let one block's rounds overlap: each
round simply takes two clocks. That is `simon_iter_inner`. Its shorter logic
path could allow a faster clock, but throughput per block does not improve.

The split pays off once several blocks share the hardware, as in the mixed
pipeline.

## The unrolled and pipelined architectures

`simon_unrolled` chains 44 rounds, and `simon_round_keys` feeds each round its
own key. For decryption a multiplexer per round selects the reversed key, and
the words are swapped at both ends. There are no registers: the result follows
the inputs after 44 rounds of logic. Register the ports if a one-clock unit is
wanted.

`simon_outer_pipe` is the same chain with a 64-bit register between each pair of
rounds, 43 registers in all. A block can enter every clock. A block presented
in one cycle comes out in the 44th cycle, 43 clock edges later.

`simon_mixed_pipe` replaces each round of the outer pipeline with the K = 2
`simon_round_inner`. A block passes 44 inner and 43 outer register stages, so
it comes out 87 clock edges later. Again a block can enter every clock.

Both pipelines carry only data, plus a valid flag, `in_valid` → `out_valid`.
The round keys come combinationally from `key_in`, and the key order and word
swap from `decrypt`. These two inputs must therefore stay constant while blocks
are inside. After changing them, let the pipeline drain for 43 clocks (outer)
or 87 clocks (mixed), or discard what comes out meanwhile. That matches the
register budget of the original design, which holds no per-block key or
direction.

## Interfaces

Iterative units (`simon_iter_*`):

- Inputs: `clk`, `rst_n` (synchronous, active low), `start`, `decrypt`,
  `key_in[127:0]`, `block_in[63:0]`.
- Outputs: `busy`, `done`, `block_out[63:0]`.
- `start` is taken when the unit is idle, or in the cycle in which `done` is
  high. `decrypt`, `key_in` and `block_in` are sampled with it and need not be
  held.
- `done` is high for one cycle. `block_out` is valid from then on, until the
  next `start`.

Pipelines:

- Inputs: `clk`, `rst_n` (clears only the valid flags), `decrypt`, `key_in`,
  `in_valid`, `block_in`.
- Outputs: `out_valid`, `block_out`.

Unrolled: `decrypt`, `key_in`, `block_in` → `block_out`, with no clock.

`simon_top` connects all units to the same `decrypt`, `key_in` and `block_in`.
It groups the iterative units' `busy`, `done` and outputs into 4-element
arrays, in the order cache, RAM-integrated, RAM-separate, inner.

## Where this RTL departs from, or fills in for, the original description

- **Mixed pipeline latency.** The original text says the mixed design takes
  only one clock more than the outer pipeline. It also puts registers inside
  every round in addition to the 43 between rounds, so every round adds a
  stage. This RTL follows the register structure: its latency is 87 edges, not
  44. The text gives 43 outer registers and the tables 44. The RTL uses 43, like
  the outer pipeline. Setting `OUTER_REGS = 0` builds the other reading: inner
  registers only, and a latency of 44 edges, one more than the outer pipeline.
- **Left word in the inner-round register.** The original mixed design's
  register count (5568 = 87 x 64) suggests only `gamma` and `phi` were
  registered inside each round. With a new block every clock, the left word
  must travel with them or consecutive blocks get mixed. Here it does. The
  cost is 44 x 32 extra flip-flops.
- **Handshakes, reset, valid flags.** None are specified in the original. The
  start/busy/done protocol, the synchronous active-low reset and the valid
  flags of the pipelines are this design's own.
- **Iterative latencies.** The cycle counts above follow from a registered,
  write-first RAM read. The original states the 1- and 2-cycle initialisation
  and the extra cycle of the cache-routing scheme, but not the RAM timing.
- **Inner-round pipelining.** The original calls its inner-round designs
  experimental and untested, and gives no control scheme for them. The
  two-clock round of `simon_iter_inner` is this design's own.
  Negative-edge-triggered inner registers were only considered, not used,
  and are not built here.
- **Not built.** Partial loop unrolling (K < 44) is mentioned only as an
  option. The FPGA area and speed results are properties of a particular
  device and tool flow and are not reproduced.

## Verification

Each module has a self-checking testbench in `tb/`. It compares against
`simon_ref_pkg`, a separate behavioural model, and prints
`TB_RESULT checks=N failures=M`. The model does not share code with the RTL.
Its key schedule is a plain loop, and its decryption applies the inverse round
`R^-1(l, r, k) = (r, f(r) ^ l ^ k)` directly, without swapping words. The model
itself is checked against the published test vector.

- `tb_simon_round`, `tb_simon_key_expand`, `tb_simon_key_ram`: leaf blocks.
  Every key index for 23 keys; RAM read latency and write-first.
- `tb_simon_iter_*`: the test vector plus random keys in both directions,
  decryption of encrypted blocks, the exact latency in clocks, the `done`
  pulse width and `busy`.
- `tb_simon_unrolled`: the test vector, random encryptions, decryptions and
  round trips.
- `tb_simon_outer_pipe`, `tb_simon_mixed_pipe`: streams of blocks at full rate
  and with random gaps, under changing keys and directions. They check order,
  exact latency and that no block is lost or added.
- `tb_simon_top`: the whole design at default sizes. Every architecture gets the
  same operations, and each result is checked. It counts encryptions,
  decryptions, pre-expansion runs, alignment cycles, two-clock inner rounds,
  full-rate bursts and direction switches, and fails if any count is zero.

- `tb_simon_throughput`: a stream of blocks through every architecture, back
  to back. It checks the clocks per block: 45, 46, 89 and 89 for the
  iterative units, one block per clock for the pipelines, with latencies of
  43 and 87 clocks. The throughput formula of the original, blocksize /
  (rounds x clock period), counts only the 44 round clocks of an iterative
  unit, without the load cycle.

To run one, for example the full design, with Verilator 5:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/simon_pkg.sv tb/simon_ref_pkg.sv tb/tb_simon_top.sv \
        --top-module tb_simon_top
    ./obj_dir/Vtb_simon_top

Every testbench finishes in seconds. The control registers are reset. The
pipelines' data registers are not, but their contents count only under
`out_valid`. `tb_simon_iter_inner_k1` and `tb_simon_mixed_pipe_k1` repeat the
inner-pipeline tests with `INNER_K = 1`. `tb_simon_mixed_pipe_inner_only`
repeats the mixed-pipeline test with `OUTER_REGS = 0`.

## Changing it

The sizes are SIMON64/128 constants in `simon_pkg` (`WORD`, `KWORDS`,
`ROUNDS`, `Z3`, `C_KS`). Moving to another member of the family means changing
these and the round count, and for a 2- or 3-word key the key-schedule
recurrence in `simon_key_expand`. The round and the architectures are written
in terms of the package constants.

`INNER_K` (1 or 2) selects the inner-round register placement in
`simon_iter_inner` and `simon_mixed_pipe`. `OUTER_REGS` (default 1) keeps or
removes the registers between rounds in `simon_mixed_pipe`.
