# AMAZE-style MiMC accelerator in SystemVerilog

## The idea in one paragraph

MiMC-p/p is a block cipher built only from field arithmetic. Each of its
91 rounds computes `x = (x + k + c_i)^7 mod p` over the 254-bit BN254
scalar field. Every round of a single encryption depends on the round
before it, so one encryption cannot be pipelined. This design gets its
throughput from interleaving instead:

- The round unit is one deeply pipelined modular multiplier, 12 cycles
  deep, plus a transfer register. Together they form a loop of 13 stages.
- That loop is used four times to build `x^7`.
- Up to 13 *independent* encryptions share the loop, each in its own
  slot, so the multiplier does useful work in every cycle.

A batch of 13 ciphers takes 91 × 53 = 4,823 cycles, about the same time
as a single cipher. The Miyaguchi–Preneel hash used by zero-knowledge
applications sits on top of the cipher. It keeps one message per slot
("lane"), so the top accelerates 13 hashes at once.

```
 request ──► mimc_hash (13 lanes, chaining values, feed-forward)
               │
               ▼
             mimc_cipher (batch window, round counter, feedback, final key add)
               │    ▲ feedback of rounds 0..89
               ▼    │
             mimc_round = mod_add3 (x+k+c_i, 1 cycle) ► modexp7 (x^7, 52 cycles)
                                                          │
                                           barrett_modmul (12 cycles) ×1 or ×2
                                                          │
                                           int_mult ×3 (3 cycles each)
```

## Files

| file | contents |
|---|---|
| `rtl/amaze_pkg.sv` | field width, p, Barrett constant Z, rounds (91), batch (13), `add_mod` |
| `rtl/int_mult.sv` | 3-stage split integer multiplier with pairwise addition tree |
| `rtl/barrett_modmul.sv` | 12-cycle pipelined Barrett modular multiplier |
| `rtl/modexp7.sv` | 13-slot recirculating x^7 unit (1 or 2 multipliers) |
| `rtl/mod_add3.sv` | `x + k + c mod p` (two modular adds) |
| `rtl/mimc_round_constants.sv`, `rtl/mimc_constants.hex` | round-constant ROM c_0 .. c_91 |
| `rtl/mimc_round.sv` | one round: add register followed by the x^7 unit |
| `rtl/mimc_cipher.sv` | batch MiMC-p/p cipher, 91 rounds |
| `rtl/mimc_hash.sv` | **top**: 13-lane Miyaguchi–Preneel hash plus raw cipher mode |
| `rtl/peasant_modmul.sv` | DSP-free shift-and-add modular multiplier (254 iterations) |
| `rtl/modexp7_serial.sv` | one-at-a-time x^7 on shift-and-add multipliers |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mimc_hash_amz3` |
| `tb/amaze_ref_pkg.sv` | golden models (wide-integer `%`, reference MiMC) |
| `tb/modexp7_bench.sv`, `tb/mimc_cipher_bench.sv` | helpers that instantiate one configuration |

## Field arithmetic

### Integer multiplier (`int_mult`)

A 254 × 254 product is too wide for one DSP slice. The multiplier splits
it as follows:

- **Splitting.** `y` is cut into 27-bit chunks: 10 chunks for 254 bits.
  `x` is cut at bit 127 into `x_lo = x[126:0]` and `x_hi = x[253:127]`.
- **Partial products.** Each `x`-half times each `y`-chunk is one partial
  product, of DSP-sized width on the chunk side.
- **Addition tree.** The ten partial products of one half are summed
  pairwise. Neighbours are combined first, the second shifted by 27 bits.
  Then pairs of pairs are combined with a shift of 54, then 108, then 216.
  The carry depth therefore grows as log2 of the chunk count, not
  linearly.
- **Three pipeline stages:**
  1. `x_lo` partial products.
  2. `x_lo` tree sum, and in parallel the `x_hi` partial products.
  3. `x_hi` tree sum, shifted by 127, plus the `x_lo` sum.
- **Throughput.** One new operand pair is accepted per cycle. There is no
  valid signal; callers delay their own control bits.

`AW`, `BW` and `CHUNK` are parameters:

- The same module serves all three products of the Barrett reduction:
  254×254, 255×255 and 255×254.
- `CHUNK = 16` gives the smaller-DSP variant used for the Artix-7 and
  Kintex results.

### Barrett modular multiplier (`barrett_modmul`)

With `n = 254` and `Z = floor(2^508 / p)`:

```
w = a*b                 M1  cycles 1-3,  transfer register at 4
t = (w >> 253) * Z      M2  cycles 5-7,  transfer register at 8
u = (t >> 255) * p      M3  cycles 9-11
y = w - u (mod 2^256), minus p up to twice      registered at 12
```

- Each multiplication costs 3 stages plus 1 transfer register. Three of
  them give the 12-cycle latency at full throughput.
- The low 256 bits of `w` are delayed alongside the pipeline.
- A valid bit and a caller sideband of any width travel with the
  operands. `modexp7` uses the sideband to carry its whole per-request
  state.

**The hard part is the error bound.** The quotient estimate
`t >> (n+1)` can be up to 2 below `floor(w/p)`. So `w - u` lies in
`[0, 3p)`, and `3p > 2^255`. The subtraction therefore keeps `n+2 = 256`
low bits, not `n+1`. With `n+1` bits, a result between 2^255 and 3p would
wrap and come out wrong. The testbench includes operands near `p-1`, where
this case occurs.

### Modular addition (`mod_add3`)

`mod_add3` computes `(x + k) mod p`, then adds `c mod p`. Each step is a
255-bit add followed by one conditional subtraction. It is purely
combinational.

## The x^7 loop (`modexp7`) — slot scheduling

This is the core of the design.

The multiplier (12 stages) and one transfer register form a 13-stage
ring. A request enters the ring and goes round once per pass. Its state
travels in the multiplier sideband: the base `x`, the saved `x^2`, a
2-bit pass counter and the caller's sideband.

| pass | NUM_MULT = 1 | NUM_MULT = 2 (second multiplier B) |
|---|---|---|
| 0 | x^2 = x·x | x^2 = x·x |
| 1 | x^4 = x^2·x^2 | A: x^4 = x^2·x^2, B: x^3 = x^2·x |
| 2 | x^6 = x^4·x^2 | x^7 = x^4·x^3 (last) |
| 3 | x^7 = x^6·x (last) | — |

Latency is 4 × 13 = 52 cycles with one multiplier, or 3 × 13 = 39 with
two.

**Admission rule.** A request at the transfer register that still has
passes to go is fed straight back into the multiplier. Feedback has
priority over new work:

- `in_ready = !recirc`.
- Started empty, the unit accepts 13 requests in 13 consecutive cycles.
- It then refuses new requests until results start leaving.
- A slot becomes free in the cycle its result leaves, and can be refilled
  in that same cycle.
- No request can stall another, and there is no buffering.

**Batch alignment across rounds.** A round takes 53 cycles: one for the
key/constant add and 52 for `x^7`. That is 4 × 13 + 1. Each request
therefore comes back to the round unit one cycle after its own slot
freed up. The batch as a whole moves by one slot per round and stays
together: 13 requests that entered in 13 consecutive cycles keep finding
their slot free in every round.

The cipher controller relies on this. It asserts that a fed-back request
never finds the round unit busy.

## Round and cipher (`mimc_round`, `mimc_cipher`)

**`mimc_round`** has one register stage that adds `k + c_i` (via
`mod_add3`), followed by the x^7 unit.

- The stage has its own valid/ready handshake.
- It holds its request while the exponentiator refuses it.

**`mimc_cipher`** runs the 91 rounds:

- **Feedback.** A request leaving round `i < 90` is fed back with round
  index `i+1`. Its key and the caller tag ride in the sideband.
- **Output.** After round 90, `y = x + k + c_91` is formed
  combinationally and leaves as a one-cycle `out_valid` pulse. The key and
  the tag leave with it.
- **Batch controller** (states IDLE → LOAD → RUN):
  - The first request accepted while idle opens a 13-cycle admission
    window.
  - Requests offered inside that window are accepted, at most one per
    cycle.
  - After the window, `in_ready` stays low until the last request of the
    batch has left.
  - A partial batch (fewer than 13) works the same way.
- **Timing.** Every request leaves exactly 4,823 cycles after acceptance,
  or 3,640 with `NUM_MULT = 2`. A full batch of 13 finishes 12 cycles
  later.

**Round constants** come from a 92-entry ROM loaded with `$readmemh` from
`rtl/mimc_constants.hex`, relative to the directory the simulator runs
in.

- `c_0 = 0` and `c_91 = 0`.
- `c_i = H_i mod p` for `1 ≤ i ≤ 90`, where:
  - `H_0 = SHA3-256("mimc")`,
  - `H_i = SHA3-256(H_{i-1})`, each read as a big-endian 256-bit integer.
- An application that must match another MiMC implementation replaces
  the file, or points the `INIT_FILE` parameter elsewhere.

## Top: the hash lanes (`mimc_hash`)

The top computes a Miyaguchi–Preneel hash:

`y_0 = 0`, `y_i = MiMC(x_i, key = y_{i-1}) + y_{i-1} + x_i`, digest `y_m`

It has 13 lanes. Each lane holds one message's chaining value `y` and the
block currently in flight, which the feed-forward addition needs.

| port | meaning |
|---|---|
| `req_valid / req_ready` | handshake. `req_ready` is low when the cipher is not admitting, or the named lane already has a block in flight |
| `req_mode` | 1 = hash block, 0 = raw cipher `MiMC(req_x, req_k)` (lane state untouched) |
| `req_lane[3:0]` | lane 0..12 |
| `req_first` | hash mode: block 1 of a new message (key 0) |
| `req_last` | hash mode: return the digest after this block |
| `req_x`, `req_k` | block / cipher message; cipher key (cipher mode only) |
| `res_valid` | one-cycle pulse, with `res_mode`, `res_lane`, `res_y` |
| `busy` | requests in flight |

- Intermediate hash blocks produce no result.
- A result appears 4,824 cycles after acceptance: 4,823 in the cipher plus
  the top's output register.
- To hash 13 messages of `m` blocks, the host issues block 1 of every lane
  in one batch, then block 2 once the lanes free up, and so on. Each
  batch of 13 blocks costs one cipher pass.
- Padding and the mapping of bytes to field elements are left to the host.

## Configurations

These are parameters of `mimc_hash`, passed down the hierarchy:

| parameter | default | meaning |
|---|---|---|
| `MODMUL` | 0 | 0: pipelined Barrett (AMZ-1/AMZ-2). 1: shift-and-add multipliers, batch 1 (AMZ-3, no DSPs) |
| `NUM_MULT` | 1 | multipliers per x^7 unit. 2 gives AMZ-2 (3,640 cycles/batch), or the two-multiplier AMZ-3 |
| `CHUNK` | 27 | DSP operand width. Use 16 for the smaller-DSP devices |
| `ROUNDS_P` | 91 | rounds (the constant file must hold `ROUNDS_P+1` lines) |
| `INIT_FILE` | `"rtl/mimc_constants.hex"` | round-constant file |

**AMZ-3** (`MODMUL = 1, NUM_MULT = 2`) replaces each product with the
Russian-peasant multiplier:

- It takes one bit of `b` per cycle, with a conditional add and a
  doubling, each reduced by one subtraction of p.
- One product takes 254 iterations plus a load cycle.
- `modexp7_serial` runs x^2, then x^4 and x^3 in parallel, then x^7. That
  is 769 cycles per `x^7`.
- A cipher takes 91 × 770 = 70,070 cycles. Only one request is in flight
  at a time.

## Where this RTL departs from the paper

1. **Barrett width.** The final subtraction uses n+2 bits, where the paper
   uses n+1, for the error-bound reason explained above. The reductions
   compare `y ≥ p`; the paper's listings write `y > p`, which lets `y = p`
   through.
2. **Split point.** The paper's pipeline figure labels the upper x part
   `x[254:126]`. Its text and formula split at 2^127 with
   `x_0 = x[126:0]`. The text is followed.
3. **Hash notation.** The paper writes `MiMC(y_{i-1}, x_i)` but describes
   `y_{i-1}` as the key. Here `y_{i-1}` is the key and `x_i` the cipher
   input, as in its hash figure.
4. **Constants and IV.** The paper gives no round constants and no
   initial value. The constants above and `y_0 = 0` are this design's
   own.
5. **53-cycle round.** The paper gives 52 cycles for x^7 and 4,823 cycles
   for 91 rounds. The extra cycle per round is spent here on the
   key/constant addition register.
6. **AMZ-3 cycle count.** The paper reports 72,028 cycles; this design
   takes 70,070. The paper does not describe its controller.
7. **Host interface.** The lane/request interface, the raw cipher mode and
   the batch-window controller are this design's own. The paper
   describes a host (CPU) feeding batches, which is not modelled.
8. **Not built:**
   - The comparison designs AMZ-1a/1b/2a/2b, which use a
     synthesizer-inferred 254-bit `*` multiplier with no pipelining.
   - The host CPU.
   - Vendor-specific DSP/BRAM mapping: the multiplies are plain `*` on
     27-bit chunks and are left to synthesis.

   Resource counts, clock frequencies and the CPU speed-up figures are not
   reproduced.

## Simulating with Verilator

Run from the repository root, because the constant file path is relative.
For example, for the full-size top-level test:

```
verilator --binary --timing --assert --top-module tb_mimc_hash \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/amaze_pkg.sv tb/amaze_ref_pkg.sv tb/tb_mimc_hash.sv
./obj_dir/Vtb_mimc_hash
```

Every testbench ends with a line of this form, followed by `$finish`:

```
TB_RESULT checks=<n> failures=<n>
```

A watchdog stops a hung run.

To run another test, substitute its name: `tb_int_mult`,
`tb_barrett_modmul`, `tb_modexp7`, `tb_mod_add3`,
`tb_mimc_round_constants`, `tb_mimc_round`, `tb_mimc_cipher`,
`tb_peasant_modmul`, `tb_modexp7_serial` or `tb_mimc_hash_amz3`. The `-y`
options find the other modules automatically.

What the main tests cover:

- **`tb_mimc_hash`** runs the top at its default parameters. It checks:
  - full batches, held and stalled lanes, and mixed cipher/hash traffic;
  - multi-block messages against a reference model;
  - the 4,824-cycle latency.
- **`tb_mimc_cipher`** checks 4,823 and 3,640 cycles per request.
- **`tb_modexp7`** checks 52/39 cycles and the 13-in-a-row admission
  pattern.
- **`tb_mimc_hash_amz3`** checks the DSP-free build, with a latency of
  70,071 cycles.
