# An RLWE ⊗ RGSW accelerator for FHEW/TFHE-style FHE

Third-generation FHE schemes (FHEW, TFHE) bootstrap by running the same operation thousands of
times: an RLWE ciphertext (two polynomials `a`, `b` of degree N modulo Q) is multiplied by an
RGSW ciphertext. The RLWE is decomposed into `dc` digits of base `B_G`, each digit polynomial
is multiplied by a key RLWE, and the products are summed. The same datapath, with a
substitution `X → X^k` in front and `dc` rather than `2·dc` products, performs the RLWE
substitution and key switching used to unpack ciphertexts in private set intersection (PSI).

This RTL implements such an accelerator as one streaming *compute pipeline*:

```
 RLWE in (NTT domain)
   │
   ▼
 4 × INTT module ──4:1 MUX──► poly subs ──► pipelined NTT (log N stages, ──► poly MAC ──► RLWE out
 (non-pipelined,                (X→X^k,       decomposition in the             (× key RLWE,
  2 butterflies each)            bypass)       first stage)                     accumulate)
                                                                                   ▲
                                                         key load FIFO ◄── DDR ────┘
```

The pipeline is deliberately **asymmetric**. An INTT is needed once per input polynomial. The
NTT, however, runs once per *digit*, i.e. `2·dc` times per RLWE. The INTT side therefore uses
a few small iterative (non-pipelined) INTT units. The NTT side is fully unrolled: one hardware
stage per butterfly layer, so it accepts a new polynomial every N/4 + 3 cycles. With N = 2048
and `dc` = 6, one RLWE ⊗ RGSW keeps the NTT busy for 12 pass times. Meanwhile each INTT unit
needs about 12 pass times for its RLWE, so four INTT units are more than enough.

The clock target is 125 MHz. Coefficients are 54 bits wide, N is 1024 or 2048, and Q is any
NTT-friendly prime of up to 54 bits (Q ≡ 1 mod 2N).

## Data formats

| Name | Content | Where |
|---|---|---|
| coefficient | 54 bits, value in [0, Q) | everywhere |
| line | 2 consecutive coefficients (108 bits) | one address of every polynomial buffer (1024 × 108 bit) |
| quad / beat | 4 consecutive coefficients (216 bits) | RLWE streams, FIFOs, MAC datapath |
| key beat | quad of key `a` + the same quad of key `b` | DDR and key FIFO |
| RLWE stream | N/4 quads of `a`, then N/4 quads of `b` | host ↔ FIFOs ↔ pipeline |

RLWEs enter and leave in the NTT domain. The NTT used throughout is the negacyclic
Cooley-Tukey NTT with twiddle factors in bit-reversed order: `TF[i] = ψ^bitrev(i)`, where ψ is a
primitive 2N-th root of unity. The input is in natural order and the output in bit-reversed
order. The INTT is the matching Gentleman-Sande form with `ψ^-1` and a final multiplication by
N⁻¹. Element-wise products in the MAC are valid in either order, as long as keys and data use
the same one.

All modular products use one combinational Barrett multiplier (`modmul`). Q, `mu = ⌊2^(2k)/Q⌋`
and `k = bitlen(Q)` are run-time registers, so one bitstream serves every parameter set.

## The INTT module (`intt_module`)

Each INTT module holds one RLWE. It has:
- two polynomial buffers, one for `a` and one for `b`;
- two butterflies and a private twiddle memory;
- the address and data multiplexing for the two access patterns.

Two choices make its two butterflies fully busy:

- **The first butterfly layer is fed from the stream.** The input RLWE arrives one quad per
  cycle. That layer (t = 1, both operands of a butterfly in one line: "pattern 2") is computed
  as the data arrive, and the results are written straight into the buffers. No pass is spent
  only on loading.
- **The two buffers are time-interleaved.** A buffer port can read or write in a cycle, not
  both. A layer of `a` is therefore processed while the write-back of `b` uses the other
  buffer's ports, and the two alternate step by step. From t = 2 on, the butterfly operands are
  the same slot of two different lines ("pattern 1").

After log N layers, the module streams `a` then `b`, multiplying by N⁻¹ on the way out. The
latency from the first input beat to the first output beat is `(log N + 1)·N/2 + 3` cycles
without back-pressure. For N = 2048 that is 12 291 cycles.

**Accumulator initialisation.** The module also contains the bootstrap's accumulator
initialisation (`init_blk`). An *init* instruction carries the LWE value `b` and no input
stream. Its result is the RLWE `(0, X^r·t)` with `r = b·2N/q` (q = 2^`lwe_logq`). The test
vector `t` is the constant polynomial with value `init_val`. The module produces `X^r·t`
directly in the coefficient domain and skips the INTT passes.

## Pipelined NTT and gadget decomposition (`ntt_stage`, `ntt_pipeline`)

`ntt_pipeline` chains 11 `ntt_stage` instances. Stage `s` performs the butterfly layer with
distance `t = 2^s`:
- it has a fixed access pattern;
- it stores only the N/(2t) twiddle factors that layer uses;
- it has two butterflies, so it processes four coefficients per cycle.

Every stage owns a **double-banked** output buffer, so it can write polynomial i+1 while the
next stage reads polynomial i. Banks are handed over with full flags and release pulses.
A pass takes N/4 + 3 cycles:
- N/4 cycles of butterflies;
- one cycle of write-back;
- one cycle of hand-over;
- one cycle to start the next pass.

**Decomposition.** The first active stage also splits each input polynomial into digits. It
reads the same upstream bank `dc` times. On pass `d` it replaces every coefficient x with
`(x >> d·bg_bits) & (B_G − 1)` before the butterflies. The `b` polynomial of a key-switch
instruction is read once, undecomposed.

**Tags.** Each produced polynomial carries a small tag through the rest of the stages. The tag
tells the MAC what to do with it:
- `first`: overwrite the accumulator;
- `last`: stream the result out after this polynomial;
- `direct`: add without a key;
- `op_ks`: subtract;
- `digit`: the digit index.

**Skipping the first stage.** For N = 1024 the first stage (t = 1024) has nothing to do. A
multiplexer then connects the input buffer straight to the second stage, which takes over the
decomposition. When `logn` changes, all bank pointers are cleared once, because the input
buffer's reader changes. N may only be changed while the pipeline is empty.

## Substitution (`poly_subs`)

Substitution maps coefficient i to position `i·k mod 2N`, negated if that is ≥ N
(`X^N = −1`). It works on the INTT output, which is in coefficient order, and writes the result
into the double-banked buffer that the NTT reads. For odd k, the four coefficients of a beat
land on four different positions mod 4. The buffer is therefore built from four sub-RAMs per
bank, and a whole beat is written each cycle. RLWE ⊗ RGSW instructions and k = 1 bypass the
mapping.

## Multiply-accumulate (`poly_mac`)

The MAC reads one NTT-domain polynomial x per pass, one quad per cycle. It multiplies x by the
matching key beat with eight modular multipliers (4 × key `a`, 4 × key `b`) and accumulates
into an RLWE accumulator held in two 512 × 216-bit RAMs:

| instruction | polynomials | operation |
|---|---|---|
| RLWE ⊗ RGSW | 2·dc digit polys of `a`, then of `b` | `acc += x · key_j` |
| substitution + key switch | dc digit polys of `a` | `acc −= x · ks_j` |
| | then `b` (undecomposed) | `acc.b += x` |

The result is `(−Σ dᵢ·ksᵢ.a, b − Σ dᵢ·ksᵢ.b)`, the usual key-switch formula. After the `last`
polynomial the accumulator streams out (N/2 cycles, `a` then `b`) before the next RLWE starts.
A pass takes N/4 + 3 cycles when keys are available.

## Keys, instructions and modes (`key_load_fifo`, `rob`, `accel_top`)

**Key storage.** Keys live in FPGA DDR as consecutive key beats. Key RLWE j of an instruction
starts at beat `key_addr + j·N/4`. A key RLWE's polynomials must be in the same NTT order as
the data.

**Instruction flow.** An instruction carries:
- the operation;
- the init flag and LWE `b`;
- the substitution exponent k;
- the key address.

Instructions enter a 16-entry in-order buffer (`rob`). The buffer sends each instruction to
two places independently:
- **dispatch:** to the INTT modules (round-robin);
- **key fetch:** to `key_load_fifo`, which starts reading that instruction's 2·dc (or dc)
  key RLWEs from DDR at once.

DDR latency is thus hidden behind the INTT and NTT work. The key FIFO holds 1024 key beats.
It issues a DDR read only while its free space exceeds the reads still outstanding, so it
never has to refuse a response. An instruction retires when its result has left the MAC.

**Modes.** Two 12-RLWE FIFOs (12 288 quads each) connect the pipeline to the host:

- **RLWE mode:** the host writes into the *in/out FIFO* and reads results from the *output
  FIFO*.
- **Bootstrap mode:** results are written back into the in/out FIFO, so up to 12 accumulators
  circulate through the pipeline for as many iterations as instructions are issued. Setting
  the *drain* bit then sends the in/out FIFO's contents to the host.

### Register map (AXI4-Lite, 32-bit, byte addresses)

| addr | register | addr | register |
|---|---|---|---|
| 0x00/04 | Q (low/high) | 0x28 | bit0 bootstrap mode, bit1 drain |
| 0x08/0C | Barrett mu | 0x2C | log2 q of the LWE |
| 0x10 | bitlen(Q) | 0x30/34 | init test-vector value |
| 0x14 | log2 N (10 or 11) | 0x40 | instruction: bit0 key switch, bit1 init, [12:2] LWE b, [24:13] k |
| 0x18/1C | N⁻¹ mod Q | 0x44 | key DDR address; writing issues the instruction |
| 0x20 | dc | 0x50 | twiddle select: bit31 inverse, [10:0] index |
| 0x24 | log2 B_G | 0x54/58 | twiddle value; writing 0x58 stores it |
| 0x60/64/68 | in/out FIFO beats, output FIFO beats, instructions in flight (read only) | | |

**Programming sequence:**
1. Set Q, mu, bitlen, log N, N⁻¹, dc and B_G.
2. Load N forward twiddles `ψ^bitrev(i)` and N inverse twiddles `ψ^-bitrev(i)`. The stages
   capture their share according to the current log N, so log N must be set first.
3. Select the mode.
4. Issue instructions and stream the RLWEs.

The write response to 0x44 is held until the instruction buffer accepts the instruction.

## Performance

These are measured in simulation at the default size (N = 2048, 54-bit Q, dc = 6, 125 MHz).

- **Single RLWE ⊗ RGSW:** 24 659 cycles from the first input beat to the last output beat,
  about 197 µs. That includes streaming the RLWE in and out at one quad per cycle. For
  comparison, the published FPGA figure is about 189 µs of processing, after removing 120 µs
  of host streaming from a 309 µs total.
- **Back-to-back RLWE ⊗ RGSW:** one result every 2·dc·(N/4 + 3) cycles plus up to N/2 cycles
  of result streaming, i.e. 6 180 to 7 220 cycles (about 50–58 µs).
- **Parameter sets that fit the default build:**
  - N = 1024 with log2 Q = 27 and B_G = 2^9 (dc = 3);
  - N = 2048 with log2 Q = 27–37 and B_G = 2^7–2^13 (dc = 3–4);
  - the PSI setting: N = 2048, log2 Q = 54, B_G = 2^9, dc = 6.

  The limits are N ≤ 2048, Q < 2^54, dc ≤ 15 and log2 B_G ≤ 15.

## Where this design departs from, or adds to, the published description

- **Not included:** the FPGA shell, PCIe/DMA, AXI interconnect and DDR controller. The top
  exposes:
  - an AXI4-Lite slave;
  - a host-in and a host-out valid/ready stream of quads;
  - a simple in-order DDR read port: address request with valid/ready, one response per
    request, never refused.
- **Own choices:**
  - the register map;
  - the stream and key formats;
  - the FIFO and buffer depths (16-entry instruction buffer, 1024-beat key FIFO);
  - the bank hand-shake between stages;
  - the instruction tags.
- **Decomposition:** digits are unsigned, `(x >> d·log2 B_G) mod B_G`. A signed (balanced)
  decomposition would lower noise but is not described.
- **Test vector:** the accumulator initialisation uses a constant test vector. The source
  describes only that the initialisation is based on b of the LWE.
- **Key switching:** the subtraction of the key products and the key-less `b` term are handled
  inside the MAC, which follows the standard key-switch formula.
- **NTT algorithm:** the forward NTT listing in the source starts its outer loop at m = N. The
  RTL follows the standard Cooley-Tukey loop starting at m = 1.
- **Multiplier timing:** the modular multiplier and butterflies are combinational. At 125 MHz
  an FPGA build would need pipeline registers there, which would change the cycle counts above
  by a few cycles per pass.
- **Single accumulator:** while an RLWE result streams out of the MAC (N/2 cycles), no new
  polynomial is accepted.

## Files

| rtl/ | |
|---|---|
| `fhe_pkg.sv` | widths, coefficient/line/quad types, configuration, instruction and tag structs, address generator for butterfly passes, modular add/sub |
| `modmul.sv`, `butterfly.sv` | Barrett multiplier; CT / GS butterfly |
| `poly_buffer.sv` | dual-port line RAM |
| `init_blk.sv`, `intt_module.sv` | accumulator initialisation; iterative INTT |
| `ntt_stage.sv`, `ntt_pipeline.sv` | NTT stage; 11-stage chain with skip |
| `poly_subs.sv`, `poly_mac.sv` | substitution buffer; multiply-accumulate |
| `compute_pipeline.sv` | the four INTTs, MUX, substitution, NTT and MAC |
| `rob.sv`, `key_load_fifo.sv`, `rlwe_fifo.sv`, `config_axil.sv` | instruction buffer, key fetch, RLWE FIFOs, registers |
| `accel_top.sv` | top level with mode routing |

Every block has a self-checking testbench `tb/<module>_tb.sv`. `tb/fhe_ref_pkg.sv` is a software
model of the arithmetic: modular arithmetic, root finding, NTT/INTT, digits and substitution.
Each testbench prints `TB_RESULT checks=… failures=…`. `accel_top_tb` runs the whole design at
its default size:
- RLWE mode at N = 2048 and 1024;
- back-pressure on every interface;
- filling the in/out FIFO;
- a two-iteration bootstrap loop with drain.

It counts each of these mechanisms and fails if one never happened.

`workload_tb` runs the evaluated bootstrap parameter sets on one accelerator instance, switching
configuration between them: MEDIUM/STD128_AP (N = 1024, 27-bit Q, B_G = 2^9), STD192 (37 bits, 2^13),
STD256 (29 bits, 2^10), STD192Q (35 bits, 2^12), STD256Q (27 bits, 2^7, dc = 4) and the PSI set
(54 bits, 2^9, dc = 6). For each set it picks a prime Q = c·2N + 1 of the right width and checks an
RLWE⊗RGSW, a key switch and an accumulator initialisation against the software model. It also checks
that the RLWE⊗RGSW latency is the same for every N = 2048, dc = 3 set, whatever the modulus.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fhe_pkg.sv tb/fhe_ref_pkg.sv rtl/*.sv tb/accel_top_tb.sv \
  --top-module accel_top_tb -o sim && ./obj_dir/sim
```

The package must come first. Listing it twice through `rtl/*.sv` is harmless. `-Wno-fatal`
keeps the width warnings of the testbench's 64-bit reference model from stopping the build. The full-size run takes a few seconds. The
unit testbenches are built the same way with their own top module.
