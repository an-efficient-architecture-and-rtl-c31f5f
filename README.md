# CCSDS-123.0-B-2 Hybrid Entropy Coder, BIP order, one sample per clock

This is synthesizable SystemVerilog for the entropy-coding back end of a
CCSDS-123.0-B-2 hyperspectral image compressor. The coder takes the
predictor's mapped quantizer indices δ_z(t) in band-interleaved-by-pixel (BIP)
order and writes the hybrid-coded bitstream as 64-bit words. It sustains one
input sample per clock cycle.

Each sample is coded in one of two ways, chosen per sample from running
statistics:

- **High-entropy samples** get a reverse length-limited Golomb power-of-two
  codeword, R'_k(δ).
- **Low-entropy samples** are fed, one symbol at a time, into one of 16
  variable-to-variable codes. One output codeword from these codes can stand
  for several samples, so the output can drop below one bit per sample.

After the last sample, the coder appends the image tail:

1. one flush codeword for each of the 16 low-entropy codes;
2. the final accumulator of every band.

The architecture is a latency-insensitive pipeline. Every stage is an elastic
buffer with valid/ready handshakes, so back-pressure anywhere in the pipe
simply stalls the stages upstream of it, and no central controller is needed.
Two places are hard to pipeline because they contain feedback:

- the statistics update, where each band's accumulator depends on its own
  previous value;
- the low-entropy code-table walk, where each code's next lookup depends on its
  previous lookup.

Most of this document is about those two loops.

```
 s_delta ─► ACSS ─► HiLo ─► fork ─┬─► HiEC (5) ───────────────────┐
 (BIP)      (2)     (3)           ├─► LoEC (5) ─── flush words ───┤
                                  └─► decision-flags side-channel ┤
            ACSS tail port (final accumulators) ──────────────────┤
                                                                  ▼
                                              Codeword Combiner ─► VLC Packer ─► m_data[63:0]
```
(numbers are pipeline stages)

## Top level: `hec_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `cfg` | in | `cfg_t` | D, U_max, γ0, γ*, initial accumulator value |
| `nx`, `ny`, `nz` | in | 10, 10, 8 | image size for this image |
| `s_valid`, `s_ready`, `s_delta` | in/out/in | 1/1/16 | δ_z(t), BIP order (all bands of a pixel, then the next pixel) |
| `m_valid`, `m_ready`, `m_data`, `m_last` | out/in/out/out | 1/1/64/1 | bitstream words; the first bit sent is `m_data[63]`; `m_last` marks the image's final, zero-padded word |

The configuration and image size are plain ports. They must stay stable while
an image is being coded. Their defaults are set by the build-time maxima:

| Kind | Where set | Values |
|---|---|---|
| Image maxima | `hec_top` parameters | `NX_MAX = 680`, `NY_MAX = 512`, `NZ_MAX = 224` (the AVIRIS configuration) |
| Coder maxima | `hec_pkg` | `D_MAX = 16`, `UMAX_MAX = 18`, `GAMMA0_MAX = 1`, `GSTAR_MAX = 6` |

From the maxima, the package derives:

- the accumulator width, 2 + D + γ* = 24 bits;
- the counter width, 6 bits;
- the 34-bit high-entropy codeword field.

A new image can follow straight after the previous one. The first sample of
the new image is held until the previous image's tail has left the statistics
unit.

**Cycle count per image.** An image of N = Nx·Ny·Nz samples takes
N + 16 + Nz + (number of escape symbols) cycles, plus about 13 cycles of
pipeline fill (the testbenches allow 20). In the full-size simulation:

- 77,987,840 samples;
- 100,540 escapes;
- 78,088,633 cycles in total: N + 16 + Nz + escapes, plus 13 cycles of pipeline fill.

## Statistics loop (ACSS unit): `acss`, `loop_controller`, `stream_fifo`

Each band z keeps a high-resolution accumulator Σ_z. A counter Γ is shared by
all bands. For every sample, with `sum = Σ + 4δ`:

- if Γ < 2^γ* − 1: Σ ← sum and Γ ← Γ + 1;
- otherwise (rescale): Σ ← ⌊(sum+1)/2⌋ and Γ ← ⌊(Γ+1)/2⌋. The bit the
  halving drops (bit 0 of `sum`) must be sent in the bitstream, so that a
  decoder can rebuild Σ. It travels down the pipe as the *rescale bit*.

At t = 0 (the first pixel of the image):

- the statistics take their initial values, Γ = 2^γ0 and Σ = `cfg.sigma_init`;
- the sample is sent raw, as D bits.

The coder downstream always sees the statistics *before* the current sample is
added.

**BIP order.** The value a sample needs was produced Nz samples earlier: the
same band in the previous pixel. The unit therefore keeps:

- a 2-stage feed-forward path: select the operand, then compute the update;
- a FIFO of NZ_MAX entries as the feedback path. It holds (Σ_z, Γ) for every
  band in flight.

Γ rides through the FIFO next to each band's Σ. Because BIP visits the bands
in order, the entry at the head of the FIFO is always the one the next input
needs. The FIFO thus doubles as the delay line for the single shared counter.

**Loop controller.** A generic flow controller steers the handshakes of this
loop (`loop_controller`):

- **Priming.** The first `loop_size` = Nz inputs of an image are let in with
  an "initial value" flag.
- **Steady state.** After priming, an input may enter only when its
  fed-back value is at the head of the FIFO.
- **Write-back.** Each result is delivered downstream and written back into
  the FIFO in the same handshake.

The loop takes M + 1 = 3 cycles: 2 register stages plus the FIFO write. For
Nz ≥ 3 it therefore never stalls. For Nz ≤ 2 it sustains Nz/3 samples per
cycle. This differs from the Nz/(Nz+2) figure a delay-line feedback path would
give; see the list of departures below. The CCSDS parameter range starts at
Nz = 3 in any case.

**Image tail.** After the last sample, the FIFO holds every band's final
accumulator. The unit then:

1. refuses input (`hold`);
2. drains the FIFO, band 0 first, on its `tail_*` port;
3. restarts priming for the next image.

An x/y/z position counter produces the `zero` flag (t = 0) and the `last` flag.

## High/low decision: `hilo_decision`

The decision compares the mean statistic with the largest low-entropy
threshold T_0 = 303336:

- hilo = 1 (high-entropy code) when Σ·2^14 > T_0·Γ;
- hilo = 0 otherwise.

T_0 is not a power of two, so this takes a real multiplier. The unit has three
registered stages, arranged like a DSP slice: operands, product, comparison.

## High-entropy coder: `hiec`, `rll_gpo2_encoder`

The code index k is the largest value that satisfies both:

- k ≤ max(D−2, 2);
- 4Γ·2^k ≤ Σ + ⌊49Γ/2^5⌋.

If even k = 0 fails, k = 0. The k calculation takes three stages:

1. 49Γ;
2. >>5, plus Σ;
3. 14 parallel comparisons and a priority pick.

Encoding takes two more stages. The RLL-GPO2 codeword R'_k(δ) is:

- if u = ⌊δ/2^k⌋ < U_max: the k LSBs of δ, then a '1', then u '0's;
- otherwise: the D-bit δ, then U_max '0's.

At t = 0 the output is δ itself, in D bits. Latency is 5 cycles.

Codewords are carried right-aligned with an 8-bit length. The first bit to be
sent is bit `len-1`.

## Low-entropy coder: `loec`

Three sub-units in a chain:

| Sub-unit | Module | Latency | What it does |
|---|---|---|---|
| Code index selection | `le_code_index_select` | 3 cycles | Forms the 16 products T_i·Γ in parallel and picks the largest i with Σ·2^14 ≤ T_i·Γ. Outputs i and its symbol limit L_i. |
| Input symbol | `le_input_symbol` | 1 cycle | ι = δ if δ ≤ L_i, else the escape symbol X = L_i + 1. |
| Code-table lookup | `le_ct_lookup` | 1 cycle | Walks code i's tree with ι; emits a codeword when a complete prefix is reached. |

Samples that are high-entropy or have t = 0 pass through the chain as
"inactive". They leave an empty codeword, so all three branches after the fork
stay aligned sample for sample.

The constants come from the standard:

- T_0…T_15 = 303336, 225404, 166979, 128672, 95597, 69670, 50678, 34898,
  23331, 14935, 9282, 5510, 3195, 1928, 1112, 408;
- L_0…L_15 = 12, 10, 8, 6, 6, 4, 4, 4, 2, 2, 2, 2, 2, 2, 2, 0.

### Code tables as a trie in ROM (`le_ct_rom`)

Each low-entropy code is a prefix-free set of input-symbol strings, with one
output codeword each. The code is stored as a trie:

- the root is the empty string;
- each edge is one input symbol;
- leaves are complete prefixes and hold an output codeword;
- inner nodes hold the *flush* codeword. It is sent at the image end if the
  code is left part-way down the tree.

The children of a node sit at consecutive ROM addresses `base + symbol`, so one
step of the walk is a single addition. One ROM word is:

```
{ flush_len[4:0], flush_cw[15:0], term, cw_len[4:0], cw_or_child_base[15:0] }   (43 bits)
```

The first half of a word is the flush codeword *of the node's parent*. This
layout has a useful property: the pointer a code holds between samples is the
base address of its current node's children. Reading the ROM at that pointer
therefore yields the flush word of the current node. At the image end, the
flush words come from the same ROM with no second table.

The ROM is read combinationally, like distributed or LUT RAM. This closes the
lookup loop in one cycle without a read-after-write hazard.

### The one-cycle lookup loop (`le_ct_lookup`)

Sixteen registers `ct_addr[i]` hold each code's current pointer. For an active
sample with code i and symbol ι, in one cycle:

```
addr = ct_addr[i] + ι ;  w = ROM[addr]
w.term ? (emit w.cw, ct_addr[i] <= root(i))  :  (ct_addr[i] <= w.child_base)
```

Consecutive samples of the same code therefore never stall. This
add → read → write-back path is the longest combinational path of the design.

**Escapes.** If ι is the escape symbol, a second path computes R'_0(δ − L_i − 1)
with the shared RLL-GPO2 encoder. That codeword is placed in front of the
table codeword, and both leave as one item with a separate escape length. An
escape always completes the prefix; an assertion checks that the word read is
terminal.

**Flush.** After the sample flagged `last`, the unit reads `ROM[ct_addr[i]]`
for i = 0…15 and sends each flush word on its flush port. It also returns
every pointer to its root.

### The tables in this release are stand-ins

The standard's 16 code tables are not reproduced here. By default, the ROM is
filled by `hec_pkg::ct_standin_entry()`. These stand-in codes:

- have exactly the real alphabets: L_i + 2 symbols, including the escape;
- are complete prefix-free codes laid out in the trie format above;
- are simple two-level trees. Symbol 0 leads to an inner node; every other
  root symbol, and any symbol after a 0, completes the prefix;
- use fixed n = ⌈log2(2A+1)⌉-bit output codewords, where A = L_i + 2;
- occupy 200 words in total.

Every mechanism runs with them: multi-symbol prefixes, escapes, inner-node
flushes. The bitstream is therefore *not* CCSDS-compliant until the real
tables are loaded.

To load real tables:

1. Generate a hex file with one 43-bit word per line in the layout above.
2. Pass it as `CT_INIT_FILE` (on `loec`, or `le_ct_lookup`) together with the
   16 root addresses in `ROOT`.
3. Widen `CT_PTR_W`, `LE_CW_W` and `LE_LEN_W` in `hec_pkg` if the real tables
   need more than 256 nodes or codewords longer than 16 bits. The standard's
   tables are larger than the stand-ins.

`tb/ct_example.hex` shows the format. It holds the small example code of five
input codewords over {0, 1, X}, and its two flush words.

## Decision-flags side-channel and codeword combiner: `codeword_combiner`

A 3-way fork after the decision sends each sample to three branches at once:

- the high-entropy coder;
- the low-entropy coder;
- an 8-deep FIFO, the side-channel, carrying the flags zero, hilo, rescale,
  rescale bit and last.

The combiner takes one item from each of the three streams per sample:

| case | codewords sent |
|---|---|
| t = 0 | δ in D bits (from the high-entropy coder) |
| hilo = 1 | R'_k(δ) |
| hilo = 0, prefix completed | the table codeword |
| hilo = 0, escape | beat 1: R'_0(δ−L_i−1); beat 2 (next cycle): the table codeword |
| hilo = 0, prefix only extended | nothing |
| counter rescaled | the rescale bit is put in front of the sample's first codeword, or sent alone |

After the sample flagged `last`, the combiner switches to two tail states. It
forwards:

1. the 16 flush words, dropping zero-length ones;
2. the Nz final accumulators of 2 + D + γ* bits each. The last accumulator is
   flagged `last`.

The combiner is a small state machine: sample, second escape beat, flush,
tail. Its output goes through an elastic buffer.

## VLC packer: `vlc_packer`

The packer appends each codeword (0…64 bits) MSB-first to a 128-bit
accumulator. It sends a 64-bit word each time 64 bits are complete. At the
codeword flagged `last`, the remaining bits go out in one final word, padded
with zeros, with `m_last` set. The packer accepts one codeword per cycle.
Bits above a codeword's length are ignored.

## Where this design departs from the paper it implements

- **Direction of the high/low decision.** The source text's decision equation
  is written as "hilo = 1 when Σ·2^14 ≤ T_0·Γ". That contradicts its own
  low-entropy code-index rule (Σ·2^14 ≤ T_i·Γ). This design follows the
  code-index rule and the standard: high entropy when Σ·2^14 > T_0·Γ.
- **The factor 4 in k.** The text's k inequality omits the factor 4 on Γ·2^k.
  The high-entropy schematic and the standard include it, and so does this
  design.
- **The k-bit field.** The schematic's multiplexer labels suggest a different
  selection of δ bits. The text says "the k least significant bits", and this
  design follows the text.
- **The rescale bit.** The description calls it once the "most significant
  value" and once the "least significant bit" of Σ. It is the LSB here, as in
  the standard.
- **Loop throughput for Nz ≤ 2.** It is Nz/3 here, where the source states
  Nz/(Nz+2). The queue feedback path adds one cycle to the 2-stage loop. Both
  figures apply only outside the supported range Nz ≥ 3.
- **Code tables.** The low-entropy code tables are stand-ins (above).
- **Constants.** T_i and L_i, the initial-accumulator handling and the tail
  accumulator width are taken from the standard.
- **The k field width.** The source gives the k field as "D−2 bits". Here it
  is 4 bits, enough for k ≤ 14.
- **Not included:**
  - the memory-mapped configuration registers (the configuration is plain
    ports);
  - the compressed-image header and its `init` cycles;
  - the SpaceFibre link of the reference platform;
  - the predictor.
- **DSP slices.** They are written as plain multiplications in registered
  stages. No vendor primitives are used.
- **Internals not given by the source.** The source gives only the function
  of the elastic buffers, FIFOs, fork, combiner state machine and packer. Their
  insides here are straightforward designs of this implementation.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the block
against values computed independently in the testbench, and checks the
latency or rate where one is specified.

`tb/hec_ref_pkg.sv` is a bit-exact behavioural model of the whole coder,
written from the algorithm:

- per-band accumulators;
- prefixes kept as symbol strings rather than ROM pointers;
- its own bit packing.

Two testbenches use the model:

- **`tb_hec_top`** works at reduced maxima of 8×8×8. It codes seven images
  with different D, U_max, γ0, γ*, initial values, sizes and data statistics,
  with random input gaps and output back-pressure. It compares every output
  word. It also counts each mechanism and fails if any one never occurs:
  - high- and low-entropy samples;
  - escapes (matched against the combiner's extra beats);
  - codeword matches;
  - rescales;
  - unary-limit codes;
  - inner-node flushes;
  - output stalls;
  - loop-controller stalls (Nz = 2);
  - back-to-back images.

  The images without gaps are checked against the cycle budget above.
- **`tb_hec_full`** uses the top with all default parameters. It codes one full
  680×512×224 image, 78 million samples, in about two minutes of simulation.
  It compares all 13 million output words and checks the cycle count.

To simulate a testbench with verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hec_pkg.sv tb/hec_ref_pkg.sv \
          rtl/*.sv tb/tb_hec_top.sv --top-module tb_hec_top -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## Sizes

- **Full design.** After generic (not FPGA-mapped) synthesis, at the default
  parameters: about 1,050 word-level cells, 2,670 flip-flop bits and 12,200
  memory bits. The memory bits are mostly the 224×30-bit statistics FIFO
  (6,720 bits) and the code-table ROM. The ROM is 256×43 bits, but synthesis
  drops the bits that are constant in the stand-in tables.
- **Workloads.**
  - *AVIRIS, 680×512×224 at 16 bits.* Fits the default instance.
  - *AVIRIS-NG, 640×512×432.* Needs `NZ_MAX ≥ 432`.
  - *Scenes of 1000×1000×173.* Need `NX_MAX` and `NY_MAX ≥ 1000`.
