# LNS-Madam processing element

Training a neural network in 8 bits normally means integer or 8-bit floating-point multipliers
in every lane of the accelerator. This design instead stores weights, activations and gradients
as logarithms: a value is a sign and a small integer exponent `e`, and means `±2^(e/γ)`. In that
form a multiplication is just an addition of exponents. The hard part moves to the addition of
products, which has to happen in ordinary integers, so the design's central problem is how to turn
many `2^(p/γ)` terms into one integer sum cheaply. The answer used here is to split `p` into a
quotient and a remainder, `2^(p/γ) = 2^(p div γ) · 2^((p mod γ)/γ)`: the first factor is a shift,
the second is one of only γ constants. Products are therefore shifted, sorted into γ bins by
remainder, summed per bin with plain adder trees, and only the γ bin totals are multiplied by
constants.

The same format is designed to be updated by a multiplicative optimizer (Madam), which adjusts
weights in the log domain so that an update is again an addition to the exponent; that optimizer
runs outside this processing element, which computes the forward pass and both backward passes.

This repository contains synthesizable SystemVerilog for one processing element (PE) with its
default configuration: 32 lanes, 32-element vectors, 8-bit operands with γ = 8, 24-bit partial
sums, a 128 KB operand buffer A, an 8 KB operand buffer B, a 16-entry accumulation collector and
an output post-processing unit.

## Number format

An 8-bit word is `{sign, exponent[6:0]}`. With γ = 8 the value is `(-1)^sign · 2^(exponent/8)`,
so the exponent covers 2^(1/8) … 2^(127/8) ≈ 1.09 … 60 000 in steps of about 9 %. Because γ is a
power of two, the quotient of an exponent sum is its upper bits and the remainder its lower three
bits.

Exponent code 0 is reserved for the value zero. This is needed because a logarithmic format has no
natural zero, and it is where the MAC's "is zero?" test looks. A real tensor is represented as
`scale · 2^(e/8)`; the per-tensor scale is not carried in the word but applied as an exponent
offset when sums are converted back (see *Post-processing unit*).

## Vector MAC (`lns_vector_mac`)

One lane forms the dot product of two 32-element vectors and adds it to a partial sum:

1. **Multiply.** Per element, the two 7-bit exponents are added (8-bit sum `p`) and the signs
   are XOR-ed.
2. **Shift and sort.** `q = p >> 3`, `r = p & 7`. The element becomes the integer `1 << q`,
   negated in two's complement when the product is negative and forced to 0 if either operand
   is zero. It is routed to adder tree `r` only (a one-hot demultiplexer); the other seven trees
   see 0 from this element.
3. **Reduce.** Eight adder trees sum their 32 inputs. The tree sums are registered.
4. **Constant dot product.** The eight tree sums are multiplied by `C_r = round(2^(r/8) · 256)`
   and added; the 8 fraction bits are then dropped (floor). The constants are computed at
   elaboration time from that formula, not stored in a file.
5. **Accumulate.** The result is added to (or loads) a 24-bit signed register, saturating at
   ±2^23.

The quotient part is exact; the only rounding is in the eight constants and the final floor. The
largest product, 2^(254/8), needs a 32-bit shift, and the trees are sized so that they can never
overflow; only the 24-bit output saturates.

Latency is two cycles (tree register, accumulator register), one vector per cycle.

Inside the PE the accumulator always loads (each cycle's dot product goes straight to the
collector), because the PE's partial sums are collected per output in the accumulation collector.
The accumulate mode is tested on its own.

## Dataflow of a tile (`lns_pe`)

A PE computes a tile of 16 outputs × 32 lanes. Operand A is a 32-lane word (one 32-element vector
per lane, 1 KB); operand B is a single 32-element vector (32 bytes) that is broadcast to all
lanes.

    for chunk k in 0 .. K-1:                     (K = cfg.k_chunks)
        read A word a_base+k once, hold it in a register for 16 cycles
        for t in 0 .. 15:
            read B vector b_base + 16k + t
            lane l:  dot(A[k][l], B) -> collector entry t, lane l
    for t in 0 .. 15:  sum[t][l] -> post-processing -> 8-bit LNS output t

So A is read once every 16 cycles and B every cycle, and the 16 collector entries are the 16
outputs in flight. With A holding weights and B holding input activations, that is 16 output
positions × 32 output channels with a reduction of K × 32 input elements.

The three training passes use the same datapath with different contents in the buffers:

| pass (`cfg.pass`)  | buffer A           | buffer B           | result              |
|--------------------|--------------------|--------------------|---------------------|
| `PASS_FWD`         | weights            | input activations  | output activations  |
| `PASS_BWD_I`       | weights            | output gradients   | input gradients     |
| `PASS_BWD_W`       | input activations  | output gradients   | weight gradients    |

The pass selects only whether ReLU may be applied (forward only) and is tagged on each output; the
host has to lay out the tensors in the buffers for the pass it starts (transposed weights for the
backward input pass, for example).

### Timing

With the start accepted in cycle 0, issue cycles are 1 … 16K. A result leaves five cycles after
its issue cycle (buffer read, MAC tree register, MAC output register, collector, PPU), so output 0
of the tile appears in cycle 16(K-1) + 6 and output 15 in cycle 16K + 5; `done` pulses one cycle
later and the PE accepts the next start then. A tile therefore costs 16K + 6 cycles; with K ≥ 2
the pipeline fill is under 20 %.

### Limits of one tile

Buffer B holds 256 vectors, and a tile reads 16K of them without refilling, so K ≤ 16: one tile
reduces over at most 512 elements. Buffer A holds 128 words, so it could feed K ≤ 128. Layers
with a longer reduction (a 3×3 convolution over 512 channels reduces over 4608 elements) must be
split into several tiles by whatever drives the PE, and because every tile's result leaves as
8-bit LNS, such split sums are added after rounding. See *Departures from the paper*.

## Operand buffers (`lns_buffer`, `lns_addr_gen`, `lns_buffer_manager`, `lns_sram`)

Each buffer is an address generator, a buffer manager and a single-port array:

* **Address generator.** Walks `base … base+count-1`, holding each address for `hold` steps, and
  flags the first step of each hold period. Buffer A runs with `count = K, hold = 16`, buffer B
  with `count = 16K, hold = 1`. A read is issued only on a first step, so A is read once per
  16 cycles.
* **Buffer manager.** Shares the one port between compute reads and fills. Reads always win; a
  fill beat offered in a cycle with a read is held off (`wr_ready` low, `*_wr_stall` pulses) and
  goes through in the next free cycle. Fills are a valid/ready stream of 256-bit segments written
  to consecutive addresses from `wr_base` (32 segments make one A word, one segment one B word). An
  assertion checks that a write never coincides with a read.
* **Array.** `DEPTH` words of `SEGS × 256` bits, one segment written per cycle, read data
  registered (one-cycle latency). The 8-bit banks of the buffers are the byte lanes of these words;
  element `i` of a segment is bits `[8i+7 : 8i]`.

Since B is read every cycle of a tile, a fill into B only makes progress between tiles; fills into
A proceed during the 15 idle cycles out of every 16.

## Accumulation collector (`lns_accum_collector`)

16 entries × 32 lanes × 24 bits (1.5 KB). The entry pointer advances with every input and wraps
at 16. On the first chunk of a tile an entry is loaded, on later chunks the new dot product is
added with saturation, and on the last chunk the completed sum is sent to the PPU one cycle
later together with its entry number. It is built from flip-flops.

## Post-processing unit (`lns_ppu`)

Converts each completed 24-bit sum `x` back into an 8-bit LNS word:

    e = round(8 · log2|x|) − scale,   clamped to 1 … 127,   sign = sign of x,   x = 0 -> code 0

with optional ReLU first (negative sums become 0, forward pass only). The logarithm is computed
exactly: `m` is the position of the leading one of |x|, the bits below it are normalized, and
the fractional part is the number of the eight thresholds `2^((k + 0.5)/8)` (k = 0 … 7) that the
normalized value reaches; so the rounding point between two codes is the geometric mean of their
values, which is what rounding in the log domain means. The thresholds are computed at
elaboration. `scale` is the per-tensor scale as an exponent offset in 1/8 steps; the lower clamp
at 1 keeps tiny non-zero results from turning into zero. `clamped` pulses when any lane was
clamped. One cycle of latency.

## Control (`lns_pe_control`)

A three-state machine (idle, run, drain). `start` with `k_chunks ≠ 0` in idle latches the
configuration, starts both address generators and clears the collector pointer; run issues 16K
cycles with first-chunk and last-chunk flags; drain waits for the pipeline (five cycles) and then
pulses `done`. `busy` covers the whole tile; a start while busy is ignored.

## Configuration (`lns_pkg`)

`pe_cfg_t` holds `pass`, `relu_en`, `k_chunks` (1 … 255; ≤ 16 usable with the default
buffer B), `a_base` and `b_base` (word addresses), and `scale`. The package also holds the
default sizes and the two elaboration-time functions that compute the MAC constants and the PPU
thresholds.

## Ports of the PE

| port | dir | meaning |
|------|-----|---------|
| `start`, `cfg` | in | start a tile with this configuration |
| `busy`, `done` | out | tile in progress / last output sent |
| `a_wr_start`, `a_wr_base`, `a_wr_valid`, `a_wr_data[255:0]`, `a_wr_ready` | in/out | fill stream into buffer A |
| `b_wr_*` | in/out | the same for buffer B |
| `out_valid`, `out_idx[3:0]`, `out_pass`, `out_lns[32][8]` | out | one output vector (32 lanes) per valid cycle |
| `mac_sat`, `coll_sat`, `ppu_clamp`, `a_wr_stall`, `b_wr_stall` | out | event pulses for counters |

The buffers' fill ports and the output port are the PE's side of the surrounding global buffer,
which is not part of this design, and neither is the weight-update unit that applies the Madam
rule to the weight gradients.

## Departures from the paper and own choices

The block structure (control, two buffers with address generator and buffer manager, vector MAC
lanes, accumulation collector, post-processing unit), the MAC's five stages and their widths, the
sizes (32 lanes, 32-element vectors, γ = 8, 24-bit sums, 16 collector entries, 128 KB and 8 KB
buffers), the read pattern of the two buffers and the pass-to-buffer mapping follow the published
description. Chosen here, where it says nothing:

* Exponent code 0 is zero; the remaining 127 codes are magnitudes.
* MAC constants with 8 fraction bits and a floor after the constant product; saturation of all
  24-bit sums instead of wrap-around.
* The collector is a flip-flop array, not a latch array, to keep the design in a single clocking
  style.
* The buffers are single-port arrays with read priority, so fills stall during reads, and buffer B
  cannot be refilled during a tile; this limits a tile to 512 reduction elements. The published
  description does not say how longer reductions are handled.
* The PPU's conversion is exact rounding in the log domain; the scale is an exponent offset and
  results are clamped to 1 … 127. Only ReLU is provided as non-linearity.
* The control sequence, the configuration fields, the fill streams and all handshakes.
* The weight update (Madam, 16-bit update format) is not implemented: it runs outside the PE and
  its hardware is not described. The approximate log-to-integer conversion mentioned as an
  alternative is not used; conversion in the MAC is exact apart from the constants.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops on a watchdog:

* `tb_lns_vector_mac` — random vectors including zeros and extreme exponents against an exact
  model of the quotient/remainder sum, two-cycle latency, accumulate and saturation.
* `tb_lns_ppu` — random sums against an integer-only model (comparing |x|^16 with powers of two),
  ReLU, scale, clamping.
* `tb_lns_accum_collector`, `tb_lns_addr_gen`, `tb_lns_buffer_manager`, `tb_lns_sram`,
  `tb_lns_buffer`, `tb_lns_pe_control` — cycle-by-cycle checks of their schedules and contents.
* `tb_lns_pe` — the whole PE at its default size, with no parameter overridden. It fills both
  buffers through the streams, runs four tiles (forward with ReLU, backward-input with three
  chunks, backward-weight with full-range operands, forward on data filled while the previous
  tile ran) and checks all 16 × 32 outputs of each against a model built from the operands. It
  also checks the 16K + 5 cycle latency, one A read per chunk, 16 B reads per chunk and `done`,
  and requires each of these to occur: zero operands, negative operands, multi-chunk
  accumulation, A-register reuse, saturation, output clamping, ReLU, negative outputs kept in a
  backward pass, and fill stalls.

To run one with Verilator (5.x), from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/lns_pkg.sv tb/tb_lns_pe.sv --top-module tb_lns_pe -o sim
    obj_dir/sim

The full PE testbench takes about a minute and a half to build and well under a second to run.
All default sizes can be changed through the module parameters (`P_LANES`, `P_VS`, `P_A_DEPTH`,
`P_B_DEPTH` on `lns_pe`; γ, widths and entry count in `lns_pkg`).
