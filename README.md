# BAT: a binarized-Transformer accelerator in SystemVerilog

In a binarized Transformer every weight matrix holds only +1 and -1. The
activations are quantized to a few bits (4 in the main configuration, also
2, 1 or 8). Nearly all the arithmetic is then *integer activation ×
one-bit weight*. This is cheap in hardware, but it is surrounded by
floating-point work: dequantization, residual adds, softmax, layer norm and
re-quantization.

BAT is an edge accelerator built around that mix. Its three main ideas:

- **Two concurrent modules.** One module handles multi-head attention
  (MHA) and the other the feed-forward network (FFN). They run at the same
  time on two samples of a batch, like a two-stage streaming pipeline.
- **Processor-style modules.** Inside each module, one matrix-multiplication
  engine executes a sequence of commands. A row pipeline of FP16 units
  finishes every output row while the engine computes the next one.
- **Bit-serial multipliers with sign bit elimination (SBE).** These are the
  processing elements. They handle a one-bit weight in one cycle and an
  N-bit activation operand in N cycles. Signed and unsigned activations
  share one narrow adder.

This repository holds synthesizable RTL for the whole on-chip part. That
covers the processing elements, the dot-product units and their compressor
trees, the matrix-multiplication engine, and the FP16 units. It also covers
the ping-pong buffers, the DMA engine, the two modules and the top. Every
block has a self-checking testbench, and there is an end-to-end testbench
at reduced size and at full size.

## The configuration

All defaults are those of a compact binarized BERT-style model with hidden size 384,
intermediate size 1536 and 4-bit activations:

| parameter | meaning | default | origin |
|---|---|---|---|
| `NX` | activation bits | 4 | design point |
| `P_PE` | PEs per dot-product unit | 64 | this design's choice |
| `P_DPU` | dot-product units per engine | 16 | design point |
| `P_VU_MHA` / `P_VU_FFN` | vector-unit lanes | 32 / 96 | design point |
| `P_LN` | layer-norm lanes | 8 | design point |
| `P_SM` | softmax lanes | 4 | design point |
| `P_QUAN` | quantization lanes | 128 | design point |
| `D_HID` / `D_INTER` | longest rows (MHA / FFN) | 384 / 1536 | model |
| `ACC_W` | accumulator bits | 24 | this design's choice |
| `EXT_W` | external-memory word | 256 | this design's choice |
| `X_DEPTH` | X buffer, words per bank | 128 | this design's choice |
| `Y_DEPTH_MHA` / `_FFN` | Y buffer, words per bank | 144 / 576 | this design's choice |
| `RES_DEPTH` | residual buffer, words per bank | 128 | this design's choice |
| `OUT_DEPTH` | output buffer, words per bank | 64 | this design's choice |

Buffer depths are counted in words of each buffer's own width. The target
clock is 200 MHz on a mid-range FPGA. No timing run is part of this
repository.

## How an encoder layer runs

The hardware executes **commands** and **DMA descriptors**. It does not
sequence a layer on its own. A host, or a small controller you add, issues
them in order.

A command (`module_cmd_t`) tells one module to do three things:

1. Compute one quantized matrix product `X · Y` of `m_rows` rows. The
   product has `n_groups × P_DPU` columns, and its reduction length is
   `kch × P_PE`.
2. Push every result row through the row pipeline:
   - dequantize: multiply by `scale`;
   - optionally add a residual row;
   - apply softmax, ReLU or layer norm, or nothing;
   - re-quantize.
3. Write each row twice to the output buffers: once as `NX`-bit integers
   for the next matrix product, and once as FP16 for residuals and
   inspection.

The QMM engine and the row units are not chained directly. Every
intermediate tensor goes back to external memory, and the next command's
operands are loaded again by the DMA. This costs bandwidth but keeps the
on-chip buffers small. It also avoids reordering logic between the
quantizer output and the engine input.

One encoder layer maps onto commands as follows:

| step | module | X | Y | post-op |
|---|---|---|---|---|
| Q, K, V projections | MHA | activations (signed) | binary weights | none |
| Q·Kᵀ per head | MHA | Q (signed) | K (signed) | softmax |
| S·V per head | MHA | S (unsigned) | Vᵀ (signed) | none |
| output projection | MHA | context | binary weights | residual + layer norm |
| FFN1 | FFN | activations | binary weights | ReLU |
| FFN2 | FFN | hidden (unsigned) | binary weights | residual + layer norm |

The two modules are independent. Module A can work on layer *l* of sample
0 while module B works on layer *l−1* of sample 1. With a batch of two this
keeps both busy: a model of L layers then takes about
`T_MHA + (L−1)·max(T_MHA, T_FFN) + T_FFN`.

Every buffer has two banks, so the DMA can load the next command's operands
while the current command runs.

## The processing element and sign bit elimination

`rtl/pe.sv` is the part that is least obvious from the outside. It
multiplies an `NX`-bit activation `x` by an operand `y` that it consumes one
digit per cycle, least significant first. Each digit is decoded to +1, 0
or −1 by a two-bit code:

| digit | code |
|---|---|
| +1 | `01` |
| 0 | `00` |
| −1 | `11` |

The two kinds of `y` are:

- **Binary weight.** A single digit, so the product is done in one cycle.
  Weight bit 1 means +1 and bit 0 means −1.
- **Signed `NX`-bit activation.** `NX` digits. The lower bits decode to
  0/+1, and the top bit decodes to 0/−1, its two's-complement weight.

A normal shift-and-add multiplier would sign-extend every partial product
to the full product width. SBE avoids that. Each partial product `x·y_i` is
formed in `NX+1` bits and its top bit is inverted. This works the same for
signed and unsigned `x`: unsigned `x` is first zero-extended by one bit, so
both cases become `NX+1`-bit two's-complement values.

Inverting the top bit of a two's-complement number adds `2^NX` to it, so
digit `i` adds `2^(NX+i)` to the sum. The PE cancels these constants
without any extra adder:

- **Initial product.** In the first cycle a single 1 at bit `NX` is loaded
  into the accumulator, in place of zero. Together with the added
  constants, this sums to exactly `2^(NX+Ny)`.
- **Truncation.** That bit lies just above the `NX + Ny`-bit product, so it
  disappears when the product is truncated to its width and then
  sign-extended.

A −1 digit selects the inverted `x` and feeds the missing +1 into the
adder's carry input.

With no sign extension, the adder is only `NX+1` bits wide. The
accumulator shifts right by one each cycle, and the bits that fall out at
the bottom are the finished low bits of the product. The result is
`NX + Ny` bits, presented sign-extended to `2·NX`.

A PE accepts a new operand in the cycle its previous product appears. A
binary-weight product therefore streams at one per cycle, and an activation
product at one per `NX` cycles.

## Dot-product units and the compressor-tree loop

A DPU (`rtl/dpu.sv`) holds `P_PE` PEs, so one issue covers `P_PE` terms of
a dot product. A reduction of length `kch·P_PE` is issued as `kch` chunks
flagged `first` … `last`.

The products are reduced in carry-save form:

1. A tree of 4:2 compressors (`rtl/compressor42.sv`) reduces the `P_PE`
   products to one sum/carry pair. The levels hold `P_PE/4`, then
   `P_PE/8`, … compressors.
2. A further "loop" 4:2 compressor adds that pair to the accumulated pair
   held in two registers.
3. On the `last` chunk, one carry-propagate adder resolves the pair.

The 4:2 cell is the usual one: XOR pairs, one multiplexer giving the
lateral carry out, and one giving the carry bit.

The DPU result appears `Ny + 2` cycles after the `last` issue: `Ny` cycles
in the PEs, one cycle in the accumulator and one in the output register.

## The QMM engine and its two access patterns

`rtl/qmm_engine.sv` drives `P_DPU` DPUs from two buffers, X and Y. Each
buffer word holds `P_DPU` lanes of `P_PE` elements. The engine's FSM loops
over rows, then column groups, then K chunks. Its address generator reads
`x_base + r·kch + k` and `y_base + g·kch + k`.

**Pattern (a): activation × weight.**
- Lane 0 of the X word is sent to every DPU (multicast).
- The Y word carries one weight bit per element.
- DPU `d` gets the bits `d·P_PE … d·P_PE+P_PE−1`, which are column
  `g·P_DPU + d` of the weight matrix.
- One chunk is issued per cycle.

**Pattern (b): activation × activation (attention).**
- Lane `d` of both words goes to DPU `d` only (unicast).
- Y elements are signed `NX`-bit values.
- A chunk is issued every `NX` cycles, the PEs' bit-serial rate.

Which pairs of vectors meet in a DPU is set entirely by how the host lays
out the buffers:

- **Q·Kᵀ.** Put one query chunk in every X lane and key `g·P_DPU + d` in
  lane `d` of Y word `g`. A result row is then one score row, ready for
  softmax.
- **Several heads at once.** Give each lane its own head.
- **More heads than DPUs.** Process them in further commands.

The engine starts a new output row only while its `row_go` input is high.
The module uses this for back-pressure (below).

## The row pipeline inside a module

`rtl/mha_module.sv` and `rtl/ffn_module.sv` share one structure:

```
X, Y buffers ─► QMM engine ─► row buffer 0 ─► VU (×scale, +residual) ─► row buffer 1
     ─► softmax | ReLU | layer norm | bypass ─► row buffer Q ─► quantization unit
     ─► quantized output buffer  (and the FP16 value ─► FP16 output buffer)
```

Each unit has its own width: `P_DPU` results per beat from the engine,
`P_VU` in the vector unit, `P_LN` (or `P_SM`) in the post-op, `P_QUAN` in
the quantizer.

**Row buffers** (`rtl/row_buffer.sv`) convert between these widths. Each
has two banks. One row is written while the previous one is read, which
gives the row-level overlap between integer and floating-point work.

**Flow control** works on whole rows. The engine, the vector unit and the
post units never stall in the middle of a row. A row may therefore enter a
stage only while fewer than two rows are in flight towards the end of that
stage's row buffer. Two credit counters enforce this. At full size they
matter in two places:

- Layer norm at 8 lanes is slower than the vector unit at 32 lanes.
- Softmax at 4 lanes is slower than the engine on a 128-wide score row.

**Post-ops:**

- *Vector unit* (`vector_unit.sv`): FP16 multiply (dequantization of the
  integer result by `scale`), then FP16 add of the residual row. Two
  register stages.
- *Softmax* (`softmax_unit.sv`):
  1. Pass one computes `exp` of every element, keeps the values and sums
     them.
  2. One reciprocal of the sum is formed.
  3. Pass two multiplies every stored value by the reciprocal.

  `exp(x)` is computed as `2^(x·log2 e)`, with a quadratic for the
  fractional power. **The row maximum is not subtracted.** Scores must
  stay below about 11 and the row sum below the FP16 range (65504). This
  holds for scaled attention scores, but it is the first thing to change
  for other uses.
- *Layer norm* (`layernorm_unit.sv`):
  1. Pass one accumulates Σx and Σx².
  2. Then mean, variance = E[x²] − mean², and 1/√(var + eps). The inverse
     square root uses an integer square root of the mantissa.
  3. Pass two computes `(x − mean)·rstd·γ + β`.

  γ and β live in a small parameter memory per module. The DMA loads it
  with target `TGT_LN`. Word `a` covers columns `a·P_LN … a·P_LN+P_LN−1`:
  bits `0 … P_LN·16−1` hold their γ values and the next `P_LN·16` bits hold
  their β values.
- *ReLU* (`relu_unit.sv`): a multiplexer on the FP16 sign bit, with a
  bypass.
- *Elastic quantization* (`quant_unit.sv`): computes
  `q = clip(round((x + β)·(1/α)))`. It has three registered FP16 stages:
  bias add, multiply by the precomputed reciprocal, and conversion to INT16
  (round to nearest even). A combinational clip stage follows.

  The clip compares the bits above the target width with the sign bit:
  - Signed `NX`-bit: out-of-range values saturate to `2^(NX−1) − 1` or
    `−2^(NX−1)`.
  - Unsigned: negative values become 0 and large values become
    `2^NX − 1`.

  Rescaling by α is left to the next layer's dequantization `scale`.

**FP16 conventions** (`bat_pkg.sv`): round to nearest even, subnormals
flushed to zero, overflow to infinity. The FP16 add, multiply and
conversions are exact to that rounding. `exp`, the reciprocal and the
inverse square root are approximations, good to a few ulp.

## Buffers, DMA and the bank handshake

Each module has these buffers, all built on `pingpong_buffer.sv`:

- input X, Y and residual buffers;
- a quantized output buffer and an FP16 output buffer.

Every buffer has two banks, each with a `full` flag. The write and read
widths may differ: the DMA side is always `EXT_W`, and the compute side is
as wide as its unit needs.

A bank moves through its states like this:

1. The DMA loads a bank. Its last descriptor has `last = 1`, which commits
   the bank: it becomes full.
2. A command reads committed X/Y/residual banks.
3. When the command finishes, its input banks are released and its output
   bank is committed.
4. A store descriptor with `last = 1` releases the output bank again.

Assertions flag a write into a full bank, a read from an empty one, and a
command that names a bank that was never loaded.

The DMA (`dma_engine.sv`) executes one descriptor at a time:
`{store, module_sel, target, bank, ext_addr, buf_addr, len, last}`.

- Loads are pipelined: one request per granted cycle, with read data
  returning in order.
- Stores read a buffer word and then write it out, at about three cycles
  per word.

The external memory port is a plain request/grant interface with in-order
read data (`mem_rvalid`). Any memory controller that keeps reads in order
can sit behind it.

**Data layouts the host must follow** (addresses in buffer words):

- X word `r·kch + k` holds chunk `k` of row `r`.
- Y word `g·kch + k` holds chunk `k` of column group `g`.
- Residual and output rows are stored row after row, `P_VU` (residual) or
  `P_QUAN` (output) elements per word. Elements are packed from bit 0
  upward.

A quantized output row of a module is therefore exactly the X layout the
next command expects, whenever `P_PE·NX` divides the row.

**Capacity.**
- The Y buffers hold one whole weight matrix that feeds a layer-normalized
  row: 384×384 for MHA (24 groups × 6 chunks) and 1536×384 for FFN
  (24 × 24).
- A 128-token sequence is processed in blocks of rows, one command per
  block. A block is 21 rows at 6 chunks or 5 rows at 24 chunks, limited by
  `X_DEPTH`.

## Where this RTL departs from the described design, or fills gaps

These are this design's own choices:

- **Buffer sizes, widths and word layouts.** The source describes none of
  them.
- **The command and descriptor formats.**
- **Sequencing.** It is left to a host. No on-chip layer sequencer is
  built.
- **`P_PE = 64`.** It is chosen to match a 64-wide head dimension and a
  1024-bit weight word.
- **Internals of softmax and layer norm.** Only their stages are named:
  exponential, sum and normalization; mean, square, variance, inverse
  square root, γ and β. Their approximations are this design's own.
- **No maximum subtraction in softmax.** See the range limit above.
- **Activations other than 4 bits.** The 2- and 1-bit activations of the
  smaller models run in the 4-bit datapath as sign- or zero-extended
  values. This gives the same results, but not the speed-up a 2-bit `NX`
  would give. `NX` is a parameter, and the PE, DPU and engine testbenches
  are written for any `NX`.
- **Larger models.** Models with hidden size 768 need
  `D_HID = 768, D_INTER = 3072` and deeper Y buffers. 8-bit activations
  need `NX = 8`.
- **Both output formats are stored for every row.** The row is kept as
  quantized integers and as FP16. The FP16 copy provides residuals and
  lets a host check results.

## Simulating

Plain Verilator 5 is enough. A unit test is built from the package, the
unit and its testbench, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/bat_pkg.sv tb/fp16_ref_pkg.sv rtl/pe.sv tb/tb_pe.sv --top-module tb_pe
./obj_dir/Vtb_pe
```

Larger blocks need their sub-modules on the command line, or `-y rtl`.

Every testbench:

- ends with a line `TB_RESULT checks=<n> failures=<m>`;
- has a cycle watchdog that counts as a failure;
- generates its own random stimulus with `$urandom`;
- checks against a reference computed in the testbench: integer arithmetic
  for the datapath, and real arithmetic with FP16 rounding for the float
  units.

| testbench | what it covers |
|---|---|
| `tb_pe` | every x, y, signedness and mode; exact products; latency and back-to-back issue |
| `tb_compressor42` | random operands; sum + carry equals a + b + c + d |
| `tb_dpu` | dot products over several chunks in both modes; the `Ny + 2` latency |
| `tb_qmm_engine` | both patterns against integer matrix products; beat count and row flags; cycle count; random withholding of the row grant |
| `tb_quant_unit`, `tb_vector_unit`, `tb_relu_unit` | lane-exact FP16 results and latencies |
| `tb_softmax_unit`, `tb_layernorm_unit` | rows of several lengths against real-valued references, with tolerances |
| `tb_pingpong_buffer`, `tb_dma_engine` | data integrity, bank flags, random memory grants, load throughput |
| `tb_mha_module`, `tb_ffn_module` | whole commands through the buffers (softmax, layer norm with residual, ReLU, both patterns), checked to the last quantized bit |
| `tb_bat_top` | end to end at reduced size (below) |
| `tb_bat_top_full` | the same sequence with every parameter at its default |

**The end-to-end sequence** runs a slice of an encoder layer through the
DMA against a behavioural external memory:

1. An MHA output projection with residual add and layer norm.
2. An attention-score command with softmax. Its operands are loaded while
   the first command runs.
3. An FFN command with ReLU on the first command's quantized output,
   stored and reloaded through memory. It starts while the MHA is still
   busy.

Every output is checked, and the testbench counts how often each mechanism
occurred. A mechanism that never occurred is a failure. The mechanisms are:

- module overlap;
- DMA into a busy module;
- pattern (b);
- softmax;
- layer norm;
- ReLU clamping;
- residual add;
- clip saturation;
- module chaining.

The reduced end-to-end test runs in seconds. The full-size one compiles
2 × 16 × 64 PEs and takes several minutes to build.

## Files

- `rtl/bat_pkg.sv` holds the shared types: FP16, command, descriptor and
  enums. It also holds the FP16 arithmetic functions.
- `rtl/bat_top.sv` is the top: two modules, one DMA, and the external
  memory port.
- `rtl/mha_module.sv` and `rtl/ffn_module.sv` are the modules.
- The units: `rtl/qmm_engine.sv`, `rtl/dpu.sv`, `rtl/pe.sv`,
  `rtl/compressor42.sv`, `rtl/vector_unit.sv`, `rtl/softmax_unit.sv`,
  `rtl/layernorm_unit.sv`, `rtl/relu_unit.sv` and `rtl/quant_unit.sv`.
- The buffers and data movement: `rtl/row_buffer.sv`,
  `rtl/pingpong_buffer.sv` and `rtl/dma_engine.sv`.
- `tb/` holds one testbench per block, plus `tb/fp16_ref_pkg.sv`: FP16
  encode and decode in real arithmetic, for the references.
