# A reconfigurable accelerator for hybrid vision transformers

Hybrid vision transformers such as EdgeNeXt mix ordinary and strided
convolutions, pointwise convolutions, depthwise convolutions, matrix
multiplications, LayerNorm, SoftMax and GELU. A fixed-dataflow array runs the
depthwise layers badly. Running the normalisations as separate passes means
streaming whole tensors through memory again. The expand-by-4 bottleneck
(pointwise, GELU, pointwise) produces an intermediate tensor too big for on-chip
memory.

This RTL implements an accelerator that tackles the three problems at three
levels:

* **Spatial.** One 16x16 array of 8-bit processing elements (PEs) has two
  dataflows. C|K maps input channels down the rows and output channels across
  the columns. C|FX maps channels down the rows and filter taps across the
  columns, for depthwise layers.
* **Temporal.** The array produces outputs *pixelwise*: one pixel with all its
  channels, then the next pixel. A line buffer holding a single pixel is then
  enough to compute LayerNorm or SoftMax while the results are written back.
  No extra pass over memory is needed.
* **Layer.** The controller is programmable. It can keep partial sums of an
  output tile in the output register file while the tiles of the intermediate
  tensor are produced one by one. The two pointwise layers of an inverted
  bottleneck then run depth-first, and the expanded tensor never goes to DRAM.

The sizes are those of the published configuration:

| Part | Size |
|---|---|
| PE array | 16x16 PEs |
| Data | 8-bit operands, 32-bit accumulators |
| Weight memory | 1 kB per PE |
| Input SRAM | 8 kB |
| Output register file | 24 kB |
| Global SRAM | 512 kB |
| Global bus and DRAM interface | 128 bits |
| Instruction interface | 32 bits |

At 100 MHz the array does 256 MACs per cycle, which is 25.6 GMAC/s.

`hv_accel` takes the array size, the memory depths and `DW_SUPPORT` as
parameters. The defaults are the sizes above. With `DW_SUPPORT = 0` the array is
built without the C|FX row chains, and only C|K remains.

## Block diagram

```
 DRAM <==128b==> [ global bus ] <====> global SRAM 512 kB (hv_global_sram)
                  |   |    |  ^
      DMA (hv_dma)|   |    |  | writeback words (16 x int8)
                  v   v    |  |
      input SRAM 8 kB  weight memories (1 kB in each PE)
          | 16 bytes/cycle, byte r -> PE row r (multicast along the row)
          v
   +------------------ 16x16 PE array (hv_pe_array) ------------------+
   |  C|K : column adder trees  -> 16 x 32b (one per output channel)  |
   |  C|FX: partial sums move right along each row -> 16 x 32b        |
   +------------------------------------------------------------------+
          | 16 x 32b per cycle
          v
   output RF 24 kB (hv_output_rf, accumulates over C tiles, FX, FY)
          | one pixel at a time, all channel tiles
          v
   writeback buffer (hv_writeback_buffer)
      line buffer (hv_line_buffer) -> post-processing engine (hv_postproc)
      -> 4-word queue -> global bus (to global SRAM, DRAM or input SRAM)

   32-bit instruction stream -> FSM controller (hv_controller) -> everything
```

`hv_accel` is the top level. Its ports are the instruction stream
(`instr_valid`, `instr_ready`, `instr`), the DRAM interface and `busy`. The
DRAM interface has requests (`dram_req_valid`, `dram_req_ready`, `dram_req_we`,
`dram_req_addr`, `dram_req_wdata`) and in-order read responses
(`dram_rsp_valid`, `dram_rsp_rdata`). The DRAM itself is off chip. A
behavioural model for simulation is in `tb/hv_dram_model.sv`.

## The two dataflows

Every PE (`hv_pe`) has three parts:

* a signed 8x8 multiplier;
* its own 1 kB weight memory, read synchronously;
* an adder and a register that form the row chain.

Row `r` of the array always receives byte `r` of the word just read from the
input SRAM. That byte is input channel `r` of the current 16-channel tile, and
it goes to all 16 PEs of the row. All PEs read the same weight address, but each
PE holds its own weights. The weights therefore act as a unicast operand.

**C|K (mode 0).** This mode runs pointwise and regular convolutions and matrix
products. PE (row `c`, column `k`) holds `w[k][c]`. Column `k` sums its 16
products in an adder tree. The registered sum is the partial result for output
channel `k` over this input-channel tile. The controller walks the loops over
the C tiles, FX and FY. The output register file adds up the partial results
(read-modify-write, `acc_first` starts a new sum).

**C|FX (mode 1).** This mode runs depthwise convolutions. Row `c` is channel
`c`. The activations `x[c][ix]` of one image row stream in, one per cycle, and
every PE of the row sees the same value. PE `j` computes
`psum_j <= psum_(j-1) + w_j * x`. This is a transposed-form FIR filter. The last
PE of the row therefore delivers `sum_f w[f] * x[ix-FX+1+f]`, the 1-D convolution
along X. A kernel of FX taps (1 to 16) is stored in columns `16-FX .. 15`, with
`w[fx]` in column `16-FX+fx`. The other columns must hold zero weights. The
first `FX-1` outputs of each streamed row are not valid and are discarded. The
FY taps are handled over time: the output RF adds up the contributions of
successive input rows.

In both modes the result reaches the output RF two cycles after the read
address is issued:

| Cycle | Event |
|---|---|
| t | read address issued |
| t+1 | weight and activation present, product formed |
| t+2 | adder-tree register or last row register holds the result |

The controller carries the RF address and the "first" flag through the same two
pipeline stages.

## Pixelwise order and the writeback buffer

For every COMPUTE, the controller writes results into the output RF in a fixed
layout. Pixel `p = ox*OY + oy` (x outer, y inner) owns consecutive entries, one
per 16-channel output tile. The drain sends the entries to the writeback buffer
in that order. The last tile of a pixel is flagged, so the writeback buffer
always sees whole pixels.

The post-processing engine (`hv_postproc`) works on one pixel at a time:

1. It stores the pixel's beats (up to 16 beats of 16 x 32 bits, so 256
   channels) in the line buffer.
2. It computes any statistics it needs.
3. It emits the same number of 16 x int8 words.

Only channels below `NCH` count. Lanes at or above `NCH` produce 0.

| op | result |
|---|---|
| QUANT | `sat8((x*QMUL + 2^(QSHIFT-1)) >>> QSHIFT)` |
| RELU  | QUANT of `max(x, 0)` |
| GELU  | QUANT of `(x * clamp(x + 2^(T-1), 0, 2^T)) >>> T`. This is a hard-gated approximation of GELU, where `2^T` is the width of the gate in accumulator units. |
| LNORM | `mean = sum/NCH` and `var = sum((x-mean)^2)/NCH` (sequential divider). Then `std = isqrt(var)` (bit-serial) and `inv = 2^40/std`. The result is `y = sat8(((x-mean)*inv + rnd) >>> QSHIFT)`; `QSHIFT = 35` gives 32 LSB per standard deviation. |
| SMAX  | `d = (max-x)*SM_MUL` with 8 fractional bits, and `e = 2^-d` (integer part as a shift, fraction linear: `65536 - frac*128`). The result is `y = sat8(e * (2^31/sum(e)) >>> 24)`, the probability times 128. |

Timing:

* Filling the line buffer takes one cycle per beat. Emitting takes one cycle per
  beat while the queue has room.
* LayerNorm adds one pass over the buffer, three 80-cycle divisions and a
  36-cycle square root per pixel.
* SoftMax adds one pass and one division.
* A new pixel is accepted only after the previous one has been emitted.

The writeback buffer puts the int8 words in a 4-word queue. Each word goes to
the next address of the destination given with the COMPUTE: global SRAM, DRAM,
or input SRAM, which layer fusion uses. The queue lets the bus be shared.
`hv_global_bus` always serves the DMA first. A writeback word goes through in
any cycle in which the DMA is not using its target. When the queue is full, the
engine stops, and so does the drain of the output RF.

## Programming

Instructions are 32 bits wide, and the opcode is in `instr[31:28]`.

| opcode | fields | action |
|---|---|---|
| 1 SET | `[27:22]` register, `[21:0]` value | write a layer/DMA register |
| 2 DMA | `[1:0]` source space, `[3:2]` destination space | copy `DMA_LEN` words from `DMA_SRC` to `DMA_DST`; waits while a DMA runs |
| 3 COMPUTE | `[0]` mode (0 C\|K, 1 C\|FX), `[1]` clear, `[2]` drain, `[5:3]` op, `[7:6]` writeback space | run one layer tile; waits while a compute or its writeback runs |
| 4 WAIT | `[0]` DMA, `[1]` compute and writeback | stall the stream until idle |

The address spaces are:

| Code | Space | Address |
|---|---|---|
| 0 | DRAM | word address |
| 1 | global SRAM | word address |
| 2 | input SRAM | word address |
| 3 | weight memories | `addr[13:10]` = PE row, `addr[9:0]` = weight address; byte `k` of the word goes to column `k` |

DMA sources can only be DRAM or global SRAM.

The registers are, in index order:

```
DMA_SRC DMA_DST DMA_LEN OX OY KT CT FX FY STRIDE IN_BASE IN_XSTR IN_YSTR
W_BASE RF_BASE WB_ADDR NCH QMUL QSHIFT GELU_T SM_MUL
```

A COMPUTE copies them, so the next layer can be set up while this one runs.
The address maps, innermost loop last:

* C|K loops over `ox, oy, kt, fx, fy, ct`.
  * Input address: `IN_BASE + (ox*S+fx)*IN_XSTR + (oy*S+fy)*IN_YSTR + ct`.
  * Weight address: `W_BASE + ((kt*FX+fx)*FY+fy)*CT + ct`.
  * RF entry: `RF_BASE + p*KT + kt`.
* C|FX loops over `oy, ct, fy, ix` with `ix = 0 .. OX+FX-2`.
  * Input address: `IN_BASE + ix*IN_XSTR + (oy+fy)*IN_YSTR + ct`.
  * Weight address: `W_BASE + ct*FY + fy`.
  * RF entry: `RF_BASE + p*CT + ct`.

Tensors are stored pixel-major with the channel tiles innermost. Written for
x-major storage, that is `IN_YSTR = CT` and `IN_XSTR = IY*CT`. This matches the
order in which the writeback writes results, so the output of one layer is the
input of the next. Padding is stored explicitly. The C|FX path has no stride;
downsampling layers are strided C|K convolutions.

A matrix product of two activations, as in attention, runs as a C|K layer with
one activation loaded into the weight memories. The weight word of PE row `r`
feeds the 16 columns. For `O = S*V` the reduction runs over tokens, and the word
of row `j` is token `j`'s 16 channels of V. That is exactly the word the
writeback produces, so V goes from the global SRAM to the weight memories with
one DMA per token. For `S = Q*K^T` the reduction runs over channels, and row `c`
needs channel `c` of 16 tokens. That layout is the transpose of what the
writeback produces, and the design has no transpose unit, so `K^T` must be
prepared outside the chip.

Compute time is one cycle per issued read, plus two cycles of pipeline, plus the
drain at one cycle per RF entry. The drain and the compute do not overlap.

### Running an inverted bottleneck without DRAM traffic

Split the 4C intermediate channels into L tiles. For each tile `l`:

1. Run a COMPUTE of PW1 for tile `l` with clear, drain, GELU and writeback into
   the input SRAM.
2. Run a COMPUTE of PW2 whose input is that tile, with a different `RF_BASE`.
   Set clear only for `l = 0` and drain only for `l = L-1`.

The output tile's partial sums stay in the RF, and each intermediate tile is
overwritten by the next one. The end-to-end test runs this sequence with
C = 16 and L = 2.

## Files

| file | content |
|---|---|
| `rtl/hv_pkg.sv` | sizes, types, opcodes, register indices |
| `rtl/hv_pe.sv`, `rtl/hv_weight_sram.sv` | PE and its weight memory |
| `rtl/hv_pe_array.sv` | 16x16 array, adder trees, output select |
| `rtl/hv_input_sram.sv`, `rtl/hv_output_rf.sv`, `rtl/hv_global_sram.sv` | memories |
| `rtl/hv_line_buffer.sv`, `rtl/hv_postproc.sv`, `rtl/hv_divider.sv`, `rtl/hv_writeback_buffer.sv` | writeback path |
| `rtl/hv_global_bus.sv`, `rtl/hv_dma.sv` | interconnect and data mover |
| `rtl/hv_controller.sv` | instruction decoder, registers, loop sequencer |
| `rtl/hv_accel.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per block; `tb_hv_accel` runs the whole design at its default size |
| `tb/hv_dram_model.sv` | behavioural DRAM |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert -Wno-fatal rtl/hv_pkg.sv -y rtl -y tb \
    tb/tb_hv_accel.sv --top-module tb_hv_accel -Mdir obj -o sim
./obj/sim
```

`tb_hv_accel` runs four programs at the full default size:

1. a pointwise layer with ReLU, during a concurrent DMA;
2. a 3x3 depthwise layer with fused LayerNorm;
3. the fused inverted bottleneck;
4. a 2x2 stride-2 convolution with SoftMax, written straight to DRAM.

`tb_hv_edgenext_block` runs one convolutional encoder block of an
EdgeNeXt-style network on a 4x4-pixel tile with 48 channels: a 7x7 depthwise
convolution with LayerNorm, then PW 48->192 with GELU and PW 192->48. The
bottleneck is fused, so its 192-channel intermediate tensor never leaves the
chip. The test checks that only the input, the weights and the result cross
the DRAM interface.

`tb_hv_attention` runs the attention core on 16 tokens of 48 channels. It
computes V with a pointwise layer into the global SRAM and S = SoftMax(Q*K^T)
straight into the input SRAM. It then moves V into the weight memories and
computes O = S*V.

All three compare every result byte with a reference computed in the
testbench. They also check that each compute phase issues exactly one read per
cycle. `tb_hv_accel` also checks that each mechanism happened at least once: both dataflows, all five
post-processing operations, bus contention, writeback back-pressure, DRAM
back-pressure, partial sums kept across instructions, and writeback to each
space. The unit testbenches use random stimulus against independent reference
models. The post-processing test also compares LayerNorm with a floating-point
LayerNorm.

## Where this design departs from or adds to the published description

* **Colours of the PE figure.** The published PE figure draws the row chain in
  the colour of C|K and the downward path in the colour of C|FX. The text and
  the dataflow figure say the opposite: the C|K columns use adder trees and C|FX
  propagates along the rows. This RTL follows the text.
* **Arithmetic.** The instruction set, the register map, the loop orders, the
  bus protocol and all post-processing arithmetic are choices of this design;
  the description gives none of them.
* **GELU** is a hard-gated approximation, not the exact function.
* **LayerNorm** does not apply the per-channel scale and shift.
* **SoftMax** uses a linear approximation of `2^-f`.
* **Line buffer.** It holds 256 channels and is not double-buffered.
* **Attention.** No transpose path exists, so `K^T` in `Q*K^T` comes from
  outside the chip (see Programming).
* **Residuals.** There is no residual adder.
* **Memories.** They are plain arrays, not SRAM macros.
* **Timing.**
  * The DMA moves one word at a time, so a word takes three cycles or more.
  * The drain of the output RF does not overlap the next compute.
* **Not modelled.** Power, area, SRAM macro timing and the clocking of a real
  chip are not modelled.

## How far it can be trusted

Every block passes its own random testbench. Each testbench was also run on a
copy of its block with one deliberate bug, and reported failures on it. The
whole design runs, at the published size, four layer programs, an
EdgeNeXt-style encoder block and an attention core. All of them give bit-exact
results against a reference model. The top level passes lint in verilator and
synthesises in yosys without errors. It has not been checked against the
published chip's numbers: its throughput counts cycles, not measured silicon.
Layer shapes beyond those exercised are covered only by the unit tests. The
exercised shapes include 3x3 and 7x7 depthwise kernels, LayerNorm over 32 and 48
channels and SoftMax over 16 and 40 channels. A whole network has not been run,
and neither have the frame rate or energy figures.
