# AWQ INT4 matrix-vector accelerator (four MACRO_MAC lanes)

This is the programmable-logic half of an edge inference system for
Qwen2.5-0.5B on a Zynq UltraScale+ (Kria K26) device. The CPU runs the model.
Almost all of its time goes into matrix-vector products (the Q/K/V, output and
FFN projections), and the CPU hands those products to this accelerator.

The main idea is to keep the weights compressed all the way into the
datapath. Each weight matrix is quantised with AWQ (activation-aware weight
quantisation) to 4-bit integers. Every group of 64 input channels of every
output channel gets one FP16 scale and one 4-bit zero point. The host stores
the matrix in DRAM as a sequence of **AWQ macros**, which are self-contained
tiles of 8 output channels x 64 input channels. A macro carries its own scales
and zeros, and it streams over a 128-bit AXI port with no gaps or side
information. Four independent lanes each read their own macros, unpack them,
dequantise every weight on the fly as `(q - z) * s`, and multiply-accumulate in
FP32 against an activation vector held on chip:

```
            AXI4 read, 128 bit                          8 x FP32 per output block
DRAM ──HP0──► axi_rd_master ─► awq_unpack ─► macro_mac ─────────────► result port 0
DRAM ──HP1──► axi_rd_master ─► awq_unpack ─► macro_mac ─────────────► result port 1
DRAM ──HP2──► axi_rd_master ─► awq_unpack ─► macro_mac ─────────────► result port 2
DRAM ──HP3──► axi_rd_master ─► awq_unpack ─► macro_mac ─────────────► result port 3
                                               ▲
host ──AXI4-Lite──► axil_ctrl ── config, start/status, activation writes
```

The top level is `awq_accel_top`. Everything is plain synthesizable
SystemVerilog. The shared types, the sizes and the FP32 operators are in
`awq_pkg`.

## The AWQ macro

The weight matrix `W` is N x K (N outputs, K inputs). Output channels are
grouped in blocks of 8, and input channels in groups of GS = 64. The macro for
output block `b` and input group `g` holds 2 + GS/4 = 18 beats of 128 bits, in
this order:

| beat | contents | bit positions |
|------|----------|---------------|
| 0 | 8 FP16 scales, one per output channel j of the block | scale j = `[16j+15 : 16j]` |
| 1 | 8 INT4 zero points | zero j = `[4j+3 : 4j]`; bits `[127:32]` are padding (zero) |
| 2 ... 17 | 64 input channels x 8 output channels of INT4 weights, as four 32-bit "qweight" words per beat | word w = `[32w+31 : 32w]` is input channel `4*(beat-2)+w` of the group; in that word, nibble j = `[4j+3 : 4j]` is the weight for output channel j |

The dequantised weight is `W[8b+j][64g+k] = (q - zero_j) * scale_j`. All the
macros of one output block come one after another, in order of g. That is
K/64 macros, called `n_macros`. Blocks follow each other. A lane reads one
contiguous run of blocks. Packing at 4.5 bits per weight gives
288 bytes per 512 weights, which is the compression this format is built for.

The macro order (scales, zeros, qweights), the 96-bit padding of the zero
beat and GS = 64 all come from the source design. The bit order inside a beat
is this implementation's own choice: lowest word first, and within a word the
lowest nibble first, with no interleaving. A host packer must match it.

## One lane: unpack, PE array, sliding adder tree

**Unpacking (`awq_unpack`).** The unit latches the scale beat and the zero beat
for the whole macro. It buffers each qweight beat and emits it as four
*rows*, one per cycle. Each 32-bit word is split into 8 nibbles by shift and
mask. A row carries the 8 weights of one input channel, plus the macro's 8
zeros and 8 scales (still in FP16). A macro of 64 rows takes 66 cycles, because
the two header beats cost one cycle each.

**PE array (`macro_mac`, `awq_pe`).** The 8 x 8 processing elements are arranged
like this:

* array **row r** holds one input channel k. Its 8 weights arrive from the
  unpacker, and the activation `x[k]` is broadcast along the row.
* array **column c** is output channel c of the macro. It uses that channel's
  zero and scale.

Each PE computes
`p_sum = fp32(q - z) * (x * fp32(s))`. That is two FP32 multiplications: the
integer difference is exact, and the activation is scaled first.

**Loading and reduction overlap.** Rows fill the array in 8 cycles. In the
cycle the eighth row is present, all 64 PE outputs are copied into a *p_sum
bank*, and the array starts filling again. Meanwhile a *sliding window* walks
over the bank one column per cycle. The 8 p_sums of the column go through the
8-input FP32 adder tree (`fp32_adder_tree`, pairwise:
`((0+1)+(2+3))+((4+5)+(6+7))`). The column sum is added to accumulator c.
Both the filling and the sliding take 8 cycles, so the lane keeps up with one
row, that is 8 multiply-accumulates, per cycle. After the last 8-row block
of an output block (K/8 blocks in all), the 8 accumulators leave together as a
`result_t`: 8 FP32 sums and the index of the block within the lane's run. The
next output block restarts the accumulators.

**Flow control.** Every interface is valid/ready:

* If a result has not been taken when the next one is due, the slide stops on
  its last column (`stall_result`).
* The array then stays full (`stall_array_full`). The unpacker stops, and
  `rready` drops on the AXI port.
* Nothing is ever dropped, so any amount of back-pressure only costs time.

**Activation buffer.** Each lane has its own copy of `x`: ACT_DEPTH = 4864 FP32
words, which is the largest input length in Qwen2.5-0.5B. The copy is read one
word per cycle at the index of the incoming row, using a registered
(block-RAM style) read with a one-row look-ahead. The host writes all four
copies at once through the control port.

**Summation order.** The order of FP32 additions is fixed and independent of
stalls:

```
y[c] = (...((T_0 + T_1) + T_2) + ... ) + T_{K/8-1}
T_i  = tree of the 8 p_sums of input channels 8i ... 8i+7
```

A software model that uses the same order and round-to-nearest-even
reproduces the hardware bit for bit. The testbenches rely on this.

## Arithmetic

The source design does all MACs in FP32 because the fabric has no native
lower-precision floating point. `awq_pkg` provides combinational `fp32_mul` and
`fp32_add`, plus exact conversions from FP16 and from small integers. They round
to nearest even. Subnormal inputs and results are flushed to zero. Overflow
gives infinity. NaN and infinity inputs are passed through without IEEE
exception behaviour. The PE and the adder tree are written combinationally,
with no pipeline registers inside them. The source design reports 200 MHz on
the device. This RTL would need the FP operators pipelined, or replaced by
vendor floating-point cores, to get there. That change does not affect the
dataflow, only the latency before the first result.

## Programming model

The AXI4-Lite register map (byte addresses, 32-bit registers):

| address | name | access | meaning |
|---------|------|--------|---------|
| 0x0000 | CTRL | W | bit 0 = 1: start a run (ignored while busy) |
| 0x0004 | STATUS | R | bit 0 busy, bit 1 done (cleared by start), bit 2 AXI read error in the run |
| 0x0008 | N_MACROS | R/W | K / 64 |
| 0x0010 + 16l | BASE_LO[l] | R/W | byte address of lane l's first macro, bits 31:0 |
| 0x0014 + 16l | BASE_HI[l] | R/W | address bits 39:32 |
| 0x0018 + 16l | N_BLOCKS[l] | R/W | number of 8-channel output blocks lane l computes |
| 0x001C + 16l | RESULTS[l] | R | results lane l has delivered in this run |
| 0x8000 + 4k | X[k] | W | activation k (FP32), written to all lanes |

To run one product:

1. Write `X[0..K-1]`.
2. Set N_MACROS, and set BASE and N_BLOCKS for each lane. A 256-byte-aligned
   base keeps every 16-beat burst inside a 4 KB page. To use all four lanes on
   an N-row matrix, give each lane N/32 blocks.
3. Write CTRL = 1.
4. Collect the results from the four result ports. Lane l's result `i` holds
   output channels `8*(first block of lane l + i) + 0..7`.
5. STATUS.done rises when every lane has delivered all of its results.

Each AXI read master issues INCR bursts of 16 beats, with the last one
shorter. It keeps up to 4 bursts in flight. It never writes memory.

## Sizes and speed at the default parameters

Each lane sustains 64 rows per 66 cycles. That is 8 x 64/66 MACs per cycle,
or about 31 MACs per cycle for the accelerator. It reads 288 bytes per 66
cycles per lane, about 3.5 GB/s in total at 200 MHz. The KV260's DRAM offers
19.2 GB/s. The Qwen2.5-0.5B shapes below come from the model's public
configuration. They fit the defaults: K is at most 4864, which is the
activation buffer depth, and the 16-bit counters are well above what is needed.

| projection (per layer) | W (N x K) | macros/block | blocks/lane | cycles | at 200 MHz |
|---|---|---|---|---|---|
| Q, output | 896 x 896 | 14 | 28 | 25,872 | 129 µs |
| K, V | 128 x 896 | 14 | 4 | 3,696 | 18 µs |
| FFN gate, up | 4864 x 896 | 14 | 152 | 140,448 | 702 µs |
| FFN down | 896 x 4864 | 76 | 28 | 140,448 | 702 µs |

Per decoder layer that adds up to 480,480 cycles. For all 24 layers it is about 58 ms
per token if the accelerator did nothing else. That is an upper bound of about
17 tokens/s for the linear layers alone. The bound leaves out the activation
upload, which the register port does one word per write, and the host-side
non-linear operations. The source design reports 5.1 tokens/s for the
complete system. Prefill uses the same datapath one token at a time: the
design computes matrix-vector products only.

## How far to trust it, and where it departs from the source

What the source describes, and this RTL follows:

* the macro format (scales, zeros + 96-bit padding, GS/4 qweight beats, GS = 64)
* four independent 128-bit AXI channels, each feeding an unpacking unit and a
  MACRO_MAC
* shift-and-mask unpacking, with scales kept in FP16
* an 8 x 8 PE array whose PEs compute `(q - z)` and `x * s` and multiply the two
* an adder tree reducing a sliding column window
* per-output-channel accumulation, with the result handed to the host when the
  channel is complete
* FP32 throughout

What is this design's own, because the source gives only the function or
nothing at all:

* the bit order inside beats
* which array dimension is input and which is output channel
* the p_sum bank that overlaps loading with reduction
* the per-lane activation buffers and how they are loaded
* all handshakes
* the AXI burst policy
* the control register map
* the result ports
* the FP32 rounding and special-value rules

The source reports 384 DSPs, 110k flip-flops and 97k LUTs on the device. Those
numbers say nothing about this RTL.

The rest of the system is not RTL and is not here: the CPUs, the DDR controller
and DRAM, the HP port interconnect, and the host software that packs the model
and runs the non-linear operations.

## Files

`rtl/`:

| file | content |
|---|---|
| `awq_pkg.sv` | sizes, `unpacked_row_t`, `result_t`, AXI AR/R structs, FP32 operators |
| `awq_unpack.sv` | unpacking unit |
| `awq_pe.sv` | processing element |
| `fp32_adder_tree.sv` | 8-input FP32 adder tree |
| `macro_mac.sv` | MACRO_MAC: activation buffer, PE array, p_sum bank, sliding reduction, accumulators |
| `axi_rd_master.sv` | AXI4 read burst engine |
| `axil_ctrl.sv` | AXI4-Lite registers and activation write path |
| `awq_accel_top.sv` | four lanes and the control port |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:

* `tb_awq_pkg.sv`: data generators and a bit-exact reference model
* `ddr_axi_model.sv`: behavioural AXI read slave that generates each beat from
  its address, so no memory image is stored
* `tb_awq_accel_run.sv`: the end-to-end host sequence

The end-to-end testbenches all run the top at its default parameters:

| testbench | workload | stalls | what it shows |
|---|---|---|---|
| `tb_awq_accel_top` | K/V projection | random memory and result stalls | every flow-control path occurs at least once |
| `tb_awq_accel_gate` | FFN gate projection | random memory and result stalls | the same at a larger size |
| `tb_awq_accel_full` | FFN down projection | none | full-depth activation buffer, and the run takes 140,463 cycles against the ideal 140,448 |

Every result is compared bit for bit with the reference. Each testbench ends
with the line `TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`, for example:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/awq_pkg.sv tb/tb_awq_pkg.sv tb/tb_awq_accel_full.sv \
    --top-module tb_awq_accel_full -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. Every testbench has a
watchdog. The full-size run takes a few seconds.
