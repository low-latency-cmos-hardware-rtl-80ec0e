# FC-ACCL: a fully connected layer accelerator fed by one HBM per PE row

A fully connected (FC) layer of a neural network is a dense matrix-vector
product followed by a bias and an activation: `out = max(W·x + b, 0)`. For the
FC8 layer of AlexNet or VGG16, `W` has 1000 rows and 4096 columns, and every one
of its 4 million weights is used once per inference. The layer is therefore
limited by how fast the weights can be brought to the multipliers, not by the
arithmetic.

This design cuts `W` into 8×8 tiles. For FC8 (1000 rows padded to 1024) that is
a grid of 128 tile rows by 512 tile columns. Each tile row gets its own
processing element (PE) and its own High Bandwidth Memory (HBM) stack, which
holds only that row's weights. Computation walks through the tile columns, one
per *time slot*. In slot `s` all 128 PEs do the same step at once: PE `p`
multiplies tile `(p, s)` by input features `8s+1 … 8s+8` and adds the 8 results
into its accumulator. Every PE works in every slot. Each weight and each input
is read exactly once. No network is needed between memories and PEs. The source
paper calls this the *column-row-column* schedule. After the last slot, the
1024 sums get their biases and the ReLU, and are streamed into an output
memory.

The RTL here implements that design for its main configuration: 128 PEs with
8×8 tiles, Q(17,10) fixed point, pipelined PEs, with HBM at 500 MHz, PEs at
662 MHz and output at 150 MHz. It is written in SystemVerilog-2017 and is
synthesizable. The HBM stacks and the input memory are outside the design; the
testbenches use behavioural models of them.

## Block structure

```
 weight HBM p ──DQ[127:0]──► dpr_buf p ──1024 bits──► pe p ──8×17──┐
   (external)   ◄─READ/addr─   (×128)                   (×128)      │
                                  ▲ buf_ready / buf_rd    ▲ x (128)  ▼
 input memory ──128 bits──────────┼───────────────────────┘     bias_relu ──16──► out_feature_mem
   (external)  ◄─in_rd/in_addr─ main_ctrl ───── t512_en ──────────►  (+1024-entry      (host reads
                                                                     dual-clock FIFO)   results)
```

| module | role |
|---|---|
| `fc_accl_top` | the accelerator: clock/reset handling, run configuration, 128 channels, output path |
| `dpr_buf` | per-row HBM pre-fetch unit: READ sequencer (address generator), 1:8 demux, 8 FIFOs, 1024-bit buffer |
| `pe` | one PE = `mv_mult` + `v_accum` |
| `mv_mult` | 8×8 matrix × 8-vector multiplier: 64 multipliers with zero detection, product registers, 8 adder trees |
| `v_accum` | 8 accumulators, one per output of the tile row |
| `main_ctrl` | slot sequencer, input address generator, `t512_en` |
| `bias_relu` | bias registers, add + ReLU for all 1024 outputs in one cycle, serialiser, 1024-entry output FIFO |
| `out_feature_mem` | output memory with its own write-address generator and a host read port |
| `async_fifo` | dual-clock Gray-pointer FIFO (the DPR-BUF FIFOs and the output FIFO) |
| `pulse_sync`, `rst_sync` | start-pulse and reset synchronisers |
| `fc_accl_pkg` | widths, the Q(17,10) type, rounding and saturation functions |

## Number format

All arithmetic is Q(17,10): 17-bit two's complement with 10 fraction bits. The
memories and buses carry 16-bit words: 64 weights make one 1024-bit tile and 8
features make one 128-bit input word. A 16-bit word is read as Q(16,10) and
sign-extended to 17 bits at the multiplier.

A 17×17 product has 34 bits. The run-time input `prod_shift` selects which 17
of them are kept by dropping that many low bits. The default, 10, gives
Q(17,10) × Q(17,10) → Q(17,10). The dropped bits are rounded half-up, and a
result that does not fit saturates. The adder trees, the accumulators and the
bias addition also saturate. The ReLU result is never negative, so its sign
bit is always 0 and the other 16 bits pass unchanged onto the 16-bit output
path.

## One time slot, cycle by cycle

Delivering one tile takes most of a slot's time, so this part is worth
following in detail.

**HBM side (`dpr_buf`, `hbm_clk`).** One tile is 1024 bits, and the HBM data bus
DQ is 128 bits wide. The sequencer therefore issues two READ commands with
burst length 4 per slot, to two consecutive column addresses (Ca, then Cb).
Each burst returns 4 beats after the read latency (RL = 6 in the model). The
HBM is modelled at single data rate, one 128-bit beat per `hbm_clk` cycle.
Cb therefore follows Ca by 4 cycles, and the 8 beats arrive back to back.
After them comes one spare cycle for a bank switch ("sw"), so a slot takes
9 HBM cycles. Beat `k` holds row `k` of the tile, and the 1:8 demux writes it
into FIFO `k`. The READ address is `{weight set, slot, read index}`. The
weight set selects one of several stored weight sets (the paper keeps them in
HBM pages), and it can change between runs.

The sequencer requests a slot only if FIFO 1 has room for it. Slots already
requested but not yet returned count against that room. The FIFOs (4 entries
each) therefore never overflow, whatever the ratio of the two clocks. While
the sequencer waits for room, `hbm_wait` is high.

**PE side (`main_ctrl`, `core_clk`).** A slot is four PE cycles at the least:

| cycle | what happens |
|---|---|
| Rd | only if all 128 DPR-BUFs report `buf_ready`: all 1024 FIFOs are popped into the 128 1024-bit buffers; the input memory is read at address `s` |
| P1 | tile and input vector are at the PE; 64 products are formed, rounded and registered |
| P2, P3 | adder tree levels (the pipelined tree has a register after each of its 3 levels), then the accumulator |

The controller starts a new Rd every fourth cycle at most. If some FIFO is
still empty, the Rd waits and `data_wait` is high. Because the MV-mult is
pipelined, slot `s+1` enters while slot `s` is still in the tree. After the
last slot's Rd, the controller waits for the PE pipeline (`PE_LAT` = 5
cycles) and then pulses `t512_en`. The top asserts that this pulse coincides
with the accumulators' own `done`.

**Which side sets the rate.** At the paper's clocks, the HBM side needs
9 × 2 ns = 18 ns per slot. The PE side needs 4 × 1.51 ns = 6 ns. The PEs
therefore wait for data, and a 512-slot FC8 layer takes 512 × 18 ns ≈ 9.2 µs
from start to `t512_en`. The full-size testbench measures 9.245 µs, about
886 GOPS. The paper reports 8.5 µs, which is 11 cycles of 662 MHz (16.6 ns)
per slot. Its own per-slot HBM pattern, 8 read cycles plus one sw cycle at
500 MHz, does not fit in 16.6 ns, so this RTL is about 8 % slower than the
paper's figure. When `core_clk` is slower than about 4/9 of `hbm_clk`, the PEs
set the rate instead and the FIFOs fill up (the end-to-end test runs this
case at 100 MHz).

## The PE

`mv_mult` has a zero detector on every operand pair. If either operand is zero,
that multiplier's inputs are forced to zero, so it does not toggle, and its
product register is loaded with zero. Each of the 8 rows has a 7-adder tree.
There are two forms, chosen by the parameter `PIPELINED`:

* `PIPELINED = 1` (default, the 662 MHz PE): product register, then a register
  after each tree level. Latency 4 cycles.
* `PIPELINED = 0` (the 100 MHz PE): product register, then the whole tree, then an
  output register. Latency 2 cycles.

Both forms accept a new tile every cycle. `v_accum` adds each partial-sum
vector in one cycle. The vector of a run's first slot replaces the old sum, so
no separate clear is needed.

## Output path

On `t512_en`, `bias_relu` computes `max(acc + bias, 0)` for all 1024 outputs in
the same cycle and stores the results in a register bank. It then writes them,
output 1 first and one per `core_clk` cycle, into a 1024-entry dual-clock
FIFO. If the FIFO is full, it waits (`push_stall`). On `out_clk`,
`out_feature_mem` pops every word it finds and writes it to
`out_base + i`. `out_count` counts the words written in the current run. The
host reads results through `out_rd_addr`, and the data appears on
`out_rd_data` one `out_clk` cycle later. The host loads the 1024 biases
through `bias_we/bias_addr/bias_wdata`.

## Running a layer

1. Load biases (one per output, Q(17,10)).
2. Put `num_slots` (inputs / 8), `wset`, `prod_shift` and `out_base` on the
   inputs, then pulse `start` for one `core_clk` cycle. These values are
   captured, and they may change after the pulse. `start` is ignored while
   `busy` is high.
3. Wait until `out_count` reaches 1024, then read the results.

A layer with more than 1024 outputs runs in several passes. Each pass uses its
own weight set and `out_base`, and the biases are reloaded between passes.

| layer (sizes from the paper) | slots | passes of 1024 outputs |
|---|---|---|
| FC8, AlexNet and VGG16, 4096 → 1000 | 512 | 1 |
| FC7, 4096 → 4096 | 512 | 4 |
| FC6 AlexNet, 9216 → 4096 | 1152 | 4 |
| FC6 VGG16, 25088 → 4096 | 3136 | 4 |

`SLOT_W = 12` allows up to 4095 slots. `SET_W = 2` gives 4 weight sets, and
`OUT_DEPTH = 4096` holds 4096 results. Only FC8 has been simulated at full
size. For the FC6 and FC7 layers the paper proposes a scaled-up variant with
16×16 tiles, 128 PEs and two passes. That variant is not built here. `TILE`
is a parameter, but sizes other than 8 have not been tested.

## Clock domains and reset

There are three clocks: `hbm_clk` (HBM side of the DPR-BUFs), `core_clk`
(controller, PEs, bias/ReLU, output-FIFO write side) and `out_clk` (output-FIFO
read side, output memory). Data crosses between them only through the
Gray-pointer FIFOs. The start of a run crosses through toggle synchronisers
(`pulse_sync`). The other domains read the captured run configuration only
after that pulse has arrived, and it stays stable until the next run. `rst_n`
is asynchronous and is released into each domain through a two-flop
synchroniser.

## What follows the source paper and what is this design's own

From the paper: 128 PE rows with 8×8 tiles and one HBM each; 1024-bit tiles
from two BL4 reads of 128 bits; the 1:8 demux, eight FIFOs and single-cycle
read into one 1024-bit register; the sw cycle; the Rd/P1/P2/P3 cadence and
reading only non-empty FIFOs; Q(17,10) operands; configurable 17-of-34-bit
product selection with rounding; the zero detectors; the register after each
multiplier; the 7-adder trees, optionally pipelined; one-cycle accumulation;
bias add and ReLU in one cycle after the last slot, gated by `t512_en`; the
1024-entry output FIFO crossing clock domains; weight-set (page) selection
between runs; the clock frequencies.

Choices made here, where the paper gives no detail:

* Half-up rounding, and saturation in every addition.
* 16-bit words on the buses, sign-extended to 17 bits. The paper gives both
  the bus widths (16-bit words) and Q(17,10).
* One register per adder-tree level. The paper speaks of "a seven stage
  pipeline" for a tree that has three levels.
* Single-data-rate HBM beats and the `{set, slot, read index}` address.
* Row-per-beat weight order.
* FIFO depth 4 and the credit-based read throttling.
* Gray-pointer FIFOs and the synchronisers.
* The bias register file and its load port.
* One element per cycle into the output FIFO.
* The output memory's size and ports, and `out_base`.
* The run-time `num_slots`, and the start/busy handshake.
* The FIFO write clock is the PE clock. The paper also mentions 100 MHz
  there, which is the non-pipelined PE's clock.

Known difference: the slot rate, as explained above (18 ns per slot against
the paper's 16.6 ns).

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. The testbench data
comes from hash functions of the indices (`tb/tb_fc_pkg.sv`), and about one
value in eleven is zero. A plain-integer reference model in the same package
computes the expected outputs. It rounds, saturates and sums in the same tree
order as the hardware. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  rtl/fc_accl_pkg.sv tb/tb_fc_pkg.sv tb/tb_fc_accl_top.sv --top-module tb_fc_accl_top
./obj_dir/Vtb_fc_accl_top
```

| testbench | what it shows |
|---|---|
| `tb_mv_mult` | both PE forms, exact results, latency 2/4, zeros and saturation, three shift settings |
| `tb_v_accum`, `tb_pe` | accumulation, first/last handling, saturation, PE latency 5 |
| `tb_async_fifo` | order, no loss, full and empty across unrelated clocks |
| `tb_dpr_buf` | READ stream (Cb 4 cycles after Ca, 9-cycle slots), tile contents per weight set, back-pressure |
| `tb_main_ctrl` | Rd spacing ≥ 4 (exactly 4 when data is ready), addresses, flags, `t512_en` timing |
| `tb_bias_relu`, `tb_out_feature_mem` | bias + ReLU values and order through a full FIFO; base addresses, read port |
| `tb_fc_accl_top` | 4 PEs, three runs with different weight sets, shifts, bases and clock ratios; every output checked; counts data waits, HBM back-pressure, full output FIFO, ReLU clamping, zero operands |
| `tb_fc_accl_full` | default parameters (128 PEs), the FC8 4096→1024 layer, all 1024 outputs checked, slot rate checked, latency printed |

The full-size testbench takes about 3 minutes to compile with 8 C++ jobs and
6 seconds to run. A logic synthesis of the full top needs close to 10 GB of
memory. The 128 × 64 multipliers dominate the area.
