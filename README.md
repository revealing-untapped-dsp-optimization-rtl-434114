# DSP48E2-centric systolic matrix engines

On AMD/Xilinx UltraScale FPGAs, a systolic matrix engine is usually built from DSP48E2
slices for the multiplications. Much of the logic around them still sits in the
general fabric (CLB look-up tables and flip-flops): weight double-buffers, operand
multiplexers, adder trees and accumulators. Yet the DSP48E2 already has most of
that logic inside it, mostly unused:

* two input registers per operand with separate clock enables (A1/A2, B1/B2);
* dedicated cascade wires between neighbouring slices (ACIN/ACOUT, BCIN/BCOUT,
  PCIN/PCOUT);
* an `INMODE[4]` bit that picks B1 or B2 as the multiplier operand;
* wide W/X/Y/Z multiplexers in front of the adder, with a static rounding constant
  (RND) on W;
* SIMD splitting of the 48-bit adder into two 24-bit or four 12-bit lanes.

This RTL moves the fabric logic of three well-known engines into those DSP
features:

| Engine | Dataflow | Technique | Default size |
|---|---|---|---|
| `tpu_engine` | weight-stationary, TPUv1-like | **in-DSP operand prefetch**: the next weights travel down the B1 cascade while B2 holds the weights in use | 14 x 14 INT8 PEs, 210 DSPs |
| `dpu_engine` | output-stationary, like the B1024 DPUCZDX8G array | **in-DSP multiplexing** of two weights (B1/B2 chosen by INMODE[4]) in a double-rate chain, plus a **ring accumulator** of two DSPs at the fast clock | 4 x 4 PEs, 128 + 32 DSPs |
| `snn_crossbar` | spiking (FireFly-like) weight-stationary crossbar | in-DSP prefetch on both A and B cascades; spikes steer the wide multiplexers | 4 chains x 16 DSPs = 64 DSPs |

`dsp_systolic_top` places the three engines side by side with their own ports.
They share nothing but the reset.

All arithmetic is done by `dsp48e2_lite`, a synthesizable functional model of the
parts of the DSP48E2 slice these engines use. It has the same registers, cascades
and multiplexers as the real slice. The multiplexer settings are symbolic enums,
not the real OPMODE bit codes. To map onto real silicon, replace `dsp48e2_lite`
by a `DSP48E2` instance with the matching attributes.
Everything else (the registers the engines keep in fabric, the skew logic and the
control) is plain RTL.

## INT8 packing: two products per multiplier

All three engines that multiply (weight-stationary and output-stationary) pack
two INT8 activations that share one INT8 weight into a single DSP multiply:

    A = act_hi * 2^18      (A port, 30 bits)
    D = act_lo             (D port, sign-extended)
    P = (A + D) * w = act_hi*w * 2^18 + act_lo*w

The low product is a signed field in bits 17:0. The high product starts at bit 18
but has absorbed a borrow of one whenever the low field is negative. Summing k
such words along a P cascade keeps that shape as long as the low sum fits in 18
signed bits. Seven products of (-128)(-128) = 16384 still fit: 7 x 16384 = 114688 < 2^17.
This is why a weight-stationary cascade is at most 7 PEs long.

Two ways of getting the two fields back are used here:

* **Offset** (weight-stationary engine). The head of every cascade adds 2^17 through
  RND, so the low field stays non-negative in the whole chain and never borrows.
  The column's adder DSP removes the offsets again.
* **Borrow correction** (ring accumulator). The low field is sign-extended into
  lane 0 and the high field taken as is into lane 1. Whenever the low field was
  negative (bit 17 set), RND adds one into lane 1 (2^24), which repays the borrow.
  RND is selected per cycle by the W multiplexer, so no fabric adder is needed.

## Weight-stationary engine with in-DSP prefetch

### PE (`tpu_pe`)

One DSP per PE. The weight in use sits in B2. B1 is part of a shift chain: BCIN to
B1, and BCOUT is taken from B1 (BCASCREG=1). `INMODE[4]=0` always multiplies by B2.
A/D carry the packed activation pair, and the product is added to PCIN.

* Pipeline: A/D register, then the pre-adder (AD) register, M and P.
* A PE's P is ready four cycles after its activation.

### Prefetch and swap (`prefetch_ctrl`)

* `w_shift` (ce1) moves a new weight into every B1 of a cascade at once. After N
  shifts, the B1 chain holds a complete new weight set (`loaded`).
* `swap` (ce2) copies B1 into B2. It must not happen in all PEs at the same time,
  because the activations enter the cascade skewed by one cycle per PE. A swap
  token given with the first vector of a new round therefore becomes a wave:
  ce2[p] = swap delayed by p+1 cycles. Each PE changes its weight exactly when the
  first vector of the new round reaches it.
* While the wave runs, `busy` is high and B1 must not shift. An assertion checks
  this, and a second one checks that a swap only follows a full load.

No fabric flip-flop holds a weight: both weight buffers are the DSP's own B1/B2.

### Column (`tpu_column`) and array (`tpu_engine`)

A 14-row column is two cascades of 7 PEs. Each cascade has its own B1 chain (two
weight ports per column) and its own prefetch controller. A 15th DSP in SIMD TWO24
adds the two cascade outputs:

* cascade 0's word goes to A:B and cascade 1's to C. Both are rewired so that
  lane 0 holds the low fields and lane 1 the high fields;
* the RND constant -(2 x 2^17) removes the two offsets in lane 0;
* `out_lo`/`out_hi` are the two 24-bit column sums.

Each column thus uses 15 DSPs, 210 in the 14 x 14 array.

`systolic_setup` delays row r by (r mod 7) cycles. This skew restarts in each
cascade instead of running over all 14 rows. Between columns, the activation
pairs, the valid token and the swap token move one register per column. The
whole array therefore behaves as a wavefront: column c lags column c-1 by one
cycle.

Timing (`tpu_engine`):

* input vector with `act_valid` → column c output with `out_valid[c]`:
  **c + CASC + 5 cycles** (c + 12 at defaults);
* one vector per cycle, with no bubbles at a weight swap;
* a new weight set is loaded during computation with CASC (7) `w_shift` cycles.
  The row of the weight matrix entering at shift k is CASC-1-k within each
  cascade: the deepest PE's weight goes first.

## Output-stationary engine at double rate

The output-stationary engine runs its DSP chains at `clk2x`, twice the rate of the
surrounding logic at `clk1x`. The two clocks must have aligned rising edges.
`ddr_phase` recovers, in the fast domain, which half of the slow cycle is current.
After reset, leave one idle `clk1x` cycle before the first block so that it settles.

### Blocks of work

* Every PE computes 2 pixel pairs x 2 output channels x 8 input channels.
* A **block** is two `clk1x` cycles:
  - cycle 0 (`par`=0) brings pixel pair 0 and the weights of output channel 0;
  - cycle 1 brings pixel pair 1 and the weights of output channel 1.
* Each activation word is 16 bits, two INT8 pixels packed as above.
* In the four fast cycles of the block, each DSP must form a0·w0, a0·w1, a1·w0
  and a1·w1 (the block's four **slots**).

### In-DSP multiplexing (`dpu_mux_chain`, `dpu_ddr_ctrl`)

The obvious design keeps two weights in fabric and multiplexes them onto the B
port at the fast rate. Here both weights are kept inside the DSP instead:

* B1 and B2 both load from the B input;
* ce1 captures w0, and ce2 captures w1 one `clk1x` cycle later;
* `INMODE[4]` chooses B1 or B2 for each slot.

Each weight is fetched once per block and used twice. No look-up table sits in
the weight path.

A chain is 4 DSPs connected by PCIN, and each DSP adds one fast cycle. DSP k is
given its activations and weights after floor((k+1)/2) `clk1x` registers and
with A/D pipelines of 2 (even k) or 1 (odd k) fast registers. This keeps its
product in step with the partial sum arriving from above.

`dpu_ddr_ctrl` computes the block phase q = {par, not first_half} (0..3). For
DSP k it uses q delayed by k cycles and gives:

* ce1 at q = 1;
* ce2 at q = 3;
* `INMODE[4]` (B1) at odd q.

The products of slot s of block j appear at the chain output N+4+s fast cycles
after the block reaches the chain.

### Ring accumulator (`dpu_ring_acc`)

Two DSPs at `clk2x` in SIMD TWO24 combine the two chains (groups) of a PE, add the
bias and accumulate:

* **top DSP:** group 1's packed word + borrow correction + (bias on the first block);
* **bottom DSP:** group 0's packed word + borrow correction + the top DSP's P
  (PCIN) + its own earlier result (C, except on the first block).

The loop is: bottom P, then two delay registers, then the C register, then bottom
P again. It is four fast cycles long, so each of the four slots owns one position
in the loop. Successive blocks add onto the same four sums with no extra
accumulator per slot.

Every `clk1x` edge, the two delay registers are captured as `res_a` (older slot)
and `res_b` (newer slot). This is the conversion back to the slow domain. A
finished tile gives its eight 24-bit results in two `clk1x` cycles:

* slots 0/1 (`res_half`=0);
* then slots 2/3.

In each 48-bit word, lane 0 is pixel 0 and lane 1 is pixel 1. Slots 0 and 2
belong to output channel 0, slots 1 and 3 to output channel 1.

Biases and sums are 24 bits wide, the width of one TWO24 lane. Sums wrap modulo
2^24.

### PE and array (`dpu_pe`, `dpu_engine`)

`dpu_pe` has two chains of 4 DSPs (8 input channels), the controller, the ring
accumulator and a bias store. It uses 10 DSPs.

The bias pair is given with the first block of a tile and must be held for both
cycles of that block. The PE delays bias[0] by (N+5)/2 and bias[1] by (N+6)/2
`clk1x` cycles, so that each bias reaches the top DSP together with its slots.

`dpu_ctl_t` carries four fields:

* `valid`;
* `par`, the cycle within the block;
* `first`, the first block of a tile, which loads the bias and starts a new sum;
* `last`, the last block, which marks when results come out.

`dpu_engine` is a 4 x 4 array with 160 DSPs:

* activations (8 channels x 16 bits per column) flow down the columns;
* weights and biases (8 x 8 bits per row, one output channel per cycle) flow
  along the rows;
* the control word flows with the activations;
* inputs are skewed by `systolic_setup`, and each PE passes them on through one
  `clk1x` register.

PE (r,c) gives its first result pair r + c + N/2 + 5 `clk1x` cycles after the
first cycle of the tile's last block, and the second one cycle later.

## Spiking crossbar

`snn_pe` is one DSP in SIMD FOUR12 with four 12-bit lanes. The two spike inputs
steer its multiplexers:

* X = spike1 ? A:B : 0, where A:B holds four INT8 weights (one per output lane);
* Y = spike2 ? C : 0, with four more INT8 weights;
* Z = PCIN.

A chain of 16 PEs sums the weights of up to 32 spiking inputs for 4 output neurons.

The A:B weights are prefetched through the ACIN/BCIN cascades: A1/B1 shift, and
A2/B2 hold the weights in use. The C port has no cascade, so its weights go
through one fabric register per PE and are swapped into CREG. The same
`prefetch_ctrl` drives all of this.

`snn_crossbar` puts 4 chains side by side:

* the same 32 input spikes reach every chain;
* each chain has its own 4 outputs;
* spikes move from chain to chain through one register;
* each chain receives its weights through its own port.

Chain h's four 12-bit sums appear h + LEN + 2 cycles after the spike vector.

## Modules

| File | Contents |
|---|---|
| `dsp_pkg.sv` | multiplexer enums, `opmode_t`, SIMD enum, `dpu_ctl_t`, port widths, the SIMD adder function |
| `dsp48e2_lite.sv` | DSP48E2 functional model |
| `tpu_pe.sv`, `prefetch_ctrl.sv`, `systolic_setup.sv`, `tpu_column.sv`, `tpu_engine.sv` | weight-stationary engine |
| `ddr_phase.sv`, `dpu_ddr_ctrl.sv`, `dpu_mux_chain.sv`, `dpu_ring_acc.sv`, `dpu_pe.sv`, `dpu_engine.sv` | output-stationary engine |
| `snn_pe.sv`, `snn_crossbar.sv` | spiking crossbar |
| `dsp_systolic_top.sv` | the three engines side by side |

Every file begins with a comment giving its function, interface and timing.

## Where this design departs from the source description

* **Function only, no placement.** The LUT/FF/power numbers of the original work
  depend on vendor placement and are not reproduced. The DSP counts are: 210 for
  the 14 x 14 weight-stationary array, 128 multiplier DSPs + 32 accumulator DSPs
  for the output-stationary array, and 64 for the crossbar.
* **Not built:**
  - the weight bank and the accumulator buffer around the weight-stationary array;
  - the feature-map and weight memories, and all host control.
  They are only named in the source, so the engines' data enter and leave through
  ports.
* **Offset instead of correction** in the weight-stationary columns. The cascade
  head adds 2^17 and the column adder removes it. This is a design choice here:
  the source explains the packing correction only for the ring accumulator.
* **Column adder.** How the two 7-PE cascades of a column are joined is this
  design's own choice: one TWO24 DSP, which gives the 15 DSPs per column implied
  by the 210-DSP total.
* **Output-stationary bandwidth.** The source's resource table says the
  activation bus is halved (512 to 256 bits) while its text says the weight
  bandwidth is halved. This RTL follows the text: each weight is fetched once per
  block. At the array's edge, weights are 4 rows x 64 bits per `clk1x` cycle and
  activations 4 columns x 128 bits.
* **Crossbar size.** 4 chains of 16 DSPs with two spikes per DSP give 32 inputs;
  four SIMD lanes per chain give 16 outputs. The source calls this configuration
  32 x 32, which does not follow from 64 DSPs. This RTL builds 32 x 16.
* **Control timing.** The clock-enable timing (ce1/ce2 waves, B1/B2 phases, bias
  delays, input skews) is worked out here from the required data order, not
  copied from a waveform.
* **Exact register placement.** Where the source shows only the kind of register
  (for example C weights in fabric, one register per PE), placement and reset
  (synchronous, active high, everything cleared) are this design's choices.

## Simulating

Every block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/dsp_pkg.sv tb/tpu_engine_tb.sv \
              --top-module tpu_engine_tb -o sim
    ./obj_dir/sim

Replace the testbench name with any other file of `tb/`. The package has to be
named first; the rest is found through `-Irtl`.

The testbenches:

| Testbench | What it covers |
|---|---|
| `dsp_systolic_top_tb` | All three engines at full default size, running together. It checks every result and latency. It also counts each mechanism and fails if one never happened: weight swaps, prefetch overlapped with computation, B1/B2 selection, packing corrections, bias insertion, serial-to-parallel readout. Builds in about half a minute. |
| `tpu_engine_tb` | A reduced 6 x 4 array with three weight rounds, including all -128 operands |
| `tpu_column_tb` | One full 14-row column |
| `dpu_engine_tb` | A reduced 3 x 2 array |
| `dpu_pe_tb` | One PE with tiles of random length |
| `dpu_ring_acc_tb`, `dpu_mux_chain_tb`, `dpu_ddr_ctrl_tb` | The output-stationary parts on their own |
| `snn_crossbar_tb` | A reduced crossbar |
| `snn_pe_tb`, `tpu_pe_tb`, `prefetch_ctrl_tb`, `systolic_setup_tb`, `dsp48e2_lite_tb` | The building blocks |

Two testbench rules matter when you write your own for the double-rate engine:

* Generate `clk1x` and `clk2x` in one process. A common rising edge must be a
  single simulation event, or the two clock domains race.
* Change `clk1x`-domain inputs in the middle of the first half of the slow
  cycle, as a register clocked by `clk1x` would. Do not change them on the
  falling edge of `clk1x`: that edge is a rising edge of `clk2x`.
