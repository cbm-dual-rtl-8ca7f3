# CBM-Dual core in SystemVerilog

A chaotic Boltzmann machine (CBM) is a network of binary neurons whose
states follow a deterministic chaotic trajectory instead of random sampling.
Run with a falling temperature it behaves as a simulated annealer for Ising
and QUBO problems (such as max-cut); run at fixed temperature with an input
signal fed in, it is a reservoir for time-series learning. CBM-Dual is a
fully connected 1024-neuron CBM that does both at once: every neuron is
marked SA (annealing) or RC (reservoir) by a mask, the weight matrix keeps
the groups apart, and one pass of the hardware updates all of them.

The code here is an RTL model of that processor as published in
"CBM-Dual: A 65-nm Fully Connected Chaotic Boltzmann Machine Processor for
Dual Function Simulated Annealing and Reservoir Computing" (Yoshioka et al.).
The paper gives the block diagram, the neuron equations, the two
area/time-saving ideas and a cycle-level timing diagram; it does not give
register formats, host protocol or memory ports. Those are filled in here
and marked as such below and in each file's header.

## The neuron model

Each CBM neuron i has a binary external state S_i and an internal state X_i.
Its input is

    Z_i,t = sum_j W^IN_ij I_j,t  +  sum_j W^CBM_ij S_j,t-1

(W^IN from 16 input neurons, RC neurons only; W^CBM from all 1024 neurons).
Each step the internal state grows:

    X_i,t = X_i,t-1 + dX_i,t,     dX = 1 + 2^((1-2S) * Z * alpha / T0)

and when X reaches T_CBM = 256 the neuron flips and X starts again from 0.
A neuron being pushed towards its other state (large positive
(1-2S)Z) crosses the threshold at once; one pushed towards the state it is
already in creeps up by 1 per step and flips after about 256 steps. That
slow, deterministic drift is the chaos that replaces random sampling.

Temperature is T = T0 / alpha. Annealing raises alpha (lowers T) step by
step for SA neurons; RC neurons keep their initial alpha.

## Where the hardware saves work

**Delta-driven MAC (the scheduler).** Computing Z from scratch is
1024 x 1040 multiply-adds per step. But a CBM neuron flips rarely (about
1% of neurons per step in the published measurements, and about the same,
10.7 events per step out of 1040 possible, in the end-to-end testbench
here). So Z is kept in a register and updated only by the neurons that
flipped: +W when a source went 0->1, -W when it went 1->0. The scheduler
XORs the new states with the ones it saw last step, and a priority encoder
hands out one flipped index per clock. The same trick keeps the ten
output-layer sums O_k = sum_j W^OUT_kj S_j current from the flipped RC
neurons only. Input neurons are scheduled the same way: an 8-bit input
value becomes a pulse that is high for the first v of the 256 steps of a
data point, so an input flips at most twice per point.

**Adaptive temperature multiply splitting (ATMS).** Z/T would need a
19-bit multiplier per neuron. With T = T0/alpha, T0 a power of two, Z/T is
(Z >> log2 T0) * alpha: a barrel shifter and a 6-bit multiplier. Further,
if (1-2S)Z/T0 >= 8 the neuron flips this step whatever alpha is (since
alpha >= 1 and 2^8 = T_CBM), so the multiplier only ever sees the small
range below 8. exp() is replaced by a power-of-two shift.

`atms_unit.sv` implements exactly this datapath:

    y  = ((1-2S) Z) >>> log2T0           barrel shifter (19 bit)
    flip_det = y >= 8                     deterministic flip
    e  = clamp(y, -32, 7) * alpha         6 x 6 bit multiply
    dX = 1 + (e < 0 ? 0 : 2^min(e, 8))

## Pipeline and step timing

One step of the whole array, for n scheduled events (flipped neurons plus
flipped input pulses):

| clock       | what happens                                                  |
|-------------|---------------------------------------------------------------|
| k           | LOAD: scheduler captures S_t and the pulses, forms delta info |
| k+1 .. k+n  | one index i per clock (and i' for RC neurons)                 |
| k+2 .. k+n+1| Memory1 / Memory2 deliver the weight row of that index        |
| k+3 .. k+n+2| every neuron adds/subtracts its weight to Z (and every output PE to O) |
| k+n+2       | UPDX: all neurons X += dX                                     |
| k+n+3       | UPDS: neurons with X >= 256 flip; S_t+1 visible at k+n+4       |

So a step costs n + 4 clocks; with five events this is the published
timing diagram (S_t at k, X_t+1 at k+8, S_t+1 at k+9). Memory1 reads a
whole row per clock: 1024 x 2 bit for a CBM neuron, 1024 x 8 bit for an
input neuron. Memory2 reads 10 x 16 bit.

At the published 350 MHz this gives a feel for the published numbers: the
NARMA10 reservoir takes 11 us per input point, i.e. about 3850 clocks for
256 steps, or 15 clocks per step, which is n + 4 with about 11 flips per
step; the K1000 max-cut reached its reference score after 959 steps and 8665
MAC cycles, about 9 events per step. The published wall-clock time per SA step (4.42 ms for
959 steps) is far longer than n + 4 clocks and presumably includes host
traffic between steps; that part is not modelled.

When RC neurons exist, steps are grouped into data points of 256. The
first step of a point waits (stall) until the input layer holds a point.
After the Z/O accumulation of the last step of a point (in its UPDX
cycle), the ten O values are put on `rc_data` with a one-clock `rc_valid`.
Following the published timing diagram, this O is computed from the
states at the start of that last step.

## Blocks

| file                      | block                                                     |
|---------------------------|-----------------------------------------------------------|
| `cbm_pkg.sv`              | sizes, widths, host address regions, parameter numbers    |
| `atms_unit.sv`            | ATMS state-increment datapath (combinational)             |
| `cbm_pe.sv`               | one neuron: Z accumulator, X counter, S bit               |
| `cbm_processing_unit.sv`  | 1024 neurons sharing one weight row per clock             |
| `scheduler.sv`            | delta info, priority circuit, address encoder (i and i')  |
| `memory1.sv`              | W^CBM (1024 x 1024 x 2 b) and W^IN (16 x 1024 x 8 b)      |
| `memory2.sv`              | W^OUT (1024 x 10 x 16 b)                                  |
| `output_pe.sv`, `output_layer_unit.sv` | 10 output neurons                            |
| `input_layer_unit.sv`     | 8-bit sample to 256-step pulse, one-point input buffer    |
| `controller.sv`           | parameters, mask, step FSM, annealing, RC output strobe   |
| `io_unit.sv`              | host word port: decode writes, read status / SA solution  |
| `cbm_dual_top.sv`         | the core                                                  |

The memories are register arrays with a registered read; on silicon they
are SRAM macros (2.4 Mb in total), which are not modelled.

## Using the core

Top-level ports of `cbm_dual_top`:

- `h_we, h_re, h_addr[23:0], h_wdata[63:0] -> h_rdata, h_rvalid`: host
  port. Address = {region[3:0], row[11:0], word[7:0]}; reads return one
  clock after `h_re`.
- `in_valid, in_ready, in_data[16*8-1:0]`: one input data point (16 samples).
- `rc_valid, rc_data[10*26-1:0]`: RC output, output k in bits [k*26 +: 26],
  two's complement.
- `busy, done`: run status.

Regions (`cbm_pkg::region_e`):

| region | name      | row            | word                         |
|--------|-----------|----------------|------------------------------|
| 0      | REG_PARAM | -              | register number, see below   |
| 1      | REG_WIN   | input neuron   | 8 neurons per word, 8 b each |
| 2      | REG_WCBM  | source neuron  | 32 neurons per word, 2 b each|
| 3      | REG_WOUT  | source neuron  | 4 outputs per word, 16 b each (3 words) |
| 4      | REG_MASK  | -              | 64 neurons per word, 1 = RC  |
| 5      | REG_SINIT | -              | 64 initial states per word   |
| 6      | REG_SOUT  | -              | read: S of SA neurons (RC read as 0) |

Row r of W^CBM holds the weights *from* neuron r to every neuron j, and bits
[2j+1:2j] of the row (word j/32) are W_jr. Weights are two's complement:
2-bit W^CBM is -2..1 (max-cut uses -1, 0, +1).

Parameter registers (region 0): 0 control (write bit 0 = start, bit 1 =
clear; read = status {busy, done, stall, 23'b0, alpha, step count}),
1 log2 T0, 2 C_T (unsigned Q1.7, 128 = 1.0), 3 annealing steps per
temperature, 4 initial alpha, 5 number of steps per run.

A typical sequence: write the weights; write the parameters; write the
mask; write clear (this zeroes Z, X, S, O, the scheduler and the counters
and loads alpha from register 4); write the initial states; write the step
count and start; wait for `done`; read the SA solution. A further start
continues from where the run stopped. The first step after a clear
schedules every neuron that is 1, which builds Z and O from zero, so no
separate initialisation pass is needed.

Annealing: every `an_steps` steps alpha <= alpha * C_T, held with 10
fraction bits and saturating at 63.99; SA neurons use its integer part.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/cbm_pkg.sv tb/tb_ref_pkg.sv tb/tb_cbm_dual_top.sv --top-module tb_cbm_dual_top
    ./obj_dir/Vtb_cbm_dual_top

`tb_cbm_dual_top` runs the core at full size (1024 neurons): 48 annealing
steps in two runs, then 520 steps of simultaneous SA (500 neurons) and RC
(524 neurons, two input points), against a model that recomputes every Z
from scratch. It checks all 1024 states after every step, every RC output,
the SA read-out, and the n + 4 clock length of every step. It runs in a
few seconds.

`tb_maxcut_k1000` is the fully connected 1000-spin max-cut benchmark at
full size: random symmetric +-1 couplings, a random start and 600 annealing
steps (T0 = 8, alpha x1.0625 every 20 steps). It tracks the energy
E = -sum_{i<j} W_ij S_i S_j and the flips per step. A typical run goes from
E = -202 to about -8900 with 6.3 flipped neurons per step (0.6%) and 11.1
clocks per step, and the test checks the energy drop, a flip rate under 5%
and that the clock count equals flips + 4 per step.

`tb_ref_pkg.sv` holds the reference ATMS formula the tests
share. The unit testbenches use reduced sizes (32 to 128 neurons, 8 steps
per point for the controller) through parameters.

## How far this follows the paper

Taken from the paper: the block structure and connections (Fig. 3 of the
paper), neuron counts, the memory sizes and weight precisions (8/2/16 bit),
the 19-bit Z, T_CBM = 256, 256 steps per 8-bit input, the delta-driven
scheduler with its present/previous/delta registers, priority circuit and
address encoder, the ATMS split (shift by log2 T0, >= 8 flip test, 6-bit
multiply, shift in place of exp), the X/S update rule, the
per-neuron SA/RC mask, the controller's parameter list (T0, C_T, steps per
temperature, alpha, mask) and the pipeline timing.

Chosen here, because the paper does not say:

- the host port, address map, 64-bit word, the run/step-count interface
  and the input handshake;
- two's complement weights; 26-bit O; 10-bit X, restarting at 0 after a
  flip (the paper's plot shows X dropping to the bottom);
- the pulse shape (high for the first v steps of a point);
- lowest-index-first scheduling order;
- the alpha register format and C_T format, and that RC neurons keep the
  initial alpha;
- the ATMS details below the printed widths: saturating the multiplier
  operand to [-32, 7], clamping the exponent at 8, and dropping the
  fraction of 2^e for negative e (X has no fraction bits);
- the flip test uses >= 8, as printed in the paper's ATMS diagram; its text
  says > 8.

Not modelled: the SRAM macros (arrays instead), pads, the off-chip clock
source and the I2C link, and the FPGA host of the measurement setup.

## Capacity against the published workloads

With the default sizes the core holds the published problems: 1000-neuron
max-cut, sparse and fully connected (K1000), with weights -1/0/+1 in 2 bits;
the 500-neuron SA + 524-neuron RC split; and a 1024-neuron reservoir with one
input and one output for NARMA10 (16 inputs and 10 outputs available). The
short-term-memory and parity-check tasks read delays 0 to about 25; with 10
output neurons that takes three passes with different W^OUT, or a host that
reads states directly. Training of W^OUT (ridge regression of the read-out)
happens off-chip and is not part of the core.
