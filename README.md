# VIBNN: an FPGA-style accelerator for Bayesian neural network inference

A Bayesian neural network (BNN) does not have one weight per connection but a
distribution: every weight and bias is a Gaussian N(mu, sigma^2) learned by
variational inference. Inference draws a fresh set of weights,

    w = mu + sigma * eps,   eps ~ N(0, 1),

runs an ordinary forward pass with them, and averages the outputs of several
such samples. The hard part in hardware is not the multiply-accumulate work,
which is the same as for a plain network, but the random numbers: every weight
of every sample needs its own Gaussian number, so a 64-wide weight path
needs 64 new Gaussian numbers every clock cycle per PE set, 1024 in all for
the default size.

This RTL implements such an accelerator for fully connected networks. Its
parts are:

* **Weight generators**, one per PE set, each holding a weight-parameter
  memory (WPMem) with the (mu, sigma) pairs, a Gaussian random number
  generator (GRNG) and a weight updater that forms w = mu + sigma*eps.
* Two GRNG designs, chosen at build time:
  * the **RLF-GRNG** (RAM-based linear feedback), which adds up the bits of
    a 255-bit LFSR state per output lane (central limit theorem) and keeps
    the LFSR states in RAM instead of flip-flops;
  * the **BNNWallace-GRNG**, a Wallace generator that keeps a pool of
    Gaussian numbers and refreshes it with an orthogonal 4x4 transform.
* **PE sets**: T sets of S = N processing elements; each PE computes one
  neuron, N multiply-accumulates per cycle.
* Two **IFMems** (input feature memories) used in turn, a **memory
  distributor** that writes the PE results back, and a **global controller**
  that schedules the network layer by layer.

Default size (all parameters of `vibnn_top`): B = 8-bit data, N = 8 inputs per
PE per cycle, S = 8 PEs per set, T = 16 sets, so 128 PEs and 1024 weights
per cycle; IFMems of 128 words x 64 bits, WPMems of 276 words x 1024 bits,
which holds the 784-200-200-10 MNIST network.

## Numbers

| quantity          | format                          |
|-------------------|---------------------------------|
| activations x     | unsigned 0..127, 4 fraction bits (Q3.4 after ReLU) |
| mu, sigma, w, bias | signed 8 bit, 4 fraction bits  |
| eps               | signed 8 bit, 3 fraction bits (unit Gaussian = 8 LSB) |
| PE accumulator    | signed 28 bit, 8 fraction bits  |

The PE output is `clip((sum x*w + bias*16) >> 4, 0, 127)`: the bias is
added, the sum is scaled back to 4 fraction bits, and ReLU plus saturation
keep it in 0..127. 8-bit data is what the original work found to be the
shortest word that keeps MNIST accuracy; the split into integer and
fraction bits, the rounding and saturation are this design's choice.

The weight updater rounds sigma*eps to the nearest weight step and
saturates w. For the RLF build the eps code e is read as e + 1/2 (see
below), so the multiplier sees 2e+1 and the result is scaled by 1/16.

## The RLF-GRNG

### Idea

Take a 255-bit LFSR state and count its ones: for a good LFSR the count is
close to binomial(255, 1/2), hence close to a Gaussian with mean 127.5 and
standard deviation 8. `eps = count - 128` is therefore a unit Gaussian in
Q4.3 (8 LSB = 1.0). One LFSR step changes only a few bits, so the count need
not be recomputed: it is kept in a register and corrected by the bits that
changed.

The LFSR used has feedback taps such that two steps at once amount to five
XOR updates on positions relative to a moving head h (all indices mod 255):

    x(h+250) ^= x(h)            x(h+251) ^= x(h+1)
    x(h+252) ^= x(h)            x(h+253) ^= x(h) ^ x(h+1)
    x(h+254) ^= x(h+1)

after which the head moves on by two. Instead of shifting 255 flip-flops,
the state stays in place in RAM and only the head moves.

### Many lanes in one RAM

A GRNG produces LANES numbers per cycle (64 for one PE set). Lane l's LFSR
is bit l of every word of the seed memory (SeMem): 255 words of LANES bits,
so one RAM access serves all lanes at once. The SeMem is split into three
2-port RAMs by location mod 3 (85 words each), so that the two reads and two
writes each cycle fall into different blocks.

Each lane has an **LF-updater** (`lf_updater`) with a seven-bit buffer: the
five window bits x(h+250..254) and the two heads x(h), x(h+1). Per cycle it

1. applies the five XORs in the buffer,
2. writes the updated x(h+250), x(h+251) back to the SeMem (they leave the
   window),
3. shifts the window by two: the new window is {x(h+252..254) updated, x(h),
   x(h+1)}, because h+255 = h,
4. takes the next heads x(h+2), x(h+3), read from the SeMem in the previous
   cycle,
5. updates its count: result += ones(new window) - ones(old window), with
   a parallel counter, a three-bit tap register, a subtractor and an adder.

Only the window changes in a step, so this keeps the count exact.

### Indexer and start-up

`rlf_indexer` holds the pointers as (block, position) pairs. Advancing a
location by two moves block 0 -> 2 (same position), 2 -> 1 (position + 1),
1 -> 0 (position + 1), with position wrapping at 85. This is the three-state
FSM in the original work. After reset the indexer

* writes 85 cycles of seed words into all three blocks (a 64-bit xorshift
  generator makes three words per cycle; `SEED` is a parameter, and
  `vibnn_top` gives each set its own);
* loads the first window into the LF-updaters while it is being written,
  and each lane's initial count from `rlf_init_rom`, a table of per-lane
  popcounts computed at elaboration time by the same xorshift sequence;
* reads the first two heads, then runs. `ready` rises 86 cycles after reset.

The outputs pass a small rotation network (output j of a group of four takes
lane (j + sel + group) mod 4, sel being a free-running two-bit counter), so
that neighbouring outputs are not always the same lanes.

### Its bias

The count's mean is 127.5, so `count - 128` has mean -1/2 LSB. With 8-bit
eps that is -1/16 standard deviation, and after a floor shift in the weight
updater the weights were biased by about -1 LSB on average. The weight
updater therefore reads the code as e + 1/2 (`EPS_ODD = 1`) and rounds to
nearest; the measured weight-noise mean is then within the statistical error
of zero.

## The BNNWallace-GRNG

`bnnwallace_grng` has UNITS = LANES/4 Wallace units. Each unit has a pool of
64 words of four Gaussian numbers. Every cycle all units read the same
address and transform their word with

    t = (x1 + x2 + x3 + x4 + r) >> 1
    x1' = t - x1   x2' = t - x2   x3' = x3 - t   x4' = x4 - t

(half a Hadamard matrix, which is orthogonal, so the numbers stay unit
Gaussian; no multiplier is needed). The 4*UNITS new numbers are the outputs.
They are written back to the address they came from, rotated by one
position across all units, so the units mix with each other. The rounding bit
r alternates between 0 and 1: with a plain floor shift the pool's mean drifts
down with every pass.

The pools must be filled with Gaussian numbers once by the host
(`pool_ext_*` ports); `pool_done` starts the generators.

## Weight generator and WPMem layout

`weight_generator` = WPMem (`sdp_ram`, WP_DEPTH words of LANES x 16 bits,
each pair {sigma, mu}), GRNG, a register on the eps path and the two-stage
`weight_updater`. A read at cycle i gives the sampled weights at cycle i+3.
Every read samples new noise, so two reads of one word never give the same
weights.

The controller reads the WPMems of all sets in lockstep, with one address
that counts up from 0 over the whole network. The host stores the
parameters in that order. For layer l, pass p, beat b, WPMem word k of
set t holds, in lane s*N+i,

* for a data beat (b < in_words): the weight from input b*N+i to neuron
  j = p*S*T + t*S + s;
* for the bias beat (b = in_words): the bias of neuron j in lane s*N, zeros
  elsewhere.

Missing neurons or inputs (padding up to whole words) get mu = sigma = 0.
The word count per set is sum over layers of ceil(out/(S*T)) * (ceil(in/N)+1).
For 784-200-200-10 that is 2*99 + 2*26 + 1*26 = 276.

## PEs and passes

A **pass** computes S*T = 128 neurons of one layer. It has in_words data
beats, in which every PE gets the same N features (one IFMem word) and its
own N weights, then one bias beat. A PE (`pe`) has three stages: N multipliers;
an adder tree and the accumulator (cleared by `first`); bias, shift, ReLU and
clip. Its output comes three cycles after the bias beat. `pe_set` groups S
PEs; their outputs form one IFMem word.

The **memory distributor** takes the T words of a pass at once, together with
destination, base address and the number of valid words (a last, partial
pass keeps fewer). It then writes one word per cycle. It can accept the
next batch in the cycle of its last write. If a batch arrives earlier than
that, an assertion fires.

## The controller and its timing

`global_controller` walks a small layer table (`cfg_num_layers`,
`cfg_in_words`, `cfg_out_words`, up to MAX_LAYERS = 4 layers). Layer l reads
IFMem l mod 2 and writes the other; `result_sel` names the memory holding the
final outputs. For every beat it issues the IFMem and WPMem reads and
sends a tag down a delay line. The tag reaches the PEs 3 cycles later,
with the weights; the features wait in two registers. It reaches the
distributor 6 cycles later, with the PE results.

A pass of in_words + 1 beats delivers T words to the distributor, which
needs T cycles to write them. A pass shorter than T beats would therefore
deliver the next batch too early. The controller then stretches the pass to
T cycles and raises `stall` during the filler cycles. The original sizing
rule for the PE array (T*S below ceil(smallest layer input / N)) is meant to
rule this case out. Its own MNIST configuration does not meet that rule
(128 against 25), so the rule is not relied on here. With whole words
written per cycle the real condition is in_words + 1 >= T. MNIST meets it
(at least 26 beats against T = 16), so MNIST has no stalls. Between layers
the controller drains the pipeline and waits for the distributor, so the
next layer reads complete data.

Busy time of one sample, in cycles:

    sum over layers of  passes * max(T, in_words + 1)
                      + max(9, 7 + words of the last pass) + 1

For 784-200-200-10 at the default size: 2*99 + 16 + 1 + 2*26 + 16 + 1 + 26
+ 9 + 1 = 320 cycles. The testbenches check this count exactly. At 320
cycles per image, the 321,543 images/s reported for the original FPGA
implementation would correspond to a clock of about 103 MHz.

## Host interface

With `busy` low the host:

1. writes the WPMems (`wp_ext_we/set/addr/wdata`), for the Wallace build
   also the pools (`pool_ext_*`, then `pool_done`);
2. writes the input features into IFMem 0 (`if_ext_we`, `if_ext_sel = 0`),
   zero-padded to whole words;
3. waits for `grng_ready` and pulses `start` (it is ignored before);
4. after `done` reads the outputs from IFMem `result_sel` (`if_ext_re`;
   data one cycle later).

Repeating steps 2-4 gives further Monte Carlo samples. Averaging them is
left to the host. Step 2 must be repeated: with more than two layers, IFMem
0 is reused for activations and the input is overwritten.

## Departures from the original design and open points

* Fixed-point formats, rounding, saturation, the eps half-step offset and the
  Wallace rounding bit are this design's choices.
* The original description of the SeMem access schedule names other read
  and write locations than the ones above. Those could not be made
  consistent with the five update equations, so the schedule here follows
  from the equations.
* Seeding by xorshift and the elaboration-time init ROM are this design's
  choices; the original work only says seeds are stored in RAM.
* Stall cycles for short passes and reloading of the input per sample are
  this design's answers to cases the original work does not discuss.
* sigma is stored directly; the softplus mapping from the trained
  parameter is done offline.
* The external DRAM and the host side of the interface are not part of the
  RTL; the `*_ext_*` ports are where they connect.
* Throughput, power and FPGA resource figures of the original work were not
  reproduced. Memory size matches: 16 x 276 x 1024 bits = 4.5 Mbit of WPMem.

## Files

`rtl/` (one module per file):

| file | contents |
|------|----------|
| `vibnn_pkg.sv` | shared constants, enums, RLF pointer type and helper functions |
| `sdp_ram.sv` | simple dual-port RAM, registered read |
| `rlf_semem.sv`, `rlf_indexer.sv`, `lf_updater.sv`, `rlf_init_rom.sv`, `rlf_grng.sv` | RLF-GRNG |
| `wallace_unit.sv`, `bnnwallace_grng.sv` | BNNWallace-GRNG |
| `weight_updater.sv`, `weight_generator.sv` | weight sampling |
| `pe.sv`, `pe_set.sv` | processing elements |
| `ifmem.sv`, `mem_distributor.sv`, `global_controller.sv` | memories and control |
| `vibnn_top.sv` | the accelerator |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), and three
end-to-end tests sharing `vibnn_tb_body.svh`:

* `tb_vibnn_top`: T = 4, 40-40-16-40-10 network, RLF build;
* `tb_vibnn_wallace`: the same for the Wallace build;
* `tb_vibnn_full`: default parameters, 784-200-200-10 MNIST-sized network.

Each end-to-end test runs the network twice. The first run has sigma = 0
and must match an exact fixed-point model. The second is a Bayesian run,
checked against a model that uses the weights sampled in hardware; it also
checks the mean and variance of the noise. Both runs check the cycle count.
The small tests count stall cycles, IFMem swaps, multi-pass layers, partial
passes, bias beats, back-to-back distributor batches and a start held off
before the GRNGs are ready, and fail if any of these never occurs. Every
test prints `TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb rtl/vibnn_pkg.sv \
        tb/tb_vibnn_top.sv --top-module tb_vibnn_top -Mdir obj -o sim
    ./obj/sim

Other tests work the same way; replace `tb_vibnn_top`. The package must be
listed first; Verilator finds the other modules through `-Irtl`. Every
register that is read is reset or initialised, so the results do not
depend on `+verilator+rand+reset`. The full-size test takes a few minutes
to compile.
