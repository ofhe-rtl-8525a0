# OFHE in SystemVerilog: a CMOS chip driving photonic 64-point FFT engines

Discretized TFHE (DTFHE) carries multi-bit integers in one ciphertext. The
price is precision: its polynomial products, computed through FFTs, need
32-, 64- or 128-bit arithmetic depending on the parameter set, and the FFTs
use most of the time and energy. The OFHE accelerator ("OFHE: An
Electro-Optical Accelerator for Discretized TFHE", Zheng et al.) moves the
FFT kernels onto photonic chiplets. Each chiplet holds a passive optical
64-point FFT engine. Everything else runs on a CMOS chip: additions,
element-wise products, conjugation, transposition and data movement.

Its central trick makes one fixed optical engine serve every width. The
engine's converters are only 1 bit wide at the input and 6 bits at the
output, so an m-bit input vector is fed in as m bit-planes, one per cycle,
most significant first. The FFT is linear, so the CMOS chip rebuilds the
transform of the full vector by shift-and-add. A wider datapath therefore
costs cycles, not hardware. Inverse FFTs reuse the forward engine through
IFFT(X) = conj(FFT(conj(X)))/N. Transforms longer than 64 points (1K, 2K
and 4K points in DTFHE) are split into 64-point pieces by the 4-step FFT.

This RTL is one CMOS chip with its four photonic chiplets. The paper's full
system is two of these: 8 photonic chips and 2 CMOS chips. Every digital
block is synthesizable SystemVerilog. The analog part of a photonic chip
(modulators, optics, ADCs) is a behavioural model.

## 1. The bit-plane FFT pipeline

The paper describes this pipeline in the most detail, and it is the least
obvious part of the design. A transform passes through three one-cycle
stages:

```
 photonic chip                                        | CMOS chip
 io_buffer(32 KB) -> fft_input_reg --amp/sgn--> pffte --codes--> shift_add_collator -> io_buffer(4 KB)
                     stage 1: DAC reg          stage 2: optics+ADC  stage 3: shift, add, reg
```

**Stage 1, `fft_input_reg`.** Holds the 64 inputs of one transform. These
are signed m-bit values, with m = 32, 64 or 128. Each input is stored as
sign and magnitude. Every cycle, each point drives two 1-bit DACs. One
carries the current magnitude bit and switches its amplitude modulator. The
other carries the sign and sets its phase modulator to 0 or π. So on plane b
the optics see the values x_n ∈ {−1, 0, +1}. The unit sends m planes, most
significant bit first, with `bp_first`/`bp_last` marking the ends. A new
vector can be loaded during the last plane, so back-to-back transforms leave
no gap.

**Stage 2, `pffte` (behavioural).** Computes the unitary DFT
X_k = (1/8) Σ x_n e^(−j2πkn/64) of one plane. There are 64 ADCs for 64
outputs, and a plane is real, so its spectrum is Hermitian and 64 real
numbers describe it completely. ADC k samples Re X_k for k ≤ 32 and Im X_k
for k > 32. The ADC full scale is ±8, the largest value one plane can
produce. Each ADC returns the signed N_OUT-bit code
clamp(round(X_k · 2^(N_OUT−1) / 8)). With the default N_OUT = 6, one code
step is 0.25 in X units. This quantisation is the engine's limited
accuracy.

**Stage 3, `shift_add_collator`.** Keeps one accumulator per lane:
acc = code on the first plane, and acc = 2·acc + code on each later plane.
After m planes, acc ≈ 4·X_k of the full m-bit inputs. The top stores
acc >>> N_OUT as an m-bit result, which is the unitary DFT divided by 16.
That keeps every possible result inside m signed bits.

**Timing.** A transform occupies the engine for m cycles. Its result leaves
the collator m + 2 cycles after the input register loads it, which is the
three-cycle pipeline fill of the paper. Seen from core 0, one FFT job
takes between m + 2 and m + 12 cycles from FSEND to the end of FRECV. The
extra cycles are the buffer hops and the command handshakes.

**Accuracy.** Each plane's code is off by at most half a step (ignoring
clamping at exactly full scale), so the result is off by at most about
2^m/128 output units. With random full-range inputs that is roughly 6
significant bits. This is the property of the paper's engine, not a
defect of the RTL. Setting N_OUT higher in simulation makes the pipeline
exact up to rounding.

## 2. Links and buffers

A chiplet link moves 1 KB words: 64 points × 128-bit slots, with point i at
bits [128i +: 128] and the low m bits used. Each link g has three buffers:

- an outbound 4 KB CMOS buffer, holding up to 4 jobs;
- a 32 KB photonic buffer, holding up to 32 jobs;
- an inbound 4 KB CMOS buffer, holding up to 4 results.

Together the four links use the eight 4 KB CMOS buffers. Each buffer is an
`io_buffer`, a first-word-fall-through FIFO. The outbound buffer moves one
word per cycle into the photonic buffer. The photonic buffer feeds the
input register only when the result will have room in the inbound buffer,
counting results still in the pipeline. A job held back that way shows on
`link_stall`. The chiplet PHY itself is a plain wire here.

The width m used by the links is a configuration signal (`fft_mode`) driven
by core 0. It follows the latest FSEND command. Software must collect every
outstanding result before it changes the width, and an assertion checks
this.

## 3. The cores

`ofhe_core` has a 1 KB input register and a 1 KB output register. Both are
read as REG_BITS/m elements of m bits, with element i at bits [i·m +: m].
A core takes one `core_cmd_t` at a time (`cmd_valid` while `cmd_ready`) and
pulses `done` when the command completes.

| op | effect | cycles |
|----|--------|--------|
| LOAD addr | 32 NoC words from SPM addr.. into the input register | ≥ 33 |
| STORE addr | the output register to SPM addr.. | ≥ 33 |
| ADD | out[i] = A[i] + B[i] mod 2^m; A is the low half of the input, B the high half; upper half of out cleared | m + 3 |
| MUL | out[i] = low m bits of A[i]·B[i], out[E/2+i] = high m bits | m + 3 |
| CONJ | pairs (2i, 2i+1) are (re, im); out = (re, −im mod 2^m) | 2 |
| TRANS R,C | each quarter of the register is an R×C tile (R·C = E/4); each is transposed by its own unit | 2·E/4 + 4 |
| FSEND | (core 0) groups of 64 elements become jobs on links 0..3 (at most 4 groups) | ≥ 2 |
| FRECV | (core 0) waits for one result on every used link and gathers them into out | ≥ 2 |

The arithmetic is serial, as in the paper. `serial_adder` is bit-serial: a
full adder with a carry flip-flop, LSB first, m cycles. `serial_multiplier`
is serial-parallel: it keeps the multiplicand whole, takes one multiplier
bit per cycle, and gives the full 2m-bit product in m cycles. The low half
is the product in Z_q with q = 2^m. The high half serves fixed-point
products, such as twiddle multiplication in the FFT domain.
`conjugate_unit` negates imaginary parts. `transpose_unit` is a streaming
tile buffer: it writes rows and reads columns.

The paper gives a core 1K serial adders, 1K multipliers and 1K conjugate
units. A 1 KB register holds at most 128 operand pairs (at m = 32), so only
min(LANES, 128) lanes are built. LANES stays the paper's 1024 as an upper
bound.

Only core 0 (`HAS_FFT = 1`) drives the photonic links. The other seven
cores do vector work only.

### Composing DTFHE kernels

Commands are issued from outside. The paper compiles each operation into a
dataflow graph but does not describe that compiler or the sequencer, so
neither is built. The building blocks map onto the algorithms like this:

- **N-point FFT, N = 64·n0 (4-step).** n0 row FFTs (FSEND/FRECV), a twiddle
  multiply (MUL with twiddle factors held as data in SPM), a transpose
  (TRANS on tiles plus strided LOAD/STORE through the SPM), then 64
  column FFTs of n0 points. When n0 < 64, the columns are zero-padded to 64.
- **Complex input.** The engine takes real planes, so FFT(a + jb) is
  formed as FFT(a) + j·FFT(b) from two jobs. The Hermitian-packed results
  are unpacked by ordinary core work.
- **IFFT.** CONJ, then FFT, then CONJ, then divide by N (a shift).

## 4. Memory system

`spm` is 2 MB in 32 banks of 2048 words of 256 bits. Words are interleaved
across banks: bank = addr[4:0] and row = addr[15:5]. Port A has one port per
bank and is driven by the crossbar. Port B is a single port, brought out of
the top as `ext_*`, for the off-chip DDR5 controller, which is not part of
this RTL. Reads return one cycle after the request. `crossbar` connects 8
masters to 32 banks. Each bank has its own round-robin arbiter. The grant
is combinational and a master holds its request until granted. Read data
return one cycle after the grant. An assertion checks that requests are
held.

## 5. Top level

`ofhe_top` instantiates the 8 cores, the crossbar, the SPM and, for each of
the 4 links, the outbound, photonic and inbound buffers, the input
register, the engine model and the collator. Its ports are:

- per-core command interfaces: `cmd_valid`, `cmd` (packed array of
  `core_cmd_t`), `cmd_ready`, `cmd_done`;
- the external SPM port (`ext_*`);
- two observation outputs, `link_load` and `link_stall`.

In the paper the photonic parts run at 12 GHz and the CMOS chip at 1.2 GHz.
This RTL uses one clock for both, so all cycle counts above are in that
single clock.

## 6. What follows the paper and what does not

From the paper:

- a 64-point engine fed one bit per point per cycle, MSB first, from
  amplitude and phase DACs;
- 6-bit ADCs;
- shift-and-add recombination on the CMOS chip;
- run-time widths of 32, 64 and 128 bits;
- IFFT by conjugation;
- 8 cores, each with serial adders, serial multipliers, conjugate units,
  four transpose units and 1 KB input and output registers;
- an 8×32 crossbar with 256-bit words;
- a 2 MB SPM in 32 banks;
- buffer sizes of 4 KB × 8 (CMOS) and 32 KB (photonic), and 1 KB link
  words;
- four photonic chips per CMOS chip.

Choices made here, where the paper says nothing:

- sign-magnitude input coding, with the phase DAC carrying the sign;
- the Hermitian ADC sampling plan, the ADC scaling and the output scaling
  (DFT/16);
- bit-serial digit size 1, and the serial-parallel multiplier;
- the whole command set, the register layout and the lane count bound;
- FIFO organisation, credit flow control and link framing tags;
- bank interleaving, round-robin arbitration and one-cycle latencies;
- a single clock;
- where collation happens. The paper gives the serial adders of one core
  this job. Here each link has its own shift-and-add collator between the
  engine and the inbound buffer, so core 0's lanes stay free for vector
  work while FFTs run;
- the number format. The paper's 64- and 128-bit fixed-point formats split
  a word into 29-, 26- and 17-bit fractions depending on the kernel. The
  RTL does not fix a binary point; software chooses the format.

Not built:

- the "shuffling" part of the transpose-and-shuffle units, because its
  permutation is not described;
- a twiddle-factor generator, since twiddles are treated as data;
- the operation sequencer;
- calibration of the photonic devices;
- the chiplet PHYs, the DDR5 controller and the laser.

## 7. Simulating

Each block has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog.
Compile the package first; the rest is found through `-y`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/ofhe_pkg.sv \
          tb/tb_ofhe_top.sv --top-module tb_ofhe_top -Mdir obj && obj/Vtb_ofhe_top
```

`tb_ofhe_top` runs the whole chip at its default parameters. The C++ build
takes about 2.5 minutes and the run a few seconds. It covers:

- eight cores adding in parallel, contending for banks;
- six FFT jobs queued on all four links at m = 32, so that the links
  stall;
- width switches to 128 and 64 bits;
- CONJ, MUL and TRANS on other cores.

`tb_ofhe_workload` also runs at the default parameters. It covers the
polynomial sizes of four DTFHE parameter sets: N = 512 and 1024 with 64-bit
FFT values, and N = 2048 and 4096 with 128-bit values. For each size it
runs the first step of the 4-step FFT, which is all N/64 row transforms of
64 points on the links. It then runs N element-wise products, spread over
the eight cores.

In both tests, each FFT output point is compared with a floating-point DFT, allowing the
worst-case 6-bit error derived above. The testbench counts how often each
mechanism occurs and fails if any never does. `tb_pffte` checks the engine
model against an independent radix-2 FFT. The arithmetic units are checked
against directly computed products and sums, including their m-cycle
latency.

Several verilator lint warnings are expected:

- `SYNCASYNCNET` arises because the reset is used both as an asynchronous
  reset and inside assertion `disable iff` clauses.
- `WIDTHCONCAT` concerns the wide (8 Kbit) link words.
- `UNUSEDSIGNAL` and `UNUSEDPARAM` are reported where a fixed-width
  pack/unpack bus or a shared parameter is only partly used.
