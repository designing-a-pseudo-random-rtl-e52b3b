# A pseudo-random bit generator driven by a 5D hyperchaotic system

This is synthesizable SystemVerilog for a random bit generator built around a
five-dimensional continuous chaotic system. The system is

```
x' = y
y' = z
z' = u
u' = -z - 0.5 u + (x - 1) y
v' = -u - 0.5 v + (x - 1) z
```

Its equilibria form a line, E = (c, 0, 0, 0, 0). Whether the motion is
chaotic depends on the starting value x(0) = c. The system is rich and chaotic
for c below about 0.05. The default start is
(x, y, z, u, v) = (0.0002, 0.0005, 0.00005, 0.001, 0).

The hardware does three things:

1. **It integrates the equations with fourth-order Runge-Kutta (RK4) in 32-bit fixed point.**
   An ordinary RK4 datapath needs four copies of the vector field F(S). Here
   one F block is time-shared four times per step ("fourth-folding RK", FFRK).
   A small controller and a few multiplexers sequence it. One step takes 65
   clock cycles.
2. **It turns the five state variables into five bit streams.** Only the 12
   least-significant bits of each 32-bit variable are kept, since they carry
   the most entropy per bit. They are sampled and shifted out one bit per
   clock.
3. **It post-processes the streams.** The V stream drives a small
   scrambler: four 6-bit shift registers coupled by XORs. The scrambler
   output is the fifth output stream, B5. It is also XORed into the X, Y, Z and
   U streams, which gives B1..B4.

The result is five random bit streams B1..B5, one bit each per clock.

```
            +------------------+   x[11:0] +-----------+   +-----+
            |                  |---------->| sample/12 |-->|     |--> B1 = X~ ^ s
            |  ffrk_core       |   y[11:0] | + P->S    |-->|post |--> B2 = Y~ ^ s
            |  (RK4, one F,    |----...--->|  (x5)     |-->|proc.|--> B3 = Z~ ^ s
            |  65 cycles/step) |           |           |-->|     |--> B4 = U~ ^ s
            |                  |   v[11:0] |           |-->| scr |--> B5 = s
            +------------------+           +-----------+   +-----+
```

## Number format

Every datapath word is a 32-bit two's-complement fixed-point number with 27
fraction bits, written Q4.27. That leaves 4 integer bits and a range of
[-16, 16). The package `prng_pkg` defines:

- `fx_t`, the word type;
- `state_t`, a packed struct of the five variables;
- `ffrk_en_t`, the struct of the integrator's five register enables;
- `fx_mul()`, the multiply used everywhere.

`fx_mul()` forms the 64-bit product and shifts it arithmetically right by 27,
which rounds toward minus infinity. It then keeps the low 32 bits. All
overflow wraps.

On the attractor the variables stay well inside this range. Over 10^6
simulated steps, |x| < 2.5 and |v| < 4.

## The FFRK integrator (`ffrk_core`, `ffrk_control`, `hyperchaos_f`)

This is the part worth understanding in detail.

### The shared F block

`hyperchaos_f` computes F(S) = (y, z, u, (x-1)y - z - u/2, (x-1)z - u - v/2).
Its registers follow the original block diagram exactly.

| output | path | registers |
|---|---|---|
| Fx, Fy, Fz | wires from y, z, u | 0 |
| Fu | x-1 (1), times y (3), minus [z + (u>>1)] (1) | 5 on the product path |
| Fv | x-1 (1), times z (3), minus [u + (v>>1)] (1) | 5 on the product path |

The short "b" path (u>>1, then +z) has only 3 registers. The paths are
deliberately not balanced, so F is **not a streaming pipeline**. Its output is
right only once the input has been held for 5 cycles. The controller
guarantees this by holding the input for 16 cycles per evaluation.

### Registers and sequencing

State S_n lives in register R0. The four RK slopes k1..k4 live in R1..R4.
All four slope registers take their data from the F output. Each one has its
own enable, E1..E4. R0 is loaded with enable E0. `ffrk_control` drives the
enables from a cycle counter, with PHASE_LEN = 16:

| cycles in step | enable | F input | register loaded |
|---|---|---|---|
| 0-15 | E1 | S | R1 <- k1 = F(S) |
| 16-31 | E2 | S + (R1 >>> m) | R2 <- k2 = F(S + h/2 k1) |
| 32-47 | E3 | S + (R2 >>> m) | R3 <- k3 = F(S + h/2 k2) |
| 48-63 | E4 | S + (R3 >>> n) | R4 <- k4 = F(S + h k3) |
| 64 | E0 | - | R0 <- S + h/6 (k1 + 2k2 + 2k3 + k4) |

A slope register captures on every cycle of its phase. Only its last capture
counts, and that capture comes more than 5 cycles after the F input changed.
An elaboration-time check rejects PHASE_LEN < 6. A concurrent assertion checks
that exactly one enable is high in each cycle.

The F input multiplexer is driven directly from the enables, as in the
original diagram:

- **Main multiplexer.** Its 2-bit select is {E2 xor E3, E4}:
  - 00 passes S.
  - 10 passes S + (kmux >>> m).
  - 01 passes S + (R3 >>> n).
- **Small multiplexer.** Its select is E3: kmux = E3 ? R2 : R1.

The step size is h = 2^-n. The products h*k and h/2*k are therefore
arithmetic shifts by n and m = n + 1. The update side computes these values,
all combinationally:

- the sum (R2 + R3) << 1 + (R1 + R4);
- that sum times the constant h/6;
- the product plus R0.

Timing: after reset, R0 holds the initial condition. E0 is high in cycle 64,
and the first new state is visible from cycle 65. After that a new state
appears every 65 cycles. `step_o` is E0.

### Step size

**h = 2^-7 = 0.0078125, where the source states h = 0.01.** The integrator
multiplies by h with shifts, which needs a power of two. 0.01 is not one
(log2 0.01 = -6.64), so the nearest power of two, 2^-7, is used. The h/6
constant is round(2^20 / 6) = 174763 in Q4.27. This matches the shifts, so all
four RK terms use the same h. Change `H_SHIFT` to use another power of two.

### Width of the weighted sum

**k1 + 2k2 + 2k3 + k4 is kept at 35 bits.** A 32-bit sum wraps as soon as
|k| exceeds 16/6. This happens during the large excursions that follow the
initial growth, at about step 6,800 from the default start. After such a wrap
the fixed-point system leaves the attractor for good and runs along the range
limits. With the 35-bit sum the fixed-point trajectory tracks a
double-precision RK4 and stays bounded. This is a choice of this
implementation. The source specifies 32-bit data but says nothing about
adder growth.

## From state words to bits (`trunc_upsample_p2s`)

There is one serializer per variable:

1. It takes bits [11:0] of the 32-bit word.
2. Every 12 cycles it copies them into a 12-bit shift register. This is a
   sample-and-hold up-sampling of the slowly changing state to the bit rate.
3. It shifts the word out most-significant bit first, one bit per cycle.

A state lasts 65 cycles, so each state word is sent about 5.4 times. The
samples fall in cycles 0, 12, 24, ... after reset, and `load_o` marks them.
The bits of a word sampled in cycle t appear in cycles t+1 .. t+12.

Three details are choices of this implementation, not of the source:

- the frame length of 12;
- the sample-and-hold form of up-sampling;
- the MSB-first order.

The 12-bit width itself comes from an entropy measurement in the source:
average entropy per bit drops sharply beyond 12 bits. Repeating that
measurement on this RTL (100,000 steps, see `tb_workload_entropy`) gives the
same shape: 0.9975 bits per bit at 12 bits and 0.966 at 16 for X~. The same
numbers come out, within 0.005, for a perfectly uniform source sampled
100,000 times. So the knee mostly shows how the entropy estimate is biased
when there are few samples per symbol; it does not show the low bits losing
quality. A longer run would move the knee to larger widths.

## Post-processing (`data_scrambler`, `post_processing`)

The scrambler has four 6-stage shift registers, A, B, C and D. Index 0 is the
first flip-flop and index 5 the last. The wiring, traced from the original
diagram, is:

```
fa   = B[0] ^ B[5]            fb   = D[0] ^ D[5]
A.in = V~ ^ fa                B.in = A[5] ^ fb
C.in = A[0] ^ fb              D.in = C[5] ^ fa
s    = C.in                   (scrambler output)
```

The original drawing numbers no stages. The taps "after the first flip-flop"
are read from where the lines leave the first register cell.

`post_processing` forms B1..B4 = (X~, Y~, Z~, U~) ^ s and B5 = s, then
registers the five bits once. Reset clears the scrambler.

Overall, `b_o` is zero in the first cycle after reset and carries data from
the second cycle on.

## Top level (`prng5d_top`)

`prng5d_top` has these ports:

| port | direction | meaning |
|---|---|---|
| `clk` | in | the single clock |
| `rst` | in | synchronous, active-high reset |
| `b_o[4:0]` | out | B1..B5; bit 0 is B1 |
| `state_o` | out | S_n (observation) |
| `step_o` | out | pulses when the state advances (observation) |
| `en_o` | out | the integrator enables (observation) |
| `frame_o[4:0]` | out | per-lane sample markers (observation) |

Parameters: `PHASE_LEN` (16), `H_SHIFT` (7), `NB` (12 kept bits), `M` (6
stages per scrambler register), and `X0`..`V0`, the initial condition as
Q4.27 integers (round(value x 2^27)).

Generic synthesis gives about 1,330 flip-flop bits and 174 word-level cells.
The logic includes:

- two 32x32 multipliers in F;
- five 35x32 constant multipliers on the update side.

The source's FPGA build reports 2017 LUTs, 3458 FFs and 8 DSPs. That build was
made with a block-diagram tool that adds its own registers.

## Where this RTL departs from the source design

- **Throughput.** The source quotes 6.78 Gbps at 113 MHz, which is 60 bits
  per clock: all 12 truncated bits of all 5 streams per clock. Its serial
  stage therefore runs 12 times faster than the integrator. This RTL has one
  clock and gives 5 bits per clock, which is 565 Mbps at 113 MHz.
- **Step size.** h = 2^-7 instead of 0.01 (see above).
- **Adder width.** The weighted RK sum is 35 bits wide (see above).
- **Initial condition.** The source prints the fourth initial value as
  "v = 0.001" next to v0 = 0. It is read as u0 = 0.001.
- **Controller.** It is a counter, not a chain of delay elements. The split of
  the 65-cycle step into 4 x 16 + 1 is this design's choice.
- **F block.** The x - 1 subtractor is shared by the Fu and Fv branches. The
  source draws two identical ones.
- **Reset.** Reset behaviour, bit order and up-sampling form are not
  specified in the source and were chosen here.
- **Capture path.** The capture path used for testing, a hardware
  co-simulation link over JTAG, is not part of this RTL. Instead the bits
  come out on `b_o`.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The testbenches compare against models in
`tb/tb_ref_pkg.sv`, written separately with 64-bit integer arithmetic.

| testbench | what it checks |
|---|---|
| `tb_hyperchaos_f` | F against the reference for 300 random inputs; Fx/Fy/Fz same-cycle; Fu/Fv correct after exactly 5 cycles and not after 4 |
| `tb_ffrk_control` | enable schedule cycle by cycle, 65-cycle period, restart after a mid-step reset |
| `tb_ffrk_core` | initial condition; 65-cycle step; 10,000 steps bit-exact against the reference RK4; first step within 1e-6 of a floating-point RK4; state stays in abs(value) < 8 |
| `tb_trunc_upsample_p2s` | sample instants, bit order, truncation field |
| `tb_data_scrambler` | scrambler output against the reference for 5,000 cycles, including an impulse response |
| `tb_post_processing` | B1..B5 and the one-cycle latency |
| `tb_prng5d_top` | whole design at default parameters for 1,500 steps (97,500 cycles); every output bit and state word predicted by a cycle model; counts the phases, state updates, new and repeated word samples |
| `tb_workload_initcond` | four generators with x0 = 0.6, 0.4, 0.2, 0.05 for 20,000 steps each, bit-exact against the reference; 0.6 must settle onto the equilibrium line, the others must keep oscillating; all must stay bounded |
| `tb_workload_entropy` | average entropy per bit of the 8..16 least-significant bits of each state variable over 100,000 steps; at least 0.99 up to 12 bits, non-increasing with width, a clear drop at 16 bits |
| `tb_workload_bitstats` | 2^25 bits per stream at default parameters; NIST monobit, runs, block frequency (M = 128), cumulative sums and approximate entropy (m = 2) tests, p >= 0.01, on each stream; X~ histogram over 100,000 samples; B1 12-bit word histogram, chi-square p >= 0.01; state bounded for the whole run |

Results of the statistics run:

- Every stream passes all five tests, with p-values between 0.22 and 0.97.
- The 100,000-sample X~ histogram gives a chi-square of about 4147 against a
  uniform distribution, with 4095 degrees of freedom.
- After post-processing, B1 cut into 100,000 12-bit words gives a chi-square
  of about 4056 (p = 0.66).

The full NIST, Diehard and TestU01 batteries were not run on this RTL.

## Simulating

All testbenches use default or small sizes and run in well under a minute
with Verilator 5. For example, to build and run the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_prng5d_top rtl/prng_pkg.sv tb/tb_ref_pkg.sv tb/tb_prng5d_top.sv
./obj_dir/Vtb_prng5d_top
```

Other testbenches run the same way with their own `--top-module` and file;
`tb_ref_pkg.sv` is listed for every testbench that imports it.

To try another initial condition, override `X0`..`V0` on `prng5d_top`. The
values are Q4.27 integers, round(value x 2^27). Chaos needs x0 < 0.5, and
rich dynamics need x0 below about 0.05. For x0 above about 0.92 the
continuous system is unbounded, and the fixed-point state then wraps.
