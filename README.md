# 16-point DFT / DHT engine built on a matrix Laurent series

This is the RTL of a small fixed-point engine. It takes blocks of 16 real
samples and returns either their discrete Fourier transform (DFT) or their
discrete Hartley transform (DHT). One input bit picks which. It implements the
architecture published by R. C. de Oliveira, H. M. de Oliveira, R. Campello de
Souza and E. J. P. Santos in "A Flexible Implementation of a Matrix Laurent
Series-Based 16-Point Fast Fourier and Hartley Transforms". The original was
described in VHDL and mapped to a Xilinx Spartan-3E. This SystemVerilog version
was written from that description. Where the publication is silent, the
choices made here are marked as such below and in each file's header.

The key idea is in how the DFT matrix is split. For N = 16, entry (k, n) of the
DFT matrix is `W^l` with `W = exp(-j 2π/16)` and `l = k·n mod 16`. Write
`l = m + 4q`, where `m` is the residue of `l` modulo N/4 = 4, taken from
{0, 1, 2, −1}. Then `W^l = W^m · (−j)^q`, and the matrix becomes

    DFT = M0 + W·M1 + W^-1·M-1 + W^2·M2,      Mm = Σq (−j)^q · χ(m+4q)

Here `χl` is a 0/1 "bit-selection" matrix. It marks the positions whose
exponent is `l`. Every entry of every `Mm` is 0, ±1 or ±j. So applying `Mm` to
the input takes only additions and subtractions: each sample goes into the real
or the imaginary sum of its class, with a sign that depends on `q`. The only
real multiplications are by three constants:

| constant | value | 7-bit fixed point used |
|---|---|---|
| C1 = cos(π/8) | 0.92388 | 118/128 |
| S1 = sin(π/8) | 0.38268 | 49/128 |
| C2 = cos(π/4) | 0.70711 | 91/128 |

The four partial sums of bin k are combined as follows. `Re` and `Im` act on
the complex vectors `Mm·v`:

    Re V_k = Re M0v + C1·Re(M1+M-1)v + S1·Im(M1−M-1)v + C2·(Re M2v + Im M2v)
    Im V_k = Im M0v + C1·Im(M1+M-1)v − S1·Re(M1−M-1)v + C2·(Im M2v − Re M2v)

The DHT is then taken from the DFT as `H_k = Re V_k − Im V_k`.

## Number format and output word

* Samples and result components are signed 16-bit words with 7 fraction bits
  (Q8.7). Their range is −256 … +255.99, in steps of 1/128.
* Each output word is 32 bits. The layout follows the published simulation
  traces:
  * DFT: `{Re V_k[15:0], Im V_k[15:0]}`. For example, `32'hFC0009B0` is
    −8 + 19.375j.
  * DHT: `{16'h0000, H_k[15:0]}`. For example, `32'h0000F250` is −27.375.
* Rounding happens once, to the nearest value with halves rounded up, after the
  exact integer sum. The result is then saturated to ±32767. The negative limit
  is −32767, not −32768, so negating a saturated value cannot wrap.
* `ovf` goes high together with the output words of any frame in which a DFT
  component or a DHT value was saturated. A frame whose samples stay within
  about ±16.0 can never saturate, because 16 samples × 16 = 256.

The published test sequence is `v = {0 1 … 7 0 1 … 7}`. For it the engine gives
exactly the words printed in the original traces. For example,
`V_2 = −8 + 19.375j` is the exact value −8 + 19.3137j with `C2 = 91/128`.

## Blocks

```
             sel_dht
                |
 in_valid  +---------+  wr_*     +--------------------+  rd_addr/rd_data  +----------+
 in_data ->|  input  |---------->| memory management  |<----------------->|  output  |-> out_valid
 in_ready <|  block  |<----------|  input mem 16x16   |       done ------>|  block   |-> out_index
           +---------+ mem_ready |  output mem 16x32  |                   +----------+-> out_data
                                 |  controller, DHT   |
                                 +--------------------+
                                   core_load | ^ real/img parts
                                   core_x    v |
                                 +--------------------+
                                 | core block         |
                                 |  dft_computer ->   |
                                 |  Real Part/Img Part|
                                 +--------------------+
```

| file | role |
|---|---|
| `rtl/fft_pkg.sv` | shared sizes (N = 16, 16-bit data, 7 fraction bits, 32-bit word), types, the mode enum, the saturation and word-packing functions |
| `rtl/dft_computer.sv` | combinational Laurent-series DFT with 12 shared constant multiplications; bins 0..8 are computed and bins 9..15 are their conjugates (the input is real) |
| `rtl/core_block.sv` | `dft_computer` plus the Real Part and Img Part registers (16 × 16 bits each) |
| `rtl/input_block.sv` | serial sample port; numbers the samples 0..15 and writes them into the input memory |
| `rtl/memory_management.sv` | input memory, output memory, the controller, DFT/DHT selection and `H = Re − Im` |
| `rtl/output_block.sv` | streams the 16 output words out in order |
| `rtl/fft_fht16_top.sv` | the engine |

### How the DFT computer places each sample

`dft_computer` holds no table. Two elaboration-time functions work out, for
each (k, n), the class `m` of `k·n mod 16` and the power `q` of −j. The sample
is then added to or subtracted from the real or imaginary sum of that class:

| q | (−j)^q | effect on the class sum |
|---|---|---|
| 0 | 1 | real += x[n] |
| 1 | −j | imag −= x[n] |
| 2 | −1 | real −= x[n] |
| 3 | +j | imag += x[n] |

Bins 0, 4 and 8 use only class 0, so they need no multiplication. Bins 2 and 6
use classes 0 and 2. Odd bins use all four classes. Bins 0 and 8 of a real
input are real, so their imaginary outputs are always zero.

### Twelve multipliers: sharing products between bins

Each bin has six multiplied terms, three for Re V_k and three for Im V_k:

    T0 = C1·Re(M1+M-1)v   T1 = S1·Im(M1−M-1)v   T2 = C2·(Re M2v + Im M2v)
    T3 = C1·Im(M1+M-1)v   T4 = −S1·Re(M1−M-1)v  T5 = C2·(Im M2v − Re M2v)

Each term is a constant times a signed sum of samples, called its *form*.
Across bins, many forms are equal up to sign. Write `d_n = x_n − x_(n+8)` and
`s_n = x_n + x_(n+8)`. Only eight distinct forms remain:

| form | used with | bins |
|---|---|---|
| d1 + d7, d1 − d7 | C1 and S1 | 1, 3, 5, 7 (C1 in one pair of bins, S1 in the other) |
| d3 + d5, d3 − d5 | C1 and S1 | 1, 3, 5, 7 |
| d2 + d6, d2 − d6 | C2 | 1, 3, 5, 7 |
| s1 + s3 − s5 − s7, s1 − s3 − s5 + s7 | C2 | 2, 6 |

That is 4 products by C1, 4 by S1 and 4 by C2: 12 multiplications, the count
the original design reports. The table is not written into the RTL. At
elaboration, `owner_of()` computes every form from the same class and power
functions. It then gives each term the first earlier term with the same
constant and the same form, up to sign. Only these owner terms get an adder
tree and a multiplier; the other terms reuse the owner's product, negated
where needed. `N_MULT` counts the multipliers built, and elaboration stops with
an error if it is not 12.

### Frame flow and timing

1. **Input.** One sample per clock is accepted with `in_valid && in_ready`,
   sample 0 first. Gaps are allowed. Each accepted sample is written into the
   input memory one clock later.
2. **Start.** `in_ready` drops in the cycle that follows sample 15. Next cycle
   the controller raises `core_load`. At that edge the core captures the
   transform of the whole input memory, the controller samples `sel_dht`
   (1 = DHT), and the input memory is freed. `in_ready` rises again, so the
   next frame can load while this one is written out.
3. **Write.** Over the next 16 cycles the controller writes output words
   k = 0..15. It then pulses `done`.
4. **Output.** `done` starts the output block. It presents word k on
   `out_data` with `out_index = k` and `out_valid`, one word per clock.

Word 0 appears 19 clock edges after the edge that accepted sample 15. Back to
back, the engine takes one frame every 18 clocks. The output has no
back-pressure: the receiver must take 16 words in a row. The next frame's
writes always follow the read-out of the current one by two addresses, so
nothing is overwritten before it has been read.

## Where this RTL departs from, or adds to, the published design

* **Additions.** The original reports 101 additions and writes the ±1
  matrices in a standard echelon form to share them. Here each owner form
  (see above) and each class-0 sum is written as its own sum of samples. Any
  sharing of additions is left to synthesis, so the adder count is not
  matched.
* **The m = 2 class.** The published sums run over m = 1 … (N/4 − 1)/2. That
  is not a whole number for N = 16. Because N/4 is even here, the residue class
  m = 2 (twiddle `W^2 = (1 − j)/√2`) exists and is included. Without it the
  published outputs cannot be reproduced.
* **Coefficients.** C2 = 91 is fixed by the published outputs. C1 = 118 and
  S1 = 49 are round-to-nearest values that the published test vector cannot
  check, because its odd bins are all zero.
* **Input format.** The publication says only that each input is a 16-bit
  word. It is read here as Q8.7, the same as the output.
* **Interfaces.** The valid/ready input, the streamed output, the selector
  polarity, a synchronous active-low reset, the rounding and the saturation are
  all choices made here. So is clocking the core's Real Part and Img Part as
  registers, and writing the output memory one word per clock.
* **Timing.** The original reports one transform in 65 ns on a Spartan-3E
  (xc3s500e-5) but gives no clock rate. This version uses 19 clocks from the
  last sample to the first result. No timing on that device has been measured.
* **Device resources.** The Spartan-3E counts (slices, LUTs, 12 MULT18X18
  blocks, 2 global clocks, 56 I/Os) describe the original mapping. They are not
  targeted here. The top level has 59 signal pins plus the clock and reset.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/tb_ref_pkg.sv` holds
the reference model. It computes the DFT directly from its definition, with
each twiddle rounded to 7 bits, so it does not share the Laurent grouping of
the RTL. It also holds the published test vector and the words printed in the
original DFT and DHT traces.

| testbench | what it checks |
|---|---|
| `tb_dft_computer` | published vector (literal words), impulse, DC, 300 small random frames, 300 full-scale frames (saturation and `ovf`) |
| `tb_core_block` | register load one clock after `load`; hold while `load` is low; `valid` and `ovf` |
| `tb_input_block` | handshake, write order 0..15, `frame_done` on sample 15, stalls |
| `tb_memory_management` | `core_load` timing, `core_x`, `done` 17 cycles after `core_load`, DFT and DHT words, DHT saturation, `done_ovf`, selector changes |
| `tb_output_block` | word order and timing, restart on a new `start` |
| `tb_fft_fht16_top` | end to end at the default sizes: 300 frames mixing DFT and DHT against the reference, the published vector in both modes, latency 19, period 18. It also counts selector switches, input stalls, frames loaded during a write and saturated frames, and fails if any of them never happens |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/fft_pkg.sv tb/tb_ref_pkg.sv tb/tb_fft_fht16_top.sv \
        --top-module tb_fft_fht16_top -Mdir obj_top
    ./obj_top/Vtb_fft_fht16_top

Replace the top module for the other testbenches. Each runs in well under a
second.

## Changing the design

* The coefficients are parameters of `dft_computer` (`C1`, `S1`, `C2`,
  `COEF_FRAC`). Widening them needs no other change, because the accumulators
  are 48 bits wide.
* The block length is fixed at 16. The class/power functions in
  `dft_computer` and the twiddle set {W, W^-1, W^2} are specific to N = 16.
  A larger N needs more classes and more constants.
