# A high-speed reconfigurable DFT filter bank

A receiver that handles several wireless standards at once must cut a wideband
input into channels of *different* widths, and it must be able to change those
widths quickly as the spectrum changes. A DFT filter bank gives N evenly spaced
channels cheaply: one prototype lowpass filter plus an N-point inverse DFT. But
its channel width is fixed by the prototype. The reconfigurable DFT filter bank
(RDFTFB) described here keeps the prototype's coefficients fixed and still makes
the channel width selectable. It uses **coefficient decimation**: keep only every
M-th prototype coefficient and pack the kept coefficients together. The
resulting shorter filter has a passband M times wider. Changing M is a
multiplexer setting, not a coefficient reload.

The RTL follows the high-speed architecture of *"FPGA Implementation of High
Speed Reconfigurable Filter Bank for Multi-standard Wireless Communication
Receivers"* (S. Garg, S. J. Darak, 2016). That architecture adds registers
throughout the prototype filter and the IDFT modulator. As a result, no
register-to-register path holds more than one multiplier, or one multiplexer
and one adder. The default configuration is the one evaluated in that
publication: **8 subbands, decimation factor M = 1..5**.

```
               +---------------------------------------------+      +-------------------+
  x[n] ------->| coef_mult_bank: h[n]*x for all n (33 mults) |      |                   |--> y_0
               |        |  shared products                   |      |  idft_modulator   |--> y_1
               |        v                                    | v_0  |                   |   ...
               |  polyphase_branch P=0 ... P=N-1             |----->|  y_k = sum_i v_i  |
               |  (sel_p gate, sel_M coefficient select,     |  ... |  * e^{+j2pi ki/N} |
               |   add/bypass mux, L-stage transposed chain) |----->|  pipelined tree   |--> y_{N-1}
               +---------------------------------------------+ v_N-1+-------------------+
  m_in ---> rdftfb_ctrl ---> m_sel (sel_M) ---^        out_valid, reconfig, m_err
```

## How the N subbands are formed

Write the (decimated) prototype as `H(z) = sum_i z^-i E_i(z^N)`, where `E_i` is
its i-th polyphase component. Let `v_i = z^-i E_i(z^N) x` be the output of
polyphase branch i. Subband k is then

    y_k[n] = sum_{i=0}^{N-1} v_i[n] * exp(+j*2*pi*k*i/N)

This is the N-point inverse DFT of the branch outputs. The filter from x to y_k
is `H(z * exp(-j*2*pi*k/N))`: the prototype moved to centre frequency
`2*pi*k/N`. Subband 0 is the baseband (real) channel. Subband k and subband N-k
mirror each other for the real input used here.

There is **no rate change**. One input sample per enabled clock gives one new
complex output in every subband. The outputs are not decimated by N.

## Coefficient decimation mapped onto fixed hardware

This is the least obvious part of the design.

For decimation factor M, the effective prototype is

    h'[j] = h[j*M]        for j*M < L        (length ceil(L/M))

For example, with M = 2 the filter is `h[0], h[2], h[4], ...`, packed with unit
spacing. This is "CDM-II". It differs from zeroing coefficients in place, which
would produce spectral images. Packing instead stretches the frequency response
by M.

Each polyphase branch is a transposed-form FIR chain of **L unit-delay
stages**. Stage j has exactly j chain registers between it and the branch
output. A product added at stage j therefore reaches the output delayed by j
samples. Stage j of branch P holds three multiplexers:

1. A **coefficient-select multiplexer** (controlled by sel_M). It picks the
   product `h[j*M] * x` from the shared multiplier bank.
2. A **sel_p multiplexer**. It passes that product only if stage j belongs to
   this branch (`j mod N == P`). Otherwise it gives 0.
3. An **add/bypass multiplexer** (controlled by sel_M). It either adds the tap
   into the chain or passes the chain through. A stage bypasses when it does
   not belong to the branch or when `j*M >= L`.

The chain keeps all L unit delays, and only every N-th stage of a branch adds
anything. So each branch holds its own `z^-P` offset, and all N branches
leave the filter with the same latency. No separate alignment delays are
needed. The sum of all N branch outputs equals the direct-form decimated
prototype; the testbench `tb_cdm_polyphase_filter` checks this.

Because the prototype is linear phase (`h[n] = h[L-1-n]`), the multiplier bank
builds only `ceil(L/2)` = 33 multipliers. Each product is wired to both
positions of its symmetric pair. All branches and all values of M share the
same 33 products.

The decimated prototype's DC gain is roughly `1/M` of the undecimated one.
Coefficient decimation inherently drops energy. The outputs are not
renormalised.

## Pipelining and latency

"Enabled edge" below means a rising clock edge with `in_valid = 1`.

| stage | register | path in front of it |
|---|---|---|
| 1 | input sample `x_r` | wire |
| 2 | 33 products | one multiplier |
| 3 | selected tap + add/bypass flag, per stage | coefficient mux and sel_p mux |
| 4 | chain registers | one 2:1 mux and one adder |
| 5 | IDFT constant products | one constant multiplier |
| 6..8 | adder-tree levels (log2 N = 3) | one adder |

A sample `x(t)` taken on enabled edge t contributes `h'[j] x(t)` to
`y_k` at enabled edge `t + 7 + j`. In general the latency is `4 + log2 N`.

A direct IDFT would place one multiplier and 7 adders in series. The
registered adder tree removes that long path. That change gives most of the
speed-up claimed for the high-speed architecture: the frequency reported there
rises from 59.5 MHz to 112.9 MHz. Registering only the prototype filter
reaches 70.5 MHz.

`in_valid` is a clock enable for the whole datapath. While it is low,
everything holds. This keeps a transposed filter exact on a gapped sample
stream.

## Changing M at run time

`rdftfb_ctrl` registers a new `m_in` on an enabled edge, provided it is legal
(1..5). An illegal request (0, 6, 7) is ignored and flagged on `m_err`. An
accepted change pulses `reconfig`.

After a change, the chains still hold partial sums built with the old M.
`out_valid` therefore stays low for `FLUSH = L + 2 + log2 N = 70` enabled
edges. That is the L-stage chain, the tap register, the chain output and the
IDFT pipeline. The first output flagged valid is already exactly the new
filter's output; both testbenches that change M check this. Reset counts as a
change to M = 1.

Ports of `rdftfb_top`:

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `in_valid` | in | 1 | sample strobe / clock enable |
| `x` | in | 16 | signed input sample |
| `m_in` | in | 3 | requested decimation factor |
| `m_sel` | out | 3 | decimation factor in use |
| `m_err`, `reconfig` | out | 1 | illegal request seen / M just changed |
| `out_valid` | out | 1 | outputs updated and produced with the current M |
| `y_re[k]`, `y_im[k]` | out | 8 x 58 | subband k, full precision |

## Number formats

All arithmetic is exact; nothing is rounded or truncated after the input.

* Input: 16-bit two's complement.
* Coefficients: 16 bits, scaled by 2^15.
* Products: 32 bits.
* Chain accumulators: 32 + ceil(log2 L) = 39 bits. These cannot overflow.
* Twiddles: 16 bits, scaled by 2^14, so ±1 is exact. Values are rounded to
  nearest.
* Outputs: 39 + 16 + 3 = 58 bits, scaled by 2^29 relative to the input.

For real input, `y_im` of subbands 0 and N/2 is identically zero, and synthesis
removes it. A product system would normally round the outputs to its own
width. That step is left to the user.

## The prototype filter

The prototype specification is:

* bandwidth 1/N, relative to half the sampling rate;
* transition width 0.1;
* passband ripple 0.04 dB;
* stopband attenuation 50 dB.

The original work designed the prototype with an equiripple (Parks-McClellan)
tool but published neither the length nor the coefficients. Here the
coefficients are computed at elaboration time in `rdftfb_pkg::proto_coef` with
a Kaiser window:

    h[n] = round(2^15 * sin(wc*m)/(pi*m) * I0(beta*sqrt(1-(m/c)^2)) / I0(beta))
    m = n - (L-1)/2,  c = (L-1)/2,  wc = pi/N,  beta = 0.1102*(53 - 8.7)

L = 65 is the shortest odd length that meets the specification after 16-bit
rounding. The passband stays within 0.04 dB up to 0.078, and attenuation
exceeds 50 dB from 0.174. An equiripple design would likely need about 10–15
fewer taps. Changing `L_PROTO` (or `L`) re-derives every table, width and the
flush length.

Measured on the full design (`tb_subband_response`, subbands k = 1 and k = 6,
frequencies relative to fs/2):

| M | gain at centre and at ±0.0625·M | attenuation at ±0.18·M |
|---|---|---|
| 1 | within 0.02 dB | 54.3 dB |
| 2 | within 0.02 dB | 54.5 dB |
| 3 | within 0.02 dB | 54.3 dB |
| 4 | within 0.02 dB | 57.0 dB |
| 5 | within 0.02 dB | 54.6 dB |

As M grows, the transition band widens in proportion. This is inherent in
coefficient decimation. The anti-aliasing rule `M * (pi/N) < pi` allows M up
to 7 for N = 8. The design builds M up to 5, the range evaluated in the
original work. `rdftfb_top` refuses to elaborate if `M_MAX >= N`.

## Files

| file | content |
|---|---|
| `rtl/rdftfb_pkg.sv` | default sizes, prototype-coefficient and twiddle functions |
| `rtl/coef_mult_bank.sv` | symmetric multiplier bank, input and product registers |
| `rtl/polyphase_branch.sv` | one polyphase branch: sel_p / sel_M muxes, L-stage chain |
| `rtl/cdm_polyphase_filter.sv` | multiplier bank + N branches |
| `rtl/idft_modulator.sv` | pipelined N-point IDFT with constant twiddles |
| `rtl/rdftfb_ctrl.sv` | M register, legality check, flush counter, `out_valid` |
| `rtl/rdftfb_top.sv` | the filter bank |
| `tb/tb_ref_pkg.sv` | independent coefficient table and twiddle functions |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_rdftfb_top.sv` | end-to-end exact check at default size, all M, stalls, illegal requests |
| `tb/tb_subband_response.sv` | tone-by-tone frequency response for M = 1..5 |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog. With Verilator 5, from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/rdftfb_pkg.sv tb/tb_ref_pkg.sv tb/tb_rdftfb_top.sv \
        --top-module tb_rdftfb_top -Mdir obj -o sim
    obj/sim

Replace `tb_rdftfb_top` with any other testbench name. The full-size
end-to-end run takes well under a second once built.

The testbenches compare against arithmetic written independently of the RTL:

* a direct-form convolution with the decimated coefficients;
* an explicit complex IDFT;
* a cycle model of the controller.

The comparison is bit-exact, and the cycle counts (latency, flush length) are
checked too.

## Where this departs from the original architecture

* **Coefficient routing.** The published figure shows, per stage, a
  product-or-zero multiplexer (sel_p) and an add/bypass multiplexer (sel_M). It
  does not show how the packed coefficients `h[j*M]` reach fixed chain stages.
  Here a coefficient-select multiplexer per stage does that. The quoted
  overhead (2N two-input multiplexers and `sum_{i=1}^{M}(L/i - 1)` extra adders
  over a plain DFT filter bank) therefore does not describe this RTL. It uses
  more multiplexers and no duplicated adder chains.
* **sel_p** is drawn as a control signal. Here it is a constant per stage,
  fixed by the branch index, because each physical branch always serves the
  same polyphase component.
* **Register placement.** The highlighted detail of the published figure could
  not be matched register for register. The RTL follows its stated rules:
  * a register before and after each multiplier;
  * a register after each multiplexer;
  * registers in every IDFT branch;
  * the same register count in every path.
* **Prototype and widths.** The Kaiser design, L = 65 and all word lengths are
  choices made here (see above).
* **Not modelled.** The FPGA figures of the original work cannot be reproduced
  by simulation: slice count, dynamic power, and 112.9 MHz on Virtex-7. The
  conventional and filter-only-pipelined variants it compares against are
  not built.
