# Resource-adaptive 3x3 convolution IPs

A CNN convolution layer is, at its core, a stream of KxK multiply-accumulate
(MAC) windows. On an FPGA those MACs can be built in several ways: from LUT
logic, on a DSP slice, or by squeezing two narrow multiplications into one wide
DSP multiplier. Which one is best depends on what is left on the device: a part
that is short of DSPs needs a logic multiplier, a part that is short of logic
wants everything inside DSPs, and a design that needs parallelism but has few
DSPs wants the packing trick.

This RTL provides four drop-in implementations of the same convolution, all
with the same interface, each built for a different resource budget:

| IP      | Module             | DSP slices | Logic    | Convolutions at once | Operand limit            |
|---------|--------------------|-----------:|----------|---------------------:|--------------------------|
| Conv_1  | `conv1_logic`      | 0          | high     | 1                    | any                      |
| Conv_2  | `conv2_dsp`        | 1          | low      | 1                    | 27-bit data, 18-bit coef |
| Conv_3  | `conv3_dsp_packed` | 1          | high     | 2                    | 8-bit data and coef      |
| Conv_4  | `conv4_dual_dsp`   | 2          | low      | 2                    | 27-bit data, 18-bit coef |

A system picks the one that fits its device. The top module
`conv_ip_library` instantiates all four side by side on a shared input so that
they can be compared and verified together; in a real design you keep the one
you need and synthesis removes the rest.

The default sizes are a 3x3 kernel with 8-bit signed fixed-point data and
coefficients, the configuration the library was characterised with on a Zynq
UltraScale+ (ZCU104) at 200 MHz. Everything is parameterised by `K`, `DATA_W`
and `COEF_W`.

## The shared interface: serial kernel, parallel window

All four IPs consume a convolution the same way.

* **Coefficients are streamed serially**, one per clock, on `coef` with
  `coef_valid`, in row-major order (tap 0 = top-left). The IPs keep *no copy of
  the kernel*: a tap counter pairs each arriving coefficient with its pixel.
  This removes any coefficient memory or KxK coefficient register from the IP.
* **The pixel window is presented in parallel** on `win[0..K*K-1]` (or `win_a`,
  `win_b` for the two-convolution IPs), row-major like the coefficients.
  Pixel `k` is read in the cycle in which coefficient `k` is valid, so the
  source holds the window until its last coefficient has been taken (or
  simply presents pixel `k` together with coefficient `k`).
* **`coef_valid` may drop at any time.** The IP just waits; there is no
  backpressure signal because the IP never refuses a coefficient.
* After the `K*K`-th coefficient, `res_valid` pulses for one cycle with the
  exact, unrounded sum of products

      res = sum_{k=0}^{K*K-1} win[k] * coef_k

  on `ACC_W = DATA_W + COEF_W + clog2(K*K)` bits (20 bits at the defaults).
  If data has `Fd` fractional bits and coefficients `Fc`, `res` has `Fd + Fc`;
  rounding or saturating to a narrower format is left to the next stage.
* Windows may follow each other with no idle cycle: a new window's coefficient
  0 can come in the cycle after the previous window's last coefficient.

Every IP therefore performs one MAC per clock per convolution and produces one
result (or one pair of results) every `K*K` clock cycles when the coefficient
stream has no gaps: 22.2 million 3x3 convolutions per second per window at
200 MHz.

Timing of one 3x3 window on Conv_2 (latency 3):

    sampling edge :  0    1    2    3    4    5    6    7    8    9   10   11
    coef_valid    :  1    1    1    1    1    1    1    1    1    0    0    0
    coef          :  c0   c1   c2   c3   c4   c5   c6   c7   c8
    pixel used    :  w0   w1   w2   w3   w4   w5   w6   w7   w8
    res_valid     :  0    0    0    0    0    0    0    0    0    0    0    1

Each column shows what a register clocked at that edge sees. The last
coefficient is sampled at edge 8; `res_valid` is high in the cycle after edge 10
and a register behind the IP captures the result at edge 11.

Latencies in register stages (constants in `conv_pkg`): with the last
coefficient sampled at edge n, the result is captured at edge n + latency.

| IP     | Latency | Why                                                       |
|--------|--------:|-----------------------------------------------------------|
| Conv_1 | 2       | product register, accumulator register                    |
| Conv_2 | 3       | the DSP slice's input, multiplier and accumulator registers |
| Conv_3 | 4       | the DSP slice's three stages plus the logic accumulators  |
| Conv_4 | 3       | as Conv_2                                                 |

Each IP carries an assertion that `res_valid` is never high in two consecutive
cycles. A window takes at least `K*K` cycles, so two results can never come
back to back.

Reset (`rst`) is synchronous and active high. It restarts the tap counter at
tap 0 and drops any window in progress and any result in flight.

## Conv_1: logic only

`conv1_logic` selects `win[tap]` with a K*K-to-1 multiplexer and multiplies it
by the incoming coefficient in `logic_mult`, a shift-and-add multiplier: the
sum of `a << i` for every set bit `i` of `b`, with the sign bit of `b`
subtracted instead of added (two's complement weight `-2^(B_W-1)`). Writing it
this way, with no `*` operator, keeps synthesis from mapping it to a DSP; the
module also carries a `use_dsp = "no"` attribute. The product is registered and
then added into the accumulator, which is reloaded rather than added to on
tap 0.

## Conv_2: one DSP, minimal logic

`conv2_dsp` feeds the selected pixel and the coefficient straight into one DSP
slice (`dsp_mac`) in accumulate mode, with the slice's "first" flag raised on
tap 0 so that it restarts its sum. The accumulation happens inside the DSP's
48-bit accumulator, so the only logic outside is the tap counter, the window
multiplexer and a three-bit shift register that marks the product of the last
tap as it travels down the DSP pipeline. `res` is read directly from the DSP
accumulator when that mark reaches the end.

## Conv_3: two convolutions in one DSP

`conv3_dsp_packed` convolves two windows, A and B, with the same kernel, using a
single DSP slice. The DSP's 27-bit pre-adder forms

    packed = a_k * 2^18 + b_k

from the two pixels of tap k, and the 27x18 multiplier multiplies it by the
shared coefficient `c_k`:

    P = (a_k * c_k) * 2^18 + (b_k * c_k)

Both products come out of one multiplication. With 8-bit signed operands,
`b_k * c_k` lies in [-16256, 16384] and fits in a signed 18-bit field, and
`a_k * 2^18 + b_k` fits in the 27-bit pre-adder, so the packing is exact. This
is what limits Conv_3 to 8-bit operands; a parameter above 8 bits stops
elaboration with an error.

The two products are separated in logic after the DSP:

    lo = P[17:0], read as a signed 18-bit number      = b_k * c_k
    hi = P[47:18] + P[17]                             = a_k * c_k

The `+ P[17]` term is the subtle part. When `b_k * c_k` is negative, adding it
to `(a_k * c_k) * 2^18` borrows one from the upper field, so `P[47:18]` alone is
`a_k * c_k - 1`. The sign bit of the low field is exactly that borrow, and
adding it back restores the upper product.

Why not let the DSP accumulate the packed products, as Conv_2 does? The sum of
nine low products needs 19 signed bits (up to 9 x 16384 = 147456), which would
spill into the upper field and corrupt it. So Conv_3 uses the DSP in
product-only mode and keeps two 20-bit accumulators in logic, one per window.
That is the price of its parallelism: more logic than Conv_2 or Conv_4, and a
longer path (split, then add) after the DSP, which makes it the IP with the
least timing margin.

## Conv_4: two DSPs

`conv4_dual_dsp` is two copies of the Conv_2 datapath sharing one tap counter
and one coefficient stream: window A goes to one DSP, window B to the other,
and both accumulate internally. It gives the same two-at-once throughput as
Conv_3 with little logic, and because nothing is packed the operands can use
the full DSP port widths: up to 27-bit data and 18-bit coefficients (with
`ACC_W` up to 48 bits). Wider parameters stop elaboration with an error.

## The DSP slice model

`dsp_mac` is a portable description of the part of a DSP48E2-style slice that
the IPs use, written so that a synthesis tool can map it to one DSP block:

* ports `a`, `d` (27 bits, pre-adder), `b` (18 bits), `p` (48 bits);
* `p = (a + d) * b`, with the pre-adder result wrapping at 27 bits as the hard
  block's does;
* `in_acc = 1` adds the product to `p`, unless `in_first` restarts the sum;
  `in_acc = 0` makes `p` the product alone;
* three register stages (operands, product, accumulator): operands sampled at
  edge n give a result captured at edge n+3, one result per clock.

It is not a vendor primitive. To target one directly, replace `dsp_mac` by a
wrapper around the vendor's DSP cell with the same ports and latency.

## Choosing an IP

* No DSP slices to spare: **Conv_1**.
* DSPs available but logic scarce: **Conv_2**.
* Two convolutions per pass, only one DSP, operands of 8 bits or fewer:
  **Conv_3**.
* Two convolutions per pass, DSPs plentiful, or operands wider than 8 bits:
  **Conv_4**.

Reference figures reported for the original implementations at 3x3/8-bit on a
Zynq UltraScale+, 200 MHz (LUTs / registers / DSPs): Conv_1 105 / 54 / 0,
Conv_2 30 / 22 / 1, Conv_3 45 / 32 / 1, Conv_4 42 / 23 / 2. This RTL has the
same DSP counts, but its LUT and register counts have not been measured on
that FPGA flow. As a rough check, Conv_1 here has 64 registers (tap counter,
product, accumulator, result), against 54 reported.

## Files

`rtl/`

* `conv_pkg.sv`: default sizes, DSP widths, packing shift, latencies, and the
  `acc_width` function.
* `logic_mult.sv`: combinational shift-and-add signed multiplier.
* `dsp_mac.sv`: the DSP slice model.
* `conv1_logic.sv`, `conv2_dsp.sv`, `conv3_dsp_packed.sv`,
  `conv4_dual_dsp.sv`: the four IPs.
* `conv_ip_library.sv`: top; all four IPs on one coefficient stream and two
  windows (Conv_1 and Conv_2 take window A).

`tb/`: one self-checking testbench per module, each printing
`TB_RESULT checks=N failures=M`:

* `tb_dsp_mac`: random operands in product, accumulate and restart modes,
  random gaps, exact 3-cycle latency.
* `tb_conv1_logic`, `tb_conv3_dsp_packed`: default sizes.
* `tb_conv2_dsp`: a 5x5 kernel with 12-bit data and 10-bit coefficients, to
  exercise the parameters.
* `tb_conv4_dual_dsp`: 24-bit data and 18-bit coefficients, beyond what Conv_3
  allows.

Each IP testbench checks every result against sums computed in the testbench,
checks its exact latency, and checks that gap-free windows produce results
exactly `K*K` cycles apart. The inputs include full-scale operands
(-128 x -128) and mixed-sign products.

`tb_conv_feature_map` runs a whole convolution layer: a random 16x16 image
with a 3x3 kernel, stride 1, no padding, through the top at its default sizes.
Conv_3 and Conv_4 get two neighbouring output pixels per window pass (`win_a`
at column x, `win_b` at x+1). The testbench checks each IP's complete 14x14
feature map against a reference. It also checks that the two-convolution IPs
finish the map in 882 coefficient cycles, half the 1764 that the
one-convolution IPs need.

`tb_conv_ip_library` runs the top at its default sizes with 400 windows and
checks all four IPs against the same reference. It also counts, and requires
at least once, each situation the design must handle: coefficient gaps, windows
back to back, negative low fields in Conv_3 (the borrow case), full-scale
windows, and a reset in the middle of a window.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/conv_pkg.sv tb/tb_conv_ip_library.sv --top-module tb_conv_ip_library
    ./obj_dir/Vtb_conv_ip_library

Replace the testbench name to run another one. Every testbench finishes in well
under a second. Testbench stimulus comes from `$urandom`, so
`+verilator+seed+N` gives a different stream.

## Where this RTL interprets or departs from the original description

The original library was described at the level of what each IP does and what
it costs, not how it is built inside. These points are this design's own
choices:

* **"One convolution per cycle."** The original describes Conv_1 and Conv_2 as
  doing one convolution per cycle. Here a convolution takes `K*K` clocks: one
  MAC per clock. A single DSP cannot do nine products in one clock, and the
  reported LUT counts are far too small for nine parallel 8x8 logic
  multipliers, so "cycle" is read as one processing round.
* **No stored kernel.** "Coefficients loaded serially" is implemented as a
  coefficient per MAC, with no kernel register in the IP. This matches the very
  small register counts reported (22 for Conv_2, fewer than the 72 bits of a
  stored 3x3x8-bit kernel). A design that reuses one kernel over many windows
  therefore replays it from its own storage for every window.
* **What the two parallel convolutions are.** Here they are two windows with
  one kernel, so the coefficient is the shared multiplier operand.
* **Conv_3 packing.** The pre-adder packing at bit 18, the per-product split
  with borrow correction, and accumulation in logic are one standard way to get
  two 8-bit products out of one DSP. The original does not say how it does it.
* **Result format.** The result is the exact full-precision sum. No rounding,
  saturation or output scaling, since no such stage is described.
* **Handshake, pipeline depth, reset.** The `coef_valid` protocol without
  backpressure, the latencies above, and the synchronous active-high reset are
  all choices made here.
* **The 8-bit coefficient width** is taken equal to the stated 8-bit data
  width.
* **Not built:** automatic selection of an IP from the device's resources.
  That was described only as future work; the "Choosing an IP" rules above are
  guidance, not hardware. The original IPs were written in VHDL; this is a
  SystemVerilog rendering, and was not run through the vendor flow, so 200 MHz
  timing and the LUT figures are not verified here.
