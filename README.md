# A DCT-interpolated hyperbolic tangent unit

Neural-network accelerators need an activation function per neuron, and
tanh is one of the most common. Computing it exactly in hardware is
expensive. Storing it in a table is fast, but the table gets large if the
result must be accurate. This unit uses a small table of tanh samples and
computes the points between two samples with a **DCT interpolation filter
(DCTIF)**. The DCTIF is a short FIR filter whose coefficients come from the
discrete cosine transform. The same kind of filter is used for
fractional-pixel motion compensation in H.265. Each interpolated value is a
weighted sum of four neighbouring samples. The weights are small integers,
so the filter needs only shifts, adders and subtractors, and no multiplier.

The design follows the architecture of *"Accurate and Efficient Hyperbolic
Tangent Activation Function on FPGA using the DCT Interpolation Filter"*
(FPGA '17). It uses the configuration that paper draws in detail: four
filter taps, three interpolated points between two samples (α = 1/4), and
coefficients scaled by 2^4 (s = 4). Everything the paper leaves open
(number formats, sample spacing, region limits, timing, handshake) has been
chosen here. Each such choice is marked below.

## 1. Three regions of tanh

tanh is odd, so the unit works on non-negative inputs only. A caller handles
negative inputs with tanh(−z) = −tanh(z). For z ≥ 0 the curve has three
parts:

| region | input range (default) | result |
|---|---|---|
| Pass | z < 36/256 = 0.1406 | tanh(z) ≈ z: the input's fraction bits are passed through unchanged |
| Processing | 0.1406 ≤ z < 973/256 = 3.8008 | stored sample, or DCTIF interpolation |
| Saturation | z ≥ 3.8008 | tanh(z) ≈ 1: all output bits set |

The two limits are where the cheap approximations, z and 1, stay within
about 1e-3 of tanh. 1e-3 is the error the interpolation itself reaches in
this configuration (section 4), so no region contributes more error than
the others.

The **input range decoder** (`input_range_decoder`) makes this decision. It
splits the Processing Region into two cases:
- z falls exactly on a stored sample: the result is read from the table;
- z falls between two samples: the result is interpolated.

The four outcomes travel on two select lines, {S2, S1}, defined by
`dctif_pkg::region_e`: Pass 00, Saturation 01, Sample 10, Interpolate 11.

## 2. Number formats and the sample grid

* Input `z`: 20 bits, unsigned, 4 integer and 16 fraction bits (range [0, 16)).
* Output `tanh_out`: 16 bits, unsigned fraction; `0xFFFF` ≈ 1.
* Samples: p(k) = round(tanh(k/64) · 2^16), for k = 0 … 255.
  - Spacing: h = 1/64.
  - Size: 256 × 16 bits = 4 kbits.
  - Values are capped at `0xFFFF`.
  - The table is computed with `$tanh` when the design is elaborated, so
    there is no data file. An FPGA flow turns it into an initialised block
    RAM.
* Interpolation grid: h/4 = 1/256. Input bits below 1/256 are ignored, so
  the unit returns the value at the grid point at or below z. In the Pass
  Region all 16 fraction bits are used.

In the Processing Region the input is read as follows:

```
 z = | integer (4) | sample index fraction (6) | r (2) | ignored (8) |
       \______ i = floor(z * 64) ______/
```

Here `i` is the sample just below z, and `r` ∈ {0,1,2,3} is the position
of z between samples i and i+1, in quarters.

## 3. The interpolation filter

The four taps are the samples around the gap that holds z:

```
      A = p(i-1)    B = p(i)    C = p(i+1)    D = p(i+2)
        ●             ●  ∘  ∘  ∘  ●             ●
                        1/4 1/2 3/4
```

The coefficients come from a DCT of the four taps. The basis is evaluated at
the fractional position, smoothed, scaled by 2^s, rounded to integers and
normalised so that they sum to 2^s. For four taps and s = 4:

| position | A | B | C | D |
|---|---|---|---|---|
| r = 1 (i + 1/4) | −2 | 15 | 3 | 0 |
| r = 2 (i + 1/2) | −2 | 10 | 10 | −2 |
| r = 3 (i + 3/4) | 0 | 3 | 15 | −2 |

The result is (weighted sum) / 16.

The 3/4 row is the 1/4 row reversed. So the unit builds only the 1/4 and
1/2 equations. At 3/4 the address decoder reads the taps in mirrored order
(D, C, B, A) and the same 1/4 arithmetic is reused.

### Two pairs, two cycles

Each equation is split into two **pairs** of terms:
- the first pair is computed in one clock cycle and stored in an
  accumulator register;
- the second pair is computed in the next cycle and added to it.

| r | cycle 1 pair | cycle 2 pair |
|---|---|---|
| 1 | 15B − 2A | 3C − 0 |
| 2 | 10B − 2A | 10C − 2D |
| 3 | 15C − 2D | 3B − 0 |

Every pair has the form (15X, 3X or 10X) − (2Y or 0). The table has two
read ports, called the "A/D" port (Y) and the "B/C" port (X). The datapath
(`dctif_interp_datapath`) builds a pair from shifts:

```
 X ──┬─<<4─┐
     ├─<<2─┴─MUX─(−X)──┐ 15X / 3X
     ├─<<3─┐           ├─MUX── m ──(−)── pair ──┬── REG ──┐
     └─<<1─┴────(+)────┘ 10X             │      │         (+)── >>4 ── dctif
 Y ────<<1──┬─MUX─────── 2Y / 0 ──────────┘      └─────────┘
        0 ──┘
```

The datapath has three multiplexers, two subtractors and one adder. `REG`
loads the first pair. In the second cycle the output is (REG + pair) >> 4.
The shift truncates.

One addition of this design: the result is limited to [0, 0xFFFF]. Near
saturation, where the samples flatten out, the weighted sum could otherwise
exceed 16 × 0xFFFF and wrap.

The address decoder (`dctif_addr_decoder`) issues the addresses for both
cycles:

| r | cycle 1 (A/D, B/C) | cycle 2 (A/D, B/C) |
|---|---|---|
| 0 | i−1, i | i−1, i (B is the result) |
| 1, 2 | i−1, i | i+2, i+1 |
| 3 | i+2, i+1 | i−1, i |

## 4. Accuracy, and why the samples are 1/64 apart

The s = 4 coefficients are rounded. Apply the 1/4 row to a straight line
f(x) = x:

−2(i−1) + 15i + 3(i+1) = 16i + 5

So the filter puts the point at i + 5/16 instead of i + 1/4. The error this
causes is about (1/16) · h · slope, and it dominates the total error. With
h = 1/64 the bound is about 9.8e-4. That matches the roughly 1e-3 the paper
plots for this configuration. With h = 1/16 the error would be 3.8e-3.

Over every 1/256 grid point of [0, 16), the end-to-end testbench measures a
largest deviation from the exact tanh of **9.84e-4**. The worst point is the
start of the Saturation Region.

The paper's best figures come from other configurations, which this RTL
does not build:
- **1e-5**: four taps with s = 6, using 1.52 kbits of memory. The paper
  prints no s = 6 coefficients.
- **2e-4**: two taps with s = 4, using 1.12 kbits. The paper prints no
  two-tap coefficients.

## 5. Timing and handshake

```
cycle     c            c+1              c+2               c+3
input     accept z     (in_ready = 0)   may accept next
BRAM      addr pair 1  addr pair 2
datapath               pair 1 -> REG    pair 2, REG+pair
out mux                                 select, register  out_valid, tanh_out
```

* `in_ready` is low for one cycle after each accepted input. So a source
  that holds `in_valid` high gets one input taken every two cycles. That
  matches the paper's rate of one value per two clock cycles.
* `out_valid` pulses exactly three cycles after acceptance, in every region.
  Pass and Saturation results wait for the same slots as interpolated ones,
  so results always leave in input order.
* `tanh_out` holds its value until the next result.
* Reset is asynchronous and active low. It clears all control state.

The top module (`dctif_tanh`) carries an assertion that two results are
never less than two cycles apart. `dctif_approximation` carries one that it
is never started in the second cycle of an evaluation.

## 6. Module map

| module | role |
|---|---|
| `dctif_pkg` | formats, region limits, region encoding |
| `input_range_decoder` | region decision, select lines {S2, S1} |
| `dctif_addr_decoder` | tap addresses for both cycles, with mirroring at 3/4 |
| `dctif_sample_rom` | 256 × 16 sample table, two synchronous read ports |
| `dctif_interp_datapath` | shift-and-add pairs, accumulator, >>4, limiting |
| `dctif_approximation` | the three blocks above plus the two-cycle sequencing; outputs the stored sample and the interpolated value |
| `tanh_output_mux` | 4-input selection (truncated input, all ones, sample, DCTIF) and output register |
| `dctif_tanh` | top level |

The Pass Region's "truncation" is a bit slice, z[15:0]. The Saturation
value is a constant. Both live inside `tanh_output_mux` rather than in
modules of their own.

Coarse synthesis of the top gives about 70 word-level cells, 84 flip-flop
bits and 4096 memory bits. For this configuration the paper reports 50
Virtex-7 LUTs and a 5.588 ns delay. It lists memory separately from the
LUT counts.

## 7. Where this RTL fills in or departs from the paper

Taken from the paper:
- the three regions, with all-ones saturation and truncation in the Pass
  Region;
- the four decoder outcomes;
- the four taps A–D at i−1 … i+2;
- the s = 4 coefficients;
- reuse of the 1/4 hardware for 3/4;
- the split into four pairs with a two-cycle accumulation;
- the datapath's shifts (<<4, <<2, <<3, <<1, <<1, >>4);
- two BRAM outputs;
- one value every two cycles.

Chosen here:
- input/output widths and formats;
- the sample spacing (1/64), sample rounding and table length;
- the region limits;
- the select-line encoding;
- the read schedule of the two BRAM ports;
- the synchronous BRAM read and the resulting three-cycle latency;
- the valid/ready handshake and the output register;
- limiting the filter output to the 16-bit range;
- the reset.

Not built:
- sign handling (left to the caller);
- the α = 1/8 and s = 5, 6 variants, and the two-tap variant;
- a one-cycle version of the filter, which the paper mentions as possible
  at a higher cost.

## 8. Simulating

Every testbench checks its block against a golden model, `tb_dctif_ref_pkg`.
The model is written separately from the RTL and applies the coefficient
table directly. Each testbench prints `TB_RESULT checks=N failures=M` and
stops itself with a watchdog.

| testbench | what it covers |
|---|---|
| `tb_input_range_decoder` | all 4096 grid points, edge and random low bits |
| `tb_dctif_addr_decoder` | both cycles' addresses for every grid point |
| `tb_dctif_sample_rom` | every word on both ports, one-cycle read |
| `tb_dctif_interp_datapath` | 3000 two-cycle evaluations, monotone and random taps, both output limits |
| `tb_dctif_approximation` | every Processing Region grid point, back to back and with gaps, 2-cycle latency |
| `tb_tanh_output_mux` | all four selections, hold when idle |
| `tb_dctif_tanh` | end to end at default size. Checks every grid point bit-exactly, the 3-cycle latency and the 2-cycle spacing. Counts each region, each position, the input hold-off and back-to-back results. Checks the 1e-3 error bound |

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dctif_pkg.sv tb/tb_dctif_ref_pkg.sv tb/tb_dctif_tanh.sv \
    --top-module tb_dctif_tanh
./obj_dir/Vtb_dctif_tanh
```

Replace `tb_dctif_tanh` with any other testbench name. Each runs in well
under a second.

## 9. Changing the configuration

What is adjustable:
- the sample spacing (`SAMPLE_FRAC`);
- the table length (`NUM_SAMPLES`);
- the region limits (`PASS_LIM`, `SAT_LIM`, counted in interpolation-grid
  steps);
- the widths.

All of these are in `dctif_pkg` and can also be set per instance. When you
move a limit:
- keep `SAT_LIM/4 + 2` below `NUM_SAMPLES`;
- keep `PASS_LIM` at 4 or more, so that tap A never falls below sample 0.

What is fixed: the filter (four taps, α = 1/4, s = 4) is wired into the
shifts of `dctif_interp_datapath` and the read schedule of
`dctif_addr_decoder`. Another configuration needs both rewritten.

The golden model in `tb/` uses the default values. If you change a default,
update `tb_dctif_ref_pkg` to match.
