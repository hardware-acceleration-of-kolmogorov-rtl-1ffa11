# A KAN layer tile: shared B-spline lookup and time-modulated word-line drive for RRAM compute-in-memory

A Kolmogorov–Arnold Network (KAN) layer does not multiply inputs by a weight
matrix. Each input passes through a learnable function, and that function is
a weighted sum of B-spline basis functions:

    y_o = sum_j sum_i c'(o,i,j) * B_i(x_j)

With cubic splines (order K = 3) on G knot intervals there are G + K basis
functions per input, and at most four of them are non-zero for any input. The
sum over `c' * B` is an ordinary multiply-accumulate, so it fits an analog
compute-in-memory (CIM) array. The coefficients `c'` sit in RRAM cells and the
basis values `B_i(x_j)` are applied on the word lines. Two parts are
expensive:

* **Computing `B_i(x)`.** A lookup table per basis function, with its own
  decoder and multiplexer, costs a lot of area. This design uses one small
  table for all basis functions of all inputs.
* **Putting a multi-bit value on a word line.** A fine voltage DAC is
  sensitive to noise. A pure pulse-width code is slow. This design splits each
  value into two halves. The low half sets the word-line voltage for one time
  unit and the high half sets it for 2^N units.

The RTL here implements the digital parts of one tile: the lookup, the
routing of word-line rows, the pulse generator, and the recombination of
bit-sliced columns. The RRAM array, its sense amplifiers, the DAC and the
word-line buffers are analog. They sit outside the RTL. A behavioural model
of the array is provided for simulation.

Reference configuration (all defaults): K = 3, G = 5, 8-bit unsigned inputs,
8-bit B values, 16 inputs per tile (128 word lines), 16 outputs with 8
bit-slice columns each (128 columns).

## 1. Why one table serves every basis function

On a uniform knot grid every basis function is the same bell-shaped curve,
shifted by whole knot intervals. A table for one curve can serve all of them,
but only if every quantised input lands on the same relative position inside
its knot interval. The design therefore makes each knot interval exactly
`2^LD` input codes wide, with `G * 2^LD <= 2^8`. For G = 5 the largest such
value is LD = 5. The intervals are then 32 codes wide and the valid input
range is 0 .. 159.

Because the knot width is a power of two, the input splits into two parts
with no arithmetic:

* **global bits** `x[7:LD]`: the knot interval `j` (0 .. G-1);
* **local bits** `x[LD-1:0]`: the position `l` inside that interval.

One cubic basis spans four intervals, so the curve has `4 * 2^LD` = 128
sample addresses, `u = 0 .. 127`. Sample `u` is the curve at `u / 2^LD`
intervals from the start of its support. The samples sit on the knot grid, so
the curve is symmetric: `B(u) = B(4*2^LD - u)`. Only entries 0 .. 2^(LD+1)
(65 entries) are stored. Addresses 65 .. 127 are wires to entry `128 - u`.
The centre entry (u = 64, the peak) is the one entry with no mirror partner.
`u = 0` is the zero at the start of the support. Its mirror partner, address
128, lies just past the end of the table.

The table is programmable. It is a 65 x 8-bit register array with a write
port, so the curve, or a lower-precision version of it, can be changed at run
time. The testbenches load it with

    value(u) = round( 255 * B(u) / (2/3) )

which maps the curve's peak of 2/3 to 255. The four active values of any
input then add up to about 382.

## 2. From one input to eight basis values

`bx_lookup` handles one input. Input `x` lies in interval `j`, and only
`B_j .. B_(j+3)` are non-zero. Basis `B_(j+m)` sees the input in segment
`3-m` of its own support. So:

1. the LD-bit **local decoder** turns `l` into a 32-bit one-hot;
2. four **local multiplexers** (32-to-1) read table addresses `(3-m)*32 + l`
   for m = 0..3. These are the four active values;
3. the 3-bit **global decoder** turns `j` into a 5-bit one-hot. An interval
   code of 5, 6 or 7 (input ≥ 160) selects nothing;
4. four **demultiplexers** (1-to-5) put value `m` onto output `B_(j+m)`. The
   other outputs are zero.

Example: x = 77 gives j = 2 and l = 13, so the tile reads addresses 109, 77,
45 and 13. Addresses 109 and 77 are in the mirrored half and are read from
entries 19 and 51. The outputs are B2 = 13, B3 = 205, B4 = 160 and B5 = 4.
All other B values are 0.

Two small decoders replace one 8-bit decoder, and four narrow muxes replace
eight wide ones. That saving is the main point of the scheme. All inputs of
a tile share one table (`sh_lut`); each input has its own decoders and
mux/demux. The lookup is combinational.

## 3. Word-line rows and bit slices

Every coefficient `c'` is an 8-bit magnitude stored as 8 one-bit cells in 8
adjacent columns, most significant bit first. A column's sense amplifier
returns `sum_r B_r * bit_k(c_r)`. `shift_add` weights column k by
`2^(7-k)` and adds, which gives `sum_r B_r * c_r` for each of the 16 outputs.

IR drop along the bit line makes rows far from the clamp less accurate. The
best rows should therefore hold the coefficients that matter most: those of
basis functions that fire often, strongly and steadily. That ranking is
computed offline from training data. `wl_row_map` applies it: for each
crossbar row (row 0 = nearest the clamp) a table entry names the lookup
output (input j, basis i, index `8j + i`) that drives the row. After reset
the table is the identity.

## 4. The input generator: voltage and time together

For one cell the bit-line current is linear in the DAC level `x`, and the
charge is current × time. An 2N-bit value `v` is split into `a = v[N-1:0]`
and `b = v[2N-1:N]`. The word line is driven at level `a` for one time unit,
then at level `b` for `2^N` units:

    Q  ∝  a * 1  +  b * 2^N  =  v

A single pulse of `2^N + 1` units therefore carries the whole value. A pure
pulse-width code would need `2^(2N)` units, and a pure voltage code would
need `2^(2N)` DAC levels; here the DAC has only `2^N` levels.

Two modes share the hardware. `mode` is sampled when the inputs are
accepted:

| mode | N | vector used | W_P1 : W_PN | pulse length | charge levels |
|---|---|---|---|---|---|
| TD-P (`MODE_TDP`) | 4 | all 8 bits of B | 1 : 16 | 17 units | 256 |
| TD-A (`MODE_TDA`) | 3 | top 6 bits of B | 1 : 8 | 9 units | 64 |

In TD-A mode every B value is used at 1/4 scale (`B >> 2`), and so are the
outputs.

The timing needs no counter. `delay_chain` passes a launch level `go` through
17 unit stages. Each stage is one flip-flop on the unit-time clock, standing
in for an analog delay cell. Two taps give `W_P1 = go & ~tap[1]` and
`W_P(N+1) = go & ~tap[2^N+1]`. The second tap is selected by mode. `pm_tcm`
forms the `W_PN` window as "W_P(N+1) while not W_P1". It drives the TG-MUX
lanes (`tg_mux`, one per word line): level `a` in the W_P1 window, level `b`
in the W_PN window, and off outside W_P(N+1). The controller also sees the
end of the pulse from the chain.

Cycle-level sequence of one operation (N = 4; the clock is the unit-delay
clock; edge E0 accepts the inputs):

    cycle after   E0   E1 .. E16   E17      E18      E19
    state         PULSE PULSE      PULSE    EVAL     IDLE (precharge)
    W_P1          1    0           0        0        0
    W_PN          0    1           0        0        0
    wl_level      a    b           0        0        0
    sa_sample                               1
    y_valid                                          1

For TD-A, replace 16 by 8. `y` is valid 2^N+3 edges after the accept edge.
A new input vector can be accepted every 2^N+4 cycles: 20 in TD-P, 12 in
TD-A. The bit lines are precharged whenever the controller is idle.

## 5. Tile interface (`kan_accel_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | unit-delay clock, asynchronous active-low reset |
| `lut_we`, `lut_waddr`, `lut_wdata` | in | 1, 7, 8 | write stored table entry 0..64 |
| `map_we`, `map_row`, `map_src` | in | 1, 7, 7 | row `map_row` is driven by lookup output `map_src` |
| `mode` | in | `td_mode_e` | TD-P / TD-A, sampled on accept |
| `x_valid`, `x_ready`, `x[16]` | in/out/in | 1, 1, 8 each | input vector handshake |
| `wl_on[128]`, `wl_level[128]` | out | 1, 4 | word-line enable and DAC level index, to the array |
| `bl_precharge`, `sa_sample` | out | 1 | to the array |
| `sa_q[128]` | in | 15 each | sense-amplifier result per column; column `8o + k` is output o, slice k (MSB first) |
| `y_valid`, `y[16]` | out | 1, 23 each | results |

Program the table and the row map only while the tile is idle. The array
must present `sa_q` during the cycle in which `sa_sample` is high. `wl_level`
carries the index of the DAC voltage, not a voltage.

## 6. Where this RTL departs from, or adds to, the method it implements

* **Sample grid.** The table samples sit on the knots. This gives the
  "odd" half-table: 2^(LD+1)+1 stored entries, with an unshared centre.
  An even split of exactly half (2^(LD+1) entries) would need samples
  between the knots.
* **Out-of-range inputs.** With G = 5 the knot grid covers 0..159. Inputs
  of 160..255 produce all-zero B values.
* **Delay chain.** The analog delay cells are modelled as clocked stages. The
  whole tile therefore runs on one clock whose period is the unit pulse
  width.
* **TD-A input.** TD-A uses the top 6 bits of each 8-bit B value.
* **Coefficient sign.** Only unsigned coefficient magnitudes are handled. The
  method stores `|c'|` in 8 slices and gives no sign scheme. Signed
  coefficients need, for example, a second column group and a subtraction
  outside this tile.
* **Row placement.** The placement is applied through a programmable routing
  table (`wl_row_map`). The placement itself, the criticality ranking, is
  computed offline.
* **Handshake and registering.** The ready/valid handshake, the single
  evaluate cycle and the output register are this design's own choices.
* **Tile size.** 16 inputs × 8 basis functions = 128 rows and 16 outputs
  are assumed. 128 is the smallest array size of the accuracy study that
  motivates the row placement.
* **Not included.** The residual term `w_b * b(x)` (b = ReLU) is not
  included. It would run on the same array as an ordinary weight, and its
  word-line encoding is not specified.
* **State counts.** For N = 4 some descriptions give "8 × 8 = 64" voltage
  states and a "W_P3" pulse. This design follows the general rule: 2^N
  levels, a W_PN pulse of 2^N units and 256 charge levels for N = 4.

## 7. How far the RTL can be trusted

* **Lookup (section 2).** `tb_bx_lookup` compares every output against the
  B-spline formula for all 256 inputs, not against the table.
* **Word-line drive (section 4).** The input generator is checked by
  integrating `wl_level` over time, exactly as the array would, and
  comparing the result with the input value in both modes. The cycle counts
  are checked too.
* **Whole tile.** `tb_kan_accel_top` runs the full-size tile against a
  behavioural array with random coefficients and random row placements. It
  mixes modes, uses out-of-range inputs, stalls inputs and reloads the table,
  and compares every output with an independently computed sum.
* **Other grid sizes.** `tb_kan_grid_configs` runs the same end-to-end
  check at G = 7, 15, 30 and 60, which tests the parameterisation of the
  decoders and the table.
* **Assertions.** Assertions in `pm_tcm` and `kan_accel_top` check the pulse
  nesting, busy/precharge exclusion, the single evaluate cycle, and that the
  tables are only written while idle.
* **Not verified.** No analog behaviour is modelled: no IR drop, no device
  variation, no sense-amplifier quantisation. The accuracy figures of the
  method cannot be reproduced with this RTL.

Synthesis of the default tile (yosys, coarse) gives about 7,100 word-level
cells and 2,800 flip-flops. Most of the flip-flops are the captured 4-bit
codes (2 × 128 × 4) and the row table (128 × 7).

## 8. Capacity against the evaluated networks

One tile holds 128 rows × 16 outputs × 8 bits of coefficients = 2 KiB.
Both recommendation-system KANs considered for this architecture are far
larger: 39 MB and 63 MB of parameters. They need on the order of 19,000 and
31,000 such tiles, or repeated reprogramming of the arrays. Their per-layer
grid sizes are not known here, so they cannot be run on the RTL as is.
Other grid sizes are parameter changes: `G_P` and `LD_P` on
`kan_accel_top`, with LD the largest value such that `G * 2^LD <= 256`:

| G | LD | range |
|---|---|---|
| 7 | 5 | 0..223 |
| 15 | 4 | 0..239 |
| 30 | 3 | 0..239 |
| 60 | 2 | 0..239 |

## 9. Files

| file | contents |
|---|---|
| `rtl/kan_pkg.sv` | constants (K, G, LD, widths, N of both modes) and `td_mode_e` |
| `rtl/local_decoder.sv`, `rtl/global_decoder.sv` | the two input decoders |
| `rtl/sh_lut.sv` | shared half table with mirror wiring |
| `rtl/l2g_mux_demux.sv` | four local muxes, four interval demuxes |
| `rtl/bx_lookup.sv` | one input channel of the lookup |
| `rtl/wl_row_map.sv` | row routing table |
| `rtl/delay_chain.sv`, `rtl/pm_tcm.sv`, `rtl/tg_mux.sv`, `rtl/tm_dv_ig.sv` | input generator |
| `rtl/shift_add.sv` | bit-slice recombination |
| `rtl/kan_accel_top.sv` | the tile |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_kan_ref_pkg.sv` | integer B-spline reference used by the testbenches |
| `tb/rram_acim_model.sv` | behavioural RRAM array (ideal, linear) |
| `tb/tb_kan_grid_configs.sv`, `tb/kan_grid_run.sv` | the tile at G = 5, 7, 15, 30 and 60 |

## 10. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends. With
Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/kan_pkg.sv tb/tb_kan_ref_pkg.sv tb/tb_kan_accel_top.sv \
        --top-module tb_kan_accel_top -Mdir obj -o sim
    ./obj/sim

Replace `tb_kan_accel_top` by any other `tb_<module>`. The remaining files
are found through `-Irtl -Itb`. The full-size tile test builds in about 15
seconds and runs in well under a second. Add `-Wno-fatal` if your Verilator
version turns lint warnings into errors.
