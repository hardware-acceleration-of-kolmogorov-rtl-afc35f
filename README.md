# A KAN layer on an RRAM compute-in-memory array

A Kolmogorov-Arnold Network (KAN) layer uses learned B-spline functions on its edges
where a multilayer perceptron uses weights. Each input X passes through G+K basis
functions B_0(X)..B_{G+K-1}(X), where G is the number of grid intervals and K the
spline order. The layer output is a weighted sum:

    y_j = sum_m sum_i c'_{m,i,j} * B_i(X_m)

The coefficients c' (8-bit signed) sit in an RRAM analog compute-in-memory (ACIM)
array. The basis values drive its word lines, and each bit line adds up the products
as charge. This RTL covers the path from the 8-bit inputs to the digitised column sums.
Four ideas make that path cheap:

1. **Aligned, power-of-two grid.** The input range is G intervals of exactly 2^LD codes
   each. LD is the largest integer with G*2^LD <= 2^8. Every basis function is then the
   same bump, shifted by whole intervals, and sampled at the same points. One table
   serves all of them. The bump is symmetric, so only half of it is stored: the
   *Sharable-Hemi LUT* (SH-LUT).
2. **Local/global split.** The low LD bits of X give the position inside an interval.
   They select a table entry. The high bits give the interval, which decides which
   basis function receives each value. Two small decoders replace one 8-bit decoder.
3. **Time-and-voltage word-line encoding.** A 2N-bit basis value {b, a} becomes one
   word-line pulse: level V[a] for one unit time, then level V[b] for 2^N units. The
   DAC levels make cell current linear in the code. The charge is therefore
   proportional to a + 2^N*b, the full value, and it arrives in 2^N+1 unit times. Pure
   pulse-width coding would need 2^(2N) units; pure voltage coding would need a 2N-bit
   DAC.
4. **Sparsity-aware row placement.** For K = 3, only 4 of the 8 basis functions are
   non-zero for any input. When inputs cluster mid-range, the central ones are non-zero
   most often. Their coefficients go on the rows nearest the bit-line clamp, where IR
   drop is smallest.

The default configuration is G = 5, K = 3, N = 3, 8-bit inputs, 17 inputs and
14 columns. That gives LD = 5, a usable input range of 0..159, and 136 word lines.

## The grid and the numbers

| quantity | default | rule |
|---|---|---|
| input code X | 8 bits | |
| LD | 5 | largest LD with G*2^LD <= 256 |
| usable range | 0..159 | 0..G*2^LD-1; larger codes are saturated to 159 and flagged on `clipped` |
| basis functions per input | 8 | G+K |
| basis value | 6 bits | 2N |
| coefficient | 8 bits signed | |
| word lines | 136 | inputs x (G+K) |

The grid and knot positions are fixed by LD. The shape of the bump is not: it lives in
the SH-LUT, which software writes. The testbenches fill entry a with the cubic cardinal
B-spline sampled at the centre of input code a, u = (a+0.5)/2^LD. That value is scaled
so that the peak 2/3 maps to 63. Because samples sit at code centres, the bump's
symmetry maps code a to code (K+1)*2^LD-1-a exactly.

## How a basis value is found (spline_lookup)

Write X = g*2^LD + l, with g = X[7:LD] the interval and l = X[LD-1:0] the position.
In interval g, the active basis functions are B_g .. B_{g+K}. Basis function B_{g+j}
started K-j intervals earlier. So at X it is in segment s = K-j of its own support,
and its value is the bump at address s*2^LD + l.

The hardware has K+1 = 4 *lanes*. Lane j always evaluates segment K-j:

| lane | gives | bump segment | SH-LUT entries used |
|---|---|---|---|
| 3 | B_{g+3} | 0 | l (direct) |
| 2 | B_{g+2} | 1 | 2^LD + l (direct) |
| 1 | B_{g+1} | 2 | 2*2^LD - 1 - l (mirrored) |
| 0 | B_{g+0} | 3 | 2^LD - 1 - l (mirrored) |

A bump address a >= 2*2^LD reads entry 4*2^LD-1-a. The mirroring is only a reversed order of
wires into the lane's 2^LD-to-1 multiplexer; there is no extra logic.

* `lg_decoder` turns l into 2^LD one-hot lines and g into G one-hot lines.
* `sh_lut` holds the 2*2^LD entries (64 x 6 bits). It has one synchronous write port
  and all entries readable in parallel. Reset clears it.
* `l2g_mux_demux` holds the four lane multiplexers (local stage) and four 1-to-G
  demultiplexers (global stage). Lane j goes to output B_{g+j}, and the outputs no lane
  reaches are 0. All of it is AND-OR logic on the one-hot selects, the logic
  equivalent of a transmission-gate tree.
* `spline_lookup` shares one `sh_lut` between M inputs. Each input has its own decoder
  pair and `l2g_mux_demux`. The lookup is combinational from `x` to `b`.

## From a basis value to charge (tmdvig)

Each basis value {b, a} (b = high N bits, a = low N bits) becomes one word-line pulse.
All rows share the delay chain, the pulse logic and the DAC. Each row has its own
transmission-gate multiplexer and buffer. A block diagram could equally draw one
generator per input; sharing the timing parts across all word lines is the cheaper
reading, and it is the one built here.

`delay_chain` is a line of 2^N+1 unit delays. It taps the `go` level after 1 unit and
after 2^N+1 units. `pm_tcm` raises `go` and forms three pulses from it:

    p_n1 = go & ~tapn1      2^N+1 units   buffer enable      (W_P(N+1))
    p1   = go & ~tap1       1 unit        TG-MUX picks V[a]  (W_P1)
    pn   = p1 ^ p_n1        2^N units     TG-MUX picks V[b]  (W_PN)

Cycle by cycle, with N = 3 and `start` sampled at edge 0:

| cycle | 1 | 2..9 | 10 | 11..19 |
|---|---|---|---|---|
| word line | V[a] | V[b] | 0 | 0 |
| `done` | | | 1 | |
| `busy` | 1 | 1 | 1 | 1, until the chain is empty |

The inputs are latched at the start edge. A new start is taken once `busy` falls.
Because of this drain wait, `busy` lasts 2*(2^N+1)+1 = 19 cycles. A new operation can
therefore start every 20 cycles, and each result is ready 2^N+2 = 10 cycles after its
start.

`nbit_dac` sets V[0] = 0 and V[x] = VTH + sqrt(x*I_UNIT/KN). Under the square-law cell
model I = KN*(V-VTH)^2 this gives I[x] = x*I_UNIT. `tg_mux` and `buffer_array` are
ideal switches and drivers.

In this RTL one `clk` period is one unit time. The analog delay cells become
flip-flops, so every pulse width is an exact number of cycles.

## The array and readout (rram_acim)

The array is a behavioural model of ROWS x COLS signed coefficients. On every clock,
each column adds sum_r c'[r][col] * f(V_WL[r]) * (1 - IR_ALPHA*r) to its charge. f is
the same square-law curve, and row 0 is nearest the clamp. `clear` empties the charge.
`sample` converts it to a signed integer count of unit charges (W_P1 * I_UNIT) on `y`.
The conversion is ideal: it rounds and has no resolution limit. With IR_ALPHA = 0 (the
default) the result is exact:

    y_col = sum_r c'[r][col] * value_r

## Row placement (kan_sam_map)

Coefficient (input m, basis function i) sits on physical row rank(i)*M + m. rank puts
the centre first and then alternates outwards. For G+K = 8, the order from nearest to
furthest is B3, B4, B2, B5, B1, B6, B0, B7. So the 17 rows holding every input's B3
coefficient are nearest the clamp. The top level uses the same order twice: to wire
the looked-up B values onto word lines, and to turn the logical write address
(`w_m`, `w_i`, `w_col`) into a physical row. Software therefore never sees physical
rows. The order is fixed; it assumes inputs concentrated mid-range.

## Top level (kan_layer_top)

    spline_lookup -> row placement -> tmdvig -> rram_acim -> y

Use it in this order:

1. Load the SH-LUT: write 2*2^LD entries through `lut_we`, `lut_waddr`, `lut_wdata`.
2. Load the coefficients: write c'(m, i, col) through `w_we`, `w_m`, `w_i`, `w_col`,
   `w_data`. Each takes one write per cycle.
3. Hold `en` high, put the inputs on `x`, and pulse `start` for one cycle.
4. `done` pulses 2^N+2 cycles after the start edge, and `y` is valid from the next
   cycle until the next operation. A `start` while `busy`, or with `en` low, is ignored.

One instance computes the spline part of one layer. The table and the coefficients can
be rewritten between operations. Writing a coarser table (for example 3-bit values
shifted left) changes the B(X) precision without touching the hardware.

Parameters: M, COLS, G, K, LD, N, CW, OUTW and IR_ALPHA. To change the grid, set G
and set LD to kan_pkg::calc_ld(G, 8). The number of word lines follows as M*(G+K).

## What follows the design and what is this implementation's choice

These parts come from the design itself:

* the G*2^LD alignment rule and the half-table with mirrored wiring;
* the split into LD-bit local and (8-LD)-bit global decoders;
* four 2^LD-to-1 multiplexers and four 1-to-G demultiplexers;
* one table shared by all inputs;
* the 1 : 2^N : 2^N+1 pulse ratios formed with an XOR;
* V[a] during the first pulse and V[b] during the second;
* DAC levels chosen so that current is linear in the code;
* placing the central basis functions' coefficients nearest the clamp.

These are this implementation's choices:

* one-hot decoding;
* saturating out-of-range inputs;
* reset clears the table;
* the start/busy/done handshake and the drain wait;
* one clock per unit time;
* the square-law cell model and its constants;
* signed coefficients standing for differential cell pairs;
* an ideal sense amplifier;
* a linear IR-drop model;
* a fixed centre-out row order;
* bump samples at code centres;
* K assumed odd.

Not built:

* **The residual branch w_b*b(x).** It is a ReLU of X through an ordinary CIM array,
  which the design delegates to a conventional array.
* **Sequencing several layers.** The workload testbench chains two instances and does
  the requantisation itself.
* **Signed inputs.** The grid scheme extends to layers with negative inputs, but that
  variant is not specified and is not built. Inputs are unsigned codes.
* **A run-time choice of N.** The design treats N as something to tune for speed
  (small N) or accuracy (larger N). Here it is a build parameter.

The analog blocks (`nbit_dac`, `tg_mux`, `buffer_array`, `rram_acim`) and `tmdvig`,
which contains them, use `real` signals. They simulate but do not synthesise. The
synthesisable logic is `lg_decoder`, `sh_lut`, `l2g_mux_demux`, `spline_lookup`,
`delay_chain`, `pm_tcm` and `kan_sam_map`.

## Verification

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=F` and has a watchdog.

The reference values come from `tb/kan_ref_pkg.sv`. It evaluates B_i(X) directly from
the cubic B-spline on the knot grid, without lanes, tables or mirroring. So the
lookup-path tests check the lane and mirror wiring against the mathematics, not against
a copy of the wiring.

What each testbench checks:

* `tb_lg_decoder`: all 256 input codes.
* `tb_l2g_mux_demux` and `tb_spline_lookup`: every B_i for every code, at 6-bit and
  3-bit table precision.
* `tb_pm_tcm`: pulse widths of 1, 8 and 9 cycles, the 10-cycle latency, and ignored
  starts.
* `tb_tmdvig`: integrates the word-line current through the cell model and gets back
  each 6-bit word for all 64 values.
* `tb_rram_acim`: column sums, and the IR-drop scaling.
* `tb_kan_layer_top`: the whole layer at the default size. It checks 15 inferences
  against the reference and counts the mechanisms: every interval used, clipped inputs,
  starts ignored while busy and with `en` low, and a table rewrite.
* `tb_tmdvig_modes`: builds the generator with N = 2, 3 and 4 (4-, 6- and 8-bit words
  in 5, 9 and 17 unit times) and checks every word.
* `tb_kan_sam_irdrop`: the default layer with IR drop (IR_ALPHA = 0.002) and
  bell-shaped inputs. It checks the attenuated sums, and checks that the mean error is
  below that of input-major placement (row m*8+i). The measured ratio is about 2.7.
* `tb_knot_theory_kan`: a two-layer 17x1x14 network for G = 5, 7, 15, 30, 60 and 68.
  These are 136 to 1207 word lines, with random coefficients.

To run one, for example the full-size layer test:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/kan_pkg.sv tb/kan_ref_pkg.sv tb/tb_kan_layer_top.sv \
        --top-module tb_kan_layer_top -Mdir obj_top
    ./obj_top/Vtb_kan_layer_top

Replace the testbench name for the others. `tb_knot_theory_kan` takes about
1.5 minutes to build and under a second to run.

How far to trust it:

* The digital path is checked exactly, bit for bit.
* The analog blocks are idealised. They show that the encoding and summation are
  arithmetically right, not how much noise, variation or IR drop a real array adds.
* No trained KAN model is included. All tests use random coefficients.
