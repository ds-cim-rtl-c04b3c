# DS-CIM: a digital stochastic compute-in-memory macro with collision-free OR accumulation

This is SystemVerilog RTL for a compute-in-memory (CIM) macro. It computes INT8 matrix-vector
products with stochastic bitstreams. A conventional digital CIM column spends most of its area
and energy on the adder tree that sums its 128 products. This design replaces that tree with
a single OR gate per group of rows. A plain OR gate miscounts whenever two of its inputs are 1
in the same cycle ("1s saturation"). The design avoids this by arranging the data so that this
can never happen. When at most one input of an OR gate can be 1, the OR *is* an exact adder.

The RTL follows the published DS-CIM architecture of Shao, Zhao, Yu et al. That publication
gives the architecture, the arithmetic and the remapping idea. Many details it leaves open are this implementation's own choices; each
one is named below.

## 1. The idea in three steps

**Multiplication as sampling.** Each cycle, two 8-bit pseudo-random numbers give a point
(ra, rw) in a 256 x 256 square. An activation SNG (stochastic number generator, a single
comparator) outputs 1 when ra < a. A weight SNG outputs 1 when rw < w. Their AND is 1 when the
point falls inside the a x w rectangle in the corner of the square. Over L cycles, the number
of ones estimates a*w*L/65536.

**Shared random numbers.** Every row of the macro uses the *same* pair of random numbers:
one PRNG for all activations (PRNG_A) and one for all weights (PRNG_W). All rows therefore
sample the same point in the same cycle. If each row's rectangle lies in a region of the
square that no other row of its OR group uses, the shared point can fall in at most one of
those rectangles. At most one product bit of the group is then 1.

**Remapping.** An OR group of 4^S rows splits the square into a 2^S x 2^S grid of
sub-squares:

| variant | OR group | S (right shift) | grid | units per column-lane | ASUM width |
|---|---|---|---|---|---|
| efficient (default, `OR_N = 64`) | 64 rows | 3 | 8 x 8 | 2 | 2 bit |
| precise (`OR_N = 16`) | 16 rows | 2 | 4 x 4 | 8 | 4 bit |

Both operands are shifted right by S bits, so each rectangle fits inside one sub-square. Row
r of a group owns sub-square column `ra = r mod 2^S` and sub-square row
`rw = (r / 2^S) mod 2^S`. To move a rectangle into its sub-square, some bits of the operand
and of the random number are inverted before the comparison. The SNG of a row with inversion
mask M computes

    bit = (rnd ^ M) < (code ^ M),        code = value ^ M

This is still one comparator, with inverters on some of its inputs. With M = 0 it is the
plain `rnd < value`. With M = 8'hFF it becomes `rnd > ~value`: the operand is inverted and
the comparison points the other way, which mirrors the rectangle into the far corner. That
is exactly how the published 2 x 2 (OR4) example moves rows 1, 2 and 3 into the other three
quadrants.

For the 4 x 4 and 8 x 8 grids, the publication only says "inverting the corresponding data
bits". This RTL uses the following rule (in `dscim_pkg::remap_mask` and in `data_remap`).
For region code c on an axis, the mask is `{c, all ones}` when c != 0 and 0 when c = 0. The
top S bits of the mask then select the sub-square, and the lower bits mirror the operand
inside it. For S = 1 this reduces to the published full inversion. Any rule that gives
different top bits to different codes would be just as collision-free.

The cost of the scheme is precision. The shift discards S bits of each operand: 3 bits in the
efficient variant, 2 in the precise one.

## 2. Signed arithmetic on a unipolar circuit

The OR-MAC handles only unsigned operands. Signed INT8 values are made unsigned by
inverting their sign bit: x' = x + 128 and w' = w + 128. Then

    x*w = x'*w' - 128*x - 128*w'
    psum = sum x'w'  -  128 * sum x  -  128 * sum w'
           (OR-MACs)    (term c)        (term d)

- **Term c** depends only on the input channel. `csum_simd` computes it once when the channel
  is loaded, and all 32 columns share the result.
- **Term d** depends only on the weight column. It is computed by the host when the weights
  are written, and stored in `term_d_lut`.
- **The OR-MAC term** comes from the count of ones:

      sum x'w' ~= count * 2^(16 + 2S) / L

  This is a shift by `16 + 2S - log2 L`, done in `signed_recovery`.

For unsigned activations (`cfg_act_signed = 0`), the sign-bit inversion is skipped on the
activation side. Then x*w = x*w' - 128*x, so term d is not used. The publication reports both
signed and unsigned activation operation.

## 3. Architecture

```
            in_act[128] (one channel / cycle)                w_wr_data[32] (one row / write)
                 |                                                |
          data_remap (A axis) + csum_simd               data_remap (W axis)
                 |                                                |
   PRNG_A -> input_sng_array: 64 lanes x 128 SNGs          weight_sram 128 x 32 x 8 b
                 |  a_sc[lane][row] (broadcast)                   |
                 +--------------------+---------------------------+
                                      v
      dscim_column x 32:  128 weight SNGs (PRNG_W) -> w_sc[row]
                          64 x or_mac: (a_sc & w_sc) -> 2 x OR64 (or 8 x OR16) -> ASUM
                          64 x accumulator (latch-cached for OR64)
                                      |
   dscim_ctrl (lane scheduler) -> fin lane -> signed_recovery x 32 (count, c, d) -> out_psum[32]
```

Each column has 64 OR-MACs, one per activation lane. All 64 share the column's weight
bitstream. This is the compute/memory ratio of 64: each weight cell and each weight SNG serves
64 channels at once, which makes up for the long bitstreams. The full macro holds
32 x 64 OR-MACs of 128 rows each. That is 262,144 AND terms, evaluated every cycle.

## 4. Timing: staggered lanes

Input channels enter through a valid/ready port, one per cycle. `dscim_ctrl` assigns them to
lanes 0, 1, 2, ... 63 and then back to 0. Lane k therefore starts one cycle after lane k-1.
Each lane keeps its channel in its SNG registers for L = 64, 128 or 256 cycles (`cfg_len`).

- A channel accepted at the clock edge that ends cycle t runs its bitstream in cycles t+1 to
  t+L.
- Its lane may take the next channel at the edge that ends cycle t+L.
- Its 32 signed results are on `out_psum` with `out_valid` in cycle t+L+2. `out_lane` names
  the lane.
- With L = 64 the port accepts a channel every cycle without a break. With L = 256, it takes
  64 channels and then stalls (`in_ready` = 0) for 192 cycles. The data then has time to
  arrive from a slow buffer, and the weights stay in place throughout.
- Results leave in acceptance order, at most one channel per cycle.

The PRNGs advance every cycle after `seed_load`. Different lanes therefore use different
windows of the same random sequences. `cfg_len` and `cfg_act_signed` may change only while
`idle` is high; assertions check this.

## 5. Accumulators

- `accumulator` (precise variant): adds the 4-bit ASUM every cycle. The first cycle of a
  bitstream loads the sum instead of adding it.
- `latch_cached_accumulator` (efficient variant): caches the 2-bit ASUM for three cycles. In
  the fourth cycle it adds the four values (three cached, one live) into the register. The
  wide adder and the register switch once per four cycles. The publication uses eight
  D-latches for this cache. The RTL uses three enabled 2-bit flip-flop stages, and the live
  input takes the place of the last latch pair, which would be transparent in that cycle.
  The arithmetic result is identical. The bitstream length must be a multiple of 4.

## 6. Parameters and ports of `dscim_macro`

| parameter | default | meaning |
|---|---|---|
| `OR_N` | 64 | rows per OR gate: 64 (efficient) or 16 (precise) |
| `ROWS` | 128 | rows per column (dot-product length) |
| `COLS` | 32 | weight columns |
| `LANES` | 64 | activation lanes (OR-MACs per column) |
| `PSUM_W` | 25 | signed output width |

| port | dir | meaning |
|---|---|---|
| `cfg_len` | in | `LEN_64` / `LEN_128` / `LEN_256` |
| `cfg_act_signed` | in | 1: signed INT8 activations; 0: unsigned 8-bit |
| `seed_load`, `seed_a`, `seed_w` | in | load PRNG seeds (0 is replaced by 1) |
| `w_wr_en`, `w_wr_row`, `w_wr_data[32]` | in | write one array row of signed INT8 weights |
| `d_wr_en`, `d_wr_col`, `d_wr_data` | in | term d of a column: sum over rows of (w + 128) |
| `in_valid`, `in_ready`, `in_act[128]` | in/out/in | one input channel |
| `out_valid`, `out_lane`, `out_psum[32]` | out | one channel's signed partial sums |
| `idle` | out | no lane busy |

Reset is asynchronous and active low. It clears the weights, the LUT, the lane state and the
SNG registers.

## 7. What accuracy to expect

The RTL is bit-exact against a model that counts ones with an *adder*, and the testbenches
check this. The OR gates therefore never lose a count. The result is still an estimate,
with two sources of error:

1. **Sampling:** only L points of the 65,536-point square are visited.
2. **Truncation:** the shift drops S bits of each operand.

The design has no rounding or bias correction, and the publication describes none. Operands
are effectively rounded down, so results are biased low, most strongly for large operands.
With the LFSR PRNGs and seeds used in the testbench (0x5A, 0xC3), the end-to-end test over
all its channels measures these RMS errors, relative to a full scale of 2^21:

- about 12.7% for the efficient variant;
- about 8.9% for the precise variant.

The channels mix L = 64, 128 and 256 and include all-maximum operands. The publication
reports much lower RMSE: 0.74% to 3.81%. Those figures come from a PRNG type and seeds chosen
by an offline search that the publication does not print, on network data distributions,
with an unstated normalisation. The figures here are therefore not comparable. A better seed
or generator can be used by changing the `TAPS` parameters of the two `prng8` instances and
the seeds. Folding a truncation-bias correction into the term-d LUT and into
`signed_recovery` would also be a natural extension.

## 8. Where this RTL departs from, or adds to, the published design

- **PRNG:** the published design picks among "mainstream 8-bit PRNGs" by search, without
  naming one. Here PRNG_A is the LFSR x^8+x^6+x^5+x^4+1 and PRNG_W is the LFSR
  x^8+x^4+x^3+x^2+1. Both have period 255, and seeds come in through ports.
- **Remap masks for 4 x 4 and 8 x 8 grids:** this design's rule (section 1).
- **Where remapping happens:** in the weight write path and the activation input path. The
  weight SRAM stores remapped codes.
- **Weight SRAM:** a flip-flop array with a row-wide write port. The real macro uses custom
  SRAM cells.
- **OR-MAC gates:** the published OR-MAC64 is a custom AOI22/NAND32 cell. The RTL writes its
  Boolean function (OR of ANDs) and leaves gate choice to synthesis.
- **Latch cache:** flip-flops instead of latches (section 5).
- **Handshake, lane scheduler, output register, latency and output format:** all this
  design's own. The staggered one-channel-per-cycle loading follows the published timing
  diagram.
- **Term c:** one combinational adder tree per loaded channel. The publication only says
  "summed through SIMDs".
- **Term d:** loaded by the host, as in the publication, which computes it offline.
- **Not included:** the activation buffer that feeds `in_act`, the offline seed search, any
  tiling of large networks across macros, and the FP8-to-INT8 alignment used for language
  models. The publication describes none of these as macro hardware.

## 9. Simulating

Every file under `rtl/` holds one module or package. The package `dscim_pkg.sv` must be read
first. Each testbench prints `TB_RESULT checks=N failures=M` and stops itself, with a
watchdog. With plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_dscim_macro \
          rtl/dscim_pkg.sv tb/tb_dscim_macro.sv -o sim && ./obj_dir/sim
```

Building the full-size macro takes about one and a half minutes. Simulation takes under a
second.

| testbench | what it shows |
|---|---|
| `tb_dscim_macro` | full default size, efficient variant. 216 channels over three lengths, plus unsigned mode. Every output is exact against an independent model. Latency is L+2. Checks that stalls, lane reloads in the finishing cycle, all lengths and both activation modes occur. Reports the error against the exact dot product. |
| `tb_dscim_macro_cim1` | the same test on the precise variant (`OR_N = 16`) |
| `tb_dscim_column` | one column, 4 lanes, both variants. The adder-based reference matches exactly, so no OR collision occurs. |
| `tb_input_sng_array`, `tb_sng`, `tb_data_remap` | SNG regions and remap codes, exhaustively over the random value |
| `tb_latch_cached_accumulator` | result after every group of four; the register never moves within a group |
| `tb_dscim_ctrl` | lane order, per-lane enables, phase, stall and throughput |
| `tb_prng8`, `tb_or_mac_unit`, `tb_or_mac`, `tb_accumulator`, `tb_weight_sram`, `tb_csum_simd`, `tb_term_d_lut`, `tb_signed_recovery` | the leaf blocks |

To change the design size, override `ROWS`, `COLS` and `LANES` on `dscim_macro`. `ROWS`
must be a multiple of `OR_N`, and the testbenches assume the defaults. To switch variant, set
`OR_N`. The column selects the matching accumulator by itself.
