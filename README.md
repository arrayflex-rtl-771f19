# ArrayFlex: a systolic array whose pipeline depth is chosen per layer

A weight-stationary systolic array works out a matrix product `X = A x B` in three phases:

1. It preloads `B` into the PEs, one row per cycle (`R` cycles).
2. It streams the `T` rows of `A` in from the west edge.
3. It waits while each column reduces its `R` products from top to bottom, one PE per cycle.

Two of these delays grow with the size of the array rather than with the work. The
first input word needs `C-1` cycles to reach the last column, and the reduction down a
column needs `R-1` cycles. A tile product therefore takes

    L = 2R + C + T - 2   cycles.

When `T` is small, as it is in the late layers of a CNN, these fill and drain cycles
dominate the run time.

ArrayFlex lets the array merge `k` neighbouring pipeline stages into one, in both
directions, by making the registers between them transparent:

* **Horizontally**, an input word is broadcast combinationally across `k` columns and
  registered only at the east end of each group of `k`.
* **Vertically**, the products of `k` rows are added in the same cycle. A chain of 3:2
  carry-save adders does the adding, and one carry-propagate adder in the last row of
  the group finishes it.

A tile product in mode `k` then takes

    L(k) = R + R/k + C/k + T - 2   cycles.

Each cycle is longer, because the critical path now holds `k` carry-save adders and
bypass multiplexers. The mode that gives the shortest run time therefore depends on the
layer. This RTL supports `k = 1` (normal), `k = 2` and `k = 4`. The evaluated design ran
these modes at 1.8, 1.7 and 1.4 GHz, against 2 GHz for a fixed-pipeline array.

The default configuration is a 128 x 128 array with 32-bit signed operands and a 64-bit
column reduction. Both sizes are parameters.

## The configurable PE (`rtl/af_pe.sv`)

Each PE contains:

* a stationary weight register `W` and a 32 x 32 multiplier;
* a 64-bit 3:2 carry-save adder (`af_csa`);
* a carry-propagate adder;
* a vertical (south) register;
* a horizontal (east) register, followed by a 2:1 bypass multiplexer;
* two configuration bits, `h_reg` and `v_reg`, loaded with the weight.

**Vertical path.** Two multiplexers sit in front of the carry-save adder. They are
steered by the `v_reg` bit of the PE above. That bit arrives on the `up_v_reg` port.

| `up_v_reg` | operands added to this PE's product | meaning |
|---|---|---|
| 1 | register above, constant 0 | the stage above ended in a register |
| 0 | sum word and carry word from the carry-save adder above | the reduction continues in carry-save form within the cycle |

The carry-propagate adder always adds the PE's own sum and carry words. Its result is
written into the vertical register only when the PE's own `v_reg` is 1. In the other
rows of a group, the adder's output is unused and the register keeps its value.

**Horizontal path.** When `h_reg` is 1, the east output is the registered input word,
as in a normal systolic shift. When `h_reg` is 0, the input word passes straight through
to the next PE in the same cycle.

**Clock gating.** A register whose configuration bit is 0 is never written. Its enable
is the configuration bit, and this is where a synthesis flow inserts the clock gate that
saves the register's clock power.

**Normal mode.** With `k = 1` every register is used. Even so, the carry-save adder and
the multiplexers stay in the path between the multiplier and the adder. That extra delay
is the price of configurability.

## Configuration: what `k` means for each PE (`rtl/af_config_gen.sv`)

Rows and columns are cut into groups of `k`. A register is used only at the end of its
group:

    v_reg(r) = ((r + 1) mod k == 0)        h_reg(c) = ((c + 1) mod k == 0)

For `k = 2` on a 4 x 4 corner of the array (`V` = vertical register in use,
`H` = horizontal register in use, `.` = bypassed):

    row 0:  .  H  .  H     (v: .)
    row 1:  .  H  .  H     (v: V)
    row 2:  .  H  .  H     (v: .)
    row 3:  .  H  .  H     (v: V)

`R` and `C` must be multiples of 4, which an elaboration-time check enforces. The bits
are generated in hardware from the mode while the weights are preloaded. They shift down
the columns together with the weights, so a new tile can run in a different mode.

## Data skew and timing

Cycle 0 is the first preload cycle:

* Cycles `0 .. R-1` preload `B`. The bottom row enters first, and each row moves down
  one PE per cycle.
* Row `t` of `A` reaches array row `r` in cycle `R + t + r/k`. In normal mode each row
  lags the one above by one cycle. In mode `k` the rows of a group get their words in
  the same cycle, so the skew advances in batches of `k` rows. The input buffer produces
  this skew by reading bank `r` at address `s - r/k`, not with delay lines.
* Column `c` shows the result for row `t` in its bottom register from cycle
  `R + t + R/k + c/k`. The output skew also moves in steps of `k` columns.
* The last result, for `t = T-1` and `c = C-1`, is in the bottom register at cycle
  `L(k)`, matching the formula above.

The weight-buffer read before cycle 0 and the output-buffer write after cycle `L(k)`
each add one cycle. So `busy` stays high for `L(k) + 2` cycles per job.

## Blocks

| file | block |
|---|---|
| `af_pkg.sv` | widths, `mode_e` (value = log2 k), `pe_cfg_t`, k-group helper functions |
| `af_csa.sv` | 3:2 carry-save adder; its carry out of bit 63 is dropped, so the reduction wraps modulo 2^64 |
| `af_pe.sv` | configurable PE, described above |
| `af_array.sv` | R x C grid; the top row starts every column from a constant-zero "register above" |
| `af_config_gen.sv` | configuration bits of the row being preloaded |
| `af_weight_buffer.sv` | one R x C tile of `B`; host writes a row per cycle; registered row read |
| `af_input_buffer.sv` | `R` banks of `DEPTH` words (bank r = column r of `A`); skewed, zero-padded streaming |
| `af_output_buffer.sv` | `C` banks of `DEPTH` 64-bit words; de-skew, then overwrite or accumulate; registered row read |
| `af_controller.sv` | idle, then one weight pre-read cycle, then a run of `L(k)+1` cycles, then `done` |
| `arrayflex_top.sv` | everything wired together, with the host interface |

## Using the top level

The host interface of `arrayflex_top` works as follows:

1. Write the `A` tile one row per cycle: `in_wr_en`, `in_wr_addr = t`, and
   `in_wr_data[r]` (`R` words).
2. Write the `B` tile one row per cycle: `wt_wr_en`, `wt_wr_row = r`, and
   `wt_wr_data[c]` (`C` words).
3. Pulse `start` for one cycle with `mode` (`MODE_K1/K2/K4`), `t_len = T` and
   `acc_clear`. Wait for the one-cycle `done` pulse, or for `busy` to fall.
4. Read the result row by row: present `out_rd_addr = t`, and `out_rd_data[c]` holds
   the value one cycle later.

A larger product is computed one tile job at a time. The number of jobs is
`ceil(N/R) x ceil(M/C)`. For each output column tile, the first job of the reduction
dimension sets `acc_clear = 1`, and the following jobs add into the stored results. The
mode may differ from job to job. `mode_q` reports the running mode so that an external
clock source can pick the matching frequency; the clock generator itself is not part of
this RTL.

Two rules are checked by assertions:

* `start` must not be asserted while `busy` is high;
* the buffers must not be written while `busy` is high.

The default `DEPTH` is 16384 rows. That holds the largest `T` of ResNet-34 and MobileNet
at 224 x 224 input (112 x 112 = 12544). Change it through the `DEPTH` parameter.

## Where this RTL departs from, or adds to, the evaluated design

* **Taken from the evaluated design:** the PE structure (multiplexer input order and
  configuration polarity included), the grouping of registers by `k`, the supported
  modes, the operand and reduction widths, the R-cycle row-by-row preload, the skews, and
  the latency `L(k)`.
* **This design's own choices:**
  * signed operands;
  * the shift chain that carries weights and configuration bits;
  * computing the configuration bits from the mode;
  * buffer capacities and the host interface;
  * the address-offset implementation of skew and de-skew;
  * read-modify-write accumulation inside the output memory, instead of a separate
    adder and register under each column;
  * the `acc_clear` flag;
  * the extra weight-read and output-write cycles;
  * asynchronous active-low reset.
* **Left out:** preload and streaming do not overlap, because the latency model counts
  the preload inside every tile. The loop over tiles runs on the host, not in hardware.
  Clock gating appears as register enables, not as explicit clock-gate cells. The clock
  generator, the per-layer choice of `k`, and the timing constraint that declares unused
  longer paths as false paths are not RTL.

## Testbenches

Every testbench in `tb/` checks its block against values computed independently in the
testbench. It ends by printing `TB_RESULT checks=N failures=M`.

* `tb_af_array` runs an 8 x 8 grid in all three modes. It checks every result in the
  exact cycle `R + t + R/k + c/k`, and that the last result appears in cycle `L(k)`.
* `tb_arrayflex_top` runs the whole accelerator at 8 x 8 and covers:
  * all three modes;
  * mode switches between jobs;
  * three tiles accumulated into one result;
  * `T = 1` and `T = DEPTH`;
  * `busy` lasting exactly `L(k) + 2` cycles.

  It counts how often each of these happens.
* `tb_arrayflex_full` runs one `k = 2` job on the default 128 x 128 build.

To simulate with Verilator:

    verilator --binary --timing --assert rtl/af_pkg.sv rtl/*.sv tb/tb_arrayflex_top.sv \
              --top-module tb_arrayflex_top -Mdir obj -o sim && obj/sim

The default 128 x 128 build is heavy: Verilator took close to nine minutes to build it
on a 4-core machine, and the simulation then ran in about a second. The 8 x 8
testbenches build in seconds.
