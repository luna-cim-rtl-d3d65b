# LUT-based multiplication inside an SRAM array

A compute-in-memory array can multiply without a multiplier. Store the products
of a fixed weight `W` with every possible input, then let the input `Y` choose
one with a multiplexer. Done directly, this does not scale: a 4b x 4b product
needs 16 stored 8-bit results (128 cells) and a 16:1 mux. For 8 bits it needs
4096 cells.

This design uses a divide-and-conquer trick. `Y` is split into two 2-bit halves:

    W x Y = (W x Y[3:2]) << 2  +  (W x Y[1:0])

Each half needs only four 6-bit table entries: `W x 00`, `W x 01`, `W x 10` and
`W x 11`. Both halves read the same table. A small adder combines the two
looked-up partial products. Most table entries can be wired from a few stored
bits, so the whole 4b multiplier needs **10 stored bits**, two 4:1 muxes and
3 half adders plus 3 full adders.

The RTL puts four such multipliers between the rows of an 8x8 SRAM array. Each
unit reads its operands from the row above and writes its product into the row
below. All four units work in parallel in one cycle.

## The 10-bit table

This is the least obvious part of the design. The four 6-bit entries come from
ten storage cells:

| entry    | bits 5..0                    | cells used                          |
|----------|------------------------------|-------------------------------------|
| `W x 00` | `z z z z z z`                | 1 cell `z` holding 0, fanned out    |
| `W x 01` | `0 0 W3 W2 W1 W0`            | 4 cells holding `W`                 |
| `W x 10` | `0 W3 W2 W1 W0 0`            | none: the `W x 01` cells, shifted   |
| `W x 11` | `T4 T3 T2 T1 T0 W0`          | 5 cells `T` = bits 5..1 of `3W`     |

Bit 0 of `3W` equals `W0`, so only its upper five bits are stored. This gives
1 + 4 + 5 = 10 cells.

In the array, the four `W x 01` cells are the four `W` cells of the unit's
operand row. Each unit therefore owns only six cells of its own: the zero cell
and `T`. The host must program `T` with `(3*W) >> 1` whenever it changes a
weight. The design does not compute `3W`. That is the point of a lookup table:
the results are precomputed.

The table is data, so other contents give other functions. The tests check one
such table too. The result is always `(E[Y3Y2] << 2) + E[Y1Y0]`, where `E` is
the entry table above. For a true product, program `z = 0` and `T = 3W >> 1`.

## Combining the halves

`dc_adder` computes `(z_msb << 2) + z_lsb` bit by bit:

| result bit | inputs                              | cell        |
|------------|-------------------------------------|-------------|
| 1..0       | `z_lsb[1:0]`                        | wire        |
| 2          | `z_msb[0]`, `z_lsb[2]`              | half adder  |
| 3, 4, 5    | `z_msb[1..3]`, `z_lsb[3..5]`, carry | full adders |
| 6, 7       | `z_msb[4..5]`, carry                | half adders |

The carry out of bit 7 is dropped. The largest product, 15 x 15 = 225, fits in
eight bits, so the result is exact for every pair.

## Array organisation

```
 row 0   W1<3> W1<2> W1<1> W1<0> Y1<3> Y1<2> Y1<1> Y1<0>   operands of unit 0
         ---------------- unit 0 ----------------------
 row 1   OUT1<7> ...                            OUT1<0>    product of unit 0
 row 2   W2 / Y2                                            operands of unit 1
         ---------------- unit 1 ----------------------
 row 3   OUT2                                               product of unit 1
 ...     (rows 4..7: units 2 and 3)
```

The leftmost column is bit 7 of the row word. An operand row is therefore
`{W, Y}`, with `W` in the high nibble (see `luna_pkg::operand_row_t`).

The array is made of flip-flop bit cells (`sram_array`). They have two kinds of
access:

* **Host port.** `row_decoder` raises one word line. `column_decoder` enables
  either all eight columns (row access) or one column (single-bit access). A
  read senses the whole row.
* **Compute taps.** Every cell value goes to the units in parallel. Each row
  can also be overwritten in one cycle by its unit.

In silicon the periphery also has bitline conditioning, sense amplifiers and
column controllers. These are analog and are not modelled as separate logic.
Only their effect is modelled: the selected row is read, and writes are gated
by column.

## Interface and timing of `luna_cim_array`

All signals are sampled on the rising edge of `clk`. `rst_n` is an active-low,
synchronous reset that clears every cell.

| operation          | drive for one cycle                                                      | result                                                          |
|--------------------|--------------------------------------------------------------------------|-----------------------------------------------------------------|
| row write          | `acc_en=1 acc_we=1 bit_mode=0 row_addr wdata`                             | row written at the edge                                         |
| bit write          | `acc_en=1 acc_we=1 bit_mode=1 row_addr col_addr wdata[col_addr]`          | one cell written; the other `wdata` bits are ignored            |
| read               | `acc_en=1 acc_we=0 row_addr`                                              | `rdata` valid with `rvalid` in the next cycle                   |
| program LUT        | `lut_we=1 lut_unit lut_wdata={T[4:0], z}`                                 | unit's six local cells written                                  |
| compute            | `compute=1`                                                               | every OUT row takes its unit's product at the edge; `done` is high in the next cycle |

A multiplication therefore takes one cycle. The product is combinational from
the cells and is captured into the OUT row by `compute`. It can be read two
cycles after `compute` is raised.

If a host write to an OUT row falls in the same cycle as `compute`, the product
wins. More than one raised word line is flagged by an assertion.

`N_UNITS` (default 4) sets the number of units. The array has `2*N_UNITS` rows
of 8 bits.

## Files

| file                                   | contents                                               |
|----------------------------------------|--------------------------------------------------------|
| `rtl/luna_pkg.sv`                      | widths, `lut_cells_t`, `operand_row_t`                 |
| `rtl/mux2.sv`, `rtl/lut_mux4.sv`       | 2:1 mux; 4:1 table select built from three of them     |
| `rtl/half_adder.sv`, `rtl/full_adder.sv`, `rtl/dc_adder.sv` | partial-product adder             |
| `rtl/luna_lut_mult.sv`                 | 10-bit table wiring, two selects, adder                |
| `rtl/luna_cim_unit.sv`                 | one unit: six local LUT cells and the multiplier       |
| `rtl/row_decoder.sv`, `rtl/column_decoder.sv` | address decoders                                |
| `rtl/sram_array.sv`                    | bit-cell array with host port and compute taps         |
| `rtl/luna_cim_array.sv`                | top: array, decoders, four units                       |
| `tb/tb_<module>.sv`                    | one self-checking testbench per module above, except `mux2`, `half_adder` and `full_adder`, which are tested inside their users |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, to run the end-to-end test:

```
verilator --binary --timing --assert -Irtl rtl/luna_pkg.sv tb/tb_luna_cim_array.sv \
          --top-module tb_luna_cim_array -o sim
./obj_dir/sim
```

Replace `luna_cim_array` with any other module name to run that module's test.
Verilator finds the other modules through `-Irtl`.

`tb_luna_cim_array` runs the top at its default size. It does three things:

* It repeats a published transient run. `W = 0110` is combined with
  `Y = 1010, 1011, 0011, 1100`. The expected products are `00111100`,
  `01000010`, `00010010` and `01001000`. The run is done once with four units
  in parallel, and once on one unit with the inputs applied in turn.
* It computes all 256 `(W, Y)` pairs through the host port. Half of the
  operands are loaded with row writes and half with single-bit writes.
* It forces a collision between a host write and a compute.

It counts each mechanism and fails if any of them never ran. The multiplier
(`tb_luna_lut_mult`) and the adder (`tb_dc_adder`) are also checked
exhaustively on their own.

## How far it follows the source design

These parts follow the published design exactly:

* the split of `Y`
* the 10-bit table and its wiring
* the 4:1 mux built from three 2:1 muxes
* the 3 HA + 3 FA adder and its bit assignment
* four units in an 8x8 array, with operands above each unit and the product
  below it

The published design leaves these points open, and this RTL chooses them:

* the host protocol, read latency, compute strobe and `done` timing
* the reset values
* how the six unit-local LUT cells are written: a separate port, with `3W`
  supplied by the host
* the column decoder's role: it gates writes by column
* the collision priority

Some parts are not built:

* The bit cells, bitline conditioning and sense amplifiers are flip-flops and
  plain logic, not circuits. Energy and area figures cannot be taken from this
  RTL.
* The approximate variants are not built. One fixes the LSB-side product to 0;
  the other replaces it with `W`. Both trade accuracy for fewer cells and
  adders. Only the exact multiplier is built.
* The 8b and 16b versions are not built. The source gives only their component
  counts, not their structure.
* The published energy run fed one multiplier through a 4:1 mux that chose
  among four stored inputs. That mux was part of the measurement setup and is
  not built. The testbench applies the same inputs by rewriting the operand row.
* No accumulator or neuron logic exists around the multipliers. The array
  multiplies; summing products is left to whatever reads the OUT rows.
