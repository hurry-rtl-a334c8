# A reconfigurable ReRAM in-situ accelerator with multifunctional crossbars

Most ReRAM accelerators do the matrix-vector products of convolution layers inside the
resistive crossbar. They then ship the results to separate digital units for max-pooling,
ReLU, residual additions and softmax. Large crossbars (512×512) are cheap per cell, because
the ADCs and DACs are shared by many cells. But a single convolution kernel rarely fills them,
so most of the array sits idle.

This design divides each 512×512 crossbar into up to four rectangular **functional blocks
(FBs)** that can be configured independently. An FB can be:

- a *Conv* FB, which holds weights and does the multiply-accumulate;
- a *Res* FB, which holds a residual that is added into a Conv result;
- a *Max* FB, which does max-pooling and ReLU as bit-wise logic in the memory.

A voltage scheme called the **block activation scheme (BAS)** lets one FB be reset, another
written and a third read at the same time without disturbing each other. Softmax is done by
a small look-up-table unit in each tile. It uses the maximum found by the max logic.

The RTL in `rtl/` covers the whole chip: 16 tiles, each with 8 IMAs (in-situ
multiply-accumulate units), a 512 KB eDRAM, a tile controller and a softmax look-up-table
unit. All sizes default to those numbers. The analog parts are behavioural models:

- the crossbar;
- the sample-and-hold;
- the 9-bit ADC.

They compute currents and codes as integers, so the whole chip simulates with Verilator.

## Hierarchy

```
hurry_chip
 ├─ io_interface            host commands -> tile, tile read data -> host
 └─ tile ×16
     ├─ tile_ctrl           tile command decoder, bus master
     ├─ edram               8192 × 512-bit buffer (512 KB)
     ├─ softmax_lut         exp / ln tables, one element per cycle
     └─ ima ×8
         ├─ ima_ctrl        FB table, array engine, Max engine
         ├─ input_reg       512 × 512-bit input register (IR)
         ├─ wl_dac          1-bit DAC per row
         ├─ bas_driver      per-line voltage levels from FB rectangles + ops
         ├─ reram_crossbar  512 × 512 one-bit cells (behavioural)
         ├─ snh             sample-and-hold of all bitline currents (behavioural)
         ├─ adc             9-bit ADC, one column per cycle (behavioural)
         ├─ shift_add       shift-and-add into the output register
         ├─ output_reg      512 × 32-bit output register (OR)
         └─ max_relu_fb     Max/ReLU FB: tournament of max_logic lanes
```

`hurry_pkg` holds the shared constants, the voltage enum and the command structs.

## The block activation scheme (`bas_driver`)

Every wordline (row) and bitline (column) is driven to one of five levels: GND, ⅓Vset,
⅔Vset, Vset and Vreset. A cell changes state only when it sees the full Vset or Vreset
across it. Every other line sits at ⅓Vset, so the worst voltage an unselected cell sees is
⅔Vset. That is below the switching threshold.

| FB operation | its rows | its columns |
|---|---|---|
| reset | Vreset | GND |
| write column *c* | Vset for a 1, ⅔Vset for a 0 | column *c* GND, the others ⅓Vset |
| read | ⅔Vset for input 1, ⅓Vset for input 0 | ⅓Vset |
| idle / outside every FB | ⅓Vset | ⅓Vset |

With this scheme:

- A written '1' cell sees Vset and sets.
- A written '0' cell sees ⅔Vset and keeps its state, because it was reset beforehand.
- A read cell sees ⅓Vset (input 1) or 0 (input 0). That is a read current proportional to
  the input bit, and too small to disturb the cell.

FBs that share rows must not fight over a wordline. The driver gives precedence to reset,
then write, then read, on any line two FBs share. The mapper should avoid placing FBs that
way.

The crossbar model (`reram_crossbar`) treats the voltage code as a multiple of ⅓Vset. For
each column it outputs the sum over rows of `cell × (WL level − BL level)`, saturated to 11
bits. A cell is set by WL=Vset with BL=GND and reset by WL=Vreset with BL=GND. Cells start
at 0.

## Bit-sliced multiply-accumulate (IMA array engine)

Weights are 8-bit unsigned. Weight *w* of output channel *o* occupies 8 adjacent columns of
a Conv FB: bit *j* is stored in column `8·o + j`, one bit per cell. Inputs are applied bit
by bit, over eight bit-planes, least significant first.

For bit-plane *p*, `I_VMM` does the following:

1. In one cycle, it drives IR word `a + p` onto the rows of the FB through the 1-bit DACs.
   It samples every bitline current into the sample-and-hold.
2. It converts one column per cycle with the ADC.
3. The shift-and-add unit adds `code << (p + k mod 8)` into `OR[b + k/8]`, where *k* is
   the column inside the FB. The first contribution (p = 0, k mod 8 = 0) overwrites instead
   of adding.

An 8-bit by 8-bit dot product of up to 512 terms (the column count) therefore takes
`8 × (1 + ncols) + 1` cycles. The ADC is 9 bits wide, so a column sum over more than 511
active rows saturates. That is the price of 512-row arrays with a 9-bit ADC.

Other array-engine commands:

- `I_RESET` resets a whole FB in one cycle.
- `I_WRITE` programs one FB column per cycle from IR words `a + k`.

The FB rectangles are loaded with `I_CFG`. They come from a mapping step done offline.

### Residual merge

A Res FB is placed under a Conv FB: same columns, other rows. It holds the residual of output
*o* in the same 8 columns as the weights of *o*. The number of 1-cells in column `8·o + j`,
weighted by 2^j, adds up to the residual. When `I_VMM` runs with `res_en`, the rows of
the Res FB are read with input 1, but only during bit-plane 0. Its current then adds on the
same bitlines as the convolution. The residual enters the sum once, unshifted, with no
extra adder and no extra cycle. The `force1` input of the DAC does this.

## Max and ReLU in memory (`max_logic`, `max_relu_fb`)

Max-pooling compares unsigned numbers with NOR, INV, XOR and COPY steps only, which is the
set of operations a ReRAM array can do on its own cells. `max_logic` runs the comparison of
two W-bit numbers A and B in 16 fixed steps, whatever W is:

| steps | operation |
|---|---|
| 1–2 | A' = INV A, B' = INV B |
| 3–4 | X = A XOR B (bit-wise) |
| 5–6 | COPY the operands and X for the next stage |
| 7 | t_k = NOR(A'_k, B_k, X of every higher bit): 1 where A first beats B at bit k |
| 8 | n = NOR(all t_k) (1 when A ≤ B) |
| 9 | gt = INV n |
| 10–11 | COPY n and gt to the selection rows |
| 12 | gt_c = INV of the copied n |
| 13 | s = NOR(INV A, INV gt_c) per bit: A where A > B |
| 14 | u = NOR(INV B, gt_c) per bit: B where A ≤ B |
| 15 | nm = NOR(s, u) |
| 16 | max = INV nm |

The result is valid 16 clock edges after the start edge. When A = B, B is taken (no
difference). Each step is a register stage here. In silicon, each step would be one
in-array logic operation on a row of cells.

`max_relu_fb` finds the maximum of up to N = 16 numbers as a knockout tournament. It uses
⌈N/2⌉+1 `max_logic` lanes in parallel per round. With ReLU enabled, a zero contestant
joins, so the result is `max(0, x_1 … x_n)`. Latency is `19·rounds + 1` edges, with
`rounds = ⌈log2(count + relu)⌉`. A round is the 16 logic steps plus the edges that load the
operands and collect the winners.

In the IMA, `I_MAX` first gathers `len` OR entries, one per cycle, each shifted right by
`shift` and clipped to 8 bits. This step stands for writing the Conv result into the Max FB.
It then runs the tournament and writes the winner back to `OR[b]`.

The Max engine is separate from the array engine. While one Conv result is being pooled,
the next `I_VMM` can already use the crossbar. This is the fine-grained FB pipeline. A
command whose engine is busy is stalled (`cmd_ready` low). The controller does not track
OR dependences between the two engines: software must not start `I_MAX` on entries that an
unfinished `I_VMM` still writes.

## Softmax look-up table (`softmax_lut`)

Softmax is computed as `y_i = exp(x_i − x_max − ln Σ_j exp(x_j − x_max))`, with x_max
supplied by the max logic. The formula uses only subtractions and two tables:

- `EXP[k] = round(65536 · exp(−k/16))`, 256 entries, Q0.16;
- `LNT[f] = round(256 · ln(1 + f/64))`, the fractional part of a logarithm, Q8.8.

Both tables are computed at elaboration from `$exp` and `$ln`, so no data file is needed.
The unit makes one pass over the inputs to accumulate the sum of exponentials. It
normalises the sum to find its logarithm (leading-one position plus the table). It then
makes a second pass to output each y_i.

- Inputs: up to N = 32 elements, Q4.4 unsigned.
- Outputs: Q0.16.
- Latency: `2·count + 1` edges.

## Tile and chip command sets

The host talks to the chip with `chip_cmd_t` = {tile, tile command} over a valid/ready
handshake. Read data comes back on `host_rsp_valid`/`host_rsp`. `io_interface` registers
one command at a time and forwards it to the addressed tile. The tiles are connected to it
directly; there is no routed on-chip network. A tile's commands (`tile_cmd_t`), with one
512-bit bus word per cycle:

| command | effect | cycles |
|---|---|---|
| `T_EDRAM_WR` | eDRAM[addr] ← data | 1 |
| `T_EDRAM_RD` | response ← eDRAM[addr] | 2 |
| `T_LOAD_IR` | IR[ir_addr+i] of IMA `ima` ← eDRAM[addr+i], i < len | len |
| `T_STORE_OR` | eDRAM[addr] ← 16 OR entries (32 bits each) | 17, after the IMA is idle |
| `T_IMA` | pass `icmd` to IMA `ima` | ≥ 1, stalls while that IMA's engine is busy |
| `T_SOFTMAX` | y ← softmax(OR[or_addr+i] >> shift); eDRAM[addr2] ← y (16 bits each) | 3·len + 4, after the IMA is idle |

The IMA commands (`ima_cmd_t`, carried by `T_IMA`) are `I_CFG`, `I_RESET`, `I_WRITE`,
`I_VMM` and `I_MAX`. They are described above.

A typical layer takes these steps:

1. Load weights into the IR and `I_WRITE` them into a Conv FB (and a residual into its Res
   FB).
2. Load activation bit-planes into the IR and `I_VMM`.
3. `I_MAX` with ReLU over the pooling window.
4. `T_STORE_OR` the results to eDRAM, or `T_SOFTMAX` them for the last layer.

## Where this design departs from the architecture it implements

- **Routers.** The architecture places routers between tiles, but their topology, flit
  format and flow control are not specified. Here the I/O interface decodes the tile number
  and drives each tile directly.
- **FB mapping.** Choosing the FB rectangles (relative placement and size balancing) is an
  offline software step. The hardware only takes the result through `I_CFG`.
- **Softmax number format.** The original uses 16-bit floating point. Here the inputs are
  8-bit unsigned Q4.4, so the same max logic can find x_max.
- **Unsigned arithmetic.** Weights, inputs and accumulations are unsigned, as with
  offset-encoded weights. As a result, ReLU never changes a value read from the OR. It is
  still built and tested: it adds the zero contestant to the tournament.
- **In-memory logic.** The 16 NOR/INV/XOR/COPY steps are modelled as register stages, not
  as cell writes in the crossbar. The Max FB keeps its own copy of the elements. Step count
  and latency are those of the in-array sequence.
- **Concurrency.** `bas_driver` can drive a reset, a write and reads in different FBs at
  once. The IMA's array engine issues one array command at a time. The overlap that exists
  is between the array engine and the Max engine.
- **Converters.** One ADC per IMA converts one column per cycle.
- **Analog models.** The crossbar, sample-and-hold and ADC are ideal integer models. There
  is no device variation, IR drop or write verify.
- **Own choices.** Bus widths, command encodings, handshakes and reset behaviour are this
  design's own.

## Capacity

One IMA holds 512 × 512 one-bit cells, which is 32,768 8-bit weights. The chip holds
16 × 8 × 32,768 ≈ 4.19 M weights. The networks usually run on this kind of accelerator
have more weights than that when trained on CIFAR-10:

- ResNet-18 has about 11 M;
- VGG-16 has about 15 M;
- AlexNet has tens of millions.

They must be mapped layer by layer, with weights reloaded between layers. The largest
single ResNet-18 layer (512×512×3×3 ≈ 2.36 M weights) fits in 72 IMAs.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=… failures=…` and stops on a watchdog if the design hangs. With Verilator
5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/hurry_pkg.sv rtl/*.sv tb/tb_ima.sv --top-module tb_ima
./obj_dir/Vtb_ima
```

The chip testbenches share `tb/hurry_chip_tb_body.svh` and `tb/hurry_flow.svh`. The flow:

1. Program a Conv FB with random 8-bit weights and a Res FB with a residual.
2. Run `I_VMM` with `res_en`.
3. Overlap the next `I_VMM` with an `I_MAX`+ReLU on the first result.
4. Store the OR and run softmax.
5. Compare every number with a model computed in the testbench.

The flow runs in the first and last tile. The testbench counts the mechanisms it saw and
fails if one never happened:

- residual merges;
- ReLU max operations;
- softmax runs;
- cycles with the Max and array engines both busy;
- cycles a command was stalled.

Two chip testbenches use this flow:

- `tb_hurry_chip` runs a reduced chip (2 tiles, 2 IMAs, 64×64 arrays) in under a second.
- `tb_hurry_chip_full` runs the chip with every parameter at its default (16 tiles × 8 IMAs
  × 512×512). It takes about two minutes including the build.

To change a size, override the parameters of `hurry_chip` (`NTILE`, `NIMA`, `ROWS`, `COLS`,
`EDEPTH`) or of the block in question. The defaults live in `hurry_pkg`.
