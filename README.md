# Pixie: a level-pipelined virtual CGRA for image-processing data-flow graphs

Pixie is a coarse-grained reconfigurable array meant to sit on top of an
ordinary FPGA as an overlay. An application is not compiled to gates. It is
given as a data-flow graph whose nodes are arithmetic operations. Each node
is placed on a processing element (PE), and each edge is routed through a
virtual channel (VC). Changing the application changes only a few
configuration words: the operation of each PE and the select of each
channel multiplexer. The FPGA bitstream of the grid stays the same.

The grid is organised in **levels**. Every level is a row of identical PEs
and is one pipeline stage. Between two levels sits a virtual channel that
can route any result of the level above to any operand input of the level
below. A data-in channel at the top takes words from memory. A data-out
channel at the bottom hands results back. Data flows strictly downwards and
no level can be skipped. A value that has to cross a level goes through a PE
configured as a buffer (`BUF`). All PEs have the same hardware, so the
variety of operations ("heterogeneity") comes only from configuration.

This repository holds synthesizable SystemVerilog for that grid, for its
two building blocks, and for the floating-point PE variant. The design
follows the Pixie publication (Kulkarni, Stroobandt, Werner, Fricke,
Huebner: *Pixie: A heterogeneous Virtual Coarse-Grained Reconfigurable
Array for high performance image processing applications*). That text
describes the architecture rather than its signal-level details. Where it
is silent, this RTL makes its own choices, and the section
[Where this RTL departs from or adds to the publication](#where-this-rtl-departs-from-or-adds-to-the-publication)
lists them.

## How a computation moves through the grid

No PE has a global schedule. Every data word travels together with a
one-cycle **valid** pulse, and a PE fires once both of its operands have
pulsed. So only the first level needs an outside trigger, the `start` input.
Every level below synchronises itself on the valid pulses of the level above.

For one operation (one `start`), cycle by cycle:

| cycle  | what happens |
|--------|--------------|
| t      | `start` high; the memory words on `mem_in` are sampled into the data-in channel's input buffers |
| t+1    | the channel multiplexers route the words to the output buffers |
| t+2    | the level-1 PEs see both operands valid (state `AWAIT_DATA`) |
| t+3    | level-1 PEs compute (`PROCESS_DATA`) |
| t+4    | level-1 results are valid for one cycle (`VALID_DATA`) |
| t+6    | level-2 operands are valid (2 cycles through the virtual channel) |
| ...    | every further level adds 4 cycles |
| t+4L+2 | last-level results leave the data-out channel's output buffers |
| t+4L+3 | `mem_out_valid` pulses, the results sit in `mem_out`, `done` rises |

With the default 5 levels, a result appears 23 cycles after its `start`. A
PE needs 3 cycles per operand set (await, process, valid). A new `start`
may therefore follow every 3 cycles, and the grid then holds up to about 8
operations in flight. Results come out in order, one every 3 cycles.

A PE also accepts operands that arrive while it is still busy with the
previous set. It keeps them and fires on them next. So a level whose two
operand paths have equal depth never loses a token. The grid has no
back-pressure: the mapping must give both operands of a PE the same number
of levels. The edge-detection mapping below does this with `BUF` PEs.

## The processing element (`pe`)

```
          a, a_valid     b, b_valid
              |              |
         +----v----+    +----v----+
         | a reg   |    | b reg   |   loaded when the valid is high;
         | a_en    |    | b_en    |   a_en/b_en remember "has arrived"
         +----+----+    +----+----+
              |   both enabled?  |
              v                  v
   AWAIT_DATA --> PROCESS_DATA --> VALID_DATA --> AWAIT_DATA
                  result <= op(a,b)  result_valid = 1
```

The operation `op` is a static configuration input of type
`pixie_pkg::pe_op_e`:

| code | name   | result (two's complement, computed at max(2*IN_W, OUT_W) bits, low OUT_W bits kept) |
|------|--------|------------------------------------------|
| 0    | `NONE` | the PE never fires: no output and no valid pulse |
| 1    | `ADD`  | a + b |
| 2    | `SUB`  | a - b |
| 3    | `MUL`  | a * b (full product; OUT_W = 2*IN_W keeps all of it) |
| 4    | `DIV`  | a / b rounded toward zero; all ones if b = 0 |
| 5    | `GRE`  | 1 if a > b, else 0 |
| 6    | `EQU`  | 1 if a == b, else 0 |
| 7    | `BUF`  | a (the channel puts the same word on both inputs) |

Both inputs have the same width `IN_W`. The output width `OUT_W` is separate.
The output register holds its value until the next result. So a channel may
sample it at any time, but the valid pulse is what counts.

## The virtual channel (`vc`)

A channel with M predecessors and K outputs (two outputs per PE of the next
level: output `2p` is operand a of PE p, output `2p+1` is operand b) has
three parts:

1. **Input buffers**: one register per predecessor for the data word, plus
   the M-bit vector of their valid bits. Predecessor words may have
   different widths (`IN_WIDTHS`). Each is sign-extended to the internal
   width N = max(all input widths, output width).
2. **Multiplexers**: one M-to-1 multiplexer per output. It carries a data
   word *and its valid bit*, selected by a ceil(log2 M)-bit configuration
   word. Any predecessor may feed any number of outputs (fan-out). A select
   value of M or more gives zero with no valid.
3. **Output buffers**: one register per output, cut to `OUT_W` bits.

Latency is 2 cycles, and data and valid stay aligned. In the publication
the select words are constants that FPGA reconfiguration bakes into the
routing. Here they are ordinary inputs. A synthesis tool that sees them
tied to constants reduces the channel to wires and registers, which is the
same effect.

## The memory-side channels and the processor handshake

`data_in_channel` is a virtual channel whose predecessors are memory words
instead of PE results. Its valid inputs are all driven by `start`. A select
per first-level operand picks the memory word, so one word can feed several
PEs.

`data_out_channel` routes chosen last-level results to the result words
`mem_out[r]`. Each result word has its own holding register, a one-cycle
`mem_out_valid[r]` pulse, and an "arrived" flag. `cfg_out_en[r]` says which
results to wait for. `done` rises once every enabled result has arrived and
stays high until the processor pulses `fetch`. A result that arrives in the
same cycle as `fetch` counts towards the next `done`. A streaming consumer
can ignore `done` and take every `mem_out_valid` pulse instead.

## Configuring the grid (`pixie_vcgra`)

| port | size | meaning |
|------|------|---------|
| `cfg_in_sel[j]`     | 2*PE_MAX words of ceil(log2 NUM_MEM_IN) bits | memory word for first-level operand j |
| `cfg_pe_op[l][p]`   | NUM_LEVELS x PE_MAX `pe_op_e` | operation of PE p in level l |
| `cfg_vc_sel[k][j]`  | (NUM_LEVELS-1) x 2*PE_MAX words of ceil(log2 PE_MAX) bits | predecessor (PE index in level k) for operand j of level k+1 |
| `cfg_out_sel[r]`    | NUM_MEM_OUT words | last-level PE for result r |
| `cfg_out_en[r]`     | NUM_MEM_OUT bits | result r is awaited before `done` |

The configuration must be stable while data is in the grid.

**Example: the edge-detection mapping** (default grid, 5 x 9). For the pixel
at (y, x), memory word `3(j+1)+(i+1)` holds `pixel[y-j][x-i]`, and word
`9+3(j+1)+(i+1)` holds the kernel coefficient `K[1+j][1+i]`, for
i, j in {-1, 0, 1}:

| level | PE | op | a from | b from |
|-------|----|----|--------|--------|
| 1 | 0..8 | MUL | word p | word 9+p |
| 2 | 1, 3, 5, 7 | ADD | PE 0, 2, 4, 6 | PE 1, 3, 5, 7 |
| 2 | 8 | BUF | PE 8 | PE 8 |
| 3 | 2 / 6 | ADD | PE 1 / 5 | PE 3 / 7 |
| 3 | 8 | BUF | PE 8 | PE 8 |
| 4 | 4 | ADD | PE 2 | PE 6 |
| 4 | 8 | BUF | PE 8 | PE 8 |
| 5 | 6 | ADD | PE 4 | PE 8 |
| out | result 0 | | PE 6 | |

This is a true convolution: the window pixel in row r, column c meets the
mirrored coefficient K[2-r][2-c], the pairing the publication's task graph
shows (for example pixel (0,0) with coefficient (2,2)).

All other PEs are `NONE`. The ninth product is carried down the right-hand
column by `BUF` PEs until the final addition, so both operands of every
adder arrive in the same cycle.

## Parameters and grid shapes

| parameter | default | meaning |
|-----------|---------|---------|
| `NUM_LEVELS` | 5 | levels of PEs (at least 2) |
| `PE_MAX` | 9 | size of the configuration arrays; the widest level |
| `LEVEL_PES` | 9 per level | PEs in each level (packed, level 0 in the low byte) |
| `DATA_W` | 16 | width of the internal buses; at least every level width |
| `LEVEL_IN_W`, `LEVEL_OUT_W` | 16 per level | PE operand and result width per level |
| `NUM_MEM_IN`, `MEM_W` | 18, 16 | memory words into the grid and their width |
| `NUM_MEM_OUT` | 9 | result words |
| `FLOAT_PE` | 0 | 1 builds every PE as the floating-point PE |

The defaults give the 45-PE edge-detection grid. Levels may hold different
numbers of PEs, for example an inverted triangle 4-2-1 for a 4-term sum.
They may also have different widths, for example 8-bit pixels into
multipliers with 16-bit products; the channels adapt the widths. The
publication's 4 x 4 grid is `NUM_LEVELS=4, PE_MAX=4`. Synthesised at its
defaults, the grid has about 5300 flip-flop bits. 45 multipliers and 45
dividers dominate its logic; a configuration that is fixed at synthesis
removes all unused operators.

## The floating-point PE (`pe_fp`)

The floating-point PE has the same controller and timing as the fixed-point
PE. Its arithmetic unit adds or multiplies numbers in the FloPoCo-style
35-bit format used by the publication: a 6-bit exponent and a 26-bit
fraction.

```
 34 33 | 32   | 31 .. 26 | 25 .. 0
  exn  | sign | exponent | fraction      exn: 00 zero, 01 normal, 10 inf, 11 NaN
```

The exponent is biased by 31, and all 64 exponent values are normal numbers.
There are no subnormals: underflow flushes to zero and overflow gives
infinity. The adder aligns both significands exactly in a 92-bit register.
It has room for any exponent difference, so nothing is lost before the
single rounding step. The adder then normalises with a leading-one search
and rounds to nearest, ties to even. The multiplier rounds its exact 54-bit
product the same way. Supported operations are `ADD`, `MUL`, `BUF` and
`NONE`; other codes leave the PE idle. `FLOAT_PE=1` on the grid needs every
level width, `DATA_W` and `MEM_W` set to 35.

## Where this RTL departs from or adds to the publication

Taken from the publication:
- the level/channel structure and the memory-interface channels
- start-driven first level, valid-driven synchronisation below it, and
  "results ready" notification
- the PE's three states and its operation set
- NONE and BUF behaviour
- equal operand widths with a separate output width
- the channel's input buffers, per-output data-and-valid multiplexers and
  output buffers
- N = max of widths, M = number of predecessors, bw = ceil(log2 M)
- the 5 x 9 edge-detection grid and its operation layout
- the 6/26 floating-point format

This design's own choices:
- **Configuration is ordinary input ports.** The publication bakes the PE
  operations and channel selects into the FPGA configuration memory, using
  parameterised reconfiguration with tunable LUTs and connections and a
  specialisation step. That step belongs to the FPGA tool flow and has no
  RTL. Tying the configuration ports to constants gives the equivalent
  specialised circuit.
- **Widths and number formats.** The fixed-point data is 16-bit two's
  complement integers, with 18 memory words in and 9 results out. The
  publication gives no fixed-point width or format.
- **Cycle timing.** PE latency 2, channel latency 2, one operand set per 3
  cycles, 4L+3 cycles per operation. The publication gives no cycle counts.
- **Operand capture.** A word is taken when its valid is high, and early
  operands are kept for the next round.
- **Division and comparison results.** Division by zero gives all ones;
  comparisons give 0 or 1.
- **The `done`/`fetch` handshake** and the per-result enables of the
  data-out channel.
- **Floating-point operators.** They are single-cycle and designed here,
  with round-to-nearest-even and FloPoCo-like exception rules. The
  publication generates its operators with the FloPoCo library and does not
  describe their insides.
- **Reset.** Asynchronous, active low.

Not built:
- the microprocessor that drives the grid (its signals are top-level ports)
- the reconfiguration machinery
- the experimental multiply-accumulate PE, which the publication mentions
  but cannot map graphs onto and whose accumulator control it does not
  describe
- the "conventional" PE, VC and grid with settings registers on a bus,
  which the publication only uses as a comparison baseline

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it shows |
|-----------|---------------|
| `tb_pe` | all operations against a 64-bit model, skewed operand arrival, 2-cycle latency, one-cycle valid, held output, NONE silent; 16/16 and 8/16-bit PEs |
| `tb_vc` | random routing with 8/12/16-bit inputs, sign extension, narrowing, out-of-range selects, fan-out, 2-cycle alignment of data and valid |
| `tb_data_in_channel` | distribution of 18 memory words, start as valid |
| `tb_data_out_channel` | held results, `done` exactly when all enabled results arrived, `fetch` |
| `tb_pe_fp` | 3000 random add/mul cases plus special values against an exact integer model with its own rounding; directed cases against real arithmetic |
| `tb_pixie_vcgra` | default grid: a 10 x 10 image through the horizontal and vertical Sobel kernels, one pixel every 3 cycles, against a direct convolution; 23-cycle latency, `done`/`fetch`; two copies of a small graph plus DIV and EQU; counts that every operation, pipelined overlap, fan-out and buffering happened |
| `tb_pixie_vcgra_variants` | a 4-2-1 triangular grid with mixed widths (dot product), a floating-point grid computing x*y + z*w, and the 4 x 4 grid running two copies of the small graph |

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/pixie_pkg.sv tb/tb_pixie_vcgra.sv --top-module tb_pixie_vcgra
./obj_dir/Vtb_pixie_vcgra
```

Replace the testbench name for the others. `-y rtl` lets Verilator find each
module in `rtl/<name>.sv`. The package must be listed first. The full-size
grid test runs in well under a second.

## Files

- `rtl/pixie_pkg.sv`: operation and state types, select-width helper
- `rtl/pe.sv`: fixed-point PE
- `rtl/pe_fp.sv`: floating-point PE
- `rtl/vc.sv`: virtual channel
- `rtl/data_in_channel.sv`: memory-interface channel into the grid
- `rtl/data_out_channel.sv`: memory-interface channel out of the grid
- `rtl/pixie_vcgra.sv`: the grid (top level)
- `tb/`: the testbenches listed above
