# FlexNN tile: a dataflow-flexible sparse INT8 CNN accelerator in SystemVerilog

The tile runs convolution-like layers on a 16 x 16 array of processing
elements (PEs). The PEs never spend a cycle on a multiplication where either
operand is zero. The idea is that one piece of hardware can be scheduled many
ways. Each layer carries a software-written *descriptor* that fixes four
things:

- how operands are spread over the array;
- which compute template each PE uses;
- how partial sums are reduced across a column;
- how outputs are regrouped and re-compressed on the way back to memory.

Nothing in the datapath is tied to one loop order.

Data stays compressed everywhere except inside the multipliers. A 16-byte
group of activations or weights is stored as a 16-bit *bitmap*, with bit k set
when dense byte k is non-zero, followed by the non-zero bytes packed from
byte 0.

## Data flow through one layer

1. **SRAM** (`sram`). The SRAM is 1.5 MB in 16 banks of 3072 lines of 32 bytes.
   - Line address bits [3:0] pick the bank.
   - A stored operand line is {14 unused bytes, 16-bit bitmap, 16 packed bytes}.
   - Reads are registered, with one cycle of latency.
2. **Load path** (`load_path`, `circular_buffer`, `sparse_byte_select`).
   - A load FSM visits every destination subbank: 16 columns x 16 PEs x 4 subbanks.
   - Each chunk's SRAM line is an affine function of the round, column, PE and subbank (`ld_pat_t`).
   - A stride and byte offset of zero along a dimension means the chunk is shared along it. It is then fetched once and multicast with a column/PE mask, which gives unicast, multicast or broadcast.
   - Weights (FL) are shared across columns. Activations (IF) are unicast unless the descriptor says otherwise.
   - Fetched lines wait in a small circular buffer.
   - The sparse byte select turns a dense byte window (offset, length) into the matching compressed sub-chunk, using prefix popcounts of the bitmap.
   - The load path sustains one SRAM line per cycle.
3. **PE** (`vpe`, `csal`, `cag`). Each PE holds four IF and four FL subbanks of 16 bytes with their bitmaps, plus a 16 x 32-bit OF register file.
   - All of this storage is double buffered. Loads fill the shadow half while the active half computes. `PE_SWAP` exchanges them.
   - **VxV template:** lane i multiplies IF subbank i with FL subbank i. An adder tree sums the four lanes into one OF entry.
   - **MxM template:** four rounds. In round r every lane uses IF subbank r against its own FL subbank, and accumulates into OF[4r+i].
   - **Sparsity:** `csal` ANDs the two bitmaps of each lane. `cag` then walks the set bits, one per cycle, and emits the compressed read address of each operand (the popcount of the bitmap below that bit). So a lane takes popcount(IF AND FL) cycles, not 16.
   - **ELTWISE** adds IF subbanks 0 and 1 byte by byte. **POOL** takes the maximum of the four IF subbanks.
   - **PE_ACCUM** adds an external psum, or the left (PSumX) or lower (PSumY) neighbour's OF entry.
   - **PE_SNAPSHOT** moves the OF RF to a shadow copy for draining.
4. **Column reduction** (`flextree`). A four-level registered adder tree over the column's 16 PEs. The descriptor's input-channel partition IC_P sets how many PEs share one output, and so which level is tapped:

   | IC_P   | Level tapped | Taps |
   |--------|--------------|------|
   | 16     | 4            | 1    |
   | 8      | 3            | 2    |
   | 4      | 2            | 4    |
   | 1 or 2 | 1            | 8    |

   - PEs beyond IC_P in a group are masked to zero.
   - IC_P = 1 reads each entry twice, once for each half of the PE pairs.
5. **Local drain** (`local_drain`, `ppm`). Four post-processing modules (PPMs) each serve four PEs' worth of outputs.
   - A PPM computes `sat8(relu?(((psum + bias) * scale) >>> shift))`.
   - Each PPM writes four entries of a 16-byte column buffer, which is sent when full or at the end of the layer.
6. **Super-column concatenation** (`scdc`). Four columns form a super column. Their 16-byte chunks become one 514-bit packet {2-bit super-column ID, 4 x 16 bytes}.
7. **Global drain** (`global_drain`, `sparse_encoder`).
   - A 256-byte staging buffer holds one packet per super column: 16 rows, one row per column.
   - Four drain multiplexers move rows into 64 drain banks of 16 bytes. They rotate each row so that `z_bytes` bytes from 16/z_bytes consecutive columns form one 16-byte *Z-line*, all output channels of one point, and write only the valid bytes.
   - Four sparse encoders compress full banks.
   - Four write-combining buffers emit one SRAM line per cycle at `of_base + Z-line number`.

`flexnn_top` wires all of this together with a layer controller:

1. clear, then load round 0;
2. swap, then compute while the next round loads;
3. repeat step 2 for `n_rounds` rounds;
4. optionally accumulate;
5. snapshot and drain;
6. flush, then raise `done`.

The host writes the descriptor words through `cfg_*`, with biases at words 64..79. It reaches the SRAM through `host_*` while `busy` is low.

## What follows the published design and what is this implementation's own

**Taken from the published design:**
- the 16 x 16 array of 4-lane PEs;
- the RF sizes: 4x16 B IF, 4x16 B FL, 2 B bitmaps per subbank, 16x4 B OF;
- bitmap compression and the bitmap-AND sparsity walk;
- the VxV and MxM templates;
- the 4-level FlexTree tapped by IC_P;
- four PPMs per column;
- the 16-byte column buffer and the 4-column concatenator;
- the 256-byte staging buffer, 4 drain muxes, 64 drain banks, 4 sparse encoders and 4 write-combining buffers;
- the 16-bank SRAM with 32-byte ports;
- descriptor-driven load with unicast, multicast and broadcast.

**Choices made here** (each is also listed at the top of its file):
- the SRAM line format;
- the affine address pattern;
- the OF entry numbering in MxM;
- the tap-to-PPM placement;
- the PPM arithmetic;
- the Z-line / bank numbering of the global drain;
- the controller sequence;
- max pooling over the four subbanks;
- one pair per cycle in the CAG, with one idle cycle per walk.

**Not built:**
- FP16/BF16 arithmetic;
- DRAM and the host;
- separate NoC routers, whose patterns are folded into the load path masks and the drain wiring;
- merging compressed lines across Z-lines;
- overlap of one layer's drain with the next layer's compute.

The paper lists 8 MACs per PE in one place and four lanes elsewhere. Four are built.

## Timing facts checked by the testbenches

- **CAG:** start to done is popcount(CSB) + 2 cycles.
- **PE, VxV:** busy for max-lane popcount + 2 cycles.
- **PE, MxM:** round 0 takes P0 + 2 cycles; later rounds take Pr + 3.
- **FlexTree:** level L is valid L cycles after the input.
- **PPM:** one cycle.
- **Load path:** one line per cycle, plus at most 6 cycles.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/flexnn_pkg.sv rtl/vpe.sv tb/tb_vpe.sv --top-module tb_vpe
obj_dir/Vtb_vpe
```

`tb_flexnn_top` runs six layers end to end on the full-size tile against a reference model. It also reports how often each mechanism occurred:

- load/compute overlap and compute stalls;
- skipped zero pairs;
- VxV, MxM, ELTWISE and POOL;
- every IC_P mode;
- ReLU and saturation;
- drain rotation and compression;
- neighbour and external accumulation.

Build time for the full tile is about 10 minutes. The run takes about 15 seconds.

## Known limits

- `n_rounds` must be at least 1.
- `z_bytes` must be a power of two.
- The PE array stays idle while a layer drains.
- The neighbour-accumulate pass adds each PE's left or lower neighbour once per OF entry. A full-row reduction needs several layers or passes.
- Synthesis of the full tile by yosys' SystemVerilog front end takes longer than 10 minutes, because the front end flattens all 256 PEs into one module. Individual blocks synthesise quickly.
