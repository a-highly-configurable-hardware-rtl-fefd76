# VTA-style DNN inference accelerator in SystemVerilog

A DNN inference accelerator splits work into three units: load, compute and store. They run
concurrently and are kept in order only by explicit dependency tokens that the compiler places in
the instruction stream. Compute is a 16x16 8-bit matrix-vector engine plus a vector ALU, driven by
small loops of micro-ops over on-chip scratchpads. This RTL follows the Versatile Tensor
Accelerator (VTA) as described in "A Highly Configurable Hardware/Software Stack for DNN Inference
Acceleration", including the enhancements described there:

- a GEMM core pipelined to one operation per cycle (II = 1);
- an ALU pipelined to II = 1 with an immediate operand and II = 2 with two register operands;
- new ALU operations: element-wise 8-bit multiply (for depthwise convolution) and clip;
- a load unit with a selectable pad value (zero, or the most negative value for max pooling);
- a memory engine (VME) with five tagged read clients whose bursts can complete out of order;
- a data bus that is configurable in width (64 to 512 bits).

Default configuration: BATCH = 1, BLOCK_IN = BLOCK_OUT = 16 (256 8-bit MACs per cycle),
8192-entry input, weight, accumulator and micro-op scratchpads (13 address bits), a 64-bit DRAM
bus, 128-bit instructions and 64-bit micro-ops.

## Architecture

```
            host: start, insn_addr, insn_count -> done, cycles
                              |
                           fetch ----------------------------+
              +---------------+----------------+              |
         LOAD cmd q      COMPUTE cmd q      STORE cmd q       |
              |               |                 |             |
         load_module <-> compute_module <-> store_module      |
           (LD->CMP, CMP->LD)   (CMP->ST, ST->CMP) token queues|
           |      |         |   |   |   |           |         |
       input   weight      uop acc gemm alu      output       |
       buffer  buffer     cache regfile           buffer       |
           \      \          \   \                  /         |
            +------+----------+---+---- vme --------+---------+
                                         |
                           AXI-style read (tagged) / write
                                         |
                                       DRAM (outside)
```

- **fetch** reads the instruction stream in bursts into a reorder buffer. It sends each
  instruction, in program order, to one of three command queues:
  - LOAD of the input or weight buffer goes to the load queue;
  - STORE goes to the store queue;
  - everything else goes to the compute queue (micro-op and accumulator loads, GEMM, ALU, FINISH).
- **load_module** runs tensor loads into the input and weight buffers.
- **compute_module** holds the register file (accumulators) and the micro-op cache. It runs micro-op
  and accumulator loads, GEMM and ALU instructions, and writes the 8-bit truncation of every result
  into the output buffer.
- **store_module** copies output-buffer tiles to DRAM.
- **Dependency token queues.** Four queues order the three modules: LD->CMP, CMP->LD, CMP->ST and
  ST->CMP. Each instruction has pop_prev, pop_next, push_prev and push_next bits. A module waits
  for and removes a token before executing, and inserts one after executing. This lets the
  compiler double-buffer loads against compute.
- **vme** arbitrates five read clients (fetch, micro-op, input, weight, accumulator) with fixed
  priority.
  - Each burst gets a free tag from a tag array, which remembers the client and the client's
    metadata.
  - Returning beats are routed by tag, so bursts may complete in any order.
  - The store module is the single write client.

### Tensor load (LOAD)

A LOAD moves a 2-D tile: `y_size` rows of `x_size` tensors, with rows `x_stride` tensors apart in
DRAM. In the scratchpad the tile is surrounded by `y_pad_0/1` rows and `x_pad_0/1` columns of
padding. Three parts work at once:

- a command generator, which sends one request per row (split into bursts of at most 256 beats);
- an in-flight counter;
- a reader that writes returned beats at the index carried in the request metadata.

A padding filler writes pad tensors, but only in cycles when no data beat arrives, so it never
competes with the reader for the write port. Padding runs at one tensor per cycle.

There are two transfer modes:

- **Narrow mode** (tensor wider than the bus): each beat is one block of a tensor.
- **Wide mode** (bus wider than the tensor): several tensors per beat, written through lanes, with
  lanes outside the request masked off.

### GEMM (II = 1)

An index generator walks `iter_out x iter_in x [uop_bgn, uop_end)`. The pipeline then runs:
micro-op read, address adders and input/weight reads, matrix-vector product, then accumulator
read–add–write. The accumulator scratchpad forwards a write to a read of the same index in the
same cycle; this is the "=" bypass of the GEMM pipeline. An instruction of N steps takes N + 4
cycles.

### ALU

The ALU operations are MIN, MAX, ADD, SHR, MUL and CLIP:

- SHR is an arithmetic right shift; a negative amount shifts left.
- MUL is the signed product of the low 8 bits of each operand.
- CLIP clamps to [-b, +b].

Operands come either from a 16-bit immediate or from a second register-file entry. The register
file has one read port, so:

- with an immediate, N steps take N + 3 cycles (II = 1);
- with a register operand, N steps take 2N + 3 cycles (II = 2);
- a reset needs no read and runs at II = 1.

## Instruction formats (128 bits, LSB first)

All instructions start with `opcode[2:0]`, followed by the dependency bits
`pop_prev, pop_next, push_prev, push_next`.

Opcodes: LOAD 0, STORE 1, GEMM 2, FINISH 3, ALU 4.

| Instruction | Fields after the dependency bits, LSB first |
|---|---|
| LOAD / STORE | mem_type[2:0], sram_base[12:0], dram_base[31:0], y_size[15:0], x_size[15:0], x_stride[15:0], y_pad_0, y_pad_1, x_pad_0, x_pad_1 (4 bits each), pad_sel[3:0] |
| GEMM | reset, uop_bgn[12:0], uop_end[13:0], iter_out[9:0], iter_in[9:0], dst_fo, dst_fi, src_fo, src_fi, wgt_fo, wgt_fi (11 bits each) |
| ALU | as GEMM up to src_fi, then alu_op[2:0], use_imm, imm[15:0] |

- **Memory types:** UOP 0, WGT 1, INP 2, ACC 3, OUT 4.
- **LOAD / STORE addresses:** DRAM addresses are in tensor units of the target buffer.
- **Micro-op** (64 bits): dst[12:0], src[12:0], wgt[12:0].
- **ALU ops:** MIN 0, MAX 1, ADD 2, SHR 3, MUL 4, CLIP 5.

The exact formats are declared in `rtl/vta_pkg.sv`.

## Files

| File | Contents |
|---|---|
| `rtl/vta_pkg.sv` | configuration constants, opcodes, instruction and micro-op structs |
| `rtl/vta_top.sv` | top level: host port, DRAM ports, all units and queues |
| `rtl/fetch.sv` | instruction fetch and dispatch |
| `rtl/sync_fifo.sv` | command queues |
| `rtl/dep_queue.sv` | dependency token queues (counters) |
| `rtl/tensor_sram.sv` | scratchpad with block/lane writes, one read port, write-to-read forwarding |
| `rtl/vme.sv` | memory engine: arbiter, tags, out-of-order read return, write path |
| `rtl/tensor_load.sv` | 2-D tiled load with padding, narrow and wide modes |
| `rtl/load_module.sv` | input/weight loads with token handling |
| `rtl/tensor_gemm.sv` | II = 1 GEMM pipeline |
| `rtl/tensor_alu.sv` | ALU pipeline, II = 1 / II = 2 |
| `rtl/compute_module.sv` | register file, micro-op cache, GEMM/ALU sequencing |
| `rtl/store_module.sv` | output-buffer to DRAM, narrow (bursts) and wide (strobed beats) modes |

Testbenches live in `tb/`: one `tb_<module>.sv` for each module. Helpers:

- `dram_model.sv`: an AXI-style DRAM whose read latency returns bursts in random order with
  random gaps;
- `tl_harness.sv` and `st_harness.sv`: the load and store tests, instantiated at several widths.

Each testbench:

- checks its results against a reference model;
- has a watchdog;
- ends with `TB_RESULT checks=N failures=M`.

Rate checks:

- GEMM: N steps must take N + 4 cycles.
- ALU: N + 3 cycles with an immediate, 2N + 3 with a register operand.
- Padding: one tensor per cycle.
- Fetch must keep up with memory.

`tb_vta_top` runs the design at its default parameters (no overrides). It runs a two-round
program: a padded tile GEMM, a chain of ALU ops, a store, then a second tile with max-pool padding
that reuses the buffers under dependency tokens, and finally FINISH. It compares both output
regions in DRAM byte for byte with an instruction-level reference model. It counts 24 mechanisms
and fails if any of them never happens:

- routing to each queue;
- pushes on all four token queues;
- token stalls;
- micro-op, accumulator and weight loads;
- GEMM and GEMM-reset steps;
- every ALU op, with immediate and register operands;
- accumulator forwarding;
- zero and most-negative padding;
- the padding filler yielding to data;
- out-of-order reads;
- several reads in flight;
- store bursts;
- FINISH.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
  rtl/vta_pkg.sv tb/tb_vta_top.sv --top-module tb_vta_top   # or tb_conv_layer, tb_<module>
obj_dir/Vtb_vta_top
```

## Host interface

1. Write the instruction stream (16 bytes per instruction, 8-byte aligned) and the data into DRAM.
2. Pulse `start` with `insn_addr` (byte address) and `insn_count`.
3. Wait for `done`. It rises when a FINISH instruction completes and stays high until the next
   `start`.

`cycles` counts clock cycles from `start` to FINISH. Make FINISH wait for the last store by
giving it `pop_next`, and the last store `push_prev`.

## Workloads

The design is sized like the published default configuration. At the default sizes:

- The ResNet-18/34/50/101 layers need tiling: the largest 3x3x512x512 weight set is 9216 weight
  tensors against 8192 entries. With tiling they fit the scratchpads.
- So do the MobileNet 1.0 pointwise layers (at most 4096 weight tensors).
- MobileNet depthwise layers map onto ALU MUL/ADD at II = 2.
- Pooling maps onto ALU MAX/ADD/SHR with most-negative padding.

These figures come from standard layer shapes and are not workloads that were run.

`tb_conv_layer` runs one ResNet-style layer slice end to end at the default configuration:

- a 3x3, stride-1, pad-1 convolution on a 6x6 map with 32 input and 32 output channels;
- the LOAD padding supplies the convolution border;
- one GEMM uses a micro-op loop over (x, input block, ky, kx) and affine loops over output block
  and row (1296 steps);
- ALU SHR, MAX 0 and CLIP 127 requantise the result, which is then stored.

The stored bytes are compared with a direct convolution computed from DRAM, and both GEMMs are
checked for one step per cycle. The whole program takes 3739 cycles. To run other layer shapes,
change the `H`, `CIB` and `COB` localparams. Larger layers take much longer to simulate; a 14x14,
64-channel slice did not finish within 10 minutes.

## Differences from the published design, and what is not built

- **Not built:**
  - DRAM and its AXI controller (a behavioural model is in `tb/`);
  - SRAM macros and physical design (tiling, wire pipelining);
  - the host compiler/runtime (TVM, tiling parameter search);
  - the trace manager and CI infrastructure.
- **This design's own choices:**
  - the instruction bit layout (VTA's field set, but widened to a 64-bit micro-op and 13-bit
    indices);
  - queue depths (8 each) and the tag count (8);
  - the metadata format;
  - a fixed-priority arbiter;
  - a fetch reorder buffer of 16 beats.
- **Sequential compute.** One instruction executes at a time inside compute. GEMM and ALU do not
  overlap each other, but load, compute and store overlap.
- **Store path.** The store path has one write burst open at a time.
- **Padding.** Only the input buffer load uses padding in practice. Any non-zero `pad_sel` selects the
  most negative pad value.
- **Configurations not simulated.** Configurations other than the default were not simulated
  end to end. The parameterisation covers BATCH, BLOCK_IN/OUT, scratchpad depths and bus widths.
  `tensor_load` and `store_module` were tested at 64- and 256-bit buses.
- **Accumulator loads.** The ACC load fills the register file only. It does not also write the
  output buffer.
