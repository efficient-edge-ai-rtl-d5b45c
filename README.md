# Gemmini-style CNN accelerator with DSP-packed systolic array

This is a SystemVerilog model of a Gemmini-style matrix-multiplication accelerator for int8 CNN
inference on an FPGA. It is set up the way the accelerator is configured for a Zynq UltraScale+
edge device:

- a 32x32 weight-stationary systolic array, where every pair of neighbouring processing elements
  (PEs) shares one DSP48E2-shaped multiply-add;
- a 512 KiB two-port scratchpad with a read delay of 8 cycles;
- a 128 KiB accumulator of 32-bit sums;
- float16 output scaling with ReLU/ReLU6;
- a DMA that keeps up to 32 memory requests in flight;
- load, execute and store controllers that run independently, ordered by a reorder buffer;
- a state machine that expands one tiled matrix-multiplication instruction into the individual
  load, compute and store commands.

The host CPU, the caches, the coherency port, the TLB and DRAM are outside the design (see
"Not built").

## Block diagram

```
 loop_cmd (CISC) ─► loop_matmul ─┐
 cmd (RISC-type) ────────────────┴► reorder_buffer ──► load_controller ──► dma ◄──► memory port (mem_req/mem_resp)
                          │   ▲            (MVIN)             │  ▲
                          │   │ done                          ▼  │
                          ├──► execute_controller ◄── scratchpad (2 ports, 16384 x 256 bit)
                          │        │ (COMPUTE)   ▲ port1   ▲ port0 (DMA writes)
                          │        ▼             │
                          │   systolic_array (32 x 16 packed_pe)
                          │        │
                          │        ▼
                          │   accumulator (1024 x 32 x 32 bit)
                          │        │
                          └──► store_controller ── output_scaler ──► dma (writes)
                                (MVOUT)
```

| File | Block |
|---|---|
| `rtl/gemmini_pkg.sv` | sizes, command and activation types |
| `rtl/packed_pe.sv` | two PEs on one DSP48E2-shaped pre-add/multiply/add |
| `rtl/systolic_array.sv` | 32 rows x 16 packed PEs, input skew and output de-skew |
| `rtl/scratchpad.sv` | two-port int8 row memory, fixed read delay |
| `rtl/accumulator.sv` | 32-bit row memory with pipelined read-modify-write |
| `rtl/output_scaler.sv` | int32 x float16 scale, round half to even, saturate to int8, ReLU/ReLU6 |
| `rtl/dma.sv` | 32-tag request tracker, out-of-order responses |
| `rtl/reorder_buffer.sv` | dependency checks between the three command queues |
| `rtl/load_controller.sv` | MVIN: DRAM to scratchpad |
| `rtl/execute_controller.sv` | COMPUTE: weight preload, activation streaming, accumulator writes |
| `rtl/store_controller.sv` | MVOUT: accumulator (scaled) or scratchpad to DRAM |
| `rtl/loop_matmul.sv` | CISC-type tiled matmul: expands one instruction into RISC-type commands |
| `rtl/gemmini_top.sv` | the accelerator |

## Two multiplications per DSP

Each `packed_pe` holds the weights of two neighbouring columns, w0 and w1. It multiplies both by
the same activation a0 in one DSP48E2-shaped datapath, using the port layout of the DSP
primitive:

- A port (30 bits): w0 placed at bits 26..19, so it carries w0·2^19.
- D port (27 bits): w1 at bits 7..0, sign-extended.
- Pre-adder (27 bits): AD = w0·2^19 + w1.
- B port (18 bits): the activation a0.
- C port (48 bits): the two partial sums from the PE above, packed as ps0·2^19 + ps1.
- P = AD·a0 + C = (a0·w0 + ps0)·2^19 + (a0·w1 + ps1).

The lower 18 bits of P are the new ps1. The upper sum is recovered exactly as
ps0' = (P − signext(P[17:0])) >>> 19. The subtraction removes the borrow that a negative lower
field leaves in the upper field. Both sums are 18 bits wide, which is the array's output width.

Limits of the packing:

- Weights must be in −127..127. With w0 = −128 and a negative w1, the 27-bit pre-adder would
  overflow. Symmetric int8 quantisation never produces −128.
- A column sum outside ±2^17 wraps, as an 18-bit output would. Over 32 rows of int8 products this
  only happens for extreme inputs.

## Dataflow and timing

**Systolic array**
- Weights are stationary. They are shifted in from the top, one row per cycle, bottom row first,
  so weight loading takes 32 cycles.
- One activation row (32 int8 values) enters per cycle. The array delays row k by k cycles on the
  way in, and delays each output column by the matching amount on the way out. Rows go in and
  come out as plain, unskewed vectors.
- Latency from an activation row in to its 32 results out is DIM + DIM/2 − 1 = 47 cycles. Each
  packed PE passes the activation two columns on per register.
- New weights may only be shifted in once the array is empty. An assertion checks this.

**Scratchpad**
- 16384 rows of 32 bytes (512 KiB).
- Port 0 takes DMA writes. Port 1 serves reads for the execute and store controllers, with the
  execute controller first.
- Every read answers exactly 8 cycles after its request.

**Accumulator**
- 1024 rows of 32 x 32-bit sums (128 KiB).
- A write either overwrites a row or adds to it. The addition is a two-stage read-modify-write:
  a row still in the pipeline is forwarded, so writes to the same row in back-to-back cycles add
  up correctly.
- Reads answer 2 cycles after the request.

**Output scaler**
- Multiplies each int32 sum by a float16 scale, rounds half to even and saturates to int8, in
  one cycle.
- Then applies no activation, ReLU, or ReLU6 with a programmable upper limit.

**DMA**
- Moves one 32-byte row per request.
- Keeps up to 32 requests in flight, each with its own tag. Responses may return in any order.
- With all tags in use it stalls new requests and raises `dma_stall`.

**Execute controller, COMPUTE of R rows**
- Optional weight preload: 32 scratchpad reads, bottom row first, then 32 shifts.
- Then R activation rows stream through the array, one per cycle.
- Each result row goes to the accumulator, either overwriting or accumulating.
- From acceptance to done takes (preload ? 32 : 0) + R + 8 + 47 + 4 cycles.
- Without preload, the weights already in the array are reused.
- Consecutive COMPUTE commands do not overlap: the next one starts after the previous one has
  drained. This keeps the controller simple, at the cost of throughput on short commands (see
  Workloads).

**Load and store controllers**
- Load issues one DMA read per cycle, at DRAM address base + i·stride, when a tag is free.
- Store reads one row at a time, from the accumulator through the scaler or straight from the
  scratchpad, and hands it to the DMA as a write.
- Both report done when the last response or acknowledgement has come back.

**Reorder buffer**
- 16 entries.
- Each command is decoded into the scratchpad/accumulator row ranges it reads and writes.
- A command is issued to its controller when:
  - the commands before it in the same queue have issued (each queue is in order);
  - no older, unfinished command in another queue writes what it reads or writes;
  - no older, unfinished command in another queue reads what it writes.
- Loads, computes and stores on independent data run at the same time.

## Command set

All commands share the `cmd_t` struct in `gemmini_pkg`:

| Opcode | Fields used | Effect |
|---|---|---|
| `OP_CONFIG_LD` | `stride` | DRAM row stride for MVIN (bytes, default 32) |
| `OP_CONFIG_ST` | `stride`, `scale` (float16), `act`, `relu6_max` | stride and output scaling for MVOUT |
| `OP_MVIN` | `dram_addr`, `local_addr.row`, `rows` (1..63) | DRAM rows to scratchpad rows |
| `OP_MVOUT` | `dram_addr`, `local_addr` (`is_acc` selects accumulator/scratchpad), `rows` | rows to DRAM; accumulator rows are scaled and activated |
| `OP_COMPUTE` | `a_addr`, `b_addr`, `local_addr` (accumulator row, `accumulate`), `rows`, `preload` | C[rows] (+)= A[rows] x B, where B is the 32x32 tile at `b_addr` |

A 32x32 tile of B is stored as 32 scratchpad rows, one row of B per scratchpad row.

### CISC-type matmul

A second command port takes a `loop_cmd_t` instruction: C = act(scale · (A x B)). The
instruction gives:
- the DRAM addresses and row strides of A, B and C;
- the size in 32x32 tiles, m x k by k x n (1..15 each);
- the output scale and activation.

`loop_matmul` turns it into RISC-type commands, one per cycle, which take precedence over host
commands at the reorder buffer. The sequence is:
1. A CONFIG_LD, then an MVIN for every A tile, into scratchpad rows (i·k + kk)·32.
2. A CONFIG_LD, then an MVIN for every B tile, into the rows after A.
3. The COMPUTEs. Output column tile is the outer loop, k next, and row tile innermost. Each B tile
   is preloaded once and reused for every row tile. The first k tile overwrites the
   accumulator; the later ones accumulate.
4. A CONFIG_ST, then an MVOUT for every C tile.

An m x n x k instruction therefore issues 2 + mk + kn + mnk + 1 + mn commands. The whole
problem must fit on chip: (mk + kn) tiles of scratchpad and mn tiles of accumulator, checked by
an assertion. The reorder buffer overlaps the loads, computes and stores wherever the data
allows.
A larger matrix product is a sequence of MVIN, COMPUTE and MVOUT commands over 32x32 tiles. The
test program in `tb/gemmini_top_tb.sv` shows one.

## Where the design follows its source and where it chooses

Taken from the published configuration:
- array size 32x32;
- scratchpad 512 KiB, two ports, read delay 8;
- accumulator 128 KiB;
- 18-bit array outputs;
- 32 memory requests in flight;
- the DSP48E2 packing layout, down to the bit positions;
- float16 scale factors;
- ReLU6;
- decoupled load/execute/store controllers behind a reorder buffer.

This design's own choices, where the source does not say:
- the command encoding, including the CISC matmul instruction and its loop order;
- a reorder buffer of 16 entries and its dependency rule (row-range overlap);
- one register stage per packed PE;
- weight shifting as the preload method;
- the scratchpad port sharing and priority;
- the accumulator forwarding;
- round half to even in the scaler;
- the store controller reading one row at a time;
- the −127..127 weight range that the packing needs;
- synchronous active-high reset everywhere.

Each file's header comment lists these choices for that block.

Implementation figures to compare against: on a ZCU102 the configuration runs at 150 MHz and uses
652 DSP slices. In this RTL the array alone maps to 512 DSP-shaped multiply-adds (32 x 16). The
RTL has no vendor primitives and no timing constraints. Whether the DSP inference packs as
intended depends on the synthesis tool; the arithmetic is written in the DSP48E2 port widths
precisely so that it can.

Not built:
- The CISC convolution loop. Convolutions are lowered to matrix products by the host (see
  Workloads). Problems too large to sit on chip at once are not re-tiled by the matmul loop.
- The local TLB. It is disabled in this configuration to save area, so the DMA uses physical
  addresses.
- MVIN into the accumulator (bias loading).
- A pooling unit on the store path. Max-pooling layers do run on this kind of accelerator, but
  how the hardware does it is not specified, so this design does not guess. Resize and
  concatenation layers need no extra hardware: they are strided MVIN/MVOUT.
- Normalisation, transposer and dilation units, which are disabled in this configuration.
- The RISC-V host core, the ARM cores, the L2 caches, the coherency port and DRAM. These are
  processor or vendor blocks. `tb/mem_model.sv` stands in for memory, with random latency and
  out-of-order responses.

## Workloads

The target network is YOLOv7-tiny on 480x480 images (about 6.2 M parameters), dense or pruned.
Convolutions are lowered to int8 matrix products and tiled through the scratchpad in 32x32
tiles, so any layer fits: one 32x32 weight tile is 1 KiB, and an activation block of
32 rows x 32 channels is 1 KiB. The whole network's weights (6.2 MB) do not fit in the 512 KiB
scratchpad at once and are streamed from DRAM layer by layer, tile by tile.

`tb/conv_layer_tb.sv` runs one layer of that kind on the full-size accelerator:
- a 3x3, stride-1 convolution from 8x8x32 to 32 channels, with ReLU6;
- lowered by the host to a 64 x 288 by 288 x 32 product (im2col);
- checked against a direct convolution.

The layer takes about 4000 cycles for 590 k multiply-accumulates, about 15% of the array's peak.
The cost is per command: each COMPUTE of 32 rows pays the weight preload, the scratchpad delay
and the array's fill and drain. Only the weight preload is saved by reusing weights across
pixel tiles.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/gemmini_pkg.sv tb/ref_pkg.sv \
          tb/gemmini_top_tb.sv --top gemmini_top_tb
./obj_dir/Vgemmini_top_tb
```

The top-level testbench runs the accelerator at full size against a memory with 20–120 cycle
random latency:
- it computes a 64x64x64 matrix product in 32x32 tiles, with accumulation across the K tiles and
  reuse of preloaded weights;
- it stores the result twice, once with ReLU6 and once with saturation, and compares every byte
  with a reference;
- it also copies 48 scratchpad rows back out;
- it then runs the same product again as one CISC-type instruction and checks that result too;
- it counts each mechanism and fails if any never happened: DMA stall on the in-flight limit,
  reorder-buffer dependency waits, controllers overlapping, preload and weight reuse,
  accumulation, ReLU6 clamping, int8 saturation, scratchpad stores, contention for the shared
  scratchpad read port, and the CISC expansion (exactly 23 commands for the 2x2x2-tile product).
