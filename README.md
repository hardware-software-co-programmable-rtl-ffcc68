# A reprogrammable GNN inference engine for a computational SSD

Graph neural network (GNN) inference on large graphs spends most of its time
outside the neural network itself. The graph and its node embeddings must be
read from storage and reshaped, then sampled before any arithmetic starts.
The HolisticGNN framework (Kwon et al., FAST '22) moves the whole service into
a *computational SSD* (CSSD): an FPGA and an NVMe SSD share one PCIe card, and
the FPGA serves the inference right where the data lives.

The FPGA is split in two:

* **Shell**, the static part. It holds an out-of-order RISC-V core that runs
  the storage, dataflow-graph and RPC software, and the hardware that core
  needs: DRAM, DMA, PCIe, and an engine that reprograms the rest of the chip.
* **User**, the dynamic part. It holds the GNN accelerators, and the host can
  swap it for another partial bitstream at any time through an RPC call
  (`Program()`).

This repository holds SystemVerilog for the FPGA logic of that design, in its
default *heterogeneous* configuration: a four-lane vector processor and an 8x8
floating-point systolic array in the User region. The source paper describes
most of the hardware only by function, and the core, PCIe endpoint, DRAM
controller and ICAP are third-party parts. Much of what follows is therefore
this implementation's own choice. The last sections say which parts follow
the paper and which do not.

## Block map

```
            host (PCIe)                                   ICAP primitive
                |  BAR writes / host-memory DMA                 ^
   +------------v-------------------------------- Shell --------|--------+
   |   rop_dma  (RPC-over-PCIe command target + DMA)            |        |
   |       |                                                    |        |
   |       v                                                    |        |
   |   shell_bus (round-robin) <--- Shell core DRAM port    xbuilder_engine
   |       |        ^-------------------------------------------+  |      |
   |       v                                                       |decouple,
   |   DRAM controller port                                        |user reset
   |                                                               v      |
   |   Shell core co-processor ports (4) and system-bus lanes (4)  |      |
   |                        |                                      |      |
   |                  partition_pin  <-----------------------------+      |
   +------------------------|---------------------------------------------+
                            |                     User region (user_hetero)
              port/lane 0   |   port/lane 1
          vector_processor     systolic_array (8x8 systolic_pe, 128 KiB)
          (4 lanes, 64 KiB)
                 \__ fp32_add / fp32_mul in every lane and PE __/
```

`hgnn_cssd_top` contains everything above except the core, the PCIe
endpoint, the DRAM controller and the ICAP. Their signals are ports of the top.
Shared types (the command structs, opcodes and register offsets) live in
`hgnn_pkg`.

## Reprogramming the User region safely

The paper's key hardware idea is the reprogramming path. The Shell has to keep
working while the User region is reconfigured, and the User region must not
see half-finished transfers. The RTL handles this in three pieces:

1. **`partition_pin`** is the boundary. The Shell is fixed once built, so the
   boundary carries as many co-processor ports and system-bus lanes as any
   User design might want: four of each here. When `decouple` is high, every
   valid, ready and busy signal crossing it is forced to 0 in both directions.
   The Shell then sees a User region that never accepts and never answers, and
   the User region sees no requests. Data wires pass through unchanged, since
   they mean nothing without their valid.

2. **`xbuilder_engine`** runs a `Program()` call. By the time it starts, the
   core has already received the partial bitfile over RPC and it sits in DRAM.
   The core writes the bitfile's address (register 0x00) and byte length
   (0x08), then writes 0x10 to start. The engine then works in this order:
   - It raises `decouple` and holds the User region in reset.
   - It reads the bitfile one 64-bit word at a time through the Shell bus.
   - It writes each word to the ICAP as two 32-bit words, low half first,
     whenever the ICAP reports `icap_avail`. ICAP back-pressure simply stalls it.
   - It waits for the ICAP's `prdone` or `prerror`.
   - In one cycle it releases the User reset. In the next it drops `decouple`
     and pulses `irq`.

   Register 0x10 reads back as `{error, done, busy}`. The order of the last
   step matters: if the pins re-coupled while the User logic was still in
   reset, a waiting command could be "accepted" by logic that then discards
   it. An assertion in the engine checks that the User region is in reset
   whenever the pins are decoupled.

3. **Software on the core** sees a command issued during reprogramming simply
   wait (not ready) until the new logic is up. The end-to-end testbench does
   exactly this.

The engine expects the bitfile in DRAM already in the ICAP's word order. It
does no bit swapping and no header parsing.

## RPC over PCIe

The CSSD has no network interface. gRPC therefore travels over PCIe itself:
the host driver keeps packets in a pinned, memory-mapped buffer and tells the
FPGA where they are. `rop_dma` is the FPGA end of that exchange. It exposes a
small register window in the FPGA's PCIe BAR:

| offset | write                       | read                          |
|--------|-----------------------------|-------------------------------|
| 0x00   | opcode: 1 send, 2 receive   | opcode                        |
| 0x08   | host buffer address         | address                       |
| 0x10   | length in bytes             | length                        |
| 0x18   | doorbell: start             | status `{error, done, busy}`  |
| 0x20   | -                           | bytes moved by last command   |

*Send* copies `length` bytes from the host buffer to the DRAM receive buffer
at `RX_BASE`. *Receive* copies from the DRAM transmit buffer at `TX_BASE` to
the host buffer. Lengths round up to whole 8-byte words. The engine keeps one
word in flight, so a word costs a read, the source's read latency, and a
write. A doorbell while busy, or with no opcode, sets `error` and does
nothing. Completion pulses `irq` to the core. The core then runs the RPC on
the packet (`UpdateGraph`, `Run`, `Program`, ...) or, for replies, has already
placed the answer at `TX_BASE`.

`shell_bus` puts the core, the RPC DMA and the reprogramming engine in front of
the single DRAM port. It arbitrates round-robin with one transaction at a
time, and holds each grant until a read's data comes back, so responses need
no tags.

## The heterogeneous User region

GNN layers alternate two kinds of work:

* **Aggregation** sums or averages the embeddings of each node's neighbours.
  It is irregular and element-wise.
* **Transformation** multiplies the aggregated features by a weight matrix.
  It is a dense GEMM.

The paper's measurements show that a systolic array alone is poor at the
first kind and general cores are poor at the second. The heterogeneous
configuration therefore pairs the two units below. The Shell core drives
both: it fills their local memories over a system-bus lane and starts work
with RoCC-style co-processor commands (`funct`, `rs1`, `rs2`, `rd`). Each unit
returns one response per command.

**Number format.** All arithmetic is IEEE-754 single precision (`fp32_add`,
`fp32_mul`):

* rounding is to nearest, ties to even;
* subnormal inputs and results become zero;
* `x + (-x)` gives +0;
* invalid operations give the quiet NaN `7fc00000`.

Multiply and add are rounded separately, with no fused multiply-add, so
results are reproducible from ordinary single-precision arithmetic in a
defined order.

### Vector processor (port 0, lane 0)

Four lanes and a 64 KiB local memory, organised as rows of four words, one
bank per lane. A vector of `4*len` elements fills `len` consecutive rows.
Command fields:

* `rs1` holds the row numbers of x (bits 15:0), y (31:16) and z (47:32);
* `rs2[15:0]` holds `len`;
* `rs2[63:32]` holds an fp32 scalar `s`.

| funct | operation           | use in a GNN                                       |
|-------|---------------------|----------------------------------------------------|
| 0 ADD | z = x + y           | neighbour accumulation (z = y for in place)        |
| 1 MUL | z = x * y           | element-wise similarity (NGCF)                     |
| 2 RELU| z = max(x, 0)       | activation                                         |
| 3 SCALE| z = x * s          | mean (s = 1/degree), GIN self weight               |
| 4 SUM | response = sum of x | reduction                                          |

Each command handles one row of four elements per cycle. It reads a row in
cycle t and writes it in cycle t+1, so in-place updates are safe. The
response comes `len + 2` cycles after the command is accepted. It carries that
cycle count, or, for SUM, the sum. SUM adds each row as `((l0+l1)+(l2+l3))`
and then adds that into the running total in row order.

### Systolic array (port 1, lane 1)

64 processing elements arranged 8x8, with a 128 KiB scratchpad built as eight
word banks (4096 rows of eight words). One command computes
`C(8x8) = A(8xK) x B(Kx8)`:

* `rs1[15:0]` is the first row of A, stored transposed: row `a+k` holds
  column k of A, one element per target node.
* `rs1[31:16]` is the first row of B, stored by rows.
* `rs1[47:32]` is where C goes: row `c+i` receives row i of C.
* `rs2[15:0]` is K.

The array is output-stationary. Each cycle reads one A row and one B row.
Element i of the A row is delayed i cycles and element j of the B row j
cycles, so PE(i,j) meets `A[i][k]` and `B[k][j]` together. Every PE forwards
its operands right and down, one register per hop. A `first` flag travels with
the data and restarts each accumulator at k = 0. After the wavefront drains
(2*DIM+1 cycles), the eight accumulator rows are written back, one per cycle.
The response carries the cycle count, **K + 26** at the default size. During
a GEMM the scratchpad refuses system-bus access.

Each PE therefore computes `(((a0*b0) + a1*b1) + a2*b2) ...` in k order.
There is no "accumulate into C" mode. For K larger than a scratchpad tile,
software sums the partial C blocks with vector ADDs.

### One GCN layer, as the end-to-end test runs it

1. The host sends the batch over RPC-over-PCIe into DRAM. The core copies
   the embeddings into vector memory and the weights into the scratchpad.
2. For each target node, the core zeroes an accumulator and issues one ADD
   per neighbour (self-loop included), then a SCALE by 1/degree. This is
   mean aggregation.
3. The core copies the aggregated features into the scratchpad, transposed,
   and issues one GEMM with the weights.
4. It copies C back to vector memory and applies RELU.
5. It writes the result to `TX_BASE`, and the host collects it with an
   RPC receive.

## What follows the paper and what does not

Taken from the paper:

* the Shell/User split;
* the Shell's contents: core, DRAM controller, DMA engine, PCIe, a
  reprogramming engine with the ICAP;
* the boundary of co-processor ports and system-bus lanes, tied off while the
  User region is reprogrammed;
* reprogramming by copying the bitfile into DRAM and feeding it to the ICAP;
* an RPC command made of opcode (send/receive), buffer address and length,
  which the FPGA parses and serves by copying between host and FPGA memory;
* the heterogeneous User region: four SIMD lanes, and 64 floating-point PEs
  with a 128 KiB scratchpad.

Chosen here, because the paper does not give it:

* every width, register map, encoding and handshake;
* the fixed DRAM RPC buffers;
* the bus arbitration;
* the ICAP word order and signal set, modelled on the UltraScale ICAPE3
  primitive;
* holding the User region in reset while decoupled;
* four boundary ports;
* the 8x8 arrangement and output-stationary dataflow;
* the scratchpad layout;
* the vector instruction set and its 64 KiB local memory;
* single precision and its rounding rules.

Departures to be aware of:

* The paper's SIMD unit and systolic array are modified versions of Hwacha
  and Gemmini. Neither is reproduced here. Both units are deliberately simple
  designs with the same roles and sizes. The vector unit reads only its own
  local memory, where Hwacha would fetch from system memory.
* The system-bus lane is a plain word-access port, not TileLink.
* The paper's own, separate decoupler IP is folded into `partition_pin`.
* The alternative User configurations the paper compares against (eight
  general cores; two systolic arrays) are not built.

Not in this RTL at all:

* the RISC-V Shell core;
* the PCIe endpoint and switch;
* the DRAM controller and DRAM;
* the SSD;
* the FPGA's configuration memory;
* everything that runs as software: graph storage and its
  vertex-to-page mapping, the dataflow-graph engine, and the host's gRPC stack.

## Sizes against the evaluated graphs

The evaluated datasets, after sampling, hold roughly 9 MB (`road-tx`,
517 nodes x 4353 features) to 166 MB (`physics`, 4926 x 8415) of fp32
embeddings. That is far beyond any on-chip memory, but well within the
card's DRAM (16 GB). The 40-bit addresses used here reach 1 TB.

The User region works on tiles:

* A scratchpad tile allows K up to 2044 for an 8-column output block. Wider
  feature vectors are cut into K tiles.
* The vector memory holds 16384 floats. An accumulator plus one neighbour of
  8415 or 8710 features (the two largest) does not fit, so those must also be
  split along the feature dimension.

Nothing in the RTL limits the number of nodes. That is a matter of how often
the core refills the local memories.

## Simulating

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each prints `TB_RESULT checks=N failures=M` and stops itself after a fixed
number of cycles if it hangs. The testbench helpers are:

* `tb_fp_pkg`: a single-precision reference built on `real`, rounding once;
* `mem_model`: a sparse memory with random back-pressure, used as host memory
  and as DRAM;
* `icap_model`: recognises the sync and DESYNC words of a bitstream, keeps a
  checksum, and answers `prdone`/`prerror`.

With Verilator 5, for example:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/hgnn_pkg.sv tb/tb_fp_pkg.sv tb/tb_hgnn_cssd_top.sv \
    --top tb_hgnn_cssd_top -o sim && obj_dir/sim
```

Any other testbench builds the same way with its own name.
`tb_hgnn_cssd_top` runs the top at its default parameters, and it exercises
every mechanism at least once:

* `Program()` with ICAP back-pressure;
* a kernel launch held off while the pins are decoupled;
* RPC send and receive;
* DRAM contention between the core and the DMA engine;
* memory back-pressure;
* a GCN layer on both units, checked bit-exactly against the reference.

It finishes in well under a second.

To change the User region, write another module with the `user_hetero` port
list and instantiate it in `hgnn_cssd_top`. The sizes (`LANES`, `VMEM_KB`,
`DIM`, `SPAD_KB`, `NCOP`, `NSB`) are parameters of the top. The command
encodings are in `hgnn_pkg`.
