# SPAD: separate prefill and decode chips for LLM serving

Serving a large language model has two phases that stress hardware in
opposite ways. **Prefill** processes the whole prompt at once: large matrix
multiplies, so it is limited by compute. **Decode** produces one token per
step for each request: small matrix-vector work over all the weights and the
KV cache, so it is limited by memory bandwidth. When the two phases already
run on separate machines, each machine can use a chip built for its phase:

* The **Prefill Chip** has large systolic arrays and a large L1. It uses
  cheaper GDDR7 memory instead of HBM, because prefill does not need HBM
  bandwidth.
* The **Decode Chip** keeps HBM3 bandwidth but has smaller arrays, since
  decode cannot keep large arrays busy.

Both chips share one template: cores of four lanes, a shared L2 behind a
crossbar, a device-memory controller and a chip-to-chip link. After prefill,
the Prefill Chip sends the request's KV cache to a Decode Chip.

This repository holds synthesizable SystemVerilog for that template. The top
module `spad_system` contains one Prefill Chip and one Decode Chip, with the
Prefill Chip's outgoing link wired to the Decode Chip's incoming link. Each
block has a self-checking testbench.

## The two chips

| | Prefill Chip | Decode Chip | RTL parameter |
|---|---|---|---|
| cores | 128 (RTL default 2) | 144 (RTL default 4) | `NCORES` |
| lanes per core | 4 | 4 | `LANES` |
| systolic array per lane | 32×32 FP16 | 16×16 FP16 | `DIM` |
| vector unit per lane | 16 × FP32 | 8 × FP32 | `VW` |
| L1 per core | 320 KB | 128 KB | `L1_BYTES` |
| L2 | 32 MB | 30 MB | `L2_BYTES` |
| device memory | GDDR7, 512-bit, 64 GB (outside the RTL) | HBM3, 5120-bit, 80 GB (outside the RTL) | |

Each array PE does one multiply-accumulate per cycle, and each vector lane
element does one multiply-add per cycle. At the paper's clocks (1.83 GHz
tensor, 1.98 GHz non-tensor) this gives its stated throughput:

* Prefill Chip: 1.92 PFLOP/s (128·4·32·32·2·1.83 G) tensor and
  32.4 TFLOP/s non-tensor.
* Decode Chip: 0.54 PFLOP/s tensor and 18.2 TFLOP/s non-tensor.

## Hierarchy

```
spad_system                  prefill chip + decode chip, KV link between them
└─ spad_chip  (x2)           one chip: command routing, L2 ports, pins
   ├─ l2_xbar                banked L2 + per-bank round-robin crossbar
   ├─ mem_ctrl               device memory <-> L2 copy engine
   ├─ ic_if                  link sender (L2 -> flits) and receiver (flits -> L2)
   └─ spad_core  (xNCORES)   4 lanes + L1 + L1<->L2 transfer engine
      ├─ l1_cache            multi-ported L1 scratchpad
      └─ lane  (x4)          operand/result sequencers
         ├─ systolic_array   DIMxDIM output-stationary array of sa_pe
         └─ vector_unit      VW-wide FP32 add / mul / max / a*s+b
spad_pkg                     command type and the FP16/FP32 arithmetic
```

## Commands and how work is ordered

There is no instruction fetch. A host sends `cmd_t` commands on the chip's
`cmd_valid`/`cmd_ready` port. On the real chip this would come over PCIe.
The `cmd_t` fields are `op`, `core`, `lane`, `vop`, `addr0`, `addr1`, `addr2`,
`len` and `scalar`. `addr0` and `addr1` are source addresses and `addr2` is
the destination. All addresses count words, except on the link.

| op | engine | action |
|---|---|---|
| `OP_MATMUL` | lane `lane` of core `core` | C = A·B, K = `len`. A: K L1 words at `addr0` (word k = column k of A). B: K words at `addr1` (word k = row k of B). C: 2·DIM words at `addr2`, row r in words 2r (columns 0..DIM/2-1) and 2r+1. |
| `OP_VEC` | lane `lane` of core `core` | `len` words: dst = src0 op src1. `vop` is add, mul, max, or `src0*scalar + src1`. |
| `OP_L2_LOAD` / `OP_L2_STORE` | transfer engine of core `core` | copies `len` words L2→L1 or L1→L2 |
| `OP_MEM_LOAD` / `OP_MEM_STORE` | memory controller | copies `len` words device→L2 or L2→device |
| `OP_IC_SEND` | link sender | sends `len` L2 words to remote L2 byte address `addr2` |

Routing and ordering:

* The chip routes each command by opcode.
* It accepts a command in the cycle its target engine is idle. A command for
  a busy engine waits on the port and blocks the commands behind it.
* Engines run in parallel: all lanes of all cores, every core's transfer
  engine, the memory controller and the link.
* Nothing tracks dependences between commands. The host waits for `busy` to
  fall before it issues a command that needs an earlier result.

This is the simplest ordering that is still correct. It is the biggest gap
between this model and a production chip.

An L1 word is DIM FP16 values, or equally VW FP32 values, because DIM·16 =
VW·32 on both chips. That makes it 512 bits on the Prefill Chip and 256 bits
on the Decode Chip. L2 and device-memory words are the same width as L1 words.

## Inside a lane: the systolic array

This part is the hardest to follow, so here it is in detail.

**Inputs.** The array is output-stationary: each PE (i, j) holds C[i][j] in an
FP32 accumulator. On each input cycle the lane presents one column of A
(`a_col`, one value per row) and the matching row of B (`b_row`, one value per
column).

**Skew.** The array applies the diagonal timing itself. Row i's A value
passes through i registers before it enters the west edge. Column j's B value
passes through j registers before it enters the north edge.

**Accumulation.** Inside the mesh, A moves right and B moves down by one PE
per cycle. Because of the skew, A[i][k] and B[k][j] meet at PE (i, j) in the
same cycle. A valid bit travels with A, and a PE accumulates only when that
bit is set. The lane can therefore stream K pairs back to back, and the last
products land 2·(DIM-1) cycles after the last input. The array's `busy`
output covers exactly that window.

**Read-out.** A `drain` pulse moves every accumulator up one row; the top row
drops out. `c_row` always shows row 0, so DIM pulses produce rows 0, 1, …,
DIM-1 in that order.

**Lane sequencer.**

1. Clear the array.
2. Stream K L1 reads: port 0 reads A, port 1 reads B, and the data arrive one
   cycle later.
3. Wait for `busy` to fall.
4. Drain DIM rows, writing two L1 words per row.

A matmul takes K + 4·DIM + 2 cycles from accept to idle; the testbench
measures this.

The array uses a single DIM×DIM tile. Longer K goes into one command. Larger
M or N takes several commands and the host handles the tiling, which is how
the paper leaves tiling to software.

**Vector unit.** The vector path reads two words per cycle and applies the
operation over one registered stage. It writes one word per cycle, so a
vector command takes len + 3 cycles.

## Arithmetic

All of it is in `spad_pkg`:

* Array: FP16 inputs, exact FP16×FP16 product, added to the FP32 accumulator
  with one rounding.
* Vector unit: FP32.
* Rounding: round to nearest even.
* Subnormal inputs and results are flushed to signed zero.
* Any NaN result is the canonical quiet NaN `7FC00000`.
* `a*s+b` rounds twice. It is a multiply followed by an add, not a fused
  operation.

The testbenches compare against a double-precision reference with a relative
tolerance that grows with the number of accumulations.

## Memories: L1, L2 and the crossbar

**L1** (`l1_cache`) is a software-managed scratchpad with no tags and a
one-cycle read. It has 2·LANES+1 read ports and LANES+1 write ports:

* Lane l uses read ports 2l and 2l+1 and write port l.
* The transfer engine uses the last read port and the last write port.

All four lanes can therefore stream at full rate. A physical design would
build these ports from banks.

**L2** (`l2_xbar`) is also a scratchpad, split into NBANKS = 16 word-interleaved
single-port banks.

* Requesters: every core's transfer engine, the memory controller, the link
  sender and the link receiver.
* Each bank grants one request per cycle, round-robin from the port after the
  one it last granted. Requests to different banks proceed in the same
  cycle.
* A requester holds its request steady until `req_ready`. Read data return on
  the same port one cycle after the grant. An assertion checks that a waiting
  request does not change.

## Device memory and the KV link

**Memory controller.** `mem_ctrl` copies words between the device-memory port
and the L2 with one word in flight. The port is a generic request/response
interface with in-order read data and any latency. The GDDR7/HBM3 PHYs and
DRAM sit behind it and are not part of this RTL. Testbenches use a
behavioural memory with random stalls instead.

**Link.** `ic_if` implements the KV-cache hand-over as remote writes:

* A flit is a destination byte address in the receiver's L2 plus LB = 256
  data bits, under valid/ready flow control.
* The sender reads an L2 word and sends it as WB/LB flits, lowest part first.
* The receiver collects the parts and performs one L2 write when the top part
  arrives. It lowers `rx_ready` while that write waits.
* LB equals the Decode Chip's word width, so a 512-bit Prefill word crosses as
  two flits and lands as two Decode words.

## Departures from the paper and sizes used

* **Core counts.** The default `NCORES` is 2 for the Prefill Chip and 4 for the
  Decode Chip, not 128 and 144. All per-core sizes keep the paper's values.
  * Verilator and yosys flatten the design, so every FP PE costs about
    0.5 MB of elaboration memory. That is about 2 GB per 32×32-array core.
  * Measured lint runs: 2 cores took 3.9 GB and 8 cores took 15.4 GB.
  * A full 128 + 144-core pair would need more than 250 GB.
  * A 4 + 8-core pair linted alone in about 12 GB. Run next to synthesis
    jobs of other blocks in a 16 GB machine it ran out of memory, so the
    defaults were halved once more (about 6 GB).
  * To build the full chip, set the parameters to 128 and 144; the RTL has
    nothing else that depends on the count.
* **One clock** for everything. The paper has separate tensor (1.83 GHz) and
  non-tensor (1.98 GHz) clocks.
* **Not built:**
  * BF16 and FP8 arithmetic. DeepSeek-V2 in FP8 would have to be stored as
    FP16.
  * Softmax and normalisation nonlinearities (exp, reciprocal, square root).
  * Dependence tracking between commands.
  * Bandwidth-accurate memory and link engines: each has one word in flight.
* **Outside the RTL:** PCIe, the GDDR7 and HBM3 PHYs and devices, the physical
  scale-up and scale-out links, and the cluster scheduler.
* **This design's own choices, not given by the paper:**
  * the organisation inside each block (dataflow, ports, banking,
    arbitration);
  * the command set;
  * the flit format.

## Testbenches

Every file in `tb/` checks itself. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

Most block testbenches run the block at reduced size; `tb_systolic_array`
uses a 4×4 array. All of them use random operands and compare against a
reference model in the testbench.

`tb_spad_system` runs the whole flow on a reduced pair:

* Prefill Chip: 2 cores, 4×4 arrays, 2-wide vector units.
* Decode Chip: 2 cores, 2×2 arrays, 1-wide vector units.
* A 32-bit link between them, with behavioural GDDR7 and HBM3 models.

The flow it runs:

1. The Prefill Chip computes K = X·Wk and V = X·Wv on two cores in parallel.
2. It sends both over the link into the Decode Chip's L2.
3. The Decode Chip combines them with a vector operation and runs a matmul of
   its own.
4. The Decode Chip writes the results to HBM, where the testbench checks them.

It counts each mechanism, and the run fails if any count is zero. The
mechanisms are:

* matmuls on both chips;
* the vector operation;
* L2↔L1 and memory transfers;
* KV flits and link backpressure;
* crossbar and memory stalls;
* a command held back by a busy lane.

A default-size system (2 + 4 cores, 32 MB and 30 MB L2) lints and elaborates.
Simulating it is not practical, so the largest configuration simulated is the
reduced pair above.

## Simulating with Verilator

Compile the package, the testbench package and the testbench. Verilator finds
the remaining modules through `-I`:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/spad_pkg.sv tb/tb_pkg.sv tb/tb_spad_system.sv \
  --top-module tb_spad_system -Mdir obj_sys
./obj_sys/Vtb_spad_system
```

Replace `tb_spad_system` with any other `tb/tb_*.sv` to run that block's test.
All the testbenches run in seconds. To lint the design at default size:

```
verilator --lint-only -Wall -Irtl rtl/spad_pkg.sv rtl/spad_system.sv --top-module spad_system
```

This takes a few minutes and about 6 GB of memory. The remaining warnings
are of three kinds:

* unused signals, such as the address bits above the L1 depth;
* concatenation widths inside the FP helper functions;
* the crossbar's handshake assertion sampling `rst_n`, which is also the
  asynchronous reset. The assertion is not part of the circuit.
