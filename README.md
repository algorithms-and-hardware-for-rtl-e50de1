# A pipelined logic processor for logic-based neural networks

Some binary neural networks can be compiled so that each neuron or filter
becomes a fixed-function combinational logic (FFCL) netlist: a large graph of
two-input AND/OR/XOR/XNOR gates and one-input NOT/BUFFER gates. Building that
netlist directly in hardware fixes the chip to one model. This design takes
the other route. It is a programmable **logic processing unit (LPU)** that
evaluates any such netlist, gate by gate. The netlist is first levelized and
fully path balanced: buffers are inserted so that every gate at level `l`
reads only gates at level `l-1`. The LPU is then a line of gate columns.
Column `k` evaluates one level and hands its results straight to column
`k+1`, with no scratchpad memory between levels.

Each operand is a `W = 2m`-bit word, not one bit. One instruction therefore
evaluates the same gate for `2m` independent samples at once (image patches
or batch entries). With the default `m = 32` that is 64 samples per gate
evaluation.

The RTL follows the architecture of Hong, Fayyazi, Esmaili, Nazemi and
Pedram, *Algorithms and Hardware for Efficient Processing of Logic-based
Neural Networks*. Where that description stops, this RTL makes its own
choices, and says so below and in each file's header.

## Terms

| term | meaning |
|---|---|
| LPE | logic processing element: one gate per cycle on W-bit operands, plus two snapshot registers |
| LPV | logic processing vector: a column of `M` LPEs that evaluates up to `M` gates of one level |
| LPU | the whole processor: `N` LPVs in a line |
| MFG | a subgraph of the netlist that fits the LPU: at most `M` gates per level, and outside inputs allowed only at its lowest level |
| wave | the data launched by one program address; it visits LPV 0, 1, ..., N-1 in turn |

## Block diagram

```
 host ──► input data buffer ─┐          (recirculation)
                              ▼   ┌──────────────────────────────────────────┐
                         ┌── mux ◄┘                                          │
                         ▼                                                   │
   ┌─────────┐  ┌────────┐  ┌───────┐  ┌────────┐       ┌────────┐  ┌──────┐ │
   │ LPV 0   ├─►│switch 0├─►│ LPV 1 ├─►│switch 1├─ ... ►│switch N-1├►│output├─┘──► host
   │ M LPEs  │  │5 stages│  │       │  │        │       │        │  │buffer│
   └────▲────┘  └───▲────┘  └───▲───┘  └───▲────┘       └───▲────┘  └──▲───┘
        │ LPE queue │ sw queue  │          │                 │   out-ctl queue
   ─────┴───────────┴───────────┴──────────┴─────────────────┴─────────┴──────
   read address incrementor ─► read address shift register (6 entries per LPV)
```

`lpu_block` is one LPV together with its switch network and that pair's two
instruction queues. `lpu_top` chains `N` of these blocks.

## How a program runs: waves and the address shift register

This is the part that needs the most care.

1. The host writes the instruction queues and the input data buffer. It then
   pulses `start` with `len`.
2. The **read address incrementor** issues addresses `0 .. len-1`, one per
   cycle. Each address launches one wave.
3. The address enters the **read address shift register** and moves one
   entry per cycle in step with its wave's data. Each pipeline stage reads
   its own instruction queue at the address its wave carries. A queue is a
   synchronous memory, so it is read with the address of the stage before it
   (one cycle early), and its word is ready when the data arrives.
4. One level takes `T_C = 6` cycles: 1 cycle in the LPE and 5 in the switch
   network. A wave reaches LPV `k` `6k` cycles after it reached LPV 0. Because
   a new address is issued every cycle, up to `6N` waves are in flight, one in
   each pipeline stage. Each of them may belong to a different MFG.

An MFG with levels `L_bottom .. L_top` is placed at one address `a`. Its gate
instructions go into the LPE and switch queues of LPVs `L_bottom .. L_top`,
all at address `a`. At every other LPV the queue word at `a` is an
invalidate (`OP_INV`), or it only takes a snapshot (see below). Two MFGs may
share an address if they use disjoint LPVs.

**Snapshot registers** carry results from one MFG to a later one. Suppose MFG
X ends at level `L` and MFG Y starts at level `L+1`, but Y is issued later
than X. Then the instruction at X's address in LPV `L+1` stores the arriving
operands in the LPE snapshot registers (`snap_a`/`snap_b`). Y's instruction
at LPV `L+1` reads them back (`use_snap_a`/`use_snap_b`). A gate can mix a
snapshot operand with a live one. The child MFG issued last (the "most
recent child") needs no snapshot: its results arrive live together with the
parent's own wave, and parent and child can share one address.

**Graphs deeper than N levels.** An MFG can have more levels than there are
LPVs. In that case, its wave leaving LPV `N-1` is stored in the **output data
buffer**. The output control queue word `{store, obuf_addr}` at the wave's
address says whether and where. A later address whose input control word is
`{SRC_OBUF, obuf_addr}` feeds that entry back into LPV 0, which then
evaluates the next level. The output buffer thus stands in for the snapshot
registers of the LPV after the last one. The same buffer holds the final
results, and the host reads them through `ob_raddr/ob_rlane/ob_rdata`. The
input control word can also select `SRC_IBUF`, the next input-buffer entry in
counter order, or `SRC_NONE`, zeros.

**Timing rules the program generator must respect** (cycle counts of this
RTL):

* `done` pulses `len + 6N + 4` cycles after the `start` cycle. The 4 extra
  cycles are 1 for the incrementor, 1 for the input-control queue read, 1 for
  the buffer read and 1 for the done register.
* A wave that recirculates an output-buffer entry must be issued at least
  `6N + 2` addresses after the wave that stored the entry. If it is issued
  earlier, it reads the old contents.
* Snapshot registers and the output buffer keep their contents across runs.
  Only the input-buffer read counter restarts at `start`.

## Instruction formats

Defined in `rtl/lpu_pkg.sv`. The field layout is this design's own, because
the paper gives no encodings.

* **LPE word** (per LPV): `M` fields of 7 bits. LPE `j` uses bits
  `[7j +: 7]`, which hold `{op[2:0], snap_a, snap_b, use_snap_a, use_snap_b}`.
  The op codes are `INV=0` (result 0), `BUF=1`, `NOT=2`, `AND=3`, `OR=4`,
  `XOR=5` and `XNOR=6`. LPE `j` takes operands `2j` (a) and `2j+1` (b). If a
  snapshot is stored and used in the same cycle, the gate sees the old value.
* **Switch word** (per LPV): `2M` fields of `log2 M` bits. Field `d` names
  the LPE result that feeds operand `d` of the next LPV. Any result may feed
  any number of operands (multicast).
* **Input control word**: `{src[1:0], obuf_addr[15:0]}`.
* **Output control word**: `{store, obuf_addr[15:0]}`.

The host writes a queue with `iq_we`, `iq_kind` (`IQ_LPE`, `IQ_SW`, `IQ_IN`
or `IQ_OUT`), `iq_lpv` (which LPV, for the first two kinds), `iq_addr` and
`iq_wdata`. It writes the input buffer one operand at a time with
`ib_we/ib_addr/ib_lane/ib_wdata`.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N` (LPVs) | 16 | the paper's evaluated configuration |
| `M` (LPEs per LPV) | 32 | chosen; the paper does not give `m` |
| `W` (operand bits) | `2M` = 64 | the paper's rule, operand width `2m` |
| `T_SW` (switch stages) | 5 | paper |
| `IQ_DEPTH` | 1024 | chosen |
| `IB_DEPTH` | 512 | chosen |
| `OB_DEPTH` | 256 | chosen |

`M = 32` and the three depths were chosen so that a 16-LPV build comes close
to the resources the paper reports: about 4.3·10^5 flip-flops against the
reported 478K, and about 12 Mbit of memory against the reported 12240K BRAM
bits. These figures are an estimate, not a derivation.

## Where this RTL departs from the paper, or fills gaps

* **Switch network.** The paper uses a published 5-stage non-blocking
  multicast multistage network and describes only its function and its
  latency. Here it is a full crossbar registered in the first stage,
  followed by four pipeline registers. The function and the 5-cycle latency
  are the same. The area, and the per-stage configuration, are not. The paper
  configures each LPV-plus-switch block from six instruction queues. This RTL
  needs two: LPE and switch.
* **Invalidate.** An invalidated result is driven to zero. There is no
  separate valid flag per lane.
* **Front and back of the pipeline.** The paper says only that the compiler
  "notifies" the hardware when to recirculate. The input and output control
  queues, the start/len/done protocol and the host ports are this design's
  own.
* **Not included.** The compiler: MFG partitioning, merging and scheduling,
  which is software. Also not included is any host or FPGA shell. The
  testbenches produce programs directly.
* **Workloads.** The paper evaluates VGG16, a VGG7-like network, LeNet-5,
  MLP-Mixer S/4 and B/4, NID and JSC. It gives their MFG counts only in
  normalised form, so this RTL cannot check whether any of them fits in
  1024 program addresses.

## Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`.
Each one ends by printing `TB_RESULT checks=<n> failures=<n>`.

* The unit tests compare against reference values worked out inside the
  testbench: gates and snapshots, operand pairing, routing and 5-cycle
  latency, 6-cycle block latency, queue and buffer read timing, and the
  incrementor sequence.
* `tb_lpu_top` (3 LPVs of 4 LPEs) and `tb_lpu_top_full` (all defaults: 16
  LPVs of 32 LPEs, 240 addresses) generate a random program. It uses every
  op, random snapshot stores and uses, multicast routing, input-buffer waves,
  recirculated waves and output stores. The test runs the program twice and
  checks every output-buffer entry against a reference model. The model walks
  waves in address order, and within each wave the LPVs in order. This is
  exact, because a wave only sees snapshots left by earlier waves. The tests
  also check the `len + 6N + 4` run time, and they count each mechanism. If
  one never happens, the test fails.

These tests check the LPU against the rules above. They do not check it
against netlists from a real compiler. No such netlist was available.

To simulate with Verilator, for example the full-size test:

```
verilator --binary --timing --assert rtl/lpu_pkg.sv rtl/*.sv \
          tb/tb_lpu_top_full.sv --top-module tb_lpu_top_full -o sim
./obj_dir/sim
```

At the defaults, building takes about a minute and a half and the run takes
under a second. `tb_lpu_top_full.sv` and `tb_lpu_top.sv` share the same
body; only the sizes at the top differ.
