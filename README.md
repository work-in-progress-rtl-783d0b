# A time-predictable multicore vector platform for neural network inference — memory system RTL

Neural networks in safety-critical real-time systems need both throughput and a
provable worst-case execution time (WCET). Accelerators and GPUs lose that
predictability mainly in the memory system, where many masters compete for
shared DRAM. This platform removes the competition: each worker core computes
only out of its own private scratchpads, and **a single DMA engine, owned by a
management core, is the only master that ever touches external memory or the
on-chip interconnect**. The management core moves code, weights and
activations according to a schedule fixed at compile time, so every transfer
starts at a known time and takes a known number of cycles. Each core's WCET can
then be analysed alone, and the system WCET follows from those numbers plus the
schedule.

The architecture is the one described by Kirschner, Dudzik and Becker in
"Work-in-Progress: Real-Time Neural Network Inference on a Custom RISC-V
Multicore Vector Processor". This RTL is an independent implementation of its
memory and data-movement fabric. The processor cores the architecture uses
(Ibex RV32 cores, each worker with a Vicuna RVV 1.0 `Zve32x` vector unit with
512-bit registers) are existing open-source IP and are not reproduced here.
Their memory and CSR ports are the ports of the top module.

## The platform

```
   worker core 0           worker core 1                worker core N-1
  (Ibex + Vicuna)         (Ibex + Vicuna)              (Ibex + Vicuna)
   instr_*  data_*         instr_*  data_*               instr_*  data_*      <- top-level ports
 +----|--------|---+     +----|--------|---+          +----|--------|---+
 | I-SPM    D-SPM  |     | I-SPM    D-SPM  |   ...    | I-SPM    D-SPM  |   worker_tile
 +----|--------|---+     +----|--------|---+          +----|--------|---+
      |        |              |        |                   |        |      TL-UL, 2N devices
 +----+--------+--------------+--------+-------------------+--------+---+
 |                        tlul_xbar (one host)                         |
 +-----------------------------------+----------------------------------+
                                     | TL-UL host
                         +-----------+-----------+
   csr_i (Zicsr) ------> | mgmt_csr -> dma, timer|  management core side
   timer_irq_o <-------- |                       |
                         +-----------+-----------+
                                     | AXI4 master (axi_o / axi_i)
                              external DDR4 memory                          <- top-level port
```

`mcvp_top` holds `N_CORES` worker tiles (default 16). Each tile has a 512 KiB
instruction scratchpad (I-SPM) and a 512 KiB data scratchpad (D-SPM), so 1 MiB
per core and 16 MiB in all. It also holds the TL-UL crossbar, the DMA, the
schedule timer and the custom CSR block. Nothing else in the chip can start a
memory transaction.

| File | Module | Role |
|---|---|---|
| `rtl/tlul_pkg.sv` | package | TL-UL channel structs and opcodes |
| `rtl/axi_pkg.sv` | package | AXI4 channel structs (32-bit address and data, 4-bit id) |
| `rtl/mcvp_pkg.sv` | package | address map, CSR numbers, CSR bus struct |
| `rtl/spm.sv` | `spm` | dual-ported scratchpad: TL-UL device port + core port |
| `rtl/worker_tile.sv` | `worker_tile` | one I-SPM and one D-SPM with the core's two ports |
| `rtl/tlul_xbar.sv` | `tlul_xbar` | 1-host, 2N-device TL-UL crossbar with error responder |
| `rtl/dma.sv` | `dma` | copy engine, TL-UL host + AXI4 master |
| `rtl/timer.sv` | `timer` | 64-bit cycle counter with compare and interrupt |
| `rtl/mgmt_csr.sv` | `mgmt_csr` | custom CSRs through which the management core drives DMA and timer |
| `rtl/mcvp_top.sv` | `mcvp_top` | the platform |

## Address map

All addresses are byte addresses as the DMA sees them.

| Range | Target |
|---|---|
| `0x1000_0000 + c*0x0010_0000` + `0x0_0000 .. 0x7_FFFF` | I-SPM of core `c` |
| `0x1000_0000 + c*0x0010_0000` + `0x8_0000 .. 0xF_FFFF` | D-SPM of core `c` |
| `0x8000_0000 .. 0xFFFF_FFFF` (bit 31 set) | external memory, over AXI4 |
| anything else | error response from the crossbar |

Each core addresses its own SPMs from offset 0 on its core ports. Only the low
bits that index the SPM are used there.

## Programming a transfer: the management core's CSRs

The management core drives the fabric with ordinary `csrr`/`csrw`
instructions on custom CSR numbers in the machine-mode custom range. The
bus `csr_i` (a `csr_req_t`: valid, we, 12-bit address, data) carries the final
value of each write; the core does any set/clear read-modify-write itself.
Reads are combinational. `csr_hit_o` is low for any other number, so the core can
trap.

| CSR | Name | Fields |
|---|---|---|
| 0x7C0 | DMA_SRC | source byte address |
| 0x7C1 | DMA_DST | destination byte address |
| 0x7C2 | DMA_LEN | length in bytes, a multiple of 4 |
| 0x7C3 | DMA_CTRL | write bit 0 = 1 to start; ignored while busy |
| 0x7C4 | DMA_STATUS | bit 0 busy (live), bit 1 done, bit 2 error; bits 1 and 2 are sticky, cleared by writing 1 or by the next start |
| 0x7C8 / 0x7C9 | TMR_LO / TMR_HI | 64-bit cycle count, read and write |
| 0x7CA / 0x7CB | CMP_LO / CMP_HI | 64-bit compare value, resets to all ones |
| 0x7CC | TMR_CTRL | bit 0 count enable, bit 1 interrupt enable, bit 2 clear count (write-only pulse) |
| 0x7CD | TMR_STATUS | bit 0 match (count >= compare) |

One step of the compiled schedule looks like this:

```
    csrw CMP_HI, 0 ; csrw CMP_LO, t_k     # release time of transfer k
    wfi / poll TMR_STATUS                 # timer_irq_o rises when count >= t_k
    csrw DMA_SRC, src ; csrw DMA_DST, dst ; csrw DMA_LEN, bytes
    csrw DMA_CTRL, 1
    poll DMA_STATUS until busy = 0, check error
```

The compare is `>=`, not `==`, so a release time that has already passed fires at
once rather than being lost. The schedule is meant to be built so that this never
happens, but a late release then only delays the transfer and never deadlocks it.

## The DMA engine

`dma` copies `LEN` bytes from `SRC` to `DST`. Each side is routed on its own by
address bit 31: external memory over AXI4, or a scratchpad over TL-UL. So one
engine does all four kinds of move:

* external to SPM: load code, weights and inputs;
* SPM to external: spill results;
* SPM to SPM: pass data from one core to another without going through DRAM;
* external to external.

**Chunks.** A transfer is cut into chunks of at most `BURST` words (default
16). No chunk crosses a 4 KiB boundary on either side, because an AXI4 burst may
not cross one. For each chunk the engine first reads all words into a
`BURST`-word buffer, then writes them out:

* AXI4 side: one INCR burst of full 32-bit beats (`AR` then `R` beats; or
  `AW`, `W` beats, then `B`).
* TL-UL side: one `Get` or `PutFullData` per word, pipelined so that a new
  request goes out in the cycle the previous response comes back: one word per
  cycle.

Reads and writes of a chunk do not overlap, and only one AXI4 burst is
outstanding. This gives up some bandwidth, but the time of a transfer becomes
a plain sum that a schedule can use.

**Timing.** Start is sampled in cycle 0 and `done_o` pulses in cycle T. For a
copy between scratchpads:

```
T = 1 + sum over chunks (2*k + 5)        k = words in the chunk
```

Reading a chunk takes k + 1 cycles (k requests back to back, the last response
one cycle later), and so does writing it. Each chunk adds three cycles of
bookkeeping. A 16-word SPM-to-SPM copy therefore takes 38 cycles, and long
copies approach two cycles per word. When one side is external memory, that side's per-chunk time is
the AXI4 slave's latency plus one cycle per beat. A schedule needs the DRAM
controller's worst case for it, so an analysis must add that figure.

**Errors.** An unaligned address or length ends the transfer at once with the
error bit set and nothing copied. A TL-UL `d_error` (unmapped address) or an
AXI4 `SLVERR`/`DECERR` sets the error bit, but the transfer still runs to its
end. A zero length completes at once without error.

## Scratchpads and crossbar

Each `spm` has two fully independent ports on one array. The DMA's port and the
core's port can both read or write in the same cycle, with no stall and no
arbitration. This is what lets the next tile's data stream in while a core
computes, without disturbing the core's timing.

* Core port: Ibex-style `req/gnt/rvalid`. Grant comes in the same cycle and data
  one cycle later, always.
* TL-UL port: a request is accepted whenever the single response slot is free or
  is being emptied, and answered one cycle later.
* If both ports write the same byte in one cycle, the core's write wins. A read
  returns the value from before a write in the same cycle.
* The instruction port of a tile is read-only. Only the DMA fills an I-SPM.

`tlul_xbar` has a single host, because the DMA is the only initiator. It
decodes the address, forwards the request to one of `2*N_CORES` devices and
returns that device's response. It keeps one request outstanding but accepts the
next one in the cycle the current response is taken. Responses are therefore
always in order, at one word per cycle. An address
that maps to no scratchpad gets `d_error` from an internal responder and reaches
no device. An assertion checks the TL-UL rule that a request not yet accepted
must not change.

## Design choices made here

The source architecture fixes the following:

* the block structure;
* 16 worker cores with 1 MiB of dual-ported instruction and data scratchpad each;
* one DMA with exclusive access to the external memory and to the interconnect;
* a TL-UL crossbar to the scratchpads and an AXI4 port to DDR4;
* a timer;
* control of DMA and timer through custom CSRs written with Zicsr instructions.

Everything below is a choice made for this RTL where the source is silent:

* the 512 KiB + 512 KiB split of each core's megabyte;
* the 32-bit width of scratchpads, crossbar and AXI4 port;
* the address map;
* CSR numbers and fields;
* the Ibex-style core port protocol and the SPM collision rule;
* the DMA's inner structure. The source uses a modified PULP iDMA without saying
  how it was modified. The engine here is a single-channel, one-outstanding-request
  copier with no descriptor queue and no 2-D or strided transfers;
* the timer's counter/compare form.

Known departures and gaps:

* **No cores.** Nothing starts or synchronises the worker cores. The source only
  says that start times come from the schedule. A core's start can be gated
  outside `mcvp_top`, or the cores can poll a flag that the DMA writes into their
  D-SPM.
* **Narrow vector port.** The vector unit has 512-bit registers, but its D-SPM
  port here is 32 bits wide. A wider core-side port would need a wider `spm`
  (its word width is fixed at 32).
* **Narrow DRAM interface.** A DDR4 controller on an FPGA usually presents a wide
  AXI4 data bus. The 32-bit AXI4 port here would sit behind a width converter.
* **No management-core memories.** Where the management core keeps its own
  program is not specified, and no memory for it is included.

## Sizing against the target networks

No evaluation has been published yet. The networks named as targets for the
16-core configuration are ResNet-50 and YOLOv5-small. Their sizes below are
general knowledge, not from the source:

* **ResNet-50 at int8.** About 25.6 M weights, i.e. about 25.6 MB. That is more
  than the 16 MiB of all scratchpads together, so weights are streamed from
  DRAM layer by layer, as the architecture intends. The largest single weight
  tensors are:
  * the 3x3, 512-to-512 convolutions: 2.36 MB;
  * the 2048-by-1000 classifier: 2.05 MB.

  Split over 16 cores, that is about 148 KB per core, within one 512 KiB D-SPM.
  The largest activation (56x56x256 or 112x112x64, about 0.8 MB) is about 50 KB
  per core. A layer-by-layer GEMM tiling therefore fits. Whether the whole model
  fits in the external DRAM depends on the board, which is not specified.
* **YOLOv5-small at int8.** About 7.2 M weights, i.e. about 7.2 MB, so its
  weights would even fit in the scratchpads taken together.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_spm` | Both ports at random every cycle against a reference array: data, opcodes, sources, masks, the collision rule, one-cycle latency, back-pressure. |
| `tb_tlul_xbar` | Random Gets and Puts over eight scratchpads and unmapped holes: routing (by inspecting the target array), error responses, the latency of a single access. |
| `tb_dma` | 120 random copies in all four directions against a reference; burst count and 4 KiB legality; the exact SPM-to-SPM cycle formula; all error cases; start while busy. |
| `tb_timer` | Counting, enable, clear and half writes with their priorities, carry, match timing, interrupt gating. |
| `tb_mgmt_csr` | Every register, hit decoding, start pulse and its busy gating, sticky status bits. |
| `tb_worker_tile` | Program fetch while the DMA side writes the D-SPM; byte-masked core writes read back over TL-UL; the read-only instruction port. |
| `tb_mcvp_top` | The full-size platform at default parameters, end to end (see below). |

`tb_mcvp_top` runs a small fully connected int8 layer, one GEMM tile per core,
under a timer-driven schedule:

1. At its release time, each core's program, the shared input vector and its
   weight row are loaded.
2. Behavioural cores fetch the program and compute dot products while the DMA
   loads the next core.
3. The results are gathered SPM to SPM into core 0.
4. The gathered vector is stored to external memory and compared with values
   computed by the testbench.

It counts each mechanism and fails if any never happens:

* timer releases;
* all three transfer kinds;
* core access overlapping a DMA transfer;
* a 4 KiB burst split;
* an ignored busy start;
* the error status.

`tb/axi_mem_model.sv` is a behavioural AXI4 memory with random handshake stalls
and an error region. It stands in for the DRAM.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tlul_pkg.sv rtl/axi_pkg.sv rtl/mcvp_pkg.sv tb/tb_mcvp_top.sv \
    --top-module tb_mcvp_top -o sim
./obj_dir/sim
```

Replace `tb_mcvp_top` with any other testbench name. The full-size run builds
16 MiB of scratchpad; it builds in about a minute and simulates in well under a second. The
testbenches expect a two-state simulator with random initial values and reset
everything they read.

## Changing the configuration

`mcvp_top` takes `N_CORES`, `ISPM_BYTES`, `DSPM_BYTES` (each a power of two, at
most 512 KiB with the 1 MiB tile window of the address map) and `BURST` (the DMA
chunk and buffer size, at most 256 for AXI4). The number of cores, the vector
length and the scratchpad size are exactly the trade-offs the architecture's
authors plan to explore. Widening the datapath means changing the 32-bit
constants in `tlul_pkg`, `axi_pkg` and `spm`.
