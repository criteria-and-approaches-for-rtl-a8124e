# A static region for sharing one FPGA among virtual machines

One PCIe FPGA card can serve several virtual machines at once. Partial
reconfiguration splits the device into regions. Each region (a PRR, partial
reconfiguration region) holds one accelerator and is handed to one virtual
machine as its own "virtual FPGA". The rest of the device is the *shell*, or
static region. The shell connects the regions to the host over PCIe and to the
board's DDR memory. It also makes sure that reloading one region cannot upset
the others.

This repository holds SystemVerilog for that shell, as proposed for an Intel
Arria 10 card programmed through OpenCL. It has four regions, and one 200 MHz
clock drives both the shell and the regions. It also holds testbenches and
behavioural stand-ins for the parts around the shell. The design it follows
is published only at block-diagram level: it names the shell's blocks and
says what the important ones do. Bus protocols, register maps, widths and
most internal mechanisms here are this implementation's own choices. The
section *Where this departs from, or goes beyond, the source design* lists
them.

## The pieces and how they connect

```
 PCIe endpoint ──host bus──► host_interconnect ─┬─► irq_ctrl ────────────► MSI to host
 (not included)                                 ├─► prr_ctrl ────────────► PR control block
                                                │       │ freeze[k]          (not included)
                                                ├─► prr_interface[k] ◄───► registers of PRR k
                                                └─► memory_interface (PAGE register + window)
                                                            │
 memory master of PRR k ─► mem_pipe[k] ─────┐               │
                                            ▼               ▼
                                       ddr_interconnect (round robin) ─► DDR controller
                                                                          (not included)
```

| file | role |
|---|---|
| `rtl/vfpga_pkg.sv` | widths, bus structs, register offsets, address map |
| `rtl/host_interconnect.sv` | decodes host accesses to the slaves |
| `rtl/irq_ctrl.sv` | one MSI for all regions; STATUS and MASK registers |
| `rtl/prr_ctrl.sv` | starts partial reconfiguration, streams the bitfile, owns the freeze bits |
| `rtl/prr_interface.sv` | per-region buffer between host and accelerator registers; freeze gate |
| `rtl/mem_pipe.sv` | per-region pipeline stages on the memory port; freeze gate |
| `rtl/ddr_interconnect.sv` | shares the DDR port among the regions and the host path |
| `rtl/memory_interface.sv` | paged host window into DDR |
| `rtl/vfpga_shell.sv` | the top: wires everything above |

The top, `vfpga_shell`, has parameters `NUM_PRR` (default 4) and `MEM_STAGES`
(default 1). Anything outside the shell is a port of the top:
- the PCIe endpoint's register master and its MSI request;
- the partial reconfiguration control block;
- the DDR controller's user port;
- the accelerators in the regions. Each one has a register port, an
  interrupt, a memory master and a freeze input.

## Buses

Two struct-typed buses recur, both in `vfpga_pkg`.

- **Register bus** (`csr_req_t`/`csr_rsp_t`). It carries 32-bit data and a
  20-bit byte address, one word per access.
- **Memory bus** (`mem_req_t`/`mem_rsp_t`). It carries 512-bit words with a
  25-bit word address (2 GiB) and 64 byte enables.

Both follow Avalon-MM rules:
- A master holds `read`/`write`, address and data while `waitrequest` is high.
- An access is taken in a cycle where the request is up and `waitrequest` is
  low.
- Read data comes back later, in order, in a cycle with `rvalid` high.
- The response path cannot push back.

## Reconfiguring a region: freeze

A freshly loaded region holds undefined state until its load ends. Its
outputs can glitch while the configuration frames are being rewritten. A
region must therefore be cut off from the shell for the whole load. This is
the least obvious part of the shell, and it is spread over three blocks.

**`prr_ctrl`** owns one freeze bit per region. A load runs like this:

1. The host writes CTRL with the start bit and the region number. If no other
   load is running, that region's freeze bit is set in the same clock edge.
   A one-cycle `cb_start` with `cb_region` goes to the control block.
2. The host writes the partial bitfile, one 32-bit word per write, to DATA.
   Each write becomes one beat of a stream to the control block
   (`cb_data`, `cb_data_valid`, `cb_data_ready`). While the block is not
   ready, the host is held with `waitrequest`.
3. The control block decodes the bitfile and checks its CRC. It ends the load
   with a `cb_done` or `cb_error` pulse.
4. On `cb_done` the freeze bit clears. On `cb_error` it stays set: the region
   holds half a bitfile and is kept frozen until a later load succeeds.

While a load is running, a second start is ignored. So is a start for a
region that does not exist.

The freeze bit is also brought out as `prr_freeze[k]`. The region's logic
must treat it as a reset, so a new accelerator starts from a clean state.

**`prr_interface`** closes the register path of a frozen region:
- host writes are dropped;
- host reads complete at once with data 0;
- nothing reaches the region's register port;
- the region's interrupt is forced low.

If freeze rises while an access is in flight to the region, the bridge gives
that access up. A read returns 0, and the bridge is free again.

**`mem_pipe`** closes the memory path of a frozen region. A frozen region's
commands see `waitrequest` and are not taken. One more case needs care. Reads
the old accelerator issued before the freeze may still be on their way back
from DDR. If they arrived after the new accelerator came out of freeze, it
would take them as answers to its own first reads. `mem_pipe` therefore
counts outstanding reads, at most 255. From the cycle freeze rises, it drops
every read response until the count reaches zero. The port stays closed until
then, even if freeze has already fallen. Writes already taken before the
freeze still complete.

Neither the host nor the accelerator has to know about any of this.

## Interrupts

All regions share one MSI. `irq_ctrl` samples the region interrupt lines into
STATUS every cycle, after `prr_interface` has masked any frozen region. MASK
has one bit per region, and a set bit keeps that region from raising the MSI.
After reset every bit of MASK is set, because every region is still empty.

`msi_req` rises when the set of *pending and unmasked* bits goes from empty
to non-empty. It stays high until the endpoint returns `msi_ack`. The latency
from a line rising to `msi_req` is two cycles.

A host interrupt handler works like this:
1. Set MASK.
2. Read STATUS.
3. Clear the source in the accelerator, through its own registers.
4. Clear MASK.

A region that raised its line while MASK was set is still pending at step 4.
Clearing MASK then produces a new edge, so a new MSI, and no interrupt is
lost.

## Host address map and registers

| host byte address | target |
|---|---|
| `0x80000`–`0xFFFFF` (bit 19 set) | DDR window, 512 KiB |
| `0x00000` | `irq_ctrl`: `0x0` STATUS (read only), `0x4` MASK |
| `0x01000` | `prr_ctrl`: `0x0` CTRL (write: bit 0 start, bits 15:8 region), `0x4` STATUS (bit 0 busy, bit 1 done, bit 2 error, bits 15:8 region, bits 16+k freeze of region k), `0x8` DATA |
| `0x02000` | `memory_interface`: `0x0` PAGE |
| `0x10000 + k·0x1000` | registers of the accelerator in region k, through `prr_interface` |
| anything else | reads return `0xDEADBEEF`; writes are ignored |

The interconnect handles one read at a time. After it takes a read, it holds
the host until the data is back, so responses from slaves with different
latencies cannot overtake each other.

The **DDR window**: a 32-bit access at window offset `o` goes to the DDR byte
address `{PAGE, o}`. That is the 512-bit word `{PAGE, o[18:6]}`, lane
`o[5:2]`. A write carries the byte enables of that lane only. The page is
taken when the access is taken, so a PAGE write does not affect a window
write that is still waiting in the buffer. Window writes are posted: the
host is released once the buffer has the write.

## Memory path

Each region's memory master goes through `mem_pipe` (`MEM_STAGES`
stages).
- Every stage is a two-entry skid buffer on the command path and one
  register on the response path. Both the long forward wires and the
  `waitrequest` going back are registered.
- One command per cycle still passes when nothing stalls.
- Each stage adds one cycle each way.

`ddr_interconnect` shares the one DDR port among `NUM_PRR + 1` masters. The
regions are ports 0 to `NUM_PRR-1`; the host window is the last port.
- Arbitration is round-robin, starting one past the master served last.
- A command that the DDR port has stalled keeps the grant until it is taken,
  so the controller sees a stable request.
- The controller returns read data in order. A FIFO of master indices
  (`MAX_RD` = 16 entries) sends each response to its master.
- While the FIFO is full, reads wait; writes still pass.

## Where this departs from, or goes beyond, the source design

These follow the source design:
- four regions, and one 200 MHz clock for all of them (its four-clock
  generator was set aside in favour of one clock);
- an interrupt controller that concatenates and buffers the region
  interrupts, with a status register, a mask register and one MSI;
- a PRR controller that drives the device's control block and holds freeze
  registers, set at the start of a load and cleared when it is done, which
  also reset the region;
- one copy of the register-side interface per region, acting as an
  intermediate buffer;
- pipeline stages between the region memory ports and the DDR side;
- one interconnect on the host side and one on the DDR side.

These are this implementation's own choices:
- Avalon-style buses, all widths, the address map and every register map;
- the MSI edge and acknowledge rule, and MASK resetting to all ones;
- the control-block handshake, and a region staying frozen after a failed
  load;
- a buffer depth of one, and reads of a frozen region returning 0;
- the draining rule in `mem_pipe`;
- round-robin arbitration;
- the memory interface as a paged window. The source names this block but
  does not describe it, and it has no DMA engine here.

Left out:
- The PCIe endpoint, the DDR controller and PHY, and the reconfiguration
  control block. These are the device's or the vendor's parts.
- The clock generator (a PLL).
- The "board utilities" block, which is named but not described.
- The clock-crossing bridges in front of DDR, which a single clock does not
  need.
- Limiting each region to its own part of DDR. The source design mentions
  this only as a possible later fix. As built, a region can reach all of
  DDR. Keeping regions apart in memory is left to the host software that
  hands out buffers.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
values worked out independently and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|---|---|
| `tb_irq_ctrl` | STATUS follows the lines; MASK resets to ones and blocks the MSI; MSI latency is two cycles and the request is held until acknowledged; unmasking a pending line re-raises the MSI |
| `tb_prr_ctrl` | freeze rises on start and only for the chosen region; every bitfile word is delivered once, in order, under random back-pressure; start while busy and a bad region number are ignored; error leaves the region frozen; a retry succeeds |
| `tb_prr_interface` | random register traffic against a register-file model; a frozen region sees no access, reads return 0 and the interrupt is masked; a read cut off by freeze ends cleanly |
| `tb_mem_pipe` | two stages: commands arrive unchanged and in order, read data is right, 64 back-to-back commands take 64 + 2 cycles, nothing passes while frozen, stale responses are dropped |
| `tb_ddr_interconnect` | three masters with random traffic: every response reaches its master in order with the right data, and grants rotate under contention |
| `tb_memory_interface` | a window write changes exactly one lane of one DDR word; read-back; page switching |
| `tb_host_interconnect` | random addresses reach exactly the mapped port; unmapped reads give `0xDEADBEEF`; the host is held while a read is outstanding |
| `tb_vfpga_shell` | the whole shell at its default size (below) |
| `tb_mem_bandwidth` | the whole shell, streaming memory traffic from the regions into a DDR model that never stalls: one region alone moves one 512-bit word per cycle (12.8 GB/s at 200 MHz); four regions together still fill the port and get exactly a quarter each |

`tb_vfpga_shell` puts the full shell, with default parameters, between these
stand-ins:
- `tb/pr_cb_model.sv`, a reconfiguration control block with a toy bitfile
  format (header, length, payload, XOR check word) that records which kernel
  each region holds;
- `tb/ddr_model.sv`, a DDR model with random stalls and a fixed read latency;
- `tb/vadd_kernel.sv`, a vector-add accelerator, one per region.

The test runs these steps:
1. Load all four regions, checking the freeze during each load and the
   kernel identity after it.
2. Load a corrupt bitfile, see the error and the region held frozen, then
   reload it.
3. Write the input vectors through the window.
4. Start all four kernels at once.
5. Serve the MSIs as a driver would.
6. Compare every result with A + B.

The test also counts each shell mechanism: freeze, an access to a frozen
region, a PR error, an MSI, an interrupt pending while masked, an MSI
re-raised on unmask, DDR contention between regions, a stalled region memory
command and an unmapped access. It fails if any of them never happened. It
runs in well under a second.

Each testbench was also run against a deliberately broken copy of its block
and reported failures.

What is *not* verified:
- timing at 200 MHz on a real device;
- behaviour against the real PCIe, DDR and reconfiguration IP, whose
  handshakes here are stand-ins;
- any accelerator other than the vector-add model.

## Simulating and changing it

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/vfpga_pkg.sv tb/tb_vfpga_shell.sv \
  --top-module tb_vfpga_shell
./obj_dir/Vtb_vfpga_shell
```

To run a block's own test instead, replace `tb_vfpga_shell` with that
testbench's name.

- **Regions.** `NUM_PRR` scales the shell. The STATUS registers hold up to
  16 regions.
- **Slots.** To add a slave, give it a slot in `vfpga_pkg` and a case in
  `host_interconnect`.
- **Real device parts.** To target the real PCIe, DDR or reconfiguration IP,
  adapt the `cb_*`, `host_*` and `ddr_*` ports of `vfpga_shell` to their
  interfaces.
- **Accelerators.** An accelerator placed in a region must reset on
  `prr_freeze[k]`, answer its register port and use its memory master by
  the bus rules above.
