# A RISC-V edge SoC with 1D-convolution and dot-product accelerators

Small edge devices spend much of their signal-processing time in one loop:
multiply two 32-bit words from memory and add the product to a running sum.
FIR filters, correlators, matched filters and the layers of a 1D CNN are all
built from that loop. Run on a scalar RV32I core, each multiply-accumulate
(MAC) costs about ten cycles: two loads, a multiply, an add and the loop
bookkeeping. This SoC keeps the processor unchanged. It adds two small
memory-mapped engines that run the loop from the shared data SRAM on their
own, at three cycles per MAC:

* **DSP_CONV1D** computes `y[i] = sum_{j<K} x[i+j]*h[j]` for `i = 0..N-K`
  (a "valid" correlation-style convolution). Outputs are narrowed to 32 bits.
* **DSP_DOT_PRODUCT** computes `sum_{j<L} A[j]*B[j]` and keeps the full 64-bit
  result.

The CPU writes a handful of registers, sets Start, and goes on with other work
until an interrupt (or a polled STATUS bit) says the result is in memory.

The RTL here is everything in the SoC except the RV32I core itself. That core
is a standard in-order processor, and any RV32I implementation can be attached
to the two ports described below. The testbenches stand in for it with a
bus-functional model.

## System structure

```
  CPU fetch  ------------------------------------------------> inst_mem (32 KB ROM)
  CPU data   --> bus_interconnect --+--> mem_arbiter (CPU port) -------> data_mem (32 KB SRAM)
                                    +--AXI-Lite--> dsp_conv1d ------MMI 0--^
                                    +--AXI-Lite--> dsp_dot_product -MMI 1--^
                                                      |  irq_conv, irq_dot --> CPU
```

There is one clock. `rst_n` is an asynchronous, active-low reset. Memory
contents are not reset.

| Region | Range | Reached by |
|---|---|---|
| Instruction ROM, 32 KB | `0x0000_0000 – 0x0000_7FFF` | fetch port only |
| Data SRAM, 32 KB | `0x0000_8000 – 0x0000_FFFF` | CPU loads/stores and both accelerators |
| DSP_CONV1D registers | `0x0100_0000 – 0x0100_00FF` | CPU, through AXI-Lite |
| DSP_DOT_PRODUCT registers | `0x0100_0100 – 0x0100_01FF` | CPU, through AXI-Lite |
| Reserved | `0x0100_0200 – 0x0100_02FF` | nothing (error) |

A CPU load or store to any address outside the data SRAM and the two register
windows completes with an error. That includes the ROM window and the reserved
window.

### Ports a processor drives (`soc_top`)

| Port | Dir | Meaning |
|---|---|---|
| `imem_en`, `imem_addr[31:0]` | in | Instruction fetch. `imem_rdata` is valid one clock after `imem_en`. The word index is `addr[14:2]`. |
| `cpu_req`, `cpu_we`, `cpu_addr`, `cpu_wdata`, `cpu_be[3:0]` | in | Data access. It is held unchanged until acknowledged. |
| `cpu_ack`, `cpu_rdata`, `cpu_err` | out | One-cycle acknowledge. It carries the read data and an error flag. A new request may start the cycle after the acknowledge. |
| `irq_conv`, `irq_dot` | out | Level interrupts. They stay high until the unit's IRQ_CLEAR is written. |

The data bus is a plain request/acknowledge bus, so the CPU sees wait states.

| Access | Cycles from request to `cpu_ack` |
|---|---|
| SRAM | 2 (the CPU is always granted the SRAM at once) |
| Accelerator register | 3 (one AXI-Lite write with AW and W together, or one read) |
| Unmapped address | 2 |

One access is in flight at a time.

Parameters of `soc_top`:
* `IMEM_INIT` names a `$readmemh` image for the ROM. If it is empty, the ROM
  holds `0x00000013` (NOP) everywhere.
* `CONV_SATURATE` selects how convolution outputs are narrowed: 0 truncates
  (the default), 1 saturates.

Memory sizes come from the address map and are set in `soc_pkg`.

## Programming an accelerator

DSP_CONV1D registers (byte offsets in its window):

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | CONFIG_IN_ADDR | RW | byte address of x |
| 0x04 | CONFIG_KERN_ADDR | RW | byte address of h |
| 0x08 | CONFIG_OUT_ADDR | RW | byte address of y |
| 0x0C | CONFIG_IN_LEN | RW | N |
| 0x10 | CONFIG_KERN_LEN | RW | K |
| 0x14 | CONTROL | RW | bit 0 Start, bit 1 Int_En |
| 0x18 | STATUS | RO | bit 0 Done, bit 1 Error |
| 0x1C | IRQ_CLEAR | WO | write 1 to clear the interrupt |

DSP_DOT_PRODUCT registers:

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | CONFIG_VA_ADDR | RW | byte address of A |
| 0x04 | CONFIG_VB_ADDR | RW | byte address of B |
| 0x08 | CONFIG_LEN | RW | L |
| 0x0C | CONTROL | RW | bit 0 Start, bit 1 Int_En |
| 0x10 | STATUS | RO | bit 0 Done, bit 1 Error |
| 0x14 | RESULT_LO | RO | result bits 31:0 |
| 0x18 | RESULT_HI | RO | result bits 63:32 |
| 0x1C | IRQ_CLEAR | WO | write 1 to clear the interrupt |

Unlisted offsets read 0 and ignore writes. Byte strobes apply to the
configuration registers. CONTROL and IRQ_CLEAR look only at byte 0.

A run goes as follows:

1. Store the data in the SRAM.
2. Write the configuration registers.
3. Write CONTROL = Start, plus Int_En if wanted.
4. Wait for the interrupt, or poll STATUS until Done = 1.
5. Read the outputs, or RESULT_LO/HI.
6. Write IRQ_CLEAR = 1.

The control bits behave as follows:

* **Start** clears itself in the cycle the unit leaves IDLE. Reading it back
  as 1 therefore means "start accepted but not yet taken".
* **Done** is cleared by a new start. It stays 1 after IRQ_CLEAR, so software
  that polls after the interrupt still sees the run as finished.
* **IRQ_CLEAR** drops the interrupt and also returns the FSM from DONE to
  IDLE. A unit that has finished must get an IRQ_CLEAR, even when it was run
  with Int_En = 0, before it will take the next Start.
* **Error** is set, together with Done, when the configuration cannot be run.
  Nothing in memory is touched in that case. The checks are:
  * K = 0 or K > N (convolution), or L = 0 (dot product);
  * a base address not word aligned;
  * any of the arrays not lying wholly inside the data SRAM. For the
    convolution that means x (N words), h (K words) and y (N-K+1 words); for
    the dot product, A and B (L words each).

All operands are signed 32-bit two's complement. Products are 64-bit and
accumulate in a 64-bit register, so a convolution output is the 64-bit sum
narrowed to 32 bits:
* truncation (`CONV_SATURATE = 0`) keeps the low word;
* saturation (`CONV_SATURATE = 1`) clamps to the int32 range.

The accelerators are started and run independently. Both may run at once.

## Control FSMs and their timing

Both units move one MAC at a time through three sub-phases, each of which is
one SRAM access slot:

```
  RD_X / RD_A   issue the read of the data word
  RD_H / RD_B   issue the read of the coefficient; capture the first word
  MAC           capture the second word; accumulate the product
```

**DSP_CONV1D** has five states: IDLE → INIT_OUT → KERNEL_LOOP → OUT_WRITE →
DONE.
* IDLE latches the configuration.
* INIT_OUT clears the accumulator (1 cycle).
* KERNEL_LOOP takes 3 cycles per tap.
* OUT_WRITE stores the narrowed sum. It takes 1 cycle: the write counts as
  done once the arbiter grants it.
* The FSM then goes back to INIT_OUT for the next output, or on to DONE.
* DONE sets Done and the interrupt in its first cycle.

With no contention, an output costs `3K + 2` cycles and a run costs
`(N-K+1)(3K+2) + 1` cycles from leaving IDLE to Done.

| Example | Cycles |
|---|---|
| N = 1024, K = 16, from leaving IDLE to Done | 50,451 (0.50 ms at 100 MHz) |
| Same run, from the Start write's `cpu_ack` to `irq_conv`, as measured at the SoC ports | 50,451 |

The published first-order estimate for this engine is `3K + 1` per
output, 49,451 cycles for the same run. The extra cycle per output here is
the INIT_OUT state, which the five-state FSM keeps as a state of its own
rather than folding it into the write.

**DSP_DOT_PRODUCT** has three states: IDLE → DP_LOOP → DONE. IDLE latches the
configuration and clears the accumulator. DP_LOOP takes 3 cycles per element.
DONE copies the 64-bit sum to RESULT and sets Done. A run costs `3L + 1`
cycles from leaving IDLE to Done.

**When the CPU is active.** Every cycle in which the CPU uses the SRAM delays
an accelerator by one slot. The run times above are minimums. With both units
active, the convolution unit also wins over the dot-product unit.

## Memory master interface (MMI) and arbitration

Each accelerator reaches the SRAM through a memory master interface with these
signals:

| Signal | Dir (accelerator view) | Meaning |
|---|---|---|
| `req` | out | request |
| `wr_en` | out | write |
| `addr` | out | byte address |
| `wrdata` | out | write data |
| `ready` | in | granted this cycle |
| `done` | in | access completed |
| `rddata` | in | read data, valid with `done` |

The request and response bundles are the packed structs `mmi_req_t` and
`mmi_rsp_t` in `soc_pkg`.

The handshake:
* An access is taken in the cycle that `req` and `ready` are both high.
* `done` follows exactly one clock later, since the SRAM has one cycle of
  latency.
* For a read, `rddata` is valid with `done`.
* While not granted, the master keeps `req` and its address unchanged.

`mmi_master` is the small block inside each accelerator that runs this
handshake for the FSM. It allows one access outstanding, and it may raise the
next request in the same cycle as the previous `done`. That is what lets
RD_X, RD_H and MAC follow each other without gaps.

`mem_arbiter` owns the single SRAM port. It grants with fixed priority:
1. the CPU;
2. then DSP_CONV1D (MMI 0);
3. then DSP_DOT_PRODUCT (MMI 1).

The grant is combinational and the granted access goes to the SRAM in the
same cycle, so the port takes one access every cycle while anyone is asking.
It remembers the previous cycle's winner in order to route `done` and the read
data back. A master that loses simply waits. With CPU priority, a CPU that
hammers the SRAM can starve the accelerators; nothing prevents that, by
design.

## Arithmetic (`mac_unit`)

`mac_unit` holds one signed 32×32 multiplier, a 64-bit adder and a 64-bit
accumulator, with `clr` and `en` controls. `res32` is the narrowed value of
`acc`, selected by the `SATURATE` parameter. The multiplier and adder form
one combinational path into the accumulator. That path is the SoC's critical
path.

## How the blocks map to files

| File | Contents |
|---|---|
| `rtl/soc_pkg.sv` | address map, register offsets, bit positions, bus structs, helper functions (byte-strobe merge, SRAM range check) |
| `rtl/soc_top.sv` | the SoC |
| `rtl/inst_mem.sv` | instruction ROM, synchronous read, optional `$readmemh` image |
| `rtl/data_mem.sv` | data SRAM, single port, byte enables, synchronous read |
| `rtl/bus_interconnect.sv` | CPU data-bus decoder and router, AXI-Lite master side |
| `rtl/mem_arbiter.sv` | SRAM port arbiter |
| `rtl/axil_slave.sv` | AXI4-Lite register front end used by both accelerators |
| `rtl/mmi_master.sv` | accelerator side of the memory master interface |
| `rtl/mac_unit.sv` | MAC datapath |
| `rtl/dsp_conv1d.sv`, `rtl/dsp_dot_product.sv` | the two accelerators |

Each file opens with a description of its interface and timing.

## Where this RTL departs from the published design, or fills it in

* **Cycles per convolution output.** The published estimate is 3K+1; this RTL
  takes 3K+2. The dot product matches its 3L+1 estimate.
* **MMI request after a grant.** The published interface has REQ
  held "one cycle longer" after READY and then dropped. Here REQ drops as
  soon as the access is taken, unless the next access is already wanted, so
  the port is not held idle.
* **The CPU bus.** The CPU side is a simple request/acknowledge bus. An
  AXI-Lite CPU port would need a small bridge.
  * The decoder compares full address ranges rather than only the top 16
    address bits.
  * Data loads from the ROM window are not routed. The ROM has one port, and
    it belongs to instruction fetch.
* **IRQ_CLEAR and Done.** IRQ_CLEAR both clears the interrupt and returns
  DONE to IDLE, while Done stays set until the next Start. The two published
  descriptions differ on whether IRQ_CLEAR clears Done; keeping Done set
  follows the programming flow.
* **Choices made here where the published design says nothing:**
  * the Error conditions;
  * self-clearing Start;
  * signed operands;
  * truncation as the default narrowing;
  * the order between the two accelerators;
  * the AXI-Lite slave timing;
  * SRAM contents not being reset;
  * unmapped accesses answering with an error.

Not included:
* the RV32I processor. Its M extension and pipeline are the processor's
  business.
* any DMA, FFT or matrix engine, low-power mode, or toolchain support; these
  belong to future extensions.

## Workloads

These sizes were run in simulation at the default (full) configuration:

| Workload | Accelerator cycles | Result |
|---|---|---|
| Convolution N = 1024, K = 16 | 50,451 | uses 2,049 of the 8,192 SRAM words |
| Convolution N = 1024, K = 32 | 97,315 | uses 2,049 SRAM words |
| 1D CNN layer, N = 256, K = 16, 4 input channels, 8 output channels | 385,632 over 32 convolution calls (123,392 MACs), i.e. 3.9 ms at 100 MHz | the CPU adds the per-channel partial outputs |
| Dense layer, 128 inputs × 64 outputs | 64 × 385 = 24,640 | the weights alone fill the whole 32 KB SRAM, so the CPU streams one weight row at a time into a buffer |

A 16-tap FIR needs 50 cycles per output sample: 0.5 µs at 100 MHz. That is
fast enough for 1 Msps but not for 10 Msps, which would need a faster clock or
a pipelined datapath.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog if it
hangs. Run from the project root, because two testbenches read
`tb/imem_test.hex` by a relative path:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/soc_pkg.sv tb/tb_soc_top.sv --top-module tb_soc_top
./obj_dir/Vtb_soc_top
```

Replace `tb_soc_top` with any other testbench name.

| Testbench | What it covers |
|---|---|
| `tb_mac_unit` | random and corner-case products against a 64-bit model, both narrowing modes |
| `tb_data_mem`, `tb_inst_mem` | byte enables, read timing, ROM image loading |
| `tb_mmi_master`, `tb_mem_arbiter`, `tb_axil_slave` | handshakes under random stalls, priority, strobes, back-to-back issue |
| `tb_bus_interconnect` | decoding of every region and boundary, error responses, latencies |
| `tb_dsp_conv1d`, `tb_dsp_dot_product` | each accelerator against a reference model. Covers random sizes up to N = 1024 and L = 2048, memory stalls, error configurations and interrupt behaviour. Cycle counts are checked against the formulas above. |
| `tb_soc_top` | the whole SoC at its defaults, driven by a processor model. Covers ROM fetch, bus errors, the N = 1024 convolution with K = 16 and K = 32 and their exact cycle counts, both accelerators running under CPU contention, the error path, polling. It counts each of these events and fails if any never occurs. |
| `tb_workload_cnn1d`, `tb_workload_dense` | the CNN and dense layers above, checked value by value |

All testbenches pass. For each block, a copy with one deliberate bug was also
simulated against its testbench, and every testbench caught its bug. Examples:
an unsigned multiply, ignored byte enables, reversed arbitration priority,
one tap too many.

All of this is simulation. Nothing has been checked on an FPGA or in silicon,
and the processor has been modelled only at its bus.

## Known tool messages

* Verilator reports a combinational loop through the arbiter's grant
  (UNOPTFLAT). There is no real loop: MMI requests depend only on registered
  state. The report arises because each request/response bundle is one
  struct variable.
* Verilator also notes that `rst_n` feeds both flip-flops and the
  `disable iff` of the assertions.

Both messages are explained in the opening comments of `mem_arbiter` and
`soc_top`.
