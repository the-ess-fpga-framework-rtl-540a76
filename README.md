# A reusable FPGA framework for MicroTCA digitizer boards, in SystemVerilog

Every FPGA application on a MicroTCA board needs the same plumbing before it
can do anything useful: the crate CPU must be able to set parameters and read
status over PCIe, data must be moved in and out of the on-board memory, the
board's ADCs, DACs and clock chips must be configured, and samples must flow
from the ADCs through some processing to the DAC in real time. The idea of
the framework is to build that plumbing once, around standard on-chip buses
(AXI4 for memory traffic, AXI4-Lite for registers, a plain data+valid stream
for samples), and to let each application, the *custom logic*, plug into a
fixed set of interfaces. Board-specific parts (ADC and DAC interfaces, memory
controller, peripheral configuration) are kept apart from the common parts, so
the framework can move to another board.

This RTL implements the framework's own logic as published for the European
Spallation Source (ESS) FPGA framework, where the custom logic is the LLRF
(low-level RF) field controller running on a Struck SIS8300-KU digitizer. The
description it follows ("The ESS FPGA Framework and its Application on the ESS
LLRF System", Amstutz et al.) gives the block structure and the role of each
block, but not their insides; nearly every implementation detail below is
therefore a choice made here, and the text says so where it matters.

## Structure

```
                 +------------------------------------------------------------+
 PCIe block ---->| AXI4 (DMA, master 0) ---------------+                      |
 (outside)       |                                      v                     |
                 |                              axi_interconnect ---------->  |----> memory controller
                 |                                ^        ^                  |      (outside, AXI4 slave)
                 |                                |        |                  |
 PCIe block ---->| AXI4-Lite --> axil_interconnect|        | AXI4 (master 2)  |
                 |          |          |          |        |                  |
                 |     axil_regbank  cfg_regbank cl window |                  |
                 |     (framework)     ^           |       |                  |
                 |                     |           v       |                  |
                 |         config ctrl CPU    custom logic (outside) ---------|
                 |         (outside)             ^      |                     |
 ADC pins ------>| adc_interface -> preprocessing+      +-> dac_interface --->|----> DAC pins
                 |                   | AXI4 (master 1)                        |
                 |                   +-> axi_interconnect                     |
                 +------------------------------------------------------------+
```

`ess_fpga_top` instantiates:

| instance | module | role |
|---|---|---|
| `u_axil` | `axil_interconnect` | PCIe AXI4-Lite master to three 64 KiB windows |
| `u_regs` | `axil_regbank` | the framework's own registers (window 0) |
| `u_cfg_regs` | `cfg_regbank` | mailbox between the crate CPU and the configuration controller (window 1) |
| `u_axi` | `axi_interconnect` | DMA, capture engine and custom logic share the memory port |
| `u_adc` | `adc_interface` | four ADC channels into the fabric |
| `u_pre` | `preprocessing` | near-IQ demodulation + decimation per channel, capture to memory |
| `u_dac` | `dac_interface` | custom logic's output stream to the DAC |

Four things the framework connects to are not part of its own logic and
appear as ports of the top: the PCIe endpoint with its DMA engine
(`pcie_axil_*`, `dma_axi_*`), the DDR3 memory controller (`mem_axi_*`), the
configuration controller's soft CPU (a MicroBlaze system with I2C, SPI and
GPIO controllers that configures the board's peripherals from software; it
reaches its register bank through `mcu_axil_*` and is told about writes by
`cfg_cmd_wr_o`/`cfg_sts_wr_o`) and the custom logic (`cl_*`). All are vendor IP or application
code in a real build.

Everything runs on one clock `clk` with an asynchronous active-low reset
`rst_n`. The ADCs are assumed to be sampled at the fabric clock, so the data
path has no clock-domain crossing.

## Bus types

`ess_pkg` defines every link as a pair of packed structs: `*_req_t` holds what
the master drives, `*_resp_t` what the slave drives.

* AXI4: 32-bit address, 512-bit data (64 byte strobes), `INCR` bursts.
  Masters use 4-bit IDs (`axi_m_req_t`/`axi_m_resp_t`); the interconnect
  output carries 6-bit IDs (`axi_s_req_t`/`axi_s_resp_t`). Only the fields
  the framework uses are present (no lock, cache, prot, QoS, user).
* AXI4-Lite: 32-bit address and data (`axil_req_t`/`axil_resp_t`).
* Stream: data plus a one-bit valid, no ready. A block downstream must take
  every valid sample; this is what keeps the data path deterministic.

## The memory interconnect

`axi_interconnect` is the part with the most subtle rules, because three
independent masters share one AXI4 slave and AXI4 forbids some obvious
shortcuts.

* **Address channels.** AW and AR each have a one-entry register stage in
  front of the slave. When the stage is empty, or is being emptied in this
  cycle, a round-robin arbiter (first requester after the last winner) takes
  one master's address. The master's number (0 DMA, 1 capture engine,
  2 custom logic) is put in front of its ID. An address therefore costs one
  cycle of latency, and a steady stream of addresses still passes at one per
  cycle.
* **Write data order.** AXI4 has no ID on W, so write data must reach the
  slave in the order of the write addresses. Each accepted AW pushes the
  master number into a four-entry FIFO, and the W channel is switched to the
  master at the head of that FIFO until the beat with `WLAST` has passed. The
  number is pushed when the address is taken from the master, not when the
  slave takes it. A slave that waits for write data before it accepts an
  address therefore cannot deadlock the interconnect. While the FIFO is full,
  no further AW is accepted.
* **Responses.** B and R go to the master named by the top two ID bits,
  and that master's ready is passed back. R beats of different masters may
  interleave if the slave does so. Each master sees only its own IDs.

Arbitration is per channel, so one master's long read burst does not block
another's write. Nothing limits how many transactions one master has
outstanding, apart from the W FIFO for writes.

## Register access

`axil_interconnect` decodes the upper address bits into three windows of
64 KiB:

| window | base | slave |
|---|---|---|
| 0 | `0x0000_0000` | framework register bank (`u_regs`) |
| 1 | `0x0001_0000` | configuration controller's register bank (`u_cfg_regs`) |
| 2 | `0x0002_0000` | custom logic register bank |

It has one write and one read in flight at a time. It presents AW and W to
the chosen slave and lets each one go as soon as the slave takes it. Any
address outside the windows is answered with `DECERR` by the interconnect
itself, and no slave sees it.

`axil_regbank` is the register bank that the framework and the custom logic
share (the custom logic instantiates its own copy with its own sizes). It has
`N_CTRL` control registers, read/write and reset to 0, followed by `N_STAT`
read-only status registers. A write is taken when AW and W are both valid.
`BVALID` follows in the next cycle, and in the same cycle `wr_pulse_o[k]`
pulses for the register that was written, so a register can also act as a
command. Byte strobes are honoured. Writes to status registers, and any
access past the last register, get `SLVERR`.

`cfg_regbank` is the configuration controller's register bank. The
controller's soft CPU sets up the ADCs, DACs and clock chips on its own, but
the crate CPU must still be able to steer board functions and read the
peripherals' status. The bank is a mailbox with two AXI4-Lite ports, one for
the crate CPU (window 1) and one for the soft CPU. Each side writes its own
registers at offset 0 and reads the other side's registers after them:

| side | `0x00 + 4k` | after that |
|---|---|---|
| crate CPU | command k (rw, 8 registers) | status k (ro, 8 registers) |
| soft CPU | status k (rw, 8 registers) | command k (ro, 8 registers) |

A written value is visible to the other side one cycle after the write is
taken. `cfg_cmd_wr_o[k]` and `cfg_sts_wr_o[k]` pulse for one cycle on each
write to command or status register k, and can serve as interrupts. The bank
is two `axil_regbank` instances whose control outputs feed each other's
status inputs.

### Framework register map (window 0)

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | SCRATCH | rw | free for software |
| 0x04 | DP_CTRL | rw | bit0 ADC on, bit1 DAC on; a write with bit2 set restarts the demodulation/decimation windows; a write with bit3 set clears the ADC over-range flags |
| 0x08 | DEC_LOG2 | rw | bits 3:0: decimation factor 2^n, n = 0..8 |
| 0x0C | CAP_CTRL | rw | a write with bit0 set starts a capture; bit1 source (0 raw, 1 processed); bits 5:4 channel |
| 0x10 | CAP_BASE | rw | capture start address; bits 9:0 ignored (1 KiB aligned) |
| 0x14 | CAP_LEN | rw | capture length in bytes, rounded down to whole KiB |
| 0x18 | FW_ID | ro | `0xE55F_0001` |
| 0x1C | CAP_STAT | ro | bit0 busy, bit1 done, bit2 memory error, bit3 overflow, bits 11:8 ADC over-range per channel |
| 0x20 | CAP_BEATS | ro | 64-byte beats written by the current/last capture |
| 0x24 | DAC_COUNT | ro | samples sent to the DAC (wraps) |

A typical capture: write CAP_BASE and CAP_LEN, write CAP_CTRL with bit0
set, poll CAP_STAT until bit1 is set, then read the memory by DMA.

## The data path

### ADC interface

`adc_interface` registers each ADC word twice: once in an input register,
and once in a pipeline register. It converts offset binary to two's
complement by inverting the MSB, and sends all channels on as one stream
whose valid bit follows `enable_i`. The latency is two cycles. A full-scale
code, at either end of the range, sets that channel's sticky over-range flag.

### Near-IQ demodulation

The LLRF system samples an intermediate frequency (IF) so that exactly M
samples cover N IF periods (here M = 14, N = 3, IF = 3/14 of the sample
rate). Sample k of a window then lies at phase 2πkN/M, and one window gives
the complex amplitude:

    I =  (2/M) Σ x[k] cos(2πkN/M)
    Q = -(2/M) Σ x[k] sin(2πkN/M)

`neariq_demod` evaluates this over consecutive, non-overlapping windows.
`COS_T` and `MSIN_T` are the cosine and minus-sine tables as 18-bit signed
integers, scaled by 2^17 − 1. They are computed by constant functions when
the module is elaborated, so changing M or N needs no table file. Two
multiply-accumulators run at one sample per cycle. After the M-th sample the
sums are multiplied by a rounded 2/M · 2^16 and shifted right by 33 bits with
rounding, then saturated to ±(2^15 − 1). An IF sine of amplitude A and phase
φ relative to the window start gives I = A·cos φ, Q = A·sin φ, to within a
few LSB. The result is valid two cycles after the window's last sample.
`clr_i` restarts the window at k = 0 and so sets the phase reference.

### Decimation

`decimator` sums 2^n consecutive I/Q pairs and outputs the sum shifted right
by n bits. This is a boxcar low-pass filter read out once per window, that
is, a first-order CIC decimator. n is set at run time (0..8). The output of a
window is valid one cycle after its last input.

`preprocessing` runs one demodulator and one decimator per channel, with
shared settings. All channels therefore produce output in the same cycle,
and one valid bit (`cl_iq_valid_o`) serves the whole vector `cl_iq_o` to the
custom logic.

### Capture to memory

The pre-processing block can also write one channel straight into memory:

* raw: two consecutive ADC samples per 32-bit word, the earlier one in
  bits 15:0;
* processed: one I/Q pair per word, I in bits 31:16 and Q in bits 15:0.

`mem_writer` packs 16 words into a 512-bit beat, with the first word at the
lowest address. Full beats go into a 32-beat FIFO. Whenever the FIFO holds
16 beats, it writes a 1 KiB `INCR` burst and waits for its response before
the next one. Bursts are 1 KiB aligned, so they never cross a 4 KiB
boundary.

The stream cannot be stopped, so a memory that stalls for too long
overflows the FIFO. The beat that finds the FIFO full is dropped and the
sticky overflow flag is set. The capture still ends after the requested
number of beats, so in that case the stored data has a gap and fewer beats
are written. A non-OKAY write response sets the error flag.

At most one word per cycle arrives, which is one beat every 16 cycles, while
the memory side can take a beat per cycle. The FIFO therefore only matters
when the memory is busy with other masters or refresh.

### DAC interface

`dac_interface` registers each valid sample of the custom logic's output and
holds it until the next one, because the DAC needs a value every clock. It
converts two's complement to offset binary. While disabled it outputs
mid-scale. The latency is one cycle.

## Connecting an application

The custom logic sees:

* `cl_iq_o[3:0]`, `cl_iq_valid_o`: the demodulated, decimated channels;
* `cl_dac_i`, `cl_dac_valid_i`: its output to the DAC;
* `cl_axi_req`/`cl_axi_resp`: an AXI4 master port to the on-board memory
  (master 2, any 4-bit ID);
* `cl_axil_req`/`cl_axil_resp`: the AXI4-Lite window at `0x0002_0000`, meant
  for one or more `axil_regbank` instances with the application's registers.

## Parameters

| parameter | default | where | note |
|---|---|---|---|
| `AXI_DATA_W` | 512 | `ess_pkg` | as in the published framework build |
| `AXI_ADDR_W`, `AXI_MID_W` | 32, 4 | `ess_pkg` | chosen here |
| `NUM_ADC`, `SAMPLE_W` | 4, 16 | `ess_pkg` | four ADC inputs as drawn in the framework's block diagram; width chosen here |
| `IQ_M`, `IQ_N` | 14, 3 | `ess_fpga_top`, `preprocessing` | near-IQ ratio, chosen here |
| `BURST_LEN`, `FIFO_DEPTH` | 16, 32 | `mem_writer` | capture burst and buffer, chosen here |
| `MAX_LOG2` | 8 | `decimator` | largest decimation 256 |
| `N_CTRL`, `N_STAT`, `WIN_W` | 8, 8, 12 | `axil_regbank` | the top uses 6 and 4 |
| `WQ_DEPTH` | 4 | `axi_interconnect` | outstanding write bursts |
| `N_CMD`, `N_STS` | 8, 8 | `cfg_regbank` | mailbox registers per direction |

## How far to trust it

What follows the published framework: the set of blocks and how they are
connected, the split between the framework and the custom logic, AXI4 for
memory and AXI4-Lite for registers, a data+valid sample stream, the 512-bit
memory bus, a register bank type shared with the custom logic, a
configuration register bank through which the crate CPU controls board
functions and reads peripheral status, and a pre-processing stage with near-IQ sampling, decimation and a raw-or-processed
memory interface.

What is this design's own: all block internals, the register map and
address windows, the arbitration scheme, the near-IQ ratio, the boxcar
decimator, the capture format and overflow policy, the mailbox layout of the
configuration register bank, the single clock, and the
ADC/DAC formats.

Known limits:

* Per-channel ADC clocks, I/O timing and serializers are not modelled; a
  real board needs them inside `adc_interface` and `dac_interface`.
* The AXI4 signals carry no lock/cache/prot/QoS fields, and the
  interconnect has a single slave.
* `axil_interconnect` handles one transaction per direction at a time. This
  is enough for register traffic but not a throughput design.
* The near-IQ demodulator gives one output per window, not a sliding
  estimate, and the decimator has no droop compensation.
* Nothing here has been timed on an FPGA. The published framework ran its
  interconnect at 125 and 200 MHz, with vendor IP in place of these blocks.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. Testbench helpers:

* `axi_mem_model`: an AXI4 memory with random stalls and an optional error
  address;
* `axi_tb_master`: AXI4 burst read and write tasks;
* `axil_tb_master`: AXI4-Lite single read and write tasks.

| testbench | what it shows |
|---|---|
| `tb_axil_regbank` | read/write, strobes, SLVERR, write pulse, one-cycle response |
| `tb_cfg_regbank` | commands from the CPU side and status from the soft-CPU side seen by the other, read-only checks, write pulses |
| `tb_axil_interconnect` | 60 random writes to three banks, read-back, DECERR |
| `tb_axi_interconnect` | three masters with random bursts against a stalling memory, data/ID/LAST checks |
| `tb_adc_interface` | format conversion, two-cycle latency, over-range flags |
| `tb_neariq_demod` | I/Q of random sine waves within 3 LSB for M/N = 14/3 and 4/1, latency, saturation |
| `tb_decimator` | every factor 1..256, exact sums, one output per window |
| `tb_mem_writer` | memory contents, burst alignment, timing, overflow, error response |
| `tb_preprocessing` | I/Q of four channels, raw and processed captures |
| `tb_ess_fpga_top` | the whole framework at default sizes: register access to all windows including the configuration mailbox, ADC to DAC, both capture modes during DMA and custom-logic traffic, DMA read-back, over-range; it counts each mechanism and fails if one never happened |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/ess_pkg.sv tb/tb_ess_fpga_top.sv --top-module tb_ess_fpga_top -o sim
    ./obj_dir/sim

The end-to-end test takes about ten seconds.
