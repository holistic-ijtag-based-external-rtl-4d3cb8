# IJTAG health monitor for internal and external UAV sensors

A flight controller built on an FPGA depends on two kinds of sensor. Some are
on the die: temperature and supply voltages. Others sit outside on a bus, like
the IMU with its accelerometer and gyroscope. This design brings both kinds
into a single IEEE 1687 (IJTAG) scan network.

Each instrument sits behind a Segment Insertion Bit (SIB). Each SIB also
carries a small set of fault flags. The flags are ORed up the hierarchy
without a clock, so a fault reaches the top at once. An on-chip *instrument
manager* (IM) then does two things:

- It interrupts the processor three cycles after a fault appears.
- It finds which SIB the fault sits behind by scanning the network. It needs
  only a ROM that describes the network for this.

The processor can also read any instrument at any time through a standard
JTAG TAP.

The RTL is a case-study system built from these parts:

- Three SIBs and two 16-bit test data registers (TDRs).
- An instrument for the Xilinx XADC (die temperature and supplies), read over
  its DRP port.
- An instrument for the MPU6050 IMU, read over I2C.
- A TAP gateway.
- The instrument manager and its ROM.

## Network topology and scan order

The scan path runs from SI to SO as follows. A bracketed part is in the path
only while the SIB before it in the list is open.

```
SI ─► [ [ TDR-2 ] ─► SIB-2 ─► [ TDR-1 ] ─► SIB-3 ] ─► SIB-1 ─► SO
         hosted by SIB-2        hosted by SIB-3
       └─────────────── hosted by SIB-1 ────────┘
```

- TDR-1 holds the XADC temperature word.
- TDR-2 holds the MPU6050 checker word.
- A TDR loads its word on capture and shifts it out MSB first. It has no
  update stage, because both instruments are read-only.
- The TAP or the instrument manager drives SI and the scan controls, through
  a multiplexer.

The order of elements as bits leave SO, with every SIB open, is:

```
SIB-1, SIB-3, TDR-1, SIB-2, TDR-2
```

This is also the order of the IM's ROM. Each element's ROM address serves as
its address:

| Element | Address |
|---|---|
| SIB-1 | `0x0000` |
| SIB-3 | `0x0001` |
| TDR-1 | `0x0002` |
| SIB-2 | `0x0003` |
| TDR-2 | `0x0004` |

The reported locations are therefore SIB-3 = `0001` for an internal
(XADC) fault and SIB-2 = `0003` for an external (IMU) fault.

After reset every SIB is closed, so the active path is only the four cells of
SIB-1. The longest path is 3 × 4 + 2 × 16 = 44 bits.

## The extended SIB (`sib_ext`)

Each SIB holds four scan cells. In order from SI to SO they are:

| Cell | Meaning | Capture loads | Update loads |
|---|---|---|---|
| S | segment open | S | S ← cell |
| X | mask: this SIB's fault is not propagated | X | X ← cell |
| C | correct state: 1 while nothing is latched | C flag | – |
| F | fault (leaves SO first) | F & ~X | – |

A **leaf** SIB hosts an instrument's TDR:

- Its F flag is `fault_in | sticky`. The sticky register is set by
  `fault_in` and cleared only by `afpn_rst`, the reset of the fault
  propagation network, or by `rst`. F therefore rises in the same cycle as the
  instrument's fault and stays up after a short pulse.
- Its C flag is the inverse of F.

A **non-leaf** SIB has no flag state of its own:

- F is the OR of its children's `to_f`.
- C is the AND of their `to_c`.

Masking a child therefore clears the parent's F by itself.

The SIB passes on `to_f = F & ~X` and `to_c = C`. Both are combinational, so
the top flag `to_f` follows an instrument's fault with no clock edge between
them.

When S = 1, the hosted segment is inserted between SI and the S cell, and
`host_sel = sel & S`. This is the usual IEEE 1687 SIB.

## The instrument manager (`instrument_manager`, `im_rom`)

### Detection

The top `to_f` passes through a 2-flop synchronizer plus one register, so
`irq` rises on the **third** clock edge after the flag. It stays high until
`irq_ack`. In the same cycle the IM takes the network, once the TAP is not in
the middle of a data scan of it.

### Localization by ROM walk

The IM never needs to know the network's structure beyond the ROM. One
**pass** is:

1. One capture cycle. Every SIB on the active path loads its flags.
2. Shift cycles. In step with each bit that leaves SO, the IM walks the ROM
   and knows which element and which cell that bit belongs to. Every bit is
   shifted back in at SI. After a full pass the path therefore holds its old
   contents, except for bits the IM chooses to change while recirculating:
   - If a **non-leaf** SIB's F bit is 1, the IM writes its S cell to 1. The
     SIB opens at the next update, and another pass follows.
   - If a **leaf** SIB's F bit is 1, the IM reports the fault at that point:
     `localized_sib_addr`, `loc_valid`, and a push into the location FIFO.
     It then writes the SIB's X cell to 1. After the update that fault no
     longer reaches `to_f`, so it is not reported twice.
3. The walk skips a closed SIB's subtree using the descriptor's skip field.
   When the walk reaches END, the IM spends one idle cycle and one update
   cycle.

When a pass opened nothing, the IM waits SYNC_STAGES + 1 cycles so the
masked flag can settle through the synchronizer. It then returns to idle.
If another unmasked fault is still up, it starts again.

### Latency in the case-study network

These counts are measured from the edge on which `to_f` rises:

| Event | Cycles |
|---|---|
| `irq` | 3 |
| Single fault (SIB-3 or SIB-2): address reported | 16 |
| Both faults present at once: SIB-3 reported | 16 |
| Both faults present at once: SIB-2 reported | 20 |
| Fault while SIB-1 is already open: SIB-3 reported | 9 |
| Fault while SIB-1 is already open: SIB-2 reported | 13 |

For a single fault, the 16 cycles are the detection delay, a first pass
through the closed SIB-1 (which opens it), and a second pass in which the
leaf's F cell leaves SO.

The ROM addresses visited during a single-fault run are:

```
000 005 | 000 001 003 005
```

The first group is the pass that finds SIB-1 closed and jumps to END. The
second pass skips the closed leaf SIBs' TDRs.

### ROM descriptors

Each ROM word is 32 bits: `{kind[31:24], level[23:16], arg[15:0]}`.

| kind | meaning | arg |
|---|---|---|
| `00` | SIB hosting SIBs | address just past its subtree |
| `01` | TDR | length in bits |
| `02` | leaf SIB (hosts a TDR) | address just past its subtree |
| `03` | END of the network | – |

The case-study table is:

| Address | Element | Word |
|---|---|---|
| 0 | SIB-1 | `00000005` |
| 1 | SIB-3 | `02010003` |
| 2 | TDR-1 | `01020010` |
| 3 | SIB-2 | `02010005` |
| 4 | TDR-2 | `01020010` |
| 5 and up | END | `03000000` |

The level field documents the hierarchy and is not used by the walk.

To describe another network, change `im_rom`'s table and the network
together. The walk itself does not change.

### Processor interface

The processor-side signals are:

- `irq` and `irq_ack`.
- The location FIFO: `loc_fifo_empty`, `loc_fifo_pop`, `loc_fifo_data`, and
  a sticky `loc_fifo_overflow`. The FIFO is LOC_DEPTH deep, 4 by default.
- `flag_clear`, which pulses `afpn_rst` for one cycle. This clears the leaf
  flags.
- `healthy`, the synchronized top C flag.

The processor also has to clear the X bits. It does so with a TAP scan that
writes X = 0, or with a reset.

## Instruments

**XADC instrument (`xadc_ei`).**

- After reset it writes the temperature upper-alarm register (DRP `0x50`)
  with TEMP_UPPER. The default is `0xC7B4`, which is 120 °C under the XADC
  transfer function `K = code × 503.975 / 65536`. On the same scale 25 °C
  reads `0x9772`.
- It then polls the status registers round-robin: temperature `0x00`,
  VCCINT `0x01`, VCCAUX `0x02` and VCCBRAM `0x06`. Each read is one DRP
  transaction.
- The temperature word is the parallel input of TDR-1.
- The fault flag is the OR of the XADC alarm pins, selected by ALM_MASK. It
  feeds SIB-3.

**MPU6050 instrument (`mpu6050_ctrl` with `i2c_master`).**

- It wakes the sensor by writing `0x00` to PWR_MGMT_1 (`0x6B`) at I2C
  address `0x68`.
- It then repeats the following without end:
  1. Point at register `0x3B`.
  2. Issue a repeated start.
  3. Burst-read 14 bytes: accelerometer X/Y/Z, temperature, gyroscope X/Y/Z.
  4. Publish the words.
  5. Wait POLL_GAP cycles.
- Every frame also yields a checker word `chk`:
  - `chk[7:0]` is the XOR of the 14 bytes.
  - `chk[15:8]` is the 8-bit two's-complement checksum.
- `chk` is the parallel input of TDR-2.
- The fault flag is raised by a NACK from the sensor or by any fault-injection
  button (`instr_btn`). It feeds SIB-2.

**I2C master.** The master takes byte commands: START, WRITE, READ with
ACK/NACK, and STOP. Each SCL bit has four phases of CLK_DIV clocks. SDA only
changes while SCL is low.

The master supports neither clock stretching nor arbitration.

## TAP gateway and sharing the network

`tap_ctrl` is the standard 16-state IEEE 1149.1 controller:

- The IR is 2 bits. `01` selects the IJTAG network and `11` is BYPASS.
- The IR resets to BYPASS and captures `01`.
- In the DR states of the network instruction, the controller drives the
  network's select, capture, shift and update signals.

The network has one set of control inputs. A multiplexer gives them to the IM
whenever `im_busy` is high, and to the TAP otherwise. The IM waits for a TAP
data scan that is under way to finish. A host should start a TAP data scan
only when `im_busy` is low.

As an example, reading the XADC temperature through the TAP takes three DR
scans:

1. Write S = 1 into SIB-1.
2. Write S = 1 into SIB-3.
3. Capture and shift out TDR-1.

## Clocking and reset

The whole design uses one clock. The top calls it `tck`, and it clocks the
network, the IM, the TAP, the DRP interface and the I2C master. All
registers change on the rising edge, and `rst` is synchronous and active
high. Cycle counts above are in this clock.

The fault propagation network is combinational between flag registers. The
IM samples it through its synchronizer.

## Where this design departs from the source architecture

- **Two-fault latency.** The reference result quotes 30 cycles to localize an
  internal fault and then an external one. There, the second fault was
  injected after the first had been localized and the network reset. With
  both faults present at once, this design reports them at 16 and 20 cycles.
  With staggered faults the total depends on when the second fault arrives,
  so no single figure applies. The reference waveform also shows an extra
  walk through the ROM before the localizing pass, which this design does
  not make.
- **Clocks.** The reference waveforms show a separate instrument clock beside
  TCK. Here everything runs on one clock, and the I2C and DRP rates come from
  dividers and handshakes.
- **SIB loads.** The reference setup opens a SIB by shifting a 2-bit value
  (`01`, `10`). The extended SIB here has four cells (S, X, C, F), so the
  vectors are 4 bits per SIB.
- **ROM encoding.** The descriptor format is this design's own. It
  reproduces the `00000005` (SIB-1) and `03000000` (END) words of the
  reference ROM, but not every word the reference printed.
- **TDR-1 contents.** The source architecture speaks of both temperature
  and voltage going into the XADC's TDR. Its waveform, however, reads a
  single 16-bit temperature word from that TDR, and that is what TDR-1 holds
  here. The supply voltages are still polled, and they are available on the
  `sensors` output.
- **Checker word.** The exact checker of the IMU data is not specified. The
  checksum-plus-parity definition above is this design's own.
- **Added for robustness.** These are not in the reference:
  - The X write after localization, which keeps a fault from being reported
    twice.
  - The location FIFO and its overflow flag.
  - The TAP/IM arbitration.
  - The NACK check.
- **Not built.** These parts are absent:
  - The XADC macro and the MPU6050 chip. The testbenches model them.
  - The processor software.
  - The delay and ageing monitors and the further COM ports (UART, SPI) of
    the general architecture. Nothing beyond their names is specified.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `uav_health_top`, `i2c_master`, `mpu6050_ctrl` | CLK_DIV | 32 | clocks per quarter SCL bit |
| `uav_health_top`, `mpu6050_ctrl` | POLL_GAP | 16 | idle clocks between IMU frames |
| `uav_health_top`, `xadc_ei` | TEMP_UPPER | `16'hC7B4` | over-temperature alarm, 120 °C |
| `xadc_ei` | ALM_MASK | `4'b1111` | which XADC alarms raise a fault |
| `uav_health_top`, `instrument_manager` | SYNC_STAGES | 2 | synchronizer depth; `irq` comes SYNC_STAGES + 1 cycles after the flag |
| `uav_health_top`, `instrument_manager` | LOC_DEPTH | 4 | location FIFO entries |
| `tdr`, `ijtag_network` | WIDTH, TDR1_W, TDR2_W | 16 | TDR lengths (must match the ROM) |
| `sib_ext` | LEAF | 1 | the SIB hosts a TDR (1) or other SIBs (0) |

Shared types and constants live in `rtl/ijtag_pkg.sv`:

- the cell order;
- the ROM descriptor type and its builder functions;
- the SIB addresses;
- the TAP codes;
- the `sensor_status_t` struct of all sensor words.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

The behavioural models `tb/xadc_model.sv` and `tb/mpu6050_model.sv` stand in
for the XADC and the IMU:

- The XADC model is a DRP slave. It has 3-cycle read latency, a settable
  analog temperature, and alarms computed against its threshold registers.
- The IMU model is an I2C slave with a register file, an auto-incrementing
  pointer and the power-on sleep bit.

`tb_uav_health_top` runs the complete design at its default parameters. It
covers these mechanisms, counts each one, and fails if any never occurred:

- Reading both TDRs through the TAP: TDR-2 gives the IMU checker word and
  TDR-1 gives `0x9772` at 25 °C.
- An over-temperature alarm. It checks `irq` at 3 cycles, localization of
  `0001` at 16 cycles, and the masking of SIB-3.
- Two faults at once, localized at 16 and 20 cycles.
- The IM holding off while the TAP is scanning.
- A flag clear.
- A location FIFO overflow. The host unmasks SIB-3 through the TAP five
  times while the die stays hot. Each time the fault is localized again, in 9
  cycles, and nothing is popped.

`tb_instrument_manager` additionally checks a fault that arrives with SIB-1
already open (13 cycles for SIB-2), the ROM address sequence of a
single-fault run, and the FIFO overflow with the network
reset on its own.

Any testbench runs with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ijtag_pkg.sv tb/tb_uav_health_top.sv --top-module tb_uav_health_top
./obj_dir/Vtb_uav_health_top
```

Replace the testbench name to run another one. The package must come first
on the command line. The full end-to-end run takes well under a second.
