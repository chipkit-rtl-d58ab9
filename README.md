# A reusable SoC subsystem for research test chips

Research test chips usually exist to show off one new block, such as an
accelerator, a memory or a circuit technique. Yet every one of them also
needs the same plumbing before that block can be measured: a way to load
programs and data, a way to drive tests from a PC, a bus, memory, a few
peripherals, and enough visibility to debug a chip that will not come up.
This RTL is that plumbing, built as a fixed subsystem so that a new chip
only plugs its own IP into a free bus port. It follows the SoC subsystem of
the CHIPKIT framework (Whatmough et al., "CHIPKIT: An agile, reusable
open-source framework for rapid test chip development"). The block set and
the way they connect come from that description. Almost every width,
register, encoding and timing detail is this implementation's own choice,
because the paper does not give them. The sections below say which is which.

The central idea is **two ways to host the chip**:

* An on-chip CPU (an Arm Cortex-M0 in the reference chips) runs test
  programs from on-chip SRAM.
* A **UART host** turns lines of text typed on a PC into bus transfers.
  A whole test can then be run from a script on the PC, with no CPU
  involvement at all. This also works when the CPU or its memory is broken.

Both masters share one AHB-Lite bus. Anything on that bus, including every
SRAM word and every register, can be reached from either side.

## Block diagram

```
            uh_rxd/uh_txd                        cpu_* (AHB-Lite master port, CPU outside this RTL)
                 |                                   |
           +-----------+                             |
           | uart_host |  master 1          master 0 |
           +-----------+---------+   +---------------+
                                 v   v
                           +----------------+
                           | ahb_master_mux |  (owner -> DIAG)
                           +----------------+
                                   |
                         +------------------+---- default slave (ERROR)
                         | ahb_interconnect |  decoder from soc_memmap.svh
                         +------------------+
          +----------+----------+---------+------------+-------------------+
          |          |          |         |            |
     ahb_sram    ahb_sram   ahb_gpio  ahb_apb_bridge  accel_* (AHB-Lite slave port,
      IMEM 64K   DMEM 64K    16 pins       |           custom IP outside this RTL)
                                           v
                                  +------------------+
                                  | apb_interconnect |-- empty slots: PSLVERR
                                  +------------------+
                        +-----------+-----------+------------+-------------+
                        |           |           |            |             |
                    apb_uart     apb_rtc   apb_watchdog    apb_csr      apb_uart (2nd)
                  uart_rxd/txd   rtc_osc   pcb_reset_n   accel_rst_n,  uart1_rxd/txd
                   irq              |        irq          chicken bits   irq
                                                           |
                                                       diag_sel ---> diag_mux ---> diag[1:0]
```

Everything runs on one clock, `HCLK`. There is one asynchronous,
active-low reset, `RESETn`, and no reset synchronizer: the board controls
the reset directly. The only other clock-like input is the RTC oscillator,
and it is sampled rather than used as a clock.

## Memory map

The map is written once, in `rtl/soc_memmap.svh`, and the decoders read
it from there. To add a bus slave, raise the slave count, add its base
and size to the tables, and wire its port in `chipkit_soc`. Each region
is a power of two in size and aligned to its size.

| Region | Base | Size | Block |
|---|---|---|---|
| IMEM | `0x0000_0000` | 64 KB | instruction SRAM |
| DMEM | `0x2000_0000` | 64 KB | data SRAM |
| GPIO | `0x4000_0000` | 4 KB | GPIO registers |
| APB | `0x5000_0000` | 64 KB | peripheral bus (below) |
| UART | `0x5000_0000` | 4 KB | console UART |
| RTC | `0x5000_1000` | 4 KB | real-time counter |
| WDOG | `0x5000_2000` | 4 KB | watchdog |
| CSR | `0x5000_3000` | 4 KB | control/status registers |
| UART1 | `0x5000_4000` | 4 KB | second UART |
| ACCEL | `0x7000_0000` | 256 MB | custom IP port |

The memory sizes come from the reference design (64 KB IMEM and 64 KB
DMEM). The accelerator's base matches the only address the paper prints,
in its `R 0x70000000` example. All other addresses are this
implementation's choice. An access to any address outside these regions
is answered by the interconnect's **default slave** with an AHB ERROR. An
access to an empty APB slot (`0x5000_5000` to `0x5000_FFFF`) is answered
with PSLVERR, which the bridge turns into an AHB ERROR. So a wrong address
never hangs the bus.

## Hosting the chip from a PC: the UART host

`uart_host` is a bus master with a serial port. Each line it receives is
one command, and each command becomes exactly one 32-bit AHB transfer:

```
R <addr>            ->  XXXXXXXX<CR><LF>     eight upper-case hex digits
W <addr> <data>     ->  OK<CR><LF>
any bus ERROR       ->  ERR<CR><LF>
malformed line      ->  ?<CR><LF>
```

* Command letters may be upper or lower case.
* Numbers are hex, with or without a `0x` prefix.
* Fields are separated by spaces or tabs. CR or LF ends the line.
* Leading blanks and empty lines are ignored.
* Address bits [1:0] are dropped, since every transfer is a word.

The host does not echo what it receives, so turn on local echo in the
terminal. It also does not buffer input while a command runs, so a script
must wait for each reply before sending the next command. Any serial
library can do that with a readline call.

The serial format is 8N1. The bit time is `CLKS_PER_BIT` cycles of `HCLK`,
868 by default, which is 115200 baud at 100 MHz. Timing of one command:

1. Receiving the line takes 10 bit times per character.
2. The bus transfer then takes two cycles, plus wait states, plus any time
   spent waiting for the CPU to release the bus.
3. The reply starts in the next cycle. A read reply is 10 characters.

Inside the host there are a receiver, a transmitter and a six-state
parser:

* `IDLE` waits for `R` or `W`.
* `ARG` shifts hex digits into an accumulator.
* `SKIP` throws away the rest of a bad line.
* `ADDR` and `DATA` are the AHB address and data phases.
* `RESP` sends the reply, one character per transmitter slot.

## Two masters on one bus: `ahb_master_mux`

Master 0 is the CPU port and master 1 is the UART host. The mux has one
owner at a time, and the rules are:

* The owner keeps the bus as long as it issues transfers, so a run of
  back-to-back transfers is never split.
* When the owner issues IDLE while the other master has a transfer
  waiting, ownership passes in that same accepted address phase. No cycle
  is lost.
* A master that requests while the other owns the bus sees HREADY low. It
  therefore holds its address phase, exactly as it would for a slave wait
  state, until it is granted. Nothing needs to be retried.
* The data phase (HWDATA in, HRDATA and HRESP out) follows the master
  whose address phase was accepted last.

A CPU that never goes idle would lock out the UART host. Cortex-M class
cores idle often, so this simple policy is enough in practice.

## Bus slaves and their timing

* **`ahb_interconnect`**: one layer, purely combinational decode and
  response mux. The data-phase select is registered on HREADY. All ports
  are SystemVerilog `interface`s (`ahb_if`) with `master`, `slave` and
  fabric-side modports, so connecting a slave takes one line.
* **`ahb_sram`** wraps `sram_sp`. `sram_sp` is a functional model of a
  single-port SRAM macro, to be replaced by a file that instantiates the
  real macro. Its timing:
  * Reads go to the SRAM in the address phase and return with zero wait
    states.
  * Writes happen in the data phase, with byte strobes from HSIZE and
    HADDR.
  * A read whose address phase meets a write's data phase cannot use the
    single port. It is issued one cycle later and gets one wait state.

  The array has no reset, like real silicon.
* **`ahb_gpio`**: 16 pins, with registers DATA_OUT (`0x0`), DIR (`0x4`,
  1 = output) and DATA_IN (`0x8`, read only). The inputs pass through
  two-flop synchronizers. There are no wait states.
* **`ahb_apb_bridge`**: an accepted AHB transfer becomes an APB SETUP
  cycle and then ACCESS cycles until PREADY. The AHB data phase is held
  with HREADYOUT low meanwhile, so a zero-wait APB access costs two AHB
  data-phase cycles. PSLVERR becomes the two-cycle AHB ERROR.
* **`apb_interconnect`**: PADDR[15:12] selects one of five peripherals.

## Peripherals and debug registers

**Console UART (`apb_uart`).** Lets software print (retarget `printf` to
DATA) and read a terminal. In simulation a test program ends by writing an
agreed code, for example ASCII EOT, which the testbench watches for.
Registers:
- `0x0` DATA. Write sends a byte. A write while the transmitter is busy is
  dropped and sets TX_OVR. Read returns the received byte and clears
  RX_VALID.
- `0x4` STATUS. Bit 0 TX_BUSY, bit 1 RX_VALID, bit 2 RX_OVR, bit 3 TX_OVR.
  Write 1 to bit 2 or bit 3 to clear that flag.
- `0x8` BAUDDIV, clock cycles per bit.

The interrupt is RX_VALID.

A second, identical UART sits at `0x5000_4000` on its own pins
(`uart1_rxd`, `uart1_txd`), for a second terminal or a data link.

**Real-time counter (`apb_rtc`).** Counts rising edges of the off-chip RTC
oscillator, so a workload can be timed independently of HCLK. The
oscillator is synchronized into HCLK, which must therefore be more than
about three times faster.
- `0x0` COUNT, read or load.
- `0x4` CTRL. Bit 0 is ENABLE, 1 after reset.

**Watchdog (`apb_watchdog`).** A down-counter on HCLK. Software must write
KICK before it reaches zero. At zero it sets TIMEOUT, which is also the
interrupt, and reloads. If RESET_EN is set it also pulls `pcb_reset_n`
low, and keeps it low until the chip is reset. That pin asks the board to
reset the chip.
- `0x00` LOAD
- `0x04` VALUE
- `0x08` CTRL. Bit 0 ENABLE (enabling reloads), bit 1 RESET_EN.
- `0x0C` KICK
- `0x10` STATUS. Bit 0 TIMEOUT, write 1 to clear.

**Control and status registers (`apb_csr`).**
- `0x00` ID, the constant `0xC41B0001`.
- `0x04` SCRATCH.
- `0x08` DIAG_SEL. Pin *i* takes its select from bits [8i+3:8i].
- `0x0C` CTRL.
  - Bit 0 drives `accel_rst_n`, a software-controlled reset for the custom
    IP. It resets to 0, so the IP is held in reset until software
    releases it.
  - Bits [31:8] are spare "chicken bits" for experiments, brought out as
    `accel_chicken`.
- `0x10` CYCLES, a free-running HCLK counter.

In the CHIPKIT flow this module would be generated from a register
database; here it is written out by hand.

**DIAG multiplexer (`diag_mux`).** Each of the two DIAG pins shows one of
16 internal signals, chosen through DIAG_SEL. With two pins, two signals
can be compared, for example HCLK against RESETn:

| sel | signal | sel | signal |
|---|---|---|---|
| 0 | HCLK | 8 | UART host TX |
| 1 | RESETn | 9 | UART host RX |
| 2 | `pcb_reset_n` | 10 | bus HREADY |
| 3 | `accel_rst_n` | 11 | bus HRESP |
| 4 | console UART interrupt | 12 | bus owner (1 = UART host) |
| 5 | watchdog interrupt | 13 | console TX |
| 6 | accelerator interrupt | 14 | console RX |
| 7 | RTC oscillator | 15 | constant 1 |

The mux is combinational. HCLK therefore reaches a pin through gates
only; in silicon that path needs a timing constraint of its own.

## What is outside this RTL

`chipkit_soc` is the core side of the pad ring. The following parts are
not RTL here, and the table says how each one is connected instead:

| Part | Why it is not here | What the top provides |
|---|---|---|
| CPU (Cortex-M0) | licensed IP | AHB-Lite master port `cpu_*` and `cpu_irq[3:0]` = {second UART, accelerator, watchdog, console UART} |
| Custom accelerator and its memory | the user's own design | AHB-Lite slave port `accel_*`, `accel_irq`, `accel_rst_n`, `accel_chicken` |
| IO pads | foundry cells | the top's ports are the core side of the pads |
| DCO (fast on-chip clock) | a physical ring oscillator | nothing: there is only one clock domain |
| Clock-domain-crossing bridge | needed only for an accelerator on its own fast clock | nothing: there is only one clock domain |
| Boot ROM | mentioned only as an option | nothing |
| CSR generator | software that produces RTL | `apb_csr`, written by hand |

## Coding conventions

Every register is written through the `` `FF(d, q, clk, en, rst_n,
reset_value) `` macro in `rtl/RTL.svh`. As a result, all flops are
rising-edge with an asynchronous active-low reset, and the inference
template can be changed in one place for an FPGA or ASIC library. Next-state
logic sits in separate `always_comb` blocks. Only `logic` is used.
Physical components are wrapped in small modules (`sram_sp`, `sync_2ff`)
so that a library build can swap them. The shared AHB encodings and the
memory map are in `chipkit_pkg`.

## Departures and open points

* The following are this implementation's own choices; the paper leaves
  them open:
  * the UART-host command grammar beyond `R <addr>`, and all of its reply
    texts;
  * the arbitration policy of the mux;
  * the SRAM and bridge wait-state behaviour;
  * every register layout;
  * the GPIO width, baud rate and DIAG source list.
* Two UART slaves are built. The reference design speaks of "UARTs"
  without a count.
* The watchdog has one stage: a timeout both interrupts and, if enabled,
  requests reset. There is no interrupt-then-reset sequence.
* The UART host has no receive buffer and no echo.
* The mux can starve the UART host if the CPU never idles.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_chipkit_soc rtl/chipkit_pkg.sv tb/tb_chipkit_soc.sv
./obj_dir/Vtb_chipkit_soc
```

Use the same command for `tb_uart_host`, `tb_ahb_master_mux`,
`tb_ahb_interconnect`, `tb_ahb_sram`, `tb_ahb_gpio`, `tb_ahb_apb_bridge`,
`tb_apb_interconnect`, `tb_apb_uart`, `tb_apb_rtc`, `tb_apb_watchdog`,
`tb_apb_csr` and `tb_diag_mux`.

`tb_chipkit_soc` runs the whole subsystem at its default parameters:
64 KB memories and 115200-baud serial at 868 clocks per bit. It hosts the
chip through the UART host exactly as a PC would, while a bus-master model
on the CPU port contends for the bus. Together they:

* write and read the lowest and highest word of both SRAMs;
* hit unmapped AHB and APB addresses;
* drive GPIO both ways and use both UART slaves both ways;
* watch the RTC advance;
* switch the DIAG pins;
* access the accelerator port;
* let the watchdog pull the board reset, then check that the chip comes
  back.

It counts each of these mechanisms and fails if any never happened. It
takes about 6.5 million cycles, which is a few seconds in Verilator.

Testbench helpers:
* `ahb_tb_master`: a pipelined AHB master that records data, response and
  latency.
* `ahb_tb_slave` and `apb_tb_slave`: memories with wait states and error
  addresses.
* `apb_tb_master`: an APB master with read and write tasks.
* `uart_tb_link`: a serial port that sends lines and collects replies.
