# FPGA readout buffer for an Ethernet-connected readout module

In a classic crate-based readout system, every readout module pushes its
event data across the crate backplane to a single crate controller, which
forwards it to the data-acquisition (DAQ) farm. The backplane then caps the
readout rate. The alternative implemented here lets each readout module talk
to the DAQ directly over Ethernet. To do that, the module pairs two chips:

* **A small embedded CPU** runs Linux and the TCP/IP stack and owns the
  Ethernet port. The reference prototype uses an ARM920T microcontroller
  with a 10/100 MAC.
* **An FPGA** receives the front-end data in whatever format the experiment
  uses and buffers it for the CPU.

The hard part is moving data from the FPGA into the CPU quickly without
special IP. The solution is to let the FPGA pose as an ordinary
**asynchronous 16-bit SRAM** on the CPU's external memory bus. The CPU
reads a block of data with plain memory reads. Two extra wires synchronize
the two sides:

* **Read Ready** runs CPU to FPGA. It is a GPIO line.
* **IRQ** runs FPGA to CPU. It is an external interrupt.

A separate slow serial line carries commands from the CPU to the FPGA.

This repository contains synthesizable SystemVerilog for the FPGA side:
the **buffer module** and the **serial bus module**. The CPU, its
software, the Ethernet PHY and the experiment-specific user logic are not
included.

```
            CPU (not included)                       FPGA (this RTL)
  +---------------------------------+     +----------------------------------------------+
  |                                 |     |  readout_fpga_top                            |
  |  USART TXD  ------------------- rxd ---> serial_bus_module --trans_len--+           |
  |                                 |     |        |                        |           |
  |                                 |     |        +--user_cmd--> (to user logic)       |
  |                                 |     |                                 v           |
  |  clock out  ---------------- cpu_clk --> buffer_module                               |
  |  GPIO       ------------- read_ready --->   irq_state_machine <--fifo_count--+       |
  |  ext. IRQ   <------------------- irq <--        |                            |       |
  |  SRAM ctrl  ------------- ncs, noe --->   fifo_controller --rdreq-->  async_fifo  <-- wrreq/datain (user logic)
  |  SRAM data  <--- sram_data_out/_oe <--        (data bus = FIFO head) <---+   |   --> wrfull
  +---------------------------------+     +----------------------------------------------+
```

## One transfer, step by step

The CPU moves data in blocks of one **transmission length**, counted in
bytes. A transfer always runs the same way. The CPU side is a character
driver whose `read()` blocks until a block is ready. The data is then
copied out of a memory-mapped window.

1. The CPU driver makes **Read Ready** valid and puts the reading process to
   sleep.
2. The FPGA's state machine sees Read Ready. It then waits until the FIFO
   holds at least one transmission length: `fifo_count * 2 >= trans_len`,
   since the count is in 16-bit words. The data may already be there, or
   it may arrive later.
3. The FPGA makes **IRQ** valid.
4. The CPU's interrupt handler makes Read Ready invalid and wakes the
   reader.
5. The FPGA sees Read Ready drop and makes IRQ invalid. The state machine
   is idle again.
6. The CPU reads `trans_len/2` words from the FPGA's memory window with
   ordinary 16-bit SRAM reads. The address does not matter. Each read
   returns the next word of the stream.

```
 read_ready  __/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\_______________________________
 (count ok)  ________________/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾
 state        IDLE | JUDGE ............ | IRQ ........ | IDLE
 irq         ______________________/‾‾‾‾‾‾‾‾‾‾‾‾‾‾\__________________________
 ncs         ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\___________________/‾
 noe         ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\_/‾\_/‾\_/ ... ‾‾
```

All CPU-side logic runs on `cpu_clk`. This is the clock the CPU supplies
to the FPGA on one of its programmable clock outputs. It lets the FPGA
follow the CPU's bus timing.

Handshake latency, in `cpu_clk` edges, with the default two-flop Read Ready
synchronizer:

* **IRQ rises** 4 edges after Read Ready if the data is already there:
  2 for the synchronizer, 1 into JUDGE, 1 into IRQ. If the data arrives
  later, IRQ rises 1 edge after the count reaches the length.
* **IRQ falls** 3 edges after Read Ready drops.

If Read Ready drops while the state machine is still waiting for data, it
goes back to idle without raising IRQ. This covers a driver whose sleep was
interrupted.

## The SRAM-bus read path

The FPGA never decodes the address bus. It only watches the chip select
(`ncs`) and the output enable or read strobe (`noe`), both active low.

* **Driving the bus.** `sram_data_oe = !ncs && !noe` comes straight from
  the pads, with no clock in the path. It enables the tri-state drivers of
  the data pins. The value driven is always the FIFO's head word.
* **Show-ahead FIFO.** The head word is on the bus before the CPU asks for
  it, so the FPGA adds no read latency inside a bus cycle.
* **Popping the FIFO.** `fifo_controller` samples "read in progress"
  (`!ncs && !noe`) on `cpu_clk`. When a sample shows the read has ended
  after one that showed it active, the controller issues one `rdreq`. The
  CPU has latched the word at the rising edge of `noe`. The FIFO pops on
  that same clock edge, and the next word appears right after it.
* **Minimum cycle.** A read cycle needs `noe` low across at least one
  `cpu_clk` rising edge, then high across at least one. The fastest rate is
  one word per two clocks, or 16 x f/2 bit/s. At 60 MHz that is
  480 Mbit/s.
* **Clock relationship.** By default (`BUS_SYNC = 0`) the strobes are
  treated as synchronous to `cpu_clk`, because the CPU generates both. If
  the bus strobes are not timed from the clock given to the FPGA, set
  `BUS_SYNC` to 2. Each read cycle's high time then has to grow to
  `BUS_SYNC + 1` clocks.

Reads with `ncs` high belong to another device on the bus and are ignored.
A read while the FIFO is empty returns a stale word and pops nothing. The
handshake above makes sure the CPU reads only what the FIFO holds.

## The FIFO and its two clocks

`async_fifo` is written by the user logic on `wrclk` and read on
`cpu_clk`.

* **Pointers.** The write and read pointers cross between the domains in
  Gray code, through `SYNC_STAGES` (default 2) flip-flops.
* **Flags.** `wrfull` is computed on the write side and
  `rdempty`/`rdusedw` on the read side. Both are conservative. A new word
  becomes visible to the reader three `cpu_clk` edges after it is written.
  A freed slot becomes visible to the writer three `wrclk` edges after
  the pop.
* **Count.** `rdusedw` is the FIFO count the state machine compares with
  the transmission length. So a transfer is only announced once all of its
  words are visible on the read side.
* **Storage.** A plain dual-port array with a registered read port, which
  maps to FPGA block RAM. The read address is the *next* read pointer, so
  the output register already holds the new head word when the pointer
  moves.
* **Full.** A write while `wrfull` is high is dropped. The user logic must
  treat `wrfull` as back-pressure.

The default depth is 32768 words (64 KiB). That equals the largest
transmission length in the reference measurements. A transfer can only be
announced once it sits in the FIFO completely, so the depth bounds the
transmission length. The serial bus module refuses longer lengths.

## Command channel

The CPU sends commands on its USART at 8N1, LSB first. `CLKS_PER_BIT`
cycles of `cpu_clk` make one bit. The default of 521 gives 115200 baud at
60 MHz. The channel is one-way, CPU to FPGA, so there is no transmitter.

Every command is a 4-byte frame: an opcode, then a 24-bit argument, most
significant byte first.

| opcode | meaning |
|---|---|
| `0x01` | set the transmission length to the argument, in bytes. It must be 1 to `2*DEPTH`. Out-of-range values are refused and pulse `cmd_error`. |
| `0x02` | restore the default transmission length (`DEFAULT_LEN`, 16384 bytes). |
| any other | passed unchanged to the user logic as a one-cycle `user_cmd_valid` with `user_cmd = {opcode, argument}`. |

Two things discard a partly received frame:

* The line stays idle for more than 20 bit times in the middle of a frame.
  This way one lost byte cannot misalign all later frames.
* A byte arrives with a bad stop bit. This also pulses `cmd_error`.

The frame layout, the opcodes and the serial format are specific to this
implementation. Any CPU-side software using it must follow them.

## Files

| file | contents |
|---|---|
| `rtl/readout_pkg.sv` | shared widths, the handshake state enum, opcodes, the user-command struct |
| `rtl/readout_fpga_top.sv` | top level: serial bus module + buffer module, reset synchronizers |
| `rtl/buffer_module.sv` | FIFO + FIFO controller + state machine |
| `rtl/async_fifo.sv` | dual-clock show-ahead FIFO |
| `rtl/fifo_controller.sv` | SRAM strobes to FIFO pops, data-bus enable |
| `rtl/irq_state_machine.sv` | Read Ready / IRQ handshake |
| `rtl/serial_bus_module.sv` | command frames, transmission-length register |
| `rtl/uart_rx.sv`, `rtl/sync_ff.sv`, `rtl/reset_sync.sv` | helpers |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_readout_fpga_top.sv` | end-to-end test at the default size |
| `tb/tb_length_sweep.sv` | transfer timing for lengths 64 B to 64 KiB |

### Top-level parameters

| parameter | default | meaning |
|---|---|---|
| `DEPTH` | 32768 | FIFO depth in 16-bit words (power of two) |
| `CLKS_PER_BIT` | 521 | `cpu_clk` cycles per serial bit |
| `DEFAULT_LEN` | 16384 | transmission length after reset, in bytes |

The bus is 16 bits wide (`readout_pkg::DATA_W`). The synchronizer depths
are parameters of `buffer_module`.

### Resets and clocks

`rst_n` is asynchronous and active low. It is released synchronously into
each clock domain. `wrrst_n` is the released copy for the user logic.
The design has two clocks, `cpu_clk` and `wrclk`, with no assumed
relationship between them. The only crossings are the FIFO pointers (Gray
code) and the reset releases.

## Relation to the original description

**Taken from the original description:**

* The split into the serial bus module and the buffer module.
* The three parts of the buffer module: asynchronous FIFO, FIFO controller
  and state machine.
* The signals between CPU and FPGA: CLK supplied by the CPU, Read Ready,
  IRQ, SRAM control and data bus, and the serial command line.
* Ignoring the address bus.
* The 16-bit bus width.
* The handshake sequence.
* Comparing the FIFO count with a transmission length that has a default
  value and can be set by command.

**Choices made here:**

* The FIFO depth and internals.
* Popping at the end of each read strobe, with a show-ahead FIFO.
* Active-high Read Ready and IRQ.
* The synchronizer depths.
* Returning to idle when a request is withdrawn.
* The byte-versus-word comparison `count*2 >= length`.
* The serial format, frame layout, opcodes, range check and timeout.
* The default length of 16384 bytes. This is the length above which the
  reference system reached its full network rate.
* The reset scheme.

**Not included:**

* The CPU and its Linux driver and transmission software.
* The Ethernet MAC and PHY.
* FLASH and SDRAM.
* The user logic. Its data format is experiment specific. It connects
  through `wrreq`, `datain`, `wrfull`, `wrclk`, `wrrst_n` and the
  `user_cmd` outputs.

**How it compares with the reference measurements.** The reference system
measured FPGA-to-CPU throughput for transmission lengths from 64 bytes to
64 KiB.

* Every one of those lengths fits in the default FIFO.
* On the FPGA side, a transfer costs a fixed 7-clock handshake plus 2
  clocks per word. This is measured by `tb_length_sweep`.
* In a real system, the handshake time is dominated by the CPU's interrupt
  and scheduling latency. That latency is why throughput grows with the
  transmission length.
* No bus clock frequency was given for the reference system. Whether the
  two-clocks-per-word path matches its measured SRAM-bus rates depends on
  that frequency.

## Simulating

Each testbench is self-checking. It ends by printing
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if
something hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/readout_pkg.sv tb/tb_readout_fpga_top.sv --top-module tb_readout_fpga_top
./obj_dir/Vtb_readout_fpga_top
```

Replace the testbench name to run any other test.

**What the end-to-end test covers.** `tb_readout_fpga_top` runs the top
level at its default parameters. It includes a CPU model (bus reads,
Read Ready, serial commands) and a user-logic model that writes a counting
sequence. It exercises, and counts:

* a transfer at the default length;
* the FIFO filling up (`wrfull`);
* lengths set by command;
* a user command;
* a refused command;
* Read Ready arriving before the data;
* a whole-FIFO 64 KiB transfer;
* a request withdrawn before the data arrives;
* the default length restored by command.

Every word read is compared with the expected sequence. The run simulates
about 4 ms of device time in well under a minute.

**Unit tests.** They use small FIFOs and fast serial rates, and check the
cycle timing given above:

* two clocks per word on the bus;
* the IRQ rise and fall latencies;
* the FIFO's write-to-visible delay.
