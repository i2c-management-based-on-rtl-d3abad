# I2C management for an IPbus-controlled FPGA board

A data-acquisition FPGA board that is controlled over Ethernet with IPbus has a
chicken-and-egg problem. The Ethernet link needs a 125 MHz reference clock, and
the clock crosspoint switch must be set up over I2C before that clock reaches the
FPGA. The link also needs a MAC address, which is stored in an EUI-48 EEPROM on
the same I2C bus. Software cannot configure these devices, because software only
gets in once the link runs.

This design splits I2C access into two phases that share the board's I2C buses:

* **Initialization.** A small controller runs from a clock that exists at
  power-up. It executes a program of 16-bit commands from a ROM and drives an I2C
  master through that master's own register interface. It sets the SCL rate,
  routes the oscillator's 125 MHz through the crosspoint switch to the system
  clock and four transceivers, reads the six MAC bytes out to an output
  port and then declares itself done. No processor is involved.
* **In-system access.** A second, identical I2C master sits behind an IPbus
  slave. Once initialization is done, a multiplexer hands the buses to it.
  Software can then reach every other I2C device: the bus switch, the
  programmable oscillator, FMC devices and monitors.

The structure follows the paper "I2C Management Based on IPbus" (Luo et al.,
CBM DPB / AFCK board). The RTL here is a new implementation from that
description. Where the description stops, the choices made are listed in
[Departures and open points](#departures-and-open-points).

## Structure

```
            clk_init domain                                 |
 auto_rst ──rst/config──> i2c_init_ctrl <──WB──> i2c_master ─┐
 init_rom ──commands────> i2c_init_ctrl                      ├─> i2c_bus_mux <──> NUM_BUS open-drain
                          (out port, in port, done, err)     │    (owner flag)      I2C buses
            clk_ipb domain                                   │
 IPbus <──> ipbus_wishbone_interface <──WB──> i2c_master ────┘
```

| File | Role |
|---|---|
| `rtl/i2c_mgmt_pkg.sv` | shared types: Wishbone and IPbus structs, the command word, register addresses and bit positions |
| `rtl/auto_rst.sv` | power-up reset of the initialization side; its release is the "config" edge that starts the program |
| `rtl/init_rom.sv` | 256 × 16 command ROM, with a built-in program or loaded from a hex file |
| `rtl/i2c_init_ctrl.sv` | the 11-state command interpreter |
| `rtl/i2c_master.sv` | byte-level I2C master with five 8-bit Wishbone registers (used twice) |
| `rtl/ipbus_wishbone_interface.sv` | IPbus slave in front of the second master, plus bus-select and status registers |
| `rtl/i2c_bus_mux.sv` | chooses the master that owns the buses and the bus it drives |
| `rtl/ipbus_i2c_ctrl.sv` | top level |

Everything is synthesizable. Only `auto_rst` relies on register power-up values,
as FPGA registers provide them.

## The command word

Every ROM word is one command:

```
 15  13 12  11    8 7          0
+------+--+--------+------------+
| bus  |wr|  port  |    data    |
+------+--+--------+------------+
```

* `bus`: the I2C bus (0–7) the command is meant for. It is passed to the
  multiplexer, so a program can talk to devices on several buses.
* `wr`: 1 = write, 0 = read. Only used for register ports.
* `port`: what the command does.
* `data`: the byte written. For the private ports it is an index or is ignored.

| port | meaning | FSM path |
|---|---|---|
| `0000` | PRERlo (prescaler low byte) | READ_WRITE_REG |
| `0001` | PRERhi | READ_WRITE_REG |
| `0010` | CTR (control; bit 7 enables the core) | READ_WRITE_REG |
| `0011` | TXR (write) / RXR (read) | READ_WRITE_REG |
| `0100` | CR (write) / SR (read) | READ_WRITE_REG |
| `1000` | wait until the transfer is over; error if the slave did not acknowledge | WAIT_READ_STATUS → WAIT_READ_END → WAIT_COMPARE |
| `1001` | wait until the transfer is over; acknowledge not checked | same loop |
| `1010` | put the last byte read on the output port; `data` goes out as the byte index | TRANSFER_READ_DATA |
| `1011` | write the input-port byte into TXR; `data` goes out as the requested index | READ_WRITE_REG |
| `1100` | no operation (also `1101`, `1110`) | straight to CMD_END |
| `1111` | configuration done | CONFIG_DOWN |

The port codes `0xxx` are simply the Wishbone register addresses of the I2C
master, so a register command is one Wishbone access. A 0xxx read saves the
byte it gets. A later `1010` sends that byte out.

### One I2C transaction as commands

Each byte on the wire takes two register writes and a wait. Below, writing
register `r` of device `d` with value `v` uses the `CR` codes of the I2C master
(STA = 0x80, STO = 0x40, RD = 0x20, WR = 0x10, ACK = 0x08):

```
TXR <- d<<1      CR <- 0x90 (START+WR)   1000 (wait, must be ACKed)
TXR <- r         CR <- 0x10 (WR)         1000
TXR <- v         CR <- 0x50 (WR+STOP)    1000
```

Reading uses a repeated START with the read address. Each byte is then fetched
with `CR <- 0x20` (or `0x68` = RD+NACK+STOP for the last byte), a `1001` wait, a
read of RXR (`wr = 0`, port `0011`) and a `1010` to pass the byte out. The last
byte needs `1001`, not `1000`: the master itself answers that byte with NACK,
so the acknowledge bit in SR reads 1 even though nothing went wrong.

## The initialization controller

The FSM has eleven states:

```
IDLE ──config rises──> PRE_READ_ROM ──> READ_ROM ──┬─ port 0xxx, 1011 ─> READ_WRITE_REG ──WB ack──> CMD_END
                             ^                      ├─ 1010 ───────────> TRANSFER_READ_DATA ──────> CMD_END
                             │                      ├─ 1100 (no-op) ──────────────────────────────> CMD_END
                             │                      ├─ 1111 ───────────> CONFIG_DOWN ──> IDLE (done)
                             │                      └─ 1000, 1001 ─> WAIT_READ_STATUS -> WAIT_READ_END -> WAIT_COMPARE
                             │                                            ^                                │
                             │                                            └──────── SR[1]=1 (busy) ────────┤
                             └───────────────────────────── CMD_END <──── SR[1]=0, ACK ok ─────────────────┤
                                                                 ERROR <── SR[1]=0, SR[7]=1 (1000 only) ───┘
                                                                   └──> IDLE (err)
```

* The ROM is read synchronously. PRE_READ_ROM presents the address and
  READ_ROM decodes the word one clock later. CMD_END increments the address.
* The status poll is open-loop. WAIT_READ_STATUS strobes a read of SR.
  WAIT_READ_END latches the data. Neither state waits for `ack`, so the I2C
  master must ack exactly one clock after a strobe. This one does, and an
  immediate assertion in the controller checks it.
* **Cycle cost, in init clocks:** 5 for a register command, 3 for a no-op or
  for CONFIG_DOWN, 4 for an output transfer, and 3 + 3·p for a wait that reads
  SR p times. The unit test checks these totals exactly. The I2C transfer
  itself takes 9 SCL periods per byte, so on a 100 kHz bus the FSM overhead is
  negligible.
* **Output port.** `out_valid` is high for one cycle with `out_data` (the last
  byte read) and `out_idx` (the command's data field). A MAC collector only has
  to store `out_data` at `out_idx`.
* **Input port.** While `in_req` is high (the two READ_WRITE_REG cycles of a
  `1011` command), the controller writes `in_data` into TXR, and `in_idx` tells
  the supplier which byte is wanted. This lets a program write values that are
  only known at run time.
* **Errors.** A missing acknowledge under a `1000` wait goes to ERROR. That sets
  `init_err` and returns to IDLE, and the buses stay with the initialization
  side. Pulsing `rst_req` repeats the power-up reset and the whole program.
  When the program reaches `1111`, `init_done` rises and the multiplexer switches
  to the IPbus side. The switch-over lasts until the next power-up reset.

## The I2C master

Both masters are the same module. Their registers are 8 bits wide:

| addr | register | contents |
|---|---|---|
| 0 | PRERlo | prescaler bits 7:0 (R/W), reset 0xFF |
| 1 | PRERhi | prescaler bits 15:8 (R/W), reset 0xFF |
| 2 | CTR | bit 7 EN, bit 6 IEN |
| 3 | TXR (W) / RXR (R) | next byte to send / last byte received |
| 4 | CR (W) / SR (R) | CR: 7 STA, 6 STO, 5 RD, 4 WR, 3 ACK (1 = send NACK), 0 IACK. SR: 7 RxACK, 6 Busy, 5 AL, 1 TIP, 0 IF |

These are the register layout and bit positions of the widely used open-source
Wishbone I2C master, so existing software for that core carries over. The inside
is this design's own:

* One CR write queues a command: an optional START (or repeated START), then an
  optional byte write or read with its acknowledge bit, then an optional STOP.
  TIP is set from the CR write until the command ends. IF is then set, and the
  interrupt output is IF and IEN.
* Every I2C symbol (START, STOP, a data bit, an ACK bit) is four phases of
  `PRER+1` clocks: SCL low, high, high, low. SDA is sampled at the end of the
  second high phase. **SCL = f_clk / (4·(PRER+1))**. For example, 100 kHz from
  25 MHz needs PRER = 61, and from 125 MHz it needs PRER = 311.
* At the end of the first high phase the engine waits until SCL is really
  high, so a slave can stretch the clock. If no slave does, the period is exact.
  The line inputs go through a 2-flop synchronizer. The synchronizer needs
  PRER ≥ 3 for that exact period, and smaller values only lengthen it.
* If the master releases SDA for a 1 but reads back 0 during a write, it has
  lost arbitration. It sets AL and IF, drops the command and releases the bus.
  Busy follows START and STOP conditions seen on the bus.
* Between commands without STOP the master holds SCL low, which keeps the bus.
  Clearing EN releases both lines at once.
* Wishbone timing: `ack` comes one clock after `stb & cyc`, with registered read
  data. A write takes effect in the strobe cycle. An assertion checks that an
  ack only follows a strobe.

## IPbus side

`ipbus_wishbone_interface` decodes the low three bits of the IPbus word
address. Decoding of the upper bits belongs to the IPbus address table in
front of it.

| word | access | meaning |
|---|---|---|
| 0–4 | R/W | the I2C master's registers, in bits 7:0 |
| 5 | R/W | bus select: bits 2:0 choose the bus the IPbus master drives |
| 6 | R | bit 0 initialization done, bit 1 initialization error |
| 7 | – | answered with `err` |

Every access is acked one clock after the strobe. As with any IPbus slave, the
master drops strobe in the cycle after the ack. The status bits come from the
init clock domain through two-flop synchronizers.

A typical software sequence, matching what the paper does after start-up:
program PRER and CTR, choose the bus, and write the board's I2C switch to open
channel 2. The programmable oscillator behind that channel then answers, and
software writes its 156.25 MHz settings.

## Clocks, resets and bus ownership

* `clk_init` runs the initialization side (auto_rst, ROM, controller, its master,
  and the owner flag in the multiplexer). It must exist at power-up, before any
  board clock is configured.
* `clk_ipb` runs the IPbus side and is reset by `ipb_rst`. On the board it is
  the system clock that only appears after initialization.
* `i2c_bus_mux` is combinational for the line signals. Its owner flag is
  cleared by the power-up reset and set by `init_done`. The owning master's
  pull-downs go to its selected bus only, and every other bus is released. The
  other master sees an idle bus. A bus number of `NUM_BUS` or more drives
  nothing. The IPbus-side bus number is used without synchronization, so change
  it only between transfers.
* All bus signals are open-drain pairs: `*_oe = 1` pulls the line low. In an
  FPGA, connect each pair to an IOBUF with input tied low and the output enable
  taken from `*_oe`.

## Parameters and the built-in program

| module | parameter | default | notes |
|---|---|---|---|
| `ipbus_i2c_ctrl` | `NUM_BUS` | 8 | the command word can name 8 buses |
| | `ROM_AW` | 8 | 256 commands |
| | `RST_CYCLES` | 16 | reset lasts RST_CYCLES+1 init clocks |
| | `INIT_FILE` | "" | hex file, one 16-bit word per line, replaces the built-in program |
| | `PRESCALE` | 61 | prescaler written by the built-in program |
| `init_rom` | `NUM_XPT_OUT`, `XPT_OUTS` | 5, {0,1,2,3,4} | crosspoint outputs that receive the 125 MHz: the FPGA system clock and four transceiver reference clocks |
| | `XPT_IN` | 0 | crosspoint input carrying the 125 MHz oscillator |
| | `XPT_ADDR`, `XPT_MAP_BASE`, `XPT_UPD_REG`, `XPT_UPD_VAL` | 0x4B, 0x90, 0x80, 0x01 | crosspoint address and register layout (placeholder) |
| | `EE_ADDR`, `EE_OFFSET` | 0x50, 0xFA | EEPROM address and the offset of the EUI-48 bytes |

The built-in program has 91 commands. It sets PRER and enables the core. It
then routes crosspoint input `XPT_IN` to each of the five outputs (one
register write each, source register at `XPT_MAP_BASE + output`) and writes
the update register. It sets the EEPROM pointer, reads six bytes with a
repeated START, sends each one to the output port (index 0–5, most
significant first) and ends with `1111`. Unused words read as `1111`. Which
destinations are fed comes from the board's needs: system clock plus four
transceivers. The crosspoint register layout is a placeholder: a real board
needs the switch's own map, so pass it through the parameters or use
`INIT_FILE`. A program too long for the ROM stops elaboration with an error.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_auto_rst` | reset length, config edge one cycle later, repeat on request |
| `tb_init_rom` | the built-in program word by word against independently assembled commands; loading from a hex file; read latency |
| `tb_i2c_init_ctrl` | every command kind against a register-level master model; write log, ports, bus field, status-poll count, exact cycle total; NACK → ERROR and restart |
| `tb_i2c_master` | register read-back, exact SCL period, write and repeated-start read against a slave model, clock stretching, NACK, IF/IACK/irq, busy, arbitration loss |
| `tb_ipbus_wishbone_interface` | one Wishbone access per IPbus transaction, data paths, local registers, synchronized status, err |
| `tb_i2c_bus_mux` | randomized routing against a reference, before and after the hand-over and after reset |
| `tb_ipbus_i2c_ctrl` | end to end with a test program: failed first run (deaf EEPROM), retry, MAC on the output port, input-port write, bus-1 device, hand-over, IPbus set-up of the oscillator behind the bus switch; counts each mechanism and fails on any that never occurred |
| `tb_ipbus_i2c_ctrl_full` | the top at its default parameters and built-in program: five crosspoint routes and update, MAC, SCL period 4·62 clocks, then the IPbus oscillator set-up and crosspoint re-route |

The board is modelled by `tb/afck_i2c_board_model.sv`, built from the generic
register slave `tb/i2c_slave_model.sv`. Bus 0 has the crosspoint, the EEPROM
(which stretches SCL), the bus switch, and the oscillator, which only answers
while switch channel 2 is open. Bus 1 has an FMC device. `tb/ipbus_host_model.sv`
plays the IPbus software. The register maps of these models are generic, not
those of the real parts.

Run any testbench from the repository root, because hex files are named
relative to it:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_ipbus_i2c_ctrl rtl/i2c_mgmt_pkg.sv tb/tb_ipbus_i2c_ctrl.sv -o sim
./obj_dir/sim
```

Every testbench finishes in about a second of simulation time. The end-to-end
test program is in `tb/init_program_e2e.hex`. Its comment block in
`tb/tb_ipbus_i2c_ctrl.sv` describes it.

## Departures and open points

* **Wait codes.** The paper's table lists `1000` as "CR(W)/SR(R)" and `1001`
  as "wait read end". Its state diagram, however, sends `1000` into the
  status-polling loop. Here `1000` polls and checks the acknowledge, and `1001`
  polls without the check. The difference matters only after a NACKed read
  byte.
* **Code `1100`** appears in the state diagram as a direct path to CMD_END but
  not in the table. It is a no-op here, as are `1101` and `1110`.
* **I2C master internals** are not in the paper, which reuses an existing core.
  The register map matches that core, and the timing (four phases per bit, the
  prescaler formula) is this design's own. Software written for the original
  core must recompute PRER from `f/(4·SCL) − 1` instead of `f/(5·SCL) − 1`.
* **Number of buses.** The command word has a 3-bit bus field, so there are 8
  buses. The paper's board diagram shows one FPGA I2C bus with a bus-switch chip
  behind it. A board with one bus uses `NUM_BUS = 1` and bus 0.
* **How the IPbus side picks a bus** is not described. The bus-select and
  status registers are this design's additions.
* **Error handling** beyond "a missing acknowledge goes to ERROR" is not
  described. The buses stay with the initialization side after an error, and
  `rst_req` retries.
* **Index fields** on the input and output ports are additions. They make a
  multi-byte MAC transfer self-describing.
* **Device data.** The crosspoint registers, the EEPROM offset, the I2C
  addresses and the oscillator's 156.25 MHz settings are not in the paper. All
  values here are placeholders.
* The IPbus packet engine, the Ethernet link and everything on the board
  (bus switch chip, crosspoint, oscillator, EEPROM, monitors, FMCs) are outside
  this RTL. Only test models exist for the I2C devices.
