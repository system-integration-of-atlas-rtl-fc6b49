# MOPS-HUB firmware: a radiation-aware hub between CAN monitoring buses and an elink

The pixel detector's monitoring chips (MOPS) sit near the detector modules and
talk CANopen over CAN buses, up to four chips per bus. The hub collects up to 16 such buses in
a rack about 70 m away. It forwards traffic in both directions between those
buses and a single elink, a DC-balanced serial link to the detector-control
back end. It also does two jobs of its own. It switches each bus's supply
(VCAN) on or off through external power switches, and it reads each bus's
supply voltage and current from external ADCs and puts the values into the
same data stream. The hub sits in a radiation field, so its state machine
runs under a watchdog and its key state registers are triplicated.

This repository holds synthesizable SystemVerilog for the hub's FPGA logic. It
also holds self-checking testbenches and small behavioural models of the
devices the hub talks to. Everything runs on one clock (200 MHz on the board).

```
               elink_din (2 bit/clk)                         elink_dout (2 bit/clk)
                     |                                                ^
              +------v-------+                                +-------+------+
              |  Rx Reader   |                                |  Tx Writer   |
              | deserializer |                                | Upstream FIFO|
              | sync detector|                                | framing      |
              | 8b/10b dec.  |                                | 8b/10b enc.  |
              | parser, FIFO |                                | serializer   |
              +------+-------+                                +-------^------+
                     |  hub messages                                  | round robin
              +------v-------+   can_msg   +---------------------+    |
              |   hub FSM    |------------>| CAN Node Interface  |----+ received frames
              | (TMR state)  |             | 16 x can_controller |    |
              +--+-------+---+             +---------------------+    |
          bc_cmd |       | mon_start                                  |
        +--------v--+  +-v------------+                               |
        |Bus Control|  | Bus Monitor  |-------------------------------+ values
        |VCAN (TMR) |  | 8 ADC x 4 ch |                               |
        +-----+-----+  +------+-------+                               |
              +---------------------- status -------------------------+
   watchdog: resets everything except itself when the FSM's heartbeat stops
```

## The hub message

Everything that moves through the hub is a *hub message* (`hub_msg_t` in
`mopshub_pkg`). A hub message is a CAN data frame with a 5-bit address
added: the 11-bit identifier, RTR, DLC and 8 data bytes, 85 bits in all. The
address says where the frame came from or where it goes:

| address | meaning |
|---|---|
| 0..15 | CAN bus 0..15 |
| 16 (`ADDR_BUS_CTRL`) | Bus Control (VCAN switches) |
| 17 (`ADDR_BUS_MON`) | Bus Monitor (VCAN voltage/current) |
| other | dropped by the FSM and counted (`msgs_dropped`) |

On the elink a message travels as one packet of 8b/10b symbols: K27.7 (start), 12 bytes, then K29.7 (end). The
bytes are `{000, bus}`, `{0000, rtr, id[10:8]}`, `id[7:0]`, `{0000, dlc}`
and the eight data bytes, byte 0 first. When there is nothing to send the link carries K28.5 commas, and every packet is followed by at least one.
A packet takes 15 symbols, or 75 clocks at 2 bits per clock, so one elink
carries about 2.6 million messages per second at 200 MHz. That is far more
than 16 CAN buses can produce.

Messages to Bus Control use data byte 0 as the opcode (`OP_VCAN_OFF` = 0,
`OP_VCAN_ON` = 1, `OP_VCAN_READ` = 2) and byte 1 as the bus number. The
answer is a status message from address 16 with data bytes `{op, bus,
vcan[15:8], vcan[7:0], ok}`. Any message to Bus Monitor starts one scan. Each
of the 32 values comes back as its own message from address 17, with data
bytes `{bus, quantity (0 = voltage, 1 = current), value[15:8], value[7:0]}`.

## Downstream and upstream paths

**Rx Reader** (`rx_reader`). The elink transceiver delivers two bits per
clock. `elink_deserializer` gathers them into 10-bit symbols in a 12-bit shift
register. Until it is locked, every symbol that is not K28.5 makes it drop one
bit (a bit slip), which moves the symbol boundary by one. Because an idle link
is all commas, lock is found within ten symbols. Once locked, the deserializer
drops lock only after `LOCK_ERRS` (8) decoder errors in a row. `dec_8b10b`
checks each 6b and 4b sub-block against the code tables and the running
disparity. The parser accepts a packet only if it has exactly 12 clean data
symbols between K27.7 and K29.7 and the Downstream FIFO has room. Every other
packet is dropped and counted in `pkts_rx_bad`. The elink cannot be stalled,
so a full FIFO drops packets rather than applying back-pressure. The back end
must therefore pace its requests, for example by keeping at most 16
unanswered requests outstanding.

**Hub FSM** (`hub_fsm`). This is the only consumer of the Downstream FIFO. It
takes one message at a time and hands it to its CAN bus, to Bus Control or to
Bus Monitor. It waits until that destination accepts the message. A CAN
message therefore waits while its bus's controller is still busy with the
previous frame. Messages for other buses wait behind it: the FSM keeps the
FIFO's order and does not reorder messages.

**CAN Node Interface** (`can_node_interface`). This block holds one
`can_controller` per bus. Downstream, a message goes to the controller that
its address selects. Upstream, each received frame is held in a one-frame
register for its bus. The `msg_arbiter` round robin drains these registers,
tagging each frame with its bus number. A frame that arrives while its bus's
register is still full is lost and counted in `can_rx_overflows`. At the
elink's rate the registers are drained far faster than CAN frames can arrive.

**Tx Writer** (`tx_writer`). A second round-robin arbiter merges three
upstream sources: CAN frames, Bus Control status and Bus Monitor values. The
merged stream feeds the Upstream FIFO. A byte sequencer turns each message
into a packet, and `enc_8b10b` codes it. The 10-bit symbols leave two bits per
clock, `elink_dout[1]` first, with bit *a* of the symbol sent first. When the
FIFO is full, its sources wait: the Bus Monitor scan pauses and the CAN
holding registers keep their frames.

## CAN controller

`can_controller` is a compact CAN 2.0A node with 11-bit identifiers and data
and remote frames. It is the largest and most delicate block.

* **Bit timing.** A prescaler makes time quanta of `BRP` clocks. A bit is
  `NTQ` quanta, and the bus is sampled at the end of quantum `SAMPLE_TQ-1`.
  The defaults (100, 16, 11) give 125 kbit/s at 200 MHz, sampled at 69 % of
  the bit. A falling edge on an idle bus hard-synchronises the bit timing, and
  so does a falling edge in the last intermission bit, where the standard lets
  a waiting node start. There is no re-synchronisation inside a frame, which
  is enough for crystal-controlled nodes and short frames.
* **One bit engine for both directions.** Transmission and reception share the
  same state machine. It walks through SOF, identifier, RTR, IDE, r0, DLC,
  data, CRC, the delimiters, ACK and EOF, then three intermission bits. A
  transmitter also receives its own frame, so arbitration and bit errors fall
  out of comparing the sampled bit with the driven one.
* **Stuffing and CRC.** After five equal bits a complement bit is inserted on
  sending and removed on receiving, from SOF to the end of the CRC. A sixth
  equal bit is a stuff error. CRC-15 uses polynomial 0x4599.
* **Arbitration.** A node that sends recessive in the identifier or RTR field
  and reads dominant stops sending at once and carries on as a receiver
  (`arb_lost`). It retries its frame after the bus is idle again.
* **ACK.** A receiver whose CRC matched drives the ACK slot dominant. A
  transmitter that sees no ACK has an ACK error.
* **Errors.** A bit, stuff, CRC, form or ACK error makes the node send six
  dominant bits (`err_flag`). It then waits for 11 recessive bits. A frame
  being sent is tried `MAX_TRIES` (4) times, after which `tx_fail` pulses.
  The error counters and the error-passive and bus-off states of the full
  standard are not modelled.

A frame is handed over with `tx_valid`/`tx_ready`. `tx_done` or `tx_fail`
reports the outcome. `rx_valid` pulses after the last EOF bit of a frame
received from another node.

## Bring-up, heartbeat and recovery

After reset the FSM goes through S_BOOT, then S_LINK, where it waits for
elink lock. In S_VCAN it waits for Bus Control to read back all 16 switch
states. Only then does it raise `sys_run`, which releases the CAN controllers
from reset, and enter S_RUN. The states S_CAN, S_BC and S_MON wait for a
destination to accept a message or start a scan. Every `MON_PERIOD` clocks
(1 s) the FSM also starts a monitoring scan by itself.

The watchdog counts clocks since the FSM's heartbeat. The heartbeat (`kick`)
is high only in S_LINK and S_RUN, the two states where waiting is normal. If
the FSM stays in any other state for `WD_TIMEOUT` clocks (1.5 s by default),
the watchdog resets everything except itself for `WD_RST_LEN` clocks and
increments `wd_count`. A typical case is a CAN bus stuck dominant, whose
controller never becomes free. After the reset the hub comes up as at power-on.

**VCAN is never changed by a reset.** The switch state lives in the external
switch devices, not in the FPGA. After any reset Bus Control only *reads*
every device and never writes one without a command. So a watchdog recovery or
an FPGA power cycle leaves every bus powered as it was. The FPGA keeps a copy
of the state in `vcan_en`.

## Triplicated registers

`tmr_reg` holds three copies of a register. Its output is their bitwise
majority, and every clock each copy reloads from the new value or the voted
value. A single upset is therefore outvoted immediately and repaired at the
next edge. `mismatch` is high while the copies disagree, and the top combines
these flags into `tmr_error`. Only storage is triplicated, not the logic in
front of it. Three registers use it: the FSM state, the VCAN copy in Bus
Control, and the whole state of the watchdog (timer, reset-pulse counter,
reset flag and recovery count packed into one word), since an upset there
could fire a false recovery or suppress a real one. Their per-copy upset
masks (`upset_fsm`, `upset_vcan`, `upset_wd`) are top-level ports for fault
injection and are tied to zero in use. `upset_wd` is 64 bits per copy
whatever the watchdog's width; bits above its state width are ignored.

## Bus Control and Bus Monitor

Both blocks use `spi_master`: SPI mode 0, MSB first, with SCLK at 200 MHz /
(2 × `SPI_DIV`) = 10 MHz. Each device has its own chip select and MISO line.

* **Switch device (one per bus).** Each transfer is 16 bits. The device
  answers every transfer with its present state in bit 0. If bit 15 of the
  word it receives is set, it takes bit 0 of that word as its new state when
  chip select rises. A command is one write transfer followed by a read, and
  `ok` in the status message says whether the read-back matches the request.
* **Monitoring ADCs.** There are 8 ADCs with 4 channels each. Channel
  k = adc·4 + ch carries the voltage (k even) or the current (k odd) of bus
  k/2. A conversion is one 24-bit transfer: the channel number goes out in the
  first 8 bits and the 16-bit result comes back in the last 16. One full scan
  of 32 values takes 32 × 50 × `SPI_DIV` clocks, 80 µs at the defaults.

These device protocols are stand-ins. The real board's parts may need a
different frame, and only `bus_control` and `bus_monitor` would change.

## Parameters of `mopshub_top`

| parameter | default | meaning |
|---|---|---|
| `BRP`, `NTQ`, `SAMPLE_TQ` | 100, 16, 11 | CAN bit timing: 125 kbit/s at 200 MHz |
| `MAX_TRIES` | 4 | attempts per CAN frame |
| `FIFO_DEPTH` | 16 | Upstream and Downstream FIFO depth, in messages (power of two) |
| `SPI_DIV` | 10 | SCLK = clk / (2·SPI_DIV) |
| `N_ADC`, `N_CH` | 8, 4 | monitoring ADCs and channels per ADC |
| `WD_TIMEOUT` | 300 000 000 | watchdog timeout in clocks (1.5 s) |
| `WD_RST_LEN` | 16 | recovery reset length in clocks |
| `MON_PERIOD` | 200 000 000 | automatic scan period in clocks (1 s); 0 turns it off |

The number of CAN buses is fixed at 16 (`N_BUS` in `mopshub_pkg`). At the
defaults the top synthesizes (generic yosys mapping) to about 8 400 cells,
6 850 flip-flop bits and 2 900 bits of FIFO memory.

## What is specified and what is chosen here

These parts come from the published description of the hub:

* the block structure: Tx Writer, Rx Reader, CAN Node Interface, Bus Control,
  Bus Monitor, FSM and Watchdog
* 16 CAN buses with up to 4 MOPS each, and CANopen traffic
* 8b/10b coding on a 2-bit elink port, with a sync detector and deserializer
  on the receive side
* VCAN switching that survives FPGA resets and power cycles
* per-bus voltage and current monitoring over SPI
* a watchdog of about 1-2 s
* triplication of storage elements with feedback repair

Everything else is this design's choice:

* the message format, addressing and elink packet framing
* the CAN bit rate, the reduced error handling and the retry limit
* the FIFO depths
* the comma-search alignment and its lock rule
* the SPI device protocols and the 8 × 4 ADC channel assignment
* the FSM's states and its heartbeat definition
* the automatic 1 s monitoring period
* the round-robin merging of upstream sources
* which registers are triplicated: the FSM state, the VCAN copy and the
  watchdog state only, while the FIFOs, CAN controllers and status counters
  are single copies

Not included:

* the elink transceiver: vendor serializer primitives and LVDS buffers, whose
  2-bit parallel side is the top's elink ports
* the CAN transceivers
* configuration-memory scrubbing and remote firmware update, which are
  features of the FPGA and board rather than of this logic
* the back-end aggregators

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles if the design hangs. Run any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/mopshub_pkg.sv tb/ref_8b10b_pkg.sv tb/tb_mopshub_top.sv \
    --top-module tb_mopshub_top -o sim && ./obj_dir/sim
```

The testbenches assume nothing about power-up values, so they also pass with
`+verilator+rand+reset+2`. Timing checks rely on their own clock counts, not
on absolute times.

| testbench | what it shows |
|---|---|
| `tb_sync_fifo` | random traffic against a queue model; full and empty handling |
| `tb_enc_8b10b`, `tb_dec_8b10b` | encoder: table code words, then a long random stream for DC balance and run length ≤ 5; decoder: every data byte and control symbol in both disparities from a reference encoder (`ref_8b10b_pkg`), invalid symbols and wrong-disparity symbols flagged |
| `tb_elink_deserializer` | lock from any bit offset within ten symbols; in-order symbols; the exact lock-loss rule; relock |
| `tb_tx_writer`, `tb_rx_reader` | packet format and the 75-clock packet spacing; dropping of corrupted packets |
| `tb_can_controller` | frames against a reference frame builder (stuffing, CRC); arbitration between two controllers; missing ACK, retries and failure |
| `tb_can_node_interface` | 4 buses with two MOPS stand-ins each; routing and tagging of requests and replies |
| `tb_spi_master`, `tb_bus_control`, `tb_bus_monitor` | SPI timing ((2·WIDTH+2)·CLK_DIV clocks per transfer); VCAN read-back after reset; commands and status; scan values |
| `tb_tmr_reg`, `tb_watchdog`, `tb_hub_fsm` | upsets outvoted and repaired; the exact timeout in clocks; bring-up order, dispatch, heartbeat, scan period |
| `tb_mopshub_top` | the whole hub with fast dividers (see below) |
| `tb_mopshub_full` | the whole hub at its default parameters |
| `tb_mopshub_load` | the largest configuration: 16 buses × 4 MOPS stand-ins, two request/response rounds over all 64 nodes with periodic scans running |

`tb_mopshub_top` runs the hub with fast CAN and SPI dividers, a short
watchdog and 4-deep FIFOs. The testbench acts as the back end on the elink,
with its own 8b/10b encoder and comma-searching receiver. MOPS stand-ins sit on
15 buses (two on bus 0, none on bus 15), alongside switch and ADC models. It
counts each of the following and fails if one never occurs:

* elink lock, both at start and after recovery
* CAN replies from every bus
* the hub losing arbitration to a reply
* error flags, retries and failure on the empty bus
* a full Downstream FIFO dropping packets
* a full Upstream FIFO holding back its sources during a scan
* VCAN on, off and read commands
* requested and periodic scans
* a corrupted packet being dropped
* a single upset in each triplicated register
* a bus stuck dominant that hangs the FSM until the watchdog recovers the hub,
  with every VCAN switch unchanged

`tb_mopshub_full` uses no parameter overrides. It runs start-up, a VCAN
command, one CANopen request and reply at 125 kbit/s (every edge of the hub's
frame on the 1600-clock bit grid) and a full 32-value scan. It finishes in
about 2 ms of simulated time.

The behavioural models in `tb/` (`mops_model`, `vcan_switch_model`,
`adc_model`) exist only for testing. `mops_model` answers CANopen SDO-style
requests (id 0x600 + node) with id 0x580 + node and the data XORed with the
node number. It is not a model of the real chip's behaviour.
