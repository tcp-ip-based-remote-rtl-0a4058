# Remote firmware upgrade logic for an Ethernet-connected FPGA DAQ module

A large detector can hold thousands of FPGA data-acquisition boards (here the RPC-DAQ
modules of an iron calorimeter) buried between steel plates. Nobody can reach them with a
JTAG cable once the detector is built. The only way in is the Ethernet link that already
carries commands and data. This RTL lets a back-end server do three things over that link:

* rewrite an FPGA configuration image in the board's serial configuration flash;
* record which image the board should boot;
* make the FPGA reload itself.

A factory image that is never overwritten remotely stays as the safe fallback.

The scheme has three ideas:

1. **A flash split into fixed slots.** The 8 MB flash holds a factory image, three
   application images of up to 2 MB each, and an information sector. A spare 64 KiB sector
   lies between regions, so erasing one image can never touch its neighbour.
2. **A strict stop-and-wait protocol over one TCP socket.** The server sends a `BEGIN`
   packet (which slot, how big), then numbered 1280-byte `DATA` packets, then `FIN`. The
   board answers every packet with an `ACK` that says success or failure. The server sends
   nothing new until that ACK arrives, and resends on failure or timeout. Each DATA packet
   carries an XOR checksum. Nothing is written to flash unless the checksum is good and the
   packet number is the expected one.
3. **A boot loader in the factory image.** At power-up the factory image reads the selected
   image number from the information sector and loads that image's start address into the
   FPGA's remote-update block. If the image turns out to be corrupt (for example, only half
   of it was sent), the remote-update block reports a configuration error and brings the
   factory image back. The factory image then stays up and waits for commands.

In the original system these steps run as software on a soft processor inside the FPGA.
Here they are hardware state machines with the same packets, memory map and boot flow.

## Block structure

```
             TCP socket words                     decoded UDP commands
          rx_* / tx_* / sock_open            cmd_set_image / cmd_reconfig / cmd_img
                    |                                       |
             +------v-------+                        +------v--------+
             |  rfu_engine  |                        | boot_selector |--> reconfig_addr,
             |  flash_map   |                        |               |    reconfig_trigger
             |  xor_checksum|                        +------+--------+
             |  packet_buf  |                               |  (priority)
             +------+-------+                               |
                    |            +----------------+         |
                    +----------->| flash_arbiter  |<--------+
                    |            +-------+--------+
               busy |                    |  fl_req_* / fl_rsp_*  (to flash controller)
             +------v-----+
             |  watchdog  |--> wdt_reset          led_image_indicator --> led1, led2
             +------------+                       (from factory_mode / app_image)
```

`rpc_daq_rfu_top` holds all of these. The top does not contain the Ethernet controller,
the flash chip and its serial controller, the UDP command decoder, or the FPGA's
remote-update block. They connect through plain ports (see *Top-level ports*).

## Flash partition

Byte addresses in the 8 MB (64 Mbit) flash. Sectors are 64 KiB.

| Region                               | Start      | End        | Size     |
|--------------------------------------|------------|------------|----------|
| Factory image (boot loader)          | `0x000000` | `0x18FFFF` | 1.5 MB + 64 KiB |
| spare sector                         | `0x190000` | `0x19FFFF` | 64 KiB   |
| Application image 1                  | `0x1A0000` | `0x39FFFF` | 2 MB     |
| spare sector                         | `0x3A0000` | `0x3AFFFF` | 64 KiB   |
| Application image 2                  | `0x3B0000` | `0x5AFFFF` | 2 MB     |
| spare sector                         | `0x5B0000` | `0x5BFFFF` | 64 KiB   |
| Application image 3                  | `0x5C0000` | `0x7BFFFF` | 2 MB     |
| spare sectors                        | `0x7C0000` | `0x7EFFFF` | 192 KiB  |
| Information sector (network settings, status, boot image) | `0x7F0000` | `0x7FFFFF` | 64 KiB |

The constants are in `rfu_pkg`, and `flash_map` does the lookups. Only images 1 to 3 can
be written over the network.

### Where the boot image number lives

The information sector also holds the MAC/IP settings. A flash word can only have bits
cleared unless its whole sector is erased. So the boot image number cannot simply be
overwritten in place. `boot_selector` therefore keeps it as a log of `N_SLOTS` (default 64)
16-bit words starting at `0x7F8000`:

* **set-image** programs the first erased slot (`0xFFFF`) with the new number (0 to 3).
* **Boot** reads slots from the first one until it reaches an erased slot (or the end).
  The last programmed value wins.
* When all slots are used, set-image fails (`cmd_ok = 0`). Some other tool must then
  erase the log, for example by rewriting the information sector.

This log layout is a choice of this RTL. The original only says that the image number is
kept in the last sector.

## The upgrade protocol (`rfu_engine`)

All fields are 16-bit words on the socket stream.

| Packet | Words |
|--------|-------|
| BEGIN  | `0xFAFA`, IMG_NUM, SIZE_LSW, SIZE_MSW, `0xAFAF` |
| DATA   | `0xDADA`, SEQ_NUM, RSW, 640 payload words (1280 bytes), CHECKSUM |
| FIN    | `0xEFEF`, `0xFEFE` |
| ACK (board → server) | `0xAFAF`, SEQ_NUM, RSW (= 0), STATUS |

CHECKSUM is the XOR of every DATA word before it: `0xDADA ^ SEQ_NUM ^ RSW ^ payload[0] ^ … ^ payload[639]`.

### What the engine does with each packet

* **BEGIN.** The image number must be 1 to 3, the size from 1 byte to 2 MB, and the fifth
  word `0xAFAF`. The engine then erases `ceil(size / 65536)` sectors, starting at the
  slot's base address. Only after the last erase does it send `ACK(0, OK)` and open a
  session. A refused BEGIN closes any open session. Erasing a full slot takes seconds on
  real flash, so the server has to wait that long for this ACK.
* **DATA.** The 640 payload words are stored in a 640-word packet buffer while the XOR is
  accumulated. The packet then goes down the first branch that applies:
  * Checksum wrong: `ACK(n, 0xE001)`. Nothing is written.
  * No open session: `ACK(n, 0xE002)`.
  * `n` is the expected number (the first is 1) and `(n-1)*1280` is below the file size:
    the words are programmed one by one at `base + (n-1)*1280 + 2*i`. Programming stops at
    the file size, so padding in the last packet is never written. Then `ACK(n, OK)` is
    sent and the expected number advances.
  * `n` is the previous number: this is a resend after a lost ACK. The engine sends
    `ACK(n, OK)` and writes nothing. A flash word cannot be programmed twice without an
    erase, so this rule keeps retransmission safe.
  * Any other number: `ACK(n, 0xE002)`.
* **FIN.** Succeeds with `ACK(last, OK)` if the accepted packets cover the whole file.
  Otherwise it answers `0xE006`. After the ACK, `sock_close` pulses for one clock and the
  session ends. `done_ok` or `done_fail` also pulses.
* **Anything else.** A word that starts no packet is dropped. The parser therefore finds
  the next header after garbage. Receiving stops (`rx_ready = 0`) while the engine erases,
  programs or sends an ACK, and also in idle while `sock_open` is low.

STATUS codes: `0x0001` OK, `0xE001` checksum, `0xE002` sequence, `0xE003` bad BEGIN,
`0xE004` erase error, `0xE005` program error, `0xE006` data missing at FIN. The original
only defines "success or failure", so the specific failure values are this RTL's own.

### Timing

The flash port works like this. A request is held with `fl_req_valid` until `fl_req_ready`
is high. The flash then answers with a one-cycle `fl_rsp_valid` (with `rdata` and `error`).
Each requester waits for that response before it issues the next request.

Measured from the clock edge that takes the last word of a packet to the first clock at
which the ACK is visible on `tx_valid`:

* BEGIN: `2 + sectors × (erase_latency + 2)` clocks;
* DATA: `2 + words × (program_latency + 3)` clocks, where words = 640 except in a short last
  packet;
* FIN: 2 clocks.

Here `*_latency` is the number of clocks from acceptance to response. Receiving a DATA
packet takes at least 644 clocks, and an ACK takes 4. At 50 MHz the engine's own overhead
per packet is about 51 µs. In practice flash programming time dominates the time of an
upgrade.

## Boot selection and fail-safe (`boot_selector`)

After every reset the block checks how the FPGA came up:

* **Factory image, and the last reconfiguration was not an error** (`factory_mode = 1`,
  `config_error = 0`). The block scans the log. If the last entry is 1, 2 or 3, it writes
  that image's base address to `reconfig_addr` and pulses `reconfig_trigger`. Any other
  value keeps the factory image. The trigger comes `1 + slots_read × (read_latency + 2)`
  clocks after reset is released.
* **Factory image after a configuration error.** The block does nothing, so a broken image
  cannot cause an endless reboot loop. The server has to choose another image (or resend
  the broken one) and command a reload.
* **Application image.** The block does nothing at reset.

Two commands work in any mode. Both end with a one-clock `cmd_done` and a result in
`cmd_ok`. Commands that arrive while the block is busy are ignored.

* `cmd_set_image` with `cmd_img`: records the new boot image, as described above.
* `cmd_reconfig` with `cmd_img`: loads that image's base address (0 = factory) and
  triggers immediately.

The usual way to switch images is set-image, then `cmd_reconfig` with image 0. The FPGA
reloads the factory image, which then picks the recorded image. That path keeps the
factory boot loader in the chain.

## Watchdog and LEDs

`watchdog` resets the board (`wdt_reset` pulse) if `wdt_kick` is missing for `WDT_TIMEOUT`
clocks (default 50 000 000, 1 s at 50 MHz). While the upgrade engine is busy, the count is
held at zero. A slot erase or a long write therefore cannot trip it. The original only
states that the watchdog must be adjusted during image writing; holding the count is this
RTL's way of doing it.

`led_image_indicator` shows which image is running on two LEDs:

| Running | LED1 | LED2 |
|---------|------|------|
| Factory | low  | low  |
| Image 1 | low  | high |
| Image 2 | high | low  |
| Image 3 | high | high |

This table was used to check upgrades on a test bench. In the original each test image
drove its own LEDs. Here one decoder reads the running mode reported by the remote-update
block.

## Top-level ports (`rpc_daq_rfu_top`)

All ports are synchronous to `clk`. `rst_n` is an asynchronous, active-low reset.

| Group | Ports | Connects to |
|-------|-------|-------------|
| socket | `sock_open`, `rx_valid/rx_data[15:0]/rx_ready`, `tx_valid/tx_data[15:0]/tx_last/tx_ready`, `sock_close` | the TCP socket reserved for upgrades on the Ethernet controller |
| flash | `fl_req_valid`, `fl_req` (`rfu_pkg::flash_req_t`: op, 23-bit byte address, wdata), `fl_req_ready`, `fl_rsp_valid`, `fl_rsp` (`flash_rsp_t`: rdata, error) | the serial flash controller. Ops: `FL_READ`, `FL_PROGRAM` (one word, clears bits only), `FL_ERASE` (the 64 KiB sector holding the address) |
| commands | `cmd_set_image`, `cmd_reconfig`, `cmd_img[1:0]`, `cmd_done`, `cmd_ok` | the UDP command decoder |
| remote update | `factory_mode`, `config_error`, `app_image[1:0]` in; `reconfig_addr[22:0]`, `reconfig_trigger` out | the FPGA's remote-update block. A reconfiguration is expected to reset this logic through `rst_n` |
| misc | `wdt_kick`, `wdt_reset`, `led1`, `led2`, `rfu_busy`, `rfu_done_ok`, `rfu_done_fail`, `boot_image[1:0]` | board |

Parameters: `WDT_TIMEOUT` (50 000 000) and `N_SLOTS` (64). `rfu_engine` has
`PAYLOAD_BYTES` (1280); the protocol fixes this value, so it should not be changed.

## What is outside this RTL

These parts of a working board are not here:

* the soft processor;
* the Ethernet controller chip with its TCP/IP stack and its bus interface;
* the serial flash controller and the flash chip;
* the JTAG controller;
* the detector's own measurement logic;
* the UDP command interface. It opens the upgrade socket (`RFUSOCKSETUP`), reports status,
  and carries the set-image and reconfigure commands. Its packet field values are not
  defined here, so it delivers decoded strobes;
* the server software, which frames the packets, byte-reverses the configuration file for
  the flash, runs one thread per board and times out and resends.

The testbenches contain behavioural models for the flash, the remote-update block and the
server.

## Where this RTL departs from the original system, and how far to trust it

* Everything the soft processor did for the upgrade is hardware here. The protocol seen on
  the wire is the same, but the board's internal behaviour (buffering, timing) is this
  design's own.
* Which words the checksum covers, the 16-bit framing, the STATUS values and the duplicate
  rule are all choices made here. A server written for the original system may differ on
  any of them.
* A DATA packet is written only after its checksum has been checked. The original
  describes data as written "directly" to flash.
* The original ACK diagram says that at FIN the board "re-writes the image version in
  flash". Its text says instead that a separate UDP command changes the boot image number.
  This RTL follows the text: FIN checks completeness only, and `cmd_set_image` changes the
  boot image.
* The slot-log storage of the boot image number, the no-retry rule after a configuration
  error, the arbiter that gives the boot selector priority on the flash port, and the
  watchdog hold are all choices made here.
* The ACK carries no checksum, following the published ACK layout, although the protocol
  description speaks of a checksum "both to and fro".

Verilator `-Wall` reports no latches, loops or multiple drivers. What remains are notes
about unused package constants and signals, one deliberately open output pin (the region
size of `flash_map`, not needed by the engine) and `rst_n` being used both by the flops and
by the assertions' `disable iff`. The
testbenches check the protocol cases, the memory map, the boot flow and the latencies given
above. No real flash chip, Ethernet controller or FPGA remote-update block has been
exercised.

## Simulating

The testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops with `$finish`. The simulator only has two
logic states, so every register the design reads has a reset.

| Testbench | What it covers |
|-----------|----------------|
| `tb_xor_checksum` | random words against a reference XOR, clear, a known vector |
| `tb_flash_map` | every base address, region size, gaps, sector counts, size limits |
| `tb_rfu_engine` | bad BEGINs, erase extent, packet placement, duplicate, out-of-order, bad checksum, early and complete FIN, tail not written, ACK latencies |
| `tb_boot_selector` | empty log, set-image, boot from the last entry, no retry after error, direct reconfigure, full log, boot latency |
| `tb_watchdog` | timeout period, kicks, hold |
| `tb_led_image_indicator` | the LED table |
| `tb_rpc_daq_rfu_top` | end to end: upload with a checksum error, a resend, a duplicate and an out-of-order packet; boot into the new image; a half-written image falls back to factory; direct reconfigure; the watchdog stays quiet during the upload and fires when idle. Counts each mechanism |
| `tb_ten_daqs` | ten boards upgraded in parallel, each with its own image size and slot, then booted; LEDs checked per board |
| `tb_rfu_full` | the top at its default parameters: a full 2 MB image (1639 packets) into slot 3, checked word by word, then a boot into it |

Models used by the testbenches:

* `epcs64_model`: an 8 MB NOR flash behind the command port, with settable latencies;
* `reconfig_ctrl_model`: loads an image, or falls back on a bad one. An image counts as
  good when it starts with `0x5AA5`, then holds its length in words, and ends with
  `0xA55A`;
* `rfu_backend_model`: the server, generating a pseudo-random image.

To build and run one testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -y rtl -y tb rtl/rfu_pkg.sv tb/tb_rpc_daq_rfu_top.sv \
  --top-module tb_rpc_daq_rfu_top -o sim
./obj_dir/sim
```

Substitute any other testbench name. `tb_rfu_full` takes a few seconds (about 6.5 million
clocks). Before simulating, the flash model sets its 4 Mi words to the erased state. To
change the upgrade timing, set the model's `DELAY_READ`, `DELAY_PROG` and `DELAY_ERASE`.
To shorten a test that depends on the watchdog, override `WDT_TIMEOUT` on the top.
