# An AFDX-style store-and-forward switch for a network-on-chip

This is a packet switch for connecting IP blocks on a chip. It borrows its
rules from AFDX, the switched-Ethernet network used in avionics (ARINC 664
Part 7). Traffic is organised in *virtual links* (VLs). A VL is a statically
planned flow from one sender to one or more receivers, named by a 16-bit
identifier carried in the frame's destination address. The switch does not
route adaptively and never rewrites a frame. It *filters*: it stores each
frame whole, checks it, and then does one of two things:

- If the frame is well formed and its VL is allowed on the port it came in
  on, the switch copies it unchanged to the output ports the VL is configured
  for.
- Otherwise it discards the frame and records why.

On chip, links are 8 bits wide and carry one byte per clock, instead of the
serial links of the avionic network. The end systems (the network interfaces
of the IP blocks) are not part of this RTL. They are the frame sources and
sinks on the switch's ports.

The RTL covers the whole switch. Its six cores are the test units, the port
memories, the CRC module, the addresses table, the switch controller and the
multiplexing matrix. They are written in synthesizable SystemVerilog, and each
comes with a self-checking testbench.

## Frames and ports

Each receiving (RX) and transmitting (TX) port is a pair `{dv, data[7:0]}`.
`dv` is high for every byte of a frame, from the first preamble byte to the
last FCS byte, and low for at least one clock between frames. A frame on a
port looks like this:

| bytes | content |
|---|---|
| 7 | preamble, `0x55` each |
| 1 | start frame delimiter, `0xD5` |
| 6 | destination address: constant field `03 00 00 00`, then the VL ID (high byte first) |
| 6 | source address (not examined) |
| 2 | type (not examined) |
| 46..1500 | payload |
| 4 | FCS: the Ethernet CRC-32 of the address..payload bytes, least significant byte first |

The MAC frame (destination address to FCS) must be 64 to 1518 bytes long, so
the switch holds 72 to 1526 bytes per frame. The TX ports carry exactly the
bytes that came in, preamble included. TX ports have no ready signal. The
receivers are assumed always able to take a byte.

## Inside the switch

```
 RX0 ─► test unit 0 ─┬─ data ─► port RAM 0 (2 KB) ─┐
 RX1 ─► test unit 1 ─┼─ data ─► port RAM 1 (2 KB) ─┤
  ⋮         ⋮        │              ⋮              ├─► multiplexing ─► TX0..TXm
 RXn ─► test unit n ─┼─ data ─► port RAM n (2 KB) ─┘     matrix
                     │ flags          ▲ addr/we               ▲ sel, mask, valid
                     └──────► switch controller ──────────────┘
                               │            │
                          CRC module   addresses table
```

- **Test unit** (`afdx_test_unit`, one per RX port). It watches its port and
  recognises a new frame by seven `0x55` bytes followed by `0xD5`. It passes
  the bytes, one clock later, to the port memory. It also flags the
  controller with a burst start, a detected frame (on the SFD), the frame's
  end, or a broken preamble.
- **Port memory** (`afdx_port_ram`, one per RX port). A single-port RAM of
  2048 bytes. It holds exactly one frame, preamble included. A maximum-size
  frame fills 1526 bytes.
- **Switch controller** (`afdx_switch_ctrl`). It contains one small receive
  state machine per port, one forwarding state machine shared by the whole
  switch, and the error log.
- **CRC module** (`afdx_crc32`). It computes the CRC-32 of a frame at one byte
  per clock, captures the frame's own FCS and reports whether the two are
  equal.
- **Addresses table** (`afdx_addr_table`). It is loaded by the system
  designer before traffic starts. Each entry has a VL ID, the RX ports allowed
  to send on that VL, and the TX ports the VL goes to.
- **Multiplexing matrix** (`afdx_mux_matrix`). It selects the memory of the
  port being served and copies its byte stream onto every TX port in a mask:
  one port for unicast, several for multicast, all of them for broadcast.

The CRC module and the path from the memories to the matrix exist only once.
So the switch serves **one frame at a time**, and this is the key to
understanding its behaviour.

### Receiving

Each port's receive machine has four states: `R_IDLE`, `R_STORE`,
`R_DISCARD` and `R_FULL`.

1. When a burst begins, the machine writes its bytes into the port memory
   from address 0.
2. If the test unit reports a broken preamble, the burst is discarded.
3. When the burst ends after a detected frame, the machine keeps the byte
   count as the frame's length. It then marks the buffer **full** and stops
   accepting data.

While the buffer is full, the port cannot take another frame. A frame that
starts during that time is lost and counted as an *overrun*. A burst longer
than the memory is cut off and counted as a *size* error.

### Filtering and forwarding

The forwarding machine picks the next full buffer in round-robin order. The
search starts at the port after the one served last. It then applies the
checks in this order:

1. **Size.** The stored length minus 8 must be between 64 and 1518. If it is
   not, the frame is dropped at once, without reading it.
2. **FCS.** The frame is read out of memory once (bytes 8 to L-1) and fed
   through the CRC module. The last four bytes go to the FCS capture register
   instead of the CRC.
3. **Destination address.** The six address bytes are captured during the
   same pass and looked up in the table. The lookup passes only if all of
   these hold:
   - the constant field is `0x03000000`;
   - the VL ID is in the table;
   - the RX port is permitted for that VL;
   - the VL has at least one TX port.

If a check fails, the frame is dropped. Its cause is counted, and the buffer
is freed. If all checks pass, the frame is read a second time, from address
0, and streamed through the matrix with the VL's TX mask. The buffer is freed
once the last byte has left the memory.

**Broadcast mode** (`broadcast_en = 1`) sends every frame that passes the size
and FCS checks to all TX ports. In this mode the address check is skipped.

### Error log

The controller outputs the following:

- `err_cnt[c]`, a saturating 16-bit count per cause `c` (`err_e` in
  `afdx_pkg`): `ERR_PREAMBLE`, `ERR_OVERRUN`, `ERR_SIZE`, `ERR_FCS` and
  `ERR_ADDR`. `err_cnt[ERR_NONE]` stays 0.
- `last_err` and `last_err_port`, the cause and port of the latest drop.
- `fwd_cnt`, the number of frames forwarded.

## Timing and throughput

Everything runs on one clock with a synchronous active-low reset. Let L be
the stored length of a frame (the MAC frame plus 8).

| event | clocks |
|---|---|
| last RX byte sampled to buffer full | 2 |
| buffer full to first byte out of memory | L-3 |
| last RX byte to first TX byte, idle switch | **L** |
| forwarding machine busy per frame | 2L-2 (L-4 checking, L+2 forwarding) |
| table lookup, CRC result, matrix | 1 clock each, registered |

The forwarding machine reads each frame twice. So the switch as a whole moves
about **half a byte per clock**, however many ports it has. A multicast copy
costs nothing extra. Each port has only one buffer, so a sender must leave
time for its frame to be forwarded before sending the next one. Otherwise the
next frame is lost as an overrun. When all eight ports send at once, the last
port served waits about 7 × (2L-2) clocks. The end-to-end testbench runs
exactly that case.

## Configuring the table

Write entries with `cfg_we`, `cfg_idx` and `cfg_entry`. The entry type is
`afdx_pkg::vl_entry_t`:

```systemverilog
cfg_entry = '{valid: 1'b1, vlid: 16'h0202,
              rx_permit: 32'h06,    // RX1 and RX2 may send VL 0x0202
              tx_mask:   32'h70};   // it goes to TX4, TX5, TX6
```

Reset clears every entry. The lookup compares all entries at once, and the
lowest-numbered matching entry wins.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_RX`, `N_TX` | 8, 8 | ports per side (at most 32 each, limited by the entry masks) |
| `DEPTH` | 2048 | bytes per port memory; at least 1526 for full-size frames |
| `N_ENTRIES` | 16 | table entries |

The protocol constants are in `rtl/afdx_pkg.sv`. They cover the preamble
length and bytes, the frame size limits, the constant field and the CRC
polynomial.

## What follows AFDX and what is this design's own

The design follows the AFDX switch model in these points:

- the six cores and their connections;
- the 8-bit links;
- 2 KB of single-port memory per RX port;
- detection by the seven-byte preamble;
- the check order size → FCS → destination address (constant field and
  permission);
- dropping with an error-log entry;
- forwarding without any change to the frame, and no FCS regeneration;
- unicast, multicast and broadcast.

The Ethernet and ARINC 664 conventions are standard. They cover the byte
values, the 64-byte minimum frame, CRC-32 and the address layout. The AFDX
NoC adapts the address representation in a way not specified here, so the
standard layout is used.

The following are choices made for this implementation:

- the port counts, and the port signalling (`dv` plus byte, no back-pressure);
- one frame per port buffer, with overrun on a second frame;
- one frame checked or forwarded at a time, in round-robin order, with two
  read passes (check, then forward) over the port memory;
- all register stages and latencies above;
- the associative table with its RX-permit mask, and its configuration port;
- broadcast skipping the address check and including every TX port;
- the error-log format.

These AFDX features are not built:

- traffic policing (BAG, Lmax and jitter), which AFDX switches do and this
  NoC does not adopt;
- redundant networks;
- multi-frame FIFOs per port.

## Files

`rtl/`:

- `afdx_pkg.sv`: constants, `err_e`, `vl_entry_t`, the byte-wise CRC
  function
- `afdx_switch.sv`: the top level
- `afdx_test_unit.sv`, `afdx_port_ram.sv`, `afdx_switch_ctrl.sv`,
  `afdx_crc32.sv`, `afdx_addr_table.sv`, `afdx_mux_matrix.sv`: the six cores

`tb/`:

- `afdx_tb_pkg.sv`: builds frames and computes a reference FCS with a
  bit-serial CRC written independently of the RTL
- `tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_afdx_switch` runs the switch at its default size. It covers:

- unicast, multicast and broadcast;
- a 1518-byte frame;
- each drop cause;
- a second frame hitting a full buffer;
- three rounds of all eight ports sending at once;
- a phase of random traffic on all eight ports, mixing good frames with
  short, corrupted and misaddressed ones. The expected fate of each frame
  comes from a model of the table kept in the testbench.

It checks every TX frame byte-for-byte against a scoreboard, checks the
error counts, and checks the L-clock latency. The unit testbenches also
check the other latencies in the timing table.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/afdx_pkg.sv tb/afdx_tb_pkg.sv tb/tb_afdx_switch.sv \
  --top-module tb_afdx_switch -Mdir obj_switch
./obj_switch/Vtb_afdx_switch
```

Replace `tb_afdx_switch` with any other testbench to run it. Each runs in
well under a second. The RTL has no vendor primitives. The port memories are
plain arrays with a registered read, which FPGA tools map to block RAM.
