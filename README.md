# Singles processing logic for a four-block small-animal PET detector module

A small-animal PET scanner needs fine position and energy resolution, and it
must run in several acquisition modes without reloading the FPGA. This RTL
is the digital signal processing logic of one singles processing unit (SPU).
An SPU reads out four detector blocks. Each block is a 23 x 23 array of LYSO
crystals read out from both ends. Per detected gamma photon (an *event*) a
block delivers eight area values, A1..D1 for one end and A2..D2 for the
other, plus a TDC time word. From these the logic computes:

- the raw position (x, y), as 9 + 9 bits;
- a 4-bit depth of interaction (DOI);
- the energy;
- the struck crystal;
- the corrected time and energy.

It then ships the result to a coincidence processor over Gigabit Ethernet
(UDP/IPv4). Every block sustains one event per 125 MHz clock. The requirement
is 1 M events/s per block.

Its central idea is a memory saving. A full crystal look-up table would map
every (x, y) pair to a crystal: 512 x 512 words per block. This design keeps
only the 22 crystal boundaries of each row and column instead, which is about
13 times less memory. The memory freed lets two online histograms share one
on-chip RAM. Together these let all tables and histograms of the four blocks
fit in the FPGA's block RAM with no external memory.

## Three modes, each online or offline

The host selects the mode with a command. Online means the histogram is built
inside the SPU. Offline means every event is sent raw to the host.

| mode | used for | online sub-mode | offline sub-mode |
|---|---|---|---|
| regular | imaging | – | one 16-byte *regular package* per event, after the energy window |
| flood | finding crystal boundaries | 512 x 512 histogram of raw (x, y) | raw (x, y, DOI, energy) package per event |
| energy | finding per-crystal photo peaks | 529 crystals x 256 energy bins histogram | raw (crystal, energy) package per event |

Regular mode is the only one that applies the energy window. The histogram
modes need the whole spectrum, so the window is bypassed there.

## Data path of one block (`block_proc`)

```
area[8], tdc ─► energy_sum ─────────────────────────────┐
            └─► cog_position (x, y, DOI) ─► boundary_clt (crystal ID)
                                              ├─► time_offset_corr (tdc + offset[crystal])
                                              └─► photon_peak_corr (energy × gain[crystal])
                 ─► event_filter ─► event_packager ─┬─► regular FIFO ─► token ring 1
                                                    ├─► flood FIFO   ─► token ring 2
                                                    ├─► energy FIFO  ─► token ring 3
                                                    └─► online_histogram ─► (flood / energy FIFO on readout)
```

The whole chain is one pipeline that takes an event every cycle. An event
enters `block_proc` with `ev_valid`. Its package sits at the head of the
matching FIFO 21 cycles later. The stage latencies are:

| stage | latency (cycles) |
|---|---|
| `energy_sum` | 1 |
| `cog_position` | 11 |
| `boundary_clt` | 2 |
| `time_offset_corr` | 2 |
| `photon_peak_corr` | 2 |
| `event_filter` | 1 |
| `event_packager` | 1 |
| FIFO write | 1 |

Every event record carries all its fields along the pipeline, so later stages
need no side buffers. The mode register is sampled at the end of the
pipeline. An event that is in flight during a mode switch therefore leaves
the pipeline in the new mode.

### Position and DOI (`cog_position`)

Each end of the crystal gives a centre of gravity, and the two are averaged:

```
S1 = A1+B1+C1+D1    S2 = A2+B2+C2+D2
x   = ½·((A1+D1)/S1 + (A2+D2)/S2)
y   = ½·((A1+B1)/S1 + (C2+D2)/S2)
DOI = S1 / (S1+S2)
```

Each fraction is computed as floor(512·f) by a pipelined restoring divider
(`frac_div`). It produces one quotient bit per stage and saturates at 511
when the denominator is 0. Then x = (fx1+fx2) >> 1, y likewise, and
DOI = floor(16·S1/(S1+S2)). The divider needs no DSP slices.

### Crystal identification with boundary tables (`boundary_clt`)

The crystals form a 23 x 23 grid, but in the raw (x, y) plane their areas are
warped. Within one row of the raw image (fixed y), however, x still crosses 22
crystal borders in order, and the same holds for columns. So each direction
gets one table of 512 rows x 22 boundaries x 9 bits:

- The x-boundary table is addressed by raw y. Row y holds the 22 x positions
  where the column index changes along that line.
- The y-boundary table is addressed by raw x, the same way for rows.

The crystal's column is 1 + the number of x boundaries ≤ x. Its row is
1 + the number of y boundaries ≤ y. Both are looked up in parallel, with 22
comparators per direction. The crystal ID is then (row − 1)·23 + column, in
the range 1..529. For example, with x = 11, y = 7, x boundaries (…, 8, 9, …)
on line 7 and y boundaries (…, 7, 11, …) on line 11, the crystal is (2, 2),
which is ID 25.

The unit counts boundaries instead of searching for the first one above the
value. This makes the result independent of the order in which boundaries
are stored, and it needs no priority logic. Memory per block is
2 x 512 x 22 x 9 = 202,752 bits. A full 512 x 512 x 10-bit table would be
2.6 Mbit.

### Corrections and the energy window

- `time_offset_corr` adds a 32-bit per-crystal offset to the TDC word. This
  aligns the delays of the crystals and their channels.
- `photon_peak_corr` multiplies the summed energy by a per-crystal gain
  (28 bits, 20 of them fraction bits). The 511 keV photo peak of every crystal
  then lands on code 511. The result saturates at 16 bits.
- `event_filter` passes an event in regular mode only if
  win_lo ≤ energy ≤ win_hi. Drops are reported on `filter_drop`.

### Online histogram (`online_histogram`)

One RAM of 2^18 words x 10 bits per block serves both histograms. An address
multiplexer picks the address:

- flood mode: `{y, x}`;
- energy mode: `(crystal − 1)·256 + bin`, where `bin = energy >> eshift`,
  clipped to 255. This uses 135,424 words.

A start command first clears the RAM with a sweep of 2^18 cycles (2.1 ms).
`hist_busy` is high whenever the unit is clearing, counting or reading out. Events that arrive during the sweep are not counted. Each event then takes four cycles: latch the address,
read, add one, write back. When a counter reaches 1023 the full flag is set
and the run stops, so no counter ever wraps. An event that arrives while the
previous one is still being added is dropped and counted. That happens only
when two events of one block arrive less than four cycles (32 ns) apart,
which the 1 µs dead time of the front end rules out.

A read command walks a pointer over every address of the active histogram.
It packs eight consecutive counters into one 16-byte package, together with
the start address and the full flag. The package goes out through the flood
or energy FIFO of the block.

## Readout: FIFOs, token rings and the mode multiplexer

Each block has three FIFOs: regular, flood and energy. Each is 512 deep,
first-word-fall-through, and counts overflows.

Three token rings (`token_ring_readout`) each serve the four FIFOs of one
package type. The block that holds the token sends packages while its FIFO
has data, up to `MAX_BURST` = 16 in a row. It passes the token when its FIFO
is empty or the burst ends. An empty block passes the token in one cycle.
A busy block therefore cannot starve the others, and a sudden burst on one
block is drained at full link speed instead of at a fixed time slot per
block.

`readout_mux` connects the ring that matches the current mode to the
uplink. A package that the old ring has already presented at a mode switch
stays at the head of its FIFO until that mode returns.

## Package formats (16 bytes, sent most significant byte first)

| bits | regular (type 1) | flood raw (2) | energy raw (3) | flood / energy histogram (4 / 5) |
|---|---|---|---|---|
| 127:124 | type | type | type | type |
| 123:120 | module ID | module ID | module ID | module ID |
| 119:118 | block | block | block | block |
| rest | 117:108 crystal ID, 107:104 DOI, 103:88 energy, 87:56 time, 55:47 x, 46:38 y | 117:109 x, 108:100 y, 99:96 DOI, 95:77 raw energy | 117:108 crystal ID, 107:89 raw energy | 117:100 first address, 99 full flag, 79:0 eight 10-bit counts (count 0 in bits 9:0) |

Type 0 is a fill package, all zeros.

## Network interface

The uplink chain is `udp_tx` → `ip_tx` → `mac_tx`. It produces the
byte stream that an Ethernet MAC core expects. The MAC core adds the
preamble and CRC, and a Gigabit PHY drives the cable; neither is part of
this RTL. The `tx_*` and `rx_*` ports of `spu_top` are the MAC core's 8-bit
user-side streams at 125 MHz.

- **`udp_tx`** packs eight packages into one datagram of 128 bytes and adds
  the UDP header. The UDP checksum is 0, which IPv4 allows. If no package
  arrives within `FLUSH_WAIT` = 256 cycles, a fill package takes the empty
  slot. Datagrams therefore keep one size, and a lone event is never held
  back.
- **`ip_tx`** adds a 20-byte IPv4 header. It sets DF and TTL 64, uses an
  incrementing ID, and computes the header checksum.
- **`mac_tx`** adds the destination MAC, the source MAC and EtherType
  0x0800.

The downlink chain `mac_rx` → `ip_rx` → `udp_rx` checks and strips each
header:

- The destination MAC must be this unit's or broadcast, with EtherType 0x0800.
- The IP header must be IPv4 with a 20-byte header, protocol UDP, this unit's
  address and a valid checksum.
- The UDP destination port must be the command port.

Padding is trimmed using the length fields. A rejected frame pulses
`rx_bad`. The stack is deliberately minimal: it has no ARP, ICMP or
fragmentation, and all addresses are parameters.

Bandwidth: 4 M events/s fill 500 k datagrams/s. Each datagram is 170 bytes
from the logic, or 194 bytes on the wire. That comes to about 776 Mbit/s,
below the 1 Gbit/s line rate. The raw package payload alone is 512 Mbit/s.

## Command format (`cmd_resolver`)

The host sends UDP datagrams to the command port. Each datagram carries one
or more 8-byte command words, most significant byte first:

```
[63:56] opcode   [55:54] block   [53:32] address   [31:0] data
```

| opcode | meaning |
|---|---|
| 01 | set mode: data[1:0] = 0 regular / 1 flood / 2 energy; data[2] = online |
| 02 / 03 / 04 | histogram start / stop / read out; data[3:0] = block mask |
| 10 / 11 | write one x / y boundary: address = {line[8:0], index[4:0]}, data[8:0] |
| 12 / 13 | write time offset / gain of crystal (address = ID − 1) |
| 14 | energy window: data = {hi[15:0], lo[15:0]} |
| 15 | energy bin shift: data[4:0] |
| 16 | module ID stamped into packages: data[3:0] |

Unknown opcodes are ignored. A command takes effect one cycle after its last
byte. `cmd_cnt` counts accepted commands.

## Memory budget (four blocks)

| memory | bits |
|---|---|
| histograms 4 x 2^18 x 10 | 10,485,760 |
| boundary tables 4 x 2 x 512 x 22 x 9 | 811,008 |
| time offsets 4 x 529 x 32 | 67,712 |
| gains 4 x 529 x 28 | 59,248 |
| **tables + histograms** | **11,423,728 (10.89 Mibit)** |
| package FIFOs 12 x 512 x 128 | 786,432 |

This fits the 365 x 36 kbit of block RAM in a mid-size Artix-7 device.

## Where this design departs from, or adds to, its source

- **Full flag.** Counters stop at 1023 and set the flag when the new count
  reaches 1023. One reading of the source's flow chart ("< 1023?") would set
  the flag one count earlier. The text's description, that overflow sets the
  flag, was followed.
- **Worked example.** The source's crystal-identification example
  addresses the y-boundary table at 0x00C for x = 11. Here the table is
  addressed by x itself.
- **Own choices, not taken from the source:**
  - the area, TDC and gain widths, the fixed-point scaling, and the gain
    arithmetic of the peak correction;
  - the energy-bin scaling (`eshift`);
  - clearing the histogram on start;
  - the package bit layouts and the command format;
  - FIFO depths and the token-ring burst rule;
  - datagram size and fill packages.
- **Not included:**
  - the area-calculation logic and the TDC that feed this logic (their
    results are the inputs of `spu_top`);
  - the Ethernet MAC core and the PHY;
  - the clocking (one 125 MHz clock is assumed; the source's device uses
    two PLLs);
  - any status or monitoring readback other than the status outputs of
    `spu_top`.
- **Receive path.** The receive path has no back-pressure. Commands arrive
  at most one byte per cycle and are always accepted.

## Files

`rtl/spu_pkg.sv` holds the widths, enums, event record, command word and
package builders. Every other file in `rtl/` holds one module, named after
the file. `spu_top` is the top level. `frac_div`, `hdr_prepend` and
`hdr_strip` are helpers. Each file opens with a description of its function,
interface and timing.

`tb/tb_<module>.sv` is a self-checking testbench for each module.
`tb/tb_net_pkg.sv` builds Ethernet/IPv4/UDP frames for the network
testbenches. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Where a latency is
defined, the testbench checks the cycle count.

`tb_spu_top` drives the whole unit at its default sizes, using only Ethernet
frames. It:

- configures all tables of all four blocks;
- runs regular mode and every histogram mode in both sub-modes: offline
  flood, offline energy, online energy on two blocks (one of which runs into
  the full flag), and online flood with a readout of all 262,144 counters;
- checks every package against a reference model;
- stalls the transmit side;
- sends a frame to a wrong port.

It also counts each mechanism: filter drops, token passes and bursts, fill
packages, stalls, mode switches, histogram full and rejected frames. A
mechanism that never occurred counts as a failure. The testbench takes
about a minute to build and run.

`tb_spu_rate` drives all four blocks at the maximum rate of 1 M events/s
each, in the same cycle. It checks all 8000 packages and confirms that no
FIFO overflows. It also measures how busy the uplink is: 68 % of cycles.

## Simulating

Verilator 5 with timing support:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/spu_pkg.sv tb/tb_net_pkg.sv tb/tb_spu_top.sv --top-module tb_spu_top \
    -Wno-fatal -o sim -Mdir obj_tb_spu_top
./obj_tb_spu_top/sim +verilator+rand+reset+2
```

Replace `tb_spu_top` with any other testbench name. Include files are found
through `-Irtl`, because each module file sits in `rtl/` under the module's
name (`-y rtl` also works).

The testbenches are written for two-state simulation with random initial
values. They use `$urandom` only.

For synthesis, read `rtl/spu_pkg.sv` first, then the other files in `rtl/`,
with `spu_top` as top.

Sizes that can be changed through parameters:

- `HIST_AW` (histogram depth);
- FIFO depths (`REG_DEPTH`, `AUX_DEPTH`);
- `MAX_BURST`, `PKGS_PER_DGRAM`, `FLUSH_WAIT`;
- the network addresses and ports.

The crystal grid (23 x 23) and the field widths are constants in `spu_pkg`.
