# Singles processing logic for a resistive-network small animal PET

A PET detector block here is a 23×23 array of LYSO crystals. A 8×8 SiPM
layer sits on each end of the array, and each layer is read out through a
resistive network with four corner outputs. So each block gives eight
signals: A1, B1, C1, D1 on one end and A2, B2, C2, D2 on the other. The
readout only shows where a gamma photon hit after arithmetic and
calibration:

- a centre-of-gravity position is worked out from the corner energies;
- a crystal look-up table maps that position to one of 529 crystals;
- each crystal has its own gain (photon peak) and time offset, so both
  are corrected crystal by crystal.

The logic here does all of that for the four blocks of a detector
module, one event per clock cycle per block at 125 MHz. It also builds
the two calibration histograms: the 512×512 flood map and the per-crystal
energy spectrum. It sends results as UDP packets over Gigabit Ethernet
and takes its configuration (modes, look-up tables, window, commands) from
UDP packets too.

The main idea for saving memory is the **boundary crystal look-up table**.
A plain table needs one 10-bit crystal number per 512×512 position
(2.5 Mbit per block). Instead, the crystal grid is treated as 23 columns
and 23 rows whose edges bend smoothly across the image. Each edge is
stored as one 9-bit boundary coordinate per image line. That takes two
tables of 512 lines × 22 boundaries × 9 bits, about 0.2 Mbit per block.

## Data flow of one block

```
ADC x8 --> area_calc --E[8], TDC--> raw_pos_calc (K=12) --X,Y,DOI--> boundary_clt (3) --crystal--+
 TDC hit -----^                 \--> sum Σ ------------------ delay ------------------------> energy_corr (3) --keV, pass
                                 \--> TDC ------------------- delay ------------------------> time_corr (3)   --t - offset
                                                                                                  |
   regular frame  <---------------------------------------------------------------------------- packing
   flood / spectrum histogram (shared RAM)  or  offline frames,  raw frames
```

Each block (`block_dsp`) carries out these steps:

1. **Energies.** `area_calc` waits for a hit on the block's time channel. It
   then sums the next 16 ADC samples of each of the eight channels. It
   subtracts a baseline: 16 × the mean of the four samples just before the
   hit. A second hit inside the window counts as pile-up and is ignored.
2. **Raw position and DOI** (`raw_pos_calc`). With S1 = A1+B1+C1+D1 and
   S2 = A2+B2+C2+D2:
   - X = ½((A1+D1)/S1 + (A2+D2)/S2)
   - Y = ½((A1+B1)/S1 + (C2+D2)/S2)
   - DOI = S1/(S1+S2)

   X and Y are scaled to 0..511 and DOI to 0..15. Three pipelined restoring
   dividers run in parallel. The latency is K = 12 cycles: one for the
   sums, ten for division, one for averaging.
3. **Crystal locating** (`boundary_clt`).
   - The X-boundary table is addressed by raw Y. Its 198-bit line holds the
     22 column edges at that height, and X is compared with all 22 at once.
   - The column is 1 + the number of edges ≤ X.
   - The Y-boundary table, addressed by raw X, gives the row the same way.
   - Crystal = (row−1)·23 + column.

   Latency is 3 cycles: register the address, read the RAM, compare.
4. **Energy and time correction**, in parallel, 3 cycles each.
   - Energy: the crystal number selects a 16-bit gain coefficient.
     E_keV = (ΣE · coef) >> 14, saturated to 12 bits. The event is kept only
     if win_lo ≤ E_keV ≤ win_hi.
   - Time: an 18-bit signed offset is subtracted from the 48-bit TDC value.
5. **Packing.** A 16-byte regular frame leaves 18 = K+3+3 cycles after the
   energies arrive, plus one output register.

Nothing in the regular path stalls. Backpressure only starts at the FIFOs
after packing.

## The four modes

The PC selects the mode (`SET_MODE` command). Every block has a separate
frame output and token ring for each mode. A multiplexer after the rings
passes the active mode's frames to the packet builder.

| mode | per event | output |
|---|---|---|
| regular | full pipeline, energy window | 16-byte regular frame |
| flood map, online | histogram cell {Y, X} += 1 | 8-byte histogram frames on read-out |
| flood map, offline | — | 8-byte frame {X, Y, DOI} per event |
| energy spectrum, online | histogram cell {crystal−1, bin} += 1 | 8-byte histogram frames on read-out |
| energy spectrum, offline | — | 8-byte frame {crystal, ΣE} per event |
| raw | — | 24-byte frame {E[8], TDC} per event |

The spectrum bin is the *uncorrected* energy sum, ΣE >> eshift, clamped to
255. The spectrum exists to find the per-crystal photon peaks that the
gain table then corrects.

### Histogram RAM

Each block has one RAM of 2^18 cells × 10 bits. Both statistic modes share
it through an address multiplexer. For flood maps it holds 512×512 cells.
For spectra it holds 529 crystals × 256 bins, which uses about half of it.

Each event does a read, then +1, then a write-back:

- A cell at 1023 is not incremented. It sets a sticky *full* flag instead,
  which tells the PC that the acquisition has been long enough.
- One event is accepted every cycle. The RAM is read one cycle after the
  event arrives and written the cycle after that.
- If an event hits the cell that is still being written, it takes the
  count from the write register. That way two events on the same cell in
  a row are both counted.

**Read-out** (`HIST_READ`) sweeps a pointer over all 2^18 cells:

- Each cell becomes one 8-byte frame {type, block, address, count}, and
  the cell is cleared as it is read. The next acquisition starts from zero.
- The sweep follows `out_ready`. `out_ready` comes from the flood or
  spectrum token ring's block FIFO, which signals when four or fewer
  places are left.
- `HIST_CLEAR` sweeps without sending anything.
- Events arriving during a sweep are not counted.

A full read-out of one block is 262,144 frames. With 175 frames per packet and
36 header bytes each, that is about 2.15 MB, or 17 ms at 1 byte per clock.

## Token rings and packets

Each block writes its frames into a 16-deep block FIFO. A token visits the
four block FIFOs of a ring in turn, one per cycle. The block that holds the
token moves one frame into the 64-deep module FIFO. So the ring drains
every block within 4 cycles, and frames come out roughly in time order.

A frame that meets a full block FIFO is dropped and reported on
`frame_drop`. At the specified event rates this should not happen. In the online
histogram modes the read-out sweep watches the FIFO's almost-full flag,
so nothing is dropped.

`udp_tx` collects frames into a packet. Synchronization frames go first.
It closes the packet when either:

- the first frame has waited `period` cycles (default 12,500 = 100 µs), or
- the next frame would overflow 1400 payload bytes or 176 frames.

It then sends the packet on an 8-bit valid/ready/last stream to an
Ethernet MAC. The packet is a 20-byte IPv4 header (checksum computed), an
8-byte UDP header (checksum 0), an 8-byte packet header and the frames:

```
packet header:  0x5350 | SPU id (8) | mode (8) | sequence (16) | frame count (16)
```

A frame is sent as its `nbytes` most significant bytes. In `frame_t`,
data sits in the upper bits of a 192-bit field:

```
regular  (16 B): type=1 | blk(2) | 00 | crystal(10) | DOI(4) | 00 | E_keV(12) | X(9) | Y(9) | 0(26) | time(48)
histogram (8 B): type=2 flood / 3 spectrum | blk(2) | 0(8) | address(18) | 0(6) | count(10) | 0(16)
offline flood (8 B): type=4 | blk | 00 | X(9) | Y(9) | DOI(4) | 0(34)
offline spec  (8 B): type=5 | blk | 00 | crystal(10) | 00 | ΣE(19) | 0(25)
raw      (24 B): type=6 | blk | 00 | E_A1..E_D2 (8×16) | TDC(48) | 0(8)
sync     (16 B): type=F | 0(12) | local time stamp(40) | received time stamp(40) | 0(32)
```

While a packet is being sent, the builder refuses new frames, and the
module and block FIFOs hold them. At the design rate of 0.82 M events/s
per module (13 MB/s of regular frames), this pause of at most 11.5 µs
fills a few FIFO places.

## Synchronization

A 40-bit time stamp counter runs on the system clock. The clock and
synchronization module sends its time on `sync_in`: a start bit of 1, then
40 bits MSB first. The value refers to the cycle of the last bit:

- if it equals the counter, nothing happens;
- if not, a sync frame with both values goes to the front of the packet
  stream, and the counter is loaded so that it continues from the received
  value.

`ts` is an output, so that the TDC can use it as its coarse count.

## Configuration commands

Commands are 64-bit words in the payload of UDP packets sent to port 5002.
`udp_rx` checks the IPv4 version/IHL byte, the protocol and the port, and
drops everything else. Opcodes are in bits 63:56:

| op | command | fields |
|---|---|---|
| 01 | SET_MODE | [1:0] mode (0 regular, 1 flood, 2 spectrum, 3 raw), [4] offline |
| 02 | SET_EWIN | [27:16] low, [11:0] high, keV |
| 03 | CLT_BND | [20:16] index 0..21, [8:0] boundary: fills a 198-bit line register |
| 04 | CLT_COMMIT | [17:16] block, [12] table (0 X edges / 1 Y edges), [8:0] line |
| 05 | PEAK_WR | [49:48] block, [41:32] crystal, [15:0] gain (2^14 = 1.0) |
| 06 | TOFF_WR | [49:48] block, [41:32] crystal, [17:0] signed offset |
| 07 | HIST_READ | [3:0] block mask |
| 08 | HIST_CLEAR | [3:0] block mask |
| 09 | SET_PERIOD | [31:0] packet period in cycles |
| 0A | SET_ESHIFT | [4:0] spectrum bin shift |

After reset the design is in regular online mode, with window 0..4095 keV,
bin shift 8 and period 12,500. The LUTs and boundary tables are **not**
cleared at reset, so they must be loaded before use.

## Memory

| memory (4 blocks) | bits |
|---|---|
| histogram RAMs 4 × 2^18 × 10 | 10,485,760 |
| boundary tables 4 × 2 × 512 × 198 | 811,008 |
| photon peak LUTs 4 × 1024 × 16 | 65,536 |
| time offset LUTs 4 × 1024 × 18 | 73,728 |
| total | 11,436,032 (10.9 Mibit) |

The FIFOs add about 0.15 Mbit. The widths of the two correction LUTs were
chosen so that their totals match the published memory budget. That budget
does not state the widths.

## Where this design goes beyond or differs from the published description

The published description gives the processing chain, its cycle budget
(K+3+3), the position formulas, the boundary-table organisation, the
histogram's read/+1/write with 1023 saturation, and the memory sizes. The
following are this design's own choices:

- **Divider.** The original uses a vendor divider core with a
  configurable latency K. Here it is a plain restoring divider with
  K = 12 fixed.
- **Area integration.** Its insides are not described. The trigger from
  the block's time channel, the 16-sample window and the 4-sample
  baseline are assumptions.
- **Formats and encodings.** The frame layouts (only "16 bytes per event"
  is given), the command set, the sync serial format, the packet header
  and the packet closing rule are all invented here.
- **Table and word sizes.** The widths of the energy (16 bits), TDC
  (48 bits), gain (16 bits, 14 fractional) and offset (18 bits) are chosen
  here. So are the 1024-entry LUTs, the 12-bit keV result and the spectrum
  bin taken from the uncorrected sum.
- **Boundary-table addressing.** The Y-boundary table is addressed by
  raw X itself. One published worked example shows address 0x00C for
  X = 11, which disagrees with the text; the text is followed here.
- **Histogram extras.** Clearing on read-out, the separate clear sweep,
  and ignoring events during a sweep are additions.
- **Token rings.** One token ring is built per mode, four in all. The
  published block diagram labels them 1, 1, 2, 3.
- **Event rate.** The required rate is stated both per channel and per
  block. The design takes one event per cycle per block, so it meets
  either.
- **Mode changes.** The mode should be changed only when no events are in
  flight. Frames already in a ring of the old mode wait there until that
  mode is selected again.
- **Clocking.** There is one clock domain (125 MHz). The 62.5 MHz ADC rate
  enters as a sample strobe. ADCs, TDC, Ethernet MAC/PHY and PLLs are
  outside this RTL, and their signals are ports of `spu_dsp_top`.

## Files and simulation

The RTL is in `rtl/`:

- `spu_pkg.sv` holds the shared sizes and types (`frame_t`, modes, the
  configuration bus).
- The processing modules are `area_calc`, `raw_pos_calc`, `boundary_clt`,
  `energy_corr`, `time_corr`, `histogram` and `block_dsp`.
- The transport modules are `token_ring`, `sync_detect`, `udp_tx`,
  `udp_rx` and `cmd_decoder`.
- The helpers are `sync_fifo`, `delay_line` and `pipe_divider`.
- `spu_dsp_top` is the top level.

Every module has a self-checking testbench `tb/tb_<module>.sv` that
prints `TB_RESULT checks=N failures=M`. `tb/tb_net_pkg.sv` builds command
packets for the testbenches.

`tb_spu_dsp_top` runs the full-size design end to end. It uses no
parameter overrides, and every setting is loaded through UDP command
packets. It:

- generates ADC pulses with known areas;
- runs regular mode through a wrong and a correct sync sequence;
- runs a full-rate burst;
- runs offline flood and spectrum, and raw mode;
- fills an online flood map until cells saturate, then reads all four
  blocks out (2^20 frames);
- builds a spectrum and reads it out.

It parses every packet, checks every frame against a reference model, and
counts each mechanism. It takes about a minute.

`tb_rate_workload` runs the same full-size design for 10 ms at the
detector's peak rate. Each of the four blocks gets random hits averaging
1 M events/s, which is about five times the expected average for a
module. The testbench checks:

- every regular frame;
- that no frame is dropped or lost;
- that the measured rate per block is within 10 % of 1 M/s.

It also reports the load on the output byte stream, which is about 52 %
of 125 MB/s.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_spu_dsp_top \
    rtl/spu_pkg.sv $(ls rtl/*.sv | grep -v spu_pkg) tb/tb_net_pkg.sv tb/tb_spu_dsp_top.sv
./obj_dir/Vtb_spu_dsp_top
```

The package must be compiled first. The same command runs any other
testbench: change the top module name and the last file.
