# An embedded FPGA for an eFPGA-augmented ASIC

A chip that is fully hardened cannot change after tape-out. Updating even one
block takes a new mask set, and every foundry that builds it sees the whole
netlist. This design puts a small embedded FPGA (eFPGA) inside an otherwise
hardened SoC. Logic that changes often, or that should stay secret, lives in the
eFPGA instead of in fixed gates. The processor, interconnect and peripherals stay
ASIC logic. What goes into the fabric is delivered later, as a bitstream:

* the foundry never sees the function (redaction);
* the function can be updated in the field, or the chip reused for a different
  product (repurposing);
* a function can be moved from one part of the fabric to another, for example
  away from a region that has degraded, by rewriting only the affected tiles.

The RTL covers the reconfigurable part of such an SoC: the fabric, its
configuration memory and the AXI4-Lite register block through which the hardened
side loads and controls it. The CPU, peripherals and analog blocks are outside
this RTL. The top module's ports are where they connect.

The architecture follows the ECOLogic proposal (Tashdid et al., "ECOLogic:
Enabling Circular, Obfuscated, and Adaptive Logic via eFPGA-Augmented SoCs").
That paper describes the fabric at block-diagram level:
* a 4 x 4 grid of tiles;
* each tile holds a configuration logic block (LUTs, D flip-flops and muxes),
  two connection blocks and a switch block;
* configuration loads frame by frame or through a scan chain;
* the hardened side reaches the fabric over AXI.

Every size below the tile level, every encoding and the register map are choices
made for this implementation. They are marked as such below.

## Structure

```
ecologic_soc                      top: AXI4-Lite slave + ASIC-side data ports
 ├─ axil_efpga_ctrl               register block, scan shifter, enable/redaction
 ├─ config_mem                    bitstream storage: frame writes and scan chain
 └─ efpga_fabric                  ROWS x COLS tiles
     └─ efpga_tile  (x16)
         ├─ connection_block (x2) tracks -> CLB pins
         ├─ clb                   N basic logic elements
         │   └─ ble (x4)          input selectors, lut, D flip-flop, output mux
         └─ switch_block          tracks/CLB outputs -> outgoing tracks
```
`cfg_mux` is the configurable multiplexer all routing is built from.
`ecologic_pkg` holds the sizes, the configuration layout and the register map.

Default sizes:

| parameter | value | origin |
|---|---|---|
| ROWS x COLS | 4 x 4 tiles | the paper's fabric illustration |
| K (LUT inputs) | 4 | this design |
| N (BLEs per CLB) | 4 | this design |
| I (CLB input pins) | 8 | this design |
| W (tracks per channel and direction) | 4 | this design (gives a 32-bit fabric edge) |
| FRAME_W | 32 bits | this design |
| configuration bits per tile | 180 (6 frames, 12 padding bits) | derived |
| frames / scan-chain length | 96 frames / 3072 bits | derived |

At these sizes the fabric holds 64 four-input LUTs and 64 flip-flops. It has 32
input and 32 output bits. After coarse synthesis the whole top is about 10,800
word-level cells and 3,350 flip-flop bits, 3,072 of them configuration.

## The tile

The tile wiring copies the enlarged tile of the paper's drawing, including its
arrow directions. **Routing is unidirectional**: horizontal tracks run west to
east, vertical tracks run south to north.

```
             v_out (to north tile)
               ^
               |  vertical CB taps these tracks -> CLB pins I/2..I-1
        +------+------+
 h_in --+-> CB_H -> CLB -> (outputs)
  (W)   |              \
        +------------> SWITCH BLOCK --> h_out (to east tile)
                         ^
                         v_in (from south tile)
```

* **Horizontal connection block.** Taps the W tracks arriving from the west and
  drives CLB pins 0..I/2-1. Each pin picks any one track.
* **Vertical connection block.** Taps the W tracks the switch block sends north
  and drives CLB pins I/2..I-1.
* **Switch block.** Every one of its 2W outgoing tracks (W east, W north) picks
  any one of 2W+N sources: the W west tracks, the W south tracks and the N CLB
  outputs. A signal can go straight on, turn a corner, or start at a CLB.
  Selector codes past the last source drive 0 ("off").
* **CLB.** N basic logic elements. Each LUT input of each BLE picks any CLB pin
  or any BLE output of the same CLB. That internal feedback is how counters and
  state machines close their loops inside one tile.
* **BLE.** Input selectors feed a K-input LUT. The LUT feeds a D flip-flop, and
  an output mux chooses the LUT value directly or the registered value. The
  truth table is indexed by the LUT inputs (bit v answers input value v).

Because signals only travel east and north, a signal entering at the west or
south edge can reach any tile to its north-east. The fabric has no path back
west or south except inside a CLB. Placement must respect this. The paper only
shows a single tile, so this restriction follows from its arrows, not from any
stated rule.

**Combinational loops.** One wire path exists inside each tile: from the CLB,
through the switch block and a north track, then through the vertical
connection block back into the CLB. Lint tools report it as circular logic.
Every routing fabric has such paths. A valid bitstream either does not select
the path or breaks it with a registered BLE. The RTL does not guard against a
bitstream that closes it combinationally; such a loop oscillates.

## Fabric edge

Tile (r, c) is row r from the south and column c from the west. Its tile number
is r·COLS + c. With IO_W = ROWS·W + COLS·W = 32:

| bit | fabric input | fabric output |
|---|---|---|
| r·W + t | west end of row r, track t | east end of row r, track t |
| ROWS·W + c·W + t | south end of column c, track t | north end of column c, track t |

If every tile passes its tracks straight on, output bit i equals input bit i. The
testbenches use this as the background configuration. The paper's drawing shows a
ring of unlabelled border tiles; they are taken to be these I/O positions and
hold no logic.

## Configuration

### Bit layout of one tile

All fields are little-endian. SRC_SELW = 4, CB_SELW = 2, SB_SELW = 4 at default
sizes.

| offset | field |
|---|---|
| j·33 + 0 … +15 | BLE j truth table |
| j·33 + 16 + 4k … +3 | BLE j, source of LUT input k (0..7 CLB pin, 8..11 BLE 0..3 output, 12..15 off = 0) |
| j·33 + 32 | BLE j output: 1 = registered |
| 132 + 2p | horizontal CB, pin p (0..3): track number |
| 140 + 2(p−4) | vertical CB, pin p (4..7): track number |
| 148 + 4o | switch-block output o (0..3 east track o, 4..7 north track o−4): source 0..3 west track, 4..7 south track, 8..11 CLB output, 12..15 off |

All-zero bits give LUTs that output 0 and a switch block that copies west track 0
everywhere. That is harmless but not "off": a tile you do not use should pass its
tracks straight on or select code 12 ("off").

### Frames and the scan chain

The configuration memory is 96 frames of 32 bits. Tile t owns frames
6t … 6t+5, and its 180 bits are the low bits of that 192-bit span. Bit b of the
memory is bit b mod 32 of frame b/32. Both loading paths fill the same storage:

* **Frame loading.** A frame is written in one clock. Because frames are aligned
  to tiles, rewriting one tile's six frames changes that tile alone, while the
  rest of the fabric keeps running. This is partial reconfiguration.
* **Scan loading.** The whole memory is one 3,072-bit shift register. Each shift
  enters a bit at the top; after 3,072 shifts the first bit sent sits at bit 0.
  To load a frame image, send frame 0 first, each frame LSB first.
  `scan_out`, the chain's bottom bit, is brought out on a top-level pin.

Reset clears the memory. The stored bits reach the fabric only while the fabric
is enabled (CTRL.cfg_done = 1) and out of reset; otherwise the fabric sees all
zeros. This has two purposes:
* random power-up contents and the intermediate patterns of a scan load never
  drive the routing, where they could close oscillating loops;
* a loaded but unreleased function is not present in the logic at all.
A full scan reload is therefore done with cfg_done cleared. Frame writes to
individual tiles can be done with it set. The paper names both loading methods
but not their format. The layout and the gating are this design's.

## Control registers (AXI4-Lite)

32-bit registers, byte addresses, 8-bit address bus:

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | RW | [0] cfg_done: fabric enabled; [1] io_sel: fabric inputs from `asic_din` (1) or DIN (0); [2] hold the fabric flip-flops in reset |
| 0x04 | STATUS | RO | [0] scan shift in progress; [1] cfg_done; [31:16] number of frames (96) |
| 0x08 | FRAME_ADDR | RW | frame the next FRAME_DATA write goes to; increments after each |
| 0x0C | FRAME_DATA | WO | write: store one frame. Reads 0 |
| 0x10 | SCAN_DATA | WO | write: shift the word into the scan chain, LSB first, 32 clocks. Reads 0 |
| 0x14 | DIN | RW | fabric input word when io_sel = 0 |
| 0x18 | DOUT | RO | fabric output word; 0 while cfg_done = 0 |

Other addresses, and FRAME_DATA writes past frame 95, answer SLVERR. WSTRB masks
bytes of CTRL, FRAME_ADDR and DIN; the two bitstream registers always take the
whole word. The bitstream cannot be read back over the bus.

Handshake timing:
* A write is accepted in the clock where AWVALID and WVALID are both high, no
  write response is pending and no scan shift is running. BVALID follows one
  clock later and holds until BREADY.
* A read is accepted when ARVALID is high and no read data is pending. RVALID
  follows one clock later and holds, with stable data, until RREADY.
* Assertions in `axil_efpga_ctrl` check that both responses hold, and that a
  frame write and a scan shift never coincide.

Loading rates:
* Frame loading: one frame per AXI write transaction, which takes as many
  clocks as the master needs for one write.
* Scan loading: 32 clocks per word, since writes are held off while a word
  shifts, so a full load takes at least 3,072 clocks.

### Redaction

After reset, cfg_done is 0. The fabric then:
* sees no configuration;
* has its flip-flops frozen;
* drives `asic_dout` and DOUT to 0.

Nothing of the target function exists on the chip until software loads the
bitstream and sets cfg_done. The paper speaks of a "secure bitstream". No
encryption or authentication is described there, and none is built here. The
bitstream arrives in plain text over AXI.

### Typical sequence

1. Write FRAME_ADDR = 0, then 96 words to FRAME_DATA (or 96 words to SCAN_DATA).
2. Write CTRL = 1 (enable, inputs from DIN) or CTRL = 3 (inputs from the ASIC
   port).
3. To update or move a function, set FRAME_ADDR = 6·t and write the six frames
   of each affected tile t. The other tiles keep running.

## Top-level ports (`ecologic_soc`)

| port | dir | width | use |
|---|---|---|---|
| clk, rst_n | in | 1 | single clock; synchronous active-low reset |
| s_axil_* | | 8-bit addr, 32-bit data | AXI4-Lite slave, for the host CPU |
| asic_din | in | 32 | data from the hardened IPs into the fabric (io_sel = 1) |
| asic_dout | out | 32 | fabric outputs to the hardened IPs (0 until enabled) |
| scan_out | out | 1 | bottom of the configuration scan chain |

`asic_din` to `asic_dout` is combinational through the fabric for combinational
BLEs. Registered BLEs add a clock each.

## Where this departs from the paper, and how far to trust it

* **Sizes.** The paper fixes the 4 x 4 grid only, and calls even that a
  conceptual illustration. K, N, I, W, the frame width, the selector encodings
  and the full population of every routing mux are this design's choices.
  Real eFPGA generators use sparser connection and switch blocks, and
  bidirectional or multi-length wires.
* **Unidirectional routing** follows the arrowheads in the paper's tile drawing
  literally (see above).
* **AXI4-Lite and the register map** are this design's. The paper says only that
  the fabric is memory-mapped over AXI. The "hierarchical bus-based interconnect"
  it mentions is realised only as the tile channels plus this single AXI port.
* **Configuration gating** by cfg_done, and the output forcing, are this
  design's reading of "inactive until configured".
* **Not built:**
  * the host CPU, peripheral interface and analog IP;
  * bitstream encryption or authentication;
  * on-chip aging or temperature monitors. The paper's remapping of logic away
    from stressed regions is supported only as the mechanism: frame-level
    partial reconfiguration. Deciding when and where to move a function is left
    to software.
* **Evaluated workloads.** The paper's six benchmark IPs are ASCON, SHA-256, a
  transformer accelerator, a CNN accelerator, a CVA6 interconnect and a
  controller. None of the first five fits the default fabric: ASCON alone needs
  more than 320 state flip-flops against 64 here. The sixth is not specified
  well enough to judge. Scale ROWS/COLS, N or W for real workloads.

  Two fragments do fit, and `tb/tb_workloads.sv` runs them through the top:
  * one 5-bit column of the ASCON substitution layer. It uses 8 LUTs in two
    levels over four tiles. All 32 inputs are checked against the S-box table
    of the ASCON specification.
  * a 4-bit slice of the SHA-256 Ch and Maj functions, after the fabric has
    been reloaded from the S-box. It is checked against the FIPS 180-4 formulas.
* **Verification.** Every module has a self-checking testbench, and the
  testbenches are shown to fail on a deliberately broken copy of each module.
  The end-to-end test runs the top at its default size. It covers:
  * frame loading;
  * redaction before enable;
  * both input sources;
  * partial reconfiguration that moves a full adder while a 4-bit counter in
    another tile keeps counting every clock;
  * user reset;
  * a full scan-chain reload with a different placement;
  * a bus error.

  There is no formal check, and no bitstream toolchain (synthesis, place and
  route). Test configurations are assembled by hand with `tb/tb_cfg_pkg.sv`.

## Simulating

All RTL is SystemVerilog-2017. Testbenches print
`TB_RESULT checks=N failures=M` and finish. Example, the end-to-end test with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Wno-UNOPTFLAT \
  --top-module tb_ecologic_soc -y rtl -y tb \
  rtl/ecologic_pkg.sv tb/tb_cfg_pkg.sv tb/tb_ecologic_soc.sv
./obj_dir/Vtb_ecologic_soc
```

Replace the top module and testbench file for the others:

| testbench | what it checks |
|---|---|
| `tb_lut` | LUT |
| `tb_ble` | BLE |
| `tb_clb` | CLB |
| `tb_connection_block` | connection block |
| `tb_switch_block` | switch block |
| `tb_efpga_tile` | tile |
| `tb_efpga_fabric` | fabric with an adder and a counter, relocation |
| `tb_config_mem` | both loading paths, partial rewrite, gating |
| `tb_axil_efpga_ctrl` | register block |
| `tb_ecologic_soc` | end to end |
| `tb_workloads` | ASCON S-box column and SHA-256 Ch/Maj slice, end to end |

`-Wno-UNOPTFLAT` only silences the routing-loop notice discussed above.

Building your own configuration: `tb/tb_cfg_pkg.sv` has helpers that place fields
by the layout above:
* `set_ble`, `set_cbh`, `set_cbv`, `set_sb`, `sb_pass`;
* `place_adder`, `place_counter`;
* `to_frames`, which turns per-tile words into the 96-frame image.

Changing a size in `ecologic_pkg` changes every derived width, the frame count
and the register map's frame limit. The per-module parameters default to the
package values.
