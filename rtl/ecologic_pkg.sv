// ecologic_pkg -- shared sizes, configuration layout and register map of the
// eFPGA subsystem.
//
// The fabric is a grid of ROWS x COLS tiles. Each tile holds one CLB of N basic
// logic elements (BLEs, a K-input LUT plus a D flip-flop each) with I input pins,
// two connection blocks and one switch block. Routing channels are W tracks wide
// and unidirectional: horizontal tracks run west to east, vertical tracks south
// to north, following the arrowheads of the tile drawing this design is based on.
// The 4 x 4 grid is the size the architecture is illustrated with; K, N, I, W and
// the 32-bit frame are choices of this implementation.
//
// Configuration layout of one tile (bit 0 first):
//   CLB : N BLEs of BLE_BITS each; BLE j at j*BLE_BITS:
//         [0 +: 2**K] LUT truth table (bit v is the output for input value v)
//         [2**K + k*SRC_SELW +: SRC_SELW] source select of LUT input k
//         [2**K + K*SRC_SELW]            output select, 1 = registered
//   CB_H: I/2 pin selects of CB_SELW bits (horizontal channel -> CLB pins 0..I/2-1)
//   CB_V: I/2 pin selects (vertical channel -> CLB pins I/2..I-1)
//   SB  : 2W output selects of SB_SELW bits; outputs 0..W-1 east tracks,
//         W..2W-1 north tracks.
// BLE sources: 0..I-1 CLB pins, I..I+N-1 BLE outputs (feedback).
// SB sources : 0..W-1 west tracks, W..2W-1 south tracks, 2W..2W+N-1 CLB outputs.
// A select code at or above the number of sources drives 0.
//
// Tiles are numbered row-major from the south-west corner (tile = row*COLS+col).
// Each tile owns FRAMES_PER_TILE consecutive frames of FRAME_W bits in the
// configuration memory; its TILE_BITS sit at the bottom of that span.
package ecologic_pkg;

  parameter int unsigned K       = 4;   // LUT inputs
  parameter int unsigned N       = 4;   // BLEs per CLB
  parameter int unsigned I       = 8;   // CLB input pins
  parameter int unsigned W       = 4;   // tracks per channel and direction
  parameter int unsigned ROWS    = 4;
  parameter int unsigned COLS    = 4;
  parameter int unsigned FRAME_W = 32;  // configuration frame width

  parameter int unsigned NTILES   = ROWS * COLS;
  parameter int unsigned LUT_BITS = 1 << K;
  parameter int unsigned NSRC     = I + N;
  parameter int unsigned SRC_SELW = $clog2(NSRC + 1);
  parameter int unsigned BLE_BITS = LUT_BITS + K * SRC_SELW + 1;
  parameter int unsigned CLB_BITS = N * BLE_BITS;
  parameter int unsigned CB_PINS  = I / 2;
  parameter int unsigned CB_SELW  = (W > 1) ? $clog2(W) : 1;
  parameter int unsigned CB_BITS  = CB_PINS * CB_SELW;
  parameter int unsigned SB_NSRC  = 2 * W + N;
  parameter int unsigned SB_SELW  = $clog2(SB_NSRC + 1);
  parameter int unsigned SB_BITS  = 2 * W * SB_SELW;
  parameter int unsigned TILE_BITS = CLB_BITS + 2 * CB_BITS + SB_BITS;

  parameter int unsigned OFS_CBH = CLB_BITS;
  parameter int unsigned OFS_CBV = CLB_BITS + CB_BITS;
  parameter int unsigned OFS_SB  = CLB_BITS + 2 * CB_BITS;

  parameter int unsigned FRAMES_PER_TILE = (TILE_BITS + FRAME_W - 1) / FRAME_W;
  parameter int unsigned NFRAMES   = NTILES * FRAMES_PER_TILE;
  parameter int unsigned FA_W      = $clog2(NFRAMES);
  parameter int unsigned CFG_BITS  = NFRAMES * FRAME_W;   // length of the scan chain

  // Fabric edge: inputs are the west ends of the horizontal channels
  // (bit r*W+t) followed by the south ends of the vertical channels
  // (bit ROWS*W + c*W + t); outputs are the east and north ends in the same order.
  parameter int unsigned IO_W = ROWS * W + COLS * W;

  // AXI4-Lite register map (byte addresses)
  parameter logic [7:0] REG_CTRL       = 8'h00; // [0] cfg_done [1] io_sel [2] user reset
  parameter logic [7:0] REG_STATUS     = 8'h04; // [0] scan busy [1] cfg_done [31:16] NFRAMES
  parameter logic [7:0] REG_FRAME_ADDR = 8'h08; // next frame to write (auto-increments)
  parameter logic [7:0] REG_FRAME_DATA = 8'h0C; // write: store a frame
  parameter logic [7:0] REG_SCAN_DATA  = 8'h10; // write: shift 32 bits, LSB first
  parameter logic [7:0] REG_DIN        = 8'h14; // fabric input word (io_sel = 0)
  parameter logic [7:0] REG_DOUT       = 8'h18; // fabric output word

  typedef logic [TILE_BITS-1:0] tile_cfg_t;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_SLVERR = 2'b10
  } axi_resp_e;

endpackage
