// config_mem -- configuration memory of the fabric, loadable two ways:
//   * frame-based: frame_we writes FRAME_W bits at frame_addr in one clock;
//   * scan chain : while scan_en is high, every clock shifts scan_in into the top
//     of the chain (bit CFG_BITS-1) and everything moves one place down; scan_out
//     is bit 0. After CFG_BITS shifts the first bit sent sits at bit 0.
// Bit b of the chain is bit b%FRAME_W of frame b/FRAME_W, so both paths fill the
// same storage and a bitstream can be sent either way. A frame write wins over a
// shift in the same clock.
//
// Frames are tile-aligned: tile t owns frames t*FRAMES_PER_TILE upward and its
// TILE_BITS configuration bits are the low bits of that span (the rest is padding).
// Rewriting a tile's frames therefore changes that tile alone while the others
// keep running: partial reconfiguration, the means by which a function is updated
// or moved to another region of the fabric. Reset clears every bit.
//
// The stored bits reach the fabric only while apply is high and rst_n is released;
// otherwise tile_cfg is all zero (LUTs 0, routing to its default). This keeps the
// random power-up contents, and the half-shifted patterns that exist during a scan
// load, from ever driving the routing, where they could close oscillating
// combinational loops. apply is the fabric enable (CTRL.cfg_done), so the
// stored function is also invisible until software releases it. Both loading modes come from the
// architecture; frame size, order and alignment are this design's choices.
module config_mem #(
  parameter int unsigned NTILES          = ecologic_pkg::NTILES,
  parameter int unsigned TILE_BITS       = ecologic_pkg::TILE_BITS,
  parameter int unsigned FRAME_W         = ecologic_pkg::FRAME_W,
  parameter int unsigned FRAMES_PER_TILE = (TILE_BITS + FRAME_W - 1) / FRAME_W,
  parameter int unsigned NFRAMES         = NTILES * FRAMES_PER_TILE,
  parameter int unsigned FA_W            = (NFRAMES > 1) ? $clog2(NFRAMES) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             apply,
  input  logic                             frame_we,
  input  logic [FA_W-1:0]                  frame_addr,
  input  logic [FRAME_W-1:0]               frame_data,
  input  logic                             scan_en,
  input  logic                             scan_in,
  output logic                             scan_out,
  output logic [NTILES-1:0][TILE_BITS-1:0] tile_cfg
);
  localparam int unsigned SPAN = FRAMES_PER_TILE * FRAME_W;

  logic [NFRAMES-1:0][FRAME_W-1:0] mem;
  logic [NFRAMES*FRAME_W-1:0]      flat;

  assign flat = mem;

  always_ff @(posedge clk) begin
    if (!rst_n)
      mem <= '0;
    else if (frame_we && (32'(frame_addr) < NFRAMES))
      mem[frame_addr] <= frame_data;
    else if (scan_en)
      mem <= {scan_in, flat[NFRAMES*FRAME_W-1:1]};
  end

  assign scan_out = flat[0];

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    assign tile_cfg[t] = (apply && rst_n) ? flat[t*SPAN +: TILE_BITS] : '0;
  end
endmodule
