// switch_block -- routing switch of a tile. Tracks come in from the west and from
// the south, the CLB outputs come in from the tile's CLB, and tracks leave to the
// east and to the north, the directions drawn in the tile picture. Every outgoing
// track has its own SELW-bit select over all 2W+N incoming signals:
//   sources 0..W-1 west_in, W..2W-1 south_in, 2W..2W+N-1 clb_out;
//   output o (0..W-1 east track o, W..2W-1 north track o-W) at cfg[o*SELW +: SELW].
// Codes at or above 2W+N drive 0. Purely combinational, so a signal can pass
// straight on, turn a corner or start at a CLB output. The fully populated
// selector is this design's choice; it makes routing easy at the cost of mux area.
module switch_block #(
  parameter int unsigned W    = 4,
  parameter int unsigned N    = 4,
  parameter int unsigned SELW = $clog2(2 * W + N + 1)
) (
  input  logic [2*W*SELW-1:0] cfg,
  input  logic [W-1:0]        west_in,
  input  logic [W-1:0]        south_in,
  input  logic [N-1:0]        clb_out,
  output logic [W-1:0]        east_out,
  output logic [W-1:0]        north_out
);
  localparam int unsigned NS = 2 * W + N;

  logic [NS-1:0]  src;
  logic [2*W-1:0] outs;

  assign src = {clb_out, south_in, west_in};

  for (genvar o = 0; o < 2 * W; o++) begin : g_out
    cfg_mux #(.NSRC(NS), .SELW(SELW)) u_mux (
      .src (src),
      .sel (cfg[o*SELW +: SELW]),
      .out (outs[o])
    );
  end

  assign east_out  = outs[W-1:0];
  assign north_out = outs[2*W-1:W];
endmodule
