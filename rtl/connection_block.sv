// connection_block -- connects routing tracks to CLB input pins. Each of the
// NPIN pins has a SELW-bit configuration field naming the track it listens to
// (pin p at cfg[p*SELW +: SELW]); a code at or above W drives 0 (only possible
// when W is not a power of two). Purely combinational.
//
// A tile has two of them, placed as in the tile drawing: one on the horizontal
// channel arriving from the west neighbour, one on the vertical channel leaving
// the tile's switch block to the north. Pin count and full track choice per pin
// are this design's choice; the drawing does not fix the population.
module connection_block #(
  parameter int unsigned W    = 4,
  parameter int unsigned NPIN = 4,
  parameter int unsigned SELW = (W > 1) ? $clog2(W) : 1
) (
  input  logic [NPIN*SELW-1:0] cfg,
  input  logic [W-1:0]         tracks,
  output logic [NPIN-1:0]      pins
);
  for (genvar p = 0; p < NPIN; p++) begin : g_pin
    cfg_mux #(.NSRC(W), .SELW(SELW)) u_mux (
      .src (tracks),
      .sel (cfg[p*SELW +: SELW]),
      .out (pins[p])
    );
  end
endmodule
