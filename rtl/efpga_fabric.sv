// efpga_fabric -- the embedded FPGA: a ROWS x COLS array of efpga_tile joined by
// their routing channels (4 x 4 by default, the size of the fabric drawing).
// Tile (r, c) takes its horizontal channel from tile (r, c-1) and its vertical
// channel from tile (r-1, c). The channel ends at the west and south edges are the
// fabric inputs, those at the east and north edges its outputs:
//   fab_in [r*W + t]          -> west end of row r, track t
//   fab_in [ROWS*W + c*W + t] -> south end of column c, track t
//   fab_out[r*W + t]          <- east end of row r, track t
//   fab_out[ROWS*W + c*W + t] <- north end of column c, track t
// The ring of border tiles in the drawing is read as these I/O positions; they
// hold no logic here. cfg is the per-tile configuration, tile r*COLS+c.
// Timing: combinational from fab_in to fab_out through routing and
// combinational BLEs; registered BLEs add one clock each. en gates every
// flip-flop, rst_n clears them synchronously.
module efpga_fabric #(
  parameter int unsigned K    = ecologic_pkg::K,
  parameter int unsigned N    = ecologic_pkg::N,
  parameter int unsigned I    = ecologic_pkg::I,
  parameter int unsigned W    = ecologic_pkg::W,
  parameter int unsigned ROWS = ecologic_pkg::ROWS,
  parameter int unsigned COLS = ecologic_pkg::COLS,
  parameter int unsigned TILE_BITS = N * ((1 << K) + K * $clog2(I + N + 1) + 1)
                                   + I * ((W > 1) ? $clog2(W) : 1)
                                   + 2 * W * $clog2(2 * W + N + 1),
  parameter int unsigned IO_W = ROWS * W + COLS * W
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic [ROWS*COLS-1:0][TILE_BITS-1:0] cfg,
  input  logic [IO_W-1:0]                     fab_in,
  output logic [IO_W-1:0]                     fab_out
);
  // h[r][c] is the horizontal channel entering tile (r, c) from the west;
  // h[r][COLS] leaves the east edge. v[r][c] enters tile (r, c) from the south.
  logic [W-1:0] h [ROWS][COLS+1];
  logic [W-1:0] v [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign h[r][0]                 = fab_in[r*W +: W];
    assign fab_out[r*W +: W]       = h[r][COLS];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      efpga_tile #(.K(K), .N(N), .I(I), .W(W), .TILE_BITS(TILE_BITS)) u_tile (
        .clk   (clk),
        .rst_n (rst_n),
        .en    (en),
        .cfg   (cfg[r*COLS + c]),
        .h_in  (h[r][c]),
        .v_in  (v[r][c]),
        .h_out (h[r][c+1]),
        .v_out (v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_edge
    assign v[0][c]                     = fab_in[ROWS*W + c*W +: W];
    assign fab_out[ROWS*W + c*W +: W]  = v[ROWS][c];
  end
endmodule
