// efpga_tile -- one tile of the fabric: a CLB, two connection blocks and a switch
// block, wired as in the enlarged tile of the fabric drawing.
//
//   h_in  (W tracks from the west neighbour) -> horizontal CB -> CLB pins 0..I/2-1
//   h_in  -> switch block west inputs;  v_in (from the south) -> SB south inputs
//   CLB outputs -> switch block
//   SB east outputs  -> h_out (to the east neighbour)
//   SB north outputs -> v_out (to the north neighbour) and the vertical CB,
//                       which drives CLB pins I/2..I-1
//
// cfg layout (see ecologic_pkg): CLB, horizontal CB, vertical CB, switch block.
// Timing: everything but the BLE flip-flops is combinational. A path from a CLB
// output through the switch block, a north track and the vertical CB back into
// the same CLB exists in the wiring; it only becomes a loop if the configuration
// closes it through combinational BLEs, which a correct bitstream avoids, as in
// any FPGA routing fabric.
module efpga_tile #(
  parameter int unsigned K = ecologic_pkg::K,
  parameter int unsigned N = ecologic_pkg::N,
  parameter int unsigned I = ecologic_pkg::I,
  parameter int unsigned W = ecologic_pkg::W,
  // derived sizes, kept as parameters so that ports can use them
  parameter int unsigned SRC_SELW = $clog2(I + N + 1),
  parameter int unsigned BLE_BITS = (1 << K) + K * SRC_SELW + 1,
  parameter int unsigned CB_SELW  = (W > 1) ? $clog2(W) : 1,
  parameter int unsigned SB_SELW  = $clog2(2 * W + N + 1),
  parameter int unsigned TILE_BITS = N * BLE_BITS + I * CB_SELW + 2 * W * SB_SELW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [TILE_BITS-1:0] cfg,
  input  logic [W-1:0]         h_in,
  input  logic [W-1:0]         v_in,
  output logic [W-1:0]         h_out,
  output logic [W-1:0]         v_out
);
  localparam int unsigned CLB_BITS = N * BLE_BITS;
  localparam int unsigned CB_BITS  = (I / 2) * CB_SELW;
  localparam int unsigned OFS_CBH  = CLB_BITS;
  localparam int unsigned OFS_CBV  = CLB_BITS + CB_BITS;
  localparam int unsigned OFS_SB   = CLB_BITS + 2 * CB_BITS;

  logic [I-1:0] clb_in;
  logic [N-1:0] clb_out;

  connection_block #(.W(W), .NPIN(I / 2), .SELW(CB_SELW)) u_cb_h (
    .cfg    (cfg[OFS_CBH +: CB_BITS]),
    .tracks (h_in),
    .pins   (clb_in[I/2-1:0])
  );

  connection_block #(.W(W), .NPIN(I - I / 2), .SELW(CB_SELW)) u_cb_v (
    .cfg    (cfg[OFS_CBV +: (I - I / 2) * CB_SELW]),
    .tracks (v_out),
    .pins   (clb_in[I-1:I/2])
  );

  clb #(.K(K), .N(N), .I(I), .SELW(SRC_SELW), .BLEB(BLE_BITS)) u_clb (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (en),
    .cfg     (cfg[CLB_BITS-1:0]),
    .clb_in  (clb_in),
    .clb_out (clb_out)
  );

  switch_block #(.W(W), .N(N), .SELW(SB_SELW)) u_sb (
    .cfg       (cfg[OFS_SB +: 2 * W * SB_SELW]),
    .west_in   (h_in),
    .south_in  (v_in),
    .clb_out   (clb_out),
    .east_out  (h_out),
    .north_out (v_out)
  );
endmodule
