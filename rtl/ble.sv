// ble -- basic logic element, one row of the CLB drawing: an input selector per
// LUT input, a K-input LUT, a D flip-flop behind it, and an output mux choosing
// the combinational LUT value or the registered one.
//
// Sources (src) are the CLB input pins followed by the BLE outputs of the same
// CLB (the feedback line of the drawing); each LUT input picks one of them with
// its own SRC_SELW-bit code, codes past NSRC giving 0. Configuration layout as in
// ecologic_pkg: truth table, K source selects, output select (1 = registered).
//
// Timing: LUT path is combinational; the flip-flop loads on the rising clock edge
// when en is high and clears synchronously while rst_n is low. en is the fabric
// enable, held low until the fabric has been configured, so an unconfigured
// fabric holds still. The element structure follows the drawing; the widths,
// the select encoding and the reset are this design's choices.
module ble
#(
  parameter int unsigned K    = ecologic_pkg::K,
  parameter int unsigned NSRC = ecologic_pkg::NSRC,
  parameter int unsigned SELW = $clog2(NSRC + 1),
  parameter int unsigned BITS = (1 << K) + K * SELW + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [BITS-1:0] cfg,
  input  logic [NSRC-1:0] src,
  output logic            out
);
  localparam int unsigned LB = 1 << K;

  logic [K-1:0] lut_in;
  logic         lut_out;
  logic         ff_q;

  for (genvar k = 0; k < K; k++) begin : g_in
    cfg_mux #(.NSRC(NSRC), .SELW(SELW)) u_sel (
      .src (src),
      .sel (cfg[LB + k*SELW +: SELW]),
      .out (lut_in[k])
    );
  end

  lut #(.K(K)) u_lut (
    .truth (cfg[LB-1:0]),
    .in    (lut_in),
    .out   (lut_out)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)  ff_q <= 1'b0;
    else if (en) ff_q <= lut_out;
  end

  assign out = cfg[BITS-1] ? ff_q : lut_out;
endmodule
