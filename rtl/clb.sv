// clb -- configuration logic block: N basic logic elements sharing I input pins.
// Every LUT input of every BLE can take any CLB pin or any BLE output of the same
// CLB, so chains of LUTs and small state machines fit inside one CLB.
//
// Interface: clb_in from the two connection blocks, clb_out (one bit per BLE)
// to the switch block. cfg is N slices of BLE_BITS, BLE j at j*BLE_BITS.
// Timing: combinational from clb_in to clb_out for BLEs set to the
// combinational output, one clock for registered ones.
//
// The feedback from BLE outputs to BLE inputs is a structural combinational loop
// when a BLE is set to its combinational output and selects itself; as in any
// FPGA, it is up to the configuration not to close such a loop without a
// flip-flop. The cluster organisation follows the CLB drawing; N and I are this
// design's choice.
module clb
#(
  parameter int unsigned K = ecologic_pkg::K,
  parameter int unsigned N = ecologic_pkg::N,
  parameter int unsigned I = ecologic_pkg::I,
  parameter int unsigned SELW = $clog2(I + N + 1),
  parameter int unsigned BLEB = (1 << K) + K * SELW + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [N*BLEB-1:0] cfg,
  input  logic [I-1:0]      clb_in,
  output logic [N-1:0]      clb_out
);
  logic [I+N-1:0] src;
  assign src = {clb_out, clb_in};

  for (genvar j = 0; j < N; j++) begin : g_ble
    ble #(.K(K), .NSRC(I + N), .SELW(SELW), .BITS(BLEB)) u_ble (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (en),
      .cfg   (cfg[j*BLEB +: BLEB]),
      .src   (src),
      .out   (clb_out[j])
    );
  end
endmodule
