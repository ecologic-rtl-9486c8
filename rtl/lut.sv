// lut -- K-input look-up table. The 2**K-bit truth table comes from the
// configuration memory; the K inputs form an index and the addressed bit is the
// output (bit v answers input value v). Purely combinational. Any Boolean
// function of K inputs is one truth table, which is what lets the fabric take a
// new function after fabrication.
module lut #(
  parameter int unsigned K = 4
) (
  input  logic [(1<<K)-1:0] truth,
  input  logic [K-1:0]      in,
  output logic              out
);
  assign out = truth[in];
endmodule
