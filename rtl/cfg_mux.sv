// cfg_mux -- configuration-controlled multiplexer, the routing primitive of the
// fabric. Output = src[sel]; a select code at or above NSRC drives 0 so that an
// all-zero or unused setting never forwards an unintended signal beyond the
// listed sources. Purely combinational.
module cfg_mux #(
  parameter int unsigned NSRC = 4,
  parameter int unsigned SELW = $clog2(NSRC + 1)
) (
  input  logic [NSRC-1:0] src,
  input  logic [SELW-1:0] sel,
  output logic            out
);
  always_comb begin
    out = 1'b0;
    for (int unsigned s = 0; s < NSRC; s++)
      if (sel == SELW'(s)) out = src[s];
  end
endmodule
