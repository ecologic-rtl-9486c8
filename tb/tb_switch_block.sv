// tb_switch_block -- each of the 2W outgoing tracks must carry the source its
// select names: west tracks, then south tracks, then CLB outputs, and 0 for codes
// past the last source. Random settings, model written out here.
module tb_switch_block;
  localparam int W = 4, N = 4, SELW = 4;
  logic [2*W*SELW-1:0] cfg;
  logic [W-1:0] west_in, south_in, east_out, north_out;
  logic [N-1:0] clb_out;
  int checks = 0, failures = 0;

  switch_block #(.W(W), .N(N), .SELW(SELW)) dut (.*);

  function automatic bit pick(int sel);
    if (sel < W)         return west_in[sel];
    if (sel < 2 * W)     return south_in[sel - W];
    if (sel < 2 * W + N) return clb_out[sel - 2 * W];
    return 1'b0;
  endfunction

  initial begin
    for (int n = 0; n < 500; n++) begin
      cfg = {$urandom, $urandom};
      west_in = W'($urandom); south_in = W'($urandom); clb_out = N'($urandom);
      #1;
      for (int o = 0; o < 2 * W; o++) begin
        automatic int sel = int'(cfg[o*SELW +: SELW]);
        automatic bit got = (o < W) ? east_out[o] : north_out[o - W];
        checks++;
        if (got !== pick(sel)) begin
          failures++;
          $display("FAIL out %0d sel %0d got %b", o, sel, got);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
