// tb_ble -- basic logic element: random source selections and truth tables are
// checked against a model evaluated here (selected sources -> table lookup),
// first on the combinational output, then on the registered output, with the
// clock enable, the synchronous reset and the "unused" select code (NSRC -> 0).
module tb_ble;
  localparam int K = 4, NSRC = 12, SELW = 4, BITS = 16 + K * SELW + 1;
  logic clk = 0, rst_n = 0, en = 0;
  logic [BITS-1:0] cfg;
  logic [NSRC-1:0] src;
  logic out;
  int checks = 0, failures = 0;
  int cycles = 0;

  ble #(.K(K), .NSRC(NSRC), .SELW(SELW), .BITS(BITS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic bit model(logic [BITS-1:0] c, logic [NSRC-1:0] s);
    int idx = 0;
    for (int k = 0; k < K; k++) begin
      int sel = int'(c[16 + k*SELW +: SELW]);
      bit b = (sel < NSRC) ? s[sel] : 1'b0;
      idx += int'(b) << k;
    end
    return c[idx];
  endfunction

  task automatic check(bit exp, string what);
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: out=%b exp=%b cfg=%h src=%h", what, out, exp, cfg, src);
    end
  endtask

  initial begin
    bit prev;
    cfg = '0; src = '0;
    repeat (2) @(posedge clk);
    // combinational
    for (int n = 0; n < 300; n++) begin
      cfg = BITS'({$urandom, $urandom});
      cfg[BITS-1] = 1'b0;
      if (n % 7 == 0) cfg[16 +: SELW] = 4'd13;   // unused code
      src = NSRC'($urandom);
      #1 check(model(cfg, src), "comb");
    end
    // registered, reset held
    @(negedge clk);
    cfg = BITS'({$urandom, $urandom}); cfg[BITS-1] = 1'b1;
    en = 1;
    @(negedge clk);
    check(1'b0, "reset");
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      bit last_q;
      src = NSRC'($urandom);
      prev = model(cfg, src);
      last_q = out;
      en = (n % 5 != 4);
      @(negedge clk);
      if (en) check(prev, "registered");
      else    check(last_q, "hold");
    end
    // synchronous reset clears the flip-flop
    src = '1; cfg[15:0] = 16'hFFFF; @(negedge clk); check(1'b1, "set");
    rst_n = 0; @(negedge clk); check(1'b0, "sync reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
