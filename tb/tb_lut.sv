// tb_lut -- exhaustive check of the 4-input LUT: for random and named truth
// tables every input value must select bit "value" of the table, computed here
// with a shift instead of an index.
module tb_lut;
  logic [15:0] truth;
  logic [3:0]  in;
  logic        out;
  int checks = 0, failures = 0;

  lut #(.K(4)) dut (.truth(truth), .in(in), .out(out));

  initial begin
    for (int n = 0; n < 40; n++) begin
      truth = (n == 0) ? 16'h6996 : (n == 1) ? 16'h8000 : 16'($urandom);
      for (int v = 0; v < 16; v++) begin
        in = 4'(v);
        #1;
        checks++;
        if (out !== ((truth >> v) & 16'd1) != 0) begin
          failures++;
          $display("FAIL truth=%h in=%0d out=%b", truth, v, out);
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
