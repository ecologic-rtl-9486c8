// tb_connection_block -- every pin must follow the track its configuration
// field names; random settings and track values, expected value looked up here.
module tb_connection_block;
  localparam int W = 4, NPIN = 4, SELW = 2;
  logic [NPIN*SELW-1:0] cfg;
  logic [W-1:0] tracks;
  logic [NPIN-1:0] pins;
  int checks = 0, failures = 0;

  connection_block #(.W(W), .NPIN(NPIN), .SELW(SELW)) dut (.*);

  initial begin
    for (int n = 0; n < 500; n++) begin
      cfg = (NPIN*SELW)'($urandom);
      tracks = W'($urandom);
      #1;
      for (int p = 0; p < NPIN; p++) begin
        automatic int sel = (cfg >> (p * SELW)) & ((1 << SELW) - 1);
        checks++;
        if (pins[p] !== tracks[sel]) begin
          failures++;
          $display("FAIL pin %0d sel %0d tracks %b pins %b", p, sel, tracks, pins);
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
