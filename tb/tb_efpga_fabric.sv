// tb_efpga_fabric -- the 4 x 4 fabric with two circuits placed in it:
// a full adder in tile (0,0) and a 4-bit counter in tile (2,2); every other tile
// passes its channels straight on. Expected outputs: fab_out = fab_in except
//   bit 0 (east row 0, track 0)        = a ^ b ^ cin,  a,b,cin = fab_in[0..2]
//   bit ROWS*W (north col 0, track 0)  = carry
//   bits 2W..2W+3 (east row 2)         = counter value
// Then the adder is moved to tile (3,1) (the relocation a worn region would
// need): sum on bit 3W, carry on bit ROWS*W+W. The counter checks the clock
// enable and the synchronous reset. Model written independently here.
module tb_efpga_fabric;
  import ecologic_pkg::*;
  import tb_cfg_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  fab_cfg_t cfg;
  logic [IO_W-1:0] fab_in, fab_out, exp;
  int checks = 0, failures = 0, cycles = 0;
  int cnt;

  efpga_fabric dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(string what);
    checks++;
    if (fab_out !== exp) begin
      failures++;
      $display("FAIL %s: out %h exp %h in %h", what, fab_out, exp, fab_in);
    end
  endtask

  function automatic logic [IO_W-1:0] model(logic [IO_W-1:0] in, int ar, int ac, int count);
    logic [IO_W-1:0] o = in;
    bit a = in[ar*W], b = in[ar*W+1], ci = in[ar*W+2];
    o[ar*W]             = a ^ b ^ ci;
    o[ROWS*W + ac*W]    = (a & b) | (a & ci) | (b & ci);
    o[2*W +: 4]         = 4'(count);
    return o;
  endfunction

  initial begin
    cfg = place_counter(place_adder(fabric_pass(), 0, 0), 2, 2);
    fab_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1; cnt = 0;
    for (int n = 0; n < 100; n++) begin
      fab_in = IO_W'($urandom);
      #1 exp = model(fab_in, 0, 0, cnt); check("adder@(0,0)");
      @(negedge clk);
      if (en) cnt = (cnt + 1) % 16;   // en was high at the last rising edge
      en = (n % 9 != 8);
    end
    // relocate the adder; the counter keeps its state
    @(negedge clk); if (en) cnt = (cnt + 1) % 16; en = 0;
    cfg = place_counter(place_adder(fabric_pass(), 3, 1), 2, 2);
    for (int n = 0; n < 50; n++) begin
      fab_in = IO_W'($urandom);
      #1 exp = model(fab_in, 3, 1, cnt); check("adder@(3,1)");
      @(negedge clk);
      if (en) cnt = (cnt + 1) % 16;
      en = 1;
    end
    rst_n = 0; @(negedge clk); cnt = 0; rst_n = 1;
    #1 exp = model(fab_in, 3, 1, cnt); check("reset");
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
