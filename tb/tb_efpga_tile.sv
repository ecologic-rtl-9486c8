// tb_efpga_tile -- one tile, configured so that every path of the tile drawing is
// used at least once:
//   horizontal CB: pins 0,1,2 <- west tracks 1,2,3; vertical CB: pin 4 <- north track 0
//   BLE0 = XOR3(pins 0,1,2) combinational; BLE1 = pin0 & pin4, registered
//   SB: east0 <- BLE0, east1 <- west0, east2 <- south3, east3 off,
//       north0 <- south1, north1 <- BLE1, north2 <- west2, north3 off
// Expected channel outputs are computed here from the inputs.
module tb_efpga_tile;
  import ecologic_pkg::*;
  import tb_cfg_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  tile_cfg_t cfg;
  logic [W-1:0] h_in, v_in, h_out, v_out;
  int checks = 0, failures = 0, cycles = 0;
  bit reg1;

  efpga_tile dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b exp %b (h_in %b v_in %b)", what, got, exp, h_in, v_in);
    end
  endtask

  initial begin
    cfg = '0;
    cfg = sb_all_off(cfg);
    cfg = set_cbh(cfg, 0, 1); cfg = set_cbh(cfg, 1, 2); cfg = set_cbh(cfg, 2, 3);
    cfg = set_cbv(cfg, 4, 0);
    cfg = set_ble(cfg, 0, tt(0), src_pin(0), src_pin(1), src_pin(2), -1, 0);
    cfg = set_ble(cfg, 1, tt(6), src_pin(0), src_pin(4), -1, -1, 1);
    cfg = set_sb(cfg, sb_east(0), sb_clb(0));
    cfg = set_sb(cfg, sb_east(1), sb_west(0));
    cfg = set_sb(cfg, sb_east(2), sb_south(3));
    cfg = set_sb(cfg, sb_north(0), sb_south(1));
    cfg = set_sb(cfg, sb_north(1), sb_clb(1));
    cfg = set_sb(cfg, sb_north(2), sb_west(2));
    h_in = '0; v_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    reg1 = 0;
    for (int n = 0; n < 300; n++) begin
      h_in = W'($urandom); v_in = W'($urandom);
      #1;
      check(h_out, {1'b0, v_in[3], h_in[0], h_in[1] ^ h_in[2] ^ h_in[3]}, "east");
      check(v_out, {1'b0, h_in[2], reg1, v_in[1]}, "north");
      @(negedge clk);
      reg1 = h_in[1] & v_in[1];
    end
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
