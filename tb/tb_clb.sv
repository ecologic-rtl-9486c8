// tb_clb -- a CLB configured as a small circuit, using the feedback paths:
//   BLE0 = pin0 & pin1 (combinational)
//   BLE1 = BLE0 ^ pin2 (combinational, chained through feedback)
//   BLE2 = ~BLE2       (registered: divides the clock by two)
//   BLE3 = BLE3 ^ BLE2 (registered: with BLE2 a 2-bit counter)
// The outputs are compared with the same circuit written behaviourally here.
module tb_clb;
  import ecologic_pkg::*;
  import tb_cfg_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  tile_cfg_t t;
  logic [CLB_BITS-1:0] cfg;
  logic [I-1:0] clb_in;
  logic [N-1:0] clb_out;
  int checks = 0, failures = 0, cycles = 0;
  logic [1:0] cnt;

  clb dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(logic [N-1:0] exp, string what);
    checks++;
    if (clb_out !== exp) begin
      failures++;
      $display("FAIL %s: out=%b exp=%b", what, clb_out, exp);
    end
  endtask

  initial begin
    t = '0;
    t = set_ble(t, 0, tt(6), src_pin(0), src_pin(1), -1, -1, 0);
    t = set_ble(t, 1, tt(3), src_fb(0), src_pin(2), -1, -1, 0);
    t = set_ble(t, 2, tt(2), src_fb(2), -1, -1, -1, 1);
    t = set_ble(t, 3, tt(3), src_fb(3), src_fb(2), -1, -1, 1);
    cfg = t[CLB_BITS-1:0];
    clb_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    cnt = 2'd0;
    for (int n = 0; n < 200; n++) begin
      bit a, b, c;
      clb_in = I'($urandom);
      a = clb_in[0]; b = clb_in[1]; c = clb_in[2];
      #1 check({cnt[1], cnt[0], (a & b) ^ c, a & b}, "count");
      @(negedge clk);
      cnt = (cnt == 2'd3) ? 2'd0 : cnt + 2'd1;
      // BLE2 toggles, BLE3 ^= BLE2: states 00,01,10,11 -> counter in {b3,b2}
    end
    en = 0;
    repeat (3) begin @(negedge clk); #1 check({cnt, clb_out[1:0]}, "frozen"); end
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
