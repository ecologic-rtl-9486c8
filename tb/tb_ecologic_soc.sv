// tb_ecologic_soc -- end-to-end test of the whole eFPGA subsystem at its default
// size (4 x 4 tiles), driven only through its ports, the way the host CPU and the
// hardened IPs of the SoC would use it:
//   1. load bitstream A (full adder in tile (0,0), 4-bit counter in tile (2,2))
//      frame by frame over AXI; before CTRL.cfg_done the outputs must read 0 and
//      the counter must not move (the redacted function is not visible);
//   2. enable; check the adder through DIN/DOUT and the counter cycle by cycle;
//   3. switch the fabric inputs to the ASIC port (io_sel) and check again;
//   4. partial reconfiguration: rewrite only the frames of tiles (0,0) and (3,1)
//      to move the adder, while a monitor checks that the counter in tile (2,2)
//      keeps counting every clock;
//   5. user reset of the fabric flip-flops;
//   6. repurpose: load bitstream B (adder in (1,2), counter in (3,0)) through the
//      scan chain and check it; the scan load must take at least 32 clocks a word;
//   7. bus error on an undecoded address.
// Expected values come from a model of the two circuits written here. Each
// mechanism is counted and a mechanism that never happened is a failure.
module tb_ecologic_soc;
  import ecologic_pkg::*;
  import tb_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [IO_W-1:0] asic_din, asic_dout;
  logic scan_out;
  int checks = 0, failures = 0, cycles = 0;
  // mechanism counters
  int n_redacted = 0, n_frame_load = 0, n_enable = 0, n_io_switch = 0, n_partial = 0,
      n_counter_kept = 0, n_user_reset = 0, n_scan_load = 0, n_slverr = 0;

  ecologic_soc dut (
    .clk(clk), .rst_n(rst_n),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .asic_din(asic_din), .asic_dout(asic_dout), .scan_out(scan_out));

  axil_master m (
    .clk(clk), .awaddr(awaddr), .awvalid(awvalid), .awready(awready), .wdata(wdata),
    .wstrb(wstrb), .wvalid(wvalid), .wready(wready), .bresp(bresp), .bvalid(bvalid),
    .bready(bready), .araddr(araddr), .arvalid(arvalid), .arready(arready), .rdata(rdata),
    .rresp(rresp), .rvalid(rvalid), .rready(rready));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic expect_eq(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // outputs of the placed adder for input word x, counter bits masked out
  function automatic logic [IO_W-1:0] adder_model(logic [IO_W-1:0] x, int ar, int ac);
    logic [IO_W-1:0] o = x;
    bit a = x[ar*W], b = x[ar*W+1], ci = x[ar*W+2];
    o[ar*W]          = a ^ b ^ ci;
    o[ROWS*W + ac*W] = (a & b) | (a & ci) | (b & ci);
    return o;
  endfunction
  function automatic logic [IO_W-1:0] cmask(int cr);
    logic [IO_W-1:0] mk = '1;
    mk[cr*W +: 4] = '0;
    return mk;
  endfunction

  task automatic load_frames(frames_t f, int first, int last);
    logic [1:0] r;
    m.write(REG_FRAME_ADDR, 32'(first), r);
    for (int i = first; i <= last; i++) begin
      m.write(REG_FRAME_DATA, f[i], r);
      if (r != RESP_OKAY) begin failures++; $display("FAIL frame write %0d", i); end
    end
  endtask

  task automatic check_adder_din(int ar, int ac, int cr, int n);
    logic [1:0] r; logic [31:0] x, d;
    for (int k = 0; k < n; k++) begin
      x = $urandom;
      m.write(REG_DIN, x, r);
      m.read(REG_DOUT, d, r);
      expect_eq(d & cmask(cr), adder_model(x, ar, ac) & cmask(cr), "adder via DIN/DOUT");
    end
  endtask

  task automatic check_adder_port(int ar, int ac, int cr, int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      asic_din = $urandom;
      #1 expect_eq(asic_dout & cmask(cr), adder_model(asic_din, ar, ac) & cmask(cr), "adder via ASIC port");
    end
  endtask

  // the counter must advance by exactly one every clock for n clocks
  task automatic check_counter(int cr, int n, output int ok);
    logic [3:0] prev, cur;
    ok = 1;
    @(negedge clk); prev = asic_dout[cr*W +: 4];
    for (int k = 0; k < n; k++) begin
      @(negedge clk); cur = asic_dout[cr*W +: 4];
      if (cur != prev + 4'd1) ok = 0;
      prev = cur;
    end
    checks++;
    if (!ok) begin failures++; $display("FAIL counter row %0d not counting", cr); end
  endtask

  initial begin
    logic [1:0] r; logic [31:0] d; int ok, t0;
    frames_t fa, fa2, fb;
    fa  = to_frames(place_counter(place_adder(fabric_pass(), 0, 0), 2, 2));
    fa2 = to_frames(place_counter(place_adder(fabric_pass(), 3, 1), 2, 2));
    fb  = to_frames(place_counter(place_adder(fabric_pass(), 1, 2), 3, 0));
    asic_din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. frame load, fabric still disabled
    m.write(REG_DIN, 32'hFFFF_FFFF, r);
    load_frames(fa, 0, NFRAMES - 1);
    n_frame_load++;
    m.read(REG_DOUT, d, r);
    expect_eq(d, 0, "DOUT before cfg_done");
    expect_eq(32'(asic_dout), 0, "asic_dout before cfg_done");
    if (d == 0 && asic_dout == 0) n_redacted++;

    // 2. enable
    m.write(REG_CTRL, 32'h1, r);
    m.read(REG_STATUS, d, r);
    expect_eq(d, {16'(NFRAMES), 16'h0002}, "status enabled");
    n_enable++;
    check_counter(2, 40, ok);
    check_adder_din(0, 0, 2, 20);

    // 3. inputs from the ASIC side
    m.write(REG_CTRL, 32'h3, r);
    n_io_switch++;
    check_adder_port(0, 0, 2, 50);

    // 4. partial reconfiguration: move the adder, counter keeps running
    fork
      check_counter(2, 200, ok);
      begin
        load_frames(fa2, 0 * FRAMES_PER_TILE, 1 * FRAMES_PER_TILE - 1);
        load_frames(fa2, 13 * FRAMES_PER_TILE, 14 * FRAMES_PER_TILE - 1);
      end
    join
    if (ok) n_counter_kept++;
    n_partial++;
    check_adder_port(3, 1, 2, 50);

    // 5. user reset of the fabric flip-flops
    m.write(REG_CTRL, 32'h7, r);
    @(negedge clk);
    expect_eq(32'(asic_dout[2*W +: 4]), 0, "counter held in user reset");
    m.write(REG_CTRL, 32'h3, r);
    if (asic_dout[2*W +: 4] < 4'd8) n_user_reset++;
    check_counter(2, 20, ok);

    // 6. repurpose through the scan chain (fabric disabled meanwhile)
    m.write(REG_CTRL, 32'h2, r);
    t0 = cycles;
    for (int i = 0; i < NFRAMES; i++) m.write(REG_SCAN_DATA, fb[i], r);
    m.write(REG_CTRL, 32'h3, r);   // waits for the last shift to end
    checks++;
    if (cycles - t0 < NFRAMES * 32) begin
      failures++; $display("FAIL scan load too fast: %0d clocks", cycles - t0);
    end
    n_scan_load++;
    check_counter(3, 40, ok);
    check_adder_port(1, 2, 3, 50);
    m.write(REG_CTRL, 32'h1, r);
    check_adder_din(1, 2, 3, 10);

    // 7. bus error
    m.write(8'h7C, 0, r);
    expect_eq(32'(r), RESP_SLVERR, "undecoded address");
    if (r == RESP_SLVERR) n_slverr++;

    $display("mechanisms: redacted=%0d frame_load=%0d enable=%0d io_switch=%0d partial=%0d counter_kept=%0d user_reset=%0d scan_load=%0d slverr=%0d",
             n_redacted, n_frame_load, n_enable, n_io_switch, n_partial, n_counter_kept,
             n_user_reset, n_scan_load, n_slverr);
    if (n_redacted == 0 || n_frame_load == 0 || n_enable == 0 || n_io_switch == 0 ||
        n_partial == 0 || n_counter_kept == 0 || n_user_reset == 0 || n_scan_load == 0 ||
        n_slverr == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
