// tb_axil_efpga_ctrl -- the AXI4-Lite register block on its own. A monitor
// records every frame write and every scan bit the block emits; the test checks
// register read-back, byte strobes, frame address auto-increment, the SLVERR
// cases, the 32-bit scan shift (bit order and exactly 32 clocks, with the next
// write held off until it ends), DIN/DOUT, and that FRAME_DATA cannot be read.
module tb_axil_efpga_ctrl;
  import ecologic_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic              frame_we, scan_en, scan_in, cfg_done, io_sel, user_rst;
  logic [FA_W-1:0]   frame_addr;
  logic [31:0]       frame_data, din, dout;
  int checks = 0, failures = 0, cycles = 0;

  axil_efpga_ctrl dut (
    .clk(clk), .rst_n(rst_n),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .frame_we(frame_we), .frame_addr(frame_addr), .frame_data(frame_data),
    .scan_en(scan_en), .scan_in(scan_in), .cfg_done(cfg_done), .io_sel(io_sel),
    .user_rst(user_rst), .din(din), .dout(dout));

  axil_master m (
    .clk(clk), .awaddr(awaddr), .awvalid(awvalid), .awready(awready), .wdata(wdata),
    .wstrb(wstrb), .wvalid(wvalid), .wready(wready), .bresp(bresp), .bvalid(bvalid),
    .bready(bready), .araddr(araddr), .arvalid(arvalid), .arready(arready), .rdata(rdata),
    .rresp(rresp), .rvalid(rvalid), .rready(rready));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // monitor
  int n_frames = 0, last_fa = -1, n_scan = 0;
  logic [31:0] last_fd, scan_word;
  always @(posedge clk) if (rst_n) begin
    if (frame_we) begin n_frames++; last_fa = int'(frame_addr); last_fd = frame_data; end
    if (scan_en) begin scan_word = {scan_in, scan_word[31:1]}; n_scan++; end
  end

  task automatic expect_eq(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    logic [1:0] r; logic [31:0] d; int t0;
    dout = 32'hCAFE_F00D;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    expect_eq(32'(cfg_done), 0, "cfg_done after reset");
    m.write(REG_CTRL, 32'h3, r);        expect_eq(32'(r), RESP_OKAY, "ctrl bresp");
    @(posedge clk); #1;
    expect_eq({29'd0, user_rst, io_sel, cfg_done}, 3, "ctrl bits");
    m.write(REG_CTRL, 32'h4, r, 4'h0);  // no byte enabled: no change
    m.read(REG_CTRL, d, r);             expect_eq(d, 3, "ctrl strobe");
    m.read(REG_STATUS, d, r);           expect_eq(d, {16'(NFRAMES), 16'h0002}, "status");
    // frame path
    m.write(REG_FRAME_ADDR, 5, r);
    m.write(REG_FRAME_DATA, 32'h1234_5678, r);
    @(posedge clk);
    expect_eq(32'(n_frames), 1, "one frame write");
    expect_eq(32'(last_fa), 5, "frame address");
    expect_eq(last_fd, 32'h1234_5678, "frame data");
    m.write(REG_FRAME_DATA, 32'h9ABC_DEF0, r);
    @(posedge clk);
    expect_eq(32'(last_fa), 6, "auto-increment");
    m.read(REG_FRAME_ADDR, d, r);       expect_eq(d, 7, "frame addr readback");
    m.read(REG_FRAME_DATA, d, r);       expect_eq(d, 0, "no bitstream readback");
    m.write(REG_FRAME_ADDR, NFRAMES, r);
    m.write(REG_FRAME_DATA, 32'hFFFF_FFFF, r);
    expect_eq(32'(r), RESP_SLVERR, "frame past end");
    @(posedge clk);
    expect_eq(32'(n_frames), 2, "no write past end");
    // scan path: 32 bits, LSB first, 32 clocks; a second write waits
    m.write(REG_SCAN_DATA, 32'hA5C3_0F81, r);
    t0 = cycles;
    m.write(REG_DIN, 32'h0BAD_BEEF, r);
    expect_eq(32'(n_scan), 32, "scan bit count");
    expect_eq(scan_word, 32'hA5C3_0F81, "scan bit order");
    checks++;
    if (cycles - t0 < 30) begin failures++; $display("FAIL write not held off during scan"); end
    expect_eq(din, 32'h0BAD_BEEF, "din");
    m.read(REG_DOUT, d, r);             expect_eq(d, 32'hCAFE_F00D, "dout");
    m.write(REG_DIN, 32'h0000_0011, r, 4'b0001);
    expect_eq(din, 32'h0BAD_BE11, "din byte strobe");
    // undecoded address
    m.write(8'h40, 1, r);               expect_eq(32'(r), RESP_SLVERR, "bad write addr");
    m.read(8'h40, d, r);                expect_eq(32'(r), RESP_SLVERR, "bad read addr");
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
