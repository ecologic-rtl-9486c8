// tb_workloads -- fragments of two of the cryptographic IPs an eFPGA like this
// is meant to hold, mapped by hand onto the default 4 x 4 fabric and run through
// the top level (frames over AXI, data on the ASIC-side ports). The full cores do
// not fit 64 LUTs; these are the pieces that do.
//
// 1. ASCON S-box, one 5-bit column of the substitution layer, in two LUT levels
//    spread over four tiles:
//      tile (0,0): a0 = x0^x4, a2 = x2^x1, a4 = x4^x3
//      tile (0,1): y0, y4 from (a0, a2, a4, x1)
//      tile (1,0): routing only (forwards x3, a0, a2 east)
//      tile (1,1): y1, y3, y2 from (x1, x3, a0, a2, a4)
//    inputs : x0..x3 = fab_in[0..3] (west, row 0), x4 = fab_in[16] (south, col 0)
//    outputs: y1, y3, y2 = fab_out[4], [5], [6] (east, row 1);
//             y0, y4     = fab_out[22], [23] (north, column 1)
//    All 32 inputs are checked against the S-box table of the ASCON
//    specification (x0 is the most significant bit).
// 2. SHA-256 Ch and Maj on a 4-bit slice: Ch(e,f,g) bit r in tile (r,0),
//    Maj(a,b,c) bit c in tile (0,c).
//    inputs : e_r, f_r, g_r = fab_in[4r + 0..2]; a_c, b_c, c_c = fab_in[16 + 4c + 0..2]
//    outputs: Ch_r = fab_out[4r]; Maj_c = fab_out[16 + 4c + 3]
//    Checked against Ch = (e & f) ^ (~e & g), Maj = (a & b) ^ (a & c) ^ (b & c).
// The fabric is switched from the first function to the second by reloading the
// frames, as when a chip is repurposed.
module tb_workloads;
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

  // ASCON S-box (specification table, input and output with x0 as MSB)
  localparam logic [4:0] SBOX [32] = '{
    5'h04, 5'h0b, 5'h1f, 5'h14, 5'h1a, 5'h15, 5'h09, 5'h02,
    5'h1b, 5'h05, 5'h08, 5'h12, 5'h1d, 5'h03, 5'h06, 5'h1c,
    5'h1e, 5'h13, 5'h07, 5'h0e, 5'h00, 5'h0d, 5'h11, 5'h18,
    5'h10, 5'h0c, 5'h01, 5'h19, 5'h16, 5'h0a, 5'h0f, 5'h17};

  // Second-level S-box functions of the intermediate signals.
  // signal ids: 0 a0, 1 a2, 2 a4, 3 x1, 4 x3; fn: 0 y0, 1 y1, 2 y2, 3 y3, 4 y4
  function automatic bit sbox_level2(int fn, bit a0, bit a2, bit a4, bit x1, bit x3);
    bit b0 = a0 ^ (~x1 & a2);
    bit b1 = x1 ^ (~a2 & x3);
    bit b2 = a2 ^ (~x3 & a4);
    bit b3 = x3 ^ (~a4 & a0);
    bit b4 = a4 ^ (~a0 & x1);
    case (fn)
      0: return b0 ^ b4;
      1: return b1 ^ b0;
      2: return ~b2;
      3: return b3 ^ b2;
      default: return b4;
    endcase
  endfunction
  // truth table of fn with LUT input k wired to signal id s[k] (-1: unused)
  function automatic int sbox_tt(int fn, int s0, int s1, int s2, int s3);
    int r = 0;
    int s[4] = '{s0, s1, s2, s3};
    for (int v = 0; v < 16; v++) begin
      bit sig[5] = '{0, 0, 0, 0, 0};
      for (int k = 0; k < 4; k++) if (s[k] >= 0) sig[s[k]] = v[k];
      r[v] = sbox_level2(fn, sig[0], sig[1], sig[2], sig[3], sig[4]);
    end
    return r;
  endfunction

  function automatic fab_cfg_t sbox_config();
    fab_cfg_t f = fabric_pass();
    tile_cfg_t t;
    // tile (0,0): first level
    t = sb_pass('0);
    for (int p = 0; p < 4; p++) t = set_cbh(t, p, p);          // x0..x3
    t = set_cbv(t, 4, 0);                                      // x4 (north track 0)
    t = set_ble(t, 0, tt(3), src_pin(0), src_pin(4), -1, -1, 0);  // a0
    t = set_ble(t, 1, tt(3), src_pin(2), src_pin(1), -1, -1, 0);  // a2
    t = set_ble(t, 2, tt(3), src_pin(4), src_pin(3), -1, -1, 0);  // a4
    t = set_sb(t, sb_east(0), sb_clb(0));
    t = set_sb(t, sb_east(1), sb_clb(1));
    t = set_sb(t, sb_east(2), sb_clb(2));
    t = set_sb(t, sb_east(3), sb_west(1));
    t = set_sb(t, sb_north(0), sb_south(0));
    t = set_sb(t, sb_north(1), sb_west(3));
    t = set_sb(t, sb_north(2), sb_clb(0));
    t = set_sb(t, sb_north(3), sb_clb(1));
    f[0] = t;
    // tile (0,1): y0, y4; west tracks a0, a2, a4, x1
    t = sb_pass('0);
    for (int p = 0; p < 4; p++) t = set_cbh(t, p, p);
    t = set_ble(t, 0, sbox_tt(0, 0, 3, 1, 2), src_pin(0), src_pin(3), src_pin(1), src_pin(2), 0);
    t = set_ble(t, 1, sbox_tt(4, 2, 0, 3, -1), src_pin(2), src_pin(0), src_pin(3), -1, 0);
    t = set_sb(t, sb_north(0), sb_west(2));
    t = set_sb(t, sb_north(1), sb_west(3));
    t = set_sb(t, sb_north(2), sb_clb(0));
    t = set_sb(t, sb_north(3), sb_clb(1));
    f[1] = t;
    // tile (1,0): south tracks x4, x3, a0, a2 -> east x3, a0, a2
    t = sb_pass('0);
    t = set_sb(t, sb_east(0), sb_south(1));
    t = set_sb(t, sb_east(1), sb_south(2));
    t = set_sb(t, sb_east(2), sb_south(3));
    t = set_sb(t, sb_east(3), SB_NSRC);
    f[COLS] = t;
    // tile (1,1): west x3, a0, a2; south (via north tracks) a4, x1, y0, y4
    t = sb_pass('0);
    for (int p = 0; p < 3; p++) t = set_cbh(t, p, p);
    for (int p = 4; p < 8; p++) t = set_cbv(t, p, p - 4);
    // signal ids: 0 a0, 1 a2, 2 a4, 3 x1, 4 x3
    t = set_ble(t, 0, sbox_tt(1, 3, 1, 4, 0), src_pin(5), src_pin(2), src_pin(0), src_pin(1), 0);
    t = set_ble(t, 1, sbox_tt(3, 4, 2, 0, 1), src_pin(0), src_pin(4), src_pin(1), src_pin(2), 0);
    t = set_ble(t, 2, sbox_tt(2, 1, 4, 2, -1), src_pin(2), src_pin(0), src_pin(4), -1, 0);
    t = set_sb(t, sb_east(0), sb_clb(0));
    t = set_sb(t, sb_east(1), sb_clb(1));
    t = set_sb(t, sb_east(2), sb_clb(2));
    t = set_sb(t, sb_east(3), SB_NSRC);
    f[COLS + 1] = t;
    return f;
  endfunction

  function automatic int fn_tt(bit maj);
    int r = 0;
    for (int v = 0; v < 16; v++) begin
      bit x = v[0], y = v[1], z = v[2];
      r[v] = maj ? ((x & y) | (x & z) | (y & z)) : ((x & y) | (~x & z));
    end
    return r;
  endfunction

  function automatic fab_cfg_t sha_config();
    fab_cfg_t f = fabric_pass();
    for (int r = 0; r < ROWS; r++) begin
      tile_cfg_t t = f[r * COLS];
      for (int p = 0; p < 3; p++) t = set_cbh(t, p, p);
      t = set_ble(t, 0, fn_tt(0), src_pin(0), src_pin(1), src_pin(2), -1, 0);   // Ch
      t = set_sb(t, sb_east(0), sb_clb(0));
      f[r * COLS] = t;
    end
    for (int c = 0; c < COLS; c++) begin
      tile_cfg_t t = f[c];
      for (int p = 4; p < 7; p++) t = set_cbv(t, p, p - 4);
      t = set_ble(t, 1, fn_tt(1), src_pin(4), src_pin(5), src_pin(6), -1, 0);   // Maj
      t = set_sb(t, sb_north(3), sb_clb(1));
      f[c] = t;
    end
    return f;
  endfunction

  task automatic load(fab_cfg_t f);
    frames_t fr = to_frames(f);
    logic [1:0] r;
    m.write(REG_FRAME_ADDR, 0, r);
    for (int i = 0; i < NFRAMES; i++) m.write(REG_FRAME_DATA, fr[i], r);
  endtask

  task automatic expect_eq(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    logic [1:0] r;
    asic_din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- ASCON S-box column ----
    load(sbox_config());
    m.write(REG_CTRL, 32'h3, r);
    for (int x = 0; x < 32; x++) begin
      logic [4:0] y;
      @(negedge clk);
      asic_din = $urandom;
      asic_din[3:0] = {x[1], x[2], x[3], x[4]};   // fab_in[0] = x0 = MSB
      asic_din[16]  = x[0];                       // x4 = LSB
      #1;
      y = {asic_dout[22], asic_dout[4], asic_dout[6], asic_dout[5], asic_dout[23]};
      expect_eq(32'(y), 32'(SBOX[x]), $sformatf("ASCON S-box(%0d)", x));
    end

    // ---- repurpose: SHA-256 Ch / Maj slice ----
    m.write(REG_CTRL, 32'h2, r);
    load(sha_config());
    m.write(REG_CTRL, 32'h3, r);
    for (int n = 0; n < 200; n++) begin
      logic [3:0] e, f, g, a, b, c, ch, mj, got_ch, got_mj;
      e = 4'($urandom); f = 4'($urandom); g = 4'($urandom);
      a = 4'($urandom); b = 4'($urandom); c = 4'($urandom);
      @(negedge clk);
      asic_din = $urandom;
      for (int i = 0; i < 4; i++) begin
        asic_din[4*i +: 3]      = {g[i], f[i], e[i]};
        asic_din[16 + 4*i +: 3] = {c[i], b[i], a[i]};
      end
      #1;
      ch = (e & f) ^ (~e & g);
      mj = (a & b) ^ (a & c) ^ (b & c);
      for (int i = 0; i < 4; i++) begin
        got_ch[i] = asic_dout[4*i];
        got_mj[i] = asic_dout[16 + 4*i + 3];
      end
      expect_eq({24'd0, got_ch, got_mj}, {24'd0, ch, mj}, "SHA-256 Ch/Maj");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
