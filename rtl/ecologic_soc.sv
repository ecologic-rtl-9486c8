// ecologic_soc -- the reconfigurable part of an ECOLogic SoC: an embedded FPGA
// that takes the place of a security-sensitive or fast-changing IP inside an
// otherwise hardened ASIC. The processor, peripherals and analog blocks of that
// ASIC stay outside this module; they reach it through
//   * s_axil_*  : AXI4-Lite slave, memory-mapped control from the host CPU
//                 (register map in axil_efpga_ctrl);
//   * asic_din  : data from the hardened IPs into the fabric;
//   * asic_dout : fabric results back to the hardened IPs.
// Inside: axil_efpga_ctrl decodes the bus, config_mem holds the bitstream
// (frame-based or scan-chain loading), efpga_fabric is the ROWS x COLS tile array.
//
// The fabric inputs come from asic_din when CTRL.io_sel = 1, otherwise from the
// DIN register. Until software sets CTRL.cfg_done the fabric is inert: the
// stored bitstream is not applied (the fabric sees an all-zero configuration),
// its flip-flops are frozen and asic_dout and DOUT read 0, so the chip reveals
// nothing of the redacted function before a trusted party loads the bitstream.
// A full reload is done with cfg_done cleared; rewriting single tiles can be done
// with it set.
// Rewriting some tiles' frames while cfg_done stays 1 updates or moves a
// function without stopping the rest of the fabric. One clock runs everything;
// rst_n is a synchronous active-low reset.
module ecologic_soc
  import ecologic_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      s_axil_awaddr,
  input  logic            s_axil_awvalid,
  output logic            s_axil_awready,
  input  logic [31:0]     s_axil_wdata,
  input  logic [3:0]      s_axil_wstrb,
  input  logic            s_axil_wvalid,
  output logic            s_axil_wready,
  output logic [1:0]      s_axil_bresp,
  output logic            s_axil_bvalid,
  input  logic            s_axil_bready,
  input  logic [7:0]      s_axil_araddr,
  input  logic            s_axil_arvalid,
  output logic            s_axil_arready,
  output logic [31:0]     s_axil_rdata,
  output logic [1:0]      s_axil_rresp,
  output logic            s_axil_rvalid,
  input  logic            s_axil_rready,
  input  logic [IO_W-1:0] asic_din,
  output logic [IO_W-1:0] asic_dout,
  output logic            scan_out
);
  logic                             frame_we, scan_en, scan_in;
  logic [FA_W-1:0]                  frame_addr;
  logic [FRAME_W-1:0]               frame_data;
  logic                             cfg_done, io_sel, user_rst;
  logic [IO_W-1:0]                  din_reg, fab_in, fab_out, dout;
  logic [NTILES-1:0][TILE_BITS-1:0] tile_cfg;

  axil_efpga_ctrl #(.NFRAMES(NFRAMES), .FA_W(FA_W), .IO_W(IO_W)) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .s_axil_awaddr  (s_axil_awaddr),
    .s_axil_awvalid (s_axil_awvalid),
    .s_axil_awready (s_axil_awready),
    .s_axil_wdata   (s_axil_wdata),
    .s_axil_wstrb   (s_axil_wstrb),
    .s_axil_wvalid  (s_axil_wvalid),
    .s_axil_wready  (s_axil_wready),
    .s_axil_bresp   (s_axil_bresp),
    .s_axil_bvalid  (s_axil_bvalid),
    .s_axil_bready  (s_axil_bready),
    .s_axil_araddr  (s_axil_araddr),
    .s_axil_arvalid (s_axil_arvalid),
    .s_axil_arready (s_axil_arready),
    .s_axil_rdata   (s_axil_rdata),
    .s_axil_rresp   (s_axil_rresp),
    .s_axil_rvalid  (s_axil_rvalid),
    .s_axil_rready  (s_axil_rready),
    .frame_we       (frame_we),
    .frame_addr     (frame_addr),
    .frame_data     (frame_data),
    .scan_en        (scan_en),
    .scan_in        (scan_in),
    .cfg_done       (cfg_done),
    .io_sel         (io_sel),
    .user_rst       (user_rst),
    .din            (din_reg),
    .dout           (dout)
  );

  config_mem #(.NTILES(NTILES), .TILE_BITS(TILE_BITS), .FRAME_W(FRAME_W),
               .FRAMES_PER_TILE(FRAMES_PER_TILE), .NFRAMES(NFRAMES), .FA_W(FA_W)) u_cfg (
    .clk        (clk),
    .rst_n      (rst_n),
    .apply      (cfg_done),
    .frame_we   (frame_we),
    .frame_addr (frame_addr),
    .frame_data (frame_data),
    .scan_en    (scan_en),
    .scan_in    (scan_in),
    .scan_out   (scan_out),
    .tile_cfg   (tile_cfg)
  );

  assign fab_in = io_sel ? asic_din : din_reg;

  efpga_fabric #(.K(K), .N(N), .I(I), .W(W), .ROWS(ROWS), .COLS(COLS),
                 .TILE_BITS(TILE_BITS), .IO_W(IO_W)) u_fabric (
    .clk     (clk),
    .rst_n   (rst_n && !user_rst),
    .en      (cfg_done),
    .cfg     (tile_cfg),
    .fab_in  (fab_in),
    .fab_out (fab_out)
  );

  assign dout      = cfg_done ? fab_out : '0;
  assign asic_dout = dout;
endmodule
