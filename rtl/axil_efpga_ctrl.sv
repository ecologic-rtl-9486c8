// axil_efpga_ctrl -- AXI4-Lite slave through which the hardened side of the SoC
// (normally the host CPU) loads and controls the eFPGA. Registers, 32 bits each:
//   0x00 CTRL       [0] cfg_done: fabric enabled   [1] io_sel: fabric inputs from
//                   the ASIC port (1) or from DIN (0)   [2] user reset of the fabric
//                   flip-flops (1 = held in reset)
//   0x04 STATUS     [0] scan shift in progress  [1] cfg_done  [31:16] frame count (RO)
//   0x08 FRAME_ADDR frame the next FRAME_DATA write goes to; +1 after each
//   0x0C FRAME_DATA write: store the word as one frame (frame-based loading)
//   0x10 SCAN_DATA  write: shift the word into the scan chain, LSB first, one bit
//                   per clock (scan-chain loading); 32 clocks busy
//   0x14 DIN        fabric input word used when io_sel = 0
//   0x18 DOUT       fabric output word (RO; reads 0 while cfg_done is 0)
// Reads of FRAME_DATA and SCAN_DATA return 0: the bitstream cannot be read back
// over the bus. Unknown addresses, and a frame address past the last frame,
// answer SLVERR.
//
// Handshake: a write is taken in the clock where AWVALID and WVALID are both high,
// no response is pending and no scan shift is running (AWREADY = WREADY then);
// BVALID follows one clock later and holds until BREADY. A read is taken when
// ARVALID is high and no read data is pending; RVALID follows one clock later with
// registered data and holds until RREADY. WSTRB masks bytes of CTRL, FRAME_ADDR
// and DIN; FRAME_DATA and SCAN_DATA always take the whole word.
//
// cfg_done is how the fabric "stays inactive until configured": after reset it
// is 0, the fabric flip-flops are frozen and its outputs are forced to 0; software
// sets it once the bitstream is in. AXI as the link to the ASIC domain follows
// the architecture; AXI4-Lite, the register map and the gating are this design's
// choices.
module axil_efpga_ctrl #(
  parameter int unsigned NFRAMES = ecologic_pkg::NFRAMES,
  parameter int unsigned FA_W    = (NFRAMES > 1) ? $clog2(NFRAMES) : 1,
  parameter int unsigned IO_W    = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [7:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // configuration memory
  output logic              frame_we,
  output logic [FA_W-1:0]   frame_addr,
  output logic [31:0]       frame_data,
  output logic              scan_en,
  output logic              scan_in,
  // fabric control and data
  output logic              cfg_done,
  output logic              io_sel,
  output logic              user_rst,
  output logic [IO_W-1:0]   din,
  input  logic [IO_W-1:0]   dout
);
  import ecologic_pkg::*;

  logic [31:0] ctrl_q, fa_q, din_q;
  logic [31:0] scan_sh;
  logic [5:0]  scan_cnt;
  logic        scan_busy;
  logic        wr_go, rd_go;
  logic [31:0] wmask;

  assign scan_busy = (scan_cnt != 6'd0);
  assign wr_go     = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid && !scan_busy;
  assign rd_go     = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign s_axil_arready = rd_go;

  assign wmask = {{8{s_axil_wstrb[3]}}, {8{s_axil_wstrb[2]}},
                  {8{s_axil_wstrb[1]}}, {8{s_axil_wstrb[0]}}};

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [31:0] m);
    return (old & ~m) | (nw & m);
  endfunction

  // ---------------- write channel ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl_q        <= '0;
      fa_q          <= '0;
      din_q         <= '0;
      scan_sh       <= '0;
      scan_cnt      <= '0;
      frame_we      <= 1'b0;
      frame_data    <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
    end else begin
      frame_we <= 1'b0;
      if (scan_busy) begin
        scan_sh  <= {1'b0, scan_sh[31:1]};
        scan_cnt <= scan_cnt - 6'd1;
      end
      if (s_axil_bvalid && s_axil_bready)
        s_axil_bvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= RESP_OKAY;
        unique case (s_axil_awaddr)
          REG_CTRL:       ctrl_q <= merge(ctrl_q, s_axil_wdata, wmask);
          REG_FRAME_ADDR: fa_q   <= merge(fa_q, s_axil_wdata, wmask);
          REG_FRAME_DATA: begin
            if (fa_q < NFRAMES) begin
              frame_we   <= 1'b1;
              frame_data <= s_axil_wdata;
              fa_q       <= fa_q + 32'd1;
            end else begin
              s_axil_bresp <= RESP_SLVERR;
            end
          end
          REG_SCAN_DATA: begin
            scan_sh  <= s_axil_wdata;
            scan_cnt <= 6'd32;
          end
          REG_DIN:        din_q  <= merge(din_q, s_axil_wdata, wmask);
          REG_STATUS, REG_DOUT: ;   // read-only, write ignored
          default:        s_axil_bresp <= RESP_SLVERR;
        endcase
      end
    end
  end

  // frame_addr is sampled together with frame_we, one clock after the write,
  // so it has to show the address before the increment.
  logic [FA_W-1:0] fa_prev;
  always_ff @(posedge clk) begin
    if (!rst_n)                                        fa_prev <= '0;
    else if (wr_go && s_axil_awaddr == REG_FRAME_DATA) fa_prev <= FA_W'(fa_q);
  end
  assign frame_addr = fa_prev;

  assign scan_en = scan_busy;
  assign scan_in = scan_sh[0];

  // ---------------- read channel ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      s_axil_rresp  <= RESP_OKAY;
    end else begin
      if (s_axil_rvalid && s_axil_rready)
        s_axil_rvalid <= 1'b0;
      if (rd_go) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rresp  <= RESP_OKAY;
        s_axil_rdata  <= '0;
        unique case (s_axil_araddr)
          REG_CTRL:       s_axil_rdata <= ctrl_q;
          REG_STATUS:     s_axil_rdata <= {16'(NFRAMES), 14'd0, ctrl_q[0], scan_busy};
          REG_FRAME_ADDR: s_axil_rdata <= fa_q;
          REG_FRAME_DATA, REG_SCAN_DATA: s_axil_rdata <= '0;
          REG_DIN:        s_axil_rdata <= din_q;
          REG_DOUT:       s_axil_rdata <= 32'(dout);
          default:        s_axil_rresp <= RESP_SLVERR;
        endcase
      end
    end
  end

  assign cfg_done = ctrl_q[0];
  assign io_sel   = ctrl_q[1];
  assign user_rst = ctrl_q[2];
  assign din      = IO_W'(din_q);

  // ---------------- protocol rules ----------------
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
  a_one_loader:  assert property (@(posedge clk) disable iff (!rst_n)
    !(frame_we && scan_en));
endmodule
