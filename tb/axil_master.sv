// axil_master -- AXI4-Lite master model for the testbenches. write() and read()
// run one transaction each: address and data are presented together and held
// until the slave takes them; the response is accepted after a random 0..2 clock
// delay, so the slave's hold-until-ready rule is exercised. Stimulus changes
// on the falling edge or just after a rising edge.
module axil_master (
  input  logic        clk,
  output logic [7:0]  awaddr,
  output logic        awvalid,
  input  logic        awready,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  output logic        wvalid,
  input  logic        wready,
  input  logic [1:0]  bresp,
  input  logic        bvalid,
  output logic        bready,
  output logic [7:0]  araddr,
  output logic        arvalid,
  input  logic        arready,
  input  logic [31:0] rdata,
  input  logic [1:0]  rresp,
  input  logic        rvalid,
  output logic        rready
);
  int wait_cycles = 0;   // clocks spent waiting on the slave, for rate checks

  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = '0; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  // Handshakes are judged on the falling edge: if VALID and READY are both high
  // there, the transfer happens at the next rising edge.
  task automatic write(input logic [7:0] a, input logic [31:0] d,
                       output logic [1:0] resp, input logic [3:0] s = 4'hF);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = s; awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); wait_cycles++; end
    @(posedge clk); #1 awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    @(negedge clk); bready = 1;
    #1;
    while (!bvalid) @(negedge clk);
    resp = bresp;
    @(posedge clk); #1 bready = 0;
  endtask

  task automatic read(input logic [7:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) @(negedge clk);
    @(posedge clk); #1 arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    @(negedge clk); rready = 1;
    #1;
    while (!rvalid) @(negedge clk);
    d = rdata; resp = rresp;
    @(posedge clk); #1 rready = 0;
  endtask
endmodule
