// axil_master_bfm: simple AXI4-Lite master for testbenches.
//
// write(addr, data) and read(addr, data) each run one transaction and wait
// for its response; resp_err is set if a response other than OKAY comes back
// and timeouts counts transactions that got no handshake within 100 cycles.
module axil_master_bfm (
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
  bit resp_err = 1'b0;
  int timeouts = 0;

  initial begin
    awaddr = '0; awvalid = 1'b0; wdata = '0; wstrb = '0; wvalid = 1'b0; bready = 1'b0;
    araddr = '0; arvalid = 1'b0; rready = 1'b0;
  end

  task automatic write(input logic [7:0] a, input logic [31:0] d);
    int n;
    @(posedge clk);
    awaddr <= a; awvalid <= 1'b1; wdata <= d; wstrb <= 4'hF; wvalid <= 1'b1; bready <= 1'b1;
    n = 0;
    do begin @(posedge clk); n++; end while (!(awready && wready) && n < 100);
    awvalid <= 1'b0; wvalid <= 1'b0;
    n = 0;
    while (!bvalid && n < 100) begin @(posedge clk); n++; end
    if (n >= 100) timeouts++;
    if (bresp != 2'b00) resp_err = 1'b1;
    @(posedge clk);
    bready <= 1'b0;
  endtask

  task automatic read(input logic [7:0] a, output logic [31:0] d);
    int n;
    @(posedge clk);
    araddr <= a; arvalid <= 1'b1; rready <= 1'b1;
    n = 0;
    do begin @(posedge clk); n++; end while (!arready && n < 100);
    arvalid <= 1'b0;
    n = 0;
    while (!rvalid && n < 100) begin @(posedge clk); n++; end
    if (n >= 100) timeouts++;
    if (rresp != 2'b00) resp_err = 1'b1;
    d = rdata;
    @(posedge clk);
    rready <= 1'b0;
  endtask
endmodule
