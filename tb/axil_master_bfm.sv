// axil_master_bfm: AXI4-Lite master for testbenches. write() and read()
// run one transaction each, keep VALID up until READY as the protocol
// requires, and count the cycles they wait. errors counts responses that
// are missing or not OKAY; last_resp holds the latest response code.
module axil_master_bfm #(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  output logic [ADDR_W-1:0] awaddr,
  output logic              awvalid,
  input  logic              awready,
  output logic [31:0]       wdata,
  output logic [3:0]        wstrb,
  output logic              wvalid,
  input  logic              wready,
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready,
  output logic [ADDR_W-1:0] araddr,
  output logic              arvalid,
  input  logic              arready,
  input  logic [31:0]       rdata,
  input  logic [1:0]        rresp,
  input  logic              rvalid,
  output logic              rready
);
  int errors = 0;
  logic [1:0] last_resp = 2'b00;

  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = 4'hf; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  task automatic write(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    int n;
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1; bready = 1;
    n = 0;
    do begin @(posedge clk); n++; end while (!(awready && wready) && n < 100);
    @(negedge clk) begin awvalid = 0; wvalid = 0; end
    while (!bvalid && n < 200) begin @(negedge clk); n++; end
    last_resp = bvalid ? bresp : 2'b11;
    if (!bvalid || bresp != 2'b00) errors++;
    @(posedge clk);
    @(negedge clk) bready = 0;
  endtask

  task automatic read(input logic [ADDR_W-1:0] a, output logic [31:0] d);
    int n;
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    n = 0;
    do begin @(posedge clk); n++; end while (!arready && n < 100);
    @(negedge clk) arvalid = 0;
    while (!rvalid && n < 200) begin @(negedge clk); n++; end
    last_resp = rvalid ? rresp : 2'b11;
    if (!rvalid || rresp != 2'b00) errors++;
    d = rdata;
    @(posedge clk);
    @(negedge clk) rready = 0;
  endtask
endmodule
