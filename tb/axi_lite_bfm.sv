// axi_lite_bfm: AXI4-Lite master for the testbenches. Its tasks issue one
// write or one read at a time, hold each VALID until the matching READY,
// and check that the response is OKAY. Drives the signals it owns on
// falling clock edges and samples on rising ones.
module axi_lite_bfm #(
  parameter int unsigned ADDR_W = 5
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

  int resp_errors = 0;
  int writes = 0, reads = 0;

  initial begin
    awaddr = '0; awvalid = 1'b0; wdata = '0; wstrb = '0; wvalid = 1'b0; bready = 1'b0;
    araddr = '0; arvalid = 1'b0; rready = 1'b0;
  end

  task automatic write(logic [ADDR_W-1:0] addr, logic [31:0] data, logic [3:0] strb = 4'hF);
    @(negedge clk);
    awaddr = addr; awvalid = 1'b1; wdata = data; wstrb = strb; wvalid = 1'b1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0; bready = 1'b1;
    while (!bvalid) @(negedge clk);
    if (bresp != 2'b00) resp_errors++;
    @(negedge clk);
    bready = 1'b0;
    writes++;
  endtask

  task automatic read(logic [ADDR_W-1:0] addr, output logic [31:0] data);
    @(negedge clk);
    araddr = addr; arvalid = 1'b1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    // hold off RREADY for a cycle to exercise the hold rule
    @(negedge clk);
    rready = 1'b1;
    while (!rvalid) @(negedge clk);
    data = rdata;
    if (rresp != 2'b00) resp_errors++;
    @(negedge clk);
    rready = 1'b0;
    reads++;
  endtask

endmodule
