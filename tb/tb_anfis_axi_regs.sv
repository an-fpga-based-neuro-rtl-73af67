// tb_anfis_axi_regs: exercises the AXI4-Lite register file with the bus
// functional model. Checks feature write and read-back with byte strobes,
// that a write of CTRL bit 0 gives exactly one start pulse (and none while
// busy), the busy and done status bits, capture of the three results on
// results_valid, reads of unmapped addresses, and OKAY responses.
module tb_anfis_axi_regs;
  import anfis_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        rst;
  logic [4:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  features_t   features;
  logic        start, busy, results_valid;
  y_t          y [N_CLUST];

  anfis_axi_regs #(.ADDR_W(5)) dut (
    .clk, .rst,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .features, .start, .busy, .results_valid, .y);

  axi_lite_bfm #(.ADDR_W(5)) bfm (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  int starts = 0;
  always @(posedge clk) if (!rst && start) starts++;

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++; $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] r;

  initial begin
    rst = 1'b1; busy = 1'b0; results_valid = 1'b0; y = '{default: '0};
    repeat (3) @(negedge clk);
    rst = 1'b0;
    bfm.read(5'h04, r);   expect_eq("features after reset", r, 32'h0);
    bfm.write(5'h04, 32'hAB_2E_80_00);
    bfm.read(5'h04, r);   expect_eq("features", r, 32'h00_2E_80_00);
    expect_eq("feature struct", 32'(features), 32'h2E_80_00);
    bfm.write(5'h04, 32'h00_11_22_33, 4'b0010);
    bfm.read(5'h04, r);   expect_eq("strobed write", r, 32'h00_2E_22_00);
    // start pulse
    bfm.write(5'h00, 32'h1);
    @(negedge clk);
    expect_eq("one start", 32'(starts), 32'd1);
    // status while busy, start ignored
    busy = 1'b1;
    bfm.read(5'h00, r);   expect_eq("status busy", r, 32'h1);
    bfm.write(5'h00, 32'h1);
    @(negedge clk);
    expect_eq("start ignored while busy", 32'(starts), 32'd1);
    // results
    y[0] = 32'h00F5_0000; y[1] = 32'hFFFF_1234; y[2] = 32'h0040_0000;
    @(negedge clk) results_valid = 1'b1;
    @(negedge clk) results_valid = 1'b0; busy = 1'b0;
    y = '{default: '1};   // must not disturb the captured values
    bfm.read(5'h00, r);   expect_eq("status done", r, 32'h2);
    bfm.read(5'h08, r);   expect_eq("Y1", r, 32'h00F5_0000);
    bfm.read(5'h0C, r);   expect_eq("Y2", r, 32'hFFFF_1234);
    bfm.read(5'h10, r);   expect_eq("Y3", r, 32'h0040_0000);
    bfm.read(5'h14, r);   expect_eq("unmapped", r, 32'h0);
    // a new start clears done
    bfm.write(5'h00, 32'h1);
    bfm.read(5'h00, r);   expect_eq("done cleared", r, 32'h0);
    expect_eq("second start", 32'(starts), 32'd2);
    expect_eq("responses OKAY", 32'(bfm.resp_errors), 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
