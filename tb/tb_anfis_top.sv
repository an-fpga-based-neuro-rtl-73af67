// tb_anfis_top: end-to-end test of the accelerator at its default size,
// driven only through the AXI4-Lite port as the processing system would:
// write the features, start, poll the status until done, read the three
// cluster scores and pick the highest. Each score is compared with the
// floating-point ANFIS of anfis_ref_pkg, and the chosen cluster with the
// reference's choice (unless the two best reference scores are within the
// tolerance). The first vector is the operating point of the paper's
// example (THW_rms = 0, TETH = 0.5, TITH = 0.1796875), which must be
// classified as cluster 1.
//
// Mechanisms counted, each of which must occur at least once: an
// inference, a start written while busy (must be ignored), a win for each
// of the three clusters, and a read held off by the master (RREADY late).
// The inference latency, start pulse to the cores' ready, must be 53 cycles.
module tb_anfis_top;
  import anfis_pkg::*;
  import anfis_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam real TOL = 2.0e-3;
  localparam int  N_VEC = 60;

  logic        rst;
  logic [4:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;

  anfis_top dut (
    .clk, .rst,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready));

  axi_lite_bfm #(.ADDR_W(5)) bfm (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  // latency probe: start pulse to the cores' ready
  int cyc = 0, t_start = 0, last_lat = 0, n_starts = 0, n_readys = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && dut.start && !dut.busy) begin t_start <= cyc; n_starts <= n_starts + 1; end
    if (!rst && dut.ready[0]) begin last_lat <= cyc - t_start; n_readys <= n_readys + 1; end
  end

  int n_infer = 0, n_busy_start = 0, n_late_read = 0;
  int wins [3] = '{0, 0, 0};

  task automatic infer(int unsigned a, int unsigned b, int unsigned c, bit poke_busy,
                       output int best);
    logic [31:0] r;
    real ys [3], rs [3];
    int  rbest, polls;
    bfm.write(5'h04, {8'd0, 8'(c), 8'(b), 8'(a)});
    bfm.write(5'h00, 32'h1);
    if (poke_busy) begin
      bfm.read(5'h00, r);
      checks++;
      if (r[0] !== 1'b1) begin failures++; $display("FAIL not busy after start"); end
      bfm.write(5'h04, 32'h00FF_FFFF);   // features may change once started
      bfm.write(5'h00, 32'h1);           // ignored
      n_busy_start++;
    end
    polls = 0;
    do begin bfm.read(5'h00, r); polls++; end while (r[1] !== 1'b1 && polls < 100);
    checks++;
    if (r[1] !== 1'b1 || r[0] !== 1'b0) begin failures++; $display("FAIL status %h", r); end
    for (int k = 0; k < 3; k++) begin
      bfm.read(5'(8 + 4 * k), r);
      n_late_read++;
      ys[k] = q24_to_real(r);
      rs[k] = ref_anfis(k, a, b, c);
      checks++;
      if (ys[k] - rs[k] > TOL || rs[k] - ys[k] > TOL) begin
        failures++;
        $display("FAIL in=(%0d,%0d,%0d) y%0d=%f expected %f", a, b, c, k + 1, ys[k], rs[k]);
      end
    end
    best = 0; rbest = 0;
    for (int k = 1; k < 3; k++) begin
      if (ys[k] > ys[best]) best = k;
      if (rs[k] > rs[rbest]) rbest = k;
    end
    if (best != rbest) begin
      checks++;
      if (rs[rbest] - rs[best] > 2.0 * TOL) begin
        failures++; $display("FAIL class %0d expected %0d", best + 1, rbest + 1);
      end
    end
    checks++;
    if (last_lat != int'(TOTAL_LAT)) begin failures++; $display("FAIL latency %0d", last_lat); end
    wins[best]++;
    n_infer++;
  endtask

  int best;

  initial begin
    rst = 1'b1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    infer(0, 128, 46, 1'b1, best);
    checks++;
    if (best != 0) begin failures++; $display("FAIL example not cluster 1"); end
    infer(230, 0, 0, 1'b0, best);
    infer(140, 60, 10, 1'b0, best);
    for (int t = 0; t < N_VEC; t++)
      infer($urandom_range(0, 255), $urandom_range(0, 255), $urandom_range(0, 255),
            (t % 10) == 3, best);
    $display("inferences=%0d starts-while-busy=%0d held-off reads=%0d wins=%0d/%0d/%0d",
             n_infer, n_busy_start, n_late_read, wins[0], wins[1], wins[2]);
    checks++;
    if (n_starts != n_infer || n_readys != n_infer) begin
      failures++; $display("FAIL %0d starts, %0d results for %0d inferences", n_starts, n_readys, n_infer);
    end
    checks++;
    if (n_infer == 0 || n_busy_start == 0 || n_late_read == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (wins[k] == 0) begin failures++; $display("FAIL cluster %0d never chosen", k + 1); end
    end
    checks++;
    if (bfm.resp_errors != 0) begin failures++; $display("FAIL error responses"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
