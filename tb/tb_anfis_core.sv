// tb_anfis_core: drives the three cluster cores with the control sequence
// written out here cycle by cycle (rst, ce_mult x2, is_prod, is_prod+ce,
// ce x5, ce_div) and compares each y with the floating-point ANFIS of
// anfis_ref_pkg. Includes the operating point the paper uses for its
// example (THW_rms = 0, TETH = 0.5, TITH = 0.1796875), where the cluster-1
// core must give the highest score. Checks the 53-cycle latency from the
// cycle the features are applied to `ready`, and that N and D match
// sum(w c) and sum(w) of the reference to within rounding.
module tb_anfis_core;
  import anfis_pkg::*;
  import anfis_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam real TOL = 2.0e-3;

  logic rst, ce_mult, is_prod, ce, ce_div;
  in_t  thw, teth, tith;
  y_t   y [3];
  logic ready [3];
  acc_t n_sum [3], d_sum [3];

  for (genvar c = 0; c < 3; c++) begin : g_dut
    anfis_core #(.CLUSTER(c)) dut (
      .clk, .rst, .ce_mult, .is_prod, .ce, .ce_div,
      .thw_rms(thw), .teth, .tith, .y(y[c]), .ready(ready[c]),
      .n_sum(n_sum[c]), .d_sum(d_sum[c]));
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_one(int unsigned a, int unsigned b, int unsigned cc, output int best);
    int  t0, lat;
    real r, yr, bestv;
    // cycle 0: features
    thw = in_t'(a); teth = in_t'(b); tith = in_t'(cc);
    t0 = cyc;
    @(negedge clk);
    thw = in_t'($urandom); teth = in_t'($urandom); tith = in_t'($urandom);
    ce_mult = 1'b1; @(negedge clk); @(negedge clk);
    ce_mult = 1'b0; is_prod = 1'b1; @(negedge clk);
    ce = 1'b1; @(negedge clk);
    is_prod = 1'b0;
    repeat (LOG2K) @(negedge clk);
    ce = 1'b0; ce_div = 1'b1; @(negedge clk);
    ce_div = 1'b0;
    // N and D are final now
    for (int c = 0; c < 3; c++) begin
      real nr, dr;
      nr = 0.0; dr = 0.0;
      checks++;
      r  = ref_anfis(c, a, b, cc);
      yr = real'(n_sum[c]) / real'(d_sum[c]);
      if (yr - r > TOL || r - yr > TOL) begin
        failures++; $display("FAIL N/D cluster %0d: %f expected %f", c + 1, yr, r);
      end
    end
    while (!ready[0]) @(negedge clk);
    lat = cyc - t0;
    checks++;
    if (lat != int'(TOTAL_LAT)) begin failures++; $display("FAIL latency %0d", lat); end
    best = 0; bestv = -1.0e9;
    for (int c = 0; c < 3; c++) begin
      checks++;
      r = ref_anfis(c, a, b, cc);
      yr = q24_to_real(y[c]);
      if (!ready[c] || yr - r > TOL || r - yr > TOL) begin
        failures++;
        $display("FAIL cluster %0d in=(%0d,%0d,%0d) y=%f expected %f", c + 1, a, b, cc, yr, r);
      end
      if (yr > bestv) begin bestv = yr; best = c; end
    end
    @(negedge clk);
  endtask

  int best;
  int wins [3] = '{0, 0, 0};

  initial begin
    rst = 1'b1; ce_mult = 1'b0; is_prod = 1'b0; ce = 1'b0; ce_div = 1'b0;
    thw = '0; teth = '0; tith = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // the paper's example point
    run_one(0, 128, 46, best);
    $display("example: y1=%f y2=%f y3=%f", q24_to_real(y[0]), q24_to_real(y[1]), q24_to_real(y[2]));
    checks++;
    if (best != 0) begin failures++; $display("FAIL example not classified as cluster 1"); end
    wins[best]++;
    // points typical of clusters 2 and 3, then random points
    run_one(230, 0, 0, best);   wins[best]++;
    run_one(140, 60, 10, best); wins[best]++;
    for (int t = 0; t < 30; t++) begin
      run_one($urandom_range(0, 255), $urandom_range(0, 255), $urandom_range(0, 255), best);
      wins[best]++;
    end
    $display("wins: %0d %0d %0d", wins[0], wins[1], wins[2]);
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (wins[c] == 0) begin failures++; $display("FAIL cluster %0d never won", c + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
