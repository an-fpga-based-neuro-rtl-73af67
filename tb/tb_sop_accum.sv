// tb_sop_accum: runs the is_prod / ce sequence on random operands and
// compares the output with sum(u_j * v_j) computed here, for the 27-lane
// unit of the ANFIS and for a 6-lane one (a K that is not a power of two
// with an even half). Checks the latency of ceil(log2 K)+2 cycles: the sum
// must be partial (products 0..15 only) one cycle before and must be complete at that edge,
// and must then hold.
module tb_sop_accum;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam int K1 = 27, K2 = 6;

  logic rst, ce, is_prod;
  logic        [15:0] u1 [K1];
  logic signed [15:0] v1 [K1];
  logic        [15:0] u2 [K2];
  logic signed [15:0] v2 [K2];
  logic signed [37:0] s1, s2;

  sop_accum #(.K(K1), .U_W(16), .V_W(16), .ACC_W(38)) dut1 (
    .clk, .rst, .ce, .is_prod, .u(u1), .v(v1), .sum(s1));
  sop_accum #(.K(K2), .U_W(16), .V_W(16), .ACC_W(38)) dut2 (
    .clk, .rst, .ce, .is_prod, .u(u2), .v(v2), .sum(s2));

  longint exp1, exp2, part1;
  int     lat;

  initial begin
    rst = 1'b1; ce = 1'b0; is_prod = 1'b0;
    u1 = '{default: '0}; v1 = '{default: '0};
    u2 = '{default: '0}; v2 = '{default: '0};
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 40; t++) begin
      exp1 = 0; exp2 = 0; part1 = 0;
      for (int j = 0; j < K1; j++) begin
        u1[j] = (t == 0) ? 16'hFFFF : 16'($urandom);
        v1[j] = (t == 0) ? -16'sd32768 : 16'($urandom);
        exp1 += longint'(u1[j]) * longint'(v1[j]);
        if (j < 16) part1 += longint'(u1[j]) * longint'(v1[j]);
      end
      for (int j = 0; j < K2; j++) begin
        u2[j] = 16'($urandom);
        v2[j] = 16'($urandom);
        exp2 += longint'(u2[j]) * longint'(v2[j]);
      end
      // cycle 1: products, accumulators cleared
      is_prod = 1'b1; ce = 1'b0;
      @(negedge clk);
      // operands may change after the products are registered
      for (int j = 0; j < K1; j++) u1[j] = 16'($urandom);
      ce = 1'b1;                   // cycle 2: load
      @(negedge clk);
      is_prod = 1'b0;              // folding cycles
      lat = 2;
      for (int c = 0; c < 5; c++) begin
        if (c == 3) begin          // dut2 (K=6) is done after ceil(log2 6)=3 folds
          checks++;
          if (longint'(s2) != exp2) begin
            failures++; $display("FAIL K=6 sum %0d expected %0d", s2, exp2);
          end
        end
        if (c == 4) begin          // one fold left: register 0 holds products 0..15
          checks++;
          if (longint'(s1) != part1) begin
            failures++; $display("FAIL K=27 partial sum before the last fold %0d expected %0d", s1, part1);
          end
        end
        @(negedge clk);
        lat++;
      end
      ce = 1'b0;
      checks++;
      if (lat != 7) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (longint'(s1) != exp1) begin
        failures++; $display("FAIL K=27 t=%0d sum %0d expected %0d", t, s1, exp1);
      end
      // hold
      repeat (2) @(negedge clk);
      checks++;
      if (longint'(s1) != exp1) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
