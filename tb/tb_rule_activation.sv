// tb_rule_activation: drives random membership degrees, pulses ce_mult for
// two cycles as the sequencer does, and compares all 27 rule weights with
// the truncated Q1.15 product mu_THW * mu_TETH * mu_TITH worked out here.
// Also checks that the weights arrive after exactly two enabled edges, hold
// while ce_mult is low, and are cleared by rst.
module tb_rule_activation;
  import anfis_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic rst, ce_mult;
  mu_t  mu [N_IN][N_MF];
  w_t   w  [N_RULES];

  rule_activation dut (.clk, .rst, .ce_mult, .mu, .w);

  function automatic int unsigned expect_w(mu_t m [N_IN][N_MF], int j);
    longint unsigned p;
    p = (longint'(m[0][j/9]) * longint'(m[1][(j/3)%3])) >> 15;
    p = (p * longint'(m[2][j%3])) >> 15;
    return int'(p);
  endfunction

  mu_t snap [N_IN][N_MF];

  task automatic check_all(string what, mu_t m [N_IN][N_MF]);
    for (int j = 0; j < N_RULES; j++) begin
      checks++;
      if (int'(w[j]) != expect_w(m, j)) begin
        failures++;
        $display("FAIL %s rule %0d got %0d expected %0d", what, j + 1, w[j], expect_w(m, j));
      end
    end
  endtask

  initial begin
    rst = 1'b1; ce_mult = 1'b0;
    mu = '{default: '0};
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++)
        for (int l = 0; l < N_MF; l++)
          mu[i][l] = (t == 0) ? 16'd32768 : mu_t'($urandom_range(0, 32768));
      snap = mu;
      ce_mult = 1'b1;
      @(negedge clk);
      // the degrees may change once the first stage has taken them
      for (int i = 0; i < N_IN; i++)
        for (int l = 0; l < N_MF; l++) mu[i][l] = mu_t'($urandom_range(0, 32768));
      @(negedge clk);
      ce_mult = 1'b0;
      check_all("product", snap);
      // hold with ce_mult low
      repeat (3) @(negedge clk);
      check_all("hold", snap);
    end
    // reset clears the weights
    @(negedge clk) rst = 1'b1;
    @(negedge clk) rst = 1'b0;
    for (int j = 0; j < N_RULES; j++) begin
      checks++;
      if (w[j] != '0) begin failures++; $display("FAIL rst rule %0d", j + 1); end
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
