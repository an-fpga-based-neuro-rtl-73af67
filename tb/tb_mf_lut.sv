// tb_mf_lut: checks every entry of a membership ROM against the bell
// function evaluated in floating point (to within one LSB of Q1.15), and
// that the read latency is exactly one clock cycle. Two instances are
// tested: a MEDIUM label and a LOW label with different width and slope.
module tb_mf_lut;
  import anfis_pkg::*;
  import anfis_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  in_t addr;
  mu_t mu_med, mu_low;

  mf_lut #(.A(0.25), .B(2.0), .E(0.5)) dut_med (.clk, .addr, .mu(mu_med));
  mf_lut #(.A(0.3),  .B(1.5), .E(0.0)) dut_low (.clk, .addr, .mu(mu_low));

  task automatic check_val(string what, mu_t got, real a, real b, real e, int unsigned code);
    real expd;
    int  diff;
    expd = ref_bell(real'(code) / 256.0, a, b, e) * 32768.0;
    diff = int'(got) - $rtoi(expd + 0.5);
    checks++;
    if (diff > 1 || diff < -1) begin
      failures++;
      $display("FAIL %s addr=%0d got=%0d expected=%f", what, code, got, expd);
    end
  endtask

  initial begin
    addr = '0;
    @(posedge clk);
    for (int unsigned i = 0; i < 256; i++) begin
      @(negedge clk) addr = in_t'(i);
      @(posedge clk); #1;
      // value appears after exactly one edge
      check_val("med", mu_med, 0.25, 2.0, 0.5, i);
      check_val("low", mu_low, 0.3, 1.5, 0.0, i);
    end
    // latency: before the edge the old value is still there
    @(negedge clk) addr = 8'd0;
    @(posedge clk); #1;
    @(negedge clk) addr = 8'd128;
    #1;
    checks++;
    if (mu_med != mu_t'(gbell_q(0, 0.25, 2.0, 0.5))) begin
      failures++; $display("FAIL output changed before the clock edge");
    end
    @(posedge clk); #1;
    checks++;
    if (mu_med != 16'd32768) begin
      failures++; $display("FAIL centre of MEDIUM label is %0d, expected 32768", mu_med);
    end
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
