// tb_anfis_ctrl: starts the sequencer and records, cycle by cycle from the
// start cycle, every control output; compares the trace with the expected
// schedule written out here as literal cycle numbers (ce_mult 1-2, is_prod
// 3-4, ce 4-9, ce_div 10, done 53). Also checks that a start while busy is
// ignored, that busy spans the whole inference, and that a new inference
// can start in the cycle after done.
module tb_anfis_ctrl;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic rst, start, busy, done, ce_mult, is_prod, ce, ce_div;

  anfis_ctrl dut (.clk, .rst, .start, .busy, .done, .ce_mult, .is_prod, .ce, .ce_div);

  function automatic logic [4:0] expected(int k);
    // {ce_mult, is_prod, ce, ce_div, done} in cycle k after start
    return {k >= 1 && k <= 2, k == 3 || k == 4, k >= 4 && k <= 9, k == 10, k == 53};
  endfunction

  task automatic run(bit poke_start_while_busy);
    // cycle 0
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int k = 1; k <= 53; k++) begin
      checks++;
      if ({ce_mult, is_prod, ce, ce_div, done} != expected(k) || !busy) begin
        failures++;
        $display("FAIL cycle %0d: got %b busy %b expected %b", k,
                 {ce_mult, is_prod, ce, ce_div, done}, busy, expected(k));
      end
      if (poke_start_while_busy && k == 20) start = 1'b1;
      @(negedge clk);
      start = 1'b0;
    end
    checks++;
    if (busy || ce_mult || is_prod || ce || ce_div || done) begin
      failures++; $display("FAIL not idle after done");
    end
  endtask

  initial begin
    rst = 1'b1; start = 1'b0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after reset"); end
    run(1'b1);
    run(1'b0);      // back to back, start in the cycle after done
    repeat (3) @(negedge clk);
    run(1'b0);
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
