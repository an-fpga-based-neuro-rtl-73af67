// tb_nd_divider: issues divisions back to back, one per cycle, and in
// bursts, and compares each quotient with trunc(N * 2^24 / D) (sign from N)
// computed here in 128-bit integers. Checks the 43-cycle latency from the
// ce_div edge to `ready`, in-order delivery, saturation when the quotient
// does not fit in 32 bits, and the D = 0 result of zero.
module tb_nd_divider;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic rst, ce_div, ready;
  logic signed [37:0] n, d;
  logic signed [31:0] y;

  nd_divider #(.N_W(38), .Y_W(32), .Y_FRAC(24), .LAT(43)) dut (
    .clk, .rst, .ce_div, .n, .d, .y, .ready);

  typedef struct { longint n; longint d; longint y; int t; } job_t;
  job_t q [$];
  int   cyc = 0;
  int   n_sat = 0, n_dz = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint ref_div(longint nn, longint dd);
    logic [127:0] num, quo;
    logic         neg;
    if (dd <= 0) return 0;
    neg = nn < 0;
    num = 128'(neg ? 64'(-nn) : 64'(nn)) << 24;
    quo = num / 128'(dd);
    if (quo > 128'h7FFF_FFFF) return neg ? -64'sd2147483648 : 64'sd2147483647;
    return neg ? -longint'(quo) : longint'(quo);
  endfunction

  // scoreboard
  always @(posedge clk) begin
    #1;
    if (ready) begin
      job_t j;
      checks++;
      if (q.size() == 0) begin
        failures++; $display("FAIL unexpected ready");
      end else begin
        j = q.pop_front();
        if (longint'(y) != j.y) begin
          failures++; $display("FAIL %0d / %0d: y=%0d expected %0d", j.n, j.d, y, j.y);
        end
        checks++;
        if (cyc - j.t != 43) begin
          failures++; $display("FAIL latency %0d", cyc - j.t);
        end
      end
    end
  end

  // Called just after a falling edge; drives one ce_div cycle.
  task automatic issue(longint nn, longint dd);
    job_t j;
    n = 38'(nn); d = 38'(dd); ce_div = 1'b1;
    j.n = nn; j.d = dd; j.y = ref_div(nn, dd); j.t = cyc;
    if (dd > 0 && (j.y == 64'sd2147483647 || j.y == -64'sd2147483648)) n_sat++;
    if (dd == 0) n_dz++;
    q.push_back(j);
    @(negedge clk);
  endtask

  initial begin
    rst = 1'b1; ce_div = 1'b0; n = '0; d = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    @(negedge clk);
    // ANFIS-like operands: |N| <= 2 D
    for (int t = 0; t < 200; t++) begin
      longint dd, nn;
      dd = longint'($urandom_range(1, 32'h7FFF_FFFF)) * longint'($urandom_range(1, 27));
      nn = (longint'($urandom) % (2 * dd + 1)) * (($urandom & 1) != 0 ? 1 : -1);
      issue(nn, dd);
      if ((t % 7) == 6) begin
        ce_div = 1'b0;
        repeat ($urandom_range(1, 5)) @(negedge clk);
      end
    end
    // small divisors, exact values, saturation, D = 0
    issue(64'sd3 <<< 27, 64'sd2 <<< 27);       // 1.5
    issue(-(64'sd1 <<< 27), 64'sd4 <<< 27);    // -0.25
    issue(64'sd1 <<< 36, 1);                   // saturates positive
    issue(-(64'sd1 <<< 36), 1);                // saturates negative
    issue(12345, 0);                           // D = 0
    ce_div = 1'b0;
    repeat (60) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    checks++;
    if (n_sat < 2 || n_dz < 1) begin
      failures++; $display("FAIL corner cases not run: sat=%0d dz=%0d", n_sat, n_dz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
