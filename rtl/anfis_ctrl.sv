// anfis_ctrl: sequencer of the control signals of the ANFIS cores.
//
// One pulse on `start` runs one inference: the features must be on the
// cores' inputs in the start cycle (cycle 0). Counting cycles from there:
//   cycles 1..2      ce_mult   rule-product pipeline
//   cycle  3         is_prod   products of the N and D units registered,
//                              accumulators cleared
//   cycle  4         is_prod + ce   accumulators loaded
//   cycles 5..9      ce        ceil(log2 27) = 5 folding steps
//   cycle  10        ce_div    divider captures N and D
// and the cores raise `ready` in cycle 53 (TOTAL_LAT), when `done` pulses
// and `busy` falls. A start while busy is ignored; a new inference can
// start in the cycle after `done`.
//
// The signal names and their roles are the paper's; its chronogram shows
// their order and that is_prod spans two cycles, one of them with ce, and
// ce_div one. The exact cycle numbers above follow from the latencies the
// paper gives for each layer; the start/busy/done handshake is this
// design's own. rst (synchronous, active high) also goes to the cores.
module anfis_ctrl
  import anfis_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic start,
  output logic busy,
  output logic done,
  output logic ce_mult,
  output logic is_prod,
  output logic ce,
  output logic ce_div
);

  localparam int unsigned CNT_W       = $clog2(TOTAL_LAT + 1);
  localparam int unsigned T_MULT      = LUT_LAT;                  // 1
  localparam int unsigned T_RES       = LUT_LAT + MULT_LAT;       // 3
  localparam int unsigned T_LOAD      = T_RES + 1;                // 4
  localparam int unsigned T_LAST_ACC  = T_LOAD + LOG2K;           // 9
  localparam int unsigned T_DIV       = T_LAST_ACC + 1;           // 10

  logic [CNT_W-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      cnt_q <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        cnt_q <= CNT_W'(1);
      end
    end else if (cnt_q == CNT_W'(TOTAL_LAT)) begin
      busy  <= 1'b0;
      cnt_q <= '0;
    end else begin
      cnt_q <= cnt_q + 1'b1;
    end
  end

  always_comb begin
    ce_mult = busy && (cnt_q >= CNT_W'(T_MULT)) && (cnt_q < CNT_W'(T_MULT + MULT_LAT));
    is_prod = busy && (cnt_q == CNT_W'(T_RES) || cnt_q == CNT_W'(T_LOAD));
    ce      = busy && (cnt_q >= CNT_W'(T_LOAD)) && (cnt_q <= CNT_W'(T_LAST_ACC));
    ce_div  = busy && (cnt_q == CNT_W'(T_DIV));
    done    = busy && (cnt_q == CNT_W'(TOTAL_LAT));
  end

endmodule
