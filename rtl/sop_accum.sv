// sop_accum: sum of K products, sum_j u_j * v_j, with K multiplier/adder
// lanes instead of a multiplier bank followed by an adder tree.
//
// Each lane j has a multiplier, a product pipeline register, a multiplexer
// controlled by is_prod and an accumulator register. The accumulators are
// first loaded with the products; then each accumulation step folds the
// register file in half in place: register j takes acc[2j] + acc[2j+1] for
// j < ceil(K/2), and the upper registers take zero. After ceil(log2 K)
// steps the complete sum is in register 0, which drives `sum`. Only the
// lower ceil(K/2) lanes need an adder; the upper lanes select between their
// product and zero.
//
// Control sequence (the paper's is_prod / CE protocol):
//   cycle 1: is_prod=1, ce=0  products registered, accumulators cleared
//   cycle 2: is_prod=1, ce=1  accumulators loaded with the products
//   cycles 3..ceil(log2 K)+2: is_prod=0, ce=1  folding steps
// The sum is on `sum` after the last folding edge: latency ceil(log2 K)+2
// cycles from the cycle the u and v operands are presented (7 for K = 27),
// as in the paper. With ce and is_prod low the accumulators hold, so `sum`
// stays valid. rst (synchronous, active high) clears all registers.
//
// The lane structure, is_prod/CE protocol and latency follow the paper. Its
// figure shows the feedback wiring only schematically; the pairing of
// registers 2j and 2j+1 used here is this design's choice of a wiring that
// realises the halving it describes.
module sop_accum #(
  parameter int unsigned K     = 27,   // number of products (rules)
  parameter int unsigned U_W   = 16,   // u: unsigned
  parameter int unsigned V_W   = 16,   // v: signed
  parameter int unsigned ACC_W = 38    // accumulator width, signed
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    ce,
  input  logic                    is_prod,
  input  logic        [U_W-1:0]   u [K],
  input  logic signed [V_W-1:0]   v [K],
  output logic signed [ACC_W-1:0] sum
);

  localparam int unsigned HALF = (K + 1) / 2;   // lanes with an adder

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t prod_q [K];
  acc_t acc_q  [K];

  // Product pipeline registers: loaded while is_prod is high.
  always_ff @(posedge clk) begin
    if (rst) begin
      prod_q <= '{default: '0};
    end else if (is_prod) begin
      for (int j = 0; j < K; j++)
        prod_q[j] <= ACC_W'($signed({1'b0, u[j]}) * v[j]);
    end
  end

  // Accumulator registers.
  always_ff @(posedge clk) begin
    if (rst) begin
      acc_q <= '{default: '0};
    end else if (is_prod && !ce) begin
      acc_q <= '{default: '0};
    end else if (is_prod && ce) begin
      acc_q <= prod_q;
    end else if (ce) begin
      for (int j = 0; j < K; j++) begin
        if (j < HALF)
          acc_q[j] <= acc_q[2*j] + ((2*j + 1 < K) ? acc_q[2*j+1] : '0);
        else
          acc_q[j] <= '0;
      end
    end
  end

  assign sum = acc_q[0];

  // Control protocol: the load cycle (is_prod with ce) always follows a
  // product cycle (is_prod without ce).
  a_load_after_res: assert property (@(posedge clk) disable iff (rst)
                                     (is_prod && ce) |-> $past(is_prod && !ce));

endmodule
