// nd_divider: last ANFIS layer, y = N / D, as a fully pipelined divider.
//
// The quotient is formed in the output format Q(Y_W-1-Y_FRAC).Y_FRAC:
// y = trunc(N * 2^Y_FRAC / D), the sign taken from N (D is a sum of rule
// weights and is never negative). The magnitude is found by restoring
// long division, one quotient bit per pipeline stage over Y_W-1 stages,
// preceded by an operand-capture stage; a delay line pads the pipeline to
// the latency LAT. A new division can be started every cycle.
//
// Interface and timing: ce_div high for one cycle captures n and d at that
// rising edge; exactly LAT rising edges later (the capture edge counted as
// the first) `ready` is high for one cycle and `y` holds the quotient. `y`
// keeps its value until the next result. A quotient too large for Y_W bits
// saturates to the largest value of its sign; D = 0 gives y = 0.
// rst (synchronous, active high) clears the pipeline.
//
// The paper uses a vendor divider core (high-radix, 43 cycles). Only its
// function and its 43-cycle latency are taken from there; the radix-2
// restoring structure, rounding and the saturation and D = 0 behaviour are
// this design's choices.
module nd_divider #(
  parameter int unsigned N_W    = 38,   // width of n and d (signed)
  parameter int unsigned Y_W    = 32,   // width of y (signed)
  parameter int unsigned Y_FRAC = 24,   // fractional bits of y
  parameter int unsigned LAT    = 43    // latency in clock cycles
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  ce_div,
  input  logic signed [N_W-1:0] n,
  input  logic signed [N_W-1:0] d,
  output logic signed [Y_W-1:0] y,
  output logic                  ready
);

  localparam int unsigned QB   = Y_W - 1;        // quotient magnitude bits
  localparam int unsigned X_W  = N_W + Y_FRAC;   // |n| << Y_FRAC
  localparam int unsigned R_W  = N_W + 1;        // partial remainder
  localparam int unsigned PAD  = LAT - QB - 2;   // delay-line stages between the last bit and `y`

  typedef logic [R_W-1:0] rem_t;
  typedef logic [QB-1:0]  quo_t;

  // Pipeline state, index 0 = capture stage, 1..QB = quotient-bit stages.
  logic       vld_q [QB+1];
  logic       neg_q [QB+1];
  logic       sat_q [QB+1];
  logic       dz_q  [QB+1];
  rem_t       den_q [QB+1];
  rem_t       rem_q [QB+1];
  quo_t       low_q [QB+1];   // dividend bits still to be brought down
  quo_t       quo_q [QB+1];

  logic signed [Y_W-1:0] y_pad_q   [PAD];
  logic                  vld_pad_q [PAD];

  logic [N_W-1:0] n_mag;
  logic [X_W-1:0] x_full;
  logic [X_W-1:0] x_high;
  logic [R_W-1:0] d_ext;

  always_comb begin
    n_mag  = n[N_W-1] ? N_W'(-n) : N_W'(n);
    x_full = X_W'(n_mag) << Y_FRAC;
    x_high = x_full >> QB;
    d_ext  = R_W'(d[N_W-2:0]);
  end

  // Quotient of the last stage, with sign, saturation and D = 0 applied.
  logic signed [Y_W-1:0] y_last;
  always_comb begin
    if (dz_q[QB])
      y_last = '0;
    else if (sat_q[QB])
      y_last = neg_q[QB] ? {1'b1, {(Y_W-1){1'b0}}} : {1'b0, {(Y_W-1){1'b1}}};
    else if (neg_q[QB])
      y_last = -$signed({1'b0, quo_q[QB]});
    else
      y_last = $signed({1'b0, quo_q[QB]});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      vld_q     <= '{default: 1'b0};
      vld_pad_q <= '{default: 1'b0};
      neg_q     <= '{default: 1'b0};
      sat_q     <= '{default: 1'b0};
      dz_q      <= '{default: 1'b0};
      den_q     <= '{default: '0};
      rem_q     <= '{default: '0};
      low_q     <= '{default: '0};
      quo_q     <= '{default: '0};
      y_pad_q   <= '{default: '0};
      y         <= '0;
      ready     <= 1'b0;
    end else begin
      // capture
      vld_q[0] <= ce_div;
      neg_q[0] <= n[N_W-1];
      dz_q[0]  <= (d <= 0);
      sat_q[0] <= (x_high >= X_W'(d_ext));
      den_q[0] <= d_ext;
      rem_q[0] <= R_W'(x_high);
      low_q[0] <= x_full[QB-1:0];
      quo_q[0] <= '0;
      // one quotient bit per stage
      for (int s = 1; s <= QB; s++) begin
        logic [R_W:0] trial;
        trial    = {rem_q[s-1], low_q[s-1][QB-1]};
        vld_q[s] <= vld_q[s-1];
        neg_q[s] <= neg_q[s-1];
        sat_q[s] <= sat_q[s-1];
        dz_q[s]  <= dz_q[s-1];
        den_q[s] <= den_q[s-1];
        low_q[s] <= low_q[s-1] << 1;
        if (trial >= {1'b0, den_q[s-1]}) begin
          rem_q[s] <= R_W'(trial - {1'b0, den_q[s-1]});
          quo_q[s] <= {quo_q[s-1][QB-2:0], 1'b1};
        end else begin
          rem_q[s] <= R_W'(trial);
          quo_q[s] <= {quo_q[s-1][QB-2:0], 1'b0};
        end
      end
      // padding to the specified latency
      y_pad_q[0]   <= y_last;
      vld_pad_q[0] <= vld_q[QB];
      for (int p = 1; p < PAD; p++) begin
        y_pad_q[p]   <= y_pad_q[p-1];
        vld_pad_q[p] <= vld_pad_q[p-1];
      end
      ready <= vld_pad_q[PAD-1];
      if (vld_pad_q[PAD-1]) y <= y_pad_q[PAD-1];
    end
  end

endmodule
