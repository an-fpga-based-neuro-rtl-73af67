// mf_lut: membership-function look-up table of one linguistic label.
//
// The generalized-bell membership function mu(x) = 1 / (1 + |(x-e)/a|^(2b))
// is evaluated ahead of time for every one of the 2^IN_W input codes and held
// in a ROM (a block RAM on an FPGA). Evaluating the membership of an input
// is then a single registered read: the degree for the code presented on
// `addr` in one cycle appears on `mu` after the next rising clock edge
// (latency 1, one read per cycle, no enable).
//
// As in the paper, the functions are precalculated and read in one cycle.
// The ROM is filled at elaboration time from the real-valued parameters
// A, B and E; the Q1.15 rounding of the stored degree is this design's
// choice.
module mf_lut
  import anfis_pkg::*;
#(
  parameter real A = 0.25,   // width of the bell
  parameter real B = 2.0,    // steepness of its flanks
  parameter real E = 0.5     // centre
) (
  input  logic clk,
  input  in_t  addr,   // input feature, Q0.8
  output mu_t  mu      // membership degree, Q1.15, valid one cycle after addr
);

  mu_t rom [LUT_DEPTH];

  initial begin
    for (int unsigned i = 0; i < LUT_DEPTH; i++) rom[i] = gbell_q(i, A, B, E);
  end

  always_ff @(posedge clk) mu <= rom[addr];

endmodule
