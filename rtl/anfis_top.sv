// anfis_top: programmable-logic part of the driving-style sensor, three
// ANFIS cores (one per driving-style cluster) behind an AXI4-Lite slave.
//
// The processing system writes the three features of a steady
// car-following segment (THW_rms, TETH, TITH, each an 8-bit fraction) to
// the FEATURES register and starts an inference through CTRL. One
// sequencer drives all three cores in lock step, so the three cluster
// scores y1, y2, y3 are ready together 53 cycles after the start; they are
// captured in the register file, `done` is set and the software reads them
// back, picks the cluster with the highest score and computes the
// personalised time headway itself (that part runs in software and is not
// in this RTL). See anfis_axi_regs for the register map.
//
// Ports: clk, rst (synchronous, active high, also the cores' rst) and a
// 32-bit AXI4-Lite slave with 5-bit byte addresses.
module anfis_top
  import anfis_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [4:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready
);

  features_t features;
  logic      start, busy, done;
  logic      ce_mult, is_prod, ce, ce_div;
  y_t        y     [N_CLUST];
  logic      ready [N_CLUST];
  acc_t      n_sum [N_CLUST];
  acc_t      d_sum [N_CLUST];

  anfis_axi_regs #(.ADDR_W(5)) u_regs (
    .clk, .rst,
    .s_awaddr, .s_awvalid, .s_awready,
    .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready,
    .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .features, .start, .busy,
    .results_valid(ready[0]),
    .y
  );

  anfis_ctrl u_ctrl (
    .clk, .rst, .start, .busy, .done,
    .ce_mult, .is_prod, .ce, .ce_div
  );

  for (genvar c = 0; c < N_CLUST; c++) begin : g_core
    anfis_core #(.CLUSTER(c)) u_core (
      .clk, .rst,
      .ce_mult, .is_prod, .ce, .ce_div,
      .thw_rms(features.thw_rms),
      .teth   (features.teth),
      .tith   (features.tith),
      .y      (y[c]),
      .ready  (ready[c]),
      .n_sum  (n_sum[c]),
      .d_sum  (d_sum[c])
    );
  end

  // The three cores run in lock step and the sequencer's count matches
  // their latency.
  a_lockstep: assert property (@(posedge clk) disable iff (rst)
                               ready[0] == ready[1] && ready[0] == ready[2]);
  a_done_ready: assert property (@(posedge clk) disable iff (rst) done == ready[0]);

endmodule
