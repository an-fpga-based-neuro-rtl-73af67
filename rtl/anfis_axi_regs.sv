// anfis_axi_regs: AXI4-Lite slave register file between the processing
// system and the three ANFIS cores.
//
// Register map (32-bit words, byte addresses):
//   0x00 CTRL/STATUS  write: bit 0 = 1 starts an inference (ignored while
//                     busy). read: bit 0 busy, bit 1 done (set when the
//                     results arrive, cleared by the next start).
//   0x04 FEATURES     read/write: [7:0] THW_rms, [15:8] TETH, [23:16] TITH,
//                     each Q0.8.
//   0x08 Y1, 0x0C Y2, 0x10 Y3   read only: outputs of the cores of clusters
//                     1, 2 and 3, 32-bit two's complement Q7.24.
// Other addresses read as zero; writes to them are accepted and dropped.
//
// Handshake: one transaction at a time per direction. A write is accepted
// when AWVALID and WVALID are both high (AWREADY and WREADY pulse together
// for one cycle), and BVALID is held until BREADY. A read is accepted with
// ARREADY for one cycle, and RVALID with the data is held until RREADY.
// Responses are always OKAY. WSTRB is honoured byte by byte on FEATURES.
// rst is synchronous and active high.
//
// The paper states only that features go from the PS to the accelerator
// and results come back over the 32-bit AXI4 bus; the Lite subset, the
// register map and the start/done flags are this design's choices.
module anfis_axi_regs
  import anfis_pkg::*;
#(
  parameter int unsigned ADDR_W = 5
) (
  input  logic              clk,
  input  logic              rst,
  // AXI4-Lite write address / data / response
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  // AXI4-Lite read address / data
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // accelerator side
  output features_t         features,
  output logic              start,
  input  logic              busy,
  input  logic              results_valid,
  input  y_t                y [N_CLUST]
);

  localparam logic [ADDR_W-1:0] A_CTRL = ADDR_W'(5'h00);
  localparam logic [ADDR_W-1:0] A_FEAT = ADDR_W'(5'h04);
  localparam logic [ADDR_W-1:0] A_Y1   = ADDR_W'(5'h08);
  localparam logic [ADDR_W-1:0] A_Y2   = ADDR_W'(5'h0C);
  localparam logic [ADDR_W-1:0] A_Y3   = ADDR_W'(5'h10);

  logic done_q;
  y_t   y_q [N_CLUST];

  // ---------------- write channel ----------------
  logic wr_fire;
  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid && !s_awready;
  assign s_bresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_awready <= 1'b0;
      s_wready  <= 1'b0;
      s_bvalid  <= 1'b0;
      features  <= '0;
      start     <= 1'b0;
    end else begin
      s_awready <= wr_fire;
      s_wready  <= wr_fire;
      start     <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          A_CTRL: start <= s_wdata[0] && s_wstrb[0] && !busy;
          A_FEAT: begin
            if (s_wstrb[0]) features.thw_rms <= s_wdata[7:0];
            if (s_wstrb[1]) features.teth    <= s_wdata[15:8];
            if (s_wstrb[2]) features.tith    <= s_wdata[23:16];
          end
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
    end
  end

  // ---------------- results ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      done_q <= 1'b0;
      y_q    <= '{default: '0};
    end else if (start) begin
      done_q <= 1'b0;
    end else if (results_valid) begin
      done_q <= 1'b1;
      y_q    <= y;
    end
  end

  // ---------------- read channel ----------------
  logic rd_fire;
  assign rd_fire = s_arvalid && !s_rvalid && !s_arready;
  assign s_rresp = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_arready <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      s_arready <= rd_fire;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr)
          A_CTRL:  s_rdata <= {30'd0, done_q, busy};
          A_FEAT:  s_rdata <= {8'd0, features};
          A_Y1:    s_rdata <= y_q[0];
          A_Y2:    s_rdata <= y_q[1];
          A_Y3:    s_rdata <= y_q[2];
          default: s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // ---------------- protocol rules ----------------
  // A response, once offered, stays until it is taken.
  property p_hold(valid, ready);
    @(posedge clk) disable iff (rst) valid && !ready |=> valid;
  endproperty
  a_bvalid_hold: assert property (p_hold(s_bvalid, s_bready));
  a_rvalid_hold: assert property (p_hold(s_rvalid, s_rready));
  a_rdata_stable: assert property (@(posedge clk) disable iff (rst)
                                   s_rvalid && !s_rready |=> $stable(s_rdata));

endmodule
