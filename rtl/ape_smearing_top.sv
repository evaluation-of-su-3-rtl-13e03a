// ape_smearing_top: the HBM -> kernel -> kernel -> HBM smearing pipeline.
//
// hbm_reader assembles sites from the HBM read ports; NKERNEL ape_kernel instances, each
// performing one complete APE smearing iteration, are chained by site streams so that
// iterations n, n+1, ... run concurrently on different parts of the lattice; hbm_writer
// returns the result to HBM, undoing the one-slice rotation each kernel adds.
// Ports: rd_* is the read side (beats of up to PORTS 512-bit words, see hbm_reader), wr_*
// the write side (per-lane strobe, word address and data, see hbm_writer), coef the staple
// weight (1.0 = plain sum of staples), done a one-cycle pulse when the last word of a pass
// has been accepted. The HBM itself and the host that fills it are outside this module.
// The kernel chain and the port count follow the source design (two chained iterations are
// its illustrated case; 8 HBM ports per chip region); lattice sizes are this design's
// defaults.
module ape_smearing_top
  import su3_pkg::*;
#(
  parameter int unsigned NKERNEL = 2,
  parameter int unsigned PORTS   = 8,
  parameter int unsigned LX      = 4,
  parameter int unsigned LY      = 4,
  parameter int unsigned LZ      = 4,
  parameter int unsigned LT      = 8,
  parameter int unsigned ADDR_W  = 32,
  localparam int unsigned CW     = $clog2(PORTS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  fp_t                           coef,
  input  logic                          rd_valid,
  input  logic [CW-1:0]                 rd_cnt,
  input  logic [PORTS-1:0][HBM_W-1:0]   rd_data,
  output logic                          rd_ready,
  output logic [PORTS-1:0]              wr_valid,
  output logic [PORTS-1:0][ADDR_W-1:0]  wr_addr,
  output logic [PORTS-1:0][HBM_W-1:0]   wr_data,
  input  logic                          wr_ready,
  output logic                          done
);

  logic  s_valid [NKERNEL+1];
  logic  s_ready [NKERNEL+1];
  site_t s_site  [NKERNEL+1];

  hbm_reader #(.PORTS(PORTS)) u_rd (
    .clk, .rst_n, .in_valid(rd_valid), .in_cnt(rd_cnt), .in_data(rd_data), .in_ready(rd_ready),
    .site_valid(s_valid[0]), .site(s_site[0]), .site_ready(s_ready[0])
  );

  for (genvar i = 0; i < NKERNEL; i++) begin : g_iter
    ape_kernel #(.LX(LX), .LY(LY), .LZ(LZ), .LT(LT)) u_kernel (
      .clk, .rst_n, .coef,
      .in_valid(s_valid[i]), .in_site(s_site[i]), .in_ready(s_ready[i]),
      .out_valid(s_valid[i+1]), .out_site(s_site[i+1]), .out_ready(s_ready[i+1])
    );
  end

  hbm_writer #(
    .PORTS(PORTS), .LX(LX), .LY(LY), .LZ(LZ), .LT(LT), .ROT(NKERNEL), .ADDR_W(ADDR_W)
  ) u_wr (
    .clk, .rst_n, .site_valid(s_valid[NKERNEL]), .site(s_site[NKERNEL]),
    .site_ready(s_ready[NKERNEL]), .out_valid(wr_valid), .out_addr(wr_addr),
    .out_data(wr_data), .out_ready(wr_ready), .done
  );

endmodule
