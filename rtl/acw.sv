// acw -- Access Control Wrapper.
//
// Wraps one untrusted AXI4 controller. The controller's manager port connects
// to the s_* port here; the m_* port goes to the interconnect in its place.
// The Trusted Entity programs the local access control policy (read regions
// and write regions) and drives mode changes through the AXI-lite cfg_* port,
// and is told of illegal requests by two level interrupt lines, one per
// direction, each high while that direction is in Decouple mode.
//
// Inside: acw_regs (configuration + anomaly registers), acw_read_ch (AR check
// and sample, R switch with error responder) and acw_write_ch (AW check and
// sample, W couple/decouple, B switch with error responder). The read and
// write sides have separate operating modes, so an illegal read decouples
// the reads and an illegal write decouples the writes.
//
// Timing: one added clock cycle on AR and AW, whatever the number of regions;
// W, R and B pass combinationally.
//
// Follows the paper: the block structure of the wrapper (Regs, S port,
// Legal?/Sample, Couple/Decouple, Switch/ERR, M port), AXI M and AXI-lite S
// ports, separate read/write regions, read and write interrupt lines, modes
// per direction (the paper's properties refer to acw_w/r_state). This design's
// own choice: the two directions are readmitted separately.
module acw
  import acw_pkg::*;
#(
  parameter int unsigned NUM_RD_REGIONS  = 16,
  parameter int unsigned NUM_WR_REGIONS  = 16,
  parameter int unsigned MAX_OUTSTANDING = 255
) (
  input  logic     clk,
  input  logic     rst_n,
  // controller side: the wrapped controller's manager port
  input  ax_t      s_aw,
  input  logic     s_aw_valid,
  output logic     s_aw_ready,
  input  w_t       s_w,
  input  logic     s_w_valid,
  output logic     s_w_ready,
  output b_t       s_b,
  output logic     s_b_valid,
  input  logic     s_b_ready,
  input  ax_t      s_ar,
  input  logic     s_ar_valid,
  output logic     s_ar_ready,
  output r_t       s_r,
  output logic     s_r_valid,
  input  logic     s_r_ready,
  // interconnect side
  output ax_t      m_aw,
  output logic     m_aw_valid,
  input  logic     m_aw_ready,
  output w_t       m_w,
  output logic     m_w_valid,
  input  logic     m_w_ready,
  input  b_t       m_b,
  input  logic     m_b_valid,
  output logic     m_b_ready,
  output ax_t      m_ar,
  output logic     m_ar_valid,
  input  logic     m_ar_ready,
  input  r_t       m_r,
  input  logic     m_r_valid,
  output logic     m_r_ready,
  // configuration port (AXI-lite subordinate) from the Trusted Entity
  input  lite_ax_t cfg_aw,
  input  logic     cfg_aw_valid,
  output logic     cfg_aw_ready,
  input  lite_w_t  cfg_w,
  input  logic     cfg_w_valid,
  output logic     cfg_w_ready,
  output logic [1:0] cfg_b_resp,
  output logic     cfg_b_valid,
  input  logic     cfg_b_ready,
  input  lite_ax_t cfg_ar,
  input  logic     cfg_ar_valid,
  output logic     cfg_ar_ready,
  output lite_r_t  cfg_r,
  output logic     cfg_r_valid,
  input  logic     cfg_r_ready,
  // interrupt lines to the Trusted Entity
  output logic     irq_rd,
  output logic     irq_wr
);

  region_t [NUM_RD_REGIONS-1:0] rd_regions;
  region_t [NUM_WR_REGIONS-1:0] wr_regions;
  logic                         rd_go, wr_go, rd_anom_valid, wr_anom_valid;
  acw_mode_e                    rd_mode, wr_mode;
  anomaly_t                     rd_anom, wr_anom;

  acw_regs #(
    .NUM_RD_REGIONS(NUM_RD_REGIONS),
    .NUM_WR_REGIONS(NUM_WR_REGIONS)
  ) u_regs (
    .clk, .rst_n,
    .s_aw(cfg_aw), .s_aw_valid(cfg_aw_valid), .s_aw_ready(cfg_aw_ready),
    .s_w(cfg_w),   .s_w_valid(cfg_w_valid),   .s_w_ready(cfg_w_ready),
    .s_b_resp(cfg_b_resp), .s_b_valid(cfg_b_valid), .s_b_ready(cfg_b_ready),
    .s_ar(cfg_ar), .s_ar_valid(cfg_ar_valid), .s_ar_ready(cfg_ar_ready),
    .s_r(cfg_r),   .s_r_valid(cfg_r_valid),   .s_r_ready(cfg_r_ready),
    .rd_regions, .wr_regions, .rd_go, .wr_go, .rd_mode, .wr_mode,
    .rd_anom_valid, .rd_anom, .wr_anom_valid, .wr_anom
  );

  acw_read_ch #(
    .NUM_REGIONS(NUM_RD_REGIONS),
    .MAX_OUTSTANDING(MAX_OUTSTANDING)
  ) u_rd (
    .clk, .rst_n,
    .regions(rd_regions), .go(rd_go), .mode(rd_mode), .irq(irq_rd),
    .anom_valid(rd_anom_valid), .anom(rd_anom),
    .s_ar, .s_ar_valid, .s_ar_ready, .s_r, .s_r_valid, .s_r_ready,
    .m_ar, .m_ar_valid, .m_ar_ready, .m_r, .m_r_valid, .m_r_ready
  );

  acw_write_ch #(
    .NUM_REGIONS(NUM_WR_REGIONS),
    .MAX_OUTSTANDING(MAX_OUTSTANDING)
  ) u_wr (
    .clk, .rst_n,
    .regions(wr_regions), .go(wr_go), .mode(wr_mode), .irq(irq_wr),
    .anom_valid(wr_anom_valid), .anom(wr_anom),
    .s_aw, .s_aw_valid, .s_aw_ready, .s_w, .s_w_valid, .s_w_ready,
    .s_b, .s_b_valid, .s_b_ready,
    .m_aw, .m_aw_valid, .m_aw_ready, .m_w, .m_w_valid, .m_w_ready,
    .m_b, .m_b_valid, .m_b_ready
  );

endmodule
