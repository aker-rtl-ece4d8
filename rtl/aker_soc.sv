// aker_soc -- an access control system built from Access Control Wrappers.
//
// NUM_ACW untrusted AXI4 controllers each reach the shared interconnect only
// through their own ACW, which filters every request at the source against
// that controller's local access control policy: illegal requests never enter
// the interconnect, so they cannot take bandwidth from the other controllers.
// A Trusted Entity (for instance a hardware root of trust) programs all ACWs
// over one AXI-lite control bus and receives their interrupt lines.
//
// Ports (arrays indexed by controller i):
//   c_*   controller side: connects to controller i's AXI4 manager port;
//   ic_*  interconnect side: connects to subordinate port i of the AXI
//         interconnect (the interconnect and the peripherals are outside);
//   te_*  AXI-lite port for the Trusted Entity's manager port. ACW i's
//         registers sit at byte offset i*4096 (see acw_ctrl_bus, acw_pkg);
//   irq_rd[i], irq_wr[i]: high while ACW i's read / write side is decoupled.
//
// Timing: each AR and AW of every controller is delayed by one clock cycle;
// data and responses are not delayed.
//
// Follows the paper's system figure: one ACW per controller placed in front
// of the interconnect, a control bus and interrupt lines to the TE. The
// default of three controllers is the paper's FPGA evaluation system. The
// region counts per direction default to 16, the largest configuration in
// the paper's resource table. The widths are this design's own choice.
module aker_soc
  import acw_pkg::*;
#(
  parameter int unsigned NUM_ACW         = 3,
  parameter int unsigned NUM_RD_REGIONS  = 16,
  parameter int unsigned NUM_WR_REGIONS  = 16,
  parameter int unsigned MAX_OUTSTANDING = 255
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // controllers
  input  ax_t  [NUM_ACW-1:0]     c_aw,
  input  logic [NUM_ACW-1:0]     c_aw_valid,
  output logic [NUM_ACW-1:0]     c_aw_ready,
  input  w_t   [NUM_ACW-1:0]     c_w,
  input  logic [NUM_ACW-1:0]     c_w_valid,
  output logic [NUM_ACW-1:0]     c_w_ready,
  output b_t   [NUM_ACW-1:0]     c_b,
  output logic [NUM_ACW-1:0]     c_b_valid,
  input  logic [NUM_ACW-1:0]     c_b_ready,
  input  ax_t  [NUM_ACW-1:0]     c_ar,
  input  logic [NUM_ACW-1:0]     c_ar_valid,
  output logic [NUM_ACW-1:0]     c_ar_ready,
  output r_t   [NUM_ACW-1:0]     c_r,
  output logic [NUM_ACW-1:0]     c_r_valid,
  input  logic [NUM_ACW-1:0]     c_r_ready,
  // interconnect
  output ax_t  [NUM_ACW-1:0]     ic_aw,
  output logic [NUM_ACW-1:0]     ic_aw_valid,
  input  logic [NUM_ACW-1:0]     ic_aw_ready,
  output w_t   [NUM_ACW-1:0]     ic_w,
  output logic [NUM_ACW-1:0]     ic_w_valid,
  input  logic [NUM_ACW-1:0]     ic_w_ready,
  input  b_t   [NUM_ACW-1:0]     ic_b,
  input  logic [NUM_ACW-1:0]     ic_b_valid,
  output logic [NUM_ACW-1:0]     ic_b_ready,
  output ax_t  [NUM_ACW-1:0]     ic_ar,
  output logic [NUM_ACW-1:0]     ic_ar_valid,
  input  logic [NUM_ACW-1:0]     ic_ar_ready,
  input  r_t   [NUM_ACW-1:0]     ic_r,
  input  logic [NUM_ACW-1:0]     ic_r_valid,
  output logic [NUM_ACW-1:0]     ic_r_ready,
  // Trusted Entity
  input  logic [31:0]            te_aw_addr,
  input  logic                   te_aw_valid,
  output logic                   te_aw_ready,
  input  lite_w_t                te_w,
  input  logic                   te_w_valid,
  output logic                   te_w_ready,
  output logic [1:0]             te_b_resp,
  output logic                   te_b_valid,
  input  logic                   te_b_ready,
  input  logic [31:0]            te_ar_addr,
  input  logic                   te_ar_valid,
  output logic                   te_ar_ready,
  output lite_r_t                te_r,
  output logic                   te_r_valid,
  input  logic                   te_r_ready,
  output logic [NUM_ACW-1:0]     irq_rd,
  output logic [NUM_ACW-1:0]     irq_wr
);

  lite_ax_t [NUM_ACW-1:0]      cfg_aw, cfg_ar;
  lite_w_t  [NUM_ACW-1:0]      cfg_w;
  lite_r_t  [NUM_ACW-1:0]      cfg_r;
  logic     [NUM_ACW-1:0][1:0] cfg_b_resp;
  logic     [NUM_ACW-1:0]      cfg_aw_valid, cfg_aw_ready, cfg_w_valid, cfg_w_ready;
  logic     [NUM_ACW-1:0]      cfg_b_valid, cfg_b_ready, cfg_ar_valid, cfg_ar_ready;
  logic     [NUM_ACW-1:0]      cfg_r_valid, cfg_r_ready;

  acw_ctrl_bus #(.NUM_ACW(NUM_ACW)) u_ctrl_bus (
    .clk, .rst_n,
    .te_aw_addr, .te_aw_valid, .te_aw_ready, .te_w, .te_w_valid, .te_w_ready,
    .te_b_resp, .te_b_valid, .te_b_ready,
    .te_ar_addr, .te_ar_valid, .te_ar_ready, .te_r, .te_r_valid, .te_r_ready,
    .acw_aw(cfg_aw), .acw_aw_valid(cfg_aw_valid), .acw_aw_ready(cfg_aw_ready),
    .acw_w(cfg_w), .acw_w_valid(cfg_w_valid), .acw_w_ready(cfg_w_ready),
    .acw_b_resp(cfg_b_resp), .acw_b_valid(cfg_b_valid), .acw_b_ready(cfg_b_ready),
    .acw_ar(cfg_ar), .acw_ar_valid(cfg_ar_valid), .acw_ar_ready(cfg_ar_ready),
    .acw_r(cfg_r), .acw_r_valid(cfg_r_valid), .acw_r_ready(cfg_r_ready)
  );

  for (genvar i = 0; i < NUM_ACW; i++) begin : g_acw
    acw #(
      .NUM_RD_REGIONS(NUM_RD_REGIONS),
      .NUM_WR_REGIONS(NUM_WR_REGIONS),
      .MAX_OUTSTANDING(MAX_OUTSTANDING)
    ) u_acw (
      .clk, .rst_n,
      .s_aw(c_aw[i]), .s_aw_valid(c_aw_valid[i]), .s_aw_ready(c_aw_ready[i]),
      .s_w(c_w[i]),   .s_w_valid(c_w_valid[i]),   .s_w_ready(c_w_ready[i]),
      .s_b(c_b[i]),   .s_b_valid(c_b_valid[i]),   .s_b_ready(c_b_ready[i]),
      .s_ar(c_ar[i]), .s_ar_valid(c_ar_valid[i]), .s_ar_ready(c_ar_ready[i]),
      .s_r(c_r[i]),   .s_r_valid(c_r_valid[i]),   .s_r_ready(c_r_ready[i]),
      .m_aw(ic_aw[i]), .m_aw_valid(ic_aw_valid[i]), .m_aw_ready(ic_aw_ready[i]),
      .m_w(ic_w[i]),   .m_w_valid(ic_w_valid[i]),   .m_w_ready(ic_w_ready[i]),
      .m_b(ic_b[i]),   .m_b_valid(ic_b_valid[i]),   .m_b_ready(ic_b_ready[i]),
      .m_ar(ic_ar[i]), .m_ar_valid(ic_ar_valid[i]), .m_ar_ready(ic_ar_ready[i]),
      .m_r(ic_r[i]),   .m_r_valid(ic_r_valid[i]),   .m_r_ready(ic_r_ready[i]),
      .cfg_aw(cfg_aw[i]), .cfg_aw_valid(cfg_aw_valid[i]), .cfg_aw_ready(cfg_aw_ready[i]),
      .cfg_w(cfg_w[i]),   .cfg_w_valid(cfg_w_valid[i]),   .cfg_w_ready(cfg_w_ready[i]),
      .cfg_b_resp(cfg_b_resp[i]), .cfg_b_valid(cfg_b_valid[i]), .cfg_b_ready(cfg_b_ready[i]),
      .cfg_ar(cfg_ar[i]), .cfg_ar_valid(cfg_ar_valid[i]), .cfg_ar_ready(cfg_ar_ready[i]),
      .cfg_r(cfg_r[i]),   .cfg_r_valid(cfg_r_valid[i]),   .cfg_r_ready(cfg_r_ready[i]),
      .irq_rd(irq_rd[i]), .irq_wr(irq_wr[i])
    );
  end

endmodule
