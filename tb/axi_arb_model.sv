// axi_arb_model -- behavioural two-to-one AXI4 arbiter for the testbenches.
//
// Stands in for a shared interconnect in front of one memory: two controller
// ports compete for one subordinate port, so traffic from one controller can
// delay the other. Reads and writes are arbitrated separately. While a
// direction is free, the request of the port that did not win last time goes
// first (round robin); the winner then owns that direction until its last R
// beat (reads) or its B (writes) has been handshaken, and only the owner's W
// beats are passed. Routing is combinational, so a request on a free
// direction costs no extra cycle. It counts the requests it granted to each
// port, which shows whether anything from a port reached the shared memory.
// Not synthesizable: a test model with one burst per direction in flight.
module axi_arb_model
  import acw_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // two controller-side ports
  input  ax_t  [1:0] s_ar,
  input  logic [1:0] s_ar_valid,
  output logic [1:0] s_ar_ready,
  output r_t   [1:0] s_r,
  output logic [1:0] s_r_valid,
  input  logic [1:0] s_r_ready,
  input  ax_t  [1:0] s_aw,
  input  logic [1:0] s_aw_valid,
  output logic [1:0] s_aw_ready,
  input  w_t   [1:0] s_w,
  input  logic [1:0] s_w_valid,
  output logic [1:0] s_w_ready,
  output b_t   [1:0] s_b,
  output logic [1:0] s_b_valid,
  input  logic [1:0] s_b_ready,
  // shared memory-side port
  output ax_t        m_ar,
  output logic       m_ar_valid,
  input  logic       m_ar_ready,
  input  r_t         m_r,
  input  logic       m_r_valid,
  output logic       m_r_ready,
  output ax_t        m_aw,
  output logic       m_aw_valid,
  input  logic       m_aw_ready,
  output w_t         m_w,
  output logic       m_w_valid,
  input  logic       m_w_ready,
  input  b_t         m_b,
  input  logic       m_b_valid,
  output logic       m_b_ready,
  // requests granted per port
  output int         ar_grants [2],
  output int         aw_grants [2]
);

  logic rd_busy, rd_own, rd_prio, wr_busy, wr_own, wr_prio;
  logic rd_sel, wr_sel;

  always_comb begin
    rd_sel = rd_busy ? rd_own : (s_ar_valid[rd_prio] ? rd_prio : !rd_prio);
    wr_sel = wr_busy ? wr_own : (s_aw_valid[wr_prio] ? wr_prio : !wr_prio);

    m_ar       = s_ar[rd_sel];
    m_ar_valid = !rd_busy && s_ar_valid[rd_sel];
    m_aw       = s_aw[wr_sel];
    m_aw_valid = !wr_busy && s_aw_valid[wr_sel];
    m_w        = s_w[wr_own];
    m_w_valid  = wr_busy && s_w_valid[wr_own];
    m_r_ready  = rd_busy && s_r_ready[rd_own];
    m_b_ready  = wr_busy && s_b_ready[wr_own];
    for (int p = 0; p < 2; p++) begin
      s_ar_ready[p] = !rd_busy && rd_sel == 1'(p) && m_ar_ready;
      s_aw_ready[p] = !wr_busy && wr_sel == 1'(p) && m_aw_ready;
      s_w_ready[p]  = wr_busy && wr_own == 1'(p) && m_w_ready;
      s_r[p]        = (rd_own == 1'(p)) ? m_r : '0;
      s_r_valid[p]  = rd_busy && rd_own == 1'(p) && m_r_valid;
      s_b[p]        = (wr_own == 1'(p)) ? m_b : '0;
      s_b_valid[p]  = wr_busy && wr_own == 1'(p) && m_b_valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 0; rd_own <= 0; rd_prio <= 0;
      wr_busy <= 0; wr_own <= 0; wr_prio <= 0;
      ar_grants <= '{0, 0}; aw_grants <= '{0, 0};
    end else begin
      if (m_ar_valid && m_ar_ready) begin
        rd_busy <= 1; rd_own <= rd_sel; rd_prio <= !rd_sel;
        ar_grants[rd_sel] <= ar_grants[rd_sel] + 1;
      end else if (m_r_valid && m_r_ready && m_r.last) begin
        rd_busy <= 0;
      end
      if (m_aw_valid && m_aw_ready) begin
        wr_busy <= 1; wr_own <= wr_sel; wr_prio <= !wr_sel;
        aw_grants[wr_sel] <= aw_grants[wr_sel] + 1;
      end else if (m_b_valid && m_b_ready) begin
        wr_busy <= 0;
      end
    end
  end

endmodule
