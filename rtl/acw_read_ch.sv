// acw_read_ch -- read-side supervisor of the Access Control Wrapper.
//
// Sits between the wrapped controller's AR/R channels (s_*) and the
// interconnect (m_*). It holds the read operating mode:
//   RESET       (2'b00) after reset: every AR is held off (s_ar_ready low).
//   SUPERVISING (2'b01) each AR is checked against the read regions while it
//               is accepted. A legal AR is stored in a one-entry sample
//               register and offered to the interconnect on the next cycle,
//               so the wrapper adds exactly one clock cycle per request. An
//               illegal AR is never forwarded: its attributes go out on
//               anom_* for the anomaly registers, the mode becomes DECOUPLE.
//   DECOUPLE    (2'b10) no AR is accepted; irq is high. Read bursts that were
//               forwarded before the illegal one finish normally. After the
//               last of them, the R switch answers the illegal AR itself with
//               len+1 beats of SLVERR (data zero, RLAST on the last beat).
// A 'go' pulse from the Trusted Entity moves RESET -> SUPERVISING, and moves
// DECOUPLE -> SUPERVISING (readmission) once the error burst has been sent; a
// 'go' that arrives earlier is held until then. The TE can also leave the
// channel in DECOUPLE for good by never sending 'go'.
//
// R beats from the interconnect reach the controller only while a forwarded
// burst is outstanding; otherwise the controller sees all-zero (default) R
// signals and the interconnect sees rready low. Outputs to the interconnect
// are all zero whenever no request is offered.
//
// Timing: AR accepted in cycle t appears on m_ar in cycle t+1; R is a
// combinational pass-through. Up to MAX_OUTSTANDING forwarded bursts may be
// outstanding.
// anom carries the fields of the request being accepted, straight from s_ar;
// it is meaningful only in the cycle anom_valid is high.
//
// Follows the paper: the three modes, checking in parallel against the read
// regions, blocking in Reset and Decouple, SLVERR-style AXI error to the
// controller, completion of earlier legal transactions, interrupt while
// decoupled, one cycle of added latency. This design's own choices: the
// one-entry sample register, waiting for all outstanding bursts before the
// error burst, and holding an early 'go'.
module acw_read_ch
  import acw_pkg::*;
#(
  parameter int unsigned NUM_REGIONS     = 16,
  parameter int unsigned MAX_OUTSTANDING = 255
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // policy and control
  input  region_t [NUM_REGIONS-1:0] regions,
  input  logic                      go,
  output acw_mode_e                 mode,
  output logic                      irq,
  output logic                      anom_valid,
  output anomaly_t                  anom,
  // controller side (ACW is the subordinate)
  input  ax_t                       s_ar,
  input  logic                      s_ar_valid,
  output logic                      s_ar_ready,
  output r_t                        s_r,
  output logic                      s_r_valid,
  input  logic                      s_r_ready,
  // interconnect side (ACW is the manager)
  output ax_t                       m_ar,
  output logic                      m_ar_valid,
  input  logic                      m_ar_ready,
  input  r_t                        m_r,
  input  logic                      m_r_valid,
  output logic                      m_r_ready
);

  localparam int unsigned CNT_W = $clog2(MAX_OUTSTANDING + 1);

  acw_mode_e        mode_q;
  logic             go_q;         // pending 'go' request
  logic             slot_v;       // sample register holds a legal AR
  ax_t              slot_ax;
  logic [CNT_W-1:0] outstanding;  // forwarded bursts without their last R beat
  logic             err_pend;     // illegal AR still to be answered
  id_t              err_id;
  logic [7:0]       err_left;     // beats of the error burst still to send

  logic legal, accept, fwd, r_pass, err_send, r_last_hs, err_hs, readmit;

  acw_region_check #(.NUM_REGIONS(NUM_REGIONS)) u_legal (
    .ax(s_ar), .regions(regions), .legal(legal), .match()
  );

  // --------------------------------------------------------------- AR path
  assign s_ar_ready = (mode_q == MODE_SUPERVISING) && (!slot_v || m_ar_ready) &&
                      (32'(outstanding) + 32'(slot_v) < MAX_OUTSTANDING);
  assign accept     = s_ar_valid && s_ar_ready;
  assign m_ar_valid = slot_v;
  assign m_ar       = slot_v ? slot_ax : '0;
  assign fwd        = slot_v && m_ar_ready;

  assign anom_valid = accept && !legal;
  always_comb begin
    anom       = '0;
    anom.addr  = s_ar.addr;
    anom.id    = s_ar.id;
    anom.len   = s_ar.len;
    anom.size  = s_ar.size;
    anom.burst = s_ar.burst;
    anom.prot  = s_ar.prot;
  end

  // --------------------------------------------------------------- R switch
  assign r_pass    = (outstanding != '0);
  assign err_send  = err_pend && !r_pass && !slot_v;
  assign r_last_hs = r_pass && m_r_valid && s_r_ready && m_r.last;
  assign err_hs    = err_send && s_r_ready;

  always_comb begin
    s_r       = '0;
    s_r_valid = 1'b0;
    m_r_ready = 1'b0;
    if (r_pass) begin
      s_r       = m_r;
      s_r_valid = m_r_valid;
      m_r_ready = s_r_ready;
    end else if (err_send) begin
      s_r.id    = err_id;
      s_r.resp  = RESP_SLVERR;
      s_r.last  = (err_left == 8'd0);
      s_r_valid = 1'b1;
    end
  end

  // --------------------------------------------------------------- mode FSM
  assign readmit = go_q && (mode_q == MODE_RESET ||
                            (mode_q == MODE_DECOUPLE && !err_pend));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q      <= MODE_RESET;
      go_q        <= 1'b0;
      slot_v      <= 1'b0;
      slot_ax     <= '0;
      outstanding <= '0;
      err_pend    <= 1'b0;
      err_id      <= '0;
      err_left    <= '0;
    end else begin
      // go requests are only meaningful outside Supervising mode
      if (readmit)                          go_q <= 1'b0;
      else if (go && mode_q != MODE_SUPERVISING) go_q <= 1'b1;

      if (readmit) mode_q <= MODE_SUPERVISING;
      else if (accept && !legal) mode_q <= MODE_DECOUPLE;

      // sample register
      if (accept && legal) begin
        slot_v  <= 1'b1;
        slot_ax <= s_ar;
      end else if (fwd) begin
        slot_v  <= 1'b0;
        slot_ax <= '0;
      end

      outstanding <= outstanding + CNT_W'(fwd) - CNT_W'(r_last_hs);

      // error responder
      if (accept && !legal) begin
        err_pend <= 1'b1;
        err_id   <= s_ar.id;
        err_left <= s_ar.len;
      end else if (err_hs) begin
        if (err_left == 8'd0) err_pend <= 1'b0;
        else                  err_left <= err_left - 8'd1;
      end
    end
  end

  assign mode = mode_q;
  assign irq  = (mode_q == MODE_DECOUPLE);

  // --------------------------------------------------------------- protocol rules
  // A request offered to the interconnect stays put until it is taken.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_ar_valid && !m_ar_ready |=> m_ar_valid && $stable(m_ar));
  // Nothing is accepted from the controller outside Supervising mode.
  a_block: assert property (@(posedge clk) disable iff (!rst_n)
    (mode_q != MODE_SUPERVISING) |-> !s_ar_ready);
  // The interrupt is up exactly in Decouple mode.
  a_irq: assert property (@(posedge clk) disable iff (!rst_n)
    irq == (mode_q == MODE_DECOUPLE));

endmodule
