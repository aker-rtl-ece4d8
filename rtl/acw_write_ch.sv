// acw_write_ch -- write-side supervisor of the Access Control Wrapper.
//
// Sits between the wrapped controller's AW/W/B channels (s_*) and the
// interconnect (m_*). It holds the write operating mode, with the same three
// modes as the read side:
//   RESET       (2'b00) every AW and W is held off.
//   SUPERVISING (2'b01) each AW is checked against the write regions while it
//               is accepted; a legal AW is stored in a one-entry sample
//               register and offered to the interconnect on the next cycle.
//               An illegal AW is never forwarded; its attributes go out on
//               anom_* and the mode becomes DECOUPLE.
//   DECOUPLE    (2'b10) no AW is accepted; irq is high.
// W switch ("couple/decouple"): AXI4 write data follows the order of the
// write addresses, so the module counts legal bursts whose data has not yet
// gone through. While that count is non-zero, W is coupled to the
// interconnect. Once it reaches zero and an illegal burst is pending, W is
// decoupled: the controller's data beats are accepted and dropped up to and
// including WLAST, because an AXI burst cannot be aborted. W beats with no
// accepted burst to belong to are held off.
// B switch: B from the interconnect reaches the controller only while a
// forwarded burst still owes its response. After the dropped data and every
// earlier legal response, the module returns one SLVERR B with the illegal
// burst's ID.
// A 'go' pulse moves RESET -> SUPERVISING, and DECOUPLE -> SUPERVISING once
// the error response is out (an early 'go' is held until then).
//
// Timing: AW accepted in cycle t appears on m_aw in cycle t+1; W and B are
// combinational pass-throughs.
// anom carries the fields of the request being accepted, straight from s_aw;
// it is meaningful only in the cycle anom_valid is high.
//
// Follows the paper: modes, parallel region check, blocking, sampling and
// discarding the data of an illegal write, AXI error reply, completion of
// earlier legal transactions, interrupt, one cycle of added latency. This
// design's own choices: holding W until its AW is accepted, ending the
// dropped burst at WLAST, and waiting for all earlier responses before the
// error B.
module acw_write_ch
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
  // controller side
  input  ax_t                       s_aw,
  input  logic                      s_aw_valid,
  output logic                      s_aw_ready,
  input  w_t                        s_w,
  input  logic                      s_w_valid,
  output logic                      s_w_ready,
  output b_t                        s_b,
  output logic                      s_b_valid,
  input  logic                      s_b_ready,
  // interconnect side
  output ax_t                       m_aw,
  output logic                      m_aw_valid,
  input  logic                      m_aw_ready,
  output w_t                        m_w,
  output logic                      m_w_valid,
  input  logic                      m_w_ready,
  input  b_t                        m_b,
  input  logic                      m_b_valid,
  output logic                      m_b_ready
);

  localparam int unsigned CNT_W = $clog2(MAX_OUTSTANDING + 1);

  acw_mode_e        mode_q;
  logic             go_q;
  logic             slot_v;
  ax_t              slot_ax;
  logic [CNT_W-1:0] w_owed;      // legal bursts whose W data is not through yet
  logic [CNT_W-1:0] b_owed;      // forwarded bursts without their B
  logic             err_pend;    // illegal AW not yet answered
  logic             err_wdone;   // its W data has been dropped
  id_t              err_id;

  logic legal, accept, fwd, w_couple, w_sink, w_hs, b_pass, err_send, err_hs, readmit;

  acw_region_check #(.NUM_REGIONS(NUM_REGIONS)) u_legal (
    .ax(s_aw), .regions(regions), .legal(legal), .match()
  );

  // --------------------------------------------------------------- AW path
  assign s_aw_ready = (mode_q == MODE_SUPERVISING) && (!slot_v || m_aw_ready) &&
                      (32'(b_owed) + 32'(slot_v) < MAX_OUTSTANDING) &&
                      (32'(w_owed) < MAX_OUTSTANDING);
  assign accept     = s_aw_valid && s_aw_ready;
  assign m_aw_valid = slot_v;
  assign m_aw       = slot_v ? slot_ax : '0;
  assign fwd        = slot_v && m_aw_ready;

  assign anom_valid = accept && !legal;
  always_comb begin
    anom       = '0;
    anom.addr  = s_aw.addr;
    anom.id    = s_aw.id;
    anom.len   = s_aw.len;
    anom.size  = s_aw.size;
    anom.burst = s_aw.burst;
    anom.prot  = s_aw.prot;
  end

  // --------------------------------------------------------------- W couple/decouple
  assign w_couple = (w_owed != '0);
  assign w_sink   = !w_couple && err_pend && !err_wdone;

  always_comb begin
    m_w       = '0;
    m_w_valid = 1'b0;
    s_w_ready = 1'b0;
    if (w_couple) begin
      m_w       = s_w;
      m_w_valid = s_w_valid;
      s_w_ready = m_w_ready;
    end else if (w_sink) begin
      s_w_ready = 1'b1;           // sample and drop
    end
  end
  assign w_hs = s_w_valid && s_w_ready;

  // --------------------------------------------------------------- B switch
  assign b_pass   = (b_owed != '0);
  assign err_send = err_pend && err_wdone && !b_pass && !slot_v;
  assign err_hs   = err_send && s_b_ready;

  always_comb begin
    s_b       = '0;
    s_b_valid = 1'b0;
    m_b_ready = 1'b0;
    if (b_pass) begin
      s_b       = m_b;
      s_b_valid = m_b_valid;
      m_b_ready = s_b_ready;
    end else if (err_send) begin
      s_b.id    = err_id;
      s_b.resp  = RESP_SLVERR;
      s_b_valid = 1'b1;
    end
  end

  // --------------------------------------------------------------- mode FSM
  assign readmit = go_q && (mode_q == MODE_RESET ||
                            (mode_q == MODE_DECOUPLE && !err_pend));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q    <= MODE_RESET;
      go_q      <= 1'b0;
      slot_v    <= 1'b0;
      slot_ax   <= '0;
      w_owed    <= '0;
      b_owed    <= '0;
      err_pend  <= 1'b0;
      err_wdone <= 1'b0;
      err_id    <= '0;
    end else begin
      if (readmit)                               go_q <= 1'b0;
      else if (go && mode_q != MODE_SUPERVISING) go_q <= 1'b1;

      if (readmit) mode_q <= MODE_SUPERVISING;
      else if (accept && !legal) mode_q <= MODE_DECOUPLE;

      if (accept && legal) begin
        slot_v  <= 1'b1;
        slot_ax <= s_aw;
      end else if (fwd) begin
        slot_v  <= 1'b0;
        slot_ax <= '0;
      end

      w_owed <= w_owed + CNT_W'(accept && legal) - CNT_W'(w_couple && w_hs && s_w.last);
      b_owed <= b_owed + CNT_W'(fwd) - CNT_W'(b_pass && m_b_valid && s_b_ready);

      if (accept && !legal) begin
        err_pend  <= 1'b1;
        err_wdone <= 1'b0;
        err_id    <= s_aw.id;
      end else begin
        if (w_sink && w_hs && s_w.last) err_wdone <= 1'b1;
        if (err_hs) begin
          err_pend  <= 1'b0;
          err_wdone <= 1'b0;
        end
      end
    end
  end

  assign mode = mode_q;
  assign irq  = (mode_q == MODE_DECOUPLE);

  // --------------------------------------------------------------- protocol rules
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_aw_valid && !m_aw_ready |=> m_aw_valid && $stable(m_aw));
  a_block: assert property (@(posedge clk) disable iff (!rst_n)
    (mode_q != MODE_SUPERVISING) |-> !s_aw_ready);
  a_no_w_in_reset: assert property (@(posedge clk) disable iff (!rst_n)
    (mode_q == MODE_RESET) |-> !m_w_valid);
  a_irq: assert property (@(posedge clk) disable iff (!rst_n)
    irq == (mode_q == MODE_DECOUPLE));

endmodule
