// axi_mem_model -- behavioural AXI4 subordinate memory for the testbenches.
//
// Stands in for the interconnect plus a memory peripheral. Accepts any number
// of AR and AW requests (with random ready stalls when STALL_PCT > 0),
// answers reads in order after R_DELAY cycles, accepts write data for the
// oldest open AW and returns its B after B_DELAY cycles. Memory words that were
// never written read as mem_pattern(word address). Every request that reaches
// it is counted and logged in ar_log/aw_log, so a test can prove that an
// illegal request never arrived. Not synthesizable.
module axi_mem_model
  import acw_pkg::*;
#(
  parameter int R_DELAY   = 3,
  parameter int B_DELAY   = 2,
  parameter int STALL_PCT = 0,
  parameter bit DBG = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  ax_t  ar,
  input  logic ar_valid,
  output logic ar_ready,
  output r_t   r,
  output logic r_valid,
  input  logic r_ready,
  input  ax_t  aw,
  input  logic aw_valid,
  output logic aw_ready,
  input  w_t   w,
  input  logic w_valid,
  output logic w_ready,
  output b_t   b,
  output logic b_valid,
  input  logic b_ready,
  output int   ar_cnt,
  output int   aw_cnt,
  output int   w_cnt
);

  data_t mem [addr_t];
  ax_t   ar_log[$];
  ax_t   aw_log[$];

  function automatic data_t mem_pattern(addr_t word_addr);
    return word_addr ^ 32'hA5A5_0000;
  endfunction

  function automatic data_t peek(addr_t byte_addr);
    addr_t wa = byte_addr >> 2;
    return mem.exists(wa) ? mem[wa] : mem_pattern(wa);
  endfunction

  function automatic addr_t beat_addr(ax_t a, int n);
    longint bytes, total, start, aligned, wlo;
    bytes   = longint'(1) << a.size;
    total   = bytes * (int'(a.len) + 1);
    start   = longint'(a.addr);
    aligned = (start / bytes) * bytes;
    wlo     = (start / total) * total;
    if (n == 0 || a.burst == BURST_FIXED) return a.addr;
    if (a.burst == BURST_WRAP) return addr_t'(wlo + ((aligned - wlo + n * bytes) % total));
    return addr_t'(aligned + n * bytes);
  endfunction

  ax_t arq[$];
  int  ar_t[$];
  ax_t awq[$];
  b_t  bq[$];
  int  b_t_q[$];
  ax_t cur_r;
  bit  r_active;
  int  r_beat, w_beat, cyc;
  int  awq_n;

  assign w_ready = (awq_n > 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      arq.delete(); ar_t.delete(); awq.delete(); bq.delete(); b_t_q.delete();
      r_active = 0; r_beat = 0; w_beat = 0; cyc = 0; awq_n <= 0;
      ar_cnt <= 0; aw_cnt <= 0; w_cnt <= 0;
      ar_ready <= 1'b0; aw_ready <= 1'b0; r_valid <= 1'b0; b_valid <= 1'b0;
      r <= '0; b <= '0;
    end else begin
      cyc++;
      // ---- address channels
      if (ar_valid && ar_ready) begin
        arq.push_back(ar); ar_t.push_back(cyc); ar_log.push_back(ar);
        ar_cnt <= ar_cnt + 1;
      end
      if (aw_valid && aw_ready) begin
        awq.push_back(aw); aw_log.push_back(aw);
        aw_cnt <= aw_cnt + 1;
      end
      // ---- write data
      if (w_valid && w_ready) begin
        addr_t a;
        data_t old;
        a   = beat_addr(awq[0], w_beat) >> 2;
        old = mem.exists(a) ? mem[a] : mem_pattern(a);
        for (int k = 0; k < STRB_W; k++) if (w.strb[k]) old[8*k +: 8] = w.data[8*k +: 8];
        mem[a] = old;
        if (DBG) $display("[mem] t=%0t write word %h = %h last=%0d beat=%0d", $time, a, old, w.last, w_beat);
        w_cnt <= w_cnt + 1;
        if (w.last) begin
          bq.push_back('{id: awq[0].id, resp: RESP_OKAY}); b_t_q.push_back(cyc);
          void'(awq.pop_front());
          w_beat = 0;
        end else w_beat++;
      end
      // ---- write response
      if (b_valid && b_ready) begin
        void'(bq.pop_front()); void'(b_t_q.pop_front());
      end
      // ---- read data
      if (r_valid && r_ready) begin
        if (r.last) r_active = 0;
        else r_beat++;
      end
      if (!r_active && arq.size() > 0 && cyc - ar_t[0] >= R_DELAY) begin
        cur_r = arq.pop_front(); void'(ar_t.pop_front());
        r_active = 1; r_beat = 0;
      end
      awq_n <= awq.size();
      r_valid <= r_active;
      if (r_active) begin
        r.id   <= cur_r.id;
        r.data <= peek(beat_addr(cur_r, r_beat));
        r.resp <= RESP_OKAY;
        r.last <= (r_beat == int'(cur_r.len));
      end else r <= '0;
      b_valid <= (bq.size() > 0 && cyc - b_t_q[0] >= B_DELAY);
      b       <= (bq.size() > 0) ? bq[0] : '0;
      ar_ready <= ($urandom_range(0, 99) >= STALL_PCT);
      aw_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    end
  end

endmodule
