// tb_acw_read_ch -- self-checking test of the ACW read-side supervisor.
//
// The read channel is driven directly; the interconnect side is an
// axi_mem_model with a long read delay so that several bursts are
// outstanding. The test walks through the modes:
//   Reset        ARs are held off, nothing reaches the interconnect;
//   'go'         -> Supervising; a legal AR appears on m_ar exactly one cycle
//                after it is accepted, with the same payload; its data returns;
//   illegal AR   while three legal bursts are outstanding: it is not
//                forwarded, the anomaly record is emitted, irq rises, the
//                three legal bursts complete with OKAY, then an error burst of
//                len+1 SLVERR beats with the illegal ID follows;
//   Decouple     a further AR is held off; an early 'go' is held until the
//                error burst is out, then the channel is readmitted;
//   afterwards   legal reads work again, and a random mix of legal and
//                illegal requests is checked against a response scoreboard.
module tb_acw_read_ch;
  import acw_pkg::*;

  localparam int NR = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  region_t [NR-1:0] regions;
  logic      go;
  acw_mode_e mode;
  logic      irq, anom_valid;
  anomaly_t  anom;
  ax_t       s_ar, m_ar;
  logic      s_ar_valid, s_ar_ready, m_ar_valid, m_ar_ready;
  r_t        s_r, m_r;
  logic      s_r_valid, s_r_ready, m_r_valid, m_r_ready;
  logic      aw_ready_u, w_ready_u, b_valid_u;
  b_t        b_u;
  int        ar_cnt, aw_cnt, w_cnt;

  int checks = 0, failures = 0, cyc = 0;

  acw_read_ch #(.NUM_REGIONS(NR)) dut (
    .clk, .rst_n, .regions, .go, .mode, .irq, .anom_valid, .anom,
    .s_ar, .s_ar_valid, .s_ar_ready, .s_r, .s_r_valid, .s_r_ready,
    .m_ar, .m_ar_valid, .m_ar_ready, .m_r, .m_r_valid, .m_r_ready
  );

  axi_mem_model #(.R_DELAY(8)) mem (
    .clk, .rst_n,
    .ar(m_ar), .ar_valid(m_ar_valid), .ar_ready(m_ar_ready),
    .r(m_r), .r_valid(m_r_valid), .r_ready(m_r_ready),
    .aw('0), .aw_valid(1'b0), .aw_ready(aw_ready_u),
    .w('0), .w_valid(1'b0), .w_ready(w_ready_u),
    .b(b_u), .b_valid(b_valid_u), .b_ready(1'b1),
    .ar_cnt, .aw_cnt, .w_cnt
  );

  always @(posedge clk) cyc <= cyc + 1;

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL [%0d] %s", cyc, what); end
  endtask

  // ---------------------------------------------------------------- R monitor
  r_t rq[$];
  always @(posedge clk) if (rst_n && s_r_valid && s_r_ready) rq.push_back(s_r);

  // Reset mode must never pass anything to the interconnect.
  int leak_in_reset = 0;
  always @(posedge clk) if (rst_n && mode == MODE_RESET && m_ar_valid) leak_in_reset++;

  // anomaly pulses
  anomaly_t anq[$];
  always @(posedge clk) if (rst_n && anom_valid) anq.push_back(anom);

  function automatic ax_t mk(id_t id, addr_t a, int len);
    ax_t x = '0;
    x.id = id; x.addr = a; x.len = 8'(len); x.size = 3'd2; x.burst = BURST_INCR; x.prot = 3'b010;
    return x;
  endfunction

  // Presents x until accepted. Returns after the accepting clock edge.
  task automatic send_ar(ax_t x);
    @(negedge clk); s_ar = x; s_ar_valid = 1;
    forever begin #1; if (s_ar_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); s_ar_valid = 0; s_ar = '0;
  endtask

  task automatic pulse_go();
    @(negedge clk); go = 1; @(negedge clk); go = 0;
  endtask

  // Waits for n complete bursts in rq and checks them against the expectations.
  task automatic check_burst(id_t id, addr_t a, int len, bit err, string what);
    int t = 0;
    while (rq.size() < len + 1 && t < 2000) begin @(posedge clk); t++; end
    expect_true(rq.size() >= len + 1, {what, ": burst arrived"});
    for (int i = 0; i <= len && rq.size() > 0; i++) begin
      automatic r_t x = rq.pop_front();
      expect_true(x.id == id, $sformatf("%s: beat %0d id %0d exp %0d", what, i, x.id, id));
      expect_true(x.last == (i == len), $sformatf("%s: beat %0d last", what, i));
      if (err) expect_true(x.resp == RESP_SLVERR && x.data == '0, $sformatf("%s: beat %0d SLVERR", what, i));
      else     expect_true(x.resp == RESP_OKAY && x.data == (((a >> 2) + addr_t'(i)) ^ 32'hA5A5_0000),
                           $sformatf("%s: beat %0d data %h", what, i, x.data));
    end
  endtask

  initial begin
    regions    = '0;
    regions[0] = '{base: 32'h0001_0000, size: 32'h0000_1000};
    regions[2] = '{base: 32'h0004_0000, size: 32'h0000_0100};
    go = 0; s_ar = '0; s_ar_valid = 0; s_r_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- Reset mode: requests blocked
    @(negedge clk); s_ar = mk(4'd1, 32'h0001_0000, 3); s_ar_valid = 1;
    for (int i = 0; i < 12; i++) begin
      #1;
      expect_true(!s_ar_ready && !m_ar_valid && mode == MODE_RESET && !irq, "reset mode blocks AR");
      @(negedge clk);
    end
    s_ar_valid = 0;
    expect_true(ar_cnt == 0, "nothing reached the interconnect in reset");

    // ---------------- go -> Supervising
    pulse_go();
    @(negedge clk);
    expect_true(mode == MODE_SUPERVISING, "go moves Reset -> Supervising");

    // ---------------- one cycle of latency on a legal AR
    begin
      automatic ax_t x = mk(4'd3, 32'h0001_0040, 7);
      @(negedge clk); s_ar = x; s_ar_valid = 1; #1;
      expect_true(s_ar_ready && !m_ar_valid, "legal AR accepted, not yet forwarded");
      @(negedge clk); s_ar_valid = 0; s_ar = '0; #1;
      expect_true(m_ar_valid && m_ar == x, "legal AR on m_ar one cycle after acceptance");
      check_burst(4'd3, 32'h0001_0040, 7, 0, "legal read");
    end

    // ---------------- illegal AR behind three outstanding legal bursts, early go
    begin
      automatic ax_t bad = mk(4'd9, 32'h0001_0FF8, 3);   // 16 bytes, crosses the region end
      send_ar(mk(4'd4, 32'h0001_0100, 3));
      send_ar(mk(4'd5, 32'h0004_0000, 15));
      send_ar(mk(4'd6, 32'h0001_0200, 0));
      send_ar(bad);
      #1;
      expect_true(mode == MODE_DECOUPLE && irq, "illegal AR -> Decouple, irq");
      expect_true(anq.size() == 1 && anq[0].addr == bad.addr && anq[0].id == bad.id &&
                  anq[0].len == bad.len && anq[0].prot == bad.prot, "anomaly record");
      expect_true(rq.size() == 0, "no response yet (legal bursts still outstanding)");
      pulse_go();                                 // early readmission request
      // further ARs are held off
      @(negedge clk); s_ar = mk(4'd1, 32'h0001_0000, 0); s_ar_valid = 1;
      for (int i = 0; i < 5; i++) begin #1; expect_true(!s_ar_ready, "decouple blocks AR"); @(negedge clk); end
      s_ar_valid = 0; s_ar = '0;
      check_burst(4'd4, 32'h0001_0100, 3, 0, "outstanding 1");
      check_burst(4'd5, 32'h0004_0000, 15, 0, "outstanding 2");
      expect_true(mode == MODE_DECOUPLE, "still decoupled while error burst owed");
      check_burst(4'd6, 32'h0001_0200, 0, 0, "outstanding 3");
      check_burst(4'd9, 32'h0, 3, 1, "error burst");
      expect_true(ar_cnt == 4, $sformatf("interconnect saw only legal ARs (%0d)", ar_cnt));
      repeat (2) @(negedge clk);
      expect_true(mode == MODE_SUPERVISING && !irq, "held go readmits after error burst");
    end

    // ---------------- readmitted: legal read works, with back-pressure on R
    fork
      begin
        for (int i = 0; i < 40; i++) begin @(negedge clk); s_r_ready = ($urandom_range(0, 2) != 0); end
        s_r_ready = 1;
      end
      begin
        send_ar(mk(4'd2, 32'h0001_0800, 15));
        check_burst(4'd2, 32'h0001_0800, 15, 0, "read after readmission");
      end
    join

    // ---------------- random mix: each illegal request needs a readmission
    for (int t = 0; t < 60; t++) begin
      automatic bit    legal_req = ($urandom_range(0, 3) != 0);
      automatic int    len = $urandom_range(0, 15);
      automatic addr_t a = legal_req ? (32'h0001_0000 + 32'($urandom_range(0, 1024 - 16)) * 4)
                           : (32'h0002_0000 + 32'($urandom_range(0, 1000)) * 4);
      automatic id_t   id = 4'($urandom());
      send_ar(mk(id, a, len));
      if (!legal_req) begin
        #1; expect_true(mode == MODE_DECOUPLE && irq, "random illegal -> Decouple");
      end
      check_burst(id, a, len, !legal_req, legal_req ? "random legal" : "random illegal");
      if (!legal_req) begin
        pulse_go(); @(negedge clk);
        expect_true(mode == MODE_SUPERVISING, "random readmission");
      end
    end

    expect_true(leak_in_reset == 0, "no request offered to the interconnect in Reset mode");
    expect_true(rq.size() == 0, "no stray R beats");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
