// tb_acw_write_ch -- self-checking test of the ACW write-side supervisor.
//
// The write channels are driven directly; the interconnect side is an
// axi_mem_model. The test checks:
//   Reset        AW and W are held off, nothing reaches the interconnect;
//   'go'         -> Supervising; a legal AW appears on m_aw one cycle after it
//                is accepted; its data is written to memory and an OKAY B
//                returns with its ID;
//   illegal AW   accepted right behind a legal AW whose data has not been
//                sent yet: the legal data still goes through, the illegal
//                burst's data is accepted and dropped (memory and beat count
//                unchanged), the legal B comes first, then one SLVERR B with
//                the illegal ID; irq rises and the anomaly record is emitted;
//   Decouple     AW held off; an early 'go' is held until the error B is out;
//   afterwards   a random mix of legal and illegal writes with a memory and
//                response scoreboard.
module tb_acw_write_ch;
  import acw_pkg::*;

  localparam int NR = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  region_t [NR-1:0] regions;
  logic      go;
  acw_mode_e mode;
  logic      irq, anom_valid;
  anomaly_t  anom;
  ax_t       s_aw, m_aw;
  w_t        s_w, m_w;
  b_t        s_b, m_b;
  logic      s_aw_valid, s_aw_ready, m_aw_valid, m_aw_ready;
  logic      s_w_valid, s_w_ready, m_w_valid, m_w_ready;
  logic      s_b_valid, s_b_ready, m_b_valid, m_b_ready;
  logic      ar_ready_u, r_valid_u;
  r_t        r_u;
  int        ar_cnt, aw_cnt, w_cnt;

  int checks = 0, failures = 0, cyc = 0;

  acw_write_ch #(.NUM_REGIONS(NR)) dut (
    .clk, .rst_n, .regions, .go, .mode, .irq, .anom_valid, .anom,
    .s_aw, .s_aw_valid, .s_aw_ready, .s_w, .s_w_valid, .s_w_ready,
    .s_b, .s_b_valid, .s_b_ready,
    .m_aw, .m_aw_valid, .m_aw_ready, .m_w, .m_w_valid, .m_w_ready,
    .m_b, .m_b_valid, .m_b_ready
  );

  axi_mem_model #(.B_DELAY(4)) mem (
    .clk, .rst_n,
    .ar('0), .ar_valid(1'b0), .ar_ready(ar_ready_u),
    .r(r_u), .r_valid(r_valid_u), .r_ready(1'b1),
    .aw(m_aw), .aw_valid(m_aw_valid), .aw_ready(m_aw_ready),
    .w(m_w), .w_valid(m_w_valid), .w_ready(m_w_ready),
    .b(m_b), .b_valid(m_b_valid), .b_ready(m_b_ready),
    .ar_cnt, .aw_cnt, .w_cnt
  );

  always @(posedge clk) cyc <= cyc + 1;

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL [%0d] %s", cyc, what); end
  endtask

  b_t bq[$];
  always @(posedge clk) if (rst_n && s_b_valid && s_b_ready) bq.push_back(s_b);
  anomaly_t anq[$];
  always @(posedge clk) if (rst_n && anom_valid) anq.push_back(anom);
  int leak_in_reset = 0;
  always @(posedge clk) if (rst_n && mode == MODE_RESET && (m_aw_valid || m_w_valid)) leak_in_reset++;

  function automatic ax_t mk(id_t id, addr_t a, int len);
    ax_t x = '0;
    x.id = id; x.addr = a; x.len = 8'(len); x.size = 3'd2; x.burst = BURST_INCR; x.prot = 3'b001;
    return x;
  endfunction

  function automatic data_t wdata(addr_t a, int i, data_t seed);
    return ((a >> 2) + addr_t'(i)) ^ seed;
  endfunction

  task automatic send_aw(ax_t x);
    @(negedge clk); s_aw = x; s_aw_valid = 1;
    forever begin #1; if (s_aw_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); s_aw_valid = 0; s_aw = '0;
  endtask

  task automatic send_w(addr_t a, int len, data_t seed);
    for (int i = 0; i <= len; i++) begin
      @(negedge clk); s_w = '{data: wdata(a, i, seed), strb: '1, last: (i == len)}; s_w_valid = 1;
      forever begin #1; if (s_w_ready) break; @(negedge clk); end
      @(posedge clk);
    end
    @(negedge clk); s_w_valid = 0; s_w = '0;
  endtask

  task automatic pulse_go();
    @(negedge clk); go = 1; @(negedge clk); go = 0;
  endtask

  task automatic wait_b(id_t id, bit err, string what);
    int t = 0;
    while (bq.size() == 0 && t < 2000) begin @(posedge clk); t++; end
    expect_true(bq.size() > 0, {what, ": B arrived"});
    if (bq.size() > 0) begin
      automatic b_t x = bq.pop_front();
      expect_true(x.id == id && x.resp == (err ? RESP_SLVERR : RESP_OKAY),
                  $sformatf("%s: B id %0d resp %0d", what, x.id, x.resp));
    end
  endtask

  task automatic check_mem(addr_t a, int len, data_t seed, string what);
    for (int i = 0; i <= len; i++)
      expect_true(mem.peek(a + addr_t'(4 * i)) == wdata(a, i, seed), $sformatf("%s: word %0d got %h exp %h", what, i, mem.peek(a + addr_t'(4 * i)), wdata(a, i, seed)));
  endtask

  task automatic check_untouched(addr_t a, int len, string what);
    for (int i = 0; i <= len; i++)
      expect_true(mem.peek(a + addr_t'(4 * i)) == (((a >> 2) + addr_t'(i)) ^ 32'hA5A5_0000),
                  $sformatf("%s: word %0d untouched", what, i));
  endtask

  initial begin
    regions    = '0;
    regions[1] = '{base: 32'h0008_0000, size: 32'h0000_2000};
    regions[3] = '{base: 32'h000A_0000, size: 32'h0000_0040};
    go = 0; s_aw = '0; s_aw_valid = 0; s_w = '0; s_w_valid = 0; s_b_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- Reset mode
    @(negedge clk);
    s_aw = mk(4'd1, 32'h0008_0000, 0); s_aw_valid = 1;
    s_w  = '{data: 32'hDEAD_BEEF, strb: '1, last: 1'b1}; s_w_valid = 1;
    for (int i = 0; i < 12; i++) begin
      #1;
      expect_true(!s_aw_ready && !s_w_ready && mode == MODE_RESET && !irq, "reset mode blocks AW and W");
      @(negedge clk);
    end
    s_aw_valid = 0; s_w_valid = 0;
    expect_true(aw_cnt == 0 && w_cnt == 0, "nothing reached the interconnect in reset");

    pulse_go();
    @(negedge clk);
    expect_true(mode == MODE_SUPERVISING, "go moves Reset -> Supervising");

    // ---------------- latency and a legal write
    begin
      automatic ax_t x = mk(4'd2, 32'h0008_0100, 7);
      @(negedge clk); s_aw = x; s_aw_valid = 1; #1;
      expect_true(s_aw_ready && !m_aw_valid, "legal AW accepted, not yet forwarded");
      @(negedge clk); s_aw_valid = 0; s_aw = '0; #1;
      expect_true(m_aw_valid && m_aw == x, "legal AW on m_aw one cycle after acceptance");
      send_w(32'h0008_0100, 7, 32'h1111_0000);
      wait_b(4'd2, 0, "legal write");
      check_mem(32'h0008_0100, 7, 32'h1111_0000, "legal write");
    end

    // ---------------- legal AW, illegal AW, then both data bursts
    begin
      int w_before;
      send_aw(mk(4'd3, 32'h000A_0000, 3));
      send_aw(mk(4'd7, 32'h000A_0030, 7));       // 32 bytes, crosses the 64-byte region
      #1;
      expect_true(mode == MODE_DECOUPLE && irq, "illegal AW -> Decouple, irq");
      expect_true(anq.size() == 1 && anq[0].addr == 32'h000A_0030 && anq[0].id == 4'd7 &&
                  anq[0].len == 8'd7 && anq[0].prot == 3'b001, "anomaly record");
      pulse_go();                                  // early readmission request
      w_before = w_cnt;
      send_w(32'h000A_0000, 3, 32'h2222_0000);     // legal data, coupled
      send_w(32'h000A_0030, 7, 32'h3333_0000);     // illegal data, dropped
      expect_true(w_cnt == w_before + 4, $sformatf("only the legal beats reached memory (%0d)", w_cnt - w_before));
      wait_b(4'd3, 0, "legal B before error B");
      wait_b(4'd7, 1, "error B");
      check_mem(32'h000A_0000, 3, 32'h2222_0000, "legal data");
      check_untouched(32'h000A_0040, 3, "dropped data beyond region");
      expect_true(aw_cnt == 2, "interconnect saw only the legal AWs");
      repeat (2) @(negedge clk);
      expect_true(mode == MODE_SUPERVISING && !irq, "held go readmits after error B");
    end

    // ---------------- Decouple blocks new AWs until go
    send_aw(mk(4'd8, 32'h0007_0000, 0));
    send_w(32'h0007_0000, 0, 32'h4444_0000);
    wait_b(4'd8, 1, "error B for write below region");
    @(negedge clk); s_aw = mk(4'd1, 32'h0008_0000, 0); s_aw_valid = 1;
    s_w = '{data: 32'h0, strb: '1, last: 1'b1}; s_w_valid = 1;
    for (int i = 0; i < 8; i++) begin #1; expect_true(!s_aw_ready && !s_w_ready, "decouple blocks AW and W"); @(negedge clk); end
    s_aw_valid = 0; s_w_valid = 0;
    pulse_go(); @(negedge clk);
    expect_true(mode == MODE_SUPERVISING, "readmission");

    // ---------------- random mix, data sent before or after AW acceptance
    for (int t = 0; t < 60; t++) begin
      automatic bit    legal_req = ($urandom_range(0, 3) != 0);
      automatic int    len = $urandom_range(0, 15);
      automatic addr_t a = legal_req ? (32'h0008_0000 + 32'($urandom_range(0, 2048 - 16)) * 4)
                           : (32'h0009_0000 + 32'($urandom_range(0, 1000)) * 4);
      automatic id_t   id = 4'($urandom());
      automatic data_t seed = $urandom();
      fork
        send_aw(mk(id, a, len));
        send_w(a, len, seed);
      join
      wait_b(id, !legal_req, legal_req ? "random legal" : "random illegal");
      if (legal_req) check_mem(a, len, seed, "random legal");
      else begin
        check_untouched(a, len, "random illegal");
        pulse_go(); @(negedge clk);
        expect_true(mode == MODE_SUPERVISING, "random readmission");
      end
    end

    expect_true(leak_in_reset == 0, "nothing offered to the interconnect in Reset mode");
    expect_true(bq.size() == 0, "no stray B");
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
