// tb_aker_perf -- transfer-time cost of the access control wrappers.
//
// Runs the isolation workload of the FPGA evaluation: one DMA-like
// controller moves 16 words, 256 words, 4 KB, 32 KB, 256 KB and 2 MB, in
// bursts of at most 256 words, first writing and then reading back. The
// transfer runs twice with the same memory model and the same timing:
//   * through controller port 0 of aker_soc (default parameters, 16 + 16
//     regions, policy programmed by the testbench acting as Trusted Entity);
//   * through a second, identical controller wired straight to its own memory
//     (no access control), as the baseline.
// Both paths reach their memory through an identical two-port arbiter model
// (axi_arb_model), the stand-in for a shared interconnect.
// Checks: every burst succeeds with correct data on both paths, and the
// wrapped transfer takes exactly one clock cycle per burst longer than the
// baseline (the wrapper delays each AR and AW by one cycle and nothing else).
// The relative cost is printed for each size.
// Second phase, contention and denial of service: a second controller C2,
// behind ACW 1 on the arbiter's other port, keeps reading C1's buffer, which
// its policy forbids. It issues each new request as soon as the last error
// reply is in, and the testbench, acting as Trusted Entity, readmits it after
// every interrupt. C1's read time must be exactly its time alone, and no
// request of C2's may reach the arbiter. As a control, C2 then reads its own
// buffer legally during C1's read, and C1 must get slower: the shared path
// really is shared.
module tb_aker_perf;
  import acw_pkg::*;

  localparam int N = 3;
  localparam int CLK_NS = 10;

  logic clk = 0, rst_n = 0;
  always #(CLK_NS / 2) clk = ~clk;

  ax_t  [N-1:0] c_aw, c_ar, ic_aw, ic_ar;
  w_t   [N-1:0] c_w, ic_w;
  b_t   [N-1:0] c_b, ic_b;
  r_t   [N-1:0] c_r, ic_r;
  logic [N-1:0] c_aw_valid, c_aw_ready, c_w_valid, c_w_ready, c_b_valid, c_b_ready;
  logic [N-1:0] c_ar_valid, c_ar_ready, c_r_valid, c_r_ready;
  logic [N-1:0] ic_aw_valid, ic_aw_ready, ic_w_valid, ic_w_ready, ic_b_valid, ic_b_ready;
  logic [N-1:0] ic_ar_valid, ic_ar_ready, ic_r_valid, ic_r_ready;
  logic [31:0]  te_aw_addr, te_ar_addr;
  lite_w_t      te_w;
  lite_r_t      te_r;
  logic [1:0]   te_b_resp;
  logic te_aw_valid, te_aw_ready, te_w_valid, te_w_ready, te_b_valid, te_b_ready;
  logic te_ar_valid, te_ar_ready, te_r_valid, te_r_ready;
  logic [N-1:0] irq_rd, irq_wr;

  aker_soc dut (.*);

  // idle controller on port 2
  assign c_aw[2] = '0; assign c_aw_valid[2] = '0; assign c_w[2] = '0; assign c_w_valid[2] = '0;
  assign c_b_ready[2] = '1; assign c_ar[2] = '0; assign c_ar_valid[2] = '0; assign c_r_ready[2] = '1;
  assign ic_aw_ready[2] = '1; assign ic_w_ready[2] = '1; assign ic_b[2] = '0; assign ic_b_valid[2] = '0;
  assign ic_ar_ready[2] = '1; assign ic_r[2] = '0; assign ic_r_valid[2] = '0;

  // ---------------------------------------------------------------- two paths
  // path 0: C1 -> ACW 0 -> arbiter -> memory, with C2 -> ACW 1 on the
  //         arbiter's second port;
  // path 1: an identical controller -> identical arbiter (second port idle)
  //         -> memory.
  // Index 2 of the job arrays is C2.
  logic  start[3], write[3], busy[3];
  addr_t base[3];
  int    len[3], bursts[3], gap[3];
  data_t seed[3];
  int    ok_cnt[3], err_cnt[3], data_err[3], elapsed[3];
  int    ar_cnt[2], aw_cnt[2], w_cnt[2];
  int    ar_grants0[2], aw_grants0[2], ar_grants1[2], aw_grants1[2];

  ax_t  m0_aw, m0_ar, m1_aw, m1_ar;
  w_t   m0_w, m1_w;
  b_t   m0_b, m1_b;
  r_t   m0_r, m1_r;
  logic m0_aw_valid, m0_aw_ready, m0_w_valid, m0_w_ready, m0_b_valid, m0_b_ready;
  logic m0_ar_valid, m0_ar_ready, m0_r_valid, m0_r_ready;
  logic m1_aw_valid, m1_aw_ready, m1_w_valid, m1_w_ready, m1_b_valid, m1_b_ready;
  logic m1_ar_valid, m1_ar_ready, m1_r_valid, m1_r_ready;

  ax_t  b_aw, b_ar;
  w_t   b_w;
  b_t   b_b;
  r_t   b_r;
  logic b_aw_valid, b_aw_ready, b_w_valid, b_w_ready, b_b_valid, b_b_ready;
  logic b_ar_valid, b_ar_ready, b_r_valid, b_r_ready;
  logic [1:0] b1_ar_ready, b1_aw_ready, b1_w_ready, b1_r_valid, b1_b_valid;
  r_t   [1:0] b1_r;
  b_t   [1:0] b1_b;

  axi_dma_model #(.ID(4'd1)) ctrl0 (
    .clk, .rst_n, .start(start[0]), .write(write[0]), .base(base[0]), .len(len[0]),
    .bursts(bursts[0]), .gap(gap[0]), .seed(seed[0]), .busy(busy[0]), .ok_cnt(ok_cnt[0]),
    .err_cnt(err_cnt[0]), .data_err(data_err[0]), .elapsed(elapsed[0]),
    .aw(c_aw[0]), .aw_valid(c_aw_valid[0]), .aw_ready(c_aw_ready[0]),
    .w(c_w[0]), .w_valid(c_w_valid[0]), .w_ready(c_w_ready[0]),
    .b(c_b[0]), .b_valid(c_b_valid[0]), .b_ready(c_b_ready[0]),
    .ar(c_ar[0]), .ar_valid(c_ar_valid[0]), .ar_ready(c_ar_ready[0]),
    .r(c_r[0]), .r_valid(c_r_valid[0]), .r_ready(c_r_ready[0])
  );
  axi_dma_model #(.ID(4'd2)) ctrl2 (
    .clk, .rst_n, .start(start[2]), .write(write[2]), .base(base[2]), .len(len[2]),
    .bursts(bursts[2]), .gap(gap[2]), .seed(seed[2]), .busy(busy[2]), .ok_cnt(ok_cnt[2]),
    .err_cnt(err_cnt[2]), .data_err(data_err[2]), .elapsed(elapsed[2]),
    .aw(c_aw[1]), .aw_valid(c_aw_valid[1]), .aw_ready(c_aw_ready[1]),
    .w(c_w[1]), .w_valid(c_w_valid[1]), .w_ready(c_w_ready[1]),
    .b(c_b[1]), .b_valid(c_b_valid[1]), .b_ready(c_b_ready[1]),
    .ar(c_ar[1]), .ar_valid(c_ar_valid[1]), .ar_ready(c_ar_ready[1]),
    .r(c_r[1]), .r_valid(c_r_valid[1]), .r_ready(c_r_ready[1])
  );
  axi_arb_model arb0 (
    .clk, .rst_n,
    .s_ar(ic_ar[1:0]), .s_ar_valid(ic_ar_valid[1:0]), .s_ar_ready(ic_ar_ready[1:0]),
    .s_r(ic_r[1:0]), .s_r_valid(ic_r_valid[1:0]), .s_r_ready(ic_r_ready[1:0]),
    .s_aw(ic_aw[1:0]), .s_aw_valid(ic_aw_valid[1:0]), .s_aw_ready(ic_aw_ready[1:0]),
    .s_w(ic_w[1:0]), .s_w_valid(ic_w_valid[1:0]), .s_w_ready(ic_w_ready[1:0]),
    .s_b(ic_b[1:0]), .s_b_valid(ic_b_valid[1:0]), .s_b_ready(ic_b_ready[1:0]),
    .m_ar(m0_ar), .m_ar_valid(m0_ar_valid), .m_ar_ready(m0_ar_ready),
    .m_r(m0_r), .m_r_valid(m0_r_valid), .m_r_ready(m0_r_ready),
    .m_aw(m0_aw), .m_aw_valid(m0_aw_valid), .m_aw_ready(m0_aw_ready),
    .m_w(m0_w), .m_w_valid(m0_w_valid), .m_w_ready(m0_w_ready),
    .m_b(m0_b), .m_b_valid(m0_b_valid), .m_b_ready(m0_b_ready),
    .ar_grants(ar_grants0), .aw_grants(aw_grants0)
  );
  axi_mem_model #(.R_DELAY(6), .B_DELAY(3)) mem0 (
    .clk, .rst_n,
    .ar(m0_ar), .ar_valid(m0_ar_valid), .ar_ready(m0_ar_ready),
    .r(m0_r), .r_valid(m0_r_valid), .r_ready(m0_r_ready),
    .aw(m0_aw), .aw_valid(m0_aw_valid), .aw_ready(m0_aw_ready),
    .w(m0_w), .w_valid(m0_w_valid), .w_ready(m0_w_ready),
    .b(m0_b), .b_valid(m0_b_valid), .b_ready(m0_b_ready),
    .ar_cnt(ar_cnt[0]), .aw_cnt(aw_cnt[0]), .w_cnt(w_cnt[0])
  );

  axi_dma_model #(.ID(4'd1)) ctrl1 (
    .clk, .rst_n, .start(start[1]), .write(write[1]), .base(base[1]), .len(len[1]),
    .bursts(bursts[1]), .gap(gap[1]), .seed(seed[1]), .busy(busy[1]), .ok_cnt(ok_cnt[1]),
    .err_cnt(err_cnt[1]), .data_err(data_err[1]), .elapsed(elapsed[1]),
    .aw(b_aw), .aw_valid(b_aw_valid), .aw_ready(b_aw_ready),
    .w(b_w), .w_valid(b_w_valid), .w_ready(b_w_ready),
    .b(b_b), .b_valid(b_b_valid), .b_ready(b_b_ready),
    .ar(b_ar), .ar_valid(b_ar_valid), .ar_ready(b_ar_ready),
    .r(b_r), .r_valid(b_r_valid), .r_ready(b_r_ready)
  );
  axi_arb_model arb1 (
    .clk, .rst_n,
    .s_ar({$bits(ax_t)'(0), b_ar}), .s_ar_valid({1'b0, b_ar_valid}), .s_ar_ready(b1_ar_ready),
    .s_r(b1_r), .s_r_valid(b1_r_valid), .s_r_ready({1'b1, b_r_ready}),
    .s_aw({$bits(ax_t)'(0), b_aw}), .s_aw_valid({1'b0, b_aw_valid}), .s_aw_ready(b1_aw_ready),
    .s_w({$bits(w_t)'(0), b_w}), .s_w_valid({1'b0, b_w_valid}), .s_w_ready(b1_w_ready),
    .s_b(b1_b), .s_b_valid(b1_b_valid), .s_b_ready({1'b1, b_b_ready}),
    .m_ar(m1_ar), .m_ar_valid(m1_ar_valid), .m_ar_ready(m1_ar_ready),
    .m_r(m1_r), .m_r_valid(m1_r_valid), .m_r_ready(m1_r_ready),
    .m_aw(m1_aw), .m_aw_valid(m1_aw_valid), .m_aw_ready(m1_aw_ready),
    .m_w(m1_w), .m_w_valid(m1_w_valid), .m_w_ready(m1_w_ready),
    .m_b(m1_b), .m_b_valid(m1_b_valid), .m_b_ready(m1_b_ready),
    .ar_grants(ar_grants1), .aw_grants(aw_grants1)
  );
  assign b_ar_ready = b1_ar_ready[0]; assign b_aw_ready = b1_aw_ready[0]; assign b_w_ready = b1_w_ready[0];
  assign b_r = b1_r[0]; assign b_r_valid = b1_r_valid[0];
  assign b_b = b1_b[0]; assign b_b_valid = b1_b_valid[0];

  axi_mem_model #(.R_DELAY(6), .B_DELAY(3)) mem1 (
    .clk, .rst_n,
    .ar(m1_ar), .ar_valid(m1_ar_valid), .ar_ready(m1_ar_ready),
    .r(m1_r), .r_valid(m1_r_valid), .r_ready(m1_r_ready),
    .aw(m1_aw), .aw_valid(m1_aw_valid), .aw_ready(m1_aw_ready),
    .w(m1_w), .w_valid(m1_w_valid), .w_ready(m1_w_ready),
    .b(m1_b), .b_valid(m1_b_valid), .b_ready(m1_b_ready),
    .ar_cnt(ar_cnt[1]), .aw_cnt(aw_cnt[1]), .w_cnt(w_cnt[1])
  );

  int checks = 0, failures = 0;

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, what); end
  endtask

  task automatic te_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    te_aw_addr = a; te_aw_valid = 1; te_w = '{data: d, strb: 4'hF}; te_w_valid = 1;
    forever begin #1; if (te_aw_ready && te_w_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); te_aw_valid = 0; te_w_valid = 0; te_b_ready = 1;
    forever begin #1; if (te_b_valid) break; @(negedge clk); end
    expect_true(te_b_resp == RESP_OKAY, $sformatf("TE write @%h OKAY", a));
    @(posedge clk);
    @(negedge clk); te_b_ready = 0;
  endtask

  // Runs the same job on both paths, one after the other; returns both times.
  task automatic run_both(bit wr, addr_t a, int l, int n, data_t s, output int t_acw, output int t_bare);
    for (int p = 0; p < 2; p++) begin
      automatic int ok0 = ok_cnt[p];
      automatic int t = 0;
      @(negedge clk);
      write[p] = wr; base[p] = a; len[p] = l; bursts[p] = n; gap[p] = 1; seed[p] = s; start[p] = 1;
      @(negedge clk); start[p] = 0;
      @(negedge clk);
      while (busy[p] && t < 5_000_000) begin @(negedge clk); t++; end
      expect_true(!busy[p], "job finished");
      expect_true(ok_cnt[p] == ok0 + n && err_cnt[p] == 0 && data_err[p] == 0,
                  $sformatf("path %0d: %0d bursts OKAY with correct data", p, n));
    end
    t_acw = elapsed[0]; t_bare = elapsed[1];
  endtask

  localparam addr_t BUF    = 32'h4000_0000;
  localparam addr_t C2_BUF = 32'h5000_0000;

  // one job on C1 (through ACW 0) or C2 (through ACW 1), waiting for its end
  task automatic dma_job(int p, bit wr, addr_t a, int l, int n, data_t s);
    @(negedge clk);
    write[p] = wr; base[p] = a; len[p] = l; bursts[p] = n; gap[p] = 1; seed[p] = s; start[p] = 1;
    @(negedge clk); start[p] = 0;
    @(negedge clk);
    while (busy[p]) @(negedge clk);
  endtask
  task automatic c1_job(bit wr, addr_t a, int l, int n, data_t s); dma_job(0, wr, a, l, n, s); endtask
  task automatic c2_job(bit wr, addr_t a, int l, int n, data_t s); dma_job(2, wr, a, l, n, s); endtask

  // Trusted Entity interrupt service: readmits C2's read side after each anomaly
  bit flood_on = 0;
  int isr_cnt = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (flood_on && irq_rd[1]) begin
        te_write(32'h1000, 32'h1);
        isr_cnt++;
        while (irq_rd[1]) @(negedge clk);
      end
    end
  end

  initial begin
    int sizes_words[6] = '{16, 256, 1024, 8192, 65536, 524288};   // 16 w, 256 w, 4 KB, 32 KB, 256 KB, 2 MB
    string names[6]    = '{"16-word", "256-word", "4 KB", "32 KB", "256 KB", "2 MB"};
    int tr_bare_unused;
    te_aw_addr = 0; te_ar_addr = 0; te_w = '0;
    te_aw_valid = 0; te_w_valid = 0; te_b_ready = 0; te_ar_valid = 0; te_r_ready = 0;
    for (int p = 0; p < 3; p++) begin
      start[p] = 0; write[p] = 0; base[p] = 0; len[p] = 0; bursts[p] = 0; gap[p] = 0; seed[p] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;

    // policy for ACW 0: one 2 MB buffer, readable and writable
    te_write(32'h100, BUF);          te_write(32'h104, 32'h0020_0000);
    te_write(32'h200, BUF);          te_write(32'h204, 32'h0020_0000);
    te_write(32'h000, 32'h3);
    // policy for ACW 1 (C2): reads of its own 2 MB buffer only; C1's buffer is
    // its forbidden region F
    te_write(32'h1100, C2_BUF);      te_write(32'h1104, 32'h0020_0000);
    te_write(32'h1000, 32'h1);

    for (int k = 0; k < 6; k++) begin
      automatic int words = sizes_words[k];
      automatic int l = (words < 256) ? words - 1 : 255;
      automatic int n = words / (l + 1);
      automatic data_t s = 32'h7000_0000 + data_t'(k);
      int tw_acw, tw_bare, tr_acw, tr_bare;
      run_both(1, BUF, l, n, s, tw_acw, tw_bare);
      run_both(0, BUF, l, n, s, tr_acw, tr_bare);
      expect_true(tw_acw - tw_bare == n * CLK_NS,
                  $sformatf("%s write: %0d ns with ACW, %0d ns without, %0d bursts", names[k], tw_acw, tw_bare, n));
      expect_true(tr_acw - tr_bare == n * CLK_NS,
                  $sformatf("%s read: %0d ns with ACW, %0d ns without, %0d bursts", names[k], tr_acw, tr_bare, n));
      $display("%-8s  write %0d -> %0d ns (+%0.2f%%)   read %0d -> %0d ns (+%0.2f%%)", names[k],
               tw_bare, tw_acw, 100.0 * (tw_acw - tw_bare) / tw_bare,
               tr_bare, tr_acw, 100.0 * (tr_acw - tr_bare) / tr_bare);
    end
    expect_true(irq_rd == 0 && irq_wr == 0, "no interrupt during legal transfers");

    // Contention and denial of service: C1 reads each size again while C2
    // keeps reading C1's buffer (forbidden to C2). C2 issues its next request
    // as soon as the previous error reply is in; the TE readmits C2 after
    // every interrupt, so the flood never stops for long. C1's time must not
    // change and nothing from C2 may reach the shared arbiter. As a control,
    // C2 then reads its own buffer legally during C1's read: that traffic
    // does share the memory, and C1 must become slower.
    for (int k = 0; k < 6; k++) begin
      automatic int words = sizes_words[k];
      automatic int l = (words < 256) ? words - 1 : 255;
      automatic int n = words / (l + 1);
      automatic data_t s = 32'h7000_0005;   // the buffer holds the last (2 MB) write
      automatic int c2_n = 4 + 12 * n;
      automatic int t_alone, t_flood, t_shared, e2, g2, isr0;
      run_both(0, BUF, l, n, s, t_alone, tr_bare_unused);
      e2 = err_cnt[2]; g2 = ar_grants0[1]; isr0 = isr_cnt;
      flood_on = 1;
      fork
        c2_job(0, BUF, 15, c2_n, s);
        c1_job(0, BUF, l, n, s);
      join
      flood_on = 0;
      t_flood = elapsed[0];
      expect_true(err_cnt[2] == e2 + c2_n && isr_cnt == isr0 + c2_n && ar_grants0[1] == g2,
                  $sformatf("%s flood: %0d illegal reads, %0d errors, %0d interrupts, %0d reached the arbiter",
                            names[k], c2_n, err_cnt[2] - e2, isr_cnt - isr0, ar_grants0[1] - g2));
      expect_true(t_flood == t_alone && data_err[0] == 0,
                  $sformatf("%s read under flood: %0d ns, alone %0d ns", names[k], t_flood, t_alone));
      fork
        c2_job(0, C2_BUF, l, n, 32'hA5A5_0000);
        c1_job(0, BUF, l, n, s);
      join
      t_shared = elapsed[0];
      expect_true(t_shared > t_alone && err_cnt[2] == e2 + c2_n && data_err[2] == 0 && ar_grants0[1] == g2 + n,
                  $sformatf("%s read with legal C2 traffic: %0d ns, alone %0d ns", names[k], t_shared, t_alone));
      $display("%-8s  C1 read alone %0d ns, under illegal flood %0d ns, with legal C2 traffic %0d ns (+%0.1f%%)",
               names[k], t_alone, t_flood, t_shared, 100.0 * (t_shared - t_alone) / t_alone);
    end
    repeat (20) @(negedge clk);
    expect_true(irq_rd == 0 && irq_wr == 0, "no interrupt left pending");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
