// tb_aker_system -- policy scenarios with two wrapped controllers.
//
// aker_soc with NUM_ACW = 2: the two-controller system of the system-level
// security evaluation and of the PULP integration (SoC domain and cluster
// domain, one ACW on each AXI pathway). Each interconnect port ends in a
// memory model. Three peripherals P1..P3 are address windows that both
// controllers can name. The testbench acts as Trusted Entity.
//   1. Per-pair policy: C1 may read P1, P2 and write P1; C2 may read P3 and
//      write P2, P3. Every (controller, peripheral, direction) combination is
//      tried. An allowed one must succeed with correct data. A forbidden one
//      must get an error, never reach the interconnect and raise the right
//      interrupt; the TE then readmits.
//   2. Allow-all: two regions per direction cover the whole 4 GiB space.
//      Random bursts anywhere, and at the very top of the address space,
//      succeed on both sides.
//   3. Block-all: the policy is empty but both ACWs are started. The first
//      request is refused, and a second request then stalls (it is never
//      accepted) while the side stays decoupled.
module tb_aker_system;
  import acw_pkg::*;

  localparam int N = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  logic  start[N], write[N], busy[N];
  addr_t base[N];
  int    len[N], bursts[N], gap[N];
  data_t seed[N];
  int    ok_cnt[N], err_cnt[N], data_err[N], elapsed[N];
  int    ar_cnt[N], aw_cnt[N], w_cnt[N];

  aker_soc #(.NUM_ACW(N)) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_sys
    axi_dma_model #(.ID(id_t'(i + 1))) ctrl (
      .clk, .rst_n, .start(start[i]), .write(write[i]), .base(base[i]), .len(len[i]),
      .bursts(bursts[i]), .gap(gap[i]), .seed(seed[i]),
      .busy(busy[i]), .ok_cnt(ok_cnt[i]), .err_cnt(err_cnt[i]), .data_err(data_err[i]),
      .elapsed(elapsed[i]),
      .aw(c_aw[i]), .aw_valid(c_aw_valid[i]), .aw_ready(c_aw_ready[i]),
      .w(c_w[i]), .w_valid(c_w_valid[i]), .w_ready(c_w_ready[i]),
      .b(c_b[i]), .b_valid(c_b_valid[i]), .b_ready(c_b_ready[i]),
      .ar(c_ar[i]), .ar_valid(c_ar_valid[i]), .ar_ready(c_ar_ready[i]),
      .r(c_r[i]), .r_valid(c_r_valid[i]), .r_ready(c_r_ready[i])
    );
    axi_mem_model #(.R_DELAY(3), .B_DELAY(2), .STALL_PCT(10)) mem (
      .clk, .rst_n,
      .ar(ic_ar[i]), .ar_valid(ic_ar_valid[i]), .ar_ready(ic_ar_ready[i]),
      .r(ic_r[i]), .r_valid(ic_r_valid[i]), .r_ready(ic_r_ready[i]),
      .aw(ic_aw[i]), .aw_valid(ic_aw_valid[i]), .aw_ready(ic_aw_ready[i]),
      .w(ic_w[i]), .w_valid(ic_w_valid[i]), .w_ready(ic_w_ready[i]),
      .b(ic_b[i]), .b_valid(ic_b_valid[i]), .b_ready(ic_b_ready[i]),
      .ar_cnt(ar_cnt[i]), .aw_cnt(aw_cnt[i]), .w_cnt(w_cnt[i])
    );
  end

  localparam data_t UNWRITTEN = 32'hA5A5_0000;
  localparam addr_t P_BASE[3] = '{32'h1000_0000, 32'h2000_0000, 32'h3000_0000};
  localparam addr_t P_SIZE    = 32'h0001_0000;

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

  task automatic te_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    te_ar_addr = a; te_ar_valid = 1;
    forever begin #1; if (te_ar_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); te_ar_valid = 0; te_r_ready = 1;
    forever begin #1; if (te_r_valid) break; @(negedge clk); end
    d = te_r.data;
    @(posedge clk);
    @(negedge clk); te_r_ready = 0;
  endtask

  task automatic region(int i, bit wr, int k, addr_t b, addr_t s);
    te_write(32'(i) * 4096 + (wr ? 32'h200 : 32'h100) + 32'(8 * k), b);
    te_write(32'(i) * 4096 + (wr ? 32'h204 : 32'h104) + 32'(8 * k), s);
  endtask

  task automatic job(int i, bit wr, addr_t a, int l, int n, data_t s);
    @(negedge clk);
    write[i] = wr; base[i] = a; len[i] = l; bursts[i] = n; gap[i] = 1; seed[i] = s; start[i] = 1;
    @(negedge clk); start[i] = 0;
  endtask

  task automatic wait_idle(int i);
    int t = 0;
    @(negedge clk);
    while (busy[i] && t < 50000) begin @(negedge clk); t++; end
    expect_true(!busy[i], $sformatf("C%0d job finished", i + 1));
  endtask

  // One access by controller i to peripheral k; 'allowed' is the expected verdict.
  task automatic access(int i, int k, bit wr, bit allowed);
    automatic int    ok0 = ok_cnt[i], err0 = err_cnt[i], ar0 = ar_cnt[i], aw0 = aw_cnt[i], w0 = w_cnt[i];
    automatic addr_t a   = P_BASE[k] + 32'h100 * (i + 1) + (wr ? 32'h0 : 32'h8000);
    automatic data_t s   = wr ? 32'h5100_0000 + 32'(i) : UNWRITTEN;
    automatic string what = $sformatf("C%0d %s P%0d", i + 1, wr ? "write" : "read", k + 1);
    job(i, wr, a, 7, 1, s);
    wait_idle(i);
    if (allowed) begin
      expect_true(ok_cnt[i] == ok0 + 1 && err_cnt[i] == err0 && data_err[i] == 0, {what, " allowed: OKAY"});
      if (wr) expect_true(g_sys_peek(i, a) == ((a >> 2) ^ s), {what, ": data in memory"});
    end else begin
      logic [31:0] d;
      expect_true(err_cnt[i] == err0 + 1 && ok_cnt[i] == ok0, {what, " forbidden: error response"});
      expect_true(ar_cnt[i] == ar0 && aw_cnt[i] == aw0 && w_cnt[i] == w0, {what, ": nothing reached the interconnect"});
      expect_true((wr ? irq_wr[i] : irq_rd[i]) && !(wr ? irq_rd[i] : irq_wr[i]), {what, ": matching interrupt line"});
      te_read(32'(i) * 4096 + (wr ? REG_WR_A_ADDR : REG_RD_A_ADDR), d);
      expect_true(d == a, {what, ": anomaly address"});
      te_write(32'(i) * 4096 + REG_CTRL, wr ? 32'h2 : 32'h1);
      repeat (2) @(negedge clk);
      expect_true(irq_rd[i] == 0 && irq_wr[i] == 0, {what, ": readmitted"});
    end
  endtask

  function automatic data_t g_sys_peek(int i, addr_t a);
    return (i == 0) ? g_sys[0].mem.peek(a) : g_sys[1].mem.peek(a);
  endfunction

  task automatic do_reset();
    @(negedge clk); rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
  endtask

  initial begin
    // R1 = {P1, P2}, W1 = {P1}; R2 = {P3}, W2 = {P2, P3}
    bit rd_ok[2][3] = '{'{1, 1, 0}, '{0, 0, 1}};
    bit wr_ok[2][3] = '{'{1, 0, 0}, '{0, 1, 1}};
    te_aw_addr = 0; te_ar_addr = 0; te_w = '0;
    te_aw_valid = 0; te_w_valid = 0; te_b_ready = 0; te_ar_valid = 0; te_r_ready = 0;
    for (int i = 0; i < N; i++) begin
      start[i] = 0; write[i] = 0; base[i] = 0; len[i] = 0; bursts[i] = 0; gap[i] = 0; seed[i] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;

    // ---------------- 1. per-pair policy
    for (int i = 0; i < N; i++) begin
      automatic int nr = 0, nw = 0;
      for (int k = 0; k < 3; k++) begin
        if (rd_ok[i][k]) begin region(i, 0, nr, P_BASE[k], P_SIZE); nr++; end
        if (wr_ok[i][k]) begin region(i, 1, nw, P_BASE[k], P_SIZE); nw++; end
      end
      te_write(32'(i) * 4096 + REG_CTRL, 32'h3);
    end
    for (int i = 0; i < N; i++)
      for (int k = 0; k < 3; k++) begin
        access(i, k, 1, wr_ok[i][k]);
        access(i, k, 0, rd_ok[i][k]);
      end

    // ---------------- 2. allow-all
    do_reset();
    for (int i = 0; i < N; i++) begin
      region(i, 0, 0, 32'h0000_0000, 32'h8000_0000); region(i, 0, 1, 32'h8000_0000, 32'h8000_0000);
      region(i, 1, 0, 32'h0000_0000, 32'h8000_0000); region(i, 1, 1, 32'h8000_0000, 32'h8000_0000);
      te_write(32'(i) * 4096 + REG_CTRL, 32'h3);
    end
    for (int t = 0; t < 20; t++) begin
      automatic int    i = $urandom_range(0, N - 1);
      automatic addr_t a = {$urandom_range(0, 32'h3FFF_FFFF), 2'b00} & 32'hFFFF_FF00;   // 256-byte aligned
      automatic int    ok0 = ok_cnt[i];
      job(i, 1, a, 15, 1, 32'h6600_0000); wait_idle(i);
      job(i, 0, a, 15, 1, 32'h6600_0000); wait_idle(i);
      expect_true(ok_cnt[i] == ok0 + 2 && data_err[i] == 0, $sformatf("allow-all: C%0d write+read at %h", i + 1, a));
    end
    begin
      automatic int ok0 = ok_cnt[0];
      job(0, 0, 32'hFFFF_FFC0, 15, 1, UNWRITTEN); wait_idle(0);
      expect_true(ok_cnt[0] == ok0 + 1, "allow-all: burst ending at the last byte of the address space");
    end
    expect_true(irq_rd == 0 && irq_wr == 0, "allow-all: no interrupt");

    // ---------------- 3. block-all
    do_reset();
    for (int i = 0; i < N; i++) te_write(32'(i) * 4096 + REG_CTRL, 32'h3);
    for (int i = 0; i < N; i++) begin
      automatic int err0 = err_cnt[i], ar0 = ar_cnt[i];
      job(i, 0, P_BASE[i], 3, 2, UNWRITTEN);
      repeat (200) @(negedge clk);
      expect_true(err_cnt[i] == err0 + 1, $sformatf("block-all: C%0d first read refused", i + 1));
      expect_true(busy[i] && irq_rd[i] && ar_cnt[i] == ar0, $sformatf("block-all: C%0d second read stalls", i + 1));
    end
    do_reset();   // releases the stalled controllers' requests into a fresh Reset mode
    expect_true(irq_rd == 0 && irq_wr == 0, "reset clears the interrupts");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
