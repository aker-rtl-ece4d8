// tb_aker_soc -- end-to-end test of the AKER system top at its default size.
//
// aker_soc is instantiated with its default parameters: three ACWs with 16
// read and 16 write regions each, as in the evaluated FPGA system (three
// wrapped controllers, one memory). Around it:
//   * three axi_dma_model controllers C1..C3 on the controller ports;
//   * one axi_mem_model per interconnect port, standing in for interconnect
//     and memory -- its request log shows exactly what left each ACW;
//   * the testbench as Trusted Entity on the control bus, including an
//     interrupt service process that reads the anomaly registers and sends
//     'go' back to the offending ACW.
// Scenarios, following the paper's evaluation: boot (all ACWs block until the
// TE has written a policy), isolation (each controller only in its own
// windows), C2 attacking C1's region F with reads and writes, a flood of
// illegal requests from C2 while C1 streams data (C1's run time is compared
// with a run without the attack), and control-bus errors.
// Every mechanism is counted; a mechanism that never happened is a failure.
module tb_aker_soc;
  import acw_pkg::*;

  localparam int N = 3;

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

  // controller commands and results
  logic  start[N], write[N], busy[N];
  addr_t base[N];
  int    len[N], bursts[N], gap[N];
  data_t seed[N];
  int    ok_cnt[N], err_cnt[N], data_err[N], elapsed[N];
  int    ar_cnt[N], aw_cnt[N], w_cnt[N];

  aker_soc dut (.*);

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
    axi_mem_model #(.R_DELAY(6), .B_DELAY(3)) mem (
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

  // Address map of the scenario (each controller's windows; F is C1's private region).
  localparam addr_t C_BASE[N] = '{32'h8000_0000, 32'h8010_0000, 32'h8020_0000};
  localparam addr_t WIN       = 32'h0004_0000;   // 256 KiB per controller
  localparam addr_t F_BASE    = 32'h8000_0000;   // region F: first 64 KiB of C1's window

  // ---------------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  typedef enum int {
    M_RESET_BLOCK, M_POLICY_WRITE, M_READMIT_BOOT, M_LEGAL_READ, M_LEGAL_WRITE,
    M_ILLEGAL_READ, M_ILLEGAL_WRITE, M_W_DISCARD, M_IRQ_RD, M_IRQ_WR, M_ANOMALY_READ,
    M_READMIT_AFTER_ANOMALY, M_DOS_CONTAINED, M_LATENCY_UNCHANGED, M_CTRL_DECERR, M_RESET_CLEARS,
    M_COUNT
  } mech_e;
  int mech[M_COUNT];

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, what); end
  endtask

  task automatic seen(mech_e m, bit cond, string what);
    expect_true(cond, what);
    if (cond) mech[m]++;
  endtask

  // ---------------------------------------------------------------- TE bus
  // te_lock serialises the main sequence and the interrupt service process.
  bit te_lock = 0;

  task automatic te_write(logic [31:0] a, logic [31:0] d, output logic [1:0] resp);
    while (te_lock) @(negedge clk);
    te_lock = 1;
    @(negedge clk);
    te_aw_addr = a; te_aw_valid = 1; te_w = '{data: d, strb: 4'hF}; te_w_valid = 1;
    forever begin #1; if (te_aw_ready && te_w_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); te_aw_valid = 0; te_w_valid = 0; te_b_ready = 1;
    forever begin #1; if (te_b_valid) break; @(negedge clk); end
    resp = te_b_resp;
    @(posedge clk);
    @(negedge clk); te_b_ready = 0;
    te_lock = 0;
  endtask

  task automatic te_read(logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    while (te_lock) @(negedge clk);
    te_lock = 1;
    @(negedge clk);
    te_ar_addr = a; te_ar_valid = 1;
    forever begin #1; if (te_ar_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); te_ar_valid = 0; te_r_ready = 1;
    forever begin #1; if (te_r_valid) break; @(negedge clk); end
    d = te_r.data; resp = te_r.resp;
    @(posedge clk);
    @(negedge clk); te_r_ready = 0;
    te_lock = 0;
  endtask

  function automatic logic [31:0] acw_reg(int i, logic [11:0] off);
    return 32'(i) * 4096 + 32'(off);
  endfunction

  task automatic te_set(int i, logic [11:0] off, logic [31:0] d);
    logic [1:0] r;
    te_write(acw_reg(i, off), d, r);
    seen(M_POLICY_WRITE, r == RESP_OKAY, $sformatf("policy write ACW %0d @%h", i, off));
  endtask

  // ---------------------------------------------------------------- interrupt service
  // The TE's response to an interrupt: read the anomaly record, readmit, and
  // wait for the line to drop (the ACW holds a go until its error response is out).
  bit    isr_on = 0;
  int    isr_rd[N], isr_wr[N];
  addr_t last_anom_rd[N], last_anom_wr[N];

  initial begin
    foreach (isr_rd[i]) begin isr_rd[i] = 0; isr_wr[i] = 0; end
    forever begin
      @(negedge clk);
      if (isr_on && (irq_rd != 0 || irq_wr != 0)) begin
        for (int i = 0; i < N; i++) begin
          logic [31:0] d; logic [1:0] r;
          if (irq_rd[i]) begin
            te_read(acw_reg(i, REG_RD_A_ADDR), d, r);
            last_anom_rd[i] = d; isr_rd[i]++;
            te_write(acw_reg(i, REG_CTRL), 32'h1, r);
            while (irq_rd[i]) @(negedge clk);
          end
          if (irq_wr[i]) begin
            te_read(acw_reg(i, REG_WR_A_ADDR), d, r);
            last_anom_wr[i] = d; isr_wr[i]++;
            te_write(acw_reg(i, REG_CTRL), 32'h2, r);
            while (irq_wr[i]) @(negedge clk);
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- controllers
  task automatic job(int i, bit wr, addr_t a, int l, int n, data_t s);
    @(negedge clk);
    write[i] = wr; base[i] = a; len[i] = l; bursts[i] = n; gap[i] = 1; seed[i] = s; start[i] = 1;
    @(negedge clk); start[i] = 0;
  endtask

  task automatic wait_idle(int i);
    int t = 0;
    @(negedge clk);
    while (busy[i] && t < 200000) begin @(negedge clk); t++; end
    expect_true(!busy[i], $sformatf("C%0d job finished", i + 1));
  endtask

  int f_hits_c2;   // requests to F seen on C2's interconnect port
  always @(posedge clk) begin
    if (ic_ar_valid[1] && ic_ar[1].addr >= F_BASE && ic_ar[1].addr < F_BASE + 32'h1_0000) f_hits_c2++;
    if (ic_aw_valid[1] && ic_aw[1].addr >= F_BASE && ic_aw[1].addr < F_BASE + 32'h1_0000) f_hits_c2++;
  end

  // requests leaving any ACW while its channel is in Reset mode
  int reset_leaks[N];
  for (genvar i = 0; i < N; i++) begin : g_leak
    always @(posedge clk)
      if (rst_n && ((ic_ar_valid[i] && dut.g_acw[i].u_acw.u_rd.mode == MODE_RESET) ||
                    (ic_aw_valid[i] && dut.g_acw[i].u_acw.u_wr.mode == MODE_RESET))) reset_leaks[i]++;
  end

  // ---------------------------------------------------------------- main sequence
  initial begin
    int base_time, attack_time;
    logic [31:0] d; logic [1:0] r;
    f_hits_c2 = 0; foreach (reset_leaks[i]) reset_leaks[i] = 0;
    foreach (mech[m]) mech[m] = 0;
    te_aw_addr = 0; te_ar_addr = 0; te_w = '0;
    te_aw_valid = 0; te_w_valid = 0; te_b_ready = 0; te_ar_valid = 0; te_r_ready = 0;
    for (int i = 0; i < N; i++) begin
      start[i] = 0; write[i] = 0; base[i] = 0; len[i] = 0; bursts[i] = 0; gap[i] = 0; seed[i] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;

    // ---------------- boot: every controller is held until its policy is written
    for (int i = 0; i < N; i++) job(i, 0, C_BASE[i], 15, 1, UNWRITTEN);
    repeat (40) @(negedge clk);
    for (int i = 0; i < N; i++)
      seen(M_RESET_BLOCK, busy[i] && ar_cnt[i] == 0 && !irq_rd[i] && !irq_wr[i],
           $sformatf("C%0d held in Reset mode", i + 1));
    for (int i = 0; i < N; i++) begin
      te_set(i, 12'h100, C_BASE[i]); te_set(i, 12'h104, WIN);     // read region 0
      te_set(i, 12'h200, C_BASE[i]); te_set(i, 12'h204, WIN);     // write region 0
    end
    // C2 may also read a shared buffer in C3's window (read region 5)
    te_set(1, 12'h128, C_BASE[2] + 32'h3_0000); te_set(1, 12'h12C, 32'h1000);
    for (int i = 0; i < N; i++) begin
      te_set(i, REG_CTRL, 32'h3);
      wait_idle(i);
      seen(M_READMIT_BOOT, ok_cnt[i] == 1 && data_err[i] == 0, $sformatf("C%0d boot read after go", i + 1));
    end
    isr_on = 1;

    // ---------------- isolation: each controller writes and reads its own window
    for (int i = 0; i < N; i++) job(i, 1, C_BASE[i] + 32'h1000, 255, 4, 32'h1234_0000 * (i + 1));
    for (int i = 0; i < N; i++) begin
      wait_idle(i);
      seen(M_LEGAL_WRITE, ok_cnt[i] == 5 && err_cnt[i] == 0, $sformatf("C%0d 4 x 256-beat writes", i + 1));
    end
    for (int i = 0; i < N; i++) job(i, 0, C_BASE[i] + 32'h1000, 255, 4, 32'h1234_0000 * (i + 1));
    for (int i = 0; i < N; i++) begin
      wait_idle(i);
      seen(M_LEGAL_READ, ok_cnt[i] == 9 && data_err[i] == 0, $sformatf("C%0d read-back", i + 1));
    end
    job(1, 0, C_BASE[2] + 32'h3_0000, 15, 4, UNWRITTEN);
    wait_idle(1);
    seen(M_LEGAL_READ, ok_cnt[1] == 13 && err_cnt[1] == 0, "C2 reads the shared buffer");

    // ---------------- C2 attacks region F (read, then write)
    begin
      automatic int ar1 = ar_cnt[1], aw1 = aw_cnt[1], w1 = w_cnt[1], e1 = err_cnt[1];
      job(1, 0, F_BASE + 32'h100, 15, 1, UNWRITTEN);
      wait_idle(1);
      seen(M_ILLEGAL_READ, err_cnt[1] == e1 + 1 && ar_cnt[1] == ar1, "C2 read of F: error, not forwarded");
      repeat (20) @(negedge clk);
      seen(M_IRQ_RD, isr_rd[1] == 1 && isr_rd[0] == 0 && isr_rd[2] == 0 && isr_wr[1] == 0,
           "read interrupt from ACW 2 only");
      seen(M_ANOMALY_READ, last_anom_rd[1] == F_BASE + 32'h100, "TE reads the read anomaly address");
      job(1, 1, F_BASE + 32'h200, 15, 1, 32'hBAD0_0000);
      wait_idle(1);
      seen(M_ILLEGAL_WRITE, err_cnt[1] == e1 + 2 && aw_cnt[1] == aw1, "C2 write to F: error, not forwarded");
      seen(M_W_DISCARD, w_cnt[1] == w1, "C2's write data was absorbed by the ACW");
      repeat (20) @(negedge clk);
      seen(M_IRQ_WR, isr_wr[1] == 1 && isr_wr[0] == 0 && isr_wr[2] == 0, "write interrupt from ACW 2 only");
      seen(M_ANOMALY_READ, last_anom_wr[1] == F_BASE + 32'h200, "TE reads the write anomaly address");
      job(1, 0, C_BASE[1] + 32'h1000, 15, 1, 32'h1234_0000 * 2);
      wait_idle(1);
      seen(M_READMIT_AFTER_ANOMALY, err_cnt[1] == e1 + 2 && data_err[1] == 0, "C2 works again after go");
    end

    // ---------------- denial of service: C2 floods illegal requests while C1 streams
    job(0, 0, C_BASE[0] + 32'h2_0000, 255, 8, UNWRITTEN);
    wait_idle(0);
    base_time = elapsed[0];
    begin
      automatic int e1 = err_cnt[1], ar1 = ar_cnt[1], isr0 = isr_rd[1];
      fork
        job(1, 0, F_BASE, 15, 24, UNWRITTEN);
        job(0, 0, C_BASE[0] + 32'h2_0000, 255, 8, UNWRITTEN);
      join
      wait_idle(0);
      attack_time = elapsed[0];
      wait_idle(1);
      repeat (20) @(negedge clk);
      seen(M_DOS_CONTAINED, err_cnt[1] == e1 + 24 && ar_cnt[1] == ar1 && isr_rd[1] == isr0 + 24,
           $sformatf("24 illegal reads: %0d errors, %0d forwarded, %0d interrupts",
                     err_cnt[1] - e1, ar_cnt[1] - ar1, isr_rd[1] - isr0));
      seen(M_LATENCY_UNCHANGED, attack_time == base_time && data_err[0] == 0,
           $sformatf("C1 run time %0d with attack vs %0d without", attack_time, base_time));
    end
    expect_true(f_hits_c2 == 0, "no request to F ever left ACW 2");
    expect_true(reset_leaks.sum() == 0, "nothing left an ACW in Reset mode");
    isr_on = 0;

    // ---------------- control bus errors
    te_write(32'h0000_3000, 32'h3, r);
    seen(M_CTRL_DECERR, r == RESP_DECERR, "write to a missing ACW page -> DECERR");
    te_read(32'h0000_3004, d, r);
    seen(M_CTRL_DECERR, r == RESP_DECERR, "read of a missing ACW page -> DECERR");
    te_write(acw_reg(0, REG_RD_A_ADDR), 32'h0, r);
    expect_true(r == RESP_SLVERR, "anomaly registers are read-only for the TE");

    // ---------------- reset returns every ACW to Reset mode with an empty policy
    @(negedge clk); rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      te_read(acw_reg(i, REG_STATUS), d, r);
      expect_true(d == 0, $sformatf("ACW %0d back in Reset mode", i));
      te_read(acw_reg(i, 12'h104), d, r);
      seen(M_RESET_CLEARS, d == 0, $sformatf("ACW %0d policy cleared", i));
    end

    for (int m = 0; m < M_COUNT; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never exercised", mech_e'(m)); end
      else $display("mechanism %-24s x%0d", mech_e'(m), mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
