// tb_acw -- self-checking test of one complete Access Control Wrapper.
//
// A DMA-like controller model (axi_dma_model) sits on the ACW's controller
// side, a memory model (axi_mem_model) on its interconnect side, and the
// testbench plays the Trusted Entity on the configuration port. The ACW uses
// its default parameters (16 read and 16 write regions). Checks:
//   * after reset a read issued by the controller is held (nothing reaches
//     memory) until the TE has written the policy and 'go';
//   * legal write bursts land in memory and read back correctly;
//   * an illegal write gets an error response, never reaches memory, raises
//     only the write interrupt, and is reported in the write anomaly
//     registers; reads keep working meanwhile (independent channels);
//   * the TE's 'go' readmits the write side and clears the interrupt;
//   * the same for an illegal read on the read side;
//   * STATUS follows the modes, and a reset clears policy and anomaly state.
module tb_acw;
  import acw_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ax_t  s_aw, s_ar, m_aw, m_ar;
  w_t   s_w, m_w;
  b_t   s_b, m_b;
  r_t   s_r, m_r;
  logic s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  logic m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;

  lite_ax_t cfg_aw, cfg_ar;
  lite_w_t  cfg_w;
  lite_r_t  cfg_r;
  logic [1:0] cfg_b_resp;
  logic cfg_aw_valid, cfg_aw_ready, cfg_w_valid, cfg_w_ready, cfg_b_valid, cfg_b_ready;
  logic cfg_ar_valid, cfg_ar_ready, cfg_r_valid, cfg_r_ready;
  logic irq_rd, irq_wr;

  // controller command interface
  logic  start, write, busy;
  addr_t base;
  int    len, bursts, gap;
  data_t seed;
  int    ok_cnt, err_cnt, data_err, elapsed;
  int    ar_cnt, aw_cnt, w_cnt;

  int checks = 0, failures = 0;

  acw dut (.*);

  axi_dma_model #(.ID(4'd6)) ctrl (
    .clk, .rst_n, .start, .write, .base, .len, .bursts, .gap, .seed,
    .busy, .ok_cnt, .err_cnt, .data_err, .elapsed,
    .aw(s_aw), .aw_valid(s_aw_valid), .aw_ready(s_aw_ready),
    .w(s_w), .w_valid(s_w_valid), .w_ready(s_w_ready),
    .b(s_b), .b_valid(s_b_valid), .b_ready(s_b_ready),
    .ar(s_ar), .ar_valid(s_ar_valid), .ar_ready(s_ar_ready),
    .r(s_r), .r_valid(s_r_valid), .r_ready(s_r_ready)
  );

  axi_mem_model #(.R_DELAY(4), .STALL_PCT(20)) mem (
    .clk, .rst_n,
    .ar(m_ar), .ar_valid(m_ar_valid), .ar_ready(m_ar_ready),
    .r(m_r), .r_valid(m_r_valid), .r_ready(m_r_ready),
    .aw(m_aw), .aw_valid(m_aw_valid), .aw_ready(m_aw_ready),
    .w(m_w), .w_valid(m_w_valid), .w_ready(m_w_ready),
    .b(m_b), .b_valid(m_b_valid), .b_ready(m_b_ready),
    .ar_cnt, .aw_cnt, .w_cnt
  );

  localparam data_t UNWRITTEN = 32'hA5A5_0000;   // memory model's fill pattern seed

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, what); end
  endtask

  task automatic cfg_write(logic [11:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    cfg_aw = '{addr: a, prot: 3'b0}; cfg_aw_valid = 1; cfg_w = '{data: d, strb: 4'hF}; cfg_w_valid = 1;
    forever begin #1; if (cfg_aw_ready && cfg_w_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); cfg_aw_valid = 0; cfg_w_valid = 0; cfg_b_ready = 1;
    forever begin #1; if (cfg_b_valid) break; @(negedge clk); end
    resp = cfg_b_resp;
    @(posedge clk);
    @(negedge clk); cfg_b_ready = 0;
  endtask

  task automatic cfg_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_ar = '{addr: a, prot: 3'b0}; cfg_ar_valid = 1;
    forever begin #1; if (cfg_ar_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); cfg_ar_valid = 0; cfg_r_ready = 1;
    forever begin #1; if (cfg_r_valid) break; @(negedge clk); end
    d = cfg_r.data;
    @(posedge clk);
    @(negedge clk); cfg_r_ready = 0;
  endtask

  task automatic cfg_expect(logic [11:0] a, logic [31:0] exp, string what);
    logic [31:0] d;
    cfg_read(a, d);
    expect_true(d == exp, $sformatf("%s: read %h exp %h", what, d, exp));
  endtask

  task automatic cfg_ok(logic [11:0] a, logic [31:0] d);
    logic [1:0] r;
    cfg_write(a, d, r);
    expect_true(r == RESP_OKAY, $sformatf("config write @%h OKAY", a));
  endtask

  // Starts a controller job and optionally waits for it to finish.
  task automatic run_job(bit wr, addr_t a, int l, int n, data_t s, bit wait_done);
    @(negedge clk);
    write = wr; base = a; len = l; bursts = n; gap = 1; seed = s; start = 1;
    @(negedge clk); start = 0;
    if (wait_done) wait_idle();
  endtask

  task automatic wait_idle();
    int t = 0;
    @(negedge clk);
    while (busy && t < 20000) begin @(negedge clk); t++; end
    expect_true(!busy, "controller job finished");
  endtask

  int ok0, err0;
  task automatic snap(); ok0 = ok_cnt; err0 = err_cnt; endtask

  initial begin
    logic [31:0] d;
    s_aw = '0;
    cfg_aw = '0; cfg_ar = '0; cfg_w = '0;
    cfg_aw_valid = 0; cfg_w_valid = 0; cfg_b_ready = 0; cfg_ar_valid = 0; cfg_r_ready = 0;
    start = 0; write = 0; base = 0; len = 0; bursts = 0; gap = 0; seed = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- Reset mode holds a controller request
    run_job(0, 32'h1000_0000, 7, 1, UNWRITTEN, 0);
    repeat (30) @(negedge clk);
    expect_true(busy && ar_cnt == 0 && aw_cnt == 0, "request held in Reset mode");
    cfg_expect(REG_STATUS, 32'h0, "STATUS in reset");
    expect_true(!irq_rd && !irq_wr, "no interrupt in Reset mode");

    // ---------------- policy, then go
    cfg_ok(12'h100, 32'h1000_0000); cfg_ok(12'h104, 32'h0001_0000);   // read  [0x1000_0000, +64 KiB)
    cfg_ok(12'h200, 32'h1000_8000); cfg_ok(12'h204, 32'h0000_8000);   // write [0x1000_8000, +32 KiB)
    cfg_ok(12'h178, 32'h2000_0000); cfg_ok(12'h17C, 32'h0000_1000);   // read region 15
    cfg_expect(REG_NREGIONS, {16'd16, 16'd16}, "default region counts");
    expect_true(busy && ar_cnt == 0, "still held while the policy is written");
    cfg_ok(REG_CTRL, 32'h3);
    wait_idle();
    expect_true(ok_cnt == 1 && err_cnt == 0 && data_err == 0 && ar_cnt == 1, "held read completes after go");
    cfg_expect(REG_STATUS, 32'h5, "STATUS: both Supervising");

    // ---------------- legal writes and read-back
    snap();
    run_job(1, 32'h1000_8000, 15, 8, 32'h5EED_0001, 1);
    expect_true(ok_cnt == ok0 + 8 && err_cnt == err0, "8 legal write bursts OKAY");
    run_job(0, 32'h1000_8000, 15, 8, 32'h5EED_0001, 1);
    expect_true(ok_cnt == ok0 + 16 && data_err == 0, "read-back of written data");
    run_job(0, 32'h2000_0F00, 63, 1, UNWRITTEN, 1);
    expect_true(ok_cnt == ok0 + 17 && data_err == 0, "read in region 15 (last slot)");

    // ---------------- illegal write: read side keeps working
    snap();
    begin
      automatic int aw0 = aw_cnt, w0 = w_cnt;
      run_job(1, 32'h1000_7FF0, 7, 1, 32'h0BAD_0000, 1);   // starts 16 bytes below the write region
      expect_true(err_cnt == err0 + 1 && ok_cnt == ok0, "illegal write gets an error response");
      expect_true(aw_cnt == aw0 && w_cnt == w0, "illegal write never reached memory");
      expect_true(mem.peek(32'h1000_7FF0) == ((32'h1000_7FF0 >> 2) ^ UNWRITTEN), "memory untouched");
      expect_true(irq_wr && !irq_rd, "only the write interrupt line is raised");
    end
    cfg_expect(REG_WR_A_ADDR, 32'h1000_7FF0, "write anomaly address");
    cfg_expect(REG_WR_A_INFO, (32'd2 << 12) | (32'd1 << 16) | (32'd7 << 4) | 32'd6, "write anomaly attributes");
    cfg_expect(REG_STATUS, 32'h9, "STATUS: write Decouple, read Supervising");
    snap();
    run_job(0, 32'h1000_8000, 15, 2, 32'h5EED_0001, 1);
    expect_true(ok_cnt == ok0 + 2 && data_err == 0, "reads unaffected while the write side is decoupled");
    begin
      logic [1:0] r;
      cfg_write(REG_WR_A_ADDR, 32'h0, r);
      expect_true(r == RESP_SLVERR, "TE cannot overwrite the anomaly registers");
    end
    cfg_ok(REG_CTRL, 32'h2);
    repeat (2) @(negedge clk);
    expect_true(!irq_wr, "go clears the write interrupt");
    snap();
    run_job(1, 32'h1000_9000, 3, 2, 32'h5EED_0002, 1);
    expect_true(ok_cnt == ok0 + 2, "writes work after readmission");

    // ---------------- illegal read
    snap();
    begin
      automatic int ar0 = ar_cnt;
      run_job(0, 32'h3000_0000, 3, 1, UNWRITTEN, 1);
      expect_true(err_cnt == err0 + 1 && ar_cnt == ar0, "illegal read: error, never reached memory");
      expect_true(irq_rd && !irq_wr, "only the read interrupt line is raised");
    end
    cfg_expect(REG_RD_A_ADDR, 32'h3000_0000, "read anomaly address");
    cfg_expect(REG_STATUS, 32'h6, "STATUS: read Decouple, write Supervising");
    cfg_ok(REG_CTRL, 32'h1);
    repeat (2) @(negedge clk);
    expect_true(!irq_rd, "go clears the read interrupt");
    snap();
    run_job(0, 32'h1000_9000, 3, 2, 32'h5EED_0002, 1);
    expect_true(ok_cnt == ok0 + 2 && data_err == 0, "reads work after readmission");

    // ---------------- reset clears everything
    @(negedge clk); rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    cfg_expect(REG_STATUS, 32'h0, "STATUS after reset");
    cfg_expect(12'h100, 32'h0, "read region cleared by reset");
    cfg_expect(12'h204, 32'h0, "write region cleared by reset");
    cfg_expect(REG_RD_A_ADDR, 32'h0, "read anomaly cleared by reset");
    cfg_expect(REG_WR_A_ADDR, 32'h0, "write anomaly cleared by reset");

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
