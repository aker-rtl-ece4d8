// tb_acw_regs -- self-checking test of the ACW configuration/anomaly register file.
//
// Acts as the Trusted Entity on the AXI-lite port. Checks: every register
// reads zero after reset; region registers read back what was written and
// appear on rd_regions/wr_regions; byte strobes; CTRL bits give one-cycle
// go pulses; STATUS shows the channel modes; the anomaly registers load only
// from the channels and a TE write to them gets SLVERR and changes nothing;
// unmapped and out-of-range offsets get SLVERR; a second reset clears all
// configuration and anomaly registers again. A shadow model of the register
// contents is kept in the testbench.
module tb_acw_regs;
  import acw_pkg::*;

  localparam int NRD = 4, NWR = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lite_ax_t s_aw, s_ar;
  lite_w_t  s_w;
  lite_r_t  s_r;
  logic [1:0] s_b_resp;
  logic s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  region_t [NRD-1:0] rd_regions;
  region_t [NWR-1:0] wr_regions;
  logic rd_go, wr_go, rd_anom_valid, wr_anom_valid;
  acw_mode_e rd_mode, wr_mode;
  anomaly_t rd_anom, wr_anom;

  int checks = 0, failures = 0;
  int rd_go_n = 0, wr_go_n = 0;

  acw_regs #(.NUM_RD_REGIONS(NRD), .NUM_WR_REGIONS(NWR)) dut (.*);

  always @(posedge clk) begin
    if (rst_n && rd_go) rd_go_n++;
    if (rst_n && wr_go) wr_go_n++;
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic lite_write(logic [11:0] a, logic [31:0] d, logic [3:0] strb, output logic [1:0] resp);
    @(negedge clk);
    s_aw = '{addr: a, prot: 3'b0}; s_aw_valid = 1;
    s_w  = '{data: d, strb: strb};  s_w_valid  = 1;
    forever begin #1; if (s_aw_ready && s_w_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); s_aw_valid = 0; s_w_valid = 0; s_b_ready = 1;
    forever begin #1; if (s_b_valid) break; @(negedge clk); end
    resp = s_b_resp;
    @(posedge clk);
    @(negedge clk); s_b_ready = 0;
  endtask

  task automatic lite_read(logic [11:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_ar = '{addr: a, prot: 3'b0}; s_ar_valid = 1;
    forever begin #1; if (s_ar_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); s_ar_valid = 0; s_r_ready = 1;
    forever begin #1; if (s_r_valid) break; @(negedge clk); end
    d = s_r.data; resp = s_r.resp;
    @(posedge clk);
    @(negedge clk); s_r_ready = 0;
  endtask

  task automatic expect_read(logic [11:0] a, logic [31:0] exp, logic [1:0] exp_resp, string what);
    logic [31:0] d; logic [1:0] r;
    lite_read(a, d, r);
    expect_true(d == exp && r == exp_resp, $sformatf("%s: @%h read %h/%0d exp %h/%0d", what, a, d, r, exp, exp_resp));
  endtask

  task automatic expect_write(logic [11:0] a, logic [31:0] d, logic [3:0] strb, logic [1:0] exp_resp, string what);
    logic [1:0] r;
    lite_write(a, d, strb, r);
    expect_true(r == exp_resp, $sformatf("%s: @%h write resp %0d exp %0d", what, a, r, exp_resp));
  endtask

  logic [31:0] shadow_rd[NRD][2], shadow_wr[NWR][2];

  task automatic check_all_regions(string what);
    for (int k = 0; k < NRD; k++) begin
      expect_read(12'h100 + 12'(8 * k), shadow_rd[k][0], RESP_OKAY, {what, " rd base"});
      expect_read(12'h104 + 12'(8 * k), shadow_rd[k][1], RESP_OKAY, {what, " rd size"});
      expect_true(rd_regions[k].base == shadow_rd[k][0] && rd_regions[k].size == shadow_rd[k][1],
                  $sformatf("%s rd_regions[%0d] output", what, k));
    end
    for (int k = 0; k < NWR; k++) begin
      expect_read(12'h200 + 12'(8 * k), shadow_wr[k][0], RESP_OKAY, {what, " wr base"});
      expect_read(12'h204 + 12'(8 * k), shadow_wr[k][1], RESP_OKAY, {what, " wr size"});
      expect_true(wr_regions[k].base == shadow_wr[k][0] && wr_regions[k].size == shadow_wr[k][1],
                  $sformatf("%s wr_regions[%0d] output", what, k));
    end
  endtask

  initial begin
    s_aw = '0; s_ar = '0; s_w = '0;
    s_aw_valid = 0; s_w_valid = 0; s_b_ready = 0; s_ar_valid = 0; s_r_ready = 0;
    rd_mode = MODE_RESET; wr_mode = MODE_RESET;
    rd_anom_valid = 0; wr_anom_valid = 0; rd_anom = '0; wr_anom = '0;
    foreach (shadow_rd[k]) shadow_rd[k] = '{0, 0};
    foreach (shadow_wr[k]) shadow_wr[k] = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- defaults after reset
    check_all_regions("after reset");
    expect_read(REG_RD_A_ADDR, 0, RESP_OKAY, "rd anomaly addr default");
    expect_read(REG_RD_A_INFO, 0, RESP_OKAY, "rd anomaly info default");
    expect_read(REG_WR_A_ADDR, 0, RESP_OKAY, "wr anomaly addr default");
    expect_read(REG_WR_A_INFO, 0, RESP_OKAY, "wr anomaly info default");
    expect_read(REG_NREGIONS, {16'(NWR), 16'(NRD)}, RESP_OKAY, "region counts");
    expect_read(REG_STATUS, 0, RESP_OKAY, "status in reset");

    // ---------------- region registers
    for (int t = 0; t < 40; t++) begin
      automatic bit          is_rd = $urandom_range(0, 1);
      automatic int          k     = is_rd ? $urandom_range(0, NRD - 1) : $urandom_range(0, NWR - 1);
      automatic int          word  = $urandom_range(0, 1);
      automatic logic [31:0] d     = $urandom();
      automatic logic [3:0]  strb  = ($urandom_range(0, 2) == 0) ? 4'($urandom()) : 4'hF;
      automatic logic [31:0] old   = is_rd ? shadow_rd[k][word] : shadow_wr[k][word];
      for (int b = 0; b < 4; b++) if (strb[b]) old[8*b +: 8] = d[8*b +: 8];
      if (is_rd) shadow_rd[k][word] = old; else shadow_wr[k][word] = old;
      expect_write((is_rd ? 12'h100 : 12'h200) + 12'(8 * k + 4 * word), d, strb, RESP_OKAY, "region write");
    end
    check_all_regions("after writes");

    // ---------------- out of range and unmapped
    expect_write(12'h100 + 12'(8 * NRD), 32'h1234, 4'hF, RESP_SLVERR, "read region index out of range");
    expect_write(12'h200 + 12'(8 * NWR), 32'h1234, 4'hF, RESP_SLVERR, "write region index out of range");
    expect_read(12'h200 + 12'(8 * NWR), 0, RESP_SLVERR, "read of missing region");
    expect_write(12'h300, 32'h1, 4'hF, RESP_SLVERR, "unmapped write");
    expect_read(12'h302, 0, RESP_SLVERR, "unaligned read");
    check_all_regions("after rejected writes");

    // ---------------- CTRL go pulses and STATUS
    expect_write(REG_CTRL, 32'h1, 4'hF, RESP_OKAY, "go read");
    repeat (2) @(negedge clk);
    expect_true(rd_go_n == 1 && wr_go_n == 0, $sformatf("CTRL bit0 -> one rd_go pulse (%0d,%0d)", rd_go_n, wr_go_n));
    expect_write(REG_CTRL, 32'h2, 4'hF, RESP_OKAY, "go write");
    repeat (2) @(negedge clk);
    expect_true(rd_go_n == 1 && wr_go_n == 1, "CTRL bit1 -> one wr_go pulse");
    expect_write(REG_CTRL, 32'h3, 4'hF, RESP_OKAY, "go both");
    repeat (2) @(negedge clk);
    expect_true(rd_go_n == 2 && wr_go_n == 2, "CTRL bits 0,1 -> both pulses");
    expect_write(REG_CTRL, 32'h3, 4'h0, RESP_OKAY, "go with no strobe");
    repeat (2) @(negedge clk);
    expect_true(rd_go_n == 2 && wr_go_n == 2, "no strobe -> no pulse");
    rd_mode = MODE_DECOUPLE; wr_mode = MODE_SUPERVISING;
    expect_read(REG_STATUS, 32'h6, RESP_OKAY, "status shows modes");

    // ---------------- anomaly registers
    @(negedge clk);
    rd_anom = '{addr: 32'hDEAD_0040, id: 4'h5, len: 8'd15, size: 3'd2, burst: BURST_INCR, prot: 3'd3};
    rd_anom_valid = 1;
    @(negedge clk); rd_anom_valid = 0; rd_anom = '0;
    wr_anom = '{addr: 32'hBEEF_0100, id: 4'hA, len: 8'd3, size: 3'd1, burst: BURST_WRAP, prot: 3'd6};
    wr_anom_valid = 1;
    @(negedge clk); wr_anom_valid = 0; wr_anom = '0;
    expect_read(REG_RD_A_ADDR, 32'hDEAD_0040, RESP_OKAY, "rd anomaly addr");
    expect_read(REG_RD_A_INFO, (3 << 20) | (1 << 16) | (2 << 12) | (15 << 4) | 5, RESP_OKAY, "rd anomaly info");
    expect_read(REG_WR_A_ADDR, 32'hBEEF_0100, RESP_OKAY, "wr anomaly addr");
    expect_read(REG_WR_A_INFO, (6 << 20) | (2 << 16) | (1 << 12) | (3 << 4) | 10, RESP_OKAY, "wr anomaly info");
    expect_write(REG_RD_A_ADDR, 32'h0, 4'hF, RESP_SLVERR, "TE cannot write rd anomaly");
    expect_write(REG_WR_A_INFO, 32'h0, 4'hF, RESP_SLVERR, "TE cannot write wr anomaly");
    expect_write(REG_STATUS, 32'h0, 4'hF, RESP_SLVERR, "TE cannot write status");
    expect_read(REG_RD_A_ADDR, 32'hDEAD_0040, RESP_OKAY, "rd anomaly unchanged");
    expect_read(REG_WR_A_INFO, (6 << 20) | (2 << 16) | (1 << 12) | (3 << 4) | 10, RESP_OKAY, "wr anomaly unchanged");

    // ---------------- reset clears everything
    @(negedge clk); rst_n = 0;
    repeat (2) @(negedge clk);
    expect_true(rd_regions == '0 && wr_regions == '0, "regions cleared during reset");
    rst_n = 1;
    foreach (shadow_rd[k]) shadow_rd[k] = '{0, 0};
    foreach (shadow_wr[k]) shadow_wr[k] = '{0, 0};
    check_all_regions("after second reset");
    expect_read(REG_RD_A_ADDR, 0, RESP_OKAY, "rd anomaly cleared by reset");
    expect_read(REG_WR_A_ADDR, 0, RESP_OKAY, "wr anomaly cleared by reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
