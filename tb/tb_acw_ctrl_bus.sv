// tb_acw_ctrl_bus -- self-checking test of the Trusted Entity control bus.
//
// Three acw_regs register files sit behind the bus, as in the evaluated
// system. The testbench plays the Trusted Entity: it writes a different
// region value into each ACW's page and checks that only the addressed ACW's
// region outputs change, reads each value back through the bus, sends 'go'
// to one ACW at a time and checks that only that ACW's pulse appears, and
// checks that the empty fourth page answers DECERR for reads and writes
// without touching any ACW. Finally random writes and read-backs are compared
// against a shadow copy.
module tb_acw_ctrl_bus;
  import acw_pkg::*;

  localparam int N = 3, NR = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] te_aw_addr, te_ar_addr;
  logic te_aw_valid, te_aw_ready, te_w_valid, te_w_ready, te_b_valid, te_b_ready;
  logic te_ar_valid, te_ar_ready, te_r_valid, te_r_ready;
  lite_w_t te_w;
  lite_r_t te_r;
  logic [1:0] te_b_resp;

  lite_ax_t [N-1:0] acw_aw, acw_ar;
  lite_w_t  [N-1:0] acw_w;
  lite_r_t  [N-1:0] acw_r;
  logic [N-1:0][1:0] acw_b_resp;
  logic [N-1:0] acw_aw_valid, acw_aw_ready, acw_w_valid, acw_w_ready, acw_b_valid, acw_b_ready;
  logic [N-1:0] acw_ar_valid, acw_ar_ready, acw_r_valid, acw_r_ready;

  region_t [N-1:0][NR-1:0] rd_regions, wr_regions;
  logic [N-1:0] rd_go, wr_go;
  int rd_go_n[N], wr_go_n[N];

  int checks = 0, failures = 0;

  acw_ctrl_bus #(.NUM_ACW(N)) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_regs
    acw_regs #(.NUM_RD_REGIONS(NR), .NUM_WR_REGIONS(NR)) u_regs (
      .clk, .rst_n,
      .s_aw(acw_aw[i]), .s_aw_valid(acw_aw_valid[i]), .s_aw_ready(acw_aw_ready[i]),
      .s_w(acw_w[i]), .s_w_valid(acw_w_valid[i]), .s_w_ready(acw_w_ready[i]),
      .s_b_resp(acw_b_resp[i]), .s_b_valid(acw_b_valid[i]), .s_b_ready(acw_b_ready[i]),
      .s_ar(acw_ar[i]), .s_ar_valid(acw_ar_valid[i]), .s_ar_ready(acw_ar_ready[i]),
      .s_r(acw_r[i]), .s_r_valid(acw_r_valid[i]), .s_r_ready(acw_r_ready[i]),
      .rd_regions(rd_regions[i]), .wr_regions(wr_regions[i]),
      .rd_go(rd_go[i]), .wr_go(wr_go[i]),
      .rd_mode(MODE_SUPERVISING), .wr_mode(MODE_RESET),
      .rd_anom_valid(1'b0), .rd_anom('0), .wr_anom_valid(1'b0), .wr_anom('0)
    );
    always @(posedge clk) begin
      if (rst_n && rd_go[i]) rd_go_n[i]++;
      if (rst_n && wr_go[i]) wr_go_n[i]++;
    end
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic te_write(logic [31:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    te_aw_addr = a; te_aw_valid = 1; te_w = '{data: d, strb: 4'hF}; te_w_valid = 1;
    forever begin #1; if (te_aw_ready && te_w_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); te_aw_valid = 0; te_w_valid = 0; te_b_ready = 1;
    forever begin #1; if (te_b_valid) break; @(negedge clk); end
    resp = te_b_resp;
    @(posedge clk);
    @(negedge clk); te_b_ready = 0;
  endtask

  task automatic te_read(logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    te_ar_addr = a; te_ar_valid = 1;
    forever begin #1; if (te_ar_ready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk); te_ar_valid = 0; te_r_ready = 1;
    forever begin #1; if (te_r_valid) break; @(negedge clk); end
    d = te_r.data; resp = te_r.resp;
    @(posedge clk);
    @(negedge clk); te_r_ready = 0;
  endtask

  logic [31:0] shadow[N][NR];   // read-region base words

  task automatic check_outputs(string what);
    for (int i = 0; i < N; i++)
      for (int k = 0; k < NR; k++)
        expect_true(rd_regions[i][k].base == shadow[i][k],
                    $sformatf("%s: ACW %0d region %0d base %h exp %h", what, i, k, rd_regions[i][k].base, shadow[i][k]));
  endtask

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    te_aw_addr = 0; te_ar_addr = 0; te_w = '0;
    te_aw_valid = 0; te_w_valid = 0; te_b_ready = 0; te_ar_valid = 0; te_r_ready = 0;
    foreach (shadow[i, k]) shadow[i][k] = 0;
    foreach (rd_go_n[i]) begin rd_go_n[i] = 0; wr_go_n[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- one write per ACW page, only that ACW changes
    for (int i = 0; i < N; i++) begin
      automatic logic [31:0] v = 32'h1000_0000 * (i + 1) + 32'h40;
      te_write(32'(i) * 4096 + 32'h100, v, resp);
      shadow[i][0] = v;
      expect_true(resp == RESP_OKAY, $sformatf("write to ACW %0d OKAY", i));
      check_outputs($sformatf("after write to ACW %0d", i));
    end
    for (int i = 0; i < N; i++) begin
      te_read(32'(i) * 4096 + 32'h100, d, resp);
      expect_true(d == shadow[i][0] && resp == RESP_OKAY, $sformatf("read back ACW %0d: %h", i, d));
      te_read(32'(i) * 4096 + 32'h020, d, resp);
      expect_true(d == {16'(NR), 16'(NR)} && resp == RESP_OKAY, $sformatf("ACW %0d NREGIONS", i));
      te_read(32'(i) * 4096 + 32'h004, d, resp);
      expect_true(d == 32'h1 && resp == RESP_OKAY, $sformatf("ACW %0d STATUS", i));
    end

    // ---------------- go goes only to the addressed ACW
    for (int i = 0; i < N; i++) begin
      te_write(32'(i) * 4096, 32'h3, resp);
      repeat (2) @(negedge clk);
      for (int j = 0; j < N; j++)
        expect_true(rd_go_n[j] == (j <= i) && wr_go_n[j] == (j <= i),
                    $sformatf("go to ACW %0d: ACW %0d pulses %0d/%0d", i, j, rd_go_n[j], wr_go_n[j]));
    end

    // ---------------- empty page -> DECERR, nothing changes
    te_write(32'h0000_3100, 32'hFFFF_FFFF, resp);
    expect_true(resp == RESP_DECERR, "write to empty page -> DECERR");
    te_read(32'h0000_3100, d, resp);
    expect_true(resp == RESP_DECERR && d == 0, "read of empty page -> DECERR");
    te_write(32'h0000_3000, 32'h3, resp);
    repeat (2) @(negedge clk);
    for (int j = 0; j < N; j++)
      expect_true(rd_go_n[j] == 1 && wr_go_n[j] == 1, "go to empty page reaches no ACW");
    check_outputs("after empty-page accesses");

    // ---------------- SLVERR from an ACW is passed through
    te_write(32'h0000_1010, 32'h0, resp);
    expect_true(resp == RESP_SLVERR, "ACW SLVERR passed back to the Trusted Entity");

    // ---------------- random traffic
    for (int t = 0; t < 60; t++) begin
      automatic int i = $urandom_range(0, N - 1);
      automatic int k = $urandom_range(0, NR - 1);
      automatic logic [31:0] a = 32'(i) * 4096 + 32'h100 + 32'(8 * k);
      if ($urandom_range(0, 1)) begin
        automatic logic [31:0] v = $urandom();
        te_write(a, v, resp);
        shadow[i][k] = v;
        expect_true(resp == RESP_OKAY, "random write OKAY");
      end else begin
        te_read(a, d, resp);
        expect_true(resp == RESP_OKAY && d == shadow[i][k], $sformatf("random read ACW %0d region %0d", i, k));
      end
    end
    check_outputs("after random traffic");

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
