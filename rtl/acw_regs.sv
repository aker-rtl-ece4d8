// acw_regs -- configuration port and register file of the Access Control Wrapper.
//
// An AXI-lite subordinate through which the Trusted Entity (TE) programs the
// local access control policy and reads diagnostics. It holds:
//   * NUM_RD_REGIONS read regions and NUM_WR_REGIONS write regions
//     (base, size), read-write, byte strobes honoured;
//   * CTRL (write-only): writing 1 to bit 0 / bit 1 sends a one-cycle 'go'
//     to the read / write channel (leave Reset mode, or readmit from
//     Decouple mode);
//   * STATUS (read-only): the two channel modes;
//   * the read and write anomaly registers (address + attributes of the
//     illegal request), loaded only by the channels. A TE write to them, or
//     to any other read-only or unmapped offset, changes nothing and gets a
//     SLVERR response;
//   * NREGIONS (read-only): the region counts built in.
// Register map (byte offsets) is in acw_pkg. Region k of the read list is at
// 0x100 + 8k (base) and 0x104 + 8k (size); the write list starts at 0x200.
// All registers clear to zero on reset, so after reset every region is empty
// and nothing is legal.
//
// Handshake: a write is taken when AW and W are both valid and no B is
// pending; B follows one cycle later. A read is taken when no R is pending;
// R follows one cycle later. One access of each kind at a time.
//
// Follows the paper: AXI-lite S configuration port, regions as base + size,
// anomaly registers written only by the wrapper, reset clears all registers.
// This design's own choices: the register map and the command bits.
module acw_regs
  import acw_pkg::*;
#(
  parameter int unsigned NUM_RD_REGIONS = 16,
  parameter int unsigned NUM_WR_REGIONS = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // AXI-lite subordinate
  input  lite_ax_t                     s_aw,
  input  logic                         s_aw_valid,
  output logic                         s_aw_ready,
  input  lite_w_t                      s_w,
  input  logic                         s_w_valid,
  output logic                         s_w_ready,
  output logic [1:0]                   s_b_resp,
  output logic                         s_b_valid,
  input  logic                         s_b_ready,
  input  lite_ax_t                     s_ar,
  input  logic                         s_ar_valid,
  output logic                         s_ar_ready,
  output lite_r_t                      s_r,
  output logic                         s_r_valid,
  input  logic                         s_r_ready,
  // to/from the channels
  output region_t [NUM_RD_REGIONS-1:0] rd_regions,
  output region_t [NUM_WR_REGIONS-1:0] wr_regions,
  output logic                         rd_go,
  output logic                         wr_go,
  input  acw_mode_e                    rd_mode,
  input  acw_mode_e                    wr_mode,
  input  logic                         rd_anom_valid,
  input  anomaly_t                     rd_anom,
  input  logic                         wr_anom_valid,
  input  anomaly_t                     wr_anom
);

  initial begin
    assert (NUM_RD_REGIONS >= 1 && NUM_RD_REGIONS <= 32) else $fatal(1, "NUM_RD_REGIONS out of range");
    assert (NUM_WR_REGIONS >= 1 && NUM_WR_REGIONS <= 32) else $fatal(1, "NUM_WR_REGIONS out of range");
    assert (ADDR_W == 32) else $fatal(1, "register map assumes 32-bit addresses");
  end

  region_t [NUM_RD_REGIONS-1:0] rd_q;
  region_t [NUM_WR_REGIONS-1:0] wr_q;
  anomaly_t                     rd_anom_q, wr_anom_q;

  // ---------------------------------------------------------------- decode
  typedef enum logic [2:0] {DEC_NONE, DEC_CTRL, DEC_RO, DEC_RD_REG, DEC_WR_REG} dec_e;

  function automatic dec_e decode(logic [LITE_AW-1:0] a);
    if (a[1:0] != 2'b00)                                            return DEC_NONE;
    if (a == REG_CTRL)                                              return DEC_CTRL;
    if (a inside {REG_STATUS, REG_RD_A_ADDR, REG_RD_A_INFO,
                  REG_WR_A_ADDR, REG_WR_A_INFO, REG_NREGIONS})      return DEC_RO;
    if (a[11:8] == 4'h1 && 32'(a[7:3]) < NUM_RD_REGIONS)            return DEC_RD_REG;
    if (a[11:8] == 4'h2 && 32'(a[7:3]) < NUM_WR_REGIONS)            return DEC_WR_REG;
    return DEC_NONE;
  endfunction

  function automatic logic [31:0] merge(logic [31:0] old, lite_w_t w);
    logic [31:0] v;
    for (int b = 0; b < 4; b++) v[8*b +: 8] = w.strb[b] ? w.data[8*b +: 8] : old[8*b +: 8];
    return v;
  endfunction

  // ---------------------------------------------------------------- write
  logic       wr_take;
  dec_e       wdec;
  logic [4:0] widx;

  assign s_aw_ready = s_w_valid  && !s_b_valid;
  assign s_w_ready  = s_aw_valid && !s_b_valid;
  assign wr_take    = s_aw_valid && s_w_valid && !s_b_valid;
  assign wdec       = decode(s_aw.addr);
  assign widx       = s_aw.addr[7:3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= '0;
      wr_q      <= '0;
      rd_anom_q <= '0;
      wr_anom_q <= '0;
      s_b_valid <= 1'b0;
      s_b_resp  <= RESP_OKAY;
      rd_go     <= 1'b0;
      wr_go     <= 1'b0;
    end else begin
      rd_go <= 1'b0;
      wr_go <= 1'b0;
      if (s_b_valid && s_b_ready) s_b_valid <= 1'b0;
      if (wr_take) begin
        s_b_valid <= 1'b1;
        s_b_resp  <= RESP_OKAY;
        unique case (wdec)
          DEC_CTRL: begin
            rd_go <= s_w.strb[0] && s_w.data[0];
            wr_go <= s_w.strb[0] && s_w.data[1];
          end
          DEC_RD_REG:
            if (s_aw.addr[2]) rd_q[widx].size <= merge(rd_q[widx].size, s_w);
            else              rd_q[widx].base <= merge(rd_q[widx].base, s_w);
          DEC_WR_REG:
            if (s_aw.addr[2]) wr_q[widx].size <= merge(wr_q[widx].size, s_w);
            else              wr_q[widx].base <= merge(wr_q[widx].base, s_w);
          default: s_b_resp <= RESP_SLVERR;
        endcase
      end
      // anomaly registers: written by the channels only
      if (rd_anom_valid) rd_anom_q <= rd_anom;
      if (wr_anom_valid) wr_anom_q <= wr_anom;
    end
  end

  // ---------------------------------------------------------------- read
  logic [31:0] rdata;
  logic        rok;
  logic [4:0]  ridx;

  assign s_ar_ready = !s_r_valid;
  assign ridx       = s_ar.addr[7:3];

  always_comb begin
    rdata = '0;
    rok   = 1'b1;
    unique case (decode(s_ar.addr))
      DEC_CTRL:   rdata = '0;
      DEC_RO:
        unique case (s_ar.addr)
          REG_STATUS:    rdata = {28'd0, wr_mode, rd_mode};
          REG_RD_A_ADDR: rdata = rd_anom_q.addr;
          REG_RD_A_INFO: rdata = anomaly_info(rd_anom_q);
          REG_WR_A_ADDR: rdata = wr_anom_q.addr;
          REG_WR_A_INFO: rdata = anomaly_info(wr_anom_q);
          default:       rdata = {16'(NUM_WR_REGIONS), 16'(NUM_RD_REGIONS)};
        endcase
      DEC_RD_REG: rdata = s_ar.addr[2] ? rd_q[ridx].size : rd_q[ridx].base;
      DEC_WR_REG: rdata = s_ar.addr[2] ? wr_q[ridx].size : wr_q[ridx].base;
      default:    rok   = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_r_valid <= 1'b0;
      s_r       <= '0;
    end else begin
      if (s_r_valid && s_r_ready) begin
        s_r_valid <= 1'b0;
        s_r       <= '0;
      end
      if (s_ar_valid && s_ar_ready) begin
        s_r_valid <= 1'b1;
        s_r.data  <= rdata;
        s_r.resp  <= rok ? RESP_OKAY : RESP_SLVERR;
      end
    end
  end

  assign rd_regions = rd_q;
  assign wr_regions = wr_q;

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_b_valid && !s_b_ready |=> s_b_valid && $stable(s_b_resp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_r_valid && !s_r_ready |=> s_r_valid && $stable(s_r));

endmodule
