// acw_ctrl_bus -- control bus from the Trusted Entity to the ACW configuration ports.
//
// A 1-to-N AXI-lite demultiplexer. The Trusted Entity's manager port sees all
// ACWs in one address window: ACW i occupies the 4 KiB page at
// i * 4096 (address bits [11:0] go to the ACW, bits [11+IDX_W:12] select it,
// higher bits are ignored). An access to a page with no ACW behind it is
// answered here with DECERR.
//
// Each direction handles one access at a time: the write address and data
// are registered together, offered to the selected ACW until both are taken,
// and its B is registered and returned; reads likewise. So a write costs
// about four cycles, which is irrelevant for configuration traffic.
//
// Interface: te_* (subordinate, from the Trusted Entity), acw_* arrays
// (manager, one entry per ACW).
//
// The paper only names and draws this bus; its address map and the
// one-access-at-a-time behaviour are this design's own choices.
module acw_ctrl_bus
  import acw_pkg::*;
#(
  parameter int unsigned NUM_ACW = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // from the Trusted Entity
  input  logic [31:0]               te_aw_addr,
  input  logic                      te_aw_valid,
  output logic                      te_aw_ready,
  input  lite_w_t                   te_w,
  input  logic                      te_w_valid,
  output logic                      te_w_ready,
  output logic [1:0]                te_b_resp,
  output logic                      te_b_valid,
  input  logic                      te_b_ready,
  input  logic [31:0]               te_ar_addr,
  input  logic                      te_ar_valid,
  output logic                      te_ar_ready,
  output lite_r_t                   te_r,
  output logic                      te_r_valid,
  input  logic                      te_r_ready,
  // to the ACWs
  output lite_ax_t [NUM_ACW-1:0]    acw_aw,
  output logic     [NUM_ACW-1:0]    acw_aw_valid,
  input  logic     [NUM_ACW-1:0]    acw_aw_ready,
  output lite_w_t  [NUM_ACW-1:0]    acw_w,
  output logic     [NUM_ACW-1:0]    acw_w_valid,
  input  logic     [NUM_ACW-1:0]    acw_w_ready,
  input  logic     [NUM_ACW-1:0][1:0] acw_b_resp,
  input  logic     [NUM_ACW-1:0]    acw_b_valid,
  output logic     [NUM_ACW-1:0]    acw_b_ready,
  output lite_ax_t [NUM_ACW-1:0]    acw_ar,
  output logic     [NUM_ACW-1:0]    acw_ar_valid,
  input  logic     [NUM_ACW-1:0]    acw_ar_ready,
  input  lite_r_t  [NUM_ACW-1:0]    acw_r,
  input  logic     [NUM_ACW-1:0]    acw_r_valid,
  output logic     [NUM_ACW-1:0]    acw_r_ready
);

  localparam int unsigned IDX_W = (NUM_ACW > 1) ? $clog2(NUM_ACW) : 1;

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RESP, S_DONE} state_e;

  // ---------------------------------------------------------------- write
  state_e             ws;
  logic [IDX_W-1:0]   wsel;
  lite_ax_t           aw_q;
  lite_w_t            w_q;
  logic               aw_sent, w_sent;

  assign te_aw_ready = (ws == S_IDLE) && te_w_valid;
  assign te_w_ready  = (ws == S_IDLE) && te_aw_valid;
  assign te_b_valid  = (ws == S_DONE);

  always_comb begin
    acw_aw       = '0;
    acw_aw_valid = '0;
    acw_w        = '0;
    acw_w_valid  = '0;
    acw_b_ready  = '0;
    if (ws == S_REQ) begin
      acw_aw[wsel]       = aw_q;
      acw_aw_valid[wsel] = !aw_sent;
      acw_w[wsel]        = w_q;
      acw_w_valid[wsel]  = !w_sent;
    end
    if (ws == S_RESP) acw_b_ready[wsel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws        <= S_IDLE;
      wsel      <= '0;
      aw_q      <= '0;
      w_q       <= '0;
      aw_sent   <= 1'b0;
      w_sent    <= 1'b0;
      te_b_resp <= RESP_OKAY;
    end else begin
      unique case (ws)
        S_IDLE: if (te_aw_valid && te_w_valid) begin
          wsel      <= te_aw_addr[LITE_AW +: IDX_W];
          aw_q      <= '{addr: te_aw_addr[LITE_AW-1:0], prot: 3'b000};
          w_q       <= te_w;
          aw_sent   <= 1'b0;
          w_sent    <= 1'b0;
          if (32'(te_aw_addr[LITE_AW +: IDX_W]) < NUM_ACW) ws <= S_REQ;
          else begin
            te_b_resp <= RESP_DECERR;
            ws        <= S_DONE;
          end
        end
        S_REQ: begin
          if (acw_aw_ready[wsel]) aw_sent <= 1'b1;
          if (acw_w_ready[wsel])  w_sent  <= 1'b1;
          if ((aw_sent || acw_aw_ready[wsel]) && (w_sent || acw_w_ready[wsel])) ws <= S_RESP;
        end
        S_RESP: if (acw_b_valid[wsel]) begin
          te_b_resp <= acw_b_resp[wsel];
          ws        <= S_DONE;
        end
        S_DONE: if (te_b_ready) ws <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- read
  state_e           rs;
  logic [IDX_W-1:0] rsel;
  lite_ax_t         ar_q;

  assign te_ar_ready = (rs == S_IDLE);
  assign te_r_valid  = (rs == S_DONE);

  always_comb begin
    acw_ar       = '0;
    acw_ar_valid = '0;
    acw_r_ready  = '0;
    if (rs == S_REQ) begin
      acw_ar[rsel]       = ar_q;
      acw_ar_valid[rsel] = 1'b1;
    end
    if (rs == S_RESP) acw_r_ready[rsel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs   <= S_IDLE;
      rsel <= '0;
      ar_q <= '0;
      te_r <= '0;
    end else begin
      unique case (rs)
        S_IDLE: if (te_ar_valid) begin
          rsel <= te_ar_addr[LITE_AW +: IDX_W];
          ar_q <= '{addr: te_ar_addr[LITE_AW-1:0], prot: 3'b000};
          if (32'(te_ar_addr[LITE_AW +: IDX_W]) < NUM_ACW) rs <= S_REQ;
          else begin
            te_r <= '{data: 32'd0, resp: RESP_DECERR};
            rs   <= S_DONE;
          end
        end
        S_REQ:  if (acw_ar_ready[rsel]) rs <= S_RESP;
        S_RESP: if (acw_r_valid[rsel]) begin
          te_r <= acw_r[rsel];
          rs   <= S_DONE;
        end
        S_DONE: if (te_r_ready) begin
          te_r <= '0;
          rs   <= S_IDLE;
        end
      endcase
    end
  end

  a_one_hot_aw: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(acw_aw_valid));
  a_one_hot_ar: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(acw_ar_valid));

endmodule
