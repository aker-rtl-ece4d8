// axi_dma_model -- behavioural AXI4 controller (a simple DMA engine) for the testbenches.
//
// On a 'start' pulse it performs 'bursts' INCR bursts of len+1 32-bit words,
// reading or writing consecutive addresses from 'base'. One burst is in
// flight at a time; the next one is issued 'gap' cycles after the previous
// one's last response, which matches a controller that retries after each
// error. Written words are word_address ^ seed; read words are checked
// against the same formula (a mismatch on an OKAY beat counts in data_err).
// It counts OKAY and error responses and the simulation time from 'start'
// to the end of the last burst (elapsed).
// Not synthesizable.
module axi_dma_model
  import acw_pkg::*;
#(
  parameter id_t ID = '0
) (
  input  logic  clk,
  input  logic  rst_n,
  // command
  input  logic  start,
  input  logic  write,
  input  addr_t base,
  input  int    len,
  input  int    bursts,
  input  int    gap,
  input  data_t seed,
  output logic  busy,
  output int    ok_cnt,
  output int    err_cnt,
  output int    data_err,
  output int    elapsed,
  // AXI4 manager port
  output ax_t   aw,
  output logic  aw_valid,
  input  logic  aw_ready,
  output w_t    w,
  output logic  w_valid,
  input  logic  w_ready,
  input  b_t    b,
  input  logic  b_valid,
  output logic  b_ready,
  output ax_t   ar,
  output logic  ar_valid,
  input  logic  ar_ready,
  input  r_t    r,
  input  logic  r_valid,
  output logic  r_ready
);

  function automatic ax_t mk(addr_t a);
    ax_t x;
    x       = '0;
    x.id    = ID;
    x.addr  = a;
    x.len   = 8'(len);
    x.size  = 3'd2;
    x.burst = BURST_INCR;
    return x;
  endfunction

  initial begin
    busy = 0; ok_cnt = 0; err_cnt = 0; data_err = 0; elapsed = 0;
    aw = '0; aw_valid = 0; w = '0; w_valid = 0; b_ready = 0;
    ar = '0; ar_valid = 0; r_ready = 0;
  end

  always begin
    @(posedge clk);
    if (rst_n && start && !busy) begin
      int    t0;
      addr_t a;
      t0   = $time;
      busy <= 1'b1;
      a    = base;
      for (int n = 0; n < bursts; n++) begin
        if (write) begin
          automatic ax_t x = mk(a);
          automatic bit  aw_done = 0;
          automatic int  beat = 0;
          aw <= x; aw_valid <= 1'b1;
          w  <= '{data: (a >> 2) ^ seed, strb: '1, last: (len == 0)}; w_valid <= 1'b1;
          while (!aw_done || beat <= len) begin
            @(posedge clk);
            if (aw_valid && aw_ready) begin aw_done = 1; aw_valid <= 1'b0; aw <= '0; end
            if (w_valid && w_ready) begin
              beat++;
              if (beat > len) begin w_valid <= 1'b0; w <= '0; end
              else w <= '{data: ((a >> 2) + addr_t'(beat)) ^ seed, strb: '1, last: (beat == len)};
            end
          end
          b_ready <= 1'b1;
          do @(posedge clk); while (!b_valid);
          if (b.resp == RESP_OKAY) ok_cnt <= ok_cnt + 1; else err_cnt <= err_cnt + 1;
          b_ready <= 1'b0;
        end else begin
          automatic bit err = 0;
          automatic int beat = 0;
          ar <= mk(a); ar_valid <= 1'b1;
          do @(posedge clk); while (!ar_ready);
          ar_valid <= 1'b0; ar <= '0;
          r_ready <= 1'b1;
          forever begin
            @(posedge clk);
            if (r_valid) begin
              if (r.resp != RESP_OKAY) err = 1;
              else if (r.data !== (((a >> 2) + addr_t'(beat)) ^ seed)) data_err <= data_err + 1;
              beat++;
              if (r.last) break;
            end
          end
          r_ready <= 1'b0;
          if (err) err_cnt <= err_cnt + 1; else ok_cnt <= ok_cnt + 1;
        end
        a = a + addr_t'((len + 1) * 4);
        repeat (gap) @(posedge clk);
      end
      elapsed <= int'(($time - t0));
      busy   <= 1'b0;
      @(posedge clk);
    end
  end

endmodule
