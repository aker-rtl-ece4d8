// tb_acw_region_check -- self-checking test of the ACW's parallel region comparator.
//
// Drives directed edge cases (burst ending exactly on the last byte of a
// region, one byte past it, starting one byte before it, empty regions,
// bursts running off the top of the address space, WRAP bursts, malformed
// bursts) and then random regions and requests. The reference walks the
// burst beat by beat, as the AXI specification defines the beat addresses,
// collects the lowest and highest byte touched and tests them against each
// region in 64-bit arithmetic. Both 'legal' and the per-region 'match' vector
// are compared.
module tb_acw_region_check;
  import acw_pkg::*;

  localparam int unsigned NR = 8;

  ax_t               ax;
  region_t [NR-1:0]  regions;
  logic              legal;
  logic [NR-1:0]     match;
  int                checks = 0, failures = 0;

  acw_region_check #(.NUM_REGIONS(NR)) dut (.ax, .regions, .legal, .match);

  // Reference: byte span of the burst by walking its beats.
  function automatic bit ref_span(ax_t a, output longint lo, output longint hi);
    longint bytes, total, start, aligned, wlo, whi, beat;
    int     n;
    bytes = longint'(1) << a.size;
    n     = int'(a.len) + 1;
    if (bytes > STRB_W) return 0;
    if (a.burst == 2'b11) return 0;
    if (a.burst == BURST_WRAP && !(n == 2 || n == 4 || n == 8 || n == 16)) return 0;
    start   = longint'(a.addr);
    aligned = (start / bytes) * bytes;
    if (a.burst == BURST_WRAP && aligned != start) return 0;
    total   = bytes * n;
    wlo     = (start / total) * total;
    whi     = wlo + total;
    lo      = start;
    hi      = aligned + bytes - 1;          // first beat
    for (int i = 1; i < n; i++) begin
      case (a.burst)
        BURST_FIXED: beat = aligned; // same lanes as the first beat
        BURST_INCR:  beat = aligned + i * bytes;
        default: begin
          beat = aligned + i * bytes;
          if (beat >= whi) beat = beat - total;
        end
      endcase
      if (beat < lo && a.burst != BURST_FIXED) lo = beat;
      if (beat + bytes - 1 > hi) hi = beat + bytes - 1;
    end
    return 1;
  endfunction

  task automatic check(string what);
    longint        lo, hi, b, e;
    bit            ok;
    logic [NR-1:0] exp_m;
    #1;
    ok = ref_span(ax, lo, hi);
    for (int k = 0; k < NR; k++) begin
      b        = longint'(regions[k].base);
      e        = b + longint'(regions[k].size);
      exp_m[k] = ok && (regions[k].size != 0) && lo >= b && hi < e;
    end
    checks++;
    if (match !== exp_m || legal !== (|exp_m)) begin
      failures++;
      $display("FAIL %s: addr=%h len=%0d size=%0d burst=%0d match=%b exp=%b legal=%b",
               what, ax.addr, ax.len, ax.size, ax.burst, match, exp_m, legal);
    end
  endtask

  function automatic ax_t mk(addr_t a, int len, int size, logic [1:0] burst);
    ax_t r;
    r       = '0;
    r.addr  = a;
    r.len   = 8'(len);
    r.size  = 3'(size);
    r.burst = burst;
    return r;
  endfunction

  initial begin
    regions = '0;
    regions[0] = '{base: 32'h1000_0000, size: 32'h0000_1000};   // 4 KiB
    regions[1] = '{base: 32'h2000_0000, size: 32'h0010_0000};   // 1 MiB
    regions[2] = '{base: 32'hFFFF_F000, size: 32'h0000_1000};   // top page
    regions[3] = '{base: 32'h3000_0000, size: 32'h0000_0000};   // disabled

    // 16 words ending exactly on the last byte of region 0
    ax = mk(32'h1000_0FC0, 15, 2, BURST_INCR); check("end exact");
    if (legal !== 1'b1) begin failures++; $display("FAIL end exact not legal"); end
    // one word more crosses the end
    ax = mk(32'h1000_0FC4, 15, 2, BURST_INCR); check("end+1");
    if (legal !== 1'b0) begin failures++; $display("FAIL end+1 legal"); end
    // unaligned start one byte below the region
    ax = mk(32'h0FFF_FFFF, 0, 0, BURST_INCR); check("start-1");
    ax = mk(32'h1000_0000, 0, 0, BURST_INCR); check("start");
    // inside the disabled region
    ax = mk(32'h3000_0000, 0, 2, BURST_INCR); check("disabled");
    if (legal !== 1'b0) begin failures++; $display("FAIL disabled region matched"); end
    // running off the top of the address space
    ax = mk(32'hFFFF_FFF0, 7, 2, BURST_INCR); check("wrap-around");
    if (legal !== 1'b0) begin failures++; $display("FAIL address wrap legal"); end
    ax = mk(32'hFFFF_FFF0, 3, 2, BURST_INCR); check("top exact");
    // WRAP burst whose window lies inside / straddles
    ax = mk(32'h1000_0FF8, 3, 2, BURST_WRAP); check("wrap in");
    ax = mk(32'h1000_0004, 2, 2, BURST_WRAP); check("wrap bad len");
    ax = mk(32'h1000_0000, 0, 3, BURST_INCR); check("size too large");
    ax = mk(32'h1000_0000, 3, 2, 2'b11);      check("reserved burst");
    ax = mk(32'h1000_0010, 200, 2, BURST_FIXED); check("fixed");

    // random: regions with random bases/sizes, requests near their edges
    for (int t = 0; t < 20000; t++) begin
      if (t % 50 == 0)
        for (int k = 0; k < NR; k++) begin
          regions[k].base = $urandom();
          regions[k].size = ($urandom_range(0, 3) == 0) ? 32'($urandom_range(0, 64))
                                                        : ($urandom() >> $urandom_range(4, 24));
        end
      begin
        automatic int k = $urandom_range(0, NR - 1);
        addr_t a;
        case ($urandom_range(0, 3))
          0: a = regions[k].base + 32'($urandom_range(0, 64)) - 32'd16;
          1: a = regions[k].base + regions[k].size - 32'($urandom_range(0, 128));
          2: a = regions[k].base + ($urandom() % (regions[k].size + 1));
          default: a = $urandom();
        endcase
        ax       = mk(a, $urandom_range(0, 3) == 0 ? $urandom_range(0, 255) : $urandom_range(0, 15),
                      $urandom_range(0, 3), 2'($urandom_range(0, 3)));
        ax.id    = 4'($urandom());
        ax.prot  = 3'($urandom());
        check("random");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
