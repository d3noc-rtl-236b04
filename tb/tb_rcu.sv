// tb_rcu: runs the reconfiguration control unit for a series of windows
// with 8 modelled measurement units.  At every snap each model hands over a
// random report (one window with no traffic at all).  The testbench checks
// that each operation window lasts exactly the announced length, that a
// reconfiguration period lasts 50 cycles, or longer exactly as long as the
// bus is not released, that the new owners are the report with the largest
// per-destination count, and that the next window length follows the
// gradient-descent rule with its 100-cycle floor and 10x ceiling.
module tb_rcu;
  import d3noc_pkg::*;
  localparam int unsigned NN = 8, RP = 50, WINIT = 100, WIN_W = 32, LAT_W = 40;
  logic clk = 0, rst_n = 0;
  report_t reports [NN];
  logic bus_idle;
  logic snap, rcfg_active, bus_valid;
  logic [NODE_W-1:0] bus_src, bus_dst;
  logic [WIN_W-1:0] win_len;
  logic [LAT_W-1:0] lat_last;
  int checks = 0, failures = 0;
  int n_grow = 0, n_shrink = 0, n_hold = 0, n_nobus = 0, n_extended = 0;

  rcu #(.NUM_NODES(NN), .RP_CYCLES(RP), .WIN_INIT(WINIT), .WIN_W(WIN_W), .LAT_W(LAT_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned model(longint unsigned lc, longint unsigned lp,
                                            longint unsigned wc, longint unsigned wp);
    longint dl = longint'(lc) - longint'(lp);
    longint dt = longint'(wc) - longint'(wp);
    longint unsigned adl = dl < 0 ? -dl : dl;
    longint unsigned adt = dt < 0 ? -dt : dt;
    longint unsigned step, hi, r;
    bit grow = (dl < 0) != (dt < 0);
    if (adt == 0) adt = 1;
    step = (adl / adt) >> 1;
    hi = wc * 10;
    if (grow) r = wc + step;
    else if (step + 100 >= wc) r = 100;
    else r = wc - step;
    if (r > hi) r = hi;
    if (r < 100) r = 100;
    return r;
  endfunction

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint unsigned w_cur = WINIT, w_prev = 0, l_prev = 0;
    foreach (reports[i]) reports[i] = '0;
    bus_idle = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int w = 0; w < 24; w++) begin
      automatic int ow = 0, rp = 0, hold = 0;
      automatic longint unsigned l_cur = 0, best = 0, w_exp;
      automatic int bs = 0, bd = 0;
      automatic bit quiet = (w == 5);
      // operation window: count cycles until snap
      if (w == 0) @(negedge clk);   // later windows: already at their first cycle
      while (!snap) begin
        ow++;
        @(negedge clk);
      end
      expect_eq(ow, w_cur, "operation window length");
      // reports appear at the snap edge, as from real measurement units;
      // latency falls for a while, then rises, then is random
      @(posedge clk);
      for (int n = 0; n < NN; n++) begin
        report_t r;
        r.id      = ADDR_W'(n);
        r.max_dst = ADDR_W'($urandom_range(0, NN-1));
        r.max_cnt = quiet ? 0 : CNT_W'($urandom_range(1, 5000));
        r.total   = r.max_cnt + CNT_W'($urandom_range(0, 100));
        r.lat_sum = (w < 8)  ? LATSUM_W'(100000 - w*10000 + $urandom_range(0, 50)) :
                    (w < 12) ? LATSUM_W'(40000 + w*5000) : LATSUM_W'($urandom_range(0, 200000));
        reports[n] <= r;
        l_cur += r.lat_sum;
        if (r.max_cnt > best) begin best = r.max_cnt; bs = n; bd = r.max_dst; end
      end
      // reconfiguration period; in some windows the bus is released late
      hold = (w % 4 == 3) ? 17 : 0;
      @(negedge clk);
      rp = 1;
      while (rcfg_active) begin
        bus_idle = !(rp >= RP - 1 && rp < RP - 1 + hold);
        rp++;
        @(negedge clk);
      end
      bus_idle = 1;
      expect_eq(rp, RP + hold, "reconfiguration period length");
      if (hold != 0) n_extended++;
      w_exp = model(l_cur, l_prev, w_cur, w_prev);
      expect_eq(win_len, w_exp, "next window");
      expect_eq(lat_last, l_cur, "window latency");
      expect_eq(bus_valid, !quiet, "bus allocated");
      if (!quiet) begin
        expect_eq(bus_src, bs, "bus source");
        expect_eq(bus_dst, bd, "bus destination");
      end else n_nobus++;
      if (w_exp > w_cur) n_grow++; else if (w_exp < w_cur) n_shrink++; else n_hold++;
      w_prev = w_cur; w_cur = w_exp; l_prev = l_cur;
    end
    checks++;
    if (n_grow == 0 || n_shrink == 0 || n_nobus == 0 || n_extended == 0) begin
      failures++;
      $display("not reached: grow %0d shrink %0d nobus %0d extended %0d", n_grow, n_shrink, n_nobus, n_extended);
    end
    $display("windows grew %0d shrank %0d held %0d; no-bus %0d; extended periods %0d",
             n_grow, n_shrink, n_hold, n_nobus, n_extended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
