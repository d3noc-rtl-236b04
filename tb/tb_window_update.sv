// tb_window_update: random latencies and window lengths (and the corner
// cases of equal windows, equal latencies, the 100-cycle floor and the
// 10x ceiling) through window_update, compared with the gradient-descent
// rule evaluated in the testbench with 64-bit integers; also checks that
// the result is ready LAT_W+4+2 cycles after start.
module tb_window_update;
  localparam int unsigned WIN_W = 32, LAT_W = 40;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [LAT_W-1:0] lat_cur, lat_prev;
  logic [WIN_W-1:0] win_cur, win_prev, win_next;
  logic busy, done;
  int checks = 0, failures = 0;
  int grew = 0, floored = 0, capped = 0;

  window_update #(.WIN_W(WIN_W), .LAT_W(LAT_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // T_next = T - alpha*(dL/dT), alpha = 1/2, quotient truncated
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
    if (hi > 64'hFFFF_FFFF) hi = 64'hFFFF_FFFF;
    if (grow) r = wc + step;
    else if (step + 100 >= wc) r = 100;
    else r = wc - step;
    if (r > hi) r = hi;
    if (r < 100) r = 100;
    return r;
  endfunction

  task automatic run(longint unsigned lc, lp, wc, wp);
    longint unsigned exp;
    int cyc = 0;
    @(negedge clk);
    lat_cur = LAT_W'(lc); lat_prev = LAT_W'(lp); win_cur = WIN_W'(wc); win_prev = WIN_W'(wp);
    start = 1;
    @(negedge clk);
    start = 0;
    lat_cur = '0; win_cur = '0;                // inputs are captured at start
    while (!done) begin @(negedge clk); cyc++; end
    exp = model(lc, lp, wc, wp);
    checks += 2;
    if (win_next != WIN_W'(exp)) begin
      failures++;
      $display("L %0d/%0d T %0d/%0d: next %0d expected %0d", lc, lp, wc, wp, win_next, exp);
    end
    if (cyc + 1 != LAT_W + 4 + 2) begin
      failures++;
      $display("latency %0d cycles, expected %0d", cyc + 1, LAT_W + 4 + 2);
    end
    if (exp > wc) grew++;
    if (exp == 100) floored++;
    if (exp == wc * 10) capped++;
  endtask

  initial begin
    start = 0; lat_cur = 0; lat_prev = 0; win_cur = 0; win_prev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(5000, 0, 100, 0);        // first window: latency grew -> floor
    run(3000, 5000, 100, 100);   // equal windows, latency fell -> x10
    run(3000, 3000, 1000, 100);  // no change
    run(90000, 3000, 1000, 100); // strong increase -> floor
    run(1000, 90000, 1000, 100); // decrease as window grew -> grow, capped
    for (int k = 0; k < 300; k++) begin
      automatic longint unsigned wc = 100 + $urandom_range(0, 20000);
      automatic longint unsigned wp = ($urandom_range(0, 3) == 0) ? wc : 100 + $urandom_range(0, 20000);
      automatic longint unsigned lc = {$urandom_range(0, 255), $urandom};
      automatic longint unsigned lp = ($urandom_range(0, 1)) ? lc + $urandom_range(0, 100000) : {$urandom_range(0, 255), $urandom};
      lc = lc & 40'hFF_FFFF_FFFF; lp = lp & 40'hFF_FFFF_FFFF;
      run(lc, lp, wc, wp);
    end
    checks++;
    if (grew == 0 || floored == 0 || capped == 0) begin
      failures++;
      $display("cases not reached: grew %0d floored %0d capped %0d", grew, floored, capped);
    end
    $display("grew %0d floored %0d capped %0d", grew, floored, capped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
