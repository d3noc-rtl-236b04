// tb_measurement_unit: drives random injections (with a few hot
// destinations) and packet deliveries into measurement_unit over several
// windows and compares every report with counts kept by the testbench: total
// flits, the largest per-destination count and its destination (first to
// reach it on ties), and the latency sum.  Also checks that a snap empties
// the traffic table, counting the snap cycle's events in the new window.
module tb_measurement_unit;
  import d3noc_pkg::*;
  localparam int unsigned NN = 256;
  logic clk = 0, rst_n = 0;
  logic [NODE_W-1:0] my_id = 8'd37;
  logic [TS_W-1:0] now = 0;
  logic inj_valid, ej_valid, ej_tail, snap;
  logic [NODE_W-1:0] inj_dst;
  logic [TS_W-1:0] ej_ts;
  report_t report;
  int checks = 0, failures = 0;

  measurement_unit #(.NUM_NODES(NN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned cnt [NN];
  longint unsigned total, lat, max_cnt;
  int max_dst;

  task automatic clear_model();
    foreach (cnt[i]) cnt[i] = 0;
    total = 0; lat = 0; max_cnt = 0; max_dst = 0;
  endtask

  task automatic count_events(logic [TS_W-1:0] t);
    if (inj_valid) begin
      cnt[inj_dst]++;
      total++;
      if (cnt[inj_dst] > max_cnt) begin
        max_cnt = cnt[inj_dst];
        max_dst = inj_dst;
      end
    end
    if (ej_valid && ej_tail) lat += t - ej_ts;
  endtask

  initial begin
    inj_valid = 0; ej_valid = 0; ej_tail = 0; snap = 0; inj_dst = 0; ej_ts = 0;
    clear_model();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 8; w++) begin
      automatic int len = 200 + $urandom_range(0, 800);
      automatic int hot = $urandom_range(0, NN-1);
      for (int c = 0; c <= len; c++) begin
        @(negedge clk);
        snap      = (c == len);
        inj_valid = $urandom_range(0, 99) < 70;
        inj_dst   = ($urandom_range(0, 99) < 30) ? NODE_W'(hot) : NODE_W'($urandom_range(0, NN-1));
        ej_valid  = $urandom_range(0, 99) < 50;
        ej_tail   = $urandom_range(0, 99) < 40;
        ej_ts     = now - TS_W'($urandom_range(3, 60));
        if (snap) begin
          automatic logic [TS_W-1:0] t_snap = now;
          @(posedge clk); #1;
          checks += 5;
          if (report.id != ADDR_W'(my_id))    begin failures++; $display("w%0d id", w); end
          if (report.total != CNT_W'(total))  begin failures++; $display("w%0d total %0d exp %0d", w, report.total, total); end
          if (report.max_cnt != CNT_W'(max_cnt)) begin failures++; $display("w%0d max_cnt %0d exp %0d", w, report.max_cnt, max_cnt); end
          if (report.max_dst != ADDR_W'(max_dst)) begin failures++; $display("w%0d max_dst %0d exp %0d", w, report.max_dst, max_dst); end
          if (report.lat_sum != LATSUM_W'(lat)) begin failures++; $display("w%0d lat %0d exp %0d", w, report.lat_sum, lat); end
          clear_model();
          // events of the snap cycle belong to the new window
          snap = 0;
          count_events(t_snap);
        end else begin
          count_events(now);
        end
      end
    end
    // a window with one injection only
    @(negedge clk);
    inj_valid = 0; ej_valid = 0;
    @(negedge clk); snap = 1;
    @(posedge clk); #1;
    @(negedge clk); snap = 0; inj_valid = 1; inj_dst = 8'd200;
    @(negedge clk); inj_valid = 0; snap = 1;
    @(posedge clk); #1;
    checks++;
    if (report.total != 1 || report.max_cnt != 1 || report.max_dst != 200) begin
      failures++;
      $display("cleared table: total %0d max %0d dst %0d", report.total, report.max_cnt, report.max_dst);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
