// tb_d3noc_top: end-to-end test of D3NOC on a 4x4 mesh (all other sizes as
// in the full design: 4 VCs of 8 flits, 50-cycle reconfiguration period,
// first window of 100 cycles).
//
// Every node has a core model that injects packets of 1-4 flits: light
// uniform background traffic, plus a hot source-destination pair far apart
// and a "passer" node whose packets to the hot destination cross the hot
// source.  Half way through, the hot pair moves.  The testbench checks that
// every packet arrives once, at its destination, with its flits in order and
// its data intact, and that the latency of a lone flit is 3*(hops+1) cycles
// over the mesh and 7 cycles over the express bus.  It also counts how often
// each mechanism of the design occurred and fails if one never did:
// reconfiguration periods, bus allocation to the measured hot pair, flits
// carried by the bus, bus use by packets of other sources (X-Y*), injection
// held off during reconfiguration, a window that grew and a window held at
// a bound.
module tb_d3noc_top;
  import d3noc_pkg::*;
  localparam int unsigned MX = 4, MY = 4;
  localparam int unsigned N = MX * MY;
  localparam int unsigned RUN = 9000;        // cycles of random traffic
  localparam int unsigned WATCHDOG = 40000;

  logic clk = 0, rst_n = 0;
  logic inj_valid [N];
  flit_t inj_flit [N];
  logic inj_ready [N];
  logic ej_valid [N];
  flit_t ej_flit [N];
  logic bus_valid, rcfg_active;
  logic [NODE_W-1:0] bus_src, bus_dst;
  logic [31:0] win_len;
  logic [39:0] lat_last;
  logic [TS_W-1:0] now;

  d3noc_top #(.MESH_X(MX), .MESH_Y(MY)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- hot pairs and passers (node id = y*MX + x)
  localparam int A_SRC = 1,                 A_DST = (MY-1)*MX + MX-2, A_PASS = 0;
  localparam int B_SRC = (MY-2)*MX + MX-2,  B_DST = MX,               B_PASS = (MY-2)*MX + MX-1;

  // ---------------- core models
  flit_t  q [N][$];
  int     pkt_dst [int];
  int     pkt_len [int];
  int     pkt_next [int];
  int     pkt_t0 [int];
  int     next_id = 0, sent_pkts = 0, done_pkts = 0;
  int     cyc = 0;
  bit     gen_on = 0;
  int     hot_src = A_SRC, hot_dst = A_DST, pass = A_PASS;
  int     bg_pct = 2, hot_pct = 30;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic new_packet(int s, int d, int len);
    automatic int id = next_id++;
    automatic int v  = $urandom_range(0, 3);
    for (int i = 0; i < len; i++) begin
      flit_t f = '0;
      f.head = (i == 0); f.tail = (i == len - 1); f.vc = VC_W'(v); f.dst = NODE_W'(d);
      f.data = {32'(id), 8'(i), 8'(len), 16'(s ^ 16'hA5A5)};
      q[s].push_back(f);
    end
    pkt_dst[id] = d; pkt_len[id] = len; pkt_next[id] = 0;
    sent_pkts++;
  endtask

  // traffic generation
  always @(negedge clk) if (gen_on) begin
    for (int s = 0; s < N; s++) begin
      if (q[s].size() < 16 && $urandom_range(0, 99) < bg_pct) begin
        automatic int d = $urandom_range(0, N-2);
        if (d >= s) d++;
        new_packet(s, d, $urandom_range(1, 4));
      end
    end
    if (q[hot_src].size() < 24 && $urandom_range(0, 99) < hot_pct) new_packet(hot_src, hot_dst, $urandom_range(1, 4));
    if (q[pass].size() < 24 && $urandom_range(0, 99) < hot_pct/3) new_packet(pass, hot_dst, $urandom_range(1, 4));
  end

  // injection: drive after the negedge, accept what is ready
  int n_held = 0;
  always @(negedge clk) if (rst_n) begin
    #1;
    for (int s = 0; s < N; s++) begin
      inj_valid[s] = (q[s].size() != 0);
      inj_flit[s]  = inj_valid[s] ? q[s][0] : '0;
    end
    #1;
    for (int s = 0; s < N; s++) if (inj_valid[s]) begin
      if (inj_ready[s]) begin
        automatic flit_t f = q[s].pop_front();
        checks++;
        if (rcfg_active) begin
          failures++;
          if (failures < 10) $display("node %0d injected during reconfiguration", s);
        end
        if (f.head) pkt_t0[int'(f.data[63:32])] = cyc;
      end else if (rcfg_active) n_held++;
    end
  end

  // delivery checks
  int last_lat = 0;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) if (ej_valid[n]) begin
      automatic flit_t f = ej_flit[n];
      automatic int id = int'(f.data[63:32]), idx = int'(f.data[31:24]);
      checks++;
      if (!pkt_dst.exists(id) || pkt_dst[id] != n || pkt_next[id] != idx ||
          f.data[15:0] != (16'(f.src) ^ 16'hA5A5) || f.dst != NODE_W'(n)) begin
        failures++;
        if (failures < 10) $display("bad flit at node %0d: packet %0d index %0d", n, id, idx);
      end else begin
        pkt_next[id]++;
        if (f.tail) begin
          done_pkts++;
          last_lat = cyc - pkt_t0[id];
          checks++;
          if (idx != pkt_len[id] - 1) begin failures++; $display("early tail, packet %0d", id); end
        end
      end
    end
  end

  // ---------------- mechanism counters
  int n_rcfg = 0, n_alloc_hot = 0, n_bus_flits = 0, n_bus_others = 0, n_grow = 0, n_bound = 0;
  int prev_win = 100;
  logic prev_rcfg = 0;
  always @(posedge clk) if (rst_n) begin
    prev_rcfg <= rcfg_active;
    if (rcfg_active && !prev_rcfg) n_rcfg++;
    if (!rcfg_active && prev_rcfg) begin
      if (bus_valid && bus_src == NODE_W'(hot_src) && bus_dst == NODE_W'(hot_dst)) n_alloc_hot++;
      if (int'(win_len) > prev_win) n_grow++;
      if (int'(win_len) == 100 || int'(win_len) == 10*prev_win) n_bound++;
      $display("cycle %0d: window %0d -> %0d, bus %0b %0d->%0d, last window latency %0d",
               cyc, prev_win, win_len, bus_valid, bus_src, bus_dst, lat_last);
      prev_win = int'(win_len);
    end
    if (dut.u_bus.busy) begin
      n_bus_flits++;
      if (dut.u_bus.oe_flit.src != bus_src) n_bus_others++;
    end
  end

  // ---------------- lone-flit latency
  task automatic lone_flit(int s, int d, int expect_lat, string what);
    automatic int id = next_id;
    automatic int t;
    new_packet(s, d, 1);
    t = cyc;
    while (!(pkt_next.exists(id) && pkt_next[id] == 1) && cyc < t + 200) @(posedge clk);
    @(negedge clk);
    checks++;
    if (last_lat != expect_lat) begin
      failures++;
      $display("%s: latency %0d, expected %0d", what, last_lat, expect_lat);
    end else $display("%s: latency %0d cycles", what, last_lat);
  endtask

  function automatic int hops(int s, int d);
    return ((s % MX > d % MX) ? s % MX - d % MX : d % MX - s % MX) +
           ((s / MX > d / MX) ? s / MX - d / MX : d / MX - s / MX);
  endfunction

  task automatic wait_quiet(int hold);
    // wait for an empty network, outside a reconfiguration period with
    // at least hold cycles of the window left
    automatic int spins = 0;
    while ((done_pkts != sent_pkts || rcfg_active ||
            int'(dut.u_rcu.cnt_q) + hold >= int'(win_len)) && spins < 20000) begin
      @(negedge clk);
      spins++;
    end
  endtask

  initial begin
    foreach (inj_valid[i]) begin inj_valid[i] = 0; inj_flit[i] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // lone flit over the mesh, corner to corner, before any bus exists
    lone_flit(0, N-1, 3 * (hops(0, N-1) + 1), "mesh path");
    // heavy then lighter traffic with hot pair A
    gen_on = 1;
    bg_pct = 6; hot_pct = 60;
    repeat (RUN/6) @(posedge clk);
    bg_pct = 1; hot_pct = 20;
    repeat (RUN/3) @(posedge clk);
    // lone flit over the bus once it belongs to pair A
    gen_on = 0;
    wait_quiet(60);
    checks++;
    if (!(bus_valid && bus_src == NODE_W'(A_SRC) && bus_dst == NODE_W'(A_DST))) begin
      failures++;
      $display("bus not allocated to the hot pair %0d->%0d", A_SRC, A_DST);
    end else lone_flit(A_SRC, A_DST, 7, "bus path");
    // hot pair moves
    hot_src = B_SRC; hot_dst = B_DST; pass = B_PASS;
    bg_pct = 3; hot_pct = 50;
    gen_on = 1;
    repeat (RUN/2) @(posedge clk);
    gen_on = 0;
    wait_quiet(0);
    repeat (200) @(posedge clk);
    checks++;
    if (done_pkts != sent_pkts) begin failures++; $display("delivered %0d of %0d packets", done_pkts, sent_pkts); end
    $display("packets %0d; reconfigurations %0d, hot-pair allocations %0d, bus flits %0d (other sources %0d), injections held %0d, windows grown %0d, bounded %0d",
             sent_pkts, n_rcfg, n_alloc_hot, n_bus_flits, n_bus_others, n_held, n_grow, n_bound);
    checks += 7;
    if (n_rcfg == 0)       begin failures++; $display("no reconfiguration"); end
    if (n_alloc_hot < 2)   begin failures++; $display("bus not given to both hot pairs"); end
    if (n_bus_flits == 0)  begin failures++; $display("bus never used"); end
    if (n_bus_others == 0) begin failures++; $display("no X-Y* use by other sources"); end
    if (n_held == 0)       begin failures++; $display("injection never held"); end
    if (n_grow == 0)       begin failures++; $display("window never grew"); end
    if (n_bound == 0)      begin failures++; $display("window never at a bound"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
