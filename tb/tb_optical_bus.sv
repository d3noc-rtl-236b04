// tb_optical_bus: a 4x4 optical bus under random owner pairs, in both
// propagation directions along the serpentine.  The source sends random
// flits in random cycles; each must arrive, data and control fields intact,
// at the destination only and one cycle later (in the register after the
// O-E step), and nowhere else.  The destination's credits must reach the
// source only.  Also checks the serpentine order by the direction chosen.
module tb_optical_bus;
  import d3noc_pkg::*;
  localparam int unsigned MX = 4, MY = 4, N = MX*MY, NV = 4;
  logic clk = 0, rst_n = 0;
  logic bus_valid;
  logic [NODE_W-1:0] bus_src, bus_dst;
  logic tx_valid [N];
  flit_t tx_flit [N];
  logic rx_valid [N];
  flit_t rx_flit [N];
  logic [NV-1:0] rx_credit [N];
  logic [NV-1:0] tx_credit [N];
  logic busy;
  int checks = 0, failures = 0, n_fwd = 0, n_bwd = 0, n_flits = 0;

  optical_bus #(.MESH_X(MX), .MESH_Y(MY), .NUM_VC(NV)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pos(int n);
    int x = n % MX, y = n / MX;
    return (y % 2 == 0) ? y*MX + x : y*MX + MX - 1 - x;
  endfunction

  initial begin
    flit_t sent;
    bit sent_v;
    bus_valid = 0; bus_src = 0; bus_dst = 0;
    foreach (tx_valid[i]) begin tx_valid[i] = 0; tx_flit[i] = '0; rx_credit[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pair = 0; pair < 200; pair++) begin
      automatic int s = $urandom_range(0, N-1), d = $urandom_range(0, N-1);
      if (s == d) d = (d + 1) % N;
      if (pos(s) < pos(d)) n_fwd++; else n_bwd++;
      @(negedge clk);
      bus_valid = 1; bus_src = NODE_W'(s); bus_dst = NODE_W'(d);
      sent_v = 0;
      for (int c = 0; c < 20; c++) begin
        // previous cycle's flit must be in the O-E register now
        #1;
        for (int n = 0; n < N; n++) begin
          checks++;
          if (rx_valid[n] != (sent_v && n == d) || (rx_valid[n] && rx_flit[n] != sent)) begin
            failures++;
            if (failures < 10) $display("pair %0d->%0d node %0d: rx_valid %0b", s, d, n, rx_valid[n]);
          end
        end
        // new stimulus for this cycle
        foreach (rx_credit[i]) rx_credit[i] = NV'($urandom);
        sent_v = (c < 19) && $urandom_range(0, 1);
        sent = '0;
        sent.head = 1'($urandom); sent.tail = 1'($urandom);
        sent.vc = VC_W'($urandom); sent.src = NODE_W'(s); sent.dst = NODE_W'(d);
        sent.ts = $urandom; sent.data = {$urandom, $urandom};
        tx_valid[s] = sent_v; tx_flit[s] = sent;
        #1;
        for (int n = 0; n < N; n++) begin
          checks++;
          if (tx_credit[n] != ((n == s) ? rx_credit[d] : '0)) begin
            failures++;
            if (failures < 10) $display("credit to node %0d wrong", n);
          end
        end
        if (sent_v) n_flits++;
        @(negedge clk);
      end
      tx_valid[s] = 0;
    end
    checks++;
    if (n_fwd == 0 || n_bwd == 0 || n_flits == 0) failures++;
    $display("pairs forward %0d backward %0d, flits %0d", n_fwd, n_bwd, n_flits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
