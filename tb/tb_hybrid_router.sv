// tb_hybrid_router: one router (node 5 of a 4x4 mesh, column 1, row 1) with
// modelled neighbours on all six switched ports.  Upstream models send
// packets of 1-4 flits on random virtual channels, respecting the credits
// the router returns; downstream models accept flits and return credits
// after random delays, with phases of heavy backpressure.  The express bus
// is owned by this node towards node 14.  Checked: the first flit through
// an empty router takes 3 cycles from its link cycle to the output link
// (buffer write, allocation, switch traversal); every packet leaves on the
// X-Y* port (optical for node 14); its flits stay in order on one output VC
// without interleaving; no output VC receives more flits than it has
// credits; every packet is delivered; opt_idle returns once the optical port
// has drained.
module tb_hybrid_router;
  import d3noc_pkg::*;
  localparam int unsigned MX = 4, MY = 4, NV = 4, DEPTH = 8, NP = NUM_PORTS;
  localparam int unsigned ME = 5, BUS_DST = 14;
  logic clk = 0, rst_n = 0;
  logic [NODE_W-1:0] my_id = NODE_W'(ME);
  logic bus_valid = 1, bus_en = 1;
  logic [NODE_W-1:0] bus_src = NODE_W'(ME), bus_dst = NODE_W'(BUS_DST);
  logic [NP-1:0] in_valid;
  flit_t in_flit [NP];
  logic [NV-1:0] in_credit [NP];
  logic [NV-1:0] in_free [NP];
  logic [NP-1:0] out_valid;
  flit_t out_flit [NP];
  logic [NV-1:0] out_credit [NP];
  logic opt_idle;
  int checks = 0, failures = 0;

  hybrid_router #(.MESH_X(MX), .MESH_Y(MY), .NUM_VC(NV), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic port_e route(int d);
    int mx = ME % MX, my = ME / MX, dx = d % MX, dy = d / MX;
    if (d == ME) return P_LOCAL;
    if (d == BUS_DST) return P_OPT;
    if (dx > mx) return P_EAST;
    if (dx < mx) return P_WEST;
    if (dy < my) return P_NORTH;
    return P_SOUTH;
  endfunction

  // data field: packet id [31:16], flit index [15:8], packet length [7:0]
  flit_t pend [NP][NV][$];          // flits waiting at each upstream VC
  int    up_cred [NP][NV];
  int    dn_out  [NP][NV];          // flits held by each downstream VC
  int    dn_pkt  [NP][NV];          // packet open on an output VC, -1 if none
  int    dn_idx  [NP][NV];
  int    exp_port [int];
  int    delivered = 0, total_pkts = 0, n_opt = 0, n_stall = 0;
  bit    heavy = 0;
  int    first_lat = -1;
  bit    auto_on = 0;

  task automatic make_packet(int id, int p);
    automatic int len = $urandom_range(1, 4);
    automatic int d   = $urandom_range(0, MX*MY-1);
    automatic int v   = $urandom_range(0, NV-1);
    for (int i = 0; i < len; i++) begin
      flit_t f = '0;
      f.head = (i == 0); f.tail = (i == len-1);
      f.vc = VC_W'(v); f.dst = NODE_W'(d); f.src = NODE_W'(p);
      f.data = {32'(id) << 16 | 32'(i) << 8 | 32'(len), 32'hC0DE0000 | 32'(p)};
      pend[p][v].push_back(f);
    end
    exp_port[id] = route(d);
    total_pkts++;
  endtask

  // --- upstream drivers
  always @(negedge clk) if (auto_on) begin
    for (int p = 0; p < NP; p++) begin
      int order [NV];
      in_valid[p] = 0;
      for (int v = 0; v < NV; v++) order[v] = (v + $urandom_range(0, NV-1)) % NV;
      for (int k = 0; k < NV; k++) begin
        automatic int v = order[k];
        if (!in_valid[p] && pend[p][v].size() != 0 && up_cred[p][v] > 0 && $urandom_range(0, 3) != 0) begin
          in_valid[p] = 1;
          in_flit[p]  = pend[p][v].pop_front();
          up_cred[p][v]--;
        end
      end
    end
  end

  // --- credit returns to the upstream models, downstream checks
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < NV; v++) if (in_credit[p][v]) begin
        up_cred[p][v]++;
        checks++;
        if (up_cred[p][v] > DEPTH) begin failures++; $display("too many credits port %0d", p); end
      end
    for (int o = 0; o < NP; o++) if (out_valid[o]) begin
      automatic flit_t f = out_flit[o];
      automatic int v = f.vc, id = f.data[63:48], idx = f.data[47:40], len = f.data[39:32];
      checks += 3;
      if (!exp_port.exists(id) || exp_port[id] != o) begin
        failures++; $display("packet %0d left on port %0d", id, o);
      end
      dn_out[o][v]++;
      if (dn_out[o][v] > DEPTH) begin failures++; $display("credit violation port %0d vc %0d", o, v); end
      if (f.head) begin
        if (dn_pkt[o][v] != -1) begin failures++; $display("interleaved packet on port %0d vc %0d", o, v); end
        dn_pkt[o][v] = id; dn_idx[o][v] = 0;
      end else begin
        dn_idx[o][v]++;
        if (dn_pkt[o][v] != id || dn_idx[o][v] != idx) begin
          failures++; $display("flit order broken on port %0d vc %0d", o, v);
        end
      end
      if (f.tail) begin
        if (idx != len-1) begin failures++; $display("early tail"); end
        dn_pkt[o][v] = -1;
        delivered++;
        if (o == P_OPT) n_opt++;
      end
    end
  end

  // --- downstream credit release
  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++)
      for (int v = 0; v < NV; v++) begin
        out_credit[o][v] = 0;
        if (dn_out[o][v] > 0 && $urandom_range(0, 99) < (heavy ? 5 : 60)) begin
          out_credit[o][v] = 1;
          dn_out[o][v]--;
        end
        if (heavy && dn_out[o][v] == DEPTH) n_stall++;
      end
  end

  initial begin
    int id = 0;
    in_valid = '0;
    foreach (in_flit[i]) in_flit[i] = '0;
    foreach (out_credit[i]) out_credit[i] = '0;
    foreach (up_cred[p, v]) up_cred[p][v] = DEPTH;
    foreach (dn_out[p, v]) begin dn_out[p][v] = 0; dn_pkt[p][v] = -1; dn_idx[p][v] = 0; end
    repeat (3) @(posedge clk);
    // latency of one flit through the empty router, driven by hand
    @(negedge clk);
    rst_n = 1;
    in_valid[P_WEST] = 1;
    in_flit[P_WEST] = '0;
    in_flit[P_WEST].head = 1; in_flit[P_WEST].tail = 1; in_flit[P_WEST].dst = 8'd7;
    in_flit[P_WEST].data = {32'(id) << 16 | 32'd1, 32'h0};
    exp_port[id] = route(7); total_pkts++; id++;
    up_cred[P_WEST][0]--;
    for (int c = 1; c < 10 && first_lat < 0; c++) begin
      @(negedge clk);
      in_valid[P_WEST] = 0;
      if (out_valid[P_EAST]) first_lat = c;
    end
    checks++;
    if (first_lat != 3) begin failures++; $display("empty-router latency %0d, expected 3", first_lat); end
    in_valid = '0;
    auto_on = 1;
    // random traffic
    for (int phase = 0; phase < 4; phase++) begin
      heavy = (phase == 2);
      for (int k = 0; k < 300; k++) begin
        make_packet(id, $urandom_range(0, NP-1));
        id++;
      end
      repeat (1500) @(posedge clk);
    end
    heavy = 0;
    repeat (3000) @(posedge clk);
    checks += 3;
    if (delivered != total_pkts) begin failures++; $display("delivered %0d of %0d", delivered, total_pkts); end
    if (n_opt == 0 || n_stall == 0) begin failures++; $display("optical %0d stall %0d", n_opt, n_stall); end
    if (!opt_idle) begin failures++; $display("optical port not idle after draining"); end
    $display("packets %0d delivered %0d via optical %0d, stalled VC-cycles %0d", total_pkts, delivered, n_opt, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
