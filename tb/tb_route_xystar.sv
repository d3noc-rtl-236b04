// tb_route_xystar: checks X-Y* route decisions of route_xystar on the 16x16
// mesh against a model written from node coordinates: every (router,
// destination) pair without a bus, and random pairs with a bus whose source
// or destination often coincides with them.
module tb_route_xystar;
  import d3noc_pkg::*;
  localparam int unsigned MX = 16, MY = 16;
  logic [NODE_W-1:0] my_id, dst, bus_src, bus_dst;
  logic bus_valid, bus_en;
  port_e port;
  int checks = 0, failures = 0;
  logic clk = 0;

  route_xystar #(.MESH_X(MX), .MESH_Y(MY)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic port_e model(int me, int d, bit bv, bit be, int bs, int bd);
    int mx = me % MX, my = me / MX, dx = d % MX, dy = d / MX;
    if (d == me) return P_LOCAL;
    if (bv && be && me == bs && d == bd) return P_OPT;
    if (dx > mx) return P_EAST;
    if (dx < mx) return P_WEST;
    if (dy < my) return P_NORTH;
    return P_SOUTH;
  endfunction

  task automatic check(int me, int d, bit bv, bit be, int bs, int bd);
    port_e exp;
    my_id = NODE_W'(me); dst = NODE_W'(d); bus_valid = bv; bus_en = be;
    bus_src = NODE_W'(bs); bus_dst = NODE_W'(bd);
    #1;
    exp = model(me, d, bv, be, bs, bd);
    checks++;
    if (port != exp) begin
      failures++;
      if (failures < 10) $display("router %0d dst %0d bus %0b/%0b %0d->%0d: got %0d expected %0d",
                                  me, d, bv, be, bs, bd, port, exp);
    end
  endtask

  initial begin
    int opt_seen = 0;
    for (int me = 0; me < MX*MY; me++)
      for (int d = 0; d < MX*MY; d++) check(me, d, 0, 1, 0, 0);
    for (int k = 0; k < 20000; k++) begin
      automatic int me = $urandom_range(0, MX*MY-1), d = $urandom_range(0, MX*MY-1);
      automatic int bs = ($urandom_range(0, 1)) ? me : $urandom_range(0, MX*MY-1);
      automatic int bd = ($urandom_range(0, 1)) ? d  : $urandom_range(0, MX*MY-1);
      automatic bit bv = $urandom_range(0, 3) != 0, be = $urandom_range(0, 3) != 0;
      check(me, d, bv, be, bs, bd);
      if (port == P_OPT) opt_seen++;
    end
    checks++;
    if (opt_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
