// d3noc_node: one tile of D3NOC, the hybrid router with its measurement unit.
//
// The core injects flits through inj_valid/inj_flit; a flit is accepted when
// inj_ready is high, which needs room in the local input VC named by the
// flit's vc field and no reconfiguration period in progress (hold_inj).  On
// acceptance the node writes its own id into the source field and stamps
// the flit with the current cycle: a head flit with now, the following flits
// of the packet with the stamp of their head (kept per VC).  Flits for the
// core leave on ej_valid/ej_flit; the core takes every flit at once, so the
// local output's credits return one cycle after each delivery.  The
// measurement unit sees every accepted and every delivered flit and sends
// its report to the reconfiguration control unit on the node's
// reconfiguration port (report).  Mesh and optical ports are passed through
// from the router.  Injection hold-off during reconfiguration follows the
// paper; the stamping scheme is this design's choice.
module d3noc_node
  import d3noc_pkg::*;
#(
  parameter int unsigned MESH_X = 16,
  parameter int unsigned MESH_Y = 16,
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned DEPTH  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_id,
  input  logic [TS_W-1:0]   now,
  // core
  input  logic              inj_valid,
  input  flit_t             inj_flit,
  output logic              inj_ready,
  output logic              ej_valid,
  output flit_t             ej_flit,
  // reconfiguration port
  input  logic              snap,
  input  logic              hold_inj,
  output report_t           report,
  // bus ownership
  input  logic              bus_valid,
  input  logic              bus_en,
  input  logic [NODE_W-1:0] bus_src,
  input  logic [NODE_W-1:0] bus_dst,
  output logic              opt_idle,
  // network ports 1..5 (N, E, S, W, optical); index 0 unused
  input  logic [NUM_PORTS-1:0] net_in_valid,
  input  flit_t                net_in_flit   [NUM_PORTS],
  output logic [NUM_VC-1:0]    net_in_credit [NUM_PORTS],
  output logic [NUM_PORTS-1:0] net_out_valid,
  output flit_t                net_out_flit  [NUM_PORTS],
  input  logic [NUM_VC-1:0]    net_out_credit[NUM_PORTS]
);
  logic [NUM_PORTS-1:0] r_in_valid;
  flit_t                r_in_flit   [NUM_PORTS];
  logic [NUM_VC-1:0]    r_in_credit [NUM_PORTS];
  logic [NUM_VC-1:0]    r_in_free   [NUM_PORTS];
  logic [NUM_PORTS-1:0] r_out_valid;
  flit_t                r_out_flit  [NUM_PORTS];
  logic [NUM_VC-1:0]    r_out_credit[NUM_PORTS];

  logic [TS_W-1:0] pkt_ts [NUM_VC];
  logic            inj_fire;
  flit_t           stamped;
  logic [NUM_VC-1:0] ej_credit_q;

  assign inj_ready = !hold_inj && r_in_free[P_LOCAL][inj_flit.vc];
  assign inj_fire  = inj_valid && inj_ready;

  always_comb begin
    stamped     = inj_flit;
    stamped.src = my_id;
    stamped.ts  = inj_flit.head ? now : pkt_ts[inj_flit.vc];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VC; v++) pkt_ts[v] <= '0;
      ej_credit_q <= '0;
    end else begin
      if (inj_fire && inj_flit.head) pkt_ts[inj_flit.vc] <= now;
      ej_credit_q <= '0;
      if (r_out_valid[P_LOCAL]) ej_credit_q[r_out_flit[P_LOCAL].vc] <= 1'b1;
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      r_in_valid[p]     = (p == 0) ? inj_fire : net_in_valid[p];
      r_in_flit[p]      = (p == 0) ? stamped  : net_in_flit[p];
      r_out_credit[p]   = (p == 0) ? ej_credit_q : net_out_credit[p];
      net_in_credit[p]  = (p == 0) ? '0 : r_in_credit[p];
      net_out_valid[p]  = (p == 0) ? 1'b0 : r_out_valid[p];
      net_out_flit[p]   = r_out_flit[p];
    end
  end

  assign ej_valid = r_out_valid[P_LOCAL];
  assign ej_flit  = r_out_flit[P_LOCAL];

  hybrid_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NUM_VC(NUM_VC), .DEPTH(DEPTH)) u_router (
    .clk, .rst_n, .my_id,
    .bus_valid, .bus_en, .bus_src, .bus_dst,
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_credit(r_in_credit), .in_free(r_in_free),
    .out_valid(r_out_valid), .out_flit(r_out_flit), .out_credit(r_out_credit),
    .opt_idle
  );

  measurement_unit #(.NUM_NODES(MESH_X*MESH_Y)) u_mu (
    .clk, .rst_n, .my_id, .now,
    .inj_valid(inj_fire), .inj_dst(inj_flit.dst),
    .ej_valid, .ej_tail(ej_flit.tail), .ej_ts(ej_flit.ts),
    .snap, .report
  );
endmodule
