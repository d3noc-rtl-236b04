// d3noc_top: D3NOC, a 16x16 electrical mesh augmented at run time by one
// express optical bus whose owners and measurement window are chosen by a
// closed measurement/reconfiguration loop.
//
// Contents: MESH_X*MESH_Y tiles (d3noc_node: hybrid router and measurement
// unit) joined by 1-cycle electrical mesh links, the serpentine optical bus
// (optical_bus) on the routers' optical ports, the central reconfiguration
// control unit (rcu) fed by every tile's report, and a free-running cycle
// counter (now) used to stamp packets for latency measurement.
// Interface: per node, a core injection port (inj_valid, inj_flit,
// inj_ready; the core sets head, tail, vc, dst and data) and a delivery port
// (ej_valid, ej_flit) that the core must accept every cycle.  Status outputs
// show the current bus owners, window length, the reconfiguration period
// and the total latency measured in the last window.  Node id = y*MESH_X+x.
// Timing: 3 cycles per mesh hop, 2+1 cycles through the bus hop (see
// hybrid_router and optical_bus).  During a reconfiguration period the cores
// are held off, no new packet enters the bus, and ownership changes only once
// the bus has drained.
module d3noc_top
  import d3noc_pkg::*;
#(
  parameter int unsigned MESH_X    = 16,
  parameter int unsigned MESH_Y    = 16,
  parameter int unsigned NUM_VC    = 4,
  parameter int unsigned DEPTH     = 8,
  parameter int unsigned RP_CYCLES = 50,
  parameter int unsigned WIN_INIT  = 100,
  parameter int unsigned WIN_W     = 32,
  parameter int unsigned LAT_W     = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inj_valid [MESH_X*MESH_Y],
  input  flit_t             inj_flit  [MESH_X*MESH_Y],
  output logic              inj_ready [MESH_X*MESH_Y],
  output logic              ej_valid  [MESH_X*MESH_Y],
  output flit_t             ej_flit   [MESH_X*MESH_Y],
  output logic              bus_valid,
  output logic [NODE_W-1:0] bus_src,
  output logic [NODE_W-1:0] bus_dst,
  output logic [WIN_W-1:0]  win_len,
  output logic              rcfg_active,
  output logic [LAT_W-1:0]  lat_last,
  output logic [TS_W-1:0]   now
);
  localparam int unsigned N = MESH_X * MESH_Y;

  logic                 snap, bus_idle, opt_bus_busy;
  report_t              reports    [N];
  logic                 opt_idle   [N];

  logic [NUM_PORTS-1:0] in_valid   [N];
  flit_t                in_flit    [N][NUM_PORTS];
  logic [NUM_VC-1:0]    in_credit  [N][NUM_PORTS];
  logic [NUM_PORTS-1:0] out_valid  [N];
  flit_t                out_flit   [N][NUM_PORTS];
  logic [NUM_VC-1:0]    out_credit [N][NUM_PORTS];

  logic                 otx_valid  [N];
  flit_t                otx_flit   [N];
  logic                 orx_valid  [N];
  flit_t                orx_flit   [N];
  logic [NUM_VC-1:0]    orx_credit [N];
  logic [NUM_VC-1:0]    otx_credit [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  for (genvar n = 0; n < N; n++) begin : g_node
    localparam int unsigned X = n % MESH_X;
    localparam int unsigned Y = n / MESH_X;

    d3noc_node #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NUM_VC(NUM_VC), .DEPTH(DEPTH)) u_node (
      .clk, .rst_n, .my_id(NODE_W'(n)), .now,
      .inj_valid(inj_valid[n]), .inj_flit(inj_flit[n]), .inj_ready(inj_ready[n]),
      .ej_valid(ej_valid[n]), .ej_flit(ej_flit[n]),
      .snap, .hold_inj(rcfg_active), .report(reports[n]),
      .bus_valid, .bus_en(!rcfg_active), .bus_src, .bus_dst, .opt_idle(opt_idle[n]),
      .net_in_valid(in_valid[n]), .net_in_flit(in_flit[n]), .net_in_credit(in_credit[n]),
      .net_out_valid(out_valid[n]), .net_out_flit(out_flit[n]), .net_out_credit(out_credit[n])
    );

    // mesh links: a port's input is the facing output of the neighbour
    always_comb begin
      in_valid[n]      = '0;
      in_flit[n][P_LOCAL]    = '0;
      out_credit[n][P_LOCAL] = '0;
      // north neighbour (y-1)
      if (Y > 0) begin
        in_valid[n][P_NORTH]   = out_valid[n-MESH_X][P_SOUTH];
        in_flit[n][P_NORTH]    = out_flit[n-MESH_X][P_SOUTH];
        out_credit[n][P_NORTH] = in_credit[n-MESH_X][P_SOUTH];
      end else begin
        in_flit[n][P_NORTH]    = '0;
        out_credit[n][P_NORTH] = '0;
      end
      if (Y < MESH_Y-1) begin
        in_valid[n][P_SOUTH]   = out_valid[n+MESH_X][P_NORTH];
        in_flit[n][P_SOUTH]    = out_flit[n+MESH_X][P_NORTH];
        out_credit[n][P_SOUTH] = in_credit[n+MESH_X][P_NORTH];
      end else begin
        in_flit[n][P_SOUTH]    = '0;
        out_credit[n][P_SOUTH] = '0;
      end
      if (X < MESH_X-1) begin
        in_valid[n][P_EAST]    = out_valid[n+1][P_WEST];
        in_flit[n][P_EAST]     = out_flit[n+1][P_WEST];
        out_credit[n][P_EAST]  = in_credit[n+1][P_WEST];
      end else begin
        in_flit[n][P_EAST]     = '0;
        out_credit[n][P_EAST]  = '0;
      end
      if (X > 0) begin
        in_valid[n][P_WEST]    = out_valid[n-1][P_EAST];
        in_flit[n][P_WEST]     = out_flit[n-1][P_EAST];
        out_credit[n][P_WEST]  = in_credit[n-1][P_EAST];
      end else begin
        in_flit[n][P_WEST]     = '0;
        out_credit[n][P_WEST]  = '0;
      end
      // optical port
      in_valid[n][P_OPT]   = orx_valid[n];
      in_flit[n][P_OPT]    = orx_flit[n];
      out_credit[n][P_OPT] = otx_credit[n];
    end

    assign otx_valid[n]  = out_valid[n][P_OPT];
    assign otx_flit[n]   = out_flit[n][P_OPT];
    assign orx_credit[n] = in_credit[n][P_OPT];
  end

  optical_bus #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NUM_VC(NUM_VC)) u_bus (
    .clk, .rst_n, .bus_valid, .bus_src, .bus_dst,
    .tx_valid(otx_valid), .tx_flit(otx_flit),
    .rx_valid(orx_valid), .rx_flit(orx_flit),
    .rx_credit(orx_credit), .tx_credit(otx_credit),
    .busy(opt_bus_busy)
  );

  assign bus_idle = !bus_valid || (opt_idle[bus_src] && !opt_bus_busy);

  rcu #(.NUM_NODES(N), .RP_CYCLES(RP_CYCLES), .WIN_INIT(WIN_INIT), .WIN_W(WIN_W), .LAT_W(LAT_W)) u_rcu (
    .clk, .rst_n, .reports, .bus_idle,
    .snap, .rcfg_active, .bus_valid, .bus_src, .bus_dst, .win_len, .lat_last
  );
endmodule
