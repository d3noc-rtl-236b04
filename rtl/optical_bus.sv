// optical_bus: the express optical bus of D3NOC.
//
// One waveguide winds through all nodes in a serpentine: row 0 from left to
// right, row 1 from right to left, and so on, so the node at column x of row
// y sits at bus position y*MESH_X + x for even y and y*MESH_X + MESH_X-1-x
// for odd y.  Every node has a mo-detector with its own laser (modetector).
// At any time one node pair owns the bus (bus_valid, bus_src, bus_dst, set
// by the reconfiguration control unit).  The source lights the waveguide
// towards the destination and modulates the flit's 64 data bits, the nodes
// in between bias their switches to let the light pass, and the destination
// leaves its switch unbiased so that the light falls on its photodetector.
// Light travels only between source and destination; the waveguide carries
// light in either direction, modelled here as two chains of mo-detectors.
// Timing: a flit in the source router's output register (which performs the
// electrical-to-optical step) crosses the bus in that cycle and is captured
// by the optical-to-electrical register at the destination, from which it is
// written into the destination's buffer: 2 cycles from register to buffer,
// against 1 for an electrical link.  The flit's control fields travel beside
// the data.  The destination's credits are returned to the source over an
// electrical side path in the same cycle.  busy is high while a flit is in
// the O-E register.  The topology, the single owner pair and the link
// latency follow the paper; the direction handling and the side paths are
// this design's choices.
module optical_bus
  import d3noc_pkg::*;
#(
  parameter int unsigned MESH_X = 16,
  parameter int unsigned MESH_Y = 16,
  parameter int unsigned NUM_VC = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bus_valid,
  input  logic [NODE_W-1:0]     bus_src,
  input  logic [NODE_W-1:0]     bus_dst,
  input  logic                  tx_valid  [MESH_X*MESH_Y],
  input  flit_t                 tx_flit   [MESH_X*MESH_Y],
  output logic                  rx_valid  [MESH_X*MESH_Y],
  output flit_t                 rx_flit   [MESH_X*MESH_Y],
  input  logic [NUM_VC-1:0]     rx_credit [MESH_X*MESH_Y],
  output logic [NUM_VC-1:0]     tx_credit [MESH_X*MESH_Y],
  output logic                  busy
);
  localparam int unsigned N = MESH_X * MESH_Y;
  localparam int unsigned S = FLIT_DATA_W;

  function automatic int unsigned pos_of(input int unsigned n);
    int unsigned x, y;
    x = n % MESH_X;
    y = n / MESH_X;
    return (y % 2 == 0) ? y*MESH_X + x : y*MESH_X + (MESH_X - 1 - x);
  endfunction

  logic              sending;
  logic [NODE_W-1:0] pos_src, pos_dst;
  logic              fwd;
  assign sending = bus_valid && tx_valid[bus_src];
  assign pos_src = NODE_W'(pos_of(int'(bus_src)));
  assign pos_dst = NODE_W'(pos_of(int'(bus_dst)));
  assign fwd     = pos_src < pos_dst;

  // chains indexed by bus position
  logic [S-1:0] f_light [N+1];   // forward: position k -> k+1
  logic [S-1:0] b_light [N+1];   // backward: position k -> k-1, b_light[k+1] enters k
  logic [S-1:0] f_det   [N];
  logic [S-1:0] b_det   [N];
  assign f_light[0] = '0;
  assign b_light[N] = '0;

  for (genvar k = 0; k < N; k++) begin : g_pos
    localparam int unsigned XK = ((k / MESH_X) % 2 == 0) ? (k % MESH_X) : (MESH_X - 1 - (k % MESH_X));
    localparam int unsigned NODE = (k / MESH_X) * MESH_X + XK;
    logic         is_src, is_dst;
    logic [S-1:0] bias;
    assign is_src = sending && (bus_src == NODE_W'(NODE));
    assign is_dst = sending && (bus_dst == NODE_W'(NODE));
    assign bias   = is_src ? tx_flit[NODE].data : (is_dst ? '0 : '1);

    modetector #(.SLOTS(S)) u_fwd (
      .laser_en (is_src && fwd),
      .light_in (f_light[k]),
      .bias,
      .light_out(f_light[k+1]),
      .det_out  (f_det[k])
    );
    modetector #(.SLOTS(S)) u_bwd (
      .laser_en (is_src && !fwd),
      .light_in (b_light[k+1]),
      .bias,
      .light_out(b_light[k]),
      .det_out  (b_det[k])
    );
  end

  // photodetector output at the destination
  logic [S-1:0] rx_data;
  assign rx_data = f_det[pos_dst] | b_det[pos_dst];

  // O-E conversion register at the destination
  logic              oe_valid;
  flit_t             oe_flit;
  logic [NODE_W-1:0] oe_dst;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oe_valid <= 1'b0;
      oe_flit  <= '0;
      oe_dst   <= '0;
    end else begin
      oe_valid <= sending;
      oe_dst   <= bus_dst;
      if (sending) begin
        oe_flit      <= tx_flit[bus_src];
        oe_flit.data <= rx_data;
      end
    end
  end

  always_comb begin
    for (int n = 0; n < N; n++) begin
      rx_valid[n]  = oe_valid && (oe_dst == NODE_W'(n));
      rx_flit[n]   = oe_flit;
      tx_credit[n] = (bus_valid && bus_src == NODE_W'(n)) ? rx_credit[bus_dst] : '0;
    end
  end

  assign busy = oe_valid;

  // only the bus source may transmit
  for (genvar n = 0; n < N; n++) begin : g_chk
    a_single_writer: assert property (@(posedge clk) disable iff (!rst_n)
      tx_valid[n] |-> (bus_valid && bus_src == NODE_W'(n)))
      else $error("optical_bus: node %0d transmits without owning the bus", n);
  end
endmodule
