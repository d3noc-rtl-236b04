// d3noc_pkg: types and constants shared by the D3NOC modules.
//
// A flit carries 64 data bits (the flit size of the network) plus side-band
// control: head/tail marks for wormhole switching, the virtual channel it
// occupies on the next link, source and destination node ids and the cycle at
// which its packet was injected (used by the measurement units to sum packet
// latency).  Node ids are 8 bits, enough for the 16x16 mesh; node id =
// y*MESH_X + x.  The traffic report sent by every measurement unit to the
// reconfiguration control unit holds the node's total flit count (4 bytes),
// the flit count towards its most-contacted node (4 bytes), that node's
// address (2 bytes) and, as this design's own addition, the sum of the
// latencies of the packets delivered to the node.
package d3noc_pkg;

  localparam int unsigned FLIT_DATA_W = 64;  // flit size
  localparam int unsigned NODE_W      = 8;   // node id width (256 nodes)
  localparam int unsigned VC_W        = 2;   // 4 virtual channels
  localparam int unsigned TS_W        = 32;  // injection time stamp
  localparam int unsigned CNT_W       = 32;  // report counters (4 bytes)
  localparam int unsigned ADDR_W      = 16;  // report address (2 bytes)
  localparam int unsigned LATSUM_W    = 32;  // per-node latency sum

  // Router ports that go through the crossbar.  The seventh port of the
  // hybrid router (reconfiguration) is a dedicated link to the RCU.
  localparam int unsigned NUM_PORTS = 6;
  localparam int unsigned PORT_W    = 3;

  typedef enum logic [PORT_W-1:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4,
    P_OPT   = 3'd5
  } port_e;

  typedef struct packed {
    logic                   head;
    logic                   tail;
    logic [VC_W-1:0]        vc;
    logic [NODE_W-1:0]      src;
    logic [NODE_W-1:0]      dst;
    logic [TS_W-1:0]        ts;
    logic [FLIT_DATA_W-1:0] data;
  } flit_t;

  typedef struct packed {
    logic [ADDR_W-1:0]   id;        // reporting node
    logic [ADDR_W-1:0]   max_dst;   // node it sent the most flits to
    logic [CNT_W-1:0]    max_cnt;   // flits sent to max_dst
    logic [CNT_W-1:0]    total;     // all flits sent in the window
    logic [LATSUM_W-1:0] lat_sum;   // latency of packets delivered here
  } report_t;

endpackage
