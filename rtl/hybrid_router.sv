// hybrid_router: virtual-channel wormhole router of one D3NOC node.
//
// The router has the local port, four mesh ports (N, E, S, W) and the port
// of the express optical bus, all switched by a 6x6 crossbar; the seventh
// port of the node, which carries reconfiguration messages between the
// measurement unit and the reconfiguration control unit, is a separate link
// and does not pass through this module.  Every input port has 4 virtual
// channels of 8 flits (vc_buffer).
//
// Pipeline, one stage per clock:
//   BW     the flit arriving on a link is written into its VC buffer.
//   RC/SA  at the head of a VC: X-Y* route computation (route_xystar) for a
//          head flit, output-VC allocation (lowest free VC holding a credit)
//          and separable round-robin switch allocation (one VC per input
//          port, then one input per output port).  The winner is dequeued,
//          a credit is returned upstream and the flit is registered.
//   ST     crossbar traversal into the output register, which drives the
//          link in the next cycle (1-cycle electrical link; for the optical
//          port this register is the electrical-to-optical stage).
// So a flit spends two cycles in a router after its buffer write and one on
// an electrical link: 3 cycles per hop.  Flow control is credit based per VC:
// out_credit[p][v] pulses when the downstream buffer frees a slot, in_credit
// pulses one cycle after this router frees one.  A packet keeps the route and
// output VC chosen for its head flit until its tail flit leaves.
// opt_idle is high when this router has no packet and no credit outstanding
// on the optical port, which is when the bus may change owner.
// Buffer sizes, port count and routing follow the paper; the allocator,
// credit scheme and stage split are this design's choices.
module hybrid_router
  import d3noc_pkg::*;
#(
  parameter int unsigned MESH_X = 16,
  parameter int unsigned MESH_Y = 16,
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned DEPTH  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NODE_W-1:0]       my_id,
  // express bus owners as broadcast by the RCU
  input  logic                    bus_valid,
  input  logic                    bus_en,
  input  logic [NODE_W-1:0]       bus_src,
  input  logic [NODE_W-1:0]       bus_dst,
  // inputs
  input  logic [NUM_PORTS-1:0]    in_valid,
  input  flit_t                   in_flit   [NUM_PORTS],
  output logic [NUM_VC-1:0]       in_credit [NUM_PORTS],
  output logic [NUM_VC-1:0]       in_free   [NUM_PORTS],
  // outputs
  output logic [NUM_PORTS-1:0]    out_valid,
  output flit_t                   out_flit  [NUM_PORTS],
  input  logic [NUM_VC-1:0]       out_credit[NUM_PORTS],
  output logic                    opt_idle
);
  localparam int unsigned NP  = NUM_PORTS;
  localparam int unsigned VW  = $clog2(NUM_VC);
  localparam int unsigned CW  = $clog2(DEPTH+1);
  localparam int unsigned PIW = $clog2(NP);

  // ---------------- input buffers
  flit_t            head      [NP][NUM_VC];
  logic [NUM_VC-1:0] not_empty [NP];
  logic [CW-1:0]    occ       [NP][NUM_VC];
  logic [NUM_VC-1:0] deq      [NP];

  for (genvar p = 0; p < NP; p++) begin : g_buf
    vc_buffer #(.NUM_VC(NUM_VC), .DEPTH(DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_valid (in_valid[p]),
      .wr_flit  (in_flit[p]),
      .rd_en    (deq[p]),
      .head     (head[p]),
      .not_empty(not_empty[p]),
      .count    (occ[p])
    );
    for (genvar v = 0; v < NUM_VC; v++) begin : g_free
      assign in_free[p][v] = (occ[p][v] != CW'(DEPTH));
    end
  end

  // ---------------- per input-VC packet state
  logic        alloc   [NP][NUM_VC];
  port_e       rt_r    [NP][NUM_VC];
  logic [VW-1:0] ovc_r [NP][NUM_VC];

  // ---------------- per output-VC state
  logic          ovc_busy [NP][NUM_VC];
  logic [CW-1:0] credits  [NP][NUM_VC];

  // ---------------- route computation for every VC head
  port_e rc_port [NP][NUM_VC];
  for (genvar p = 0; p < NP; p++) begin : g_rc_p
    for (genvar v = 0; v < NUM_VC; v++) begin : g_rc_v
      route_xystar #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_rc (
        .my_id, .dst(head[p][v].dst), .bus_valid, .bus_en, .bus_src, .bus_dst,
        .port(rc_port[p][v])
      );
    end
  end

  // ---------------- eligibility of each input VC
  logic [NUM_VC-1:0] elig      [NP];
  port_e             want_port [NP][NUM_VC];
  logic [VW-1:0]     want_ovc  [NP][NUM_VC];

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      for (int v = 0; v < NUM_VC; v++) begin
        elig[p][v]      = 1'b0;
        want_port[p][v] = alloc[p][v] ? rt_r[p][v] : rc_port[p][v];
        want_ovc[p][v]  = ovc_r[p][v];
        if (not_empty[p][v]) begin
          if (alloc[p][v]) begin
            elig[p][v] = (credits[rt_r[p][v]][ovc_r[p][v]] != '0);
          end else if (head[p][v].head) begin
            for (int ov = NUM_VC-1; ov >= 0; ov--) begin
              if (!ovc_busy[rc_port[p][v]][ov] && credits[rc_port[p][v]][ov] != '0) begin
                elig[p][v]     = 1'b1;
                want_ovc[p][v] = VW'(ov);
              end
            end
          end
        end
      end
    end
  end

  // ---------------- switch allocation, stage 1: one VC per input port
  logic [NUM_VC-1:0] in_gnt     [NP];
  logic [VW-1:0]     in_gnt_idx [NP];
  logic [NP-1:0]     in_any;
  logic [NP-1:0]     in_won;     // the input's candidate won its output
  port_e             cand_port  [NP];

  for (genvar p = 0; p < NP; p++) begin : g_sa1
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk, .rst_n, .req(elig[p]), .update(in_won[p]),
      .grant(in_gnt[p]), .grant_idx(in_gnt_idx[p]), .any(in_any[p])
    );
    assign cand_port[p] = want_port[p][in_gnt_idx[p]];
  end

  // ---------------- switch allocation, stage 2: one input per output port
  logic [NP-1:0]  out_req   [NP];
  logic [NP-1:0]  out_gnt   [NP];
  logic [PIW-1:0] out_gnt_idx [NP];
  logic [NP-1:0]  out_any;

  always_comb begin
    for (int o = 0; o < NP; o++)
      for (int p = 0; p < NP; p++)
        out_req[o][p] = in_any[p] && (cand_port[p] == port_e'(o));
  end

  for (genvar o = 0; o < NP; o++) begin : g_sa2
    rr_arbiter #(.N(NP)) u_arb (
      .clk, .rst_n, .req(out_req[o]), .update(1'b1),
      .grant(out_gnt[o]), .grant_idx(out_gnt_idx[o]), .any(out_any[o])
    );
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      in_won[p] = 1'b0;
      for (int o = 0; o < NP; o++) if (out_gnt[o][p]) in_won[p] = 1'b1;
      deq[p] = in_won[p] ? in_gnt[p] : '0;
    end
  end

  // ---------------- state updates at the end of RC/SA
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++)
        for (int v = 0; v < NUM_VC; v++) begin
          alloc[p][v]    <= 1'b0;
          rt_r[p][v]     <= P_LOCAL;
          ovc_r[p][v]    <= '0;
          ovc_busy[p][v] <= 1'b0;
          credits[p][v]  <= CW'(DEPTH);
        end
    end else begin
      // credits: returned by downstream, consumed by a winning flit
      for (int o = 0; o < NP; o++)
        for (int v = 0; v < NUM_VC; v++) begin
          logic take;
          take = 1'b0;
          for (int p = 0; p < NP; p++)
            if (in_won[p] && cand_port[p] == port_e'(o) && want_ovc[p][in_gnt_idx[p]] == VW'(v))
              take = 1'b1;
          credits[o][v] <= credits[o][v] + CW'(out_credit[o][v]) - CW'(take);
        end
      for (int p = 0; p < NP; p++) begin
        if (in_won[p]) begin
          automatic logic [VW-1:0] v  = in_gnt_idx[p];
          automatic port_e         o  = cand_port[p];
          automatic logic [VW-1:0] ov = want_ovc[p][v];
          if (!alloc[p][v]) begin
            alloc[p][v]    <= 1'b1;
            rt_r[p][v]     <= o;
            ovc_r[p][v]    <= ov;
            ovc_busy[o][ov] <= 1'b1;
          end
          if (head[p][v].tail) begin
            alloc[p][v]     <= 1'b0;
            ovc_busy[o][ov] <= 1'b0;
          end
        end
      end
    end
  end

  // ---------------- SA -> ST pipeline register and credit return
  flit_t          sa_flit  [NP];
  logic [PIW-1:0] sa_sel   [NP];
  logic [NP-1:0]  sa_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_valid <= '0;
      for (int p = 0; p < NP; p++) begin
        sa_flit[p]   <= '0;
        sa_sel[p]    <= '0;
        in_credit[p] <= '0;
      end
    end else begin
      sa_valid <= out_any;
      for (int o = 0; o < NP; o++) sa_sel[o] <= out_gnt_idx[o];
      for (int p = 0; p < NP; p++) begin
        in_credit[p] <= deq[p];
        if (in_won[p]) begin
          sa_flit[p]    <= head[p][in_gnt_idx[p]];
          sa_flit[p].vc <= VC_W'(want_ovc[p][in_gnt_idx[p]]);
        end
      end
    end
  end

  // ---------------- ST: crossbar into the output register
  flit_t         xb_flit  [NP];
  logic [NP-1:0] xb_valid;

  crossbar #(.N_IN(NP), .N_OUT(NP)) u_xbar (
    .in_flit(sa_flit), .sel(sa_sel), .sel_valid(sa_valid),
    .out_flit(xb_flit), .out_valid(xb_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      for (int o = 0; o < NP; o++) out_flit[o] <= '0;
    end else begin
      out_valid <= xb_valid;
      for (int o = 0; o < NP; o++) out_flit[o] <= xb_flit[o];
    end
  end

  // ---------------- optical port release
  always_comb begin
    opt_idle = !sa_valid[P_OPT] && !out_valid[P_OPT];
    for (int v = 0; v < NUM_VC; v++)
      if (ovc_busy[P_OPT][v] || credits[P_OPT][v] != CW'(DEPTH)) opt_idle = 1'b0;
  end

  for (genvar o = 0; o < NP; o++) begin : g_chk
    for (genvar v = 0; v < NUM_VC; v++) begin : g_chk_v
      a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
        credits[o][v] <= CW'(DEPTH))
        else $error("hybrid_router: credit overflow port %0d vc %0d", o, v);
    end
  end
endmodule
