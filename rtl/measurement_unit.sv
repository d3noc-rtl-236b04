// measurement_unit: the measurement unit (MU) of one node and its traffic
// table.
//
// During an operation window the MU counts every flit its core injects, per
// destination, in the traffic table (one CNT_W counter per node).  With each
// increment it compares the new count with the largest seen so far, so the
// most-contacted destination and its count are known at any time without a
// search.  It also counts the core's flits in total and sums the latency of
// every packet delivered to this node (cycle of delivery of the tail flit
// minus the injection stamp the packet carries).
// When the reconfiguration control unit raises snap for one cycle (end of the
// window), the MU latches {own id, most-contacted node, its count, total,
// latency sum} into report at that clock edge and starts a new, empty window:
// the table is cleared in one cycle through a valid bit per entry.  Events in
// the snap cycle itself count towards the new window.  Counters saturate.
// Node numbers are NODE_W bits wide inside the 16-bit address fields of the
// report, so the upper bits of both fields are always zero.
// What is measured and reported follows the paper; the latency sum, the
// table organisation and the saturation are this design's choices.
module measurement_unit
  import d3noc_pkg::*;
#(
  parameter int unsigned NUM_NODES = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_id,
  input  logic [TS_W-1:0]   now,
  // flit accepted from the local core
  input  logic              inj_valid,
  input  logic [NODE_W-1:0] inj_dst,
  // flit delivered to the local core
  input  logic              ej_valid,
  input  logic              ej_tail,
  input  logic [TS_W-1:0]   ej_ts,
  // window end
  input  logic              snap,
  output report_t           report
);
  localparam int unsigned IW = $clog2(NUM_NODES);

  logic [CNT_W-1:0]     table_q [NUM_NODES];
  logic [NUM_NODES-1:0] valid_q;
  logic [CNT_W-1:0]     total_q, max_cnt_q, cur, nxt;
  logic [NODE_W-1:0]    max_dst_q;
  logic [LATSUM_W-1:0]  lat_q, lat_nxt;
  logic [TS_W-1:0]      lat_pkt;
  logic [IW-1:0]        idx;

  function automatic logic [CNT_W-1:0] sat_inc(input logic [CNT_W-1:0] a);
    return (a == '1) ? a : a + 1'b1;
  endfunction

  assign idx     = IW'(inj_dst);
  assign cur     = valid_q[idx] ? table_q[idx] : '0;
  assign nxt     = sat_inc(cur);
  assign lat_pkt = now - ej_ts;
  always_comb begin
    logic [LATSUM_W:0] s;
    s       = {1'b0, lat_q} + (LATSUM_W+1)'(lat_pkt);
    lat_nxt = s[LATSUM_W] ? '1 : s[LATSUM_W-1:0];
  end

  // traffic table storage (no reset: entries are qualified by valid_q)
  always_ff @(posedge clk) begin
    if (inj_valid) table_q[idx] <= snap ? CNT_W'(1) : nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= '0;
      total_q   <= '0;
      max_cnt_q <= '0;
      max_dst_q <= '0;
      lat_q     <= '0;
      report    <= '0;
    end else if (snap) begin
      report.id      <= ADDR_W'(my_id);
      report.max_dst <= ADDR_W'(max_dst_q);
      report.max_cnt <= max_cnt_q;
      report.total   <= total_q;
      report.lat_sum <= lat_q;
      // new window, holding only the events of this cycle
      valid_q   <= '0;
      total_q   <= CNT_W'(inj_valid);
      max_cnt_q <= CNT_W'(inj_valid);
      max_dst_q <= inj_valid ? inj_dst : '0;
      lat_q     <= (ej_valid && ej_tail) ? LATSUM_W'(lat_pkt) : '0;
      if (inj_valid) valid_q[idx] <= 1'b1;
    end else begin
      if (inj_valid) begin
        valid_q[idx] <= 1'b1;
        total_q      <= sat_inc(total_q);
        if (nxt > max_cnt_q) begin
          max_cnt_q <= nxt;
          max_dst_q <= inj_dst;
        end
      end
      if (ej_valid && ej_tail) lat_q <= lat_nxt;
    end
  end
endmodule
