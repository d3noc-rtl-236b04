// rcu: the global Reconfiguration Control Unit.
//
// The RCU alternates two intervals.  In an operation window of win_len
// cycles the network runs normally and the measurement units count traffic.
// At its end the RCU raises snap for one cycle and enters a reconfiguration
// period of at least RP_CYCLES cycles (rcfg_active high), during which:
//   cycle 0   snap: every measurement unit latches its report;
//   cycle 1   the reports are reduced in one step: the report with the
//             largest count towards a single node names the next bus owners
//             (its node as source, the node it talked to most as
//             destination; ties keep the lowest id) and all latency sums are
//             added into the window's total latency;
//   cycle 2.. window_update computes the next window length by gradient
//             descent on total latency;
//   end       once RP_CYCLES have passed, the update is done and the old
//             owner has released the bus (bus_idle), the new owners and
//             window length are broadcast and the next window starts.
// While rcfg_active is high the routers send no new packet to the bus and the
// cores inject nothing.  If no flit was sent in the window no bus is
// allocated.  The reports arrive on a dedicated link from every node.  The
// steps, the 50-cycle period and the first window of 100 cycles follow the
// paper; the one-step reduction, the bus_idle hand-over and tie breaking are
// this design's choices.
module rcu
  import d3noc_pkg::*;
#(
  parameter int unsigned NUM_NODES   = 256,
  parameter int unsigned RP_CYCLES   = 50,
  parameter int unsigned WIN_INIT    = 100,
  parameter int unsigned WIN_W       = 32,
  parameter int unsigned LAT_W       = 40,
  parameter int unsigned ALPHA_NUM   = 1,
  parameter int unsigned ALPHA_SHIFT = 1,
  parameter int unsigned WIN_MIN     = 100,
  parameter int unsigned GROW_MAX    = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  report_t           reports [NUM_NODES],
  input  logic              bus_idle,
  output logic              snap,
  output logic              rcfg_active,
  output logic              bus_valid,
  output logic [NODE_W-1:0] bus_src,
  output logic [NODE_W-1:0] bus_dst,
  output logic [WIN_W-1:0]  win_len,
  output logic [LAT_W-1:0]  lat_last      // total latency of the last window
);
  typedef enum logic [0:0] {S_OW, S_RP} state_e;

  state_e           state_q;
  logic [WIN_W-1:0] cnt_q;
  logic [WIN_W-1:0] win_prev_q;
  logic [LAT_W-1:0] lat_cur_q, lat_prev_q;
  logic             nb_valid_q;
  logic [NODE_W-1:0] nb_src_q, nb_dst_q;
  logic             upd_start, upd_busy, upd_done, upd_ready_q;
  logic [WIN_W-1:0] win_next;

  // ---- one-step reduction of all reports
  logic [CNT_W-1:0]  best_cnt;
  logic [NODE_W-1:0] best_src, best_dst;
  logic [LAT_W-1:0]  lat_total;
  always_comb begin
    best_cnt  = '0;
    best_src  = '0;
    best_dst  = '0;
    lat_total = '0;
    for (int n = 0; n < NUM_NODES; n++) begin
      lat_total = lat_total + LAT_W'(reports[n].lat_sum);
      if (reports[n].max_cnt > best_cnt) begin
        best_cnt = reports[n].max_cnt;
        best_src = NODE_W'(reports[n].id);
        best_dst = NODE_W'(reports[n].max_dst);
      end
    end
  end

  window_update #(
    .WIN_W(WIN_W), .LAT_W(LAT_W), .ALPHA_NUM(ALPHA_NUM), .ALPHA_SHIFT(ALPHA_SHIFT),
    .WIN_MIN(WIN_MIN), .GROW_MAX(GROW_MAX)
  ) u_upd (
    .clk, .rst_n, .start(upd_start),
    .lat_cur(lat_cur_q), .lat_prev(lat_prev_q),
    .win_cur(win_len), .win_prev(win_prev_q),
    .busy(upd_busy), .done(upd_done), .win_next
  );

  assign upd_start   = (state_q == S_RP) && (cnt_q == WIN_W'(2));
  assign rcfg_active = (state_q == S_RP);
  assign snap        = (state_q == S_RP) && (cnt_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_OW;
      cnt_q       <= '0;
      win_len     <= WIN_W'(WIN_INIT);
      win_prev_q  <= '0;
      lat_cur_q   <= '0;
      lat_prev_q  <= '0;
      lat_last    <= '0;
      nb_valid_q  <= 1'b0;
      nb_src_q    <= '0;
      nb_dst_q    <= '0;
      upd_ready_q <= 1'b0;
      bus_valid   <= 1'b0;
      bus_src     <= '0;
      bus_dst     <= '0;
    end else begin
      unique case (state_q)
        S_OW: begin
          if (cnt_q >= win_len - 1'b1) begin
            state_q <= S_RP;
            cnt_q   <= '0;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        S_RP: begin
          if (cnt_q != '1) cnt_q <= cnt_q + 1'b1;
          if (cnt_q == WIN_W'(1)) begin
            lat_cur_q  <= lat_total;
            nb_valid_q <= (best_cnt != '0);
            nb_src_q   <= best_src;
            nb_dst_q   <= best_dst;
          end
          if (upd_done) upd_ready_q <= 1'b1;
          if (cnt_q >= WIN_W'(RP_CYCLES - 1) && upd_ready_q && bus_idle) begin
            bus_valid   <= nb_valid_q;
            bus_src     <= nb_src_q;
            bus_dst     <= nb_dst_q;
            win_prev_q  <= win_len;
            win_len     <= win_next;
            lat_prev_q  <= lat_cur_q;
            lat_last    <= lat_cur_q;
            upd_ready_q <= 1'b0;
            state_q     <= S_OW;
            cnt_q       <= '0;
          end
        end
        default: state_q <= S_OW;
      endcase
    end
  end

  // The window update must fit in the reconfiguration period.
  initial assert (RP_CYCLES >= LAT_W + 4 + 5)
    else $error("rcu: RP_CYCLES too short for the window update");
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) upd_start |-> !upd_busy);
endmodule
