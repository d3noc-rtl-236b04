// window_update: gradient-descent sizing of the next operation window.
//
// With L the total packet latency measured in a window and T the window
// length, the gradient is the first-order difference
//     G = (L_t - L_{t-1}) / (T_t - T_{t-1})
// and the next window is T_{t+1} = T_t - alpha*G, with alpha =
// ALPHA_NUM / 2^ALPHA_SHIFT (a fraction between 0 and 1).  The result is
// bounded below by WIN_MIN cycles and above by GROW_MAX times the current
// window.  Equal consecutive windows would divide by zero; the denominator is
// then taken as 1.
// The division |L_t-L_{t-1}|*ALPHA_NUM / |T_t-T_{t-1}| is a restoring divider
// producing one quotient bit per cycle.  Interface: pulse start with the four
// inputs valid (they are captured); done pulses LAT_W+4+2 cycles later with
// win_next valid, which then holds until the next start.  The formula and the
// two bounds follow the paper; alpha's value, the zero-denominator rule and
// the divider are this design's choices.
module window_update #(
  parameter int unsigned WIN_W       = 32,
  parameter int unsigned LAT_W       = 40,
  parameter int unsigned ALPHA_NUM   = 1,
  parameter int unsigned ALPHA_SHIFT = 1,
  parameter int unsigned WIN_MIN     = 100,
  parameter int unsigned GROW_MAX    = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LAT_W-1:0] lat_cur,
  input  logic [LAT_W-1:0] lat_prev,
  input  logic [WIN_W-1:0] win_cur,
  input  logic [WIN_W-1:0] win_prev,
  output logic             busy,
  output logic             done,
  output logic [WIN_W-1:0] win_next
);
  localparam int unsigned NW = LAT_W + 4;          // numerator width
  localparam int unsigned DW = WIN_W;              // denominator width
  localparam int unsigned XW = NW + 8;             // wide arithmetic
  localparam int unsigned KW = $clog2(NW + 1);

  logic [NW-1:0]   num_q, quo_q;
  logic [DW-1:0]   den_q;
  logic [DW-1:0]   rem_q;
  logic [KW-1:0]   k_q;
  logic            grow_q;        // gradient negative: window grows
  logic [WIN_W-1:0] cur_q;
  logic            run_q;

  // operands of the start cycle
  logic [LAT_W:0] dl;
  logic [WIN_W:0] dt;
  logic [LAT_W-1:0] adl;
  logic [WIN_W-1:0] adt;
  always_comb begin
    dl  = {1'b0, lat_cur} - {1'b0, lat_prev};
    dt  = {1'b0, win_cur} - {1'b0, win_prev};
    adl = dl[LAT_W] ? LAT_W'(-dl) : dl[LAT_W-1:0];
    adt = dt[WIN_W] ? WIN_W'(-dt) : dt[WIN_W-1:0];
    if (adt == '0) adt = WIN_W'(1);
  end

  // one restoring-division step
  logic [DW:0] rem_sh, rem_sub;
  always_comb begin
    rem_sh  = {rem_q, num_q[NW-1]};
    rem_sub = rem_sh - {1'b0, den_q};
  end

  // bound the new window
  logic [XW-1:0] step, cand, hi;
  always_comb begin
    step = XW'(quo_q) >> ALPHA_SHIFT;
    hi   = XW'(cur_q) * XW'(GROW_MAX);
    if (hi > XW'({WIN_W{1'b1}})) hi = XW'({WIN_W{1'b1}});
    if (grow_q)                                 cand = XW'(cur_q) + step;
    else if (step + XW'(WIN_MIN) >= XW'(cur_q)) cand = XW'(WIN_MIN);
    else                                        cand = XW'(cur_q) - step;
    if (cand > hi)            cand = hi;
    if (cand < XW'(WIN_MIN))  cand = XW'(WIN_MIN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_q    <= '0;
      quo_q    <= '0;
      den_q    <= '0;
      rem_q    <= '0;
      k_q      <= '0;
      grow_q   <= 1'b0;
      cur_q    <= '0;
      run_q    <= 1'b0;
      done     <= 1'b0;
      win_next <= WIN_W'(WIN_MIN);
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        num_q  <= NW'(adl) * NW'(ALPHA_NUM);
        den_q  <= adt;
        rem_q  <= '0;
        quo_q  <= '0;
        k_q    <= KW'(NW);
        grow_q <= dl[LAT_W] ^ dt[WIN_W];
        cur_q  <= win_cur;
        run_q  <= 1'b1;
      end else if (run_q) begin
        if (k_q != '0) begin
          num_q <= num_q << 1;
          if (!rem_sub[DW]) begin
            rem_q <= rem_sub[DW-1:0];
            quo_q <= {quo_q[NW-2:0], 1'b1};
          end else begin
            rem_q <= rem_sh[DW-1:0];
            quo_q <= {quo_q[NW-2:0], 1'b0};
          end
          k_q <= k_q - 1'b1;
        end else begin
          win_next <= WIN_W'(cand);
          done     <= 1'b1;
          run_q    <= 1'b0;
        end
      end
    end
  end

  assign busy = run_q;
endmodule
