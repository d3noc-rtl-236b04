// vc_buffer: input buffer of one router port, NUM_VC virtual channels of
// DEPTH flits each (4 x 8 in the network's main configuration).
//
// Each virtual channel is a circular FIFO.  An arriving flit is written into
// the FIFO named by its vc field at the clock edge that ends its link cycle;
// from the next cycle it is visible at head[vc].  rd_en[v] removes the head of
// channel v at the next edge.  A write and a read of the same channel in one
// cycle are both performed.  The upstream router keeps credits, so a write to
// a full channel is an error and is checked by an assertion.  The buffer
// sizes follow the paper; the FIFO organisation is this design's choice.
module vc_buffer
  import d3noc_pkg::*;
#(
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned DEPTH  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_valid,
  input  flit_t                       wr_flit,
  input  logic [NUM_VC-1:0]           rd_en,
  output flit_t                       head      [NUM_VC],
  output logic  [NUM_VC-1:0]          not_empty,
  output logic  [$clog2(DEPTH+1)-1:0] count     [NUM_VC]
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  flit_t         mem [NUM_VC][DEPTH];
  logic [AW-1:0] wptr [NUM_VC];
  logic [AW-1:0] rptr [NUM_VC];
  logic [CW-1:0] cnt  [NUM_VC];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic wr, rd;
    assign wr = wr_valid && (wr_flit.vc == VC_W'(v));
    assign rd = rd_en[v] && (cnt[v] != '0);

    always_ff @(posedge clk) begin
      if (wr) mem[v][wptr[v]] <= wr_flit;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wptr[v] <= '0;
        rptr[v] <= '0;
        cnt[v]  <= '0;
      end else begin
        if (wr) wptr[v] <= inc(wptr[v]);
        if (rd) rptr[v] <= inc(rptr[v]);
        cnt[v] <= cnt[v] + CW'(wr) - CW'(rd);
      end
    end

    assign head[v]      = mem[v][rptr[v]];
    assign not_empty[v] = (cnt[v] != '0);
    assign count[v]     = cnt[v];

    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      wr |-> (cnt[v] != CW'(DEPTH)) || rd)
      else $error("vc_buffer: write to full VC %0d", v);
  end
endmodule
