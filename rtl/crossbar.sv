// crossbar: the switch of the hybrid router.
//
// N_OUT multiplexers: output o carries the flit of input sel[o] when
// sel_valid[o] is set.  The switch allocator guarantees that no input is
// selected by two outputs in one cycle.  Combinational; the router registers
// the outputs (switch-traversal stage).  Six ports are switched: local, the
// four mesh directions and the express optical port.
module crossbar
  import d3noc_pkg::*;
#(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned N_OUT = 6
) (
  input  flit_t                      in_flit   [N_IN],
  input  logic [$clog2(N_IN)-1:0]    sel       [N_OUT],
  input  logic [N_OUT-1:0]           sel_valid,
  output flit_t                      out_flit  [N_OUT],
  output logic [N_OUT-1:0]           out_valid
);
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      out_flit[o]  = sel_valid[o] ? in_flit[sel[o]] : '0;
      out_valid[o] = sel_valid[o];
    end
  end
endmodule
