// rr_arbiter: round-robin arbiter.  Grants one of the requesting inputs,
// starting the search one past the last input granted; the pointer moves only
// when update is set (the grant was used).  grant is one-hot or zero and is
// combinational in req.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 update,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx,
  output logic                 any
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int k = 0; k < N; k++) begin
      logic [IW-1:0] i;
      i = IW'((int'(ptr) + k) % N);
      if (!any && req[i]) begin
        any          = 1'b1;
        grant[i]     = 1'b1;
        grant_idx    = i;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             ptr <= '0;
    else if (update && any) ptr <= (grant_idx == IW'(N-1)) ? '0 : grant_idx + 1'b1;
  end
endmodule
