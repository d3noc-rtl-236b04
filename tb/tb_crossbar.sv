// tb_crossbar: random selections on the 6x6 crossbar; each output must carry
// the selected input's flit, or nothing when not selected.
module tb_crossbar;
  import d3noc_pkg::*;
  localparam int unsigned N = 6;
  flit_t in_flit [N];
  logic [$clog2(N)-1:0] sel [N];
  logic [N-1:0] sel_valid;
  flit_t out_flit [N];
  logic [N-1:0] out_valid;
  int checks = 0, failures = 0;
  logic clk = 0;

  crossbar #(.N_IN(N), .N_OUT(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3000; k++) begin
      for (int i = 0; i < N; i++) begin
        in_flit[i] = '0;
        in_flit[i].data = {$urandom, $urandom};
        in_flit[i].dst  = NODE_W'($urandom);
        in_flit[i].head = 1'($urandom);
        sel[i] = 3'($urandom_range(0, N-1));
        sel_valid[i] = 1'($urandom);
      end
      #1;
      for (int o = 0; o < N; o++) begin
        checks++;
        if (out_valid[o] != sel_valid[o] ||
            (sel_valid[o] && out_flit[o] != in_flit[sel[o]]) ||
            (!sel_valid[o] && out_flit[o] != '0)) begin
          failures++;
          if (failures < 10) $display("output %0d wrong", o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
