// tb_vc_buffer: random writes and reads on all virtual channels of
// vc_buffer, compared with a queue model per channel (head flit, empty flag
// and occupancy every cycle).  Writes never target a full channel, as the
// upstream credits guarantee in the network.
module tb_vc_buffer;
  import d3noc_pkg::*;
  localparam int unsigned NUM_VC = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_valid;
  flit_t wr_flit;
  logic [NUM_VC-1:0] rd_en;
  flit_t head [NUM_VC];
  logic [NUM_VC-1:0] not_empty;
  logic [$clog2(DEPTH+1)-1:0] count [NUM_VC];
  int checks = 0, failures = 0;
  flit_t q [NUM_VC][$];

  vc_buffer #(.NUM_VC(NUM_VC), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stop at the first errors, before a broken buffer trips its own assertion
  always @(posedge clk) if (failures >= 10) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_flit = '0; rd_en = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare state
      for (int v = 0; v < NUM_VC; v++) begin
        checks++;
        if (count[v] != q[v].size() || not_empty[v] != (q[v].size() != 0)) begin
          failures++;
          $display("cycle %0d vc %0d: count %0d expected %0d", cyc, v, count[v], q[v].size());
        end
        if (q[v].size() != 0) begin
          checks++;
          if (head[v] != q[v][0]) begin
            failures++;
            $display("cycle %0d vc %0d: wrong head", cyc, v);
          end
        end
      end
      // next stimulus
      wr_flit = '0;
      wr_flit.vc   = VC_W'($urandom_range(0, NUM_VC-1));
      wr_flit.data = {$urandom, $urandom};
      wr_flit.dst  = NODE_W'($urandom);
      wr_valid = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 70 : 40)) && (q[wr_flit.vc].size() < DEPTH);
      for (int v = 0; v < NUM_VC; v++) rd_en[v] = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 30 : 60));
      @(posedge clk);
      #1;
      for (int v = 0; v < NUM_VC; v++) if (rd_en[v] && q[v].size() != 0) void'(q[v].pop_front());
      if (wr_valid) q[wr_flit.vc].push_back(wr_flit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
