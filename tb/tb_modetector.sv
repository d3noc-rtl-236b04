// tb_modetector: the three roles of a mo-detector.  A transmitting node
// (laser on, bias = data) puts exactly the data on the bus; a bypassing node
// (bias all ones) passes the light unchanged and detects nothing; a receiving
// node (bias off) detects the light and lets none through.  Also checks the
// whole source -> bypass -> receiver chain.
module tb_modetector;
  localparam int unsigned S = 64;
  logic laser_en [3];
  logic [S-1:0] light_in [3], bias [3], light_out [3], det_out [3];
  int checks = 0, failures = 0;
  logic clk = 0;

  // chain: src -> mid -> dst
  modetector #(.SLOTS(S)) u_src (.laser_en(laser_en[0]), .light_in(light_in[0]), .bias(bias[0]), .light_out(light_out[0]), .det_out(det_out[0]));
  modetector #(.SLOTS(S)) u_mid (.laser_en(laser_en[1]), .light_in(light_out[0]), .bias(bias[1]), .light_out(light_out[1]), .det_out(det_out[1]));
  modetector #(.SLOTS(S)) u_dst (.laser_en(laser_en[2]), .light_in(light_out[1]), .bias(bias[2]), .light_out(light_out[2]), .det_out(det_out[2]));


  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(logic [S-1:0] got, logic [S-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int k = 0; k < 500; k++) begin
      logic [S-1:0] data, stray;
      data  = {$urandom, $urandom};
      stray = {$urandom, $urandom};
      // source transmits, middle bypasses, destination receives
      light_in[0] = stray;                 // ignored: own laser lights the bus
      laser_en[0] = 1; bias[0] = data;
      laser_en[1] = 0; bias[1] = '1;
      laser_en[2] = 0; bias[2] = '0;
      #1;
      expect_eq(light_out[0], data, "source output");
      expect_eq(det_out[1], '0, "bypass detector");
      expect_eq(light_out[1], data, "bypass output");
      expect_eq(det_out[2], data, "receiver detector");
      expect_eq(light_out[2], '0, "after receiver");
      // dark bus: laser off everywhere
      laser_en[0] = 0; light_in[0] = '0;
      #1;
      expect_eq(det_out[2], '0, "dark bus");
      // a single node with mixed bias splits light between bus and ring
      laser_en[0] = 0; light_in[0] = stray; bias[0] = data;
      #1;
      expect_eq(light_out[0], stray & data, "bar slots");
      expect_eq(det_out[0], stray & ~data, "cross slots");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
