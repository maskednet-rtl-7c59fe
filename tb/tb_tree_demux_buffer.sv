// tb_tree_demux_buffer -- pairing of the two phase sums.
//
// Sends neurons as back-to-back phase beats (a - r sum with a bias, then r
// sum), with idle clocks in between, and checks that exactly one pair per
// neuron comes out, one clock after the second beat, with sh1 = first sum +
// bias, sh2 = second sum and the second beat's tag.
module tb_tree_demux_buffer;
  import bnn_pkg::*;
  localparam int unsigned SW = 19;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  tag_t in_tag, out_tag;
  logic [SW-1:0] sum, sh1, sh2;
  logic [15:0] bias;
  int checks = 0, failures = 0, n_out = 0;

  tree_demux_buffer #(.SUM_W(SW), .BW(16)) dut (.*);

  always @(posedge clk) if (rst_n && out_valid) n_out++;

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_tag = '0; sum = '0; bias = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 100; n++) begin
      int s1, s2, b;
      s1 = int'($urandom_range(0, 200000)) - 100000;
      s2 = int'($urandom_range(0, 200000)) - 100000;
      b  = int'($urandom_range(0, 60000)) - 30000;
      in_valid = 1'b1; in_tag.phase = PH_AMR; in_tag.layer = 2'(n % 4); in_tag.neuron = 11'(n);
      sum = SW'(s1); bias = 16'(b);
      @(negedge clk);
      in_tag.phase = PH_R; sum = SW'(s2); bias = 16'($urandom);  // bias ignored in phase 2
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || int'($signed(sh1)) != s1 + b || int'($signed(sh2)) != s2 ||
          out_tag.neuron != 11'(n) || out_tag.phase != PH_R) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d sh1=%0d exp %0d", n, $signed(sh1), s1 + b);
      end
      repeat (n % 3) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (n_out != 100) begin failures++; $display("FAIL %0d pairs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
