// tb_wddl_adder_tree -- pipelined sums of the hardened adder tree.
//
// Feeds a new random set of signed leaves every clock (full throughput) and
// checks each output sum against an integer sum computed here, its tag, and
// that it appears exactly D = ceil(log2 N) clocks after its leaves. Uses the
// published 784 leaves of 9 bits (depth 10, 19-bit sums), including the
// extreme all-(-255) and all-(+255) cases.
module tb_wddl_adder_tree;
  import bnn_pkg::*;
  localparam int unsigned N = 784, LW = 9, TW = 14;
  localparam int unsigned D = tree_depth(N);
  localparam int unsigned SW = LW + D;
  localparam int NB = 60;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, precharge, in_valid, out_valid;
  logic [TW-1:0] in_tag, out_tag;
  logic [N-1:0][LW-1:0] leaf;
  logic [N-1:0] leaf_n;
  logic [SW-1:0] sum;
  int checks = 0, failures = 0;
  int exp_sum [NB];
  longint t_in [NB];
  int n_out = 0;

  wddl_adder_tree #(.N(N), .LW(LW), .TAG_W(TW)) dut (.*);

  longint cyc = 0;
  always @(posedge clk) begin
   if (rst_n && out_valid) begin
    checks++;
    if (int'(out_tag) != n_out || $signed(sum) != exp_sum[n_out] ||
        cyc - t_in[n_out] != longint'(D)) begin
      failures++;
      if (failures < 10) $display("FAIL beat %0d tag %0d sum %0d exp %0d lat %0d", n_out, out_tag,
                                  $signed(sum), exp_sum[n_out], cyc - t_in[n_out]);
    end
    n_out++;
   end
   cyc++;
  end

  initial begin
    rst_n = 1'b0; precharge = 1'b0; in_valid = 1'b0; in_tag = '0; leaf = '0; leaf_n = '1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int bt = 0; bt < NB; bt++) begin
      int s;
      s = 0;
      for (int i = 0; i < int'(N); i++) begin
        int v;
        v = (bt == 0) ? -255 : (bt == 1) ? 255 : int'($urandom_range(0, 510)) - 255;
        leaf[i] = LW'(v);
        leaf_n[i] = ~leaf[i][LW-1];
        s += v;
      end
      exp_sum[bt] = s;
      in_valid = 1'b1;
      in_tag = TW'(bt);
      t_in[bt] = cyc;  // sampled at the next edge
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (D + 3) @(negedge clk);
    checks++;
    if (n_out != NB) begin failures++; $display("FAIL got %0d sums", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
