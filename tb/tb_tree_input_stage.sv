// tb_tree_input_stage -- leaf weighting and selection.
//
// For each of the three sources (a - r memory, r memory, converter outputs)
// drives random shares and weights and checks every registered leaf against
// the expected value (share kept for weight 1, negated for weight 0; the
// converter outputs sign-extended on the first N_B2A leaves and zero
// elsewhere), and that leaf_n is the inverse of each leaf's sign bit.
module tb_tree_input_stage;
  import bnn_pkg::*;
  localparam int unsigned N_IN = 784, N_B2A = 512, TW = 14, LW = 9;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  logic [TW-1:0] in_tag, out_tag;
  leaf_src_e src;
  logic [N_IN-1:0][LW-1:0] amr, leaf;
  logic [N_IN-1:0][7:0] rr;
  logic [N_IN-1:0] w, leaf_n;
  logic [N_B2A-1:0][3:0] b2a;
  int checks = 0, failures = 0;

  tree_input_stage #(.N_IN(N_IN), .N_B2A(N_B2A), .TAG_W(TW)) dut (.*);

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_tag = '0; src = SRC_IN_AMR; amr = '0; rr = '0; w = '0; b2a = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 30; t++) begin
      int e [N_IN];
      int bad;
      bad = 0;
      src = leaf_src_e'(t % 3);
      for (int i = 0; i < int'(N_IN); i++) begin
        int v;
        v = int'($urandom_range(0, 510)) - 255;
        amr[i] = LW'(v);
        rr[i] = 8'($urandom);
        w[i] = 1'($urandom);
        if (src == SRC_IN_AMR) e[i] = w[i] ? v : -v;
        else if (src == SRC_IN_R) e[i] = w[i] ? int'(rr[i]) : -int'(rr[i]);
        else e[i] = 0;
      end
      for (int k = 0; k < int'(N_B2A); k++) begin
        int v;
        v = int'($urandom_range(0, 7)) - 3;
        b2a[k] = 4'(v);
        if (src == SRC_B2A) e[k] = v;
      end
      in_valid = 1'b1; in_tag = TW'(t);
      @(negedge clk);
      for (int i = 0; i < int'(N_IN); i++)
        if (int'($signed(leaf[i])) != e[i] || leaf_n[i] != ~leaf[i][LW-1]) bad++;
      checks++;
      if (bad != 0 || !out_valid || int'(out_tag) != t) begin
        failures++; $display("FAIL beat %0d src %0d: %0d leaves", t, src, bad);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
