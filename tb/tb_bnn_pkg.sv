// tb_bnn_pkg -- helper functions of the shared package.
//
// Checks the tree depth and level sizes of the adder tree against values
// worked out by hand: 784 leaves give depth 10 and levels 392, 196, 98, 49,
// 25, 13, 7, 4, 2, 1; the tag is 14 bits wide.
module tb_bnn_pkg;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  int exp_lvl [11] = '{784, 392, 196, 98, 49, 25, 13, 7, 4, 2, 1};
  initial begin
    checks++; if (tree_depth(784) != 10) failures++;
    checks++; if (tree_depth(1024) != 10) failures++;
    checks++; if (tree_depth(1025) != 11) failures++;
    checks++; if (tree_depth(2) != 1) failures++;
    for (int l = 0; l <= 10; l++) begin
      checks++; if (level_size(784, l) != exp_lvl[l]) failures++;
    end
    checks++; if (level_offset(784, 2) != 784 + 392) failures++;
    checks++; if (TAG_W != 14) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
