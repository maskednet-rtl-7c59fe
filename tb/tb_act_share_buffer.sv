// tb_act_share_buffer -- double-banked activation shares.
//
// Fills the write bank with random share pairs while checking that the read
// bank does not change, swaps, checks the read bank now shows what was
// written, and repeats for several layers against a model kept here.
module tb_act_share_buffer;
  localparam int unsigned N = 1024;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, we, wsh1, wsh2, swap;
  logic [9:0] widx;
  logic [N-1:0] sh1, sh2;
  logic [N-1:0] m1 [2], m2 [2];
  int checks = 0, failures = 0;

  act_share_buffer #(.N(N)) dut (.*);

  initial begin
    int rd = 0;
    rst_n = 1'b0; we = 1'b0; wsh1 = 1'b0; wsh2 = 1'b0; swap = 1'b0; widx = '0;
    m1[0] = '0; m1[1] = '0; m2[0] = '0; m2[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int layer = 0; layer < 4; layer++) begin
      for (int j = 0; j < int'(N); j++) begin
        we = 1'b1; widx = 10'(j); wsh1 = 1'($urandom); wsh2 = 1'($urandom);
        m1[1-rd][j] = wsh1; m2[1-rd][j] = wsh2;
        @(negedge clk);
        if (j % 100 == 0) begin
          checks++;
          if (sh1 != m1[rd] || sh2 != m2[rd]) begin failures++; $display("FAIL read bank changed"); end
        end
      end
      we = 1'b0; swap = 1'b1;
      @(negedge clk);
      swap = 1'b0; rd = 1 - rd;
      checks++;
      if (sh1 != m1[rd] || sh2 != m2[rd]) begin failures++; $display("FAIL after swap %0d", layer); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
