// tb_xnor_logic -- one-share binary multiplication.
//
// For random activations split into random share pairs and random weights,
// checks that s1 ^ x equals (s1 ^ s2) XNOR w bit by bit, that is, the
// shares still encode the product.
module tb_xnor_logic;
  localparam int unsigned N = 1024;
  logic [N-1:0] sh, w, x, s1, act;
  int checks = 0, failures = 0;

  xnor_logic #(.N(N)) dut (.*);

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < int'(N); i++) begin
        act[i] = 1'($urandom); s1[i] = 1'($urandom); w[i] = 1'($urandom);
        sh[i] = act[i] ^ s1[i];
      end
      #1;
      for (int i = 0; i < int'(N); i++) begin
        checks++;
        if ((s1[i] ^ x[i]) != (act[i] == w[i])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
