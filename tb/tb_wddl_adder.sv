// tb_wddl_adder -- exhaustive-by-sampling test of the hardened adder.
//
// Drives random signed W-bit operands with correct rail pairs and checks,
// one clock later, the (W+1)-bit sign-extended sum and that s_n is the
// complement of the sign bit. Then holds precharge high and checks that
// both rails of the sign bit drop to 0. Checked against plain integer
// addition.
module tb_wddl_adder;
  localparam int unsigned W = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic precharge;
  logic [W-1:0] a, b;
  logic a_n, b_n;
  logic [W:0] s;
  logic s_n;
  int checks = 0, failures = 0;

  wddl_adder #(.W(W)) dut (.*);

  initial begin
    int ea;
    precharge = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      a = W'($urandom); b = W'($urandom);
      if (i < 256) begin a = W'(i); b = W'(255 - i); end
      a_n = ~a[W-1]; b_n = ~b[W-1];
      ea = int'($signed(a)) + int'($signed(b));
      @(negedge clk);
      checks++;
      if ($signed(s) != ea || s_n != ~s[W]) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d b=%0d s=%0d s_n=%b", $signed(a), $signed(b), $signed(s), s_n);
      end
    end
    precharge = 1'b1;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (s[W] !== 1'b0 || s_n !== 1'b0) begin failures++; $display("FAIL precharge rails %b %b", s[W], s_n); end
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
