// tb_prng -- randomness source.
//
// Checks against a reference xorshift64 computed here: the state after a
// seed load and after each advance, that the state holds when advance is
// low, that lanes differ, and that enable = 0 forces the output to zero.
module tb_prng;
  localparam int unsigned OUT_W = 100;  // two lanes
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, seed_load, enable, advance;
  logic [63:0] seed;
  logic [OUT_W-1:0] rnd;
  int checks = 0, failures = 0;

  prng #(.OUT_W(OUT_W)) dut (.*);

  function automatic logic [63:0] xs(input logic [63:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    return x;
  endfunction

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    logic [63:0] l0, l1;
    rst_n = 1'b0; seed_load = 1'b0; enable = 1'b1; advance = 1'b0; seed = 64'h0123_4567_89ab_cdef;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    l0 = seed ^ (64'h9E37_79B9_7F4A_7C15 * 64'd1);
    l1 = seed ^ (64'h9E37_79B9_7F4A_7C15 * 64'd2);
    chk(rnd == {l1[35:0], l0}, "after seed load");
    for (int i = 0; i < 50; i++) begin
      advance = (i % 5 != 4);
      @(negedge clk);
      if (advance) begin l0 = xs(l0); l1 = xs(l1); end
      chk(rnd == {l1[35:0], l0}, $sformatf("step %0d", i));
      chk(rnd[63:0] != {28'd0, rnd[99:64]}, "lanes differ");
    end
    enable = 1'b0;
    #1 chk(rnd == '0, "PRNG off gives zero");
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
