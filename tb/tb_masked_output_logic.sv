// tb_masked_output_logic -- masked arg-max over the class scores.
//
// Connects the block to a masked_activation unit, as in the engine. Each
// round writes ten random scores as random arithmetic share pairs (with
// deliberate ties in some rounds), starts the search and checks the class
// against the first maximum computed here, that exactly nine comparisons
// were issued, and the number of clocks (nine times the 19-clock
// activation latency plus 2).
module tb_masked_output_logic;
  localparam int unsigned N_OUT = 10, W = 19;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, start, cmp_valid, res_valid, res_a1, res_a2, done;
  logic [3:0] in_idx, class_idx;
  logic [W-1:0] in_s1, in_s2, cmp_x, cmp_y, rnd;
  logic [13:0] otag;
  int checks = 0, failures = 0, n_cmp = 0;

  masked_output_logic #(.N_OUT(N_OUT), .W(W)) dut (.*);
  masked_activation #(.W(W), .TAG_W(14)) u_act (
    .clk, .rst_n, .in_valid(cmp_valid), .in_tag(14'd0), .a(cmp_x), .b(cmp_y), .rnd,
    .out_valid(res_valid), .out_tag(otag), .a1(res_a1), .a2(res_a2));

  always @(posedge clk) begin
    rnd <= W'($urandom);
    if (cmp_valid) n_cmp++;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; start = 1'b0; in_idx = '0; in_s1 = '0; in_s2 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 40; round++) begin
      int sc [N_OUT];
      int best, cyc;
      best = 0;
      cyc = 0;
      for (int j = 0; j < int'(N_OUT); j++) begin
        int s1;
        sc[j] = (round % 4 == 0) ? int'($urandom_range(0, 3)) : int'($urandom_range(0, 4000)) - 2000;
        if (sc[j] > sc[best]) best = j;
        s1 = int'($urandom_range(0, 100000)) - 50000;
        in_valid = 1'b1; in_idx = 4'(j); in_s1 = W'(s1); in_s2 = W'(sc[j] - s1);
        @(negedge clk);
      end
      in_valid = 1'b0;
      n_cmp = 0;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks += 3;
      if (int'(class_idx) != best) begin failures++; $display("FAIL round %0d class %0d exp %0d", round, class_idx, best); end
      if (n_cmp != int'(N_OUT) - 1) begin failures++; $display("FAIL %0d comparisons", n_cmp); end
      if (cyc != (int'(N_OUT) - 1) * (int'(W) + 2)) begin failures++; $display("FAIL %0d clocks", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
