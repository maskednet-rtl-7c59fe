// tb_masked_activation -- masked sign function.
//
// Streams one random pair of 19-bit shares per clock with fresh random LUT
// masks and checks that a1 ^ a2 equals [a + b >= 0] (two's complement,
// 19 bits, sums kept inside the 19-bit range), that the tag follows, and that each result appears exactly 19
// clocks after its input. Also checks with masks forced to 0 (a1 must then
// be 0) and that a1 alone is not the activation when masks are random
// (it should agree about half the time).
module tb_masked_activation;
  localparam int unsigned W = 19, TW = 14;
  localparam int NB = 400;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid, a1, a2;
  logic [TW-1:0] in_tag, out_tag;
  logic [W-1:0] a, b, rnd;
  int checks = 0, failures = 0, n_out = 0, agree = 0;
  bit exp_act [NB];
  bit zero_mask [NB];
  longint t_in [NB];

  masked_activation #(.W(W), .TAG_W(TW)) dut (.*);

  longint cyc = 0;
  always @(posedge clk) begin
   if (rst_n && out_valid) begin
    checks++;
    if ((a1 ^ a2) != exp_act[n_out] || int'(out_tag) != n_out ||
        cyc - t_in[n_out] != longint'(W) || (zero_mask[n_out] && a1)) begin
      failures++;
      if (failures < 10) $display("FAIL beat %0d act %b exp %b lat %0d", n_out, a1 ^ a2, exp_act[n_out],
                                  cyc - t_in[n_out]);
    end
    if (!zero_mask[n_out] && a1 == exp_act[n_out]) agree++;
    n_out++;
   end
   cyc++;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_tag = '0; a = '0; b = '0; rnd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int bt = 0; bt < NB; bt++) begin
      int x, y;
      x = int'($urandom_range(0, 262000)) - 131000;
      y = (bt % 3 == 0) ? -x + int'($urandom_range(0, 4)) - 2 : int'($urandom_range(0, 262000)) - 131000;
      a = W'(x); b = W'(y);
      exp_act[bt] = ((x + y) >= 0);
      zero_mask[bt] = (bt >= NB - 20);
      in_valid = 1'b1; in_tag = TW'(bt);
      t_in[bt] = cyc;
      // a new random word every clock: every LUT sees a fresh bit
      rnd = zero_mask[bt] ? '0 : W'($urandom);
      @(negedge clk);
      in_valid = 1'b0;
    end
    rnd = '0;
    repeat (W + 3) @(negedge clk);
    checks++;
    if (n_out != NB) begin failures++; $display("FAIL got %0d results", n_out); end
    checks++;
    if (agree < (NB - 20) / 4 || agree > 3 * (NB - 20) / 4) begin
      failures++; $display("FAIL share a1 agrees with the activation %0d times", agree);
    end
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
