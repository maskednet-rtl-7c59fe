// tb_b2a_converter -- Boolean-to-arithmetic conversion with pairwise add.
//
// For random activations a (as share pairs), weights w and 2-bit random
// masks: in phase 0 every 4-bit output y_k must equal p(2k) + p(2k+1) - r_k
// with p = +1 when a XNOR w and -1 otherwise; in the following phase-1 beat
// y_k must equal r_k (from phase 0, even though rnd has changed), so the
// two phases add back to the weighted pair sum.
module tb_b2a_converter;
  localparam int unsigned NP = 512;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, valid, phase;
  logic [2*NP-1:0] s1, x2, rnd;
  logic [NP-1:0][3:0] y;
  int checks = 0, failures = 0;

  b2a_converter #(.N_PAIR(NP)) dut (.*);

  initial begin
    rst_n = 1'b0; valid = 1'b0; phase = 1'b0; s1 = '0; x2 = '0; rnd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      int pair [NP], rv [NP];
      int bad0, bad1;
      bad0 = 0;
      bad1 = 0;
      for (int i = 0; i < int'(2*NP); i++) begin
        logic a, w;
        a = 1'($urandom); w = 1'($urandom); s1[i] = 1'($urandom);
        x2[i] = ~((a ^ s1[i]) ^ w);   // share 2 of a, XNORed with w
      end
      rnd = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
             $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
             $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
             $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < int'(NP); k++) begin
        int p0, p1;
        p0 = (s1[2*k] ^ x2[2*k]) ? 1 : -1;
        p1 = (s1[2*k+1] ^ x2[2*k+1]) ? 1 : -1;
        pair[k] = p0 + p1;
        rv[k] = int'($signed(rnd[2*k +: 2]));
      end
      valid = 1'b1; phase = 1'b0;
      #1;
      for (int k = 0; k < int'(NP); k++) if (int'($signed(y[k])) != pair[k] - rv[k]) bad0++;
      @(negedge clk);
      phase = 1'b1; rnd = ~rnd;
      #1;
      for (int k = 0; k < int'(NP); k++) if (int'($signed(y[k])) != rv[k]) bad1++;
      @(negedge clk);
      valid = 1'b0;
      checks += 2;
      if (bad0 != 0) begin failures++; $display("FAIL phase 0: %0d LUTs", bad0); end
      if (bad1 != 0) begin failures++; $display("FAIL phase 1: %0d LUTs", bad1); end
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
