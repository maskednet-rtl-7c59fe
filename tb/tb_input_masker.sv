// tb_input_masker -- arithmetic masking of pixels.
//
// Random pixels and masks; one clock later the outputs must satisfy
// amr = pixel - r as a 9-bit signed value (no modulus), r = mask, and carry
// the index and write strobe.
module tb_input_masker;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, pix_valid, wr_en;
  logic [7:0] pix, rnd, r;
  logic [9:0] pix_idx, wr_idx;
  logic [8:0] amr;
  int checks = 0, failures = 0;

  input_masker #(.PIX_W(8), .IDX_W(10)) dut (.*);

  initial begin
    rst_n = 1'b0; pix_valid = 1'b0; pix = '0; rnd = '0; pix_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      int a, m;
      a = (i == 0) ? 0 : (i == 1) ? 255 : int'($urandom_range(0, 255));
      m = (i == 0) ? 255 : (i == 1) ? 0 : int'($urandom_range(0, 255));
      pix_valid = (i % 7 != 3); pix = 8'(a); rnd = 8'(m); pix_idx = 10'(i);
      @(negedge clk);
      checks++;
      if (wr_en != (i % 7 != 3) || int'($signed(amr)) != a - m || int'(r) != m || int'(wr_idx) != i) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d a=%0d r=%0d amr=%0d", i, a, m, $signed(amr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
