// tb_weight_mem -- weight storage.
//
// Loads random 64-bit words into a reduced 40-row memory with the
// published 1024-bit rows, then reads rows in random order and checks each
// registered read (one clock after the address) against a copy kept here.
module tb_weight_mem;
  localparam int unsigned ROWS = 40, ROW_W = 1024;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we;
  logic [5:0] wrow, raddr;
  logic [3:0] wword;
  logic [63:0] wdata;
  logic [ROW_W-1:0] rdata;
  logic [ROW_W-1:0] model [ROWS];
  int checks = 0, failures = 0;

  weight_mem #(.ROWS(ROWS), .ROW_W(ROW_W)) dut (.*);

  initial begin
    we = 1'b0; wrow = '0; wword = '0; wdata = '0; raddr = '0;
    for (int r = 0; r < int'(ROWS); r++)
      for (int w = 0; w < 16; w++) begin
        @(negedge clk);
        we = 1'b1; wrow = 6'(r); wword = 4'(w); wdata = {$urandom, $urandom};
        model[r][64*w +: 64] = wdata;
      end
    @(negedge clk);
    we = 1'b0;
    for (int t = 0; t < 200; t++) begin
      raddr = 6'($urandom_range(0, ROWS - 1));
      @(negedge clk);
      checks++;
      if (rdata != model[raddr]) begin failures++; if (failures < 10) $display("FAIL row %0d", raddr); end
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
