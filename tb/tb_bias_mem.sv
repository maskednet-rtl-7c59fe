// tb_bias_mem -- bias storage.
//
// Writes a random bias into every row of the published 3082-row memory and
// reads all rows back combinationally, comparing with a copy kept here.
module tb_bias_mem;
  localparam int unsigned ROWS = 3082;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we;
  logic [11:0] waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [15:0] model [ROWS];
  int checks = 0, failures = 0;

  bias_mem #(.ROWS(ROWS), .BIAS_W(16)) dut (.*);

  initial begin
    we = 1'b0; waddr = '0; wdata = '0; raddr = '0;
    for (int r = 0; r < int'(ROWS); r++) begin
      @(negedge clk);
      we = 1'b1; waddr = 12'(r); wdata = 16'($urandom); model[r] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int r = 0; r < int'(ROWS); r++) begin
      raddr = 12'(r);
      #1;
      checks++;
      if (rdata != model[r]) begin failures++; if (failures < 10) $display("FAIL row %0d", r); end
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
