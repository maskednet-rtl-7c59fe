// tb_share_mem -- share memory with parallel read.
//
// Writes random values to random addresses of a 784-entry memory, keeping
// a copy here, and after each write compares the whole parallel read port
// with the copy (reset contents are zero).
module tb_share_mem;
  localparam int unsigned DEPTH = 784, W = 9;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, we;
  logic [9:0] waddr;
  logic [W-1:0] wdata;
  logic [DEPTH-1:0][W-1:0] rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  share_mem #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    rst_n = 1'b0; we = 1'b0; waddr = '0; wdata = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1500; t++) begin
      int bad;
      bad = 0;
      we = (t % 4 != 0);
      waddr = 10'($urandom_range(0, DEPTH - 1));
      wdata = W'($urandom);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      for (int i = 0; i < int'(DEPTH); i++) if (rdata[i] != model[i]) bad++;
      checks++;
      if (bad != 0) begin failures++; if (failures < 10) $display("FAIL t=%0d %0d entries", t, bad); end
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
