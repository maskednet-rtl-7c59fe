// share_mem -- storage for one share of the masked input image.
//
// DEPTH entries of W bits, written one per clock and read all at once so
// that every leaf of the adder tree is fed in the same clock. Two instances
// form the a_i - r_i memory and the r_i memory. Written as a register array
// (a parallel read port cannot be a block RAM); cleared by reset.
// Timing: a write is visible on rdata the clock after we.
module share_mem #(
  parameter int unsigned DEPTH = 784,
  parameter int unsigned W     = 9,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [W-1:0]            wdata,
  output logic [DEPTH-1:0][W-1:0] rdata
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata <= '0;
    else if (we && (int'(waddr) < int'(DEPTH))) rdata[waddr] <= wdata;
  end

endmodule
