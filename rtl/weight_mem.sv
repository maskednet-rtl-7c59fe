// weight_mem -- binary weights of every neuron of the network.
//
// One row per neuron holds that neuron's weights, bit k for input k
// (1 = +1, 0 = -1). Rows 0..N_HID-1 are the first hidden layer (only the low
// N_IN bits used), followed by the second and third hidden layers and the
// N_OUT output neurons. A row is read every clock (registered output, like a
// block RAM). Rows are loaded from outside in 64-bit words: word wword of row
// wrow holds bits 64*wword+63 .. 64*wword. The row layout and load port are
// this design's own; the published design only states that all weights are
// kept on chip.
// Timing: rdata holds row raddr one clock after raddr is applied.
module weight_mem #(
  parameter int unsigned ROWS  = 3082,
  parameter int unsigned ROW_W = 1024,
  localparam int unsigned AW   = $clog2(ROWS),
  localparam int unsigned WORDS = (ROW_W + 63) / 64,
  localparam int unsigned WW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wrow,
  input  logic [WW-1:0]    wword,
  input  logic [63:0]      wdata,
  input  logic [AW-1:0]    raddr,
  output logic [ROW_W-1:0] rdata
);

  logic [WORDS*64-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we && int'(wrow) < int'(ROWS) && int'(wword) < int'(WORDS))
      mem[wrow][64*wword +: 64] <= wdata;
  end

  logic [WORDS*64-1:0] row_q;
  always_ff @(posedge clk) row_q <= mem[raddr];
  assign rdata = row_q[ROW_W-1:0];

endmodule
