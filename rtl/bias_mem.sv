// bias_mem -- integer bias of every neuron.
//
// One BIAS_W-bit signed bias per neuron, same row numbering as weight_mem.
// Loaded one entry per clock from outside; read combinationally so the bias
// can be added in the same clock in which a neuron's sum leaves the adder
// tree. The width and the load port are this design's own choice.
module bias_mem #(
  parameter int unsigned ROWS   = 3082,
  parameter int unsigned BIAS_W = 16,
  localparam int unsigned AW    = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [BIAS_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [BIAS_W-1:0] rdata
);

  logic [BIAS_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < int'(ROWS)) mem[waddr] <= wdata;
  end

  assign rdata = (int'(raddr) < int'(ROWS)) ? mem[raddr] : '0;

endmodule
