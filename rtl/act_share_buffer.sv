// act_share_buffer -- Boolean shares of one layer's activations.
//
// Holds the two Boolean shares (share 1, share 2) of N activations in two
// banks: the read bank feeds the next layer's computation in parallel while
// the write bank collects the activations being produced, one per clock.
// swap exchanges the banks at a layer boundary. Reset clears both banks and
// selects bank 0 for reading. Storing the two shares of each activation
// follows the published design; the double banking is this design's own.
// Timing: writes land on the clock edge; sh1/sh2 are the read bank's
// registers and change only on swap (or on reset).
module act_share_buffer #(
  parameter int unsigned N  = 1024,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] widx,
  input  logic          wsh1,
  input  logic          wsh2,
  input  logic          swap,
  output logic [N-1:0]  sh1,
  output logic [N-1:0]  sh2
);

  logic [1:0][N-1:0] b1, b2;
  logic              rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b1 <= '0;
      b2 <= '0;
      rd <= 1'b0;
    end else begin
      if (we && int'(widx) < int'(N)) begin
        b1[~rd][widx] <= wsh1;
        b2[~rd][widx] <= wsh2;
      end
      if (swap) rd <= ~rd;
    end
  end

  assign sh1 = b1[rd];
  assign sh2 = b2[rd];

endmodule
