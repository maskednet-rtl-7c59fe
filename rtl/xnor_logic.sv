// xnor_logic -- binary multiplication applied to one Boolean share.
//
// With the activation a = a1 ^ a2 and weight w, the product a XNOR w equals
// (a2 XNOR w) ^ a1, so multiplying only one share keeps the pair a valid
// sharing of the product. This block XNORs share 2 of every activation with
// its weight. Purely combinational. Follows the published design.
module xnor_logic #(
  parameter int unsigned N = 1024
) (
  input  logic [N-1:0] sh,
  input  logic [N-1:0] w,
  output logic [N-1:0] x
);
  always_comb x = ~(sh ^ w);
endmodule
