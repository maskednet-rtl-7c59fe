// b2a_converter -- Boolean-to-arithmetic share conversion with pairwise add.
//
// N_PAIR masked LUTs. LUT k takes the two Boolean shares of activations 2k
// and 2k+1, share 2 already XNORed with the weights (x2) and share 1 as it
// is (s1), plus a 2-bit signed random number r in -2..+1. The weighted
// products are p = s1 ^ x2 (1 = +1, 0 = -1), their sum a_k lies in
// {-2, 0, +2}, and the LUT outputs the 4-bit signed share a_k - r (range
// -3..+4) and the mask r itself. This halves 2*N_PAIR one-bit products into
// N_PAIR arithmetic share pairs the adder tree can take. In the first phase
// of a neuron y carries a_k - r and r is stored; in the second phase y
// carries the stored r, sign-extended to 4 bits.
//
// Timing: y is combinational from the inputs (phase 0) or from the stored
// masks (phase 1); the masks are stored at the clock edge of a phase-0 beat.
// LUT inputs and output ranges follow the published design; storing r for
// the second phase is this design's own.
module b2a_converter #(
  parameter int unsigned N_PAIR = 512
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    phase,  // 0: a-r share, 1: r share
  input  logic [2*N_PAIR-1:0]     s1,
  input  logic [2*N_PAIR-1:0]     x2,
  input  logic [2*N_PAIR-1:0]     rnd,
  output logic [N_PAIR-1:0][3:0]  y
);

  logic [N_PAIR-1:0][1:0] r_q;
  logic [N_PAIR-1:0][3:0] amr;

  always_comb begin
    for (int k = 0; k < int'(N_PAIR); k++) begin
      logic p0, p1;
      logic [3:0] ak, rk;
      p0  = s1[2*k]   ^ x2[2*k];
      p1  = s1[2*k+1] ^ x2[2*k+1];
      ak  = (p0 ? 4'sd1 : -4'sd1) + (p1 ? 4'sd1 : -4'sd1);
      rk  = {{2{rnd[2*k+1]}}, rnd[2*k+1 -: 2]};
      amr[k] = ak - rk;
      y[k]   = phase ? {{2{r_q[k][1]}}, r_q[k]} : amr[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_q <= '0;
    else if (valid && !phase)
      for (int k = 0; k < int'(N_PAIR); k++) r_q[k] <= rnd[2*k+1 -: 2];
  end

endmodule
