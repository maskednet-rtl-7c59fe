// prng -- pseudo random number generator for the masking randomness.
//
// OUT_W fresh bits per clock come from ceil(OUT_W/64) independent xorshift64
// generators, each seeded from the 64-bit seed mixed with its lane number.
// The state steps whenever advance is high. With enable low the output is
// forced to zero: every share then equals the unmasked value, which is the
// "PRNG off" mode used to show that the unprotected computation leaks.
//
// Timing: seed_load (or reset) loads the state; rnd is a registered-state
// function and changes one clock after each advance. xorshift64 is not a
// cryptographically secure generator; the published design leaves the
// choice of generator open, and a secure one can replace this module
// without changing its ports.
module prng #(
  parameter int unsigned OUT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [63:0]      seed,
  input  logic             seed_load,
  input  logic             enable,
  input  logic             advance,
  output logic [OUT_W-1:0] rnd
);

  localparam int unsigned LANES = (OUT_W + 63) / 64;

  function automatic logic [63:0] lane_seed(input logic [63:0] s, input int unsigned lane);
    logic [63:0] x;
    x = s ^ (64'h9E37_79B9_7F4A_7C15 * 64'(lane + 1));
    return (x == 64'd0) ? 64'h1 : x;  // xorshift state must be nonzero
  endfunction

  function automatic logic [63:0] xorshift64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  logic [LANES-1:0][63:0] st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LANES); i++) st[i] <= lane_seed(64'd0, i);
    end else if (seed_load) begin
      for (int i = 0; i < int'(LANES); i++) st[i] <= lane_seed(seed, i);
    end else if (advance) begin
      for (int i = 0; i < int'(LANES); i++) st[i] <= xorshift64(st[i]);
    end
  end

  logic [LANES*64-1:0] flat;
  always_comb begin
    flat = st;
    rnd  = enable ? flat[OUT_W-1:0] : '0;
  end

endmodule
