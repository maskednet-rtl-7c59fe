// masked_activation -- masked sign function (binarizer) of the BNN.
//
// Given the two arithmetic shares a and b of a W-bit two's-complement sum,
// it produces two Boolean shares (a1, a2) with a1 ^ a2 = 1 when a + b >= 0
// and 0 when a + b < 0, without ever forming a + b. The sign bit is found by
// rippling the carry through a chain of W masked look-up tables:
//   lut0      : (a[0], b[0], r0)            -> (r0, r0 ^ carry0)
//   lut k     : (a[k], b[k], m, r, rk)      -> (rk, rk ^ carry_k),  1 <= k <= W-2
//               where the incoming carry is m ^ r (the previous LUT's
//               masked carry and its bypassed mask)
//   lut W-1   : (a[W-1], b[W-1], m, r, rW1) -> (rW1, rW1 ^ ~(a ^ b ^ carry))
// Every LUT output pair is stored in a flip-flop pair (c1..cW) and every LUT
// draws its own fresh random bit rnd[k] each clock. The whole W-bit shares
// are captured on entry and bit k is delayed k clocks in a skew register
// column, so a new sum can enter every clock.
//
// Timing: in_valid/in_tag/a/b/rnd in cycle t, out_valid/out_tag/a1/a2 in
// cycle t+W (19 clocks for the 19-bit sums of the published design). rnd[k]
// is consumed by lut k in the clock in which that LUT evaluates.
// The LUT chain, its 19 stages for 19-bit sums, the bypassed mask and the
// per-stage registers follow the published design; the activation convention
// 1 for x >= 0 follows its sign-bit construction.
module masked_activation #(
  parameter int unsigned W     = 19,
  parameter int unsigned TAG_W = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic [W-1:0]     rnd,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic             a1,
  output logic             a2
);

  // Skew columns: col_a[k] holds a delayed by k clocks (bits k..W-1 used).
  logic [W-1:0][W-1:0] col_a, col_b;
  // LUT output registers c1..cW: masked value m and bypassed mask r.
  logic [W:1] c_m, c_r;

  always_comb begin
    col_a[0] = a;
    col_b[0] = b;
  end

  always_ff @(posedge clk) begin
    for (int k = 1; k < int'(W); k++) begin
      col_a[k] <= col_a[k-1];
      col_b[k] <= col_b[k-1];
    end
  end

  // lut0: no carry in.
  always_ff @(posedge clk) begin
    c_r[1] <= rnd[0];
    c_m[1] <= rnd[0] ^ (col_a[0][0] & col_b[0][0]);
  end

  // lut1 .. lutW-2: masked carry propagation.
  for (genvar k = 1; k < W - 1; k++) begin : g_lut
    logic ci, ak, bk;
    always_comb begin
      ci = c_m[k] ^ c_r[k];
      ak = col_a[k][k];
      bk = col_b[k][k];
    end
    always_ff @(posedge clk) begin
      c_r[k+1] <= rnd[k];
      c_m[k+1] <= rnd[k] ^ ((ak & bk) | (ak & ci) | (bk & ci));
    end
  end

  // Final LUT: masked binarization of the sign bit.
  logic cf, sgn;
  always_comb begin
    cf  = c_m[W-1] ^ c_r[W-1];
    sgn = col_a[W-1][W-1] ^ col_b[W-1][W-1] ^ cf;
  end
  always_ff @(posedge clk) begin
    c_r[W] <= rnd[W-1];
    c_m[W] <= rnd[W-1] ^ ~sgn;
  end

  assign a1 = c_r[W];
  assign a2 = c_m[W];

  // Valid / tag sideband, W clocks deep.
  logic [W-1:0]            vld_q;
  logic [W-1:0][TAG_W-1:0] tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      tag_q <= '0;
    end else begin
      vld_q[0] <= in_valid;
      tag_q[0] <= in_tag;
      for (int i = 1; i < int'(W); i++) begin
        vld_q[i] <= vld_q[i-1];
        tag_q[i] <= tag_q[i-1];
      end
    end
  end
  assign out_valid = vld_q[W-1];
  assign out_tag   = tag_q[W-1];

endmodule
