// wddl_adder -- one pipelined adder of the side-channel hardened adder tree.
//
// Adds two W-bit signed operands into a registered (W+1)-bit sum. All bits
// except the new sign bit come from an ordinary W-bit adder and a normal
// register. The sign bit s[W] = a[W-1] ^ b[W-1] ^ c (c = carry out of the
// W-bit addition) is produced in dual-rail form by wddl_msb_logic, which is
// built only from WDDL NAND gates, and is held in a pair of flip-flops (the
// SDDL register, one per rail). Each operand's sign bit arrives as a rail
// pair (a[W-1], a_n); NOR gates with the precharge signal turn them into the
// internal rail pair, and NOR gates after the SDDL register regenerate the
// output pair (s[W], s_n) with crossed rails. While precharge is high all
// differential rails are 0.
//
// Timing: one clock from operands to s / s_n. precharge is a level input in
// this RTL; the half-cycle precharge wave of a real WDDL circuit belongs to
// the physical implementation. Structure (regular adder, MSB logic, SDDL
// register, NOR gates, carry c and its inverse c') follows the published
// circuit; the dual-rail gate model and level precharge are this design's.
module wddl_adder #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         precharge,
  input  logic [W-1:0] a,      // a[W-1] is the true rail of a's sign bit
  input  logic         a_n,    // false rail of a's sign bit
  input  logic [W-1:0] b,
  input  logic         b_n,
  output logic [W:0]   s,      // s[W] is the true rail of the sign bit
  output logic         s_n     // false rail of the sign bit
);

  // Regular W-bit adder with carry out.
  logic [W-1:0] low_sum;
  logic         c;
  always_comb {c, low_sum} = {1'b0, a} + {1'b0, b};

  // Input precharge NOR gates: a7' = NOR(a7, pre), a7 = NOR(a7', pre).
  logic a_t, a_f, b_t, b_f;
  always_comb begin
    a_f = ~(a[W-1] | precharge);
    a_t = ~(a_n    | precharge);
    b_f = ~(b[W-1] | precharge);
    b_t = ~(b_n    | precharge);
  end

  // Differential MSB logic.
  logic m_t, m_f;
  wddl_msb_logic u_msb (
    .a_t(a_t), .a_f(a_f), .b_t(b_t), .b_f(b_f),
    .c_t(c), .c_f(~c),
    .s_t(m_t), .s_f(m_f)
  );

  // Regular register for the low bits, SDDL register pair for the sign bit.
  logic [W-1:0] low_q;
  logic         sddl_t, sddl_f;
  always_ff @(posedge clk) begin
    low_q  <= low_sum;
    sddl_t <= m_t;
    sddl_f <= m_f;
  end

  // Output precharge NOR gates with crossed rails.
  always_comb begin
    s   = {~(sddl_f | precharge), low_q};
    s_n = ~(sddl_t | precharge);
  end

endmodule
