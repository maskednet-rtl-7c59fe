// wddl_msb_logic -- dual-rail sign bit of a sign-extended addition.
//
// Computes s8 = a7 ^ b7 ^ c written as four 3-input NANDs feeding a 4-input
// NAND:
//   s8 = NAND( NAND(~a7,b7,~c), NAND(a7,~b7,~c), NAND(a7,b7,c), NAND(~a7,~b7,c) )
// with every NAND replaced by a WDDL NAND. A WDDL gate carries each signal on
// a true rail and a false rail; its NAND drives the true rail with the OR of
// the input false rails and the false rail with the AND of the input true
// rails, so it only uses positive (non-inverting) logic and a precharge to
// all-zero inputs propagates as all-zero outputs. Inverted literals (~a7) are
// free: the two rails are swapped. Purely combinational.
module wddl_msb_logic (
  input  logic a_t, a_f,
  input  logic b_t, b_f,
  input  logic c_t, c_f,
  output logic s_t, s_f
);

  logic [3:0] n_t, n_f;  // the four first-level NAND outputs

  always_comb begin
    // NAND(~a, b, ~c)
    n_t[0] = a_t | b_f | c_t;
    n_f[0] = a_f & b_t & c_f;
    // NAND(a, ~b, ~c)
    n_t[1] = a_f | b_t | c_t;
    n_f[1] = a_t & b_f & c_f;
    // NAND(a, b, c)
    n_t[2] = a_f | b_f | c_f;
    n_f[2] = a_t & b_t & c_t;
    // NAND(~a, ~b, c)
    n_t[3] = a_t | b_t | c_f;
    n_f[3] = a_f & b_f & c_t;
    // Final 4-input NAND.
    s_t = |n_f;
    s_f = &n_t;
  end

endmodule
