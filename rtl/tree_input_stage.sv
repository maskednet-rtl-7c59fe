// tree_input_stage -- weighting and selection of the adder tree leaves.
//
// For the input layer every share is multiplied by its +-1 weight: kept when
// the weight bit is 1 and negated when it is 0. The source is either the
// a_i - r_i memory (first phase) or the r_i memory (second phase). For the
// later layers the weights were already applied by the XNOR logic, and the
// leaves are the 4-bit signed outputs of the Boolean-to-arithmetic
// converters, sign-extended, on the first N_B2A leaves (the rest are 0).
// The selected leaves are registered together with the false rail of each
// leaf's sign bit, which starts the dual-rail sign path of the adder tree.
//
// Timing: one clock from inputs to leaf/leaf_n/out_valid/out_tag.
// Weighting by buffer-or-negate and the multiplexer between the input-layer
// shares and the converter outputs follow the published design.
module tree_input_stage
  import bnn_pkg::PIX_W, bnn_pkg::leaf_src_e, bnn_pkg::SRC_IN_AMR, bnn_pkg::SRC_IN_R, bnn_pkg::SRC_B2A;
#(
  parameter int unsigned N_IN  = 784,
  parameter int unsigned N_B2A = 512,
  parameter int unsigned TAG_W = 14,
  localparam int unsigned LW   = PIX_W + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [TAG_W-1:0]          in_tag,
  input  leaf_src_e                 src,
  input  logic [N_IN-1:0][LW-1:0]   amr,   // a_i - r_i, signed
  input  logic [N_IN-1:0][PIX_W-1:0] rr,   // r_i, unsigned
  input  logic [N_IN-1:0]           w,
  input  logic [N_B2A-1:0][3:0]     b2a,   // signed converter outputs
  output logic                      out_valid,
  output logic [TAG_W-1:0]          out_tag,
  output logic [N_IN-1:0][LW-1:0]   leaf,
  output logic [N_IN-1:0]           leaf_n
);

  logic [N_IN-1:0][LW-1:0] nxt;

  always_comb begin
    for (int i = 0; i < int'(N_IN); i++) begin
      logic [LW-1:0] x;
      unique case (src)
        SRC_IN_AMR: x = amr[i];
        SRC_IN_R:   x = {1'b0, rr[i]};
        default:    x = '0;
      endcase
      if (src == SRC_B2A) begin
        nxt[i] = (i < int'(N_B2A)) ? {{(LW-4){b2a[i][3]}}, b2a[i]} : '0;
      end else begin
        nxt[i] = w[i] ? x : LW'(-x);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      leaf      <= '0;
      leaf_n    <= '1;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      leaf      <= nxt;
      for (int i = 0; i < int'(N_IN); i++) leaf_n[i] <= ~nxt[i][LW-1];
    end
  end

endmodule
