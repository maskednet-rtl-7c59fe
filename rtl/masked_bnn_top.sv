// masked_bnn_top -- masked binarized neural network inference engine.
//
// Classifies an N_IN-pixel 8-bit image (28x28 MNIST digits by default)
// through N_HID_LAYERS fully connected binary hidden layers of N_HID neurons
// and an N_OUT-neuron output layer, while keeping every weight-dependent
// intermediate value split into two random shares:
//   * input_masker splits each pixel a_i into r_i and a_i - r_i, stored in
//     two share_mem instances;
//   * every neuron's weighted sum is computed twice by the same pipelined
//     wddl_adder_tree, once over its a - r shares and once over its r
//     shares (the sign bits inside the tree are dual-rail WDDL logic);
//   * tree_demux_buffer pairs the two sums (plus bias) as arithmetic shares;
//   * masked_activation binarizes them into two Boolean shares without
//     combining them, and act_share_buffer stores the shares of the layer;
//   * for the next layer, xnor_logic multiplies share 2 by the weights and
//     b2a_converter turns pairs of Boolean shares into arithmetic shares
//     that re-enter the adder tree;
//   * the output layer's scores stay shared and masked_output_logic finds
//     the arg-max through the same masked activation unit.
// Three prng instances supply the randomness; prng_on = 0 zeroes it, which
// runs the same datapath unmasked.
//
// Interface: load weights (w_we, 64-bit words) and biases (b_we) first;
// pulse start, then stream N_IN pixels with pix_valid (gaps allowed). done
// rises with class_idx valid; busy is high in between. seed_load reloads the
// PRNG seeds. The host-side loading interface is this design's own; the
// datapath and its order follow the published masked design.
// Timing: about N_IN + 2*(N_HID_LAYERS*N_HID + N_OUT) clocks plus pipeline
// drains (~32 clocks per layer) and (N_OUT-1) arg-max comparisons of ~21
// clocks.
module masked_bnn_top
  import bnn_pkg::*;
#(
  parameter int unsigned N_IN         = 784,
  parameter int unsigned N_HID        = 1024,
  parameter int unsigned N_HID_LAYERS = 3,
  parameter int unsigned N_OUT        = 10,
  localparam int unsigned ROWS        = N_HID_LAYERS * N_HID + N_OUT,
  localparam int unsigned RAW         = $clog2(ROWS),
  localparam int unsigned ROW_W       = (N_IN > N_HID) ? N_IN : N_HID,
  localparam int unsigned WORDS       = (ROW_W + 63) / 64,
  localparam int unsigned WW          = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned OIW         = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned N_B2A       = N_HID / 2,
  localparam int unsigned SUM_W       = LEAF_W + tree_depth(N_IN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              prng_on,
  input  logic [63:0]       seed,
  input  logic              seed_load,
  input  logic              w_we,
  input  logic [RAW-1:0]    w_row,
  input  logic [WW-1:0]     w_word,
  input  logic [63:0]       w_data,
  input  logic              b_we,
  input  logic [RAW-1:0]    b_addr,
  input  logic [BIAS_W-1:0] b_data,
  input  logic              start,
  input  logic              pix_valid,
  input  logic [PIX_W-1:0]  pix,
  output logic              busy,
  output logic              done,
  output logic [OIW-1:0]    class_idx
);

  localparam int unsigned PAW = $clog2(N_IN);

  // ---------------- control ----------------
  logic [PAW-1:0] pix_idx;
  logic           loading;
  logic           beat_valid;
  tag_t           beat_tag;
  logic [RAW-1:0] w_raddr;
  logic           res_valid, bank_swap, argmax_start, argmax_sel, argmax_done;
  logic           precharge;

  bnn_ctrl #(.N_IN(N_IN), .N_HID(N_HID), .N_HID_LAYERS(N_HID_LAYERS), .N_OUT(N_OUT)) u_ctrl (
    .clk, .rst_n, .start, .pix_valid, .pix_idx, .loading,
    .beat_valid, .beat_tag, .w_raddr, .res_valid, .bank_swap,
    .argmax_start, .argmax_sel, .argmax_done, .busy, .done, .precharge
  );

  // ---------------- randomness ----------------
  logic [PIX_W-1:0] rnd_in;
  logic [SUM_W-1:0] rnd_act;
  logic [N_HID-1:0] rnd_b2a;

  prng #(.OUT_W(PIX_W)) u_prng_in (
    .clk, .rst_n, .seed(seed ^ 64'h0123_4567_89AB_CDEF), .seed_load, .enable(prng_on),
    .advance(busy), .rnd(rnd_in));
  prng #(.OUT_W(SUM_W)) u_prng_act (
    .clk, .rst_n, .seed(seed ^ 64'hF0E1_D2C3_B4A5_9687), .seed_load, .enable(prng_on),
    .advance(busy), .rnd(rnd_act));
  prng #(.OUT_W(N_HID)) u_prng_b2a (
    .clk, .rst_n, .seed(seed ^ 64'h5A5A_3C3C_0F0F_6969), .seed_load, .enable(prng_on),
    .advance(busy), .rnd(rnd_b2a));

  // ---------------- input masking and share memories ----------------
  logic                      m_we;
  logic [PAW-1:0]            m_idx;
  logic [LEAF_W-1:0]         m_amr;
  logic [PIX_W-1:0]          m_r;
  logic [N_IN-1:0][LEAF_W-1:0] mem_amr;
  logic [N_IN-1:0][PIX_W-1:0]  mem_r;

  input_masker #(.PIX_W(PIX_W), .IDX_W(PAW)) u_mask (
    .clk, .rst_n, .pix_valid(pix_valid && loading), .pix, .pix_idx,
    .rnd(rnd_in), .wr_en(m_we), .wr_idx(m_idx), .amr(m_amr), .r(m_r));

  share_mem #(.DEPTH(N_IN), .W(LEAF_W)) u_mem_amr (
    .clk, .rst_n, .we(m_we), .waddr(m_idx), .wdata(m_amr), .rdata(mem_amr));
  share_mem #(.DEPTH(N_IN), .W(PIX_W)) u_mem_r (
    .clk, .rst_n, .we(m_we), .waddr(m_idx), .wdata(m_r), .rdata(mem_r));

  // ---------------- weights and biases ----------------
  logic [ROW_W-1:0] w_row_q;
  weight_mem #(.ROWS(ROWS), .ROW_W(ROW_W)) u_wmem (
    .clk, .we(w_we), .wrow(w_row), .wword(w_word), .wdata(w_data),
    .raddr(w_raddr), .rdata(w_row_q));

  // ---------------- beat aligned with the weight row ----------------
  logic beat_v1;
  tag_t beat_t1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_v1 <= 1'b0;
      beat_t1 <= '0;
    end else begin
      beat_v1 <= beat_valid;
      beat_t1 <= beat_tag;
    end
  end

  // ---------------- hidden-layer inputs: XNOR and B2A ----------------
  logic [N_HID-1:0]          act_sh1, act_sh2, act_x2;
  logic [N_B2A-1:0][3:0]     b2a_y;
  logic                      a_out_valid;
  tag_t                      a_out_tag;
  logic                      a_out1, a_out2;

  act_share_buffer #(.N(N_HID)) u_acts (
    .clk, .rst_n,
    .we(a_out_valid && !argmax_sel), .widx(a_out_tag.neuron[$clog2(N_HID)-1:0]),
    .wsh1(a_out1), .wsh2(a_out2), .swap(bank_swap), .sh1(act_sh1), .sh2(act_sh2));

  xnor_logic #(.N(N_HID)) u_xnor (.sh(act_sh2), .w(w_row_q[N_HID-1:0]), .x(act_x2));

  b2a_converter #(.N_PAIR(N_B2A)) u_b2a (
    .clk, .rst_n, .valid(beat_v1), .phase(beat_t1.phase == PH_R),
    .s1(act_sh1), .x2(act_x2), .rnd(rnd_b2a), .y(b2a_y));

  // ---------------- adder tree ----------------
  leaf_src_e                   src;
  logic                        lf_valid;
  tag_t                        lf_tag;
  logic [N_IN-1:0][LEAF_W-1:0] leaf;
  logic [N_IN-1:0]             leaf_n;

  always_comb begin
    if (beat_t1.layer != 2'd0) src = SRC_B2A;
    else if (beat_t1.phase == PH_R) src = SRC_IN_R;
    else src = SRC_IN_AMR;
  end

  tree_input_stage #(.N_IN(N_IN), .N_B2A(N_B2A), .TAG_W(TAG_W)) u_tin (
    .clk, .rst_n, .in_valid(beat_v1), .in_tag(beat_t1), .src,
    .amr(mem_amr), .rr(mem_r), .w(w_row_q[N_IN-1:0]), .b2a(b2a_y),
    .out_valid(lf_valid), .out_tag(lf_tag), .leaf, .leaf_n);

  logic             t_valid;
  tag_t             t_tag;
  logic [SUM_W-1:0] t_sum;

  wddl_adder_tree #(.N(N_IN), .LW(LEAF_W), .TAG_W(TAG_W)) u_tree (
    .clk, .rst_n, .precharge, .in_valid(lf_valid), .in_tag(lf_tag),
    .leaf, .leaf_n, .out_valid(t_valid), .out_tag(t_tag), .sum(t_sum));

  // ---------------- bias, demux and buffer ----------------
  logic [BIAS_W-1:0] bias;
  bias_mem #(.ROWS(ROWS), .BIAS_W(BIAS_W)) u_bmem (
    .clk, .we(b_we), .waddr(b_addr), .wdata(b_data),
    .raddr(RAW'(int'(t_tag.layer) * int'(N_HID) + int'(t_tag.neuron))), .rdata(bias));

  logic             d_valid;
  tag_t             d_tag;
  logic [SUM_W-1:0] d_sh1, d_sh2;
  tree_demux_buffer #(.SUM_W(SUM_W), .BW(BIAS_W)) u_demux (
    .clk, .rst_n, .in_valid(t_valid), .in_tag(t_tag), .sum(t_sum), .bias,
    .out_valid(d_valid), .out_tag(d_tag), .sh1(d_sh1), .sh2(d_sh2));

  logic d_hidden, d_output;
  always_comb begin
    d_hidden = d_valid && (int'(d_tag.layer) <  int'(N_HID_LAYERS));
    d_output = d_valid && (int'(d_tag.layer) == int'(N_HID_LAYERS));
  end

  // ---------------- masked activation, shared with the arg-max ----------------
  logic             cmp_valid;
  logic [SUM_W-1:0] cmp_x, cmp_y;
  logic             a_in_valid;
  tag_t             a_in_tag;
  logic [SUM_W-1:0] a_in_a, a_in_b;

  always_comb begin
    if (argmax_sel) begin
      a_in_valid = cmp_valid;
      a_in_tag   = '0;
      a_in_a     = cmp_x;
      a_in_b     = cmp_y;
    end else begin
      a_in_valid = d_hidden;
      a_in_tag   = d_tag;
      a_in_a     = d_sh1;
      a_in_b     = d_sh2;
    end
  end

  masked_activation #(.W(SUM_W), .TAG_W(TAG_W)) u_act (
    .clk, .rst_n, .in_valid(a_in_valid), .in_tag(a_in_tag), .a(a_in_a), .b(a_in_b),
    .rnd(rnd_act), .out_valid(a_out_valid), .out_tag(a_out_tag), .a1(a_out1), .a2(a_out2));

  // ---------------- masked output logic ----------------
  masked_output_logic #(.N_OUT(N_OUT), .W(SUM_W)) u_out (
    .clk, .rst_n, .in_valid(d_output), .in_idx(d_tag.neuron[OIW-1:0]),
    .in_s1(d_sh1), .in_s2(d_sh2), .start(argmax_start),
    .cmp_valid, .cmp_x, .cmp_y,
    .res_valid(a_out_valid && argmax_sel), .res_a1(a_out1), .res_a2(a_out2),
    .done(argmax_done), .class_idx);

  assign res_valid = (a_out_valid && !argmax_sel) || d_output;

endmodule
