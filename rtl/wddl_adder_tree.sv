// wddl_adder_tree -- fully pipelined, side-channel hardened adder tree.
//
// Sums N signed LEAF_W-bit leaves in D = ceil(log2 N) register stages (10
// for the 784 leaves of the published design), accepting one new set of
// leaves every clock. Level l holds ceil(n/2) wddl_adder instances of width
// LEAF_W+l-1; an element without a partner at an odd-sized level is added to
// zero. Every leaf's sign bit travels as a rail pair (leaf MSB, leaf_n) and
// every adder keeps its sign bit dual-rail, so the whole tree uses the
// hardened sign logic. A valid bit and a TAG_W-bit tag travel alongside the
// data so the output sum can be matched to its neuron and phase.
//
// Timing: sum/out_valid/out_tag appear D clocks after leaf/in_valid/in_tag.
// The tree shape and depth follow the published design; pairing odd elements
// with zero and the sideband are this design's own.
module wddl_adder_tree
  import bnn_pkg::tree_depth, bnn_pkg::level_size;
#(
  parameter int unsigned N      = 784,
  parameter int unsigned LW     = 9,     // leaf width
  parameter int unsigned TAG_W  = 14,
  localparam int unsigned D     = tree_depth(N),
  localparam int unsigned SUM_W = LW + D
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 precharge,
  input  logic                 in_valid,
  input  logic [TAG_W-1:0]     in_tag,
  input  logic [N-1:0][LW-1:0] leaf,
  input  logic [N-1:0]         leaf_n,
  output logic                 out_valid,
  output logic [TAG_W-1:0]     out_tag,
  output logic [SUM_W-1:0]     sum
);

  for (genvar l = 0; l <= D; l++) begin : lvl
    localparam int unsigned CNT = level_size(N, l);
    localparam int unsigned LWL = LW + l;
    logic [CNT-1:0][LWL-1:0] v;
    logic [CNT-1:0]          vn;
    if (l == 0) begin : g_leaf
      assign v  = leaf;
      assign vn = leaf_n;
    end else begin : g_add
      localparam int unsigned PCNT = level_size(N, l - 1);
      for (genvar k = 0; k < CNT; k++) begin : add
        logic [LWL-2:0] b;
        logic           bn;
        if (2*k + 1 < PCNT) begin : g_pair
          assign b  = lvl[l-1].v[2*k+1];
          assign bn = lvl[l-1].vn[2*k+1];
        end else begin : g_zero
          assign b  = '0;
          assign bn = 1'b1;  // false rail of a 0 sign bit
        end
        wddl_adder #(.W(LWL-1)) u_add (
          .clk(clk), .precharge(precharge),
          .a(lvl[l-1].v[2*k]), .a_n(lvl[l-1].vn[2*k]),
          .b(b), .b_n(bn),
          .s(v[k]), .s_n(vn[k])
        );
      end
    end
  end

  assign sum = lvl[D].v[0];

  // Valid / tag sideband.
  logic [D-1:0]            vld_q;
  logic [D-1:0][TAG_W-1:0] tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      tag_q <= '0;
    end else begin
      vld_q[0] <= in_valid;
      tag_q[0] <= in_tag;
      for (int i = 1; i < int'(D); i++) begin
        vld_q[i] <= vld_q[i-1];
        tag_q[i] <= tag_q[i-1];
      end
    end
  end
  assign out_valid = vld_q[D-1];
  assign out_tag   = tag_q[D-1];

endmodule
