// tree_demux_buffer -- demultiplexer and buffer at the adder tree output.
//
// Each neuron passes through the adder tree twice: first the sum of its
// a_i - r_i shares, then the sum of its r_i shares. The first-phase sum,
// with the neuron's bias added, is parked in the buffer; when the
// second-phase sum arrives the pair (buffered sum, new sum) is emitted as the
// two arithmetic shares of the neuron's pre-activation value. The bias is
// sampled together with the first-phase sum.
//
// Timing: out_valid/out_tag/sh1/sh2 one clock after the second-phase beat.
// The two sequential phases and the buffer follow the published design;
// issuing the two phases of a neuron back to back (so one buffer entry is
// enough) and adding the bias to the first share are this design's choices.
module tree_demux_buffer
  import bnn_pkg::tag_t, bnn_pkg::PH_AMR;
#(
  parameter int unsigned SUM_W = 19,
  parameter int unsigned BW    = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  tag_t             in_tag,
  input  logic [SUM_W-1:0] sum,
  input  logic [BW-1:0]    bias,
  output logic             out_valid,
  output tag_t             out_tag,
  output logic [SUM_W-1:0] sh1,
  output logic [SUM_W-1:0] sh2
);

  logic [SUM_W-1:0] buf_q;
  logic [SUM_W-1:0] bias_x;
  always_comb bias_x = SUM_W'($signed(bias));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      sh1       <= '0;
      sh2       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_tag.phase == PH_AMR) begin
          buf_q <= sum + bias_x;
        end else begin
          out_valid <= 1'b1;
          out_tag   <= in_tag;
          sh1       <= buf_q;
          sh2       <= sum;
        end
      end
    end
  end

endmodule
