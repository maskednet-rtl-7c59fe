// input_masker -- arithmetic masking of the input pixels.
//
// Each 8-bit unsigned pixel a_i is split into the mask r_i (a fresh 8-bit
// random number) and the masked value a_i - r_i, a 9-bit signed number
// computed without a modulus, exactly as the adder tree later sums it. The
// two shares, with the pixel index, are written to the a_i - r_i memory and
// the r_i memory (share_mem). One pixel per clock, one clock of latency.
// The subtraction and the share widths follow the published design; the
// streaming interface is this design's own.
module input_masker #(
  parameter int unsigned PIX_W = 8,
  parameter int unsigned IDX_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pix_valid,
  input  logic [PIX_W-1:0] pix,
  input  logic [IDX_W-1:0] pix_idx,
  input  logic [PIX_W-1:0] rnd,
  output logic             wr_en,
  output logic [IDX_W-1:0] wr_idx,
  output logic [PIX_W:0]   amr,   // a_i - r_i, signed
  output logic [PIX_W-1:0] r
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en  <= 1'b0;
      wr_idx <= '0;
      amr    <= '0;
      r      <= '0;
    end else begin
      wr_en  <= pix_valid;
      wr_idx <= pix_idx;
      amr    <= {1'b0, pix} - {1'b0, rnd};
      r      <= rnd;
    end
  end

endmodule
