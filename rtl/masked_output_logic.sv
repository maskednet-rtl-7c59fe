// masked_output_logic -- arg-max of the output layer on masked scores.
//
// The output layer delivers each class score as two arithmetic shares
// (s1, s2). To decide best >= cand without adding a score's shares, it uses
//   (best.s1 - cand.s2) + (best.s2 - cand.s1) >= 0,
// whose two terms each mix shares of different scores, and hands the terms
// (cmp_x, cmp_y) to the masked activation unit, which returns the Boolean
// shares of [cmp_x + cmp_y >= 0]. The block keeps a running maximum: best
// starts at class 0 and each class 1..N_OUT-1 is compared in turn; the best
// moves to the candidate only when the candidate is strictly larger, so ties
// keep the lower index. The comparison bit is recombined from its shares to
// steer the running maximum, since the winning index is the output anyway.
//
// Interface: scores are written with in_valid/in_idx/in_s1/in_s2 (any
// order). start begins the search; cmp_valid pulses for one clock per
// comparison and the block waits for res_valid before the next one. done
// stays high with class_idx valid until the next start.
// Timing: N_OUT-1 comparisons, each one activation-unit latency plus 2
// clocks. The share arithmetic follows the published design; the
// sequential search order and tie rule are this design's own.
module masked_output_logic #(
  parameter int unsigned N_OUT = 10,
  parameter int unsigned W     = 19,
  localparam int unsigned IW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [IW-1:0] in_idx,
  input  logic [W-1:0]  in_s1,
  input  logic [W-1:0]  in_s2,
  input  logic          start,
  output logic          cmp_valid,
  output logic [W-1:0]  cmp_x,
  output logic [W-1:0]  cmp_y,
  input  logic          res_valid,
  input  logic          res_a1,
  input  logic          res_a2,
  output logic          done,
  output logic [IW-1:0] class_idx
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_DONE} state_e;
  state_e st;

  logic [N_OUT-1:0][W-1:0] sc1, sc2;
  logic [IW-1:0] best, cand;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc1 <= '0;
      sc2 <= '0;
    end else if (in_valid && int'(in_idx) < int'(N_OUT)) begin
      sc1[in_idx] <= in_s1;
      sc2[in_idx] <= in_s2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      best      <= '0;
      cand      <= '0;
      cmp_valid <= 1'b0;
      cmp_x     <= '0;
      cmp_y     <= '0;
    end else begin
      cmp_valid <= 1'b0;
      unique case (st)
        S_IDLE, S_DONE: if (start) begin
          best <= '0;
          cand <= IW'(1);
          st   <= (N_OUT > 1) ? S_ISSUE : S_DONE;
        end
        S_ISSUE: begin
          cmp_valid <= 1'b1;
          cmp_x     <= sc1[best] - sc2[cand];
          cmp_y     <= sc2[best] - sc1[cand];
          st        <= S_WAIT;
        end
        S_WAIT: if (res_valid) begin
          if ((res_a1 ^ res_a2) == 1'b0) best <= cand;  // best - cand < 0
          if (int'(cand) == int'(N_OUT) - 1) st <= S_DONE;
          else begin
            cand <= cand + IW'(1);
            st   <= S_ISSUE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign done      = (st == S_DONE);
  assign class_idx = best;

endmodule
