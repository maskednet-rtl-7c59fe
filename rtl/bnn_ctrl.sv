// bnn_ctrl -- sequencer of one masked inference.
//
// After start it counts N_IN pixels into the input masker, then walks the
// layers in order: three hidden layers of N_HID neurons and an output layer
// of N_OUT neurons. For every neuron it issues two beats on consecutive
// clocks, first phase PH_AMR (sum of a - r shares) then phase PH_R (sum of
// r shares), each with the neuron's weight row address and a tag naming
// layer, neuron and phase. When a layer's beats are issued it waits until
// all of that layer's results have come back (res_valid pulses), swaps the
// activation banks and starts the next layer. After the output layer it
// starts the masked arg-max and waits for it to finish. precharge is held
// high while the engine is idle and released during an inference.
//
// Timing: one beat per clock; a hidden layer takes 2*N_HID issue clocks plus
// the pipeline drain. The layer order and two sequential phases per neuron
// follow the published design; the state machine and handshake are this
// design's own.
module bnn_ctrl
  import bnn_pkg::tag_t, bnn_pkg::PH_AMR, bnn_pkg::PH_R;
#(
  parameter int unsigned N_IN         = 784,
  parameter int unsigned N_HID        = 1024,
  parameter int unsigned N_HID_LAYERS = 3,
  parameter int unsigned N_OUT        = 10,
  localparam int unsigned ROWS        = N_HID_LAYERS * N_HID + N_OUT,
  localparam int unsigned RAW         = $clog2(ROWS),
  localparam int unsigned PAW         = $clog2(N_IN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           pix_valid,
  output logic [PAW-1:0] pix_idx,
  output logic           loading,      // pixels are being accepted
  output logic           beat_valid,
  output tag_t           beat_tag,
  output logic [RAW-1:0] w_raddr,
  input  logic           res_valid,
  output logic           bank_swap,
  output logic           argmax_start,
  output logic           argmax_sel,   // activation unit serves the arg-max
  input  logic           argmax_done,
  output logic           busy,
  output logic           done,
  output logic           precharge
);

  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_SETTLE, C_ISSUE, C_DRAIN, C_ARGMAX, C_DONE} cstate_e;
  cstate_e st;

  logic [1:0]  layer;
  logic [10:0] neuron;
  logic        phase;
  logic [11:0] res_cnt;
  logic        argmax_go;

  function automatic int unsigned layer_size(input logic [1:0] l);
    return (int'(l) == int'(N_HID_LAYERS)) ? N_OUT : N_HID;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      pix_idx   <= '0;
      layer     <= '0;
      neuron    <= '0;
      phase     <= 1'b0;
      res_cnt   <= '0;
      bank_swap <= 1'b0;
      argmax_go <= 1'b0;
    end else begin
      bank_swap <= 1'b0;
      argmax_go <= 1'b0;
      unique case (st)
        C_IDLE, C_DONE: if (start) begin
          st      <= C_LOAD;
          pix_idx <= '0;
        end
        C_LOAD: if (pix_valid) begin
          if (int'(pix_idx) == int'(N_IN) - 1) st <= C_SETTLE;
          else pix_idx <= pix_idx + 1'b1;
        end
        C_SETTLE: begin  // last pixel share is being written
          st      <= C_ISSUE;
          layer   <= '0;
          neuron  <= '0;
          phase   <= 1'b0;
          res_cnt <= '0;
        end
        C_ISSUE: begin
          if (res_valid) res_cnt <= res_cnt + 1'b1;
          phase <= ~phase;
          if (phase) begin
            if (int'(neuron) == int'(layer_size(layer)) - 1) st <= C_DRAIN;
            else neuron <= neuron + 1'b1;
          end
        end
        C_DRAIN: begin
          if (res_valid) res_cnt <= res_cnt + 1'b1;
          if (int'(res_cnt) == int'(layer_size(layer))) begin
            res_cnt <= '0;
            neuron  <= '0;
            phase   <= 1'b0;
            if (int'(layer) == int'(N_HID_LAYERS)) begin
              st        <= C_ARGMAX;
              argmax_go <= 1'b1;
            end else begin
              bank_swap <= 1'b1;
              layer     <= layer + 1'b1;
              st        <= C_ISSUE;
            end
          end
        end
        C_ARGMAX: if (argmax_done && !argmax_go) st <= C_DONE;
        default: st <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    loading         = (st == C_LOAD);
    beat_valid      = (st == C_ISSUE);
    beat_tag.phase  = phase ? PH_R : PH_AMR;
    beat_tag.layer  = layer;
    beat_tag.neuron = neuron;
    w_raddr         = RAW'(int'(layer) * int'(N_HID) + int'(neuron));
    argmax_start    = argmax_go;
    argmax_sel      = (st == C_ARGMAX);
    busy            = (st != C_IDLE) && (st != C_DONE);
    done            = (st == C_DONE);
    precharge       = !busy;
  end

endmodule
