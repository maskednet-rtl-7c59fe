// tb_bnn_ctrl -- sequencing of one inference.
//
// Runs the controller at a reduced size (8 inputs, 8 neurons per hidden
// layer, 4 outputs) with a model of the datapath that returns one result a
// fixed 30 clocks after every second-phase beat, and an arg-max that
// finishes 50 clocks after it starts. Checks the pixel indices, that every
// neuron gets a phase-0 then a phase-1 beat with the right tag and weight
// row, that no beat of a layer is issued before the previous layer's
// results are all back, the bank swaps, the arg-max start, done/busy and
// that precharge is high exactly when idle.
module tb_bnn_ctrl;
  import bnn_pkg::*;
  localparam int unsigned N_IN = 8, N_HID = 8, NL = 3, N_OUT = 4;
  localparam int unsigned ROWS = NL * N_HID + N_OUT, RAW = $clog2(ROWS);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, pix_valid, loading, beat_valid, res_valid, bank_swap;
  logic argmax_start, argmax_sel, argmax_done, busy, done, precharge;
  logic [2:0] pix_idx;
  tag_t beat_tag;
  logic [RAW-1:0] w_raddr;
  int checks = 0, failures = 0;
  int n_beats = 0, n_res = 0, n_swap = 0, n_am = 0, am_cnt = -1;
  int exp_layer = 0, exp_neuron = 0, exp_phase = 0;
  logic [63:0] res_pipe;

  bnn_ctrl #(.N_IN(N_IN), .N_HID(N_HID), .N_HID_LAYERS(NL), .N_OUT(N_OUT)) dut (.*);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  always @(posedge clk) begin
    if (!rst_n) res_pipe <= '0;
    else res_pipe <= {res_pipe[62:0], beat_valid && beat_tag.phase == PH_R};
    if (rst_n) begin
      chk(precharge == !busy, "precharge == !busy");
      if (beat_valid) begin
        int lsz;
        lsz = (exp_layer == int'(NL)) ? int'(N_OUT) : int'(N_HID);
        chk(int'(beat_tag.layer) == exp_layer && int'(beat_tag.neuron) == exp_neuron &&
            int'(beat_tag.phase) == exp_phase, $sformatf("beat order l%0d n%0d p%0d", beat_tag.layer,
            beat_tag.neuron, beat_tag.phase));
        chk(int'(w_raddr) == exp_layer * int'(N_HID) + exp_neuron, "weight row");
        chk(n_res == exp_layer * int'(N_HID), "previous layer complete");
        n_beats++;
        if (exp_phase == 1) begin
          exp_phase = 0;
          if (exp_neuron == lsz - 1) begin exp_neuron = 0; exp_layer++; end
          else exp_neuron++;
        end else exp_phase = 1;
      end
      if (res_valid) n_res++;
      if (bank_swap) n_swap++;
      if (argmax_start) begin n_am++; am_cnt = 50; end
      else if (am_cnt > 0) am_cnt--;
    end
  end
  assign res_valid = res_pipe[29];
  assign argmax_done = (am_cnt == 0);

  initial begin
    rst_n = 1'b0; start = 1'b0; pix_valid = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(!busy && precharge, "idle after reset");
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int i = 0; i < int'(N_IN); i++) begin
      pix_valid = 1'b1;
      chk(loading && int'(pix_idx) == i, "pixel index");
      @(negedge clk);
      pix_valid = 1'b0;
      @(negedge clk);
    end
    for (int c = 0; c < 2000 && !done; c++) @(negedge clk);
    chk(done && !busy, "done");
    chk(n_beats == 2 * int'(NL * N_HID + N_OUT), $sformatf("%0d beats", n_beats));
    chk(n_swap == int'(NL), "one swap after every hidden layer");
    chk(n_am == 1, "one arg-max start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
