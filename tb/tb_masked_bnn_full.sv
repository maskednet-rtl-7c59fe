// tb_masked_bnn_full -- end-to-end test of the masked BNN inference engine at the published size (784-1024-1024-1024-10).
//
// Loads random binary weights and small random integer biases, streams
// random images and compares against an unmasked integer model of the same
// network computed here: the last hidden layer's activations (recombined
// from their two Boolean shares), the ten class scores (recombined from
// their arithmetic shares) and the resulting class. Images are run with the
// PRNG on and with it off (the unmasked mode), and one image is repeated
// with a different seed, which must give the same result. It also counts
// the mechanisms it must see: precharge held and released, all three leaf
// sources of the adder tree, activation bank swaps, arg-max updates, and
// PRNG on/off runs. Latency from start to done is printed and, at the
// published size, compared with the 7248 clocks reported for the design.
module tb_masked_bnn_full;
  import bnn_pkg::*;

  localparam int unsigned N_IN  = 784;
  localparam int unsigned N_HID = 1024;
  localparam int unsigned NL    = 3;
  localparam int unsigned N_OUT = 10;
  localparam int unsigned ROWS  = NL * N_HID + N_OUT;
  localparam int unsigned RAW   = $clog2(ROWS);
  localparam int unsigned ROW_W = (N_IN > N_HID) ? N_IN : N_HID;
  localparam int unsigned WORDS = (ROW_W + 63) / 64;
  localparam int unsigned WW    = (WORDS > 1) ? $clog2(WORDS) : 1;
  localparam int unsigned OIW   = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned SUM_W = LEAF_W + tree_depth(N_IN);
  localparam int unsigned N_IMG = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              rst_n, prng_on, seed_load, w_we, b_we, start, pix_valid;
  logic [63:0]       seed, w_data;
  logic [RAW-1:0]    w_row, b_addr;
  logic [WW-1:0]     w_word;
  logic [BIAS_W-1:0] b_data;
  logic [PIX_W-1:0]  pix;
  logic              busy, done;
  logic [OIW-1:0]    class_idx;

  masked_bnn_top  dut (.*);

  int checks = 0, failures = 0;
  int n_pre_hi = 0, n_pre_lo = 0, n_src[3] = '{0, 0, 0}, n_swap = 0, n_upd = 0, n_on = 0, n_off = 0;

  // Model.
  bit          wt [ROWS][ROW_W];
  int          bs [ROWS];
  int          img [N_IN];
  bit          act [N_HID];
  bit          nxt [N_HID];
  int          score [N_OUT];
  int          ref_class;

  task automatic model();
    int s;
    for (int j = 0; j < int'(N_HID); j++) begin
      s = bs[j];
      for (int i = 0; i < int'(N_IN); i++) s += wt[j][i] ? img[i] : -img[i];
      act[j] = (s >= 0);
    end
    for (int l = 1; l < int'(NL); l++) begin
      for (int j = 0; j < int'(N_HID); j++) begin
        s = bs[l*N_HID + j];
        for (int i = 0; i < int'(N_HID); i++) s += (act[i] == wt[l*N_HID + j][i]) ? 1 : -1;
        nxt[j] = (s >= 0);
      end
      act = nxt;
    end
    ref_class = 0;
    for (int j = 0; j < int'(N_OUT); j++) begin
      s = bs[NL*N_HID + j];
      for (int i = 0; i < int'(N_HID); i++) s += (act[i] == wt[NL*N_HID + j][i]) ? 1 : -1;
      score[j] = s;
      if (s > score[ref_class]) ref_class = j;
    end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Mechanism monitors.
  always @(posedge clk) if (rst_n) begin
    if (dut.precharge) n_pre_hi++; else n_pre_lo++;
    if (dut.beat_v1) n_src[dut.src]++;
    if (dut.bank_swap) n_swap++;
    if (dut.argmax_sel && dut.a_out_valid && (dut.a_out1 ^ dut.a_out2) == 1'b0) n_upd++;
  end

  task automatic run_image(input bit on, input logic [63:0] sd, input bit gaps, output int cyc);
    longint c0;
    prng_on = on;
    seed = sd;
    @(negedge clk) seed_load = 1'b1;
    @(negedge clk) seed_load = 1'b0;
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    c0 = longint'($time / 10);
    for (int i = 0; i < int'(N_IN); i++) begin
      if (gaps && $urandom_range(0, 7) == 0) begin  // an idle gap now and then
        pix_valid = 1'b0;
        @(negedge clk);
      end
      pix_valid = 1'b1;
      pix = PIX_W'(img[i]);
      @(negedge clk);
    end
    pix_valid = 1'b0;
    while (!done) @(negedge clk);
    cyc = int'(longint'($time / 10) - c0);
    if (on) n_on++; else n_off++;
  endtask

  task automatic check_result(input string tag);
    logic [SUM_W-1:0] sc;
    int bad_act = 0, bad_sc = 0;
    for (int j = 0; j < int'(N_HID); j++)
      if ((dut.act_sh1[j] ^ dut.act_sh2[j]) != act[j]) bad_act++;
    check(bad_act == 0, $sformatf("%s: %0d last-hidden activations differ", tag, bad_act));
    for (int j = 0; j < int'(N_OUT); j++) begin
      sc = dut.u_out.sc1[j] + dut.u_out.sc2[j];
      if (sc != SUM_W'(score[j])) bad_sc++;
    end
    check(bad_sc == 0, $sformatf("%s: %0d scores differ", tag, bad_sc));
    check(int'(class_idx) == ref_class,
          $sformatf("%s: class %0d, expected %0d", tag, class_idx, ref_class));
  endtask

  initial begin
    int cyc, cyc_first;
    rst_n = 1'b0; prng_on = 1'b1; seed_load = 1'b0; w_we = 1'b0; b_we = 1'b0;
    start = 1'b0; pix_valid = 1'b0; seed = '0; w_data = '0; w_row = '0; b_addr = '0;
    w_word = '0; b_data = '0; pix = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Random model.
    for (int r = 0; r < int'(ROWS); r++) begin
      for (int k = 0; k < int'(ROW_W); k++) wt[r][k] = 1'($urandom_range(0, 1));
      bs[r] = int'($urandom_range(0, 6)) - 3;
    end
    for (int r = 0; r < int'(ROWS); r++) begin
      for (int wd = 0; wd < int'(WORDS); wd++) begin
        w_we = 1'b1; w_row = RAW'(r); w_word = WW'(wd);
        for (int b = 0; b < 64; b++) w_data[b] = (wd*64 + b < int'(ROW_W)) ? wt[r][wd*64+b] : 1'b0;
        @(negedge clk);
      end
      w_we = 1'b0;
      b_we = 1'b1; b_addr = RAW'(r); b_data = BIAS_W'(bs[r]);
      @(negedge clk);
      b_we = 1'b0;
    end
    for (int n = 0; n < int'(N_IMG); n++) begin
      for (int i = 0; i < int'(N_IN); i++) img[i] = $urandom_range(0, 255);
      model();
      run_image(n != 1, 64'(n) * 64'h1234_5678_9ABC_DEF1 + 64'd77, n >= 2, cyc);
      $display("image %0d prng_on=%0d class=%0d expected=%0d cycles=%0d",
               n, n != 1, class_idx, ref_class, cyc);
      check_result($sformatf("image %0d", n));
      if (n == 0) begin
        cyc_first = cyc;
        // Same image again with another seed: the shares differ, the result must not.
        run_image(1'b1, 64'hDEAD_BEEF_0BAD_F00D, 1'b0, cyc);
        check_result("image 0, second seed");
        check(cyc == cyc_first, "latency must not depend on the random values");
      end
    end
    // Latency against the published 7248 clocks (full size only); the time
  // includes streaming the 784 pixels in, one per clock.
    if (N_IN == 784 && N_HID == 1024 && N_OUT == 10)
      check(cyc_first > 7248 * 95 / 100 && cyc_first < 7248 * 105 / 100,
            $sformatf("latency %0d not within 5%% of 7248", cyc_first));
    $display("mechanisms: precharge hi=%0d lo=%0d src amr=%0d r=%0d b2a=%0d swaps=%0d argmax_updates=%0d prng_on=%0d prng_off=%0d",
             n_pre_hi, n_pre_lo, n_src[0], n_src[1], n_src[2], n_swap, n_upd, n_on, n_off);
    check(n_pre_hi > 0 && n_pre_lo > 0, "precharge both levels seen");
    check(n_src[0] > 0 && n_src[1] > 0 && n_src[2] > 0, "all leaf sources used");
    check(n_swap >= 2 * N_IMG, "activation bank swaps");
    check(n_upd > 0, "arg-max update seen");
    check(n_on > 0 && n_off > 0, "PRNG on and off runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
