// early_stop_voter_tb: plays epochs of six segments.  For each segment the
// testbench answers run_nn with a prediction and then checks against its own
// vote counting: the decision, whether it was early, how many classifications
// were skipped, and that no run is requested once an epoch is decided.
// The last two epochs use per-class thresholds of 2 (Wake, N1) and 3 (N2, N3,
// REM), the kind of setting drawn for sleep staging.
// Six segments per epoch and per-class thresholds follow the chip; the
// threshold encoding and the tie rule are this design's.
module early_stop_voter_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NUM_CLASSES-1:0][2:0] thr;
  logic seg_done = 0, run_nn, pred_valid = 0, decision_valid, early;
  logic [3:0] pred = 0, decision;
  logic [15:0] skipped;
  early_stop_voter dut (.clk, .rst_n, .thr, .seg_done, .run_nn, .pred_valid, .pred,
                                    .decision_valid, .decision, .early, .skipped);
  int n_dec, last_dec, last_early;
  always @(posedge clk) if (rst_n && decision_valid) begin n_dec++; last_dec = int'(decision); last_early = int'(early); end

  // one epoch; preds[] are the predictions the network would give
  task automatic epoch(int preds [6], int exp_dec, int exp_early, int exp_runs);
    int runs, dec0, votes [NUM_CLASSES];
    runs = 0; dec0 = n_dec;
    for (int s = 0; s < 6; s++) begin
      @(negedge clk); seg_done = 1;
      @(negedge clk); seg_done = 0;
      if (run_nn) begin
        runs++;
        repeat (3) @(negedge clk);
        pred_valid = 1; pred = 4'(preds[s]);
        @(negedge clk); pred_valid = 0;
      end
      repeat (3) @(negedge clk);
    end
    checks += 4;
    if (runs != exp_runs) begin failures++; $display("runs %0d exp %0d", runs, exp_runs); end
    if (n_dec != dec0 + 1) begin failures++; $display("decisions %0d", n_dec - dec0); end
    if (last_dec != exp_dec) begin failures++; $display("dec %0d exp %0d", last_dec, exp_dec); end
    if (last_early != exp_early) begin failures++; $display("early %0d exp %0d", last_early, exp_early); end
  endtask

  initial begin
    n_dec = 0;
    thr = '0;
    thr[0] = 3'd2;   // wake: two votes suffice
    thr[2] = 3'd4;   // N2: four votes
    repeat (2) @(negedge clk); rst_n = 1;
    epoch('{0, 0, 1, 1, 1, 1}, 0, 1, 2);        // wake decided after 2 runs
    checks++; if (skipped != 4) failures++;
    epoch('{2, 2, 1, 2, 2, 3}, 2, 1, 5);        // N2 reaches 4 on the 5th run
    checks++; if (skipped != 5) failures++;
    epoch('{3, 1, 3, 4, 4, 3}, 3, 0, 6);        // no threshold: majority class 3
    epoch('{1, 4, 1, 4, 3, 3}, 1, 0, 6);        // three-way tie: lowest index
    checks++; if (skipped != 5) failures++;
    // thresholds as drawn for sleep staging: Wake and N1 at 2, N2, N3 and REM at 3
    thr = '0;
    thr[0] = 3'd2; thr[1] = 3'd2; thr[2] = 3'd3; thr[3] = 3'd3; thr[4] = 3'd3;
    epoch('{1, 2, 1, 2, 2, 2}, 1, 1, 3);        // N1 has 2 votes after 3 runs
    epoch('{4, 3, 4, 2, 4, 0}, 4, 1, 5);        // REM has 3 votes after 5 runs
    checks++; if (skipped != 9) begin failures++; $display("skipped %0d", skipped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
