// early_stop_voter: class-wise early-stop voting over an epoch of segments.
//
// An epoch is SEGS consecutive segments (six 5-s segments for a 30-s sleep
// epoch).  Every segment end (seg_done) asks whether the network should run:
// run_nn pulses unless the epoch is already decided.  Each prediction adds one
// vote to its class.  As soon as a class c collects thr[c] votes (thr[c] = 0
// disables this), the epoch is decided early and the remaining segments of the
// epoch are skipped.  Otherwise, after SEGS predictions, the class with most
// votes wins (lowest index on a tie).  decision_valid pulses with the class in
// decision; early tells which rule decided.  skipped counts the classifications
// saved.  A new epoch starts at the first seg_done after SEGS segments.
//
// Following the paper: six segment predictions vote out one epoch, and each
// class has its own majority threshold for an early stop.  This design's
// choice: tie-break, threshold encoding and the handshakes.
module early_stop_voter
  import muxnet_pkg::*;
#(
  parameter int unsigned SEGS = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_CLASSES-1:0][2:0] thr,
  input  logic                   seg_done,
  output logic                   run_nn,
  input  logic                   pred_valid,
  input  logic [3:0]             pred,
  output logic                   decision_valid,
  output logic [3:0]             decision,
  output logic                   early,
  output logic [15:0]            skipped
);

  localparam int unsigned SW = $clog2(SEGS + 1);

  logic [NUM_CLASSES-1:0][SW-1:0] votes;
  logic [SW-1:0] seg_idx, n_pred;
  logic          decided;

  // votes including the incoming prediction
  logic [NUM_CLASSES-1:0][SW-1:0] votes_n;
  logic [3:0]                     best;
  always_comb begin
    votes_n = votes;
    if (pred_valid && 32'(pred) < NUM_CLASSES) votes_n[pred] = votes[pred] + 1'b1;
    best = '0;
    for (int c = 1; c < int'(NUM_CLASSES); c++)
      if (votes_n[c] > votes_n[best]) best = 4'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      votes <= '0; seg_idx <= '0; n_pred <= '0; decided <= 1'b0;
      run_nn <= 1'b0; decision_valid <= 1'b0; decision <= '0; early <= 1'b0; skipped <= '0;
    end else begin
      run_nn         <= 1'b0;
      decision_valid <= 1'b0;
      if (seg_done) begin
        seg_idx <= (seg_idx == SW'(SEGS - 1)) ? '0 : seg_idx + 1'b1;
        if (seg_idx == 0) begin
          votes <= '0; n_pred <= '0; decided <= 1'b0;
          run_nn <= 1'b1;
        end else if (decided) begin
          skipped <= skipped + 1'b1;
        end else begin
          run_nn <= 1'b1;
        end
      end else if (pred_valid && !decided) begin
        votes  <= votes_n;
        n_pred <= n_pred + 1'b1;
        if (32'(pred) < NUM_CLASSES && thr[pred] != 0 && 32'(votes_n[pred]) >= 32'(thr[pred])) begin
          decided <= 1'b1; decision_valid <= 1'b1; decision <= pred;
          early   <= (32'(n_pred) + 1 < SEGS);
        end else if (32'(n_pred) + 1 == SEGS) begin
          decided <= 1'b1; decision_valid <= 1'b1; decision <= best; early <= 1'b0;
        end
      end
    end
  end

endmodule
