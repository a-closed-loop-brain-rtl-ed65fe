// muxnet_pe: the MUXnet process engine.
//
// One 40-bit weight word carries four 10-bit ST line indices.  The stage-1 MPU
// turns them into four ST lines; four stage-2 MPUs (4 x 8 = 32 4:1 MUXes) look up
// every bit plane of their activation pair; a PLMU per pair merges the planes;
// an adder tree sums the pairs.  Two modes:
//   m=5  (mode10=0): pair p = (x[2p], x[2p+1]) with line p, an 8-element inner
//                    product of 5-bit weights per cycle (linear layers).
//   m=10 (mode10=1): the m=10 table is decomposed into two m=5 tables.  Lines
//                    0/1 are the high/low halves of pair (x[0],x[1]) and lines
//                    2/3 of pair (x[2],x[3]); y = 32*(high results)+(low
//                    results), a 4-element inner product of 10-bit weights
//                    W = 32*Wh + Wl (Wl in [-16,15]) per cycle (conv layers).
// Combinational: y is valid in the cycle w_word and x are applied.
//
// Following the paper: two-stage MPU, PLMU, adder tree, dual m=5/m=10 mode by
// table decomposition with the high part shifted left by 5.  This design's
// choice: how pairs map to lines in m=10 mode and the signed split of W.
module muxnet_pe
  import muxnet_pkg::*;
(
  input  logic                        mode10,
  input  logic [WMEM_W-1:0]           w_word,
  input  act_t [N_ACT-1:0]            x,
  output logic signed [PE_W-1:0]      y
);

  st_idx_t  [N_MUX1-1:0] w_sel;
  st_line_t [N_MUX1-1:0] lines;

  always_comb begin
    for (int j = 0; j < int'(N_MUX1); j++)
      w_sel[j] = w_word[j*IDX_W +: IDX_W];
  end

  stage1_mpu u_stage1 (.w_sel(w_sel), .line(lines));

  logic signed [PAIR_W-1:0] pair_y [N_MUX1];

  for (genvar p = 0; p < int'(N_MUX1); p++) begin : g_pair
    act_t xa, xb;
    st_val_t [ABITS-1:0] planes;
    // m=10 mode feeds the same activation pair to the high and low lookup
    assign xa = mode10 ? x[2*(p/2)]   : x[2*p];
    assign xb = mode10 ? x[2*(p/2)+1] : x[2*p+1];
    stage2_mpu u_stage2 (.line(lines[p]), .x0(xa), .x1(xb), .y(planes));
    plmu       u_plmu   (.y_in(planes), .y(pair_y[p]));
  end

  // adder tree
  logic signed [PE_W-1:0] sum_hi, sum_lo, sum_m5;

  always_comb begin
    sum_hi = PE_W'(pair_y[0]) + PE_W'(pair_y[2]);
    sum_lo = PE_W'(pair_y[1]) + PE_W'(pair_y[3]);
    sum_m5 = sum_hi + sum_lo;
    y      = mode10 ? (sum_hi <<< ST_M) + sum_lo : sum_m5;
  end

endmodule
