// plmu: post-lookup merging unit.
//
// Merges the NBITS bit-plane results of one stage-2 MPU into the inner product
// of the weight pair with the two signed activations:
//     y = sum_{k<NBITS-1} y[k]*2^k  -  y[NBITS-1]*2^(NBITS-1)
// Each y[k] is a signed 5-bit value; the MSB plane is subtracted because the
// activations are two's complement.  The result needs ST_M+NBITS bits.
// Combinational.
//
// Following the paper: shift-and-merge of the per-plane results with the MSB
// plane treated as the two's-complement sign.  The adder arrangement (a plain
// sum here) is left to synthesis.
module plmu
  import muxnet_pkg::*;
#(
  parameter int unsigned NBITS = ABITS
) (
  input  st_val_t [NBITS-1:0]              y_in,
  output logic signed [ST_M+NBITS-1:0]     y
);

  always_comb begin
    logic signed [ST_M+NBITS-1:0] acc, term;
    acc = '0;
    for (int k = 0; k < int'(NBITS); k++) begin
      term = (ST_M+NBITS)'($signed(y_in[k])) <<< k;
      if (k == int'(NBITS) - 1) acc = acc - term;
      else                      acc = acc + term;
    end
    y = acc;
  end

endmodule
