// stage2_mpu: stage-2 multiplexer processing unit for one weight pair.
//
// Activations are consumed bit-serially in space: for every bit plane k of the
// two activations x0 and x1 a 2^n:1 (here 4:1) multiplexer uses the key
// {x0[k], x1[k]} to pick one value from the ST line chosen by stage 1.  The
// result y[k] is the bitwise inner product w.x^k; no multiplier or adder is
// involved.  ABITS multiplexers work in parallel, so a whole 8-bit pair is
// handled in one cycle.  Combinational.
//
// Following the paper: 4:1 MUX per bit, key built from one bit of each input.
// This design's choice: key MSB is x0 (the first weight of the pair).
module stage2_mpu
  import muxnet_pkg::*;
#(
  parameter int unsigned NBITS = ABITS
) (
  input  st_line_t                 line,
  input  logic [NBITS-1:0]         x0,
  input  logic [NBITS-1:0]         x1,
  output st_val_t [NBITS-1:0]      y
);

  always_comb begin
    for (int k = 0; k < int'(NBITS); k++)
      y[k] = line[{x0[k], x1[k]}];
  end

endmodule
