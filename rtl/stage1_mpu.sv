// stage1_mpu: stage-1 multiplexer processing unit of the MUXnet PE.
//
// The static table (ST) enumerates, for every line index, the inner products of
// one weight pair with all four 2-bit activation keys.  In silicon the table is
// wired to VDD/GND; here it is a constant array filled at elaboration by
// muxnet_pkg::st_value, which a synthesis tool turns into the same constant
// multiplexer.  Each of the N_MUX multiplexers selects one whole line (four
// 5-bit values) by the 10-bit index stored in the weight memory.
//
// Interface: w_sel[j] is the line index of multiplexer j, line[j][key] the
// selected value for activation key {x_i, x_i+1}.  Purely combinational.
//
// Following the paper: four stage-1 MUXes, n=2, m=5, line index stored instead of
// weights.  This design's choice: which lines the table holds (two 5-bit
// two's-complement weights, saturating sum), since the paper does not list them.
module stage1_mpu
  import muxnet_pkg::*;
#(
  parameter int unsigned N_MUX = N_MUX1
) (
  input  st_idx_t  [N_MUX-1:0] w_sel,
  output st_line_t [N_MUX-1:0] line
);

  // Static table: every line tied to constants
  st_line_t st [ST_LINES];

  for (genvar i = 0; i < int'(ST_LINES); i++) begin : g_line
    for (genvar k = 0; k < int'(ST_KEYS); k++) begin : g_key
      assign st[i][k] = st_value(st_idx_t'(i), ST_N'(k));
    end
  end

  always_comb begin
    for (int j = 0; j < int'(N_MUX); j++)
      line[j] = st[w_sel[j]];
  end

endmodule
