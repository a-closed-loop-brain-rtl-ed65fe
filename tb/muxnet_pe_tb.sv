// muxnet_pe_tb: random weights and signed activations in both modes.
// m=5: eight weights w in [-8,7] (pair sums never saturate), y = sum w_i x_i.
// m=10: four weights W = 32*Wh + Wl with Wh, Wl in [-8,7], y = sum W_i x_i.
// The expected values are plain integer dot products.
// The two modes and the high/low split of m=10 weights follow the MUXnet's
// table decomposition; the weight ranges are chosen so no table entry
// saturates. The PE is combinational: outputs are checked after a settle delay.
module muxnet_pe_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  logic mode10;
  logic [39:0] w_word;
  act_t [7:0] x;
  logic signed [19:0] y;
  muxnet_pe dut (.mode10, .w_word, .x, .y);

  function automatic logic [9:0] idx(int a, int b);
    return {5'(a), 5'(b)};
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int w [8];
      int hi [4], lo [4];
      int exp_v;
      exp_v = 0;
      for (int i = 0; i < 8; i++) x[i] = act_t'($urandom);
      if (n == 0) for (int i = 0; i < 8; i++) x[i] = -128;
      mode10 = n[0];
      if (!mode10) begin
        for (int i = 0; i < 8; i++) begin
          w[i] = int'($urandom_range(0, 15)) - 8;
          exp_v += w[i] * int'(x[i]);
        end
        for (int p = 0; p < 4; p++) w_word[p*10 +: 10] = idx(w[2*p], w[2*p+1]);
      end else begin
        for (int i = 0; i < 4; i++) begin
          hi[i] = int'($urandom_range(0, 15)) - 8;
          lo[i] = int'($urandom_range(0, 15)) - 8;
          exp_v += (32*hi[i] + lo[i]) * int'(x[i]);
        end
        w_word[9:0]   = idx(hi[0], hi[1]);
        w_word[19:10] = idx(lo[0], lo[1]);
        w_word[29:20] = idx(hi[2], hi[3]);
        w_word[39:30] = idx(lo[2], lo[3]);
      end
      #1;
      checks++;
      if (int'(y) != exp_v) begin
        failures++;
        if (failures < 10) $display("mode10=%0d got %0d exp %0d", mode10, y, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
