// plmu_tb: random bit-plane results; the merged value must equal
// sum y[k]*2^k for k<7 minus y[7]*2^7, with every y[k] signed.
// The shift-and-merge with a subtracted MSB plane follows the described
// post-lookup merging unit; the test is purely combinational.
module plmu_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  st_val_t [7:0] y_in;
  logic signed [12:0] y;
  plmu dut (.y_in, .y);
  initial begin
    for (int n = 0; n < 5000; n++) begin
      int exp_v;
      exp_v = 0;
      for (int k = 0; k < 8; k++) begin
        int v;
        v = (n < 2) ? (n == 0 ? 15 : -16) : int'($urandom_range(0, 31)) - 16;
        if (n == 0 && k == 7) v = -16;
        if (n == 1 && k == 7) v = 15;
        y_in[k] = 5'(v);
        exp_v += (k == 7) ? -v * 128 : v * (1 << k);
      end
      #1;
      checks++;
      if (int'(y) != exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch got %0d exp %0d", y, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
