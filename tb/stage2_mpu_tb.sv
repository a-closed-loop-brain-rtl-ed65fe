// stage2_mpu_tb: random ST lines and activation pairs; every bit plane must
// return the line value keyed by the two activation bits of that plane.
// Bit-serial 4:1 lookup per plane follows the MUXnet; the key order
// {x_a[k], x_b[k]} follows its table example. Purely combinational.
module stage2_mpu_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  st_line_t line;
  logic [7:0] x0, x1;
  st_val_t [7:0] y;
  stage2_mpu dut (.line, .x0, .x1, .y);
  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [19:0] r;
      r = 20'($urandom);
      line = r; x0 = 8'($urandom); x1 = 8'($urandom);
      #1;
      for (int k = 0; k < 8; k++) begin
        int key;
        key = 2*x0[k] + x1[k];
        checks++;
        if (y[k] != r[key*5 +: 5]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
