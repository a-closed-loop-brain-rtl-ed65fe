// stage1_mpu_tb: checks every line of the static table against the inner
// product of its two weights with each key, saturated to 5 bits, for all four
// multiplexers.
// The n=2, m=5 table and its worked example w=(3,2) follow the MUXnet; the
// saturating sum for the other lines is this design's definition.
module stage1_mpu_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  st_idx_t  [3:0] w_sel;
  st_line_t [3:0] line;
  stage1_mpu dut (.w_sel, .line);

  function automatic int sat5(int v);
    return v > 15 ? 15 : (v < -16 ? -16 : v);
  endfunction

  initial begin
    for (int i = 0; i < 1024; i++) begin
      for (int j = 0; j < 4; j++) w_sel[j] = st_idx_t'((i + 257*j) % 1024);
      #1;
      for (int j = 0; j < 4; j++) begin
        int idx, wa, wb;
        idx = (i + 257*j) % 1024;
        wa = (idx >> 5) & 31; if (wa > 15) wa -= 32;
        wb = idx & 31;        if (wb > 15) wb -= 32;
        for (int k = 0; k < 4; k++) begin
          int exp_v;
          exp_v = sat5(((k >> 1) & 1) * wa + (k & 1) * wb);
          checks++;
          if (int'($signed(line[j][k])) != exp_v) begin
            failures++;
            if (failures < 10) $display("mismatch idx=%0d key=%0d got %0d exp %0d", idx, k, $signed(line[j][k]), exp_v);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
