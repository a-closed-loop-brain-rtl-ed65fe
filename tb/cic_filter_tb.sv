// cic_filter_tb: for every rate R = 2..32 feeds random 10-bit samples and
// compares each output with floor(sum of the last R inputs / R) >> 2 (the top
// 8 of 10 bits), computed here with integers; also checks that exactly one
// output appears per R inputs, one cycle after the R-th input.
// The rate range 2..32 is the chip's; the 10-bit input and the mean taken
// as the output are this design's choices, and the expected values follow them.
module cic_filter_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] log2_rate;
  logic in_valid = 0;
  logic signed [9:0] in_data = '0;
  logic out_valid;
  logic signed [7:0] out_data;
  cic_filter dut (.clk, .rst_n, .log2_rate, .in_valid, .in_data, .out_valid, .out_data);

  initial begin
    for (int lr = 1; lr <= 5; lr++) begin
      log2_rate = 3'(lr);
      rst_n = 0; @(negedge clk); rst_n = 1;
      for (int blk = 0; blk < 40; blk++) begin
        int sum, exp_v;
        sum = 0;
        for (int s = 0; s < (1 << lr); s++) begin
          @(negedge clk);
          in_valid = 1;
          in_data = (blk == 0) ? 10'sd511 : (blk == 1 ? -10'sd512 : 10'($urandom));
          sum += int'(in_data);
          @(negedge clk); in_valid = 0;
          if (s < (1 << lr) - 1) begin
            checks++; if (out_valid) failures++;
          end
        end
        // out_valid must be high exactly now (one cycle after the last input)
        exp_v = (sum >>> lr) >>> 2;
        checks++;
        if (!out_valid || int'(out_data) != exp_v) begin
          failures++;
          if (failures < 10) $display("R=%0d got v=%0d %0d exp %0d", 1 << lr, out_valid, out_data, exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
