// pwm_module_tb: two channels with different period and high time.  A decision
// in a channel's class mask must arm it; over whole periods the output must be
// high for exactly the high time each period; a decision outside the mask must
// disarm it (output low).
// Two channels triggered by chosen classes follow the chip; the counter
// widths, the masks and arming on the epoch decision are this design's.
module pwm_module_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] ch_en = 2'b11;
  logic [1:0][26:0] period, high_time;
  logic [1:0][NUM_CLASSES-1:0] class_mask;
  logic decision_valid = 0;
  logic [3:0] decision = 0;
  logic [1:0] armed, pwm_out;
  pwm_module dut (.clk, .rst_n, .ch_en, .period, .high_time, .class_mask,
                                         .decision_valid, .decision, .armed, .pwm_out);
  task automatic decide(int c);
    @(negedge clk); decision_valid = 1; decision = 4'(c);
    @(negedge clk); decision_valid = 0;
  endtask
  // count high cycles of channel ch over n periods
  task automatic measure(int ch, int n, int exp_high);
    int hi;
    hi = 0;
    repeat (n * int'(period[ch])) begin @(posedge clk); #1; if (pwm_out[ch]) hi++; end
    checks++;
    if (hi != n * exp_high) begin failures++; $display("ch%0d high %0d exp %0d", ch, hi, n * exp_high); end
  endtask
  initial begin
    period[0] = 27'd100; high_time[0] = 27'd10;   // 10 % duty (the in-vivo setting, scaled)
    period[1] = 27'd64;  high_time[1] = 27'd48;
    class_mask[0] = 10'b0000001110;                // N1..N3
    class_mask[1] = 10'b0000010000;                // REM
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (50) begin @(posedge clk); #1; checks++; if (pwm_out != 0) failures++; end
    decide(2);
    checks += 2; if (armed != 2'b01) failures++; if (pwm_out[1]) failures++;
    measure(0, 5, 10);
    decide(4);
    checks++; if (armed != 2'b10) failures++;
    measure(1, 5, 48);
    checks++; if (pwm_out[0]) failures++;
    decide(0);
    repeat (200) begin @(posedge clk); #1; checks++; if (pwm_out != 0) failures++; end
    // disabling a channel disarms it
    decide(3); ch_en = 2'b10;
    repeat (3) @(negedge clk);
    checks++; if (armed[0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
