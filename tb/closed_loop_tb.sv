// closed_loop_tb: the in-vivo closed-loop setting at its real timing.
//
// Clock 23 MHz.  LED channel 0 pulses at 10 Hz with a 10 % duty cycle
// (period 2,300,000 cycles, high for 230,000) whenever the epoch decision is
// an NREM stage.  Classes are numbered W=0, N1=1, N2=2, N3=3, REM=4, so the
// class mask is 0b01110.  Every class has an early-stop threshold of 1, so
// the first segment of an epoch decides it and the other five are skipped.
// With random weights, the testbench uses the reference model to pick one
// input segment that the network classifies as NREM and one that it does not.
// It then plays an NREM epoch and checks two whole LED periods edge by edge,
// and plays a non-NREM epoch and checks that the LED stays dark.
// The clock, the 10 Hz / 10 % stimulation and triggering on NREM follow the
// in-vivo experiment the chip was built for; the class numbering, the
// thresholds and the random network are this test's own.
module closed_loop_tb;
  import muxnet_pkg::*;
  import cnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #21.739 clk = ~clk;   // 23 MHz

  logic adc_valid = 0;
  logic [7:0][9:0] adc_data = '0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic [1:0] pwm_out;
  logic stage_valid;
  logic [3:0] stage;
  logic [7:0][7:0] cic_out;

  bbmi_soc dut (.clk, .rst_n, .adc_valid, .adc_data, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi),
                .spi_miso(miso), .pwm_out, .stage_valid, .stage, .cic_out);

  int n_dec = 0, last_stage = -1;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && stage_valid) begin n_dec++; last_stage = int'(stage); end

  task automatic spi(logic [7:0] c, logic [15:0] a, logic [39:0] d);
    logic [63:0] f;
    f = {c, a, d};
    cs_n = 0; repeat (4) @(negedge clk);
    for (int i = 63; i >= 0; i--) begin
      mosi = f[i];
      repeat (8) @(negedge clk); sclk = 1;
      repeat (8) @(negedge clk); sclk = 0;
    end
    repeat (4) @(negedge clk); cs_n = 1; repeat (8) @(negedge clk);
  endtask

  task automatic segment(logic [7:0] seg [1000]);
    for (int t = 0; t < 500; t++) begin
      while (dut.nn_busy || dut.start_pend) @(negedge clk);
      for (int r = 0; r < 2; r++) begin
        @(negedge clk); adc_valid = 1;
        adc_data[0] = {seg[t], 2'b00}; adc_data[1] = {seg[500 + t], 2'b00};
        @(negedge clk); adc_valid = 0;
        repeat (3) @(negedge clk);
      end
    end
    repeat (20) @(negedge clk);
    while (dut.nn_busy || dut.start_pend) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    logic [7:0] nrem [1000], other [1000], tmp [1000];
    bit found_n, found_o;
    int cls_n, cls_o;
    found_n = 0; found_o = 0; cls_n = -1; cls_o = -1;
    repeat (4) @(negedge clk); rst_n = 1;
    gen_weights(DEFAULT_PROG);
    for (int a = 0; a < 2012; a++) spi(8'h01, 16'(a), wimg[a]);
    for (int n = 0; n < 200 && !(found_n && found_o); n++) begin
      int c;
      for (int i = 0; i < 1000; i++) begin tmp[i] = 8'($urandom); dref[i] = tmp[i]; end
      c = run(DEFAULT_PROG);
      if (c >= 1 && c <= 3 && !found_n) begin nrem = tmp; found_n = 1; cls_n = c; end
      if ((c == 0 || c == 4) && !found_o) begin other = tmp; found_o = 1; cls_o = c; end
    end
    checks++;
    if (!(found_n && found_o)) begin failures++; $display("no NREM/other segment found"); end
    $display("NREM segment class %0d, other segment class %0d", cls_n, cls_o);
    spi(8'h03, 16'h04, 40'({10{3'd1}}));           // every class decides at once
    spi(8'h03, 16'h05, 40'd2300000);              // 10 Hz at 23 MHz
    spi(8'h03, 16'h06, 40'd230000);               // 10 % duty
    spi(8'h03, 16'h07, 40'h1_000e);               // enable, mask N1..N3

    // NREM epoch: decided by the first segment
    segment(nrem);
    checks += 2;
    if (n_dec != 1) begin failures++; $display("decisions %0d after the first segment", n_dec); end
    if (last_stage != cls_n) begin failures++; $display("stage %0d exp %0d", last_stage, cls_n); end
    // two whole periods, edge by edge: rising edges 2,300,000 apart, high 230,000
    begin
      longint t_rise [3];
      int hi;
      while (pwm_out[0]) @(posedge clk);
      for (int k = 0; k < 3; k++) begin
        hi = 0;
        while (!pwm_out[0]) @(posedge clk);
        t_rise[k] = cyc;
        while (pwm_out[0]) begin @(posedge clk); hi++; end
        if (k < 2) begin
          checks++;
          if (hi != 230000) begin failures++; $display("high %0d cycles", hi); end
        end
      end
      for (int k = 0; k < 2; k++) begin
        longint d;
        d = t_rise[k+1] - t_rise[k];
        checks++;
        if (d != 2300000) begin failures++; $display("period %0d cycles", d); end
      end
    end
    // finish the epoch (five skipped segments), then a non-NREM epoch
    for (int s = 0; s < 5; s++) segment(nrem);
    checks++; if (n_dec != 1) begin failures++; $display("decisions %0d after the epoch", n_dec); end
    segment(other);
    checks += 2;
    if (n_dec != 2) begin failures++; $display("decisions %0d after epoch 2", n_dec); end
    if (last_stage != cls_o) begin failures++; $display("stage %0d exp %0d", last_stage, cls_o); end
    repeat (10) @(negedge clk);
    begin
      int hi;
      hi = 0;
      repeat (2400000) begin @(posedge clk); if (pwm_out[0]) hi++; end
      checks++;
      if (hi != 0) begin failures++; $display("LED on for %0d cycles after Wake/REM", hi); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
