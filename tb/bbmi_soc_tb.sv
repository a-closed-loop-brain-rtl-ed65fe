// bbmi_soc_tb: end-to-end test of the SoC at its default sizes.
//
// The host loads random weights for the default sleep-staging network over
// SPI.  Two ADC channels are driven with pairs of equal samples, so that the
// CIC (rate 2) outputs are known exactly.  Segments of 500 samples are
// collected and classified automatically.  The testbench holds new samples
// back while a classification runs, which stands for the real sample interval
// being far longer than one classification.
//   Epoch 1: all six segments carry the same data and every class has an
//   early-stop threshold of 2.  The epoch must be decided after two
//   classifications, and the other four skipped.
//   Epoch 2: no thresholds and six different segments.  The decision must be
//   the majority of the six reference predictions.
// PWM channel masks are set so that each decision arms a known channel, and
// its duty cycle is measured.  Finally, samples arrive during a host-started
// classification to provoke a sample overflow, and the counters are read back
// over SPI.  Every mechanism is counted and must occur.
// The blocks and their connections follow the chip; the stimulus, the
// register settings and the holding back of samples are this test's own.
module bbmi_soc_tb;
  import muxnet_pkg::*;
  import cnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adc_valid = 0;
  logic [7:0][9:0] adc_data = '0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic [1:0] pwm_out;
  logic stage_valid;
  logic [3:0] stage;
  logic [7:0][7:0] cic_out;

  bbmi_soc dut (.clk, .rst_n, .adc_valid, .adc_data, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi),
                .spi_miso(miso), .pwm_out, .stage_valid, .stage, .cic_out);

  // mechanism counters
  int n_cic = 0, n_seg = 0, n_runs = 0, n_m10 = 0, n_m5 = 0, n_gated = 0, n_dec = 0, n_early = 0;
  int n_pwm_hi = 0, n_spi_rd = 0, n_host_wr = 0;
  int last_stage = -1;
  bit last_early = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.cic_valid[0]) n_cic++;
    if (dut.seg_done) n_seg++;
    if (dut.nn_start) n_runs++;
    if (dut.u_muxnet.busy && dut.u_muxnet.u_ctrl.state == 3 /* COMPUTE */) begin
      if (dut.u_muxnet.pe_mode10) n_m10++; else n_m5++;
    end
    if (dut.u_muxnet.busy && dut.u_muxnet.pwr_on != 5'b11111) n_gated++;
    if (stage_valid) begin n_dec++; last_stage = int'(stage); last_early = dut.early; if (dut.early) n_early++; end
    if (|pwm_out) n_pwm_hi++;
  end

  // ---------------- SPI master, mode 0, SCLK = clk/16 ----------------
  task automatic spi(logic [7:0] c, logic [15:0] a, logic [39:0] d, output logic [39:0] got);
    logic [63:0] f;
    f = {c, a, d}; got = '0;
    cs_n = 0; repeat (4) @(negedge clk);
    for (int i = 63; i >= 0; i--) begin
      mosi = f[i];
      repeat (8) @(negedge clk); sclk = 1;
      if (i < 40) got = {got[38:0], miso};
      repeat (8) @(negedge clk); sclk = 0;
    end
    repeat (4) @(negedge clk); cs_n = 1; repeat (8) @(negedge clk);
  endtask
  task automatic wreg(logic [15:0] a, logic [31:0] d);
    logic [39:0] g;
    spi(8'h03, a, {8'h0, d}, g);
  endtask
  task automatic rreg(logic [15:0] a, output logic [31:0] d);
    logic [39:0] g;
    spi(8'h04, a, 40'h0, g);
    d = g[31:0]; n_spi_rd++;
  endtask

  // ---------------- ADC ----------------
  // one decimated sample pair = two equal ADC samples per channel
  task automatic sample(logic [7:0] v0, logic [7:0] v1);
    for (int r = 0; r < 2; r++) begin
      @(negedge clk);
      adc_valid = 1;
      adc_data[0] = {v0, 2'b00}; adc_data[1] = {v1, 2'b00};
      for (int c = 2; c < 8; c++) adc_data[c] = 10'($urandom);
      @(negedge clk); adc_valid = 0;
      repeat (3) @(negedge clk);
    end
  endtask
  task automatic segment(logic [7:0] seg [1000]);
    for (int t = 0; t < 500; t++) begin
      while (dut.nn_busy || dut.start_pend) @(negedge clk);
      sample(seg[t], seg[500 + t]);
    end
    // let the classification of this segment (if any) finish
    repeat (20) @(negedge clk);
    while (dut.nn_busy || dut.start_pend) @(negedge clk);
    repeat (5) @(negedge clk);   // the vote follows the prediction by a cycle
  endtask

  task automatic measure_pwm(int ch, int exp_high);
    int hi;
    hi = 0;
    repeat (4 * 50) begin @(posedge clk); #1; if (pwm_out[ch]) hi++; end
    checks++;
    if (hi != 4 * exp_high) begin failures++; $display("pwm%0d high %0d exp %0d", ch, hi, 4 * exp_high); end
  endtask

  initial begin
    logic [7:0] seg [1000];
    logic [31:0] r;
    logic [39:0] g;
    int p1, votes [10], maj, dec_before, runs_before;

    repeat (4) @(negedge clk); rst_n = 1;
    repeat (4) @(negedge clk);

    // weights over SPI
    gen_weights(DEFAULT_PROG);
    for (int a = 0; a < 2012; a++) spi(8'h01, 16'(a), wimg[a], g);
    checks++;
    if (dut.u_muxnet.u_wmem.mem[1991] !== wimg[1991]) failures++;

    // a host byte write into the data memory (unused tail of bank 0)
    spi(8'h02, 16'd1010, 40'h6c, g);
    repeat (4) @(negedge clk);
    n_host_wr++;
    checks++;
    if (dut.u_muxnet.u_dmem.mem[1010 >> 3][(1010 % 8)*8 +: 8] !== 8'h6c) failures++;

    // settings: rate 2, segment 500, thresholds 2 for every class
    wreg(16'h01, 32'd1);
    rreg(16'h02, r);
    checks++; if (r[9:0] != 10'd500) failures++;
    wreg(16'h04, {2'b00, {10{3'd2}}});
    wreg(16'h05, 32'd50); wreg(16'h06, 32'd5);
    wreg(16'h08, 32'd50); wreg(16'h09, 32'd20);

    // ---------------- epoch 1: early stop ----------------
    for (int i = 0; i < 1000; i++) begin seg[i] = 8'($urandom); dref[i] = seg[i]; end
    p1 = run(DEFAULT_PROG);
    wreg(16'h07, 32'h1_0000 | (32'd1 << p1));            // ch0 armed by p1
    wreg(16'h0A, 32'h1_0000 | (~(32'd1 << p1) & 32'h3ff)); // ch1 by anything else
    dec_before = n_dec; runs_before = n_runs;
    for (int s = 0; s < 6; s++) segment(seg);
    checks += 4;
    if (n_dec != dec_before + 1) begin failures++; $display("epoch1 decisions %0d", n_dec - dec_before); end
    if (last_stage != p1) begin failures++; $display("epoch1 stage %0d exp %0d", last_stage, p1); end
    if (!last_early) failures++;
    if (n_runs - runs_before != 2) begin failures++; $display("epoch1 runs %0d", n_runs - runs_before); end
    measure_pwm(0, 5);
    checks++; if (pwm_out[1]) failures++;

    // ---------------- epoch 2: majority ----------------
    wreg(16'h04, 32'd0);
    for (int c = 0; c < 10; c++) votes[c] = 0;
    dec_before = n_dec; runs_before = n_runs;
    for (int s = 0; s < 6; s++) begin
      for (int i = 0; i < 1000; i++) begin seg[i] = 8'($urandom); dref[i] = seg[i]; end
      votes[run(DEFAULT_PROG)]++;
      segment(seg);
    end
    maj = 0;
    for (int c = 1; c < 10; c++) if (votes[c] > votes[maj]) maj = c;
    checks += 4;
    if (n_dec != dec_before + 1) begin failures++; $display("epoch2 decisions %0d at %0t", n_dec - dec_before, $time); end
    if (last_stage != maj) begin failures++; $display("epoch2 stage %0d exp %0d", last_stage, maj); end
    if (last_early) failures++;
    if (n_runs - runs_before != 6) begin failures++; $display("epoch2 runs %0d", n_runs - runs_before); end
    if (maj == p1) measure_pwm(0, 5); else measure_pwm(1, 20);

    // status over SPI
    rreg(16'h03, r);
    checks += 2;
    if (int'(r[7:4]) != maj) failures++;
    if (int'(r[31:16]) != 8) begin failures++; $display("runs reg %0d", r[31:16]); end

    // ---------------- overflow during a host-started classification ----------------
    wreg(16'h00, 32'b1101);       // auto on, sampling on, start now
    repeat (100) @(negedge clk);
    checks++; if (!dut.nn_busy) failures++;
    sample(8'd1, 8'd2);
    sample(8'd3, 8'd4);
    while (dut.nn_busy) @(negedge clk);
    rreg(16'h0B, r);
    checks += 2;
    if (r[15:0] != 16'd4) begin failures++; $display("skipped %0d", r[15:0]); end
    if (r[31:16] != 16'd1) begin failures++; $display("overflows %0d", r[31:16]); end

    // every mechanism must have happened
    begin
      int cnt [12];
      string nm [12];
      cnt = '{n_cic, n_seg, n_runs, n_m10, n_m5, n_gated, n_dec, n_early, n_pwm_hi, n_spi_rd, n_host_wr, int'(r[31:16])};
      nm  = '{"cic outputs", "segments", "classifications", "m=10 PE cycles", "m=5 PE cycles", "gated cycles",
              "decisions", "early stops", "pwm high cycles", "spi reads", "host data writes", "overflows"};
      for (int i = 0; i < 12; i++) begin
        $display("%-18s %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (4000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
