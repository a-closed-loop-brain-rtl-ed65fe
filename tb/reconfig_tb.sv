// reconfig_tb: the chip reprogrammed over SPI for a different recording.
//
// The segment length of a classification can be changed, and with it the
// network.  This test writes, over SPI only, a 3-class network for half-length
// segments (Wake / NREM / REM, as a rodent recording would use):
//   (2,250) -> conv k4 s2 -> (2,124) -> conv k4 s1 -> (2,121) -> linear 32 -> linear 3.
// It loads the weights, the four layer descriptors (three 32-bit slices each),
// SEG_LEN = 250 and a CIC rate of 4, then plays six segments of random samples
// through the ADC inputs.  For every segment it checks, against the integer
// reference model: the predicted class (read back over SPI), the exact
// classification time in cycles and the channel-major placement of the input
// with the new segment length.  The six predictions must then be voted into
// the majority class (no early stop; ties go to the lower class).
// The network shapes and the 3-class output follow the reconfigurability the
// chip is described with; the exact sizes and shifts are this test's own.
module reconfig_tb;
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

  localparam int SEG = 250;
  localparam layer_cfg_t PROG [NUM_LAYERS] = '{
    '{kind: LAYER_CONV,   mode10: 1'b1, relu: 1'b1, last: 1'b0, shift: 5'd8, cin: 4'd2, lin: 10'd250,
      cout: 6'd2,  lout: 10'd124, ksize: 4'd4, stride: 3'd2, in_base: 12'd0,    out_base: 12'd1024, w_base: 11'd0},
    '{kind: LAYER_CONV,   mode10: 1'b1, relu: 1'b1, last: 1'b0, shift: 5'd8, cin: 4'd2, lin: 10'd124,
      cout: 6'd2,  lout: 10'd121, ksize: 4'd4, stride: 3'd1, in_base: 12'd1024, out_base: 12'd1792, w_base: 11'd4},
    '{kind: LAYER_LINEAR, mode10: 1'b0, relu: 1'b1, last: 1'b0, shift: 5'd6, cin: 4'd1, lin: 10'd242,
      cout: 6'd32, lout: 10'd1,   ksize: 4'd1, stride: 3'd1, in_base: 12'd1792, out_base: 12'd2560, w_base: 11'd8},
    '{kind: LAYER_LINEAR, mode10: 1'b0, relu: 1'b0, last: 1'b1, shift: 5'd4, cin: 4'd1, lin: 10'd32,
      cout: 6'd3,  lout: 10'd1,   ksize: 4'd1, stride: 3'd1, in_base: 12'd2560, out_base: 12'd3328, w_base: 11'd1000}
  };

  // classification time: cycles from the one in which the controller's start
  // is high to the one in which pred_valid is high, both sampled mid-cycle
  int cyc = 0, t0 = 0, t_class = -1, n_dec = 0, last_stage = -1, n_seg = 0;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (dut.nn_start) t0 = cyc;
    if (dut.pred_valid) t_class = cyc - t0;
    if (dut.seg_done) n_seg++;
    if (stage_valid) begin n_dec++; last_stage = int'(stage); end
  end

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
  task automatic wreg(int a, logic [31:0] d);
    logic [39:0] g;
    spi(8'h03, 16'(a), {8'h0, d}, g);
  endtask
  task automatic rreg(int a, output logic [31:0] d);
    logic [39:0] g;
    spi(8'h04, 16'(a), 40'h0, g);
    d = g[31:0];
  endtask

  // one decimated sample pair = four equal ADC samples per channel (rate 4)
  task automatic sample(logic [7:0] v0, logic [7:0] v1);
    for (int r = 0; r < 4; r++) begin
      @(negedge clk);
      adc_valid = 1;
      adc_data[0] = {v0, 2'b00}; adc_data[1] = {v1, 2'b00};
      for (int c = 2; c < 8; c++) adc_data[c] = 10'($urandom);
      @(negedge clk); adc_valid = 0;
      repeat (3) @(negedge clk);
    end
  endtask

  initial begin
    logic [7:0] seg [2*SEG];
    logic [31:0] r;
    logic [39:0] g;
    logic [$bits(layer_cfg_t)-1:0] d;
    int votes [10], maj, p, n_before;

    repeat (4) @(negedge clk); rst_n = 1;
    repeat (4) @(negedge clk);

    // weights and descriptors, all over SPI
    gen_weights(PROG);
    for (int a = 0; a < 1012; a++) spi(8'h01, 16'(a), wimg[a], g);
    for (int l = 0; l < int'(NUM_LAYERS); l++) begin
      d = PROG[l];
      wreg(16 + 4*l,     d[31:0]);
      wreg(16 + 4*l + 1, d[63:32]);
      wreg(16 + 4*l + 2, 32'(d[$bits(layer_cfg_t)-1:64]));
    end
    d = PROG[2];
    rreg(16 + 4*2 + 1, r);
    checks++; if (r != d[63:32]) begin failures++; $display("descriptor read-back %h exp %h", r, d[63:32]); end
    checks++; if (dut.prog[3] != PROG[3]) begin failures++; $display("layer 3 descriptor not taken"); end
    wreg(32'h02, SEG);
    wreg(32'h01, 32'd2);          // CIC rate 2^2

    for (int c = 0; c < 10; c++) votes[c] = 0;
    for (int s = 0; s < 6; s++) begin
      for (int i = 0; i < 2*SEG; i++) begin seg[i] = 8'($urandom); dref[i] = seg[i]; end
      p = run(PROG);
      votes[p]++;
      n_before = n_seg;
      t_class = -1;
      for (int t = 0; t < SEG; t++) begin
        while (dut.nn_busy || dut.start_pend) @(negedge clk);
        sample(seg[t], seg[SEG + t]);
      end
      repeat (20) @(negedge clk);
      // input placement: channel 1 starts at byte SEG
      checks += 2;
      if (dut.u_muxnet.u_dmem.mem[SEG >> 3][(SEG % 8)*8 +: 8] !== seg[SEG]) begin
        failures++; $display("segment %0d: byte %0d not channel 1 sample 0", s, SEG);
      end
      if (dut.u_muxnet.u_dmem.mem[(SEG-1) >> 3][((SEG-1) % 8)*8 +: 8] !== seg[SEG-1]) begin
        failures++; $display("segment %0d: byte %0d not channel 0 last sample", s, SEG-1);
      end
      while (dut.nn_busy || dut.start_pend) @(negedge clk);
      repeat (5) @(negedge clk);
      checks += 3;
      if (n_seg != n_before + 1) begin failures++; $display("segment %0d: %0d segment ends", s, n_seg - n_before); end
      // the reference count ends with the last layer's final state; pred_valid follows a cycle later
      if (t_class != cycles(PROG) + 1) begin failures++; $display("segment %0d: %0d cycles exp %0d", s, t_class, cycles(PROG) + 1); end
      rreg(32'h03, r);
      if (int'(r[3:0]) != p) begin failures++; $display("segment %0d: class %0d exp %0d", s, r[3:0], p); end
    end
    maj = 0;
    for (int c = 1; c < 10; c++) if (votes[c] > votes[maj]) maj = c;
    $display("votes W/NREM/REM %0d %0d %0d, %0d cycles per class", votes[0], votes[1], votes[2], cycles(PROG));
    checks += 2;
    if (n_dec != 1) begin failures++; $display("%0d decisions", n_dec); end
    if (last_stage != maj) begin failures++; $display("stage %0d exp %0d", last_stage, maj); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (3000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
