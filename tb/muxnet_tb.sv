// muxnet_tb: runs the default sleep-staging network, (2,500) -> conv (2,249)
// -> conv (2,246) -> linear 32 -> linear 5, on the MUXnet with random weights
// and random input segments.  Checks every byte each layer writes, the
// predicted class and the cycle count against the integer reference model,
// and that the data banks are powered layer by layer as the power-gating
// policy says (bank 0 plus the banks of the current layer's input and output).
// The network shapes are the chip's; the weights and inputs are random, and
// the bank map and gating policy checked here are this design's own.
module muxnet_tb;
  import muxnet_pkg::*;
  import cnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t prog [NUM_LAYERS];
  logic start = 0, busy, pred_valid, ext_req = 0, ext_we = 0, ext_gnt, wm_we = 0;
  logic [4:0] pwr_on;
  logic [3:0] pred;
  logic [11:0] ext_addr = '0;
  logic [7:0] ext_wdata = '0, ext_rdata;
  logic [10:0] wm_waddr = '0;
  logic [39:0] wm_wdata = '0;
  int n_writes;

  muxnet dut (.clk, .rst_n, .start, .prog, .pg_force_on(1'b0), .busy, .pwr_on, .pred_valid, .pred,
              .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rdata, .wm_we, .wm_waddr, .wm_wdata);

  localparam logic [4:0] PG_EXP [4] = '{5'b00011, 5'b00111, 5'b01101, 5'b11001};

  initial begin
    int exp_pred, exp_cyc, cyc;
    prog = DEFAULT_PROG;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run_i = 0; run_i < 3; run_i++) begin
      gen_weights(prog);
      for (int a = 0; a < 2048; a++) begin
        @(negedge clk); wm_we = 1; wm_waddr = 11'(a); wm_wdata = wimg[a];
      end
      @(negedge clk); wm_we = 0;
      for (int a = 0; a < 1000; a++) begin
        logic [7:0] v;
        v = 8'($urandom_range(0, 255));
        dref[a] = v;
        @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = 12'(a); ext_wdata = v;
      end
      @(negedge clk); ext_req = 0; ext_we = 0;
      exp_pred = run(prog);
      exp_cyc  = cycles(prog);
      n_writes = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!pred_valid) begin @(negedge clk); cyc++; end
      checks += 3;
      if (int'(pred) != exp_pred) begin failures++; $display("pred %0d exp %0d", pred, exp_pred); end
      if (cyc != exp_cyc + 1) begin failures++; $display("cycles %0d exp %0d", cyc, exp_cyc + 1); end
      if (n_writes != 2*249 + 2*246 + 32 + 5) begin failures++; $display("writes %0d", n_writes); end
      $display("run %0d: class %0d in %0d cycles (%0.2f ms at 23 MHz), relu clips %0d, saturations %0d",
               run_i, pred, cyc, real'(cyc) / 23.0e3, n_relu_clip, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (busy && dut.m_req && dut.m_we) begin
      n_writes++;
      checks++;
      if (dut.m_wdata !== dref[dut.m_addr]) begin
        failures++;
        if (failures < 10) $display("write @%0d got %0d exp %0d", dut.m_addr, $signed(dut.m_wdata), $signed(dref[dut.m_addr]));
      end
    end
    if (busy && dut.m_req) begin
      checks++;
      if (pwr_on !== PG_EXP[dut.layer]) begin
        failures++;
        if (failures < 10) $display("layer %0d banks %b", dut.layer, pwr_on);
      end
    end
  end

  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
