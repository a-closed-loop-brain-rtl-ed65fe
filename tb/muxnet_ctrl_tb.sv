// muxnet_ctrl_tb: runs a small four-layer program on the MUXnet (controller,
// PE, memories, power gating) and compares every output byte of every layer,
// the predicted class and the cycle count with the integer reference model.
// The program mixes m=10 and m=5 weights in convolution and linear layers, a
// stride of 2, an element count that is not a multiple of the chunk size, and
// layers with and without ReLU.
// Layer kinds and the two weight modes follow the MUXnet; the schedule and
// its cycle count are this design's, taken from the reference model.
module muxnet_ctrl_tb;
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

  muxnet dut (.clk, .rst_n, .start, .prog, .pg_force_on(1'b0), .busy, .pwr_on, .pred_valid, .pred,
              .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rdata, .wm_we, .wm_waddr, .wm_wdata);

  task automatic host_wr(int a, logic [7:0] d);
    @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = 12'(a); ext_wdata = d;
    @(negedge clk); ext_req = 0; ext_we = 0;
  endtask
  task automatic host_rd(int a, output logic [7:0] d);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_addr = 12'(a);
    @(negedge clk); ext_req = 0; d = ext_rdata;
  endtask

  initial begin
    int exp_pred, exp_cyc, cyc;
    logic [7:0] d;
    prog[0] = '{kind: LAYER_CONV, mode10: 1'b1, relu: 1'b1, last: 1'b0, shift: 5'd7, cin: 4'd2, lin: 10'd21,
                cout: 6'd3, lout: 10'd10, ksize: 4'd3, stride: 3'd2, in_base: 12'd0, out_base: 12'd1024, w_base: 11'd0};
    prog[1] = '{kind: LAYER_CONV, mode10: 1'b0, relu: 1'b0, last: 1'b0, shift: 5'd5, cin: 4'd3, lin: 10'd10,
                cout: 6'd2, lout: 10'd8, ksize: 4'd3, stride: 3'd1, in_base: 12'd1024, out_base: 12'd1792, w_base: 11'd100};
    prog[2] = '{kind: LAYER_LINEAR, mode10: 1'b1, relu: 1'b1, last: 1'b0, shift: 5'd9, cin: 4'd1, lin: 10'd16,
                cout: 6'd6, lout: 10'd1, ksize: 4'd1, stride: 3'd1, in_base: 12'd1792, out_base: 12'd2560, w_base: 11'd200};
    prog[3] = '{kind: LAYER_LINEAR, mode10: 1'b0, relu: 1'b0, last: 1'b1, shift: 5'd4, cin: 4'd1, lin: 10'd6,
                cout: 6'd4, lout: 10'd1, ksize: 4'd1, stride: 3'd1, in_base: 12'd2560, out_base: 12'd3328, w_base: 11'd300};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run_i = 0; run_i < 4; run_i++) begin
      gen_weights(prog);
      for (int a = 0; a < 2048; a++) begin
        @(negedge clk); wm_we = 1; wm_waddr = 11'(a); wm_wdata = wimg[a];
      end
      @(negedge clk); wm_we = 0;
      for (int a = 0; a < 42; a++) begin
        logic [7:0] v;
        v = 8'($urandom);
        dref[a] = v; host_wr(a, v);
      end
      exp_pred = run(prog);
      exp_cyc  = cycles(prog);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!pred_valid) begin @(negedge clk); cyc++; end
      checks += 2;
      if (int'(pred) != exp_pred) begin failures++; $display("pred %0d exp %0d", pred, exp_pred); end
      if (cyc != exp_cyc + 1) begin failures++; $display("cycles %0d exp %0d", cyc, exp_cyc + 1); end
      // every output byte of every layer (banks 1..4 lose their data when idle,
      // so this checks the last layer; earlier layers are checked below with
      // all banks forced on)
      for (int a = 3328; a < 3332; a++) begin
        host_rd(a, d);
        checks++;
        if (d !== 8'h00) failures++;   // bank 4 is off while idle: reads as zero
      end
      for (int a = 0; a < 42; a++) begin
        host_rd(a, d);
        checks++;
        if (d !== dref[a]) failures++;  // bank 0 keeps the input
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // layer outputs are checked as they are written
  always @(posedge clk) if (rst_n) begin
    if (busy && dut.m_req && dut.m_we) begin
      checks++;
      if (dut.m_wdata !== dref[dut.m_addr]) begin
        failures++;
        if (failures < 10) $display("write @%0d got %0d exp %0d", dut.m_addr, $signed(dut.m_wdata), $signed(dref[dut.m_addr]));
      end
    end
  end

  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
