// sample_loader_tb: feeds sample pairs into a loader whose grant is randomly
// withheld, mirrors the granted writes into a byte array, and checks the
// channel-major layout, the seg_done pulse after each segment and the overflow
// counter when a pair arrives while the previous one still waits.
// The segment length being programmable follows the chip; the
// channel-major layout, the one-pair buffer and the overflow counter are
// this design's own.
module sample_loader_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int SEG = 20, BASE = 100;
  logic enable = 0, s_valid = 0, gnt;
  logic [7:0] s_ch0 = 0, s_ch1 = 0, wdata;
  logic [11:0] addr;
  logic req, seg_done;
  logic [15:0] overflows;
  logic [7:0] mem [4096];
  logic gnt_en = 1;
  int   n_done = 0;
  assign gnt = req && gnt_en;
  sample_loader dut (.clk, .rst_n, .enable, .seg_len(10'(SEG)), .in_base(12'(BASE)), .s_valid, .s_ch0, .s_ch1,
                     .req, .addr, .wdata, .gnt, .seg_done, .overflows);
  always @(posedge clk) if (rst_n) begin
    if (gnt) mem[addr] <= wdata;
    if (seg_done) n_done++;
  end
  initial begin
    logic [7:0] a0 [SEG], a1 [SEG];
    repeat (2) @(negedge clk); rst_n = 1; enable = 1;
    for (int seg = 0; seg < 3; seg++) begin
      for (int t = 0; t < SEG; t++) begin
        @(negedge clk);
        gnt_en = ($urandom_range(0, 3) != 0);
        s_valid = 1; s_ch0 = 8'($urandom); s_ch1 = 8'($urandom);
        a0[t] = s_ch0; a1[t] = s_ch1;
        @(negedge clk); s_valid = 0;
        // let the two writes go through with a random grant
        repeat (8) begin @(negedge clk); gnt_en = ($urandom_range(0, 3) != 0); end
        gnt_en = 1;
        repeat (3) @(negedge clk);
      end
      checks++;
      if (n_done != seg + 1) failures++;
      for (int t = 0; t < SEG; t++) begin
        checks += 2;
        if (mem[BASE + t] !== a0[t]) failures++;
        if (mem[BASE + SEG + t] !== a1[t]) failures++;
      end
    end
    // overflow: grant withheld, two pairs back to back
    gnt_en = 0;
    @(negedge clk); s_valid = 1; s_ch0 = 8'h11; s_ch1 = 8'h22;
    @(negedge clk); s_valid = 1; s_ch0 = 8'h33; s_ch1 = 8'h44;
    @(negedge clk); s_valid = 0;
    checks++; if (overflows != 1) failures++;
    gnt_en = 1; repeat (4) @(negedge clk);
    checks += 2;
    if (mem[BASE] !== 8'h11) failures++;
    if (mem[BASE + SEG] !== 8'h22) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
