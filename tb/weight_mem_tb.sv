// weight_mem_tb: writes random words to random addresses, then reads every
// written address back with one cycle of latency and compares with a shadow copy.
// The 2048x40 size is the chip's; the one-cycle read latency is this
// design's choice.
module weight_mem_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0;
  logic [10:0] raddr = '0, waddr = '0;
  logic [39:0] rdata, wdata = '0;
  logic [39:0] shadow [2048];
  logic        written [2048];
  weight_mem dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);
  initial begin
    for (int i = 0; i < 2048; i++) written[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = 1; waddr = 11'($urandom); wdata = {8'($urandom), 32'($urandom)};
      shadow[waddr] = wdata; written[waddr] = 1;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 2048; a++) begin
      if (!written[a]) continue;
      re = 1; raddr = 11'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== shadow[a]) failures++;
      // rdata must hold while re is low
      @(negedge clk);
      checks++;
      if (rdata !== shadow[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
