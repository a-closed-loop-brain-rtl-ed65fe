// data_mem_tb: byte writes and reads across all five banks against a shadow
// byte array, read latency of one cycle, and power gating: a bank switched
// off ignores writes and loses its contents (reads 0 afterwards), while the
// other banks keep theirs.
// The 512x64 size is the chip's; the bank split, the byte port and the loss
// of contents in a gated bank are this design's choices.
module data_mem_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] pwr_on = '1;
  logic req = 0, we = 0;
  logic [11:0] addr = '0;
  logic [7:0] wdata = '0, rdata;
  logic [7:0] shadow [4096];
  data_mem dut (.clk, .rst_n, .pwr_on, .req, .we, .addr, .wdata, .rdata);

  // bank boundaries in bytes: 0, 1024, 1792, 2560, 3328
  function automatic int bank(int a);
    return a < 1024 ? 0 : a < 1792 ? 1 : a < 2560 ? 2 : a < 3328 ? 3 : 4;
  endfunction

  task automatic wr(int a, logic [7:0] d);
    @(negedge clk); req = 1; we = 1; addr = 12'(a); wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask
  task automatic chk(int a, logic [7:0] e);
    @(negedge clk); req = 1; we = 0; addr = 12'(a);
    @(negedge clk); req = 0;
    checks++;
    if (rdata !== e) begin
      failures++;
      if (failures < 10) $display("addr %0d got %h exp %h", a, rdata, e);
    end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) shadow[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill every byte of some words in every bank
    for (int n = 0; n < 1500; n++) begin
      int a; logic [7:0] d;
      a = int'($urandom_range(0, 4095)); d = 8'($urandom);
      wr(a, d); shadow[a] = d;
    end
    for (int n = 0; n < 800; n++) begin
      int a;
      a = int'($urandom_range(0, 4095));
      chk(a, shadow[a]);
    end
    // power bank 2 off: contents lost, writes ignored; other banks intact
    @(negedge clk); pwr_on = 5'b11011;
    wr(2000, 8'h5a);
    @(negedge clk); pwr_on = 5'b11111;
    for (int a = 1792; a < 2560; a += 37) chk(a, 8'h00);
    chk(2000, 8'h00);
    for (int n = 0; n < 200; n++) begin
      int a;
      a = int'($urandom_range(0, 4095));
      if (bank(a) != 2) chk(a, shadow[a]);
    end
    // after power-up the bank works again, untouched lanes read zero
    wr(2001, 8'hc3);
    chk(2001, 8'hc3);
    chk(2002, 8'h00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
