// spi_slave_tb: a mode-0 SPI master (SCLK = clk/16) sends write frames and
// checks the decoded command, address and data; sends read frames and checks
// that the 40 bits returned on MISO are rd_data for the frame's address; and
// checks that a frame cut short produces nothing.
// Only the SPI port itself comes from the chip; the 64-bit frame and the
// commands tested here are this design's own.
module spi_slave_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic wr_valid, rd_req;
  logic [7:0] cmd;
  logic [15:0] addr;
  logic [39:0] data, rd_data;
  int n_wr = 0;
  logic [7:0] l_cmd; logic [15:0] l_addr; logic [39:0] l_data;
  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .wr_valid, .cmd, .addr, .data, .rd_req, .rd_data);
  assign rd_data = {addr, addr, 8'h5a} ^ 40'h12_3456_789a;
  always @(posedge clk) if (rst_n && wr_valid) begin n_wr++; l_cmd = cmd; l_addr = addr; l_data = data; end

  task automatic frame(logic [63:0] f, int nbits, output logic [39:0] got);
    got = '0;
    cs_n = 0; repeat (8) @(negedge clk);
    for (int i = 63; i > 63 - nbits; i--) begin
      mosi = f[i];
      repeat (8) @(negedge clk); sclk = 1;
      if (i < 40) got = {got[38:0], miso};
      repeat (8) @(negedge clk); sclk = 0;
    end
    repeat (8) @(negedge clk); cs_n = 1; repeat (8) @(negedge clk);
  endtask

  initial begin
    logic [39:0] got;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      logic [7:0] c; logic [15:0] a; logic [39:0] d; int n_before;
      c = (n % 3 == 0) ? 8'h01 : (n % 3 == 1 ? 8'h02 : 8'h03);
      a = 16'($urandom); d = {8'($urandom), 32'($urandom)};
      n_before = n_wr;
      frame({c, a, d}, 64, got);
      checks += 4;
      if (n_wr != n_before + 1) failures++;
      if (l_cmd != c) failures++;
      if (l_addr != a) failures++;
      if (l_data != d) failures++;
    end
    for (int n = 0; n < 5; n++) begin
      logic [15:0] a; int n_before;
      a = 16'($urandom);
      n_before = n_wr;
      frame({8'h04, a, 40'h0}, 64, got);
      checks += 2;
      if (got != ({a, a, 8'h5a} ^ 40'h12_3456_789a)) begin failures++; $display("read %h", got); end
      if (n_wr != n_before) failures++;
    end
    begin
      int n_before;
      n_before = n_wr;
      frame({8'h01, 16'h0001, 40'h1}, 40, got);
      checks++; if (n_wr != n_before) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
