// weight_mem: weight memory of the MUXnet, 2048 words of 40 bits.
//
// Each word holds four 10-bit static-table line indices, i.e. eight 5-bit
// weights (m=5) or four 10-bit weights (m=10).  Synchronous read with one
// cycle latency; rdata holds its value until the next read.  A separate write
// port loads the weights from the host interface.  Written as an array; in
// silicon this is an SRAM macro.
//
// Following the paper: the 2048x40 organisation.  This design's choice: the
// separate write port and that this memory is never power-gated.
module weight_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 40,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
