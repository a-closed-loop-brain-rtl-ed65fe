// data_mem: activation memory of the MUXnet, 512 words of 64 bits in five
// power-gated banks.
//
// The host side sees a byte-addressed single port (12-bit address, 8-bit data):
// byte a lives in word a>>3, lane a[2:0].  Banks cover words 0-127, 128-223,
// 224-319, 320-415 and 416-511.  pwr_on[b] powers bank b; while a bank is off
// it is not accessed and its contents are lost (modelled by a per-word valid
// bit that is cleared, so a word read before it is written again returns 0).
// Reads have one cycle latency; rdata holds the byte until the next read.
//
// Following the paper: 512x64 data memory split into five small blocks with
// dynamic power gating.  This design's choice: the bank sizes, the byte port
// and the no-retention model.
module data_mem
  import muxnet_pkg::*;
#(
  parameter int unsigned DEPTH = DMEM_DEPTH,
  parameter int unsigned NBANK = DMEM_NBANK,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NBANK-1:0]   pwr_on,
  input  logic               req,
  input  logic               we,
  input  logic [AW+2:0]      addr,
  input  logic [7:0]         wdata,
  output logic [7:0]         rdata
);

  // first word of bank b (bank 0 is a quarter of the memory, the rest share the remainder)
  function automatic int unsigned bank_lo(int unsigned b);
    if (b == 0) return 0;
    return DEPTH/4 + (b-1) * ((DEPTH - DEPTH/4) / (NBANK-1));
  endfunction

  function automatic int unsigned bank_of(logic [AW-1:0] w);
    int unsigned r;
    r = 0;
    for (int unsigned b = 1; b < NBANK; b++)
      if (int'(w) >= int'(bank_lo(b))) r = b;
    return r;
  endfunction

  logic [DMEM_W-1:0] mem [DEPTH];
  logic [DEPTH-1:0]  valid;
  logic [AW-1:0]     word;
  logic [2:0]        lane;
  logic              bank_pwr;

  assign word     = addr[AW+2:3];
  assign lane     = addr[2:0];
  assign bank_pwr = pwr_on[bank_of(word)];

  always_ff @(posedge clk) begin
    if (req && we && bank_pwr) begin
      if (valid[word]) mem[word][lane*8 +: 8] <= wdata;
      else             mem[word] <= DMEM_W'(wdata) << (lane*8);  // other lanes start at zero
    end
    if (req && !we)            rdata <= (bank_pwr && valid[word]) ? mem[word][lane*8 +: 8] : 8'h00;
  end

  // valid bits: a write makes the whole word valid; power-off clears a bank
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else begin
      for (int unsigned w = 0; w < DEPTH; w++) begin
        if (!pwr_on[bank_of(AW'(w))]) valid[w] <= 1'b0;
      end
      if (req && we && bank_pwr && !valid[word]) begin
        valid[word] <= 1'b1;
      end
    end
  end

endmodule
