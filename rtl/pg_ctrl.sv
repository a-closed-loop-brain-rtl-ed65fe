// pg_ctrl: dynamic power gating of the five data-memory banks.
//
// Bank 0 holds the input segment and stays powered.  While the network runs,
// a bank is powered only if the current layer reads or writes it, i.e. if its
// byte range overlaps [in_base, in_base + input size) or [out_base, out_base +
// output size).  When idle only bank 0 is on, unless force_on (host access)
// is set.  Combinational: pwr_on follows the layer descriptor in the same
// cycle, and the controller only touches a layer's banks after it has moved
// to that layer.
//
// Following the paper: the data memory is divided into small blocks that are
// power-gated dynamically.  This design's choice: the whole policy.
module pg_ctrl
  import muxnet_pkg::*;
(
  input  logic                   busy,
  input  logic                   force_on,
  input  layer_cfg_t             cfg,
  output logic [DMEM_NBANK-1:0]  pwr_on
);

  logic [BADDR_W-1:0] in_last, out_last;
  logic [2:0] in_b0, in_b1, out_b0, out_b1;

  always_comb begin
    int unsigned in_sz, out_sz;
    if (cfg.kind == LAYER_LINEAR) begin
      in_sz  = int'(cfg.lin);
      out_sz = int'(cfg.cout);
    end else begin
      in_sz  = int'(cfg.cin) * int'(cfg.lin);
      out_sz = int'(cfg.cout) * int'(cfg.lout);
    end
    in_last  = cfg.in_base  + BADDR_W'(in_sz)  - 1'b1;
    out_last = cfg.out_base + BADDR_W'(out_sz) - 1'b1;
    in_b0  = dmem_bank(cfg.in_base);
    in_b1  = dmem_bank(in_last);
    out_b0 = dmem_bank(cfg.out_base);
    out_b1 = dmem_bank(out_last);
    for (int unsigned b = 0; b < DMEM_NBANK; b++) begin
      pwr_on[b] = (b == 0) || force_on ||
                  (busy && ((3'(b) >= in_b0  && 3'(b) <= in_b1) ||
                            (3'(b) >= out_b0 && 3'(b) <= out_b1)));
    end
  end

endmodule
