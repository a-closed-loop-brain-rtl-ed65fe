// pg_ctrl_tb: for each layer of the default program the powered banks must be
// bank 0 plus the banks its input and output occupy; idle leaves only bank 0
// on, force_on turns all on.  Expected masks are worked out by hand from the
// byte ranges of the default layer map.
// That a layer's unused banks are gated follows the chip; the exact policy
// and the bank boundaries are this design's choices.
module pg_ctrl_tb;
  import muxnet_pkg::*;
  int checks = 0, failures = 0;
  logic busy, force_on;
  layer_cfg_t cfg;
  logic [4:0] pwr_on;
  pg_ctrl dut (.busy, .force_on, .cfg, .pwr_on);
  // conv1: in 0..999 (bank 0), out 1024..1521 (bank 1)
  // conv2: in 1024..1521 (bank 1), out 1792..2283 (bank 2)
  // lin1 : in 1792..2283 (bank 2), out 2560..2591 (bank 3)
  // lin2 : in 2560..2591 (bank 3), out 3328..3332 (bank 4)
  localparam logic [4:0] EXP [4] = '{5'b00011, 5'b00111, 5'b01101, 5'b11001};
  task automatic chk(logic [4:0] e);
    #1; checks++;
    if (pwr_on !== e) begin failures++; $display("got %b exp %b", pwr_on, e); end
  endtask
  initial begin
    force_on = 0;
    for (int l = 0; l < 4; l++) begin
      cfg = DEFAULT_PROG[l];
      busy = 1; chk(EXP[l]);
      busy = 0; chk(5'b00001);
    end
    // an input spanning banks 0..1
    cfg = DEFAULT_PROG[0]; cfg.lin = 10'd600; busy = 1; chk(5'b00011);
    cfg.out_base = 12'd3000; chk(5'b11011);  // 3000..3497 spans banks 3 and 4
    force_on = 1; busy = 0; chk(5'b11111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
