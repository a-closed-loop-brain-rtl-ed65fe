// sample_loader: fills the network's input segment with decimated samples.
//
// Each pair of samples (one per network channel) is written to the data memory
// as two bytes: channel c, sample t goes to in_base + c*seg_len + t, the
// channel-major layout the first convolution reads.  Writes go through a
// request/grant byte port and wait while the network owns the memory; if a new
// pair arrives while the previous one is still waiting, it is dropped and
// counted in overflows.  After seg_len pairs, seg_done pulses for one cycle and
// filling restarts at t = 0.
//
// Following the paper: the segment length of a classification is
// reconfigurable.  This design's choice: the layout, the drop-on-overflow rule
// and that the two network channels are written in place.
module sample_loader
  import muxnet_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic [9:0]           seg_len,
  input  logic [BADDR_W-1:0]   in_base,
  input  logic                 s_valid,
  input  logic [7:0]           s_ch0,
  input  logic [7:0]           s_ch1,
  output logic                 req,
  output logic [BADDR_W-1:0]   addr,
  output logic [7:0]           wdata,
  input  logic                 gnt,
  output logic                 seg_done,
  output logic [15:0]          overflows
);

  logic [9:0]  t;
  logic [1:0]  pend;        // bit0: ch0 byte waiting, bit1: ch1 byte waiting
  logic [7:0]  b0, b1;

  assign req   = |pend;
  assign addr  = pend[0] ? in_base + BADDR_W'(t) : in_base + BADDR_W'(seg_len) + BADDR_W'(t);
  assign wdata = pend[0] ? b0 : b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; pend <= '0; b0 <= '0; b1 <= '0; seg_done <= 1'b0; overflows <= '0;
    end else begin
      seg_done <= 1'b0;
      if (!enable) begin
        t <= '0; pend <= '0;
      end else begin
        if (gnt && pend[0])      pend[0] <= 1'b0;
        else if (gnt && pend[1]) begin
          pend[1] <= 1'b0;
          if (t == seg_len - 1'b1) begin
            t        <= '0;
            seg_done <= 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end
        if (s_valid) begin
          if (pend == 2'b00) begin
            b0 <= s_ch0; b1 <= s_ch1; pend <= 2'b11;
          end else begin
            overflows <= overflows + 1'b1;
          end
        end
      end
    end
  end

endmodule
