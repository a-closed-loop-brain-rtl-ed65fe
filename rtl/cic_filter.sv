// cic_filter: first-order cascaded integrator-comb decimator for one channel.
//
// The integrator adds every input sample; every R = 2**log2_rate input samples
// the comb subtracts the integrator value kept from the previous output, which
// gives the sum of the last R samples.  Dividing by R (an arithmetic shift,
// since R is a power of two) gives their mean, of which the top OUT_W bits are
// the output.  Integrator and comb wrap modulo 2**(IN_W+MAX_LOG2R), which is
// exact for a CIC.  out_valid pulses one cycle after the in_valid that
// completes a group of R samples.
//
// Following the paper: a CIC decimation filter with decimation 2x to 32x.
// This design's choice: first order (one integrator and one comb are drawn),
// power-of-two rates, the input width and the 8-bit output.
module cic_filter #(
  parameter int unsigned IN_W      = 10,
  parameter int unsigned OUT_W     = 8,
  parameter int unsigned MAX_LOG2R = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [2:0]              log2_rate,   // 1..MAX_LOG2R
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);

  localparam int unsigned ACC_W = IN_W + MAX_LOG2R;

  logic signed [ACC_W-1:0] integ, integ_d, diff, mean;
  logic [MAX_LOG2R-1:0]    phase;
  logic [MAX_LOG2R-1:0]    last_phase;
  logic [2:0]              lr;

  always_comb begin
    lr = (log2_rate == 0) ? 3'd1 : (log2_rate > 3'(MAX_LOG2R)) ? 3'(MAX_LOG2R) : log2_rate;
    last_phase = MAX_LOG2R'((1 << lr) - 1);
    diff = (integ + ACC_W'(in_data)) - integ_d;   // sum of the last R samples
    mean = diff >>> lr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0; integ_d <= '0; phase <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        integ <= integ + ACC_W'(in_data);
        if (phase == last_phase) begin
          phase     <= '0;
          integ_d   <= integ + ACC_W'(in_data);
          out_valid <= 1'b1;
          out_data  <= mean[IN_W-1 -: OUT_W];
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end

endmodule
