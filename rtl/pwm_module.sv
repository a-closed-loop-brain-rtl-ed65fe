// pwm_module: dual-channel PWM driver for the optogenetic LEDs.
//
// Each channel has a period and a high time in clock cycles and a 10-bit class
// mask.  On every decision of the sleep-stage voter, a channel is armed if its
// enable bit is set and the decided class is in its mask, and disarmed
// otherwise.  An armed channel counts 0..period-1 and drives pwm_out high while
// the count is below the high time; a disarmed channel is low with its counter
// cleared.  At 23 MHz the 27-bit counter reaches periods down to 0.25 Hz, and a
// 10 Hz, 10 % pulse train is period 2,300,000 and high time 230,000.
//
// Following the paper: two channels, programmable frequency and duty cycle,
// triggered by chosen predicted classes 0-9.  This design's choice: the
// counter implementation and trigger on the voted decision.
module pwm_module
  import muxnet_pkg::*;
#(
  parameter int unsigned CNT_W = 27,
  parameter int unsigned NCH   = 2
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NCH-1:0]                      ch_en,
  input  logic [NCH-1:0][CNT_W-1:0]           period,
  input  logic [NCH-1:0][CNT_W-1:0]           high_time,
  input  logic [NCH-1:0][NUM_CLASSES-1:0]     class_mask,
  input  logic                                decision_valid,
  input  logic [3:0]                          decision,
  output logic [NCH-1:0]                      armed,
  output logic [NCH-1:0]                      pwm_out
);

  logic [NCH-1:0][CNT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= '0; cnt <= '0;
    end else begin
      for (int c = 0; c < int'(NCH); c++) begin
        if (decision_valid)
          armed[c] <= ch_en[c] && (32'(decision) < NUM_CLASSES) && class_mask[c][decision];
        else if (!ch_en[c])
          armed[c] <= 1'b0;
        if (!armed[c] || cnt[c] >= period[c] - 1'b1) cnt[c] <= '0;
        else                                         cnt[c] <= cnt[c] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int c = 0; c < int'(NCH); c++)
      pwm_out[c] = armed[c] && (cnt[c] < high_time[c]);
  end

endmodule
