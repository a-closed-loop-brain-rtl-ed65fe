// bbmi_soc: digital part of the closed-loop brain-machine interface SoC.
//
// Signal path: eight digitised neural channels -> eight CIC decimators ->
// channels 0 and 1 are written into the network's input segment ->
// every full segment the MUXnet classifies the sleep stage (0-9) -> six
// segment predictions are voted into one epoch decision, with class-wise early
// stop that skips the remaining classifications of a decided epoch -> the
// decision arms or disarms each of the two PWM channels that drive the
// optogenetic LEDs.  A host programs weights, input data, the layer program and
// the settings over SPI and reads status back.
//
// Register map (32-bit data, SPI command 0x03 write / 0x04 read):
//   0x00 CTRL      [0] auto-classify on segment end  [1] keep all data banks on
//                  [2] write 1: start one classification now  [3] sampling enable
//   0x01 CIC       [2:0] log2 decimation rate (1..5)
//   0x02 SEG_LEN   [9:0] samples per channel per segment
//   0x03 STATUS    (read) [3:0] last prediction [7:4] last decision [8] early
//                  [9] busy [14:10] data-bank power [31:16] classifications run
//   0x04 THR       [3c+2:3c] early-stop threshold of class c (0: none)
//   0x05/0x08      PWM channel 0/1 period,  0x06/0x09 high time,
//   0x07/0x0A      [9:0] class mask, [16] channel enable
//   0x0B COUNTS    (read) [15:0] skipped classifications [31:16] sample overflows
//   0x10+4L+f      layer L descriptor, 32-bit slice f (0..2) of layer_cfg_t
// Other SPI commands: 0x01 write weight word addr <- data[39:0];
// 0x02 write data-memory byte addr <- data[7:0].
//
// Following the paper: the blocks and their order (LNA/CIC, MUXnet with SRAM,
// PE and controller, dual PWM, SPI).  This design's choice: the register map,
// the handshakes between blocks and the reset values of the settings (the
// network program defaults to the sleep-staging CNN).
module bbmi_soc
  import muxnet_pkg::*;
#(
  parameter int unsigned NCH_IN = 8,
  parameter int unsigned ADC_W  = 10
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // digitised LNA outputs
  input  logic                               adc_valid,
  input  logic [NCH_IN-1:0][ADC_W-1:0]       adc_data,
  // host
  input  logic                               spi_sclk,
  input  logic                               spi_cs_n,
  input  logic                               spi_mosi,
  output logic                               spi_miso,
  // optogenetic LED drivers
  output logic [1:0]                         pwm_out,
  // observation
  output logic                               stage_valid,
  output logic [3:0]                         stage,
  output logic [NCH_IN-1:0][7:0]             cic_out
);

  localparam int unsigned PWM_W = 27;
  logic [1:0] pwm_armed;

  // ---------------- registers ----------------
  logic        r_auto, r_force, r_samp;
  logic [2:0]  r_cic;
  logic [9:0]  r_seg;
  logic [NUM_CLASSES-1:0][2:0] r_thr;
  logic [1:0][PWM_W-1:0] r_period, r_high;
  logic [1:0][NUM_CLASSES-1:0] r_mask;
  logic [1:0]  r_pwm_en;
  layer_cfg_t  prog [NUM_LAYERS];
  logic        soft_start;

  // ---------------- SPI ----------------
  logic        wr_valid, rd_req;
  logic [7:0]  s_cmd;
  logic [15:0] s_addr;
  logic [39:0] s_data, rd_data;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wr_valid, .cmd(s_cmd), .addr(s_addr), .data(s_data), .rd_req, .rd_data
  );

  // ---------------- CIC ----------------
  logic [NCH_IN-1:0] cic_valid;
  for (genvar c = 0; c < int'(NCH_IN); c++) begin : g_cic
    cic_filter #(.IN_W(ADC_W), .OUT_W(8), .MAX_LOG2R(5)) u_cic (
      .clk, .rst_n, .log2_rate(r_cic), .in_valid(adc_valid), .in_data(adc_data[c]),
      .out_valid(cic_valid[c]), .out_data(cic_out[c])
    );
  end

  // ---------------- sample loader ----------------
  logic               ld_req, ld_gnt, seg_done;
  logic [BADDR_W-1:0] ld_addr;
  logic [7:0]         ld_wdata;
  logic [15:0]        overflows;

  sample_loader u_loader (
    .clk, .rst_n, .enable(r_samp), .seg_len(r_seg), .in_base(prog[0].in_base),
    .s_valid(cic_valid[0]), .s_ch0(cic_out[0]), .s_ch1(cic_out[1]),
    .req(ld_req), .addr(ld_addr), .wdata(ld_wdata), .gnt(ld_gnt),
    .seg_done, .overflows
  );

  // ---------------- host data-memory writes ----------------
  logic               h_req;
  logic [BADDR_W-1:0] h_addr;
  logic [7:0]         h_wdata;

  // ---------------- MUXnet ----------------
  logic               nn_start, nn_busy, pred_valid, ext_gnt;
  logic [3:0]         pred;
  logic [DMEM_NBANK-1:0] pwr_on;
  logic               ext_req;
  logic [BADDR_W-1:0] ext_addr;
  logic [7:0]         ext_wdata, ext_rdata;
  logic               wm_we;

  // host writes have priority over the sample loader
  assign ext_req   = h_req || ld_req;
  assign ext_addr  = h_req ? h_addr  : ld_addr;
  assign ext_wdata = h_req ? h_wdata : ld_wdata;
  assign ld_gnt    = ext_gnt && !h_req;
  assign wm_we     = wr_valid && (s_cmd == 8'h01);

  muxnet u_muxnet (
    .clk, .rst_n, .start(nn_start), .prog, .pg_force_on(r_force),
    .busy(nn_busy), .pwr_on, .pred_valid, .pred,
    .ext_req, .ext_we(1'b1), .ext_addr, .ext_wdata, .ext_gnt, .ext_rdata,
    .wm_we, .wm_waddr(s_addr[WADDR_W-1:0]), .wm_wdata(s_data)
  );

  // ---------------- voting ----------------
  logic        run_nn, dec_valid, early;
  logic [3:0]  decision;
  logic [15:0] skipped, n_run;

  early_stop_voter #(.SEGS(6)) u_vote (
    .clk, .rst_n, .thr(r_thr), .seg_done(seg_done && r_auto), .run_nn,
    .pred_valid, .pred, .decision_valid(dec_valid), .decision, .early, .skipped
  );

  // a start request waits until the controller is idle
  logic start_pend;
  assign nn_start = start_pend && !nn_busy;

  // ---------------- PWM ----------------
  pwm_module #(.CNT_W(PWM_W), .NCH(2)) u_pwm (
    .clk, .rst_n, .ch_en(r_pwm_en), .period(r_period), .high_time(r_high), .class_mask(r_mask),
    .decision_valid(dec_valid), .decision, .armed(pwm_armed), .pwm_out
  );

  assign stage_valid = dec_valid;
  assign stage       = decision;

  // ---------------- register file ----------------
  logic [3:0] last_pred;
  logic       reg_wr;
  assign reg_wr = wr_valid && (s_cmd == 8'h03);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_auto <= 1'b1; r_force <= 1'b0; r_samp <= 1'b1;
      r_cic  <= 3'd1;
      r_seg  <= 10'd500;
      r_thr  <= '0;
      r_period <= '0; r_high <= '0; r_mask <= '0; r_pwm_en <= '0;
      prog   <= DEFAULT_PROG;
      soft_start <= 1'b0; start_pend <= 1'b0;
      h_req <= 1'b0; h_addr <= '0; h_wdata <= '0;
      last_pred <= '0; n_run <= '0;
    end else begin
      soft_start <= 1'b0;
      if (reg_wr) begin
        case (s_addr)
          16'h00: begin
            r_auto <= s_data[0]; r_force <= s_data[1]; soft_start <= s_data[2]; r_samp <= s_data[3];
          end
          16'h01: r_cic <= s_data[2:0];
          16'h02: r_seg <= s_data[9:0];
          16'h04: r_thr <= s_data[3*NUM_CLASSES-1:0];
          16'h05: r_period[0] <= s_data[PWM_W-1:0];
          16'h06: r_high[0]   <= s_data[PWM_W-1:0];
          16'h07: begin r_mask[0] <= s_data[9:0]; r_pwm_en[0] <= s_data[16]; end
          16'h08: r_period[1] <= s_data[PWM_W-1:0];
          16'h09: r_high[1]   <= s_data[PWM_W-1:0];
          16'h0A: begin r_mask[1] <= s_data[9:0]; r_pwm_en[1] <= s_data[16]; end
          default: begin
            for (int l = 0; l < int'(NUM_LAYERS); l++) begin
              if (s_addr == 16'(16 + 4*l))     prog[l][31:0]  <= s_data[31:0];
              if (s_addr == 16'(16 + 4*l + 1)) prog[l][63:32] <= s_data[31:0];
              if (s_addr == 16'(16 + 4*l + 2)) prog[l][$bits(layer_cfg_t)-1:64] <= s_data[$bits(layer_cfg_t)-65:0];
            end
          end
        endcase
      end
      // host byte write into the data memory, held until granted
      if (wr_valid && s_cmd == 8'h02) begin
        h_req <= 1'b1; h_addr <= s_addr[BADDR_W-1:0]; h_wdata <= s_data[7:0];
      end else if (h_req && ext_gnt) begin
        h_req <= 1'b0;
      end
      // classification requests
      if (run_nn || soft_start) start_pend <= 1'b1;
      else if (nn_start)        start_pend <= 1'b0;
      if (nn_start)   n_run <= n_run + 1'b1;
      if (pred_valid) last_pred <= pred;
    end
  end

  always_comb begin
    rd_data = '0;
    case (s_addr)
      16'h00: rd_data[5:0] = {pwm_armed, r_samp, 1'b0, r_force, r_auto};
      16'h01: rd_data[2:0] = r_cic;
      16'h02: rd_data[9:0] = r_seg;
      16'h03: rd_data[31:0] = {n_run, 1'b0, pwr_on, nn_busy, early, decision, last_pred};
      16'h04: rd_data[3*NUM_CLASSES-1:0] = r_thr;
      16'h05: rd_data[PWM_W-1:0] = r_period[0];
      16'h06: rd_data[PWM_W-1:0] = r_high[0];
      16'h07: rd_data[16:0] = {r_pwm_en[0], 6'd0, r_mask[0]};
      16'h08: rd_data[PWM_W-1:0] = r_period[1];
      16'h09: rd_data[PWM_W-1:0] = r_high[1];
      16'h0A: rd_data[16:0] = {r_pwm_en[1], 6'd0, r_mask[1]};
      16'h0B: rd_data[31:0] = {overflows, skipped};
      default: begin
        for (int l = 0; l < int'(NUM_LAYERS); l++) begin
          if (s_addr == 16'(16 + 4*l))     rd_data[31:0] = prog[l][31:0];
          if (s_addr == 16'(16 + 4*l + 1)) rd_data[31:0] = prog[l][63:32];
          if (s_addr == 16'(16 + 4*l + 2)) rd_data[$bits(layer_cfg_t)-65:0] = prog[l][$bits(layer_cfg_t)-1:64];
        end
      end
    endcase
  end

endmodule
