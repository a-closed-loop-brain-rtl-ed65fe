// muxnet: the multiplier-free neural network processor.
//
// Ties together the layer controller, the process engine (two-stage MPU, PLMU,
// adder tree), the 2048x40 weight memory, the 512x64 data memory in five banks
// and the power-gating logic.  Besides the controller, one external byte port
// reaches the data memory: it is granted (ext_gnt) only while the controller is
// idle, and a granted read returns ext_rdata one cycle later.  The weight
// memory has its own write port for loading.  start runs the layer program
// once; pred_valid pulses with the predicted class in pred.
//
// Following the paper: PE, controller, one weight and five data memory blocks
// with dynamic power gating.  This design's choice: the external port and its
// arbitration.
module muxnet
  import muxnet_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  layer_cfg_t              prog [NUM_LAYERS],
  input  logic                    pg_force_on,
  output logic                    busy,
  output logic [DMEM_NBANK-1:0]   pwr_on,
  output logic                    pred_valid,
  output logic [3:0]              pred,
  // external data-memory byte port
  input  logic                    ext_req,
  input  logic                    ext_we,
  input  logic [BADDR_W-1:0]      ext_addr,
  input  logic [7:0]              ext_wdata,
  output logic                    ext_gnt,
  output logic [7:0]              ext_rdata,
  // weight loading
  input  logic                    wm_we,
  input  logic [WADDR_W-1:0]      wm_waddr,
  input  logic [WMEM_W-1:0]       wm_wdata
);

  logic                       c_req, c_we;
  logic [BADDR_W-1:0]         c_addr;
  logic [7:0]                 c_wdata, dm_rdata;
  logic                       wm_re;
  logic [WADDR_W-1:0]         wm_raddr;
  logic [WMEM_W-1:0]          wm_rdata, pe_w;
  logic                       pe_mode10;
  act_t [N_ACT-1:0]           pe_x;
  logic signed [PE_W-1:0]     pe_y;
  logic [$clog2(NUM_LAYERS)-1:0] layer;

  muxnet_ctrl u_ctrl (
    .clk, .rst_n, .start, .prog, .busy, .layer,
    .dm_req(c_req), .dm_we(c_we), .dm_addr(c_addr), .dm_wdata(c_wdata), .dm_rdata(dm_rdata),
    .wm_re, .wm_addr(wm_raddr), .wm_rdata,
    .pe_mode10, .pe_w, .pe_x, .pe_y,
    .pred_valid, .pred
  );

  muxnet_pe u_pe (.mode10(pe_mode10), .w_word(pe_w), .x(pe_x), .y(pe_y));

  weight_mem #(.DEPTH(WMEM_DEPTH), .WIDTH(WMEM_W)) u_wmem (
    .clk, .re(wm_re), .raddr(wm_raddr), .rdata(wm_rdata),
    .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata)
  );

  pg_ctrl u_pg (.busy, .force_on(pg_force_on), .cfg(prog[layer]), .pwr_on);

  assign ext_gnt   = ext_req && !busy && !start;
  assign ext_rdata = dm_rdata;

  logic                 m_req, m_we;
  logic [BADDR_W-1:0]   m_addr;
  logic [7:0]           m_wdata;
  always_comb begin
    if (busy) begin
      m_req = c_req;   m_we = c_we;   m_addr = c_addr;   m_wdata = c_wdata;
    end else begin
      m_req = ext_gnt; m_we = ext_we; m_addr = ext_addr; m_wdata = ext_wdata;
    end
  end

  data_mem u_dmem (
    .clk, .rst_n, .pwr_on, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(dm_rdata)
  );

endmodule
