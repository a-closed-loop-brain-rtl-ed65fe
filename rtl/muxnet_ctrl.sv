// muxnet_ctrl: layer sequencer of the MUXnet.
//
// Runs the layer program prog[0..] from start until a layer marked last.
// Every layer is treated as a 1-d convolution: a linear layer is a convolution
// with one input channel, a kernel as long as the input vector and one output
// position.  For each output value the controller walks the E = cin*k inputs
// in chunks of P = 4 (m=10 weights) or 8 (m=5 weights):
//   GATHER  : P+1 cycles.  One data-memory byte read per cycle, the weight word
//             w_base + o*ceil(E/P) + chunk is read in the first cycle.
//             Elements past E are zero.
//   COMPUTE : 1 cycle.  The PE result is added to the accumulator.
//   WRITE   : after the last chunk, acc >>> shift (the pre-scaling shift),
//             optional ReLU, saturation to int8, one byte written at the next
//             output address (outputs are stored channel-major, so
//             consecutively).  In the last layer the argmax of the
//             accumulators is tracked and reported with pred_valid.
// Outputs are produced channel by channel, position by position.
//
// Interfaces: data memory byte port (dm_*), one-cycle read latency; weight
// memory read port (wm_*), one-cycle latency; the PE is combinational (pe_*).
// busy is high from start to pred_valid; layer tells pg_ctrl the current layer.
//
// Following the paper: the network is run layer by layer on the MUXnet PE with
// m=10 convolutions and m=5 linear layers, the output scaled back by the
// pre-scaling shift, ReLU, and a class prediction 0-9.  This design's choice:
// the whole schedule, the data layout and the byte-serial gather.
module muxnet_ctrl
  import muxnet_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_cfg_t               prog [NUM_LAYERS],
  output logic                     busy,
  output logic [$clog2(NUM_LAYERS)-1:0] layer,
  // data memory
  output logic                     dm_req,
  output logic                     dm_we,
  output logic [BADDR_W-1:0]       dm_addr,
  output logic [7:0]               dm_wdata,
  input  logic [7:0]               dm_rdata,
  // weight memory
  output logic                     wm_re,
  output logic [WADDR_W-1:0]       wm_addr,
  input  logic [WMEM_W-1:0]        wm_rdata,
  // PE
  output logic                     pe_mode10,
  output logic [WMEM_W-1:0]        pe_w,
  output act_t [N_ACT-1:0]         pe_x,
  input  logic signed [PE_W-1:0]   pe_y,
  // result
  output logic                     pred_valid,
  output logic [3:0]               pred
);

  typedef enum logic [2:0] {S_IDLE, S_LAYER, S_GATHER, S_COMPUTE, S_WRITE} state_e;
  state_e state;

  layer_cfg_t cfg;
  assign cfg = prog[layer];

  // derived per-layer sizes
  logic [9:0]  ksz;       // effective kernel length
  logic [13:0] esz;       // elements per output
  logic [3:0]  p;         // elements per chunk
  logic [10:0] nch;       // chunks per output
  logic [9:0]  npos;      // output positions per channel
  always_comb begin
    ksz  = (cfg.kind == LAYER_LINEAR) ? cfg.lin : 10'(cfg.ksize);
    esz  = 14'(cfg.cin) * 14'(ksz);
    p    = cfg.mode10 ? 4'd4 : 4'd8;
    nch  = cfg.mode10 ? 11'((esz + 14'd3) >> 2) : 11'((esz + 14'd7) >> 3);
    npos = (cfg.kind == LAYER_LINEAR) ? 10'd1 : cfg.lout;
  end

  // position and element counters
  logic [5:0]          oc;        // output channel
  logic [9:0]          t;         // output position
  logic [10:0]         chunk;
  logic [3:0]          g;         // gather slot
  logic [13:0]         e;         // element index within the output
  logic [3:0]          ic;        // element's input channel
  logic [9:0]          j;         // element's tap
  logic [BADDR_W-1:0]  pos_base;  // in_base + t*stride
  logic [BADDR_W-1:0]  ic_off;    // ic*lin
  logic [BADDR_W-1:0]  out_ptr;
  logic [WADDR_W-1:0]  w_row;     // w_base + oc*nch
  logic                rd_pending;
  logic [3:0]          rd_slot;
  logic signed [ACC_W-1:0] acc, best;
  act_t [N_ACT-1:0]    xr;

  assign pe_mode10 = cfg.mode10;
  assign pe_w      = wm_rdata;
  assign pe_x      = xr;
  assign busy      = (state != S_IDLE);

  // requantisation of the finished accumulator
  logic signed [ACC_W-1:0] scaled;
  logic [7:0]              q;
  always_comb begin
    scaled = acc >>> cfg.shift;
    if (cfg.relu && scaled < 0) scaled = '0;
    if (scaled > 127)       q = 8'sd127;
    else if (scaled < -128) q = 8'h80;
    else                    q = scaled[7:0];
  end

  logic elem_ok;
  assign elem_ok = (e < esz);

  always_comb begin
    dm_req   = 1'b0;
    dm_we    = 1'b0;
    dm_addr  = pos_base + ic_off + BADDR_W'(j);
    dm_wdata = q;
    wm_re    = 1'b0;
    wm_addr  = w_row + WADDR_W'(chunk);
    case (state)
      S_GATHER: begin
        dm_req = (g < p) && elem_ok;
        wm_re  = (g == 0);
      end
      S_WRITE: begin
        dm_req  = 1'b1;
        dm_we   = 1'b1;
        dm_addr = out_ptr;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      layer <= '0;
      oc <= '0; t <= '0; chunk <= '0; g <= '0; e <= '0; ic <= '0; j <= '0;
      pos_base <= '0; ic_off <= '0; out_ptr <= '0; w_row <= '0;
      rd_pending <= 1'b0; rd_slot <= '0;
      acc <= '0; best <= '0; xr <= '0;
      pred_valid <= 1'b0; pred <= '0;
    end else begin
      pred_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          layer <= '0;
          state <= S_LAYER;
        end
        S_LAYER: begin
          oc <= '0; t <= '0; chunk <= '0; g <= '0; e <= '0; ic <= '0; j <= '0;
          pos_base <= cfg.in_base; ic_off <= '0;
          out_ptr  <= cfg.out_base;
          w_row    <= cfg.w_base;
          acc      <= '0;
          state    <= S_GATHER;
        end
        S_GATHER: begin
          // capture the byte requested in the previous cycle
          rd_pending <= 1'b0;
          if (rd_pending) xr[rd_slot[2:0]] <= act_t'(dm_rdata);
          if (g < p) begin
            if (elem_ok) begin
              rd_pending <= 1'b1;
              rd_slot    <= g;
              e <= e + 1'b1;
              if (j == ksz - 1'b1) begin
                j      <= '0;
                ic     <= ic + 1'b1;
                ic_off <= ic_off + BADDR_W'(cfg.lin);
              end else begin
                j <= j + 1'b1;
              end
            end else begin
              xr[g[2:0]] <= '0;
            end
            g <= g + 1'b1;
          end else begin
            state <= S_COMPUTE;
          end
        end
        S_COMPUTE: begin
          acc <= acc + ACC_W'(pe_y);
          g   <= '0;
          if (chunk == nch - 1'b1) begin
            state <= S_WRITE;
          end else begin
            chunk <= chunk + 1'b1;
            state <= S_GATHER;
          end
        end
        S_WRITE: begin
          out_ptr <= out_ptr + 1'b1;
          if (cfg.last && (oc == 0 || acc > best)) begin
            best <= acc;
            pred <= 4'(oc);
          end
          acc <= '0; chunk <= '0; e <= '0; ic <= '0; j <= '0; ic_off <= '0;
          state <= S_GATHER;
          if (t == npos - 1'b1) begin
            t        <= '0;
            pos_base <= cfg.in_base;
            w_row    <= w_row + WADDR_W'(nch);
            if (oc == cfg.cout - 1'b1) begin
              if (cfg.last || 32'(layer) == NUM_LAYERS - 1) begin
                state      <= S_IDLE;
                pred_valid <= 1'b1;
              end else begin
                layer <= layer + 1'b1;
                state <= S_LAYER;
              end
            end else begin
              oc <= oc + 1'b1;
            end
          end else begin
            t        <= t + 1'b1;
            pos_base <= pos_base + BADDR_W'(cfg.stride);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
