// muxnet_pkg: constants and types shared by the MUXnet neural processor and the SoC.
//
// The static table (ST) follows the n=2, m=5 example: a line is selected by a
// 10-bit index that packs two 5-bit two's-complement weights {w_i, w_i+1}, and
// holds four 5-bit values, one per 2-bit activation key {x_i, x_i+1}.  The
// memory shapes (2048x40 weights, 512x64 data) and the 8-bit precision are the
// chip's; the layer descriptor format is this design's own.
package muxnet_pkg;

  // Static table geometry
  localparam int unsigned ST_N    = 2;                // weights per line
  localparam int unsigned ST_M    = 5;                // bits per table value
  localparam int unsigned ST_KEYS = 1 << ST_N;        // 4 keys per line
  localparam int unsigned IDX_W   = ST_N * ST_M;      // 10-bit line index
  localparam int unsigned ST_LINES = 1 << IDX_W;      // 1024 lines

  // Activations and PE
  localparam int unsigned ABITS   = 8;                // INT8 activations
  localparam int unsigned N_MUX1  = 4;                // stage-1 MUXes
  localparam int unsigned N_ACT   = 8;                // activations per PE cycle
  localparam int unsigned PAIR_W  = ST_M + ABITS;     // 13-bit merged pair result
  localparam int unsigned PE_W    = 20;               // PE output width

  // Memories
  localparam int unsigned WMEM_DEPTH = 2048;
  localparam int unsigned WMEM_W     = N_MUX1 * IDX_W; // 40
  localparam int unsigned DMEM_DEPTH = 512;
  localparam int unsigned DMEM_W     = N_ACT * ABITS;  // 64
  localparam int unsigned DMEM_NBANK = 5;
  localparam int unsigned BADDR_W    = 12;             // byte address in data memory
  localparam int unsigned WADDR_W    = 11;

  localparam int unsigned NUM_CLASSES = 10;
  localparam int unsigned NUM_LAYERS  = 4;
  localparam int unsigned ACC_W       = 32;

  typedef logic [ST_M-1:0]               st_val_t;
  typedef st_val_t [ST_KEYS-1:0]         st_line_t;   // index = key
  typedef logic [IDX_W-1:0]              st_idx_t;
  typedef logic signed [ABITS-1:0]       act_t;

  typedef enum logic {LAYER_CONV = 1'b0, LAYER_LINEAR = 1'b1} layer_kind_e;

  // One layer of the network program.  Tensors are stored channel-major,
  // byte addressed: element (c, t) lives at base + c*len + t.
  typedef struct packed {
    layer_kind_e      kind;
    logic             mode10;     // 1: m=10 weights (4 per word), 0: m=5 (8 per word)
    logic             relu;
    logic             last;       // take argmax of this layer
    logic [4:0]       shift;      // pre-scaling shift s
    logic [3:0]       cin;        // input channels (conv)
    logic [9:0]       lin;        // input length per channel (linear: vector length)
    logic [5:0]       cout;       // output channels / neurons
    logic [9:0]       lout;       // output length per channel (conv)
    logic [3:0]       ksize;      // kernel taps (conv)
    logic [2:0]       stride;     // conv stride
    logic [BADDR_W-1:0] in_base;
    logic [BADDR_W-1:0] out_base;
    logic [WADDR_W-1:0] w_base;
  } layer_cfg_t;

  // Saturating 5-bit value of an inner product key.w
  function automatic st_val_t st_value(st_idx_t idx, logic [ST_N-1:0] key);
    logic signed [ST_M-1:0] wa, wb;
    int s;
    wa = idx[IDX_W-1:ST_M];
    wb = idx[ST_M-1:0];
    s  = (key[1] ? int'(wa) : 0) + (key[0] ? int'(wb) : 0);
    if (s > (1 << (ST_M-1)) - 1) s = (1 << (ST_M-1)) - 1;
    if (s < -(1 << (ST_M-1)))    s = -(1 << (ST_M-1));
    return st_val_t'(s);
  endfunction

  // Data-memory bank of a byte address: bank 0 holds words [0, DEPTH/4), the
  // other four split the rest evenly (128, 96, 96, 96, 96 words).
  function automatic logic [2:0] dmem_bank(logic [BADDR_W-1:0] a);
    int unsigned w;
    logic [2:0] b;
    w = int'(a) >> 3;
    b = '0;
    for (int unsigned i = 1; i < DMEM_NBANK; i++)
      if (w >= DMEM_DEPTH/4 + (i-1) * ((DMEM_DEPTH - DMEM_DEPTH/4) / (DMEM_NBANK-1))) b = 3'(i);
    return b;
  endfunction

  // Default program: the sleep-staging CNN, (2,500)->(2,249)->(2,246)->32->5
  localparam layer_cfg_t DEFAULT_PROG [NUM_LAYERS] = '{
    '{kind: LAYER_CONV,   mode10: 1'b1, relu: 1'b1, last: 1'b0, shift: 5'd8, cin: 4'd2, lin: 10'd500,
      cout: 6'd2,  lout: 10'd249, ksize: 4'd4, stride: 3'd2, in_base: 12'd0,    out_base: 12'd1024, w_base: 11'd0},
    '{kind: LAYER_CONV,   mode10: 1'b1, relu: 1'b1, last: 1'b0, shift: 5'd8, cin: 4'd2, lin: 10'd249,
      cout: 6'd2,  lout: 10'd246, ksize: 4'd4, stride: 3'd1, in_base: 12'd1024, out_base: 12'd1792, w_base: 11'd4},
    '{kind: LAYER_LINEAR, mode10: 1'b0, relu: 1'b1, last: 1'b0, shift: 5'd6, cin: 4'd1, lin: 10'd492,
      cout: 6'd32, lout: 10'd1,   ksize: 4'd1, stride: 3'd1, in_base: 12'd1792, out_base: 12'd2560, w_base: 11'd8},
    '{kind: LAYER_LINEAR, mode10: 1'b0, relu: 1'b0, last: 1'b1, shift: 5'd4, cin: 4'd1, lin: 10'd32,
      cout: 6'd5,  lout: 10'd1,   ksize: 4'd1, stride: 3'd1, in_base: 12'd2560, out_base: 12'd3328, w_base: 11'd1992}
  };

endpackage
