// cnn_ref_pkg: integer reference model of the network for the testbenches.
//
// gen_weights draws random weights that never saturate a static-table entry
// (m=5 weights in [-8,7]; m=10 weights W = 32*Wh + Wl with Wh, Wl in [-8,7]),
// keeps them as integers in wint and packs them into the weight-memory image
// wimg exactly as the layer controller reads them: output o of a layer uses
// words w_base + o*ceil(E/P) + c, element e = ic*k + j sits in word e/P,
// slot e%P; an m=5 word holds line indices {w[2p], w[2p+1]} in bits
// [10p+9:10p]; an m=10 word holds {Wh[0],Wh[1]}, {Wl[0],Wl[1]}, {Wh[2],Wh[3]},
// {Wl[2],Wl[3]} from the low bits up.
// run computes every layer on the byte image dref with plain integer
// arithmetic and returns the argmax of the last layer's accumulators.
//
// The layer shapes it is run with come from the sleep-staging network; the
// weight ranges, the packing and the shift-ReLU-saturate output are this
// design's own and mirror the RTL's documented format.
package cnn_ref_pkg;
  import muxnet_pkg::*;

  int           wint [NUM_LAYERS][64][512];
  logic [39:0]  wimg [2048];
  logic [7:0]   dref [4096];
  int           n_relu_clip, n_sat;

  function automatic int rnd8();
    return int'($urandom_range(0, 15)) - 8;
  endfunction

  function automatic void gen_weights(layer_cfg_t prog [NUM_LAYERS]);
    for (int i = 0; i < 2048; i++) wimg[i] = '0;
    for (int l = 0; l < int'(NUM_LAYERS); l++) begin
      int k, e_n, p, nch;
      k   = (prog[l].kind == LAYER_LINEAR) ? int'(prog[l].lin) : int'(prog[l].ksize);
      e_n = int'(prog[l].cin) * k;
      p   = prog[l].mode10 ? 4 : 8;
      nch = (e_n + p - 1) / p;
      for (int o = 0; o < int'(prog[l].cout); o++) begin
        for (int c = 0; c < nch; c++) begin
          logic [39:0] word;
          int w [8];
          if (!prog[l].mode10) begin
            for (int s = 0; s < 8; s++) w[s] = rnd8();
            for (int q = 0; q < 4; q++) word[q*10 +: 10] = {5'(w[2*q]), 5'(w[2*q+1])};
          end else begin
            int hi [4], lo [4];
            for (int s = 0; s < 4; s++) begin hi[s] = rnd8(); lo[s] = rnd8(); w[s] = 32*hi[s] + lo[s]; end
            word = {5'(lo[2]), 5'(lo[3]), 5'(hi[2]), 5'(hi[3]), 5'(lo[0]), 5'(lo[1]), 5'(hi[0]), 5'(hi[1])};
          end
          for (int s = 0; s < p; s++)
            if (c*p + s < e_n) wint[l][o][c*p + s] = w[s];
          wimg[int'(prog[l].w_base) + o*nch + c] = word;
        end
      end
    end
  endfunction

  function automatic int run(layer_cfg_t prog [NUM_LAYERS]);
    int pred;
    longint best;
    pred = 0; best = 0;
    n_relu_clip = 0; n_sat = 0;
    for (int l = 0; l < int'(NUM_LAYERS); l++) begin
      int k, npos, cnt;
      k    = (prog[l].kind == LAYER_LINEAR) ? int'(prog[l].lin) : int'(prog[l].ksize);
      npos = (prog[l].kind == LAYER_LINEAR) ? 1 : int'(prog[l].lout);
      cnt  = 0;
      for (int o = 0; o < int'(prog[l].cout); o++) begin
        for (int t = 0; t < npos; t++) begin
          longint acc, v;
          acc = 0;
          for (int ic = 0; ic < int'(prog[l].cin); ic++)
            for (int j = 0; j < k; j++) begin
              int a;
              a = int'(prog[l].in_base) + ic*int'(prog[l].lin) + t*int'(prog[l].stride) + j;
              acc += longint'(wint[l][o][ic*k + j]) * longint'($signed(dref[a]));
            end
          v = acc >>> prog[l].shift;
          if (prog[l].relu && v < 0) begin v = 0; n_relu_clip++; end
          if (v > 127)  begin v = 127;  n_sat++; end
          if (v < -128) begin v = -128; n_sat++; end
          dref[int'(prog[l].out_base) + cnt] = 8'(v);
          cnt++;
          if (prog[l].last && (o == 0 || acc > best)) begin best = acc; pred = o; end
        end
      end
      if (prog[l].last) break;
    end
    return pred;
  endfunction

  // cycles from start to pred_valid of the layer controller
  function automatic int cycles(layer_cfg_t prog [NUM_LAYERS]);
    int n;
    n = 0;
    for (int l = 0; l < int'(NUM_LAYERS); l++) begin
      int k, e_n, p, nch, outs;
      k    = (prog[l].kind == LAYER_LINEAR) ? int'(prog[l].lin) : int'(prog[l].ksize);
      e_n  = int'(prog[l].cin) * k;
      p    = prog[l].mode10 ? 4 : 8;
      nch  = (e_n + p - 1) / p;
      outs = int'(prog[l].cout) * ((prog[l].kind == LAYER_LINEAR) ? 1 : int'(prog[l].lout));
      n += 1 + outs * (nch * (p + 2) + 1);
      if (prog[l].last) break;
    end
    return n;
  endfunction
endpackage
