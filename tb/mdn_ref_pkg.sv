// mdn_ref_pkg: bit-exact reference model of the track-parameter network for
// the testbenches, written independently of the RTL's fixed-point shifts.
//
// Every value is handled as a real number (all are short binary fractions, so
// double precision holds them exactly). A quantised activation is computed as
// floor(v * 2^f) clipped to the format's integer range, f being the number of
// fraction bits (3 for the convolution layers, 7 for the dense layers).
// Tensors are kept as integer codes: a code k in Q1.3 means k/8, in Q1.7 k/128.
// Weights are indexed by the address of the weight map in smartpixel_pkg.
package mdn_ref_pkg;
  import smartpixel_pkg::*;

  // Hard tanh of a real value into a format with 'f' fraction bits and 'n'
  // total bits. Counts clipping events in the counters below.
  int unsigned n_clip_hi, n_clip_lo;

  function automatic int qclip(real v, int f, int n);
    int k, hi, lo;
    k  = int'($floor(v * (2.0 ** f)));
    hi = (1 << (n - 1)) - 1;
    lo = -(1 << (n - 1));
    if (k > hi) begin n_clip_hi++; return hi; end
    if (k < lo) begin n_clip_lo++; return lo; end
    return k;
  endfunction

  // Q1.3 code held in the low 4 bits of a weight byte.
  function automatic real w4(int code);
    int c;
    c = code & 15;
    if (c > 7) c -= 16;
    return c / 8.0;
  endfunction

  function automatic real w8(int code);
    return code / 128.0;
  endfunction

  typedef int img_t  [IMG_H][IMG_W][N_T];
  typedef int wts_t  [A_END];
  typedef int out_t  [D3_OUT];

  // Separable convolution layer 'valid' 3x3 then 1x1, generic sizes.
  // in: [h][w][cin] codes (Q1.3). Returns [h-2][w-2][cout].
  function automatic void sepconv(input int h, input int w, input int cin, input int cout,
                                  input int in[][][], input wts_t wt,
                                  input int a_dw, input int a_pw, input int a_b,
                                  output int out[][][]);
    real dws [];
    out = new[h-2];
    dws = new[cin];
    for (int y = 0; y < h-2; y++) begin
      out[y] = new[w-2];
      for (int x = 0; x < w-2; x++) begin
        out[y][x] = new[cout];
        for (int c = 0; c < cin; c++) begin
          dws[c] = 0.0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              dws[c] += (in[y+ky][x+kx][c] / 8.0) * w4(wt[a_dw + c*9 + ky*3 + kx]);
        end
        for (int o = 0; o < cout; o++) begin
          real v;
          v = w4(wt[a_b + o]);
          for (int c = 0; c < cin; c++) v += dws[c] * w4(wt[a_pw + o*cin + c]);
          out[y][x][o] = qclip(v, 3, 4);
        end
      end
    end
  endfunction

  function automatic void conv1x1(input int h, input int w, input int cin, input int cout,
                                  input int in[][][], input wts_t wt,
                                  input int a_w, input int a_b, output int out[][][]);
    out = new[h];
    for (int y = 0; y < h; y++) begin
      out[y] = new[w];
      for (int x = 0; x < w; x++) begin
        out[y][x] = new[cout];
        for (int o = 0; o < cout; o++) begin
          real v;
          v = w4(wt[a_b + o]);
          for (int c = 0; c < cin; c++) v += (in[y][x][c] / 8.0) * w4(wt[a_w + o*cin + c]);
          out[y][x][o] = qclip(v, 3, 4);
        end
      end
    end
  endfunction

  // 2x2 mean, stride 2, odd edge dropped. Output codes are Q1.7.
  function automatic void pool(input int h, input int w, input int c,
                               input int in[][][], output int out[][][]);
    out = new[h/2];
    for (int y = 0; y < h/2; y++) begin
      out[y] = new[w/2];
      for (int x = 0; x < w/2; x++) begin
        out[y][x] = new[c];
        for (int k = 0; k < c; k++) begin
          real m;
          m = (in[2*y][2*x][k] + in[2*y][2*x+1][k] + in[2*y+1][2*x][k] + in[2*y+1][2*x+1][k]) / 32.0;
          out[y][x][k] = int'(m * 128.0);   // exact
        end
      end
    end
  endfunction

  // Dense layer on Q1.7 codes, kernel [in][out].
  function automatic void dense(input int nin, input int nout, input int in[],
                                input wts_t wt, input int a_w, input int a_b, output int out[]);
    out = new[nout];
    for (int o = 0; o < nout; o++) begin
      real v;
      v = w8(wt[a_b + o]);
      for (int i = 0; i < nin; i++) v += (in[i] / 128.0) * w8(wt[a_w + i*nout + o]);
      out[o] = qclip(v, 7, 8);
    end
  endfunction

  // Whole network on one cluster. img[y][x][t] codes.
  function automatic void network(input img_t img, input wts_t wt, output out_t res);
    int a0[][][], a1[][][], a2[][][], a3[][][], p[][][];
    int flat[], d1[], d2[], d3[];
    a0 = new[IMG_H];
    for (int y = 0; y < IMG_H; y++) begin
      a0[y] = new[IMG_W];
      for (int x = 0; x < IMG_W; x++) begin
        a0[y][x] = new[N_T];
        for (int t = 0; t < N_T; t++) a0[y][x][t] = img[y][x][t];
      end
    end
    sepconv(IMG_H, IMG_W, N_T, N_FILT, a0, wt, A_L1_DW, A_L1_PW, A_L1_B, a1);
    sepconv(C1_H, C1_W, N_FILT, N_FILT, a1, wt, A_L2_DW, A_L2_PW, A_L2_B, a2);
    conv1x1(C2_H, C2_W, N_FILT, N_FILT, a2, wt, A_L3_W, A_L3_B, a3);
    pool(C2_H, C2_W, N_FILT, a3, p);
    flat = new[FLAT];
    for (int y = 0; y < P_H; y++)
      for (int x = 0; x < P_W; x++)
        for (int c = 0; c < N_FILT; c++)
          flat[(y*P_W + x)*N_FILT + c] = p[y][x][c];
    dense(FLAT, D1_OUT, flat, wt, A_D1_W, A_D1_B, d1);
    dense(D1_OUT, D2_OUT, d1, wt, A_D2_W, A_D2_B, d2);
    dense(D2_OUT, D3_OUT, d2, wt, A_D3_W, A_D3_B, d3);
    for (int o = 0; o < D3_OUT; o++) res[o] = d3[o];
  endfunction

endpackage
