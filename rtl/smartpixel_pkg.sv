// smartpixel_pkg: sizes, number formats, the weight address map and the
// hard-tanh activation shared by every layer of the track-parameter network.
//
// Number formats. Activations and weights of the three convolution layers are
// 4-bit two's complement with 3 fraction bits (Q1.3, range -1 .. +0.875). The
// average-pooling output and the dense layers' weights and activations are
// 8-bit two's complement with 7 fraction bits (Q1.7, range -1 .. +0.992).
// These widths are the ones the network was trained with; the accumulator
// widths below are this design's own, chosen so that no sum can overflow.
//
// Weights are not fixed in the logic: they are written at run time through a
// byte-wide write port (wt_wr_t) into registers held by each layer. The map
// below places every weight and bias at one address of a 12-bit space; the
// ordering inside each layer follows the usual tensor layouts (depthwise
// kernel [channel][ky][kx], pointwise/1x1 kernel [out][in], dense kernel
// [in][out]).
package smartpixel_pkg;

  // Sensor geometry: 21 x 13 pixels, 20 time samples per pixel.
  localparam int unsigned IMG_W   = 21;   // pixels along x, sent fastest
  localparam int unsigned IMG_H   = 13;   // pixels along y
  localparam int unsigned N_T     = 20;   // time samples = input channels
  localparam int unsigned N_FILT  = 5;    // filters of every convolution layer
  localparam int unsigned N_TAPS  = 9;    // 3x3 kernel
  localparam int unsigned D1_OUT  = 16;
  localparam int unsigned D2_OUT  = 16;
  localparam int unsigned D3_OUT  = 14;   // 4 means + 10 covariance terms

  // Feature-map sizes with 'valid' 3x3 convolutions and 2x2 pooling.
  localparam int unsigned C1_W = IMG_W - 2, C1_H = IMG_H - 2;   // 19 x 11
  localparam int unsigned C2_W = C1_W - 2,  C2_H = C1_H - 2;    // 17 x 9
  localparam int unsigned P_W  = C2_W / 2,  P_H  = C2_H / 2;    // 8 x 4
  localparam int unsigned FLAT = P_W * P_H * N_FILT;            // 160

  typedef logic signed [3:0] q4_t;   // Q1.3
  typedef logic signed [7:0] q8_t;   // Q1.7

  localparam int unsigned WA_W = 12;
  typedef logic [WA_W-1:0] waddr_t;

  // One write of one weight or bias. data holds a Q1.7 value for the dense
  // layers; the convolution layers keep data[3:0] as a Q1.3 value.
  typedef struct packed {
    logic   we;
    waddr_t addr;
    q8_t    data;
  } wt_wr_t;

  // Weight address map.
  localparam int unsigned A_L1_DW = 0;                          // 20*9  = 180
  localparam int unsigned A_L1_PW = A_L1_DW + N_T * N_TAPS;     // 5*20  = 100
  localparam int unsigned A_L1_B  = A_L1_PW + N_FILT * N_T;     // 5
  localparam int unsigned A_L2_DW = A_L1_B  + N_FILT;           // 5*9   = 45
  localparam int unsigned A_L2_PW = A_L2_DW + N_FILT * N_TAPS;  // 5*5   = 25
  localparam int unsigned A_L2_B  = A_L2_PW + N_FILT * N_FILT;  // 5
  localparam int unsigned A_L3_W  = A_L2_B  + N_FILT;           // 5*5   = 25
  localparam int unsigned A_L3_B  = A_L3_W  + N_FILT * N_FILT;  // 5
  localparam int unsigned A_D1_W  = A_L3_B  + N_FILT;           // 160*16 = 2560
  localparam int unsigned A_D1_B  = A_D1_W  + FLAT * D1_OUT;    // 16
  localparam int unsigned A_D2_W  = A_D1_B  + D1_OUT;           // 16*16 = 256
  localparam int unsigned A_D2_B  = A_D2_W  + D1_OUT * D2_OUT;  // 16
  localparam int unsigned A_D3_W  = A_D2_B  + D2_OUT;           // 16*14 = 224
  localparam int unsigned A_D3_B  = A_D3_W  + D2_OUT * D3_OUT;  // 14
  localparam int unsigned A_END   = A_D3_B  + D3_OUT;           // 3476

  // Hard tanh: take an accumulator, drop 'shift' fraction bits (rounding
  // toward minus infinity), and clip to the 4-bit Q1.3 range [-1, +0.875].
  function automatic q4_t htanh_q4(input logic signed [31:0] acc, input int unsigned shift);
    logic signed [31:0] t;
    t = acc >>> shift;
    if (t > 32'sd7)       return 4'sd7;
    else if (t < -32'sd8) return -4'sd8;
    else                  return q4_t'(t);
  endfunction

  // Same for the 8-bit Q1.7 range [-1, +127/128].
  function automatic q8_t htanh_q8(input logic signed [31:0] acc, input int unsigned shift);
    logic signed [31:0] t;
    t = acc >>> shift;
    if (t > 32'sd127)       return 8'sd127;
    else if (t < -32'sd128) return -8'sd128;
    else                    return q8_t'(t);
  endfunction

endpackage
