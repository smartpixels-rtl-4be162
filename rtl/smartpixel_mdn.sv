// smartpixel_mdn: streaming inference engine for the smart-pixel track
// network. From the 20 time samples of a 21 x 13 pixel cluster it computes
// 14 numbers: the track's local position and angles (x, y, alpha, beta) and
// the 10 independent terms of their 4 x 4 covariance, as the outputs of a
// mixture-density-network regression.
//
// Data path, one stage per layer of the network:
//   pixel stream  21 x 13 x 20 (Q1.3)
//   qsepconv2d    3x3 depthwise + 1x1 pointwise, 20 -> 5 channels, 19 x 11
//   qsepconv2d    3x3 depthwise + 1x1 pointwise,  5 -> 5 channels, 17 x 9
//   qconv1x1      1x1 convolution,                5 -> 5 channels, 17 x 9
//   avgpool2x2    2x2 average,                    8 x 4 x 5 (Q1.7)
//   qdense_stream dense 160 -> 16 (Q1.7), accumulated as the map streams in
//   qdense        dense  16 -> 16
//   qdense        dense  16 -> 14  -> out_data
// Every layer except pooling ends in a hard-tanh clip to its own format.
//
// Interface. pix_valid/pix_data carry one pixel (all 20 time samples) per
// cycle, x fastest then y; a cluster is exactly 273 accepted pixels and the
// first pixel after reset starts a cluster. Gaps (pix_valid low) are allowed
// anywhere; there is no back-pressure because every stage accepts one pixel
// per clock. out_valid pulses for one cycle with the 14 results of a cluster.
// Weights and biases (3476 values, map in smartpixel_pkg) are written with
// wt_we/wt_addr/wt_data, one per cycle, before the clusters they apply to.
//
// Timing at 200 MHz: a new cluster may start every 273 cycles (one per
// pixel), and its result appears 9 cycles after its last pixel.
//
// The layer sizes, kernel sizes, bit widths and activations are those of the
// published network; the pixel-per-cycle streaming order follows its
// streaming hardware implementation. Padding, rounding, biases, flatten
// order, the weight-load port and the cycle-level schedule are this design's
// own choices.
module smartpixel_mdn
  import smartpixel_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // weight / bias load port
  input  logic   wt_we,
  input  waddr_t wt_addr,
  input  q8_t    wt_data,
  // pixel stream
  input  logic   pix_valid,
  input  q4_t    pix_data [N_T],
  // result
  output logic   out_valid,
  output q8_t    out_data [D3_OUT]
);

  wt_wr_t wt_wr;
  assign wt_wr = '{we: wt_we, addr: wt_addr, data: wt_data};

  // Layer 1: separable convolution, 21 x 13 x 20 -> 19 x 11 x 5.
  logic l1_valid;
  q4_t  l1_data [N_FILT];

  qsepconv2d #(
    .W(IMG_W), .H(IMG_H), .C_IN(N_T), .C_OUT(N_FILT),
    .DW_BASE(A_L1_DW), .PW_BASE(A_L1_PW), .B_BASE(A_L1_B)
  ) u_l1 (
    .clk, .rst_n, .wt_wr,
    .in_valid(pix_valid), .in_data(pix_data),
    .out_valid(l1_valid), .out_last(), .out_data(l1_data)
  );

  // Layer 2: separable convolution, 19 x 11 x 5 -> 17 x 9 x 5.
  logic l2_valid, l2_last;
  q4_t  l2_data [N_FILT];

  qsepconv2d #(
    .W(C1_W), .H(C1_H), .C_IN(N_FILT), .C_OUT(N_FILT),
    .DW_BASE(A_L2_DW), .PW_BASE(A_L2_PW), .B_BASE(A_L2_B)
  ) u_l2 (
    .clk, .rst_n, .wt_wr,
    .in_valid(l1_valid), .in_data(l1_data),
    .out_valid(l2_valid), .out_last(l2_last), .out_data(l2_data)
  );

  // Layer 3: 1x1 convolution, 17 x 9 x 5 -> 17 x 9 x 5.
  logic l3_valid;
  q4_t  l3_data [N_FILT];

  qconv1x1 #(
    .C_IN(N_FILT), .C_OUT(N_FILT), .W_BASE(A_L3_W), .B_BASE(A_L3_B)
  ) u_l3 (
    .clk, .rst_n, .wt_wr,
    .in_valid(l2_valid), .in_last(l2_last), .in_data(l2_data),
    .out_valid(l3_valid), .out_last(), .out_data(l3_data)
  );

  // 2x2 average pooling, 17 x 9 x 5 -> 8 x 4 x 5.
  logic                        pl_valid, pl_last;
  logic [$clog2(P_W*P_H)-1:0]  pl_pos;
  q8_t                         pl_data [N_FILT];

  avgpool2x2 #(.W(C2_W), .H(C2_H), .C(N_FILT)) u_pool (
    .clk, .rst_n,
    .in_valid(l3_valid), .in_data(l3_data),
    .out_valid(pl_valid), .out_last(pl_last), .out_pos(pl_pos), .out_data(pl_data)
  );

  // Dense 1: 160 -> 16, accumulated per pooled position.
  logic d1_valid;
  q8_t  d1_data [D1_OUT];

  qdense_stream #(
    .N_POS(P_W*P_H), .C(N_FILT), .N_OUT(D1_OUT), .W_BASE(A_D1_W), .B_BASE(A_D1_B)
  ) u_d1 (
    .clk, .rst_n, .wt_wr,
    .in_valid(pl_valid), .in_last(pl_last), .in_pos(pl_pos), .in_data(pl_data),
    .out_valid(d1_valid), .out_data(d1_data)
  );

  // Dense 2: 16 -> 16.
  logic d2_valid;
  q8_t  d2_data [D2_OUT];

  qdense #(.N_IN(D1_OUT), .N_OUT(D2_OUT), .W_BASE(A_D2_W), .B_BASE(A_D2_B)) u_d2 (
    .clk, .rst_n, .wt_wr,
    .in_valid(d1_valid), .in_data(d1_data),
    .out_valid(d2_valid), .out_data(d2_data)
  );

  // Dense 3: 16 -> 14, the network's output.
  qdense #(.N_IN(D2_OUT), .N_OUT(D3_OUT), .W_BASE(A_D3_W), .B_BASE(A_D3_B)) u_d3 (
    .clk, .rst_n, .wt_wr,
    .in_valid(d2_valid), .in_data(d2_data),
    .out_valid, .out_data
  );

  // Every weight write must land in the map.
  a_wt_addr: assert property (@(posedge clk) disable iff (!rst_n)
    wt_we |-> 32'(wt_addr) < A_END)
    else $error("weight write outside the map: %0d", wt_addr);

endmodule
