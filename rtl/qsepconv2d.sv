// qsepconv2d: quantised depthwise-separable 3x3 convolution with hard-tanh,
// the network's first and second layers.
//
// A window3x3 line buffer forms the 3x3 neighbourhood of every output
// position of a 'valid' convolution over a W x H map of C_IN channels. The
// depthwise stage multiplies each channel's 9 pixels by that channel's own
// 3x3 kernel and sums them (full precision, 6 fraction bits, registered).
// The pointwise stage mixes the C_IN depthwise sums into C_OUT filters with a
// 1x1 kernel, adds one bias per filter and applies hard-tanh: drop 6 fraction
// bits (round toward minus infinity) and clip to Q1.3. All weights and biases
// are Q1.3, written through wt_wr at the addresses DW_BASE (kernel
// [c][ky][kx]), PW_BASE ([out][in]) and B_BASE ([out]); only data[3:0] is kept.
//
// Timing: one output per accepted input pixel once the window is complete,
// three cycles after that pixel (window register, depthwise register, output
// register). Throughput is one pixel per clock, with no stall. out_last marks
// the frame's last output.
//
// From the network description: 3x3 kernels, 5 filters, 4-bit weights with 3
// fraction bits, hard-tanh with the weights' quantisation, no activation
// between the depthwise and pointwise parts. Own choices: 'valid' padding
// (it reproduces the network's published dense-layer operation count), a
// single pointwise bias, full-precision depthwise sums, floor rounding.
module qsepconv2d
  import smartpixel_pkg::*;
#(
  parameter int unsigned W       = 21,
  parameter int unsigned H       = 13,
  parameter int unsigned C_IN    = 20,
  parameter int unsigned C_OUT   = 5,
  parameter int unsigned DW_BASE = A_L1_DW,
  parameter int unsigned PW_BASE = A_L1_PW,
  parameter int unsigned B_BASE  = A_L1_B
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wt_wr_t wt_wr,
  input  logic   in_valid,
  input  q4_t    in_data [C_IN],
  output logic   out_valid,
  output logic   out_last,
  output q4_t    out_data [C_OUT]
);

  // Depthwise sum of 9 Q1.3 x Q1.3 products: |sum| <= 9*64, 12 bits.
  localparam int unsigned DWS_W = 12;
  // Pointwise sum: |sum| <= C_IN * 576 * 8 + 8 * 64.
  localparam int unsigned PWS_W = $clog2(C_IN * 576 * 8 + 512) + 1;   // 18 for 20 channels
  typedef logic signed [DWS_W-1:0] dws_t;
  typedef logic signed [PWS_W-1:0] pws_t;

  q4_t w_dw [C_IN*N_TAPS];   // index c*9 + ky*3 + kx
  q4_t w_pw [C_OUT*C_IN];    // index o*C_IN + c
  q4_t b_pw [C_OUT];

  // Weight registers.
  always_ff @(posedge clk) begin
    if (wt_wr.we && 32'(wt_wr.addr) - DW_BASE < C_IN * N_TAPS)
      w_dw[32'(wt_wr.addr) - DW_BASE] <= wt_wr.data[3:0];
    if (wt_wr.we && 32'(wt_wr.addr) - PW_BASE < C_OUT * C_IN)
      w_pw[32'(wt_wr.addr) - PW_BASE] <= wt_wr.data[3:0];
    if (wt_wr.we && 32'(wt_wr.addr) - B_BASE < C_OUT)
      b_pw[32'(wt_wr.addr) - B_BASE] <= wt_wr.data[3:0];
  end

  // Stage 0: 3x3 window.
  logic win_valid, win_last;
  q4_t  win [3][3][C_IN];

  window3x3 #(.W(W), .H(H), .C(C_IN)) u_win (
    .clk, .rst_n, .in_valid, .in_data,
    .out_valid(win_valid), .out_last(win_last), .win
  );

  // Stage 1: depthwise 3x3 per channel.
  dws_t dws_d [C_IN];
  dws_t dws_q [C_IN];
  logic dw_valid, dw_last;

  always_comb begin
    for (int c = 0; c < int'(C_IN); c++) begin
      dws_d[c] = '0;
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++)
          dws_d[c] += DWS_W'(win[ky][kx][c] * w_dw[c*N_TAPS + ky*3 + kx]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dw_valid <= 1'b0;
      dw_last  <= 1'b0;
    end else begin
      dw_valid <= win_valid;
      dw_last  <= win_last;
    end
  end

  always_ff @(posedge clk) if (win_valid) dws_q <= dws_d;

  // Stage 2: pointwise 1x1, bias, hard-tanh.
  q4_t pw_d [C_OUT];

  always_comb begin
    for (int o = 0; o < int'(C_OUT); o++) begin
      pws_t acc;
      acc = pws_t'(b_pw[o]) <<< 6;        // Q1.3 bias aligned to 9 fraction bits
      for (int c = 0; c < int'(C_IN); c++)
        acc += pws_t'(dws_q[c]) * pws_t'(w_pw[o*C_IN + c]);
      pw_d[o] = htanh_q4(32'(acc), 6);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= dw_valid;
      out_last  <= dw_last;
    end
  end

  always_ff @(posedge clk) if (dw_valid) out_data <= pw_d;

endmodule
