// qconv1x1: quantised 1x1 (pointwise) convolution with hard-tanh, the
// network's third layer.
//
// Each accepted position's C_IN Q1.3 values are mixed into C_OUT filters by a
// C_OUT x C_IN kernel of Q1.3 weights plus one Q1.3 bias per filter; the sum
// (6 fraction bits) goes through hard-tanh: drop 3 fraction bits, rounding
// toward minus infinity, and clip to Q1.3. Weights are written through wt_wr
// at W_BASE ([out][in]) and B_BASE ([out]); only data[3:0] is kept.
//
// Timing: one output per input, registered, one cycle after it; no stall.
// in_last is carried along to out_last.
//
// From the network description: 5 filters, 1x1 kernel, 4-bit weights with 3
// fraction bits, hard-tanh activation. Own choices: a bias per filter and floor
// rounding.
module qconv1x1
  import smartpixel_pkg::*;
#(
  parameter int unsigned C_IN   = 5,
  parameter int unsigned C_OUT  = 5,
  parameter int unsigned W_BASE = A_L3_W,
  parameter int unsigned B_BASE = A_L3_B
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wt_wr_t wt_wr,
  input  logic   in_valid,
  input  logic   in_last,
  input  q4_t    in_data [C_IN],
  output logic   out_valid,
  output logic   out_last,
  output q4_t    out_data [C_OUT]
);

  q4_t w [C_OUT*C_IN];   // index o*C_IN + c
  q4_t b [C_OUT];

  always_ff @(posedge clk) begin
    if (wt_wr.we && 32'(wt_wr.addr) - W_BASE < C_OUT * C_IN)
      w[32'(wt_wr.addr) - W_BASE] <= wt_wr.data[3:0];
    if (wt_wr.we && 32'(wt_wr.addr) - B_BASE < C_OUT)
      b[32'(wt_wr.addr) - B_BASE] <= wt_wr.data[3:0];
  end

  // |sum| <= C_IN * 64 + 64 (bias at 6 fraction bits).
  localparam int unsigned ACC_W = $clog2(C_IN * 64 + 64) + 1;         // 10 for 5 channels
  typedef logic signed [ACC_W-1:0] acc_t;

  q4_t y_d [C_OUT];

  always_comb begin
    for (int o = 0; o < int'(C_OUT); o++) begin
      acc_t acc;
      acc = acc_t'(b[o]) <<< 3;
      for (int c = 0; c < int'(C_IN); c++)
        acc += acc_t'(in_data[c]) * acc_t'(w[o*C_IN + c]);
      y_d[o] = htanh_q4(32'(acc), 3);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
    end
  end

  always_ff @(posedge clk) if (in_valid) out_data <= y_d;

endmodule
