// qdense: a fully parallel quantised dense layer with hard-tanh, used for the
// network's second (16 -> 16) and third (16 -> 14) dense layers.
//
// All N_IN Q1.7 inputs arrive together; N_OUT x N_IN Q1.7 weights multiply
// them, a Q1.7 bias is added per output, and the sum (14 fraction bits) goes
// through hard-tanh: drop 7 fraction bits, rounding toward minus infinity, and
// clip to Q1.7. Weights are written through wt_wr at W_BASE (kernel
// [in][out], address W_BASE + i*N_OUT + o) and biases at B_BASE.
//
// Timing: the output is registered, out_valid one cycle after in_valid; a new
// vector may be accepted every cycle.
//
// From the network description: 16 and 14 units, 8-bit weights with 7
// fraction bits, hard-tanh activation (also on the last layer). Own choices:
// full parallelism (one vector per cycle), biases, floor rounding.
module qdense
  import smartpixel_pkg::*;
#(
  parameter int unsigned N_IN   = 16,
  parameter int unsigned N_OUT  = 16,
  parameter int unsigned W_BASE = A_D2_W,
  parameter int unsigned B_BASE = A_D2_B
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wt_wr_t wt_wr,
  input  logic   in_valid,
  input  q8_t    in_data [N_IN],
  output logic   out_valid,
  output q8_t    out_data [N_OUT]
);

  q8_t w [N_IN*N_OUT];    // kernel, index i*N_OUT + o
  q8_t b [N_OUT];
  // |sum| <= (N_IN + 1) * 128 * 128.
  localparam int unsigned ACC_W = $clog2((N_IN + 1) * 16384) + 1;     // 20 for 16 inputs
  typedef logic signed [ACC_W-1:0] acc_t;

  q8_t y_d [N_OUT];

  always_ff @(posedge clk) begin
    if (wt_wr.we && 32'(wt_wr.addr) - W_BASE < N_IN * N_OUT)
      w[32'(wt_wr.addr) - W_BASE] <= wt_wr.data;
    if (wt_wr.we && 32'(wt_wr.addr) - B_BASE < N_OUT)
      b[32'(wt_wr.addr) - B_BASE] <= wt_wr.data;
  end

  always_comb begin
    for (int o = 0; o < int'(N_OUT); o++) begin
      acc_t acc;
      acc = acc_t'(b[o]) <<< 7;
      for (int i = 0; i < int'(N_IN); i++)
        acc += acc_t'(in_data[i]) * acc_t'(w[i * N_OUT + o]);
      y_d[o] = htanh_q8(32'(acc), 7);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) if (in_valid) out_data <= y_d;

endmodule
