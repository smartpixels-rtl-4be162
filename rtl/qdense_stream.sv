// qdense_stream: the first dense layer (160 inputs -> 16 outputs, hard-tanh),
// computed while the pooled feature map streams in.
//
// The flattened input vector is never stored. Each pooled position p delivers
// C Q1.7 values at once; the layer multiplies them by the C rows of the
// kernel that belong to p (flat index p*C + c) and adds the products to
// N_OUT accumulators, so C*N_OUT multiply-accumulates happen in one cycle.
// Position 0 restarts the accumulators from the biases. When the frame's last
// position (in_last) has been added, the sums (14 fraction bits) go through
// hard-tanh: drop 7 fraction bits, rounding toward minus infinity, and clip to
// Q1.7. Weights and biases are Q1.7, written through wt_wr at W_BASE (kernel
// [flat input][out], i.e. address W_BASE + (p*C + c)*N_OUT + o) and B_BASE.
//
// Timing: the result is registered and out_valid pulses one cycle after the
// last pooled vector; the next frame's position 0 may follow on the next
// cycle. No stall.
//
// From the network description: 16 units, 8-bit weights with 7 fraction bits,
// hard-tanh activation of the same format; the input is the flattened 8 x 4 x 5
// pooled map. Own choices: accumulating per position as the data arrives
// (instead of buffering the flattened vector), the flattening order
// (row, column, channel), biases, floor rounding.
module qdense_stream
  import smartpixel_pkg::*;
#(
  parameter int unsigned N_POS  = 32,
  parameter int unsigned C      = 5,
  parameter int unsigned N_OUT  = 16,
  parameter int unsigned W_BASE = A_D1_W,
  parameter int unsigned B_BASE = A_D1_B
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wt_wr_t wt_wr,
  input  logic   in_valid,
  input  logic   in_last,
  input  logic [$clog2(N_POS)-1:0] in_pos,
  input  q8_t    in_data [C],
  output logic   out_valid,
  output q8_t    out_data [N_OUT]
);

  localparam int unsigned N_IN = N_POS * C;
  // |acc| <= (N_IN + 1) * 2^14.
  localparam int unsigned ACC_W = $clog2((N_IN + 1) * 16384) + 1;     // 23 for 160 inputs
  typedef logic signed [ACC_W-1:0] acc_t;

  q8_t  w [N_IN*N_OUT];    // kernel, index i*N_OUT + o
  q8_t  b [N_OUT];
  acc_t acc [N_OUT];
  acc_t acc_d [N_OUT];

  always_ff @(posedge clk) begin
    if (wt_wr.we && 32'(wt_wr.addr) - W_BASE < N_IN * N_OUT)
      w[32'(wt_wr.addr) - W_BASE] <= wt_wr.data;
    if (wt_wr.we && 32'(wt_wr.addr) - B_BASE < N_OUT)
      b[32'(wt_wr.addr) - B_BASE] <= wt_wr.data;
  end

  always_comb begin
    for (int o = 0; o < int'(N_OUT); o++) begin
      acc_d[o] = (in_pos == '0) ? (acc_t'(b[o]) <<< 7) : acc[o];
      for (int c = 0; c < int'(C); c++)
        acc_d[o] += acc_t'(in_data[c]) * acc_t'(w[(32'(in_pos) * C + c) * N_OUT + o]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) acc <= acc_d;
    if (in_valid && in_last)
      for (int o = 0; o < int'(N_OUT); o++) out_data[o] <= htanh_q8(32'(acc_d[o]), 7);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end

  // The frame's last pooled vector is the one at the last position.
  a_last_pos: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_last) |-> (32'(in_pos) == N_POS - 1));

endmodule
