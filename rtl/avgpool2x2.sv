// avgpool2x2: 2x2 average pooling, stride 2, of a raster stream of Q1.3
// feature vectors, producing Q1.7 values.
//
// Inputs arrive one position per accepted cycle, x fastest, W x H positions
// per frame, with gaps allowed. On even rows the sum of each horizontal pair
// is kept in a one-row buffer of W/2 partial sums; on odd rows the pair sum of
// the current row is added to it and the pooled vector leaves one cycle after
// the pixel at the window's bottom-right. An odd last column or row has no
// partner and is dropped (floor), so a 17 x 9 map gives 8 x 4 outputs.
// The mean of four Q1.3 numbers is exact in 5 fraction bits; shifting the
// 4-term sum left by 2 gives it in Q1.7, so no rounding occurs; the two
// least significant bits of every output are therefore always zero. They are
// kept so that the output has the 8-bit format the dense layers expect.
//
// Outputs: out_pos is the pooled position in raster order (row * (W/2) + col),
// the index the following dense layer uses; out_last marks the frame's final
// pooled vector. Counters reset with rst_n and wrap at frame end.
//
// From the network description: 2x2 pooling, 8-bit output with 7 fraction bits
// and a sign bit, no activation. Own choice: the stride and the dropping of the
// odd edge, which match the published dense-layer operation count.
module avgpool2x2
  import smartpixel_pkg::*;
#(
  parameter int unsigned W = 17,
  parameter int unsigned H = 9,
  parameter int unsigned C = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  q4_t  in_data [C],
  output logic out_valid,
  output logic out_last,
  output logic [$clog2((W/2)*(H/2))-1:0] out_pos,
  output q8_t  out_data [C]
);

  localparam int unsigned PW = W / 2;
  localparam int unsigned PH = H / 2;
  localparam int unsigned XW = $clog2(W);
  localparam int unsigned YW = $clog2(H);
  localparam int unsigned PSW = $clog2(PW * PH);

  typedef logic signed [5:0] s6_t;  // sum of up to 4 Q1.3 values

  logic [XW-1:0] x;
  logic [YW-1:0] y;
  q4_t  left [C];          // previous pixel of this row (even column)
  s6_t  rowsum [PW][C];    // pair sums of the upper row

  localparam int unsigned PXW = (PW > 1) ? $clog2(PW) : 1;
  logic [PXW-1:0] px;      // pooled column of the current pixel
  assign px = PXW'(x >> 1);

  logic in_window, bottom_right;
  assign in_window    = (x < XW'(2 * PW)) && (y < YW'(2 * PH));
  assign bottom_right = in_window && x[0] && y[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x         <= '0;
      y         <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_pos   <= '0;
    end else begin
      out_valid <= in_valid && bottom_right;
      out_last  <= in_valid && bottom_right && (x == XW'(2*PW - 1)) && (y == YW'(2*PH - 1));
      if (in_valid && bottom_right)
        out_pos <= PSW'((32'(y) >> 1) * PW + (32'(x) >> 1));
      if (in_valid) begin
        if (x == XW'(W - 1)) begin
          x <= '0;
          y <= (y == YW'(H - 1)) ? '0 : y + YW'(1);
        end else begin
          x <= x + XW'(1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_window) begin
      if (!x[0]) begin
        left <= in_data;
      end else begin
        for (int c = 0; c < int'(C); c++) begin
          s6_t pair;
          q8_t sum4;
          pair = s6_t'(left[c]) + s6_t'(in_data[c]);
          sum4 = q8_t'(rowsum[px][c]) + q8_t'(pair);
          if (!y[0]) rowsum[px][c] <= pair;
          else       out_data[c] <= sum4 <<< 2;
        end
      end
    end
  end

endmodule
