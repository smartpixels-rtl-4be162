// window3x3: turns a raster stream of pixels into 3x3 neighbourhoods for a
// 'valid' (unpadded) 3x3 convolution.
//
// Pixels arrive one per accepted cycle (in_valid high), row by row, x fastest,
// W pixels per row and H rows per frame; cycles with in_valid low are simply
// skipped, so the stream may have gaps. Two line buffers hold the previous two
// rows; each accepted pixel pushes one new 3-pixel column into a 3x3 shift
// register. A window is emitted, one cycle after the pixel that completes it,
// whenever that pixel sits at x >= 2 and y >= 2, so a frame yields
// (W-2) x (H-2) windows. out_last marks the frame's final window.
// win[r][c] is the pixel at row (y-2+r), column (x-2+c) of the window whose
// bottom-right pixel is (x, y). The row/column counters are reset by rst_n and
// wrap at the end of each frame, so consecutive frames can follow
// back to back. Frame alignment relies on reset only; there is no start-of-
// frame input.
module window3x3
  import smartpixel_pkg::*;
#(
  parameter int unsigned W = 21,
  parameter int unsigned H = 13,
  parameter int unsigned C = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  q4_t  in_data [C],
  output logic out_valid,
  output logic out_last,
  output q4_t  win [3][3][C]
);

  localparam int unsigned XW = $clog2(W);
  localparam int unsigned YW = $clog2(H);

  logic [XW-1:0] x;
  logic [YW-1:0] y;
  q4_t lb0 [W][C];   // row y-1
  q4_t lb1 [W][C];   // row y-2

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x         <= '0;
      y         <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid && (x >= XW'(2)) && (y >= YW'(2));
      out_last  <= in_valid && (x == XW'(W - 1)) && (y == YW'(H - 1));
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
    if (in_valid) begin
      lb1[x] <= lb0[x];
      lb0[x] <= in_data;
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
      end
      win[0][2] <= lb1[x];
      win[1][2] <= lb0[x];
      win[2][2] <= in_data;
    end
  end

endmodule
