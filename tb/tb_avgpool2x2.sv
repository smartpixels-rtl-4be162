// tb_avgpool2x2: tests 2x2 average pooling on the network's 17 x 9 x 5 map.
//
// Random Q1.3 frames stream in, with and without idle cycles. The 8 x 4
// pooled vectors are compared with mdn_ref_pkg::pool (Q1.7 codes), together
// with their position index, out_last on the frame's last vector, and the
// timing: each vector leaves one cycle after the pixel at its bottom-right.
`timescale 1ns/1ps
module tb_avgpool2x2;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int W = C2_W, H = C2_H, C = N_FILT, NP = P_W * P_H;

  logic clk = 1'b0, rst_n = 1'b1;
  logic in_valid = 1'b0;
  q4_t  in_data [C];
  logic out_valid, out_last;
  logic [$clog2(NP)-1:0] out_pos;
  q8_t  out_data [C];

  avgpool2x2 #(.W(W), .H(H), .C(C)) dut (.*);

  always #2.5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int exp_q [$];       // C codes per pooled vector
  int pos_q [$];
  longint due_q [$];
  int n_seen = 0;

  always @(posedge clk) begin
    if (out_valid) begin
      checks++;
      if (due_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        longint due;
        int p;
        due = due_q.pop_front();
        p   = pos_q.pop_front();
        if (cyc != due || int'(out_pos) != p || out_last != (p == NP - 1)) begin
          failures++;
          $display("FAIL: vector %0d at cycle %0d (due %0d) pos %0d (exp %0d) last %0b",
                   n_seen, cyc, due, out_pos, p, out_last);
        end
        for (int c = 0; c < C; c++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (int'(out_data[c]) != e) begin
            failures++;
            $display("FAIL: vector %0d ch %0d = %0d expected %0d", n_seen, c, out_data[c], e);
          end
        end
      end
      n_seen++;
    end
  end

  task automatic frame(int gap_pct, bit extreme);
    int img [][][];
    int r [][][];
    img = new[H];
    foreach (img[y]) begin
      img[y] = new[W];
      foreach (img[y][x]) begin
        img[y][x] = new[C];
        foreach (img[y][x][c])
          img[y][x][c] = extreme ? (($urandom_range(1) == 0) ? -8 : 7) : int'($urandom_range(15)) - 8;
      end
    end
    pool(H, W, C, img, r);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        while (int'($urandom_range(99)) < gap_pct) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        foreach (in_data[c]) in_data[c] = q4_t'(img[y][x][c]);
        if ((x % 2) == 1 && (y % 2) == 1 && x < 2 * P_W && y < 2 * P_H) begin
          due_q.push_back(cyc + 1);
          pos_q.push_back((y / 2) * P_W + x / 2);
          for (int c = 0; c < C; c++) exp_q.push_back(r[y/2][x/2][c]);
        end
        @(negedge clk);
      end
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_data[c]) in_data[c] = '0;
    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    frame(0, 0);
    frame(0, 1);
    frame(30, 0);
    frame(0, 0);
    repeat (5) @(negedge clk);
    checks++;
    if (n_seen != 4 * NP || due_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d vectors, expected %0d", n_seen, 4 * NP);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
