// tb_qsepconv2d: tests the separable convolution layer at the network's first
// layer size (21 x 13 pixels, 20 -> 5 channels).
//
// Random Q1.3 weights are written through the weight port and random frames
// are streamed in, first gap-free, then with random idle cycles. Every output
// (19 x 11 positions x 5 filters) is compared with mdn_ref_pkg::sepconv. It
// also checks the count of outputs per frame, the out_last marker on the
// frame's final output, and that an output leaves exactly three cycles after
// the pixel that completes its window.
`timescale 1ns/1ps
module tb_qsepconv2d;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int W = IMG_W, H = IMG_H, CI = N_T, CO = N_FILT;

  logic   clk = 1'b0, rst_n = 1'b1;
  wt_wr_t wt_wr = '0;
  logic   in_valid = 1'b0;
  q4_t    in_data [CI];
  logic   out_valid, out_last;
  q4_t    out_data [CO];

  qsepconv2d #(.W(W), .H(H), .C_IN(CI), .C_OUT(CO)) dut (.*);

  always #2.5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  wts_t wt;
  int   ref_out [][][];
  int   n_seen = 0;
  int   exp_q [$];          // expected codes, CO per output, in order
  longint due_q [$];        // cycle at which each output is due

  always @(posedge clk) begin
    if (out_valid) begin
      longint due;
      checks++;
      if (due_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        due = due_q.pop_front();
        if (cyc != due) begin
          failures++;
          $display("FAIL: output %0d at cycle %0d, due %0d", n_seen, cyc, due);
        end
        for (int o = 0; o < CO; o++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (int'(out_data[o]) != e) begin
            failures++;
            $display("FAIL: output %0d filter %0d = %0d expected %0d", n_seen, o, out_data[o], e);
          end
        end
        checks++;
        if (out_last != ((n_seen % ((W-2)*(H-2))) == (W-2)*(H-2) - 1)) begin
          failures++;
          $display("FAIL: out_last wrong at output %0d", n_seen);
        end
      end
      n_seen++;
    end
  end

  task automatic frame(int gap_pct);
    int img [][][];
    img = new[H];
    foreach (img[y]) begin
      img[y] = new[W];
      foreach (img[y][x]) begin
        img[y][x] = new[CI];
        foreach (img[y][x][c]) img[y][x][c] = int'($urandom_range(15)) - 8;
      end
    end
    sepconv(H, W, CI, CO, img, wt, A_L1_DW, A_L1_PW, A_L1_B, ref_out);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        while (int'($urandom_range(99)) < gap_pct) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        foreach (in_data[c]) in_data[c] = q4_t'(img[y][x][c]);
        if (x >= 2 && y >= 2) begin
          // this pixel was sampled at the coming posedge (cycle cyc); the
          // result is due 3 cycles later
          due_q.push_back(cyc + 3);
          for (int o = 0; o < CO; o++) exp_q.push_back(ref_out[y-2][x-2][o]);
        end
        @(negedge clk);
      end
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
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
    for (int a = 0; a < int'(A_L2_DW); a++) begin
      wt[a] = int'($urandom_range(15)) - 8;
      if ($urandom_range(3) == 0) wt[a] = 0;
      wt_wr = '{we: 1'b1, addr: waddr_t'(a), data: q8_t'(wt[a])};
      @(negedge clk);
    end
    // A write outside this layer's range must not disturb it.
    wt_wr = '{we: 1'b1, addr: waddr_t'(A_L2_DW), data: 8'sd5};
    @(negedge clk);
    wt_wr = '0;
    frame(0);
    frame(0);
    frame(25);
    repeat (10) @(negedge clk);
    checks++;
    if (n_seen != 3 * (W-2) * (H-2) || due_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d outputs, expected %0d", n_seen, 3 * (W-2) * (H-2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
