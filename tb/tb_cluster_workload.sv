// tb_cluster_workload: a long back-to-back run of track-like clusters through
// the full-size network, as in batch inference over a test sample.
//
// Each cluster comes from a simple synthetic track model: a straight segment
// through a 100 um thick sensor with 50 um x 12.5 um pixels, crossing the
// mid-plane at a point uniform over the central 3 x 3 pixels, with random
// incidence angles. Charge is spread along the segment, collected over the
// 20 time samples (a linear rise over the first 8), log-compressed into
// [0, 1] with log(1 + q) / log(1 + Q_MAX) and quantised to Q1.3. This
// generator only stands in for a real simulated data set; its constants are
// illustrative.
//
// The weights are random, scaled per layer so that the results spread over
// many values rather than all clipping; a check requires that most clusters
// give distinct results.
//
// N_CLUSTERS clusters stream without a single idle cycle. Every result is
// compared with mdn_ref_pkg, results must come exactly one interval (273
// cycles) apart, and the whole run must take N_CLUSTERS * 273 cycles plus
// the pipeline's tail.
`timescale 1ns/1ps
module tb_cluster_workload;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int N_CLUSTERS = 300;
  localparam int N_PIX = IMG_W * IMG_H;
  localparam real Q_MAX = 40.0;      // ke, top of the compression range
  localparam real PI = 3.14159265358979;

  logic   clk = 1'b0;
  logic   rst_n = 1'b1;
  logic   wt_we = 1'b0;
  waddr_t wt_addr = '0;
  q8_t    wt_data = '0;
  logic   pix_valid = 1'b0;
  q4_t    pix_data [N_T];
  logic   out_valid;
  q8_t    out_data [D3_OUT];

  smartpixel_mdn dut (.*);

  always #2.5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  wts_t   wt;
  int     exp_q [$];
  int     n_out = 0;
  longint first_out = -1, last_out = -1, first_pix = -1;
  string  seen [string];  // distinct result vectors: the clusters must differ

  always @(posedge clk) begin
    if (out_valid) begin
      for (int o = 0; o < int'(D3_OUT); o++) begin
        int e;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL: result without a cluster");
          break;
        end
        e = exp_q.pop_front();
        if (int'(out_data[o]) != e) begin
          failures++;
          $display("FAIL: cluster %0d output %0d = %0d expected %0d", n_out, o, out_data[o], e);
        end
      end
      if (last_out >= 0) begin
        checks++;
        if (cyc - last_out != longint'(N_PIX)) begin
          failures++;
          $display("FAIL: interval %0d cycles", cyc - last_out);
        end
      end
      begin
        string key;
        key = "";
        foreach (out_data[o]) key = {key, $sformatf("%0d,", out_data[o])};
        seen[key] = key;
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      n_out++;
    end
  end

  function automatic real urand();
    return real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  // Synthetic cluster: returns Q1.3 codes [y][x][t].
  function automatic img_t make_cluster();
    img_t im;
    real q [IMG_H][IMG_W];
    real x0, y0, alpha, beta, dx, dy;
    x0 = (IMG_W / 2 - 1) + 3.0 * urand();          // mid-plane crossing, in pixels
    y0 = (IMG_H / 2 - 1) + 3.0 * urand();
    alpha = (urand() - 0.5) * PI * 0.5;            // +-45 degrees
    beta  = (urand() - 0.5) * PI * 0.5;
    dx = 100.0 * $tan(alpha) / 50.0;               // projected length, pixels
    dy = 100.0 * $tan(beta) / 12.5;
    foreach (q[y, x]) q[y][x] = 0.0;
    for (int s = 0; s < 64; s++) begin
      real f, px, py;
      f  = (s + 0.5) / 64.0 - 0.5;
      px = x0 + f * dx;
      py = y0 + f * dy;
      if (px >= 0.0 && px < IMG_W && py >= 0.0 && py < IMG_H)
        q[int'($floor(py))][int'($floor(px))] += 25.0 / 64.0;   // ~25 ke per track
    end
    for (int y = 0; y < int'(IMG_H); y++)
      for (int x = 0; x < int'(IMG_W); x++)
        for (int t = 0; t < int'(N_T); t++) begin
          real c, v;
          int k;
          c = q[y][x] * ((t < 8) ? (t + 1) / 8.0 : 1.0);
          v = $ln(1.0 + c) / $ln(1.0 + Q_MAX);
          k = int'($floor(v * 8.0));
          im[y][x][t] = (k > 7) ? 7 : k;
        end
    return im;
  endfunction

  initial begin
    repeat (N_CLUSTERS * N_PIX + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    img_t im;
    out_t e;
    foreach (pix_data[t]) pix_data[t] = '0;
    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < int'(A_END); a++) begin
      int v;
      if (a < int'(A_D1_W))      v = int'($urandom_range(6)) - 3;      // conv: +-3/8
      else if (a < int'(A_D2_W)) v = int'($urandom_range(24)) - 12;   // dense 1: +-12/128
      else                       v = int'($urandom_range(128)) - 64;  // dense 2, 3: +-1/2
      wt[a] = v;
      @(negedge clk);
      wt_we   = 1'b1;
      wt_addr = waddr_t'(a);
      wt_data = q8_t'(v);
    end
    @(negedge clk);
    wt_we = 1'b0;
    for (int k = 0; k < N_CLUSTERS; k++) begin
      im = make_cluster();
      network(im, wt, e);
      foreach (e[o]) exp_q.push_back(e[o]);
      for (int y = 0; y < int'(IMG_H); y++)
        for (int x = 0; x < int'(IMG_W); x++) begin
          pix_valid = 1'b1;
          for (int t = 0; t < int'(N_T); t++) pix_data[t] = q4_t'(im[y][x][t]);
          if (first_pix < 0) first_pix = cyc;
          @(negedge clk);
        end
    end
    pix_valid = 1'b0;
    repeat (20) @(negedge clk);
    checks++;
    if (n_out != N_CLUSTERS || exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results for %0d clusters", n_out, N_CLUSTERS);
    end
    checks++;
    if (last_out - first_pix != longint'((N_CLUSTERS - 1) * N_PIX + 261)) begin
      failures++;
      $display("FAIL: run took %0d cycles", last_out - first_pix);
    end
    checks++;
    if (seen.num() < N_CLUSTERS / 2) begin
      failures++;
      $display("FAIL: only %0d distinct results", seen.num());
    end
    $display("distinct results: %0d", seen.num());
    $display("clusters=%0d cycles=%0d, one result every %0d cycles", n_out, last_out - first_pix,
             (last_out - first_out) / (N_CLUSTERS - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
