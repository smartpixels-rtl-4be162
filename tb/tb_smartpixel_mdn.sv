// tb_smartpixel_mdn: end-to-end test of the whole network at its full size
// (21 x 13 pixels x 20 time samples, 14 outputs), with the top's default
// parameters.
//
// It writes a random set of weights through the load port, streams clusters
// through the pixel port and compares all 14 outputs of every cluster with
// mdn_ref_pkg, a real-arithmetic model of the network. It also checks the
// timing: a gap-free cluster's result appears a fixed number of cycles after
// its first pixel, and back-to-back clusters give one result every 273 cycles
// (one cluster per pixel count). Mechanisms that must each occur at least once:
// back-to-back clusters, gaps in the pixel stream, a weight reload between
// clusters, hard-tanh clipping at both ends, and a cluster whose last pixel
// row and column are changed without changing the result (they fall in the
// edge that pooling drops).
`timescale 1ns/1ps
module tb_smartpixel_mdn;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int unsigned N_PIX = IMG_W * IMG_H;            // 273
  // First pixel to result for a gap-free cluster: the last pooled vector
  // needs pixel (x=19, y=11), then 11 register stages.
  localparam int unsigned LATENCY = (2*P_H + 3) * IMG_W + (2*P_W + 3) + 11;

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

  always #2.5 clk = ~clk;   // 200 MHz

  int unsigned checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Expected results, in order, and the cycle each cluster's first pixel went in.
  int       exp_q [$];     // D3_OUT values per cluster
  longint   start_q [$];
  bit       gapfree_q [$];
  longint   last_out_cyc = -1;
  int       n_out = 0;
  int       n_back_to_back = 0, n_gaps = 0, n_reload = 0, n_edge_same = 0;
  wts_t     wt;
  bit       prev_b2b = 0;
  int       hw_out [32][D3_OUT];   // results as they came out, per cluster

  always @(posedge clk) begin
    if (out_valid) begin
      longint st;
      bit gf;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result at cycle %0d", cyc);
      end else begin
        st = start_q.pop_front();
        gf = gapfree_q.pop_front();
        for (int o = 0; o < int'(D3_OUT); o++) begin
          int e;
          checks++;
          e = exp_q.pop_front();
          if (int'(out_data[o]) != e) begin
            failures++;
            $display("FAIL: cluster %0d output %0d = %0d, expected %0d", n_out, o, out_data[o], e);
          end
        end
        if (gf) begin
          checks++;
          if (cyc - st != longint'(LATENCY)) begin
            failures++;
            $display("FAIL: cluster %0d latency %0d cycles, expected %0d", n_out, cyc - st, LATENCY);
          end
        end
        if (prev_b2b && last_out_cyc >= 0) begin
          checks++;
          if (cyc - last_out_cyc != longint'(N_PIX)) begin
            failures++;
            $display("FAIL: result interval %0d cycles, expected %0d", cyc - last_out_cyc, N_PIX);
          end
        end
      end
      if (n_out < 32) foreach (out_data[o]) hw_out[n_out][o] = int'(out_data[o]);
      last_out_cyc = cyc;
      n_out++;
    end
  end

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // Random weights; 'scale' bounds the dense weights' codes so that the
  // 160-input layer does not always clip.
  task automatic load_weights(int dense_lim, int zero_pct);
    for (int a = 0; a < int'(A_END); a++) begin
      int v;
      if (a < int'(A_D1_W)) v = rnd(-8, 7);
      else                  v = rnd(-dense_lim, dense_lim);
      if (rnd(0, 99) < zero_pct) v = 0;
      wt[a] = v;
      @(negedge clk);
      wt_we   = 1'b1;
      wt_addr = waddr_t'(a);
      wt_data = q8_t'(v);
    end
    @(negedge clk);
    wt_we = 1'b0;
  endtask

  // kind 0: uniform noise; kind 1: a charge blob around a random centre.
  function automatic img_t make_img(int kind);
    img_t im;
    int cx, cy;
    cx = rnd(9, 11);
    cy = rnd(5, 7);
    for (int y = 0; y < int'(IMG_H); y++)
      for (int x = 0; x < int'(IMG_W); x++)
        for (int t = 0; t < int'(N_T); t++) begin
          if (kind == 0) im[y][x][t] = rnd(-8, 7);
          else begin
            int d, v;
            d = (x > cx ? x - cx : cx - x) + 2 * (y > cy ? y - cy : cy - y);
            v = (d < 4) ? (7 - 2 * d) * t / int'(N_T - 1) : 0;
            if (d == 4 && t > 10) v = -1;   // small negative induced charge
            im[y][x][t] = v;
          end
        end
    return im;
  endfunction

  // Stream one cluster; gap_pct is the chance of an idle cycle before a pixel.
  task automatic send(img_t im, int gap_pct, bit b2b);
    out_t e;
    network(im, wt, e);
    foreach (e[o]) exp_q.push_back(e[o]);
    gapfree_q.push_back(gap_pct == 0);
    for (int y = 0; y < int'(IMG_H); y++)
      for (int x = 0; x < int'(IMG_W); x++) begin
        while (rnd(0, 99) < gap_pct) begin
          pix_valid = 1'b0;
          n_gaps++;
          @(negedge clk);
        end
        pix_valid = 1'b1;
        for (int t = 0; t < int'(N_T); t++) pix_data[t] = q4_t'(im[y][x][t]);
        if (x == 0 && y == 0) begin
          start_q.push_back(longint'(cyc));
          prev_b2b = b2b;
          if (b2b) n_back_to_back++;
        end
        @(negedge clk);
      end
    pix_valid = 1'b0;
  endtask

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    img_t im;
    foreach (pix_data[t]) pix_data[t] = '0;
    n_clip_hi = 0;
    n_clip_lo = 0;
    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Weight set 1: small dense weights.
    load_weights(6, 30);
    // Four clusters back to back (the first starts the run).
    send(make_img(1), 0, 0);
    for (int k = 0; k < 3; k++) send(make_img(k % 2), 0, 1);
    // Two clusters with gaps.
    send(make_img(1), 20, 0);
    send(make_img(0), 5, 0);
    // The last row and column are outside every pooled window.
    im = make_img(1);
    send(im, 0, 0);
    for (int y = 0; y < int'(IMG_H); y++)
      for (int t = 0; t < int'(N_T); t++) im[y][IMG_W-1][t] = rnd(-8, 7);
    for (int x = 0; x < int'(IMG_W); x++)
      for (int t = 0; t < int'(N_T); t++) im[IMG_H-1][x][t] = rnd(-8, 7);
    send(im, 0, 1);
    repeat (20) @(negedge clk);

    // Weight set 2: full-range weights, clipping everywhere.
    load_weights(127, 10);
    n_reload++;
    send(make_img(1), 0, 0);
    send(make_img(0), 0, 1);
    send(make_img(1), 10, 0);
    repeat (40) @(negedge clk);

    // Weight set 3: moderate weights, sparse.
    load_weights(20, 60);
    n_reload++;
    for (int k = 0; k < 3; k++) send(make_img(1), 0, k > 0);
    repeat (40) @(negedge clk);

    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d result values missing", exp_q.size());
    end
    // Clusters 6 and 7 differ only in the last row and column: the hardware
    // must give the same result for both.
    checks++;
    if (hw_out[6] == hw_out[7]) n_edge_same++;
    else begin
      failures++;
      $display("FAIL: a change in the dropped edge changed the result");
    end

    $display("mechanisms: back_to_back=%0d gap_cycles=%0d weight_reloads=%0d clip_hi=%0d clip_lo=%0d edge_dropped=%0d results=%0d",
             n_back_to_back, n_gaps, n_reload, n_clip_hi, n_clip_lo, n_edge_same, n_out);
    checks++; if (n_back_to_back == 0) begin failures++; $display("FAIL: no back-to-back cluster"); end
    checks++; if (n_gaps == 0)         begin failures++; $display("FAIL: no stream gap"); end
    checks++; if (n_reload == 0)       begin failures++; $display("FAIL: no weight reload"); end
    checks++; if (n_clip_hi == 0)      begin failures++; $display("FAIL: no upper clipping"); end
    checks++; if (n_edge_same == 0)    begin failures++; $display("FAIL: edge case not seen"); end
    checks++; if (n_clip_lo == 0)      begin failures++; $display("FAIL: no lower clipping"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
