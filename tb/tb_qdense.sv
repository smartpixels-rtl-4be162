// tb_qdense: tests the parallel dense layer at the network's second-layer
// size (16 -> 16).
//
// Random Q1.7 weights and biases are loaded; random input vectors are then
// applied, some on consecutive cycles and some with idle cycles between.
// Each output vector is compared with mdn_ref_pkg::dense one cycle after its
// input, and out_valid must stay low when no input was given.
`timescale 1ns/1ps
module tb_qdense;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int NI = D1_OUT, NO = D2_OUT, N_VEC = 300;

  logic   clk = 1'b0, rst_n = 1'b1;
  wt_wr_t wt_wr = '0;
  logic   in_valid = 1'b0;
  q8_t    in_data [NI];
  logic   out_valid;
  q8_t    out_data [NO];

  qdense dut (.*);

  always #2.5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  wts_t wt;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [];
    int r [];
    foreach (in_data[i]) in_data[i] = '0;
    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = int'(A_D2_W); a < int'(A_D3_W); a++) begin
      wt[a] = int'($urandom_range(255)) - 128;
      if ($urandom_range(3) == 0) wt[a] = wt[a] / 8;
      wt_wr = '{we: 1'b1, addr: waddr_t'(a), data: q8_t'(wt[a])};
      @(negedge clk);
    end
    wt_wr = '{we: 1'b1, addr: waddr_t'(A_D3_W), data: 8'sd77};   // next layer's
    @(negedge clk);
    wt_wr = '0;
    x = new[NI];
    n_clip_hi = 0;
    n_clip_lo = 0;
    for (int n = 0; n < N_VEC; n++) begin
      foreach (x[i]) x[i] = int'($urandom_range(255)) - 128;
      if (n % 3 == 0) foreach (x[i]) x[i] = x[i] / 16;   // small inputs: unclipped results
      dense(NI, NO, x, wt, A_D2_W, A_D2_B, r);
      in_valid = 1'b1;
      foreach (in_data[i]) in_data[i] = q8_t'(x[i]);
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: vector %0d: no out_valid", n); end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'(out_data[o]) != r[o]) begin
          failures++;
          $display("FAIL: vector %0d output %0d = %0d expected %0d", n, o, out_data[o], r[o]);
        end
      end
      if (n % 2 == 0) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL: out_valid without input"); end
      end
    end
    checks++;
    if (n_clip_hi == 0 || n_clip_lo == 0) begin
      failures++;
      $display("FAIL: clipping not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
