// tb_qdense_stream: tests the first dense layer (32 positions x 5 values =
// 160 inputs -> 16 outputs) fed one pooled vector at a time.
//
// Random Q1.7 weights and biases are loaded. Frames of 32 random pooled
// vectors are applied with random idle cycles, and frames follow each other
// directly (position 0 of the next frame on the cycle after the last one).
// The 16 outputs are compared with mdn_ref_pkg::dense on the flattened
// vector; out_valid must pulse exactly one cycle after the frame's last
// vector. Two weight scales are used so that results both inside and at the
// clipping limits are seen.
`timescale 1ns/1ps
module tb_qdense_stream;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int NP = P_W * P_H, C = N_FILT, NO = D1_OUT;

  logic   clk = 1'b0, rst_n = 1'b1;
  wt_wr_t wt_wr = '0;
  logic   in_valid = 1'b0, in_last = 1'b0;
  logic [$clog2(NP)-1:0] in_pos = '0;
  q8_t    in_data [C];
  logic   out_valid;
  q8_t    out_data [NO];

  qdense_stream dut (.*);

  always #2.5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  wts_t wt;
  int n_valid_pulses = 0;
  always @(posedge clk) if (out_valid) n_valid_pulses++;

  task automatic load(int lim);
    for (int a = int'(A_D1_W); a < int'(A_D2_W); a++) begin
      wt[a] = int'($urandom_range(2 * lim)) - lim;
      wt_wr = '{we: 1'b1, addr: waddr_t'(a), data: q8_t'(wt[a])};
      @(negedge clk);
    end
    wt_wr = '0;
  endtask

  // One frame; returns after the last vector has been applied (at negedge).
  task automatic frame(int gap_pct, output int r []);
    int flat [];
    flat = new[NP * C];
    foreach (flat[i]) flat[i] = int'($urandom_range(255)) - 128;
    dense(NP * C, NO, flat, wt, A_D1_W, A_D1_B, r);
    for (int p = 0; p < NP; p++) begin
      while (p > 0 && int'($urandom_range(99)) < gap_pct) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      in_pos   = 5'(p);
      in_last  = (p == NP - 1);
      foreach (in_data[c]) in_data[c] = q8_t'(flat[p * C + c]);
      @(negedge clk);
    end
    in_valid = 1'b0;
    in_last  = 1'b0;
  endtask

  task automatic compare(int r [], int k);
    checks++;
    if (!out_valid) begin
      failures++;
      $display("FAIL: frame %0d: no out_valid one cycle after the last vector", k);
    end
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (int'(out_data[o]) != r[o]) begin
        failures++;
        $display("FAIL: frame %0d output %0d = %0d expected %0d", k, o, out_data[o], r[o]);
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r [];
    int k = 0;
    foreach (in_data[c]) in_data[c] = '0;
    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    n_clip_hi = 0;
    n_clip_lo = 0;
    load(6);
    for (int f = 0; f < 4; f++) begin
      // The out_valid check happens at the negedge right after the last
      // vector, before the next frame starts, so frames run back to back.
      frame(f == 2 ? 30 : 0, r);
      compare(r, k++);
    end
    load(127);
    for (int f = 0; f < 3; f++) begin
      frame(10, r);
      compare(r, k++);
    end
    @(negedge clk);
    checks++;
    if (n_valid_pulses != k) begin
      failures++;
      $display("FAIL: %0d out_valid pulses for %0d frames", n_valid_pulses, k);
    end
    checks++;
    if (n_clip_hi == 0 || n_clip_lo == 0) begin
      failures++;
      $display("FAIL: clipping not exercised (%0d high, %0d low)", n_clip_hi, n_clip_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
