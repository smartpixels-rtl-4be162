// tb_qconv1x1: tests the 1x1 convolution layer (5 -> 5 channels).
//
// Random Q1.3 weights and biases are loaded, then random input vectors are
// applied with random idle cycles. Each output is compared with
// mdn_ref_pkg::conv1x1 and must appear exactly one cycle after its input,
// with in_last carried along.
`timescale 1ns/1ps
module tb_qconv1x1;
  import smartpixel_pkg::*;
  import mdn_ref_pkg::*;

  localparam int CI = N_FILT, CO = N_FILT, N_VEC = 400;

  logic   clk = 1'b0, rst_n = 1'b1;
  wt_wr_t wt_wr = '0;
  logic   in_valid = 1'b0, in_last = 1'b0;
  q4_t    in_data [CI];
  logic   out_valid, out_last;
  q4_t    out_data [CO];

  qconv1x1 dut (.*);

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
    int v [][][];
    int r [][][];
    int n_out = 0;
    foreach (in_data[c]) in_data[c] = '0;
    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = int'(A_L3_W); a < int'(A_D1_W); a++) begin
      wt[a] = int'($urandom_range(15)) - 8;
      wt_wr = '{we: 1'b1, addr: waddr_t'(a), data: q8_t'(wt[a])};
      @(negedge clk);
    end
    // Neighbouring layers' addresses must not disturb this one.
    wt_wr = '{we: 1'b1, addr: waddr_t'(A_L3_W - 1), data: 8'sd3};
    @(negedge clk);
    wt_wr = '{we: 1'b1, addr: waddr_t'(A_D1_W), data: 8'sd3};
    @(negedge clk);
    wt_wr = '0;
    v = new[1];
    v[0] = new[1];
    v[0][0] = new[CI];
    for (int n = 0; n < N_VEC; n++) begin
      bit lst;
      foreach (v[0][0][c]) v[0][0][c] = int'($urandom_range(15)) - 8;
      conv1x1(1, 1, CI, CO, v, wt, A_L3_W, A_L3_B, r);
      lst = ($urandom_range(9) == 0);
      in_valid = 1'b1;
      in_last  = lst;
      foreach (in_data[c]) in_data[c] = q4_t'(v[0][0][c]);
      @(negedge clk);
      in_valid = 1'b0;
      in_last  = 1'b0;
      checks++;
      if (!out_valid || out_last != lst) begin
        failures++;
        $display("FAIL: vector %0d: out_valid=%0b out_last=%0b", n, out_valid, out_last);
      end
      for (int o = 0; o < CO; o++) begin
        checks++;
        if (int'(out_data[o]) != r[0][0][o]) begin
          failures++;
          $display("FAIL: vector %0d filter %0d = %0d expected %0d", n, o, out_data[o], r[0][0][o]);
        end
      end
      n_out++;
      if ($urandom_range(2) == 0) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL: out_valid without input"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
