// tb_sa_array: GEMM through the 8x8 systolic mesh.
// The testbench feeds row r with W[r][t-r] and column c with X[t-c][c]
// (skewed, weight valid only inside the matrix) for K+ROWS+COLS-2 steps,
// waiting for busy to fall after each step, then compares every PE's acc
// with the real-valued sum_k W[r][k]*X[k][c] in every SIMD lane; an act
// with tanh is then checked against tanh(acc).
module tb_sa_array;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 8, C = 8, K = 5;
  logic clk = 0, rst_n = 0, rne = 0, clear, step, act, busy;
  prec_e prec;
  af_e af;
  word_t w_left [R], x_bottom [C], acc [R][C], act_out [R][C];
  logic wv_left [R];
  word_t W [R][K], X [K][C];
  int checks = 0, failures = 0;

  sa_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    int n;
    clear = 0; step = 0; act = 0; prec = PREC16; af = AF_TANH;
    for (int r = 0; r < R; r++) begin w_left[r] = '0; wv_left[r] = 0; end
    for (int c = 0; c < C; c++) x_bottom[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 1; p < 4; p++) begin
      prec = prec_e'(p);
      n = nbits(p);
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++)
        for (int l = 0; l < 32 / n; l++)
          W[r][k] = lane_set(W[r][k], n, l, from_real(($urandom % 1601) / 1000.0 - 0.8, n, n - 2));
      for (int k = 0; k < K; k++) for (int c = 0; c < C; c++)
        for (int l = 0; l < 32 / n; l++)
          X[k][c] = lane_set(X[k][c], n, l, from_real(($urandom % 801) / 2000.0 - 0.2, n, n - 3));
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int t = 0; t < K + R + C - 2; t++) begin
        for (int r = 0; r < R; r++) begin
          wv_left[r] = (t >= r) && (t - r < K);
          w_left[r] = wv_left[r] ? W[r][t - r] : '0;
        end
        for (int c = 0; c < C; c++) x_bottom[c] = ((t >= c) && (t - c < K)) ? X[t - c][c] : '0;
        step = 1; @(negedge clk); step = 0;
        while (busy) @(negedge clk);
      end
      act = 1; @(negedge clk); act = 0;
      @(negedge clk);
      while (busy) @(negedge clk);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        for (int l = 0; l < 32 / n; l++) begin
          real s, g;
          s = 0.0;
          for (int k = 0; k < K; k++)
            s += to_real(lane_get(W[r][k], n, l), n - 2) * to_real(lane_get(X[k][c], n, l), n - 3);
          g = to_real(lane_get(acc[r][c], n, l), n - 3);
          checks++;
          if (absr(g - s) > ((p == 3) ? 0.01 : (p == 2) ? 0.06 : 0.2)) begin
            failures++;
            if (failures < 10) $display("FAIL acc prec %0d (%0d,%0d) lane %0d got %f exp %f", p, r, c, l, g, s);
          end
          checks++;
          if (absr(to_real(lane_get(act_out[r][c], n, l), n - 2) - tanh_r(g)) > ((p == 3) ? 0.012 : 0.16)) begin
            failures++;
            if (failures < 10) $display("FAIL tanh prec %0d (%0d,%0d) lane %0d", p, r, c, l);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
