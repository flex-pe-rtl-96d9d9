// tb_flex_pe_iter: self-check of the iterative Flex-PE.
// For each precision, random SIMD words go through sigmoid, tanh, ReLU and
// MAC. Every lane is compared with real-valued references (1/(1+e^-x),
// tanh x, max(0,x), y + x*w) within a per-precision error bound, and the
// number of cycles from start to done is checked against
// hyp_iters + lin_iters + 2 (AF), lin_iters + 1 (MAC) and 1 (ReLU).
module tb_flex_pe_iter;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0, start, rne, ready, done;
  prec_e prec;
  op_e op;
  af_e af;
  word_t x_in, y_in, z_in, result;
  int checks = 0, failures = 0;
  real maxerr [4][4];

  flex_pe_iter dut (.*);
  always #5 clk = ~clk;

  function automatic real tol(int p, int f);
    // f: 0 relu, 1 sigmoid, 2 tanh, 3 mac
    case (p)
      0: return 1.0;   // 1-2 fraction bits: coarse
      1: return (f == 3) ? 0.1 : (f == 2) ? 0.16 : 0.09;
      2: return (f == 3) ? 0.04 : (f == 2) ? 0.1 : 0.05;
      default: return (f == 3) ? 0.002 : 0.012;
    endcase
  endfunction

  task automatic run(int p, int f);
    int n, cyc, expc;
    longint lx [8], ly [8], lz [8];
    real rx, ry, rz, r, g, err;
    n = nbits(p);
    prec = prec_e'(p);
    op = (f == 3) ? OP_MAC : OP_AF;
    af = (f == 1) ? AF_SIGMOID : (f == 2) ? AF_TANH : AF_RELU;
    x_in = x0_word(prec); y_in = '0; z_in = '0;
    for (int l = 0; l < 32 / n; l++) begin
      if (f == 3) begin
        lx[l] = from_real(($urandom % 2001) / 1000.0 - 1.0, n, n - 3);
        ly[l] = from_real(($urandom % 2001) / 2000.0 - 0.5, n, n - 3);
        lz[l] = from_real(($urandom % 1801) / 1000.0 - 0.9, n, n - 2);
        x_in = lane_set(x_in, n, l, lx[l]);
        y_in = lane_set(y_in, n, l, ly[l]);
      end else begin
        lz[l] = from_real(($urandom % 2001) / 1000.0 - 1.0, n, n - 2);
      end
      z_in = lane_set(z_in, n, l, lz[l]);
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 100) begin @(negedge clk); cyc++; end
    expc = (f == 0) ? 1 : (f == 3) ? lin_iters(prec) + 1 : hyp_iters(prec) + lin_iters(prec) + 2;
    checks++;
    if (cyc != expc) begin
      failures++;
      $display("FAIL latency prec=%0d f=%0d got %0d exp %0d", p, f, cyc, expc);
    end
    for (int l = 0; l < 32 / n; l++) begin
      rz = to_real(lz[l], n - 2);
      case (f)
        0: r = (rz > 0.0) ? rz : 0.0;
        1: r = sigmoid(rz);
        2: r = tanh_r(rz);
        default: r = to_real(ly[l], n - 3) + to_real(lx[l], n - 3) * rz;
      endcase
      g = to_real(lane_get(result, n, l), (f == 3) ? n - 3 : n - 2);
      err = absr(g - r);
      if (err > maxerr[p][f]) maxerr[p][f] = err;
      checks++;
      if (err > tol(p, f) || (f == 0 && err != 0.0)) begin
        failures++;
        if (failures < 20) $display("FAIL prec=%0d f=%0d lane=%0d in=%f got=%f exp=%f", p, f, l, rz, g, r);
      end
    end
  endtask

  initial begin
    start = 0; rne = 0; prec = PREC32; op = OP_AF; af = AF_RELU;
    x_in = '0; y_in = '0; z_in = '0;
    for (int p = 0; p < 4; p++) for (int f = 0; f < 4; f++) maxerr[p][f] = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++)
      for (int f = 0; f < 4; f++)
        for (int i = 0; i < 40; i++) run(p, f);
    for (int p = 0; p < 4; p++)
      $display("max error %0d-bit: relu %f sigmoid %f tanh %f mac %f", nbits(p),
               maxerr[p][0], maxerr[p][1], maxerr[p][2], maxerr[p][3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
