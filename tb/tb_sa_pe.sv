// tb_sa_pe: self-check of one systolic processing engine.
// For each precision and activation: clear, K steps of acc += x*w with
// random operands (some steps without a valid weight, which must leave acc
// unchanged), then act. acc is compared with the real-valued sum of
// products, act_out with AF(acc); the weight/input buffers must forward
// the words of the last step.
module tb_sa_pe;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0, rne = 0, clear, step, act, w_vin, w_vout, busy;
  prec_e prec;
  af_e af;
  word_t w_in, x_in, w_out, x_out, acc, act_out;
  int checks = 0, failures = 0;

  sa_pe dut (.*);
  always #5 clk = ~clk;

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  function automatic real tol(int p);
    case (p)
      0: return 1.0;
      1: return 0.2;
      2: return 0.1;
      default: return 0.02;
    endcase
  endfunction

  initial begin
    clear = 0; step = 0; act = 0; w_vin = 0; w_in = '0; x_in = '0; prec = PREC16; af = AF_SIGMOID;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 1; p < 4; p++)
      for (int a = 0; a < 3; a++) begin
        int n;
        real s [8], g, r;
        n = nbits(p);
        prec = prec_e'(p);
        af = (a == 0) ? AF_RELU : (a == 1) ? AF_SIGMOID : AF_TANH;
        for (int l = 0; l < 8; l++) s[l] = 0.0;
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
        for (int k = 0; k < 6; k++) begin
          w_vin = (k != 3);
          for (int l = 0; l < 32 / n; l++) begin
            longint wv, xv;
            wv = from_real(($urandom % 1601) / 1000.0 - 0.8, n, n - 2);
            xv = from_real(($urandom % 801) / 2000.0 - 0.2, n, n - 3);
            w_in = lane_set(w_in, n, l, wv);
            x_in = lane_set(x_in, n, l, xv);
            if (w_vin) s[l] += to_real(wv, n - 2) * to_real(xv, n - 3);
          end
          step = 1; @(negedge clk); step = 0;
          checks++;
          if (w_out != w_in || x_out != x_in || w_vout != w_vin) begin
            failures++; $display("FAIL forwarding");
          end
          while (busy) @(negedge clk);
        end
        act = 1; @(negedge clk); act = 0;
        wait_idle();
        for (int l = 0; l < 32 / n; l++) begin
          g = to_real(lane_get(acc, n, l), n - 3);
          checks++;
          if (absr(g - s[l]) > tol(p)) begin
            failures++; $display("FAIL acc prec %0d lane %0d got %f exp %f", p, l, g, s[l]);
          end
          r = (a == 0) ? ((g > 0) ? g : 0.0) : (a == 1) ? sigmoid(g) : tanh_r(g);
          g = to_real(lane_get(act_out, n, l), n - 2);
          checks++;
          if (absr(g - r) > tol(p)) begin
            failures++; $display("FAIL act prec %0d af %0d lane %0d got %f exp %f", p, a, l, g, r);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
