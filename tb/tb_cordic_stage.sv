// tb_cordic_stage: random self-check of one SIMD CORDIC micro-rotation.
// A lane-by-lane integer model of the three update equations
// (hyperbolic rotation, linear rotation, linear vectoring, pass) is
// compared with the stage for every precision and shift index 1..10.
module tb_cordic_stage;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  prec_e prec;
  cmode_e mode;
  logic [4:0] iter;
  logic rne;
  word_t x_in, y_in, z_in, x_out, y_out, z_out;
  int checks = 0, failures = 0;

  cordic_stage dut (.*);

  function automatic longint e_const(int n, int i, bit hyp);
    real t;
    if (!hyp) return (i <= n - 2) ? (64'sd1 <<< (n - 2 - i)) : 0;
    t = 2.0 ** (-i);
    return from_real(0.5 * $ln((1.0 + t) / (1.0 - t)), n, n - 2);
  endfunction

  task automatic check_all();
    int n;
    longint x, y, z, xs, ys, d, ex, ey, ez, e, gx, gy, gz;
    n = nbits(int'(prec));
    #1;
    for (int l = 0; l < 32 / n; l++) begin
      x = lane_get(x_in, n, l); y = lane_get(y_in, n, l); z = lane_get(z_in, n, l);
      xs = x >>> iter; ys = y >>> iter;
      e = e_const(n, int'(iter), mode == CM_HYP_ROT);
      if (mode == CM_LIN_VEC) d = ((x < 0) == (y < 0)) ? -1 : 1;
      else                    d = (z < 0) ? -1 : 1;
      case (mode)
        CM_HYP_ROT: begin ex = x + d * ys; ey = y + d * xs; ez = z - d * e; end
        CM_LIN_ROT, CM_LIN_VEC: begin
          if (iter > n - 2) begin ex = x; ey = y; ez = z; end
          else begin ex = x; ey = y + d * xs; ez = z - d * e; end
        end
        default: begin ex = x; ey = y; ez = z; end
      endcase
      ex = lane_get(32'(ex), n, 0); ey = lane_get(32'(ey), n, 0); ez = lane_get(32'(ez), n, 0);
      gx = lane_get(x_out, n, l); gy = lane_get(y_out, n, l); gz = lane_get(z_out, n, l);
      checks += 3;
      // the ROM may differ from the real-valued constant by one LSB
      if (gx != ex) failures++;
      if (gy != ey) failures++;
      if (gz - ez > 1 || ez - gz > 1) failures++;
      if ((gx != ex || gy != ey || gz - ez > 1 || ez - gz > 1) && failures < 10)
        $display("FAIL prec=%0d mode=%0d i=%0d lane=%0d got %0d %0d %0d exp %0d %0d %0d", prec, mode, iter, l, gx, gy, gz, ex, ey, ez);
    end
  endtask

  initial begin
    rne = 1'b0;
    for (int p = 0; p < 4; p++)
      for (int m = 0; m < 4; m++)
        for (int i = 1; i <= 10; i++)
          for (int r = 0; r < 10; r++) begin
            prec = prec_e'(p); mode = cmode_e'(m); iter = 5'(i);
            x_in = $urandom; y_in = $urandom; z_in = $urandom;
            check_all();
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
