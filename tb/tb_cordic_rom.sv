// tb_cordic_rom: checks the CORDIC constants against real arithmetic.
// atanh(2^-i) = ln((1+t)/(1-t))/2 and 2^-i, scaled by 2^(N-2) and rounded,
// must match every lane within one LSB (the ROM rounds twice).
module tb_cordic_rom;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  prec_e prec;
  logic hyp;
  logic [4:0] iter;
  word_t e;
  int checks = 0, failures = 0;

  cordic_rom dut (.prec, .hyp, .iter, .e);

  initial begin
    for (int p = 0; p < 4; p++) begin
      for (int h = 0; h < 2; h++) begin
        for (int i = 1; i <= 16; i++) begin
          int n;
          real t, ref_v;
          longint ev, got;
          prec = prec_e'(p); hyp = h[0]; iter = 5'(i);
          n = nbits(p);
          #1;
          t = 2.0 ** (-i);
          ref_v = h ? 0.5 * $ln((1.0 + t) / (1.0 - t)) : t;
          ev = from_real(ref_v, n, n - 2);
          if (!h && i > n - 2) ev = 0;
          for (int l = 0; l < 32 / n; l++) begin
            got = lane_get(e, n, l);
            checks++;
            if (got - ev > 1 || ev - got > 1) begin
              failures++;
              $display("FAIL prec=%0d hyp=%0d i=%0d lane=%0d got=%0d exp=%0d", p, h, i, l, got, ev);
            end
          end
        end
      end
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
