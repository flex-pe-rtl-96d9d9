// tb_simd_lbs: random self-check of the 5-stage SIMD barrel shifter.
// Each lane is compared with floor(v / 2^sh) for truncation and with a
// round-half-to-even of v / 2^sh, both computed with 64-bit integers,
// for all precisions and shift amounts 0..31.
module tb_simd_lbs;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  prec_e prec;
  word_t din, dout;
  logic [4:0] sh;
  logic rne;
  int checks = 0, failures = 0;

  simd_lbs dut (.prec, .din, .sh, .rne, .dout);

  task automatic check_all();
    int n;
    longint v, q, r, half, got, eq;
    n = nbits(int'(prec));
    #1;
    for (int l = 0; l < 32 / n; l++) begin
      v = lane_get(din, n, l);
      q = v >>> sh;                       // floor division
      r = v - (q <<< sh);
      if (rne && sh != 0) begin
        half = 64'sd1 <<< (sh - 1);
        if (r > half || (r == half && q[0])) q = q + 1;
      end
      eq = lane_get(32'(q), n, 0);
      got = lane_get(dout, n, l);
      checks++;
      if (got != eq) begin
        failures++;
        if (failures < 10) $display("FAIL prec=%0d lane=%0d din=%h sh=%0d rne=%0d got=%0d exp=%0d", prec, l, din, sh, rne, got, eq);
      end
    end
  endtask

  initial begin
    for (int p = 0; p < 4; p++) begin
      prec = prec_e'(p);
      for (int s = 0; s < 32; s++) begin
        for (int i = 0; i < 20; i++) begin
          din = $urandom; sh = 5'(s); rne = i[0];
          check_all();
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
