// tb_simd_addsub: random self-check of the SIMD add/sub unit.
// For every precision, random operands and per-lane subtract controls are
// applied and each lane is compared with (a +/- b) mod 2^N computed lane by
// lane; the test also checks that carries never cross a lane boundary
// (all-ones plus one in every lane).
module tb_simd_addsub;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  prec_e prec;
  word_t a, b, sum;
  logic [SEGS-1:0] sub;
  int checks = 0, failures = 0;

  simd_addsub dut (.prec, .a, .b, .sub, .sum);

  task automatic check_all();
    int n;
    longint ea, eb, es, got;
    n = nbits(int'(prec));
    #1;
    for (int l = 0; l < 32 / n; l++) begin
      ea = lane_get(a, n, l);
      eb = lane_get(b, n, l);
      es = sub[l * n / 4] ? ea - eb : ea + eb;
      es = lane_get(32'(es), n, 0);
      got = lane_get(sum, n, l);
      checks++;
      if (got != es) begin
        failures++;
        if (failures < 10) $display("FAIL prec=%0d lane=%0d a=%h b=%h sub=%b got=%0d exp=%0d", prec, l, a, b, sub, got, es);
      end
    end
  endtask

  initial begin
    for (int p = 0; p < 4; p++) begin
      prec = prec_e'(p);
      a = '1; b = 32'h1111_1111; sub = '0;   // carry must stop at every lane
      check_all();
      for (int i = 0; i < 400; i++) begin
        a = $urandom; b = $urandom; sub = SEGS'($urandom);
        check_all();
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
