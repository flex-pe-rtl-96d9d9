// simd_lbs: 5-stage SIMD logarithmic barrel shifter.
//
// Shifts every SIMD lane of a 32-bit word arithmetically right by the same
// amount sh (0..31), in five stages of 1, 2, 4, 8 and 16 bit positions, each
// stage a row of 2:1 muxes enabled by one bit of sh. A mux whose source bit
// would come from the lane above takes the lane's sign instead, so lanes
// never mix; a shift by the lane width or more leaves only sign bits. One
// such slice is built per lane of each precision and prec picks the set.
// This is the paper's "5-stage SIMD Logarithmic barrel shifter" used as the
// 2^-i scaler of every CORDIC stage.
//
// With rne set the result is rounded to nearest, ties to even (the paper
// says the unit supports a data-parallel round-to-even mode). Each stage
// also passes on, per lane, the last bit shifted out (guard) and the OR of
// all bits shifted out before it (sticky); the lane is incremented when
// guard and (sticky or result LSB) are set. Purely combinational.
module simd_lbs
  import flexpe_pkg::*;
(
  input  prec_e       prec,
  input  word_t       din,
  input  logic [4:0]  sh,
  input  logic        rne,
  output word_t       dout
);

  // One shifter slice per lane of every precision; prec selects the set.
  word_t res [4];

  for (genvar p = 0; p < 4; p++) begin : g_prec
    localparam int N = 4 << p;
    for (genvar l = 0; l < WORD / N; l++) begin : g_lane
      logic signed [N-1:0] v [6];
      logic                g [6], s [6];
      assign v[0] = din[l*N +: N];
      assign g[0] = 1'b0;
      assign s[0] = 1'b0;
      for (genvar st = 0; st < 5; st++) begin : g_st
        localparam int A = 1 << st;
        // bits shifted out by this stage: the top one is the new guard,
        // the rest and the old guard join the sticky bit
        logic [N-1:0] ext;
        logic         gn, sn;
        if (A <= N) begin : g_in
          assign gn  = v[st][A-1];
          assign ext = (A > 1) ? N'(v[st] & N'((1 << (A - 1)) - 1)) : '0;
        end else begin : g_over
          assign gn  = v[st][N-1];
          assign ext = v[st];
        end
        assign sn = s[st] | g[st] | (|ext);
        assign v[st+1] = sh[st] ? (v[st] >>> A) : v[st];
        assign g[st+1] = sh[st] ? gn : g[st];
        assign s[st+1] = sh[st] ? sn : s[st];
      end
      // round to nearest, ties to even
      logic rnd;
      assign rnd = rne & g[5] & (s[5] | v[5][0]);
      assign res[p][l*N +: N] = v[5] + N'(rnd);
    end
  end

  assign dout = res[prec];

endmodule
