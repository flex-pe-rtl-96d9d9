// simd_addsub: SIMD configurable add/subtract on a 32-bit word.
//
// A single ripple-carry chain of 1-bit full adders (written per 4-bit
// segment), as in the paper's
// "SIMD Configurable Add_Sub Block": each b input passes through a 2:1 mux
// that selects b or ~b, and at every 4-bit segment boundary a carry-break
// mux chooses between the carry out of the segment below and the lane's own
// subtract bit. Which boundaries break the chain follows the precision:
// all seven for 8x4-bit, every second for 4x8-bit, the middle one for
// 2x16-bit and none for 1x32-bit. Each lane wraps modulo 2^N.
//
// sub[k] is the subtract control of segment k; a lane subtracts when the
// bit of its lowest segment is set (the other bits of the lane are unused).
// Per-lane control is needed because every CORDIC lane has its own
// rotation direction. Purely combinational.
module simd_addsub
  import flexpe_pkg::*;
(
  input  prec_e            prec,
  input  word_t            a,
  input  word_t            b,
  input  logic [SEGS-1:0]  sub,
  output word_t            sum
);

  // Carry out of each 4-bit segment; c[k] is the carry into segment k.
  logic [SEGS-1:0] c;
  logic [SEGS-1:0] lsub;   // subtract control of the lane holding segment k

  assign c[0] = lsub[0];

  for (genvar k = 0; k < SEGS; k++) begin : g_seg
    logic [3:0] bs;
    logic       cb;
    // b / ~b select of the lane
    always_comb begin
      lsub[k] = sub[k & ~(segs_per_lane(prec) - 1)];
      bs      = lsub[k] ? ~b[4*k +: 4] : b[4*k +: 4];
      // carry-break mux: a lane's lowest segment starts a new chain
      cb      = seg_is_lane_lo(prec, k) ? lsub[k] : c[k];
    end
    // four 1-bit full adders in ripple; the top segment's carry out is
    // not needed
    if (k < SEGS - 1) begin : g_c
      assign {c[k+1], sum[4*k +: 4]} = {1'b0, a[4*k +: 4]} + {1'b0, bs} + 5'(cb);
    end else begin : g_top
      assign sum[4*k +: 4] = a[4*k +: 4] + bs + 4'(cb);
    end
  end

endmodule
