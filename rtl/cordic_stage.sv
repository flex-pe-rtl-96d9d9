// cordic_stage: one SIMD CORDIC micro-rotation (combinational).
//
// The stage of the paper's Fig. 4(b): two SIMD logarithmic barrel shifters
// form X*2^-i and Y*2^-i, three SIMD add/sub units update X, Y and Z, a ROM
// supplies E_i, and a sign-extract picks each lane's direction d_i:
//   X' = X + d*Y*2^-i           (hyperbolic; X' = X in the linear modes)
//   Y' = Y + d*X*2^-i
//   Z' = Z - d*E_i
// Rotation modes take d = +1 when Z >= 0; linear vectoring takes d = -1 when
// X and Y have the same sign, which drives Y to zero and leaves Y0/X0 in Z.
// CM_PASS returns the inputs unchanged, and so does a linear-mode stage
// whose 2^-i is below the lane's LSB (i > N-2): such a stage could only add
// error (this design's choice; it matters for the 4-bit lanes). All lanes share the shift index i,
// every lane has its own direction. The registers between stages belong to
// the pipelined and iterative processing elements that use this block.
module cordic_stage
  import flexpe_pkg::*;
(
  input  prec_e       prec,
  input  cmode_e      mode,
  input  logic [4:0]  iter,   // shift index i
  input  logic        rne,    // round the shifted operands to nearest even
  input  word_t       x_in,
  input  word_t       y_in,
  input  word_t       z_in,
  output word_t       x_out,
  output word_t       y_out,
  output word_t       z_out
);

  word_t           xs, ys, e, xsum, ysum, zsum;
  logic [SEGS-1:0] sx, sy, sz, dneg;

  simd_lbs u_shx (.prec, .din(x_in), .sh(iter), .rne, .dout(xs));
  simd_lbs u_shy (.prec, .din(y_in), .sh(iter), .rne, .dout(ys));
  cordic_rom u_rom (.prec, .hyp(mode == CM_HYP_ROT), .iter, .e);

  // Sign-extract: direction per lane (dneg = 1 means d = -1).
  always_comb begin
    sx = lane_signs(prec, x_in);
    sy = lane_signs(prec, y_in);
    sz = lane_signs(prec, z_in);
    dneg = (mode == CM_LIN_VEC) ? ~(sx ^ sy) : sz;
  end

  simd_addsub u_addx (.prec, .a(x_in), .b((mode == CM_HYP_ROT) ? ys : '0), .sub(dneg),  .sum(xsum));
  simd_addsub u_addy (.prec, .a(y_in), .b(xs),                             .sub(dneg),  .sum(ysum));
  simd_addsub u_addz (.prec, .a(z_in), .b(e),                              .sub(~dneg), .sum(zsum));

  always_comb begin
    if (mode == CM_PASS ||
        (mode != CM_HYP_ROT && int'(iter) > int'(lane_bits(prec)) - 2)) begin
      x_out = x_in;
      y_out = y_in;
      z_out = z_in;
    end else begin
      x_out = xsum;
      y_out = ysum;
      z_out = zsum;
    end
  end

endmodule
