// cordic_rom: per-iteration CORDIC constant E_i for a SIMD word.
//
// Returns, replicated into every lane, the constant that the Z path of a
// CORDIC stage adds or subtracts at iteration i: atanh(2^-i) for hyperbolic
// rotation (Table II of the paper) or 2^-i for the linear modes (Table III).
// Both are in angle format (N-2 fraction bits for an N-bit lane). The
// atanh values come from one 32-bit master table (30 fraction bits,
// entries round(atanh(2^-i) * 2^30)) rounded to the lane width; 2^-i is a
// single bit, zero once i exceeds the lane's fraction bits. Combinational.
module cordic_rom
  import flexpe_pkg::*;
(
  input  prec_e       prec,
  input  logic        hyp,     // 1: atanh(2^-i), 0: 2^-i
  input  logic [4:0]  iter,    // i, 1..16
  output word_t       e
);

  always_comb begin
    word_t       v;
    int unsigned fz;
    fz = lane_bits(prec) - 2;
    if (hyp) begin
      v = (iter <= 5'd16) ? round_master(prec, ATANH_Q30[iter]) : '0;
    end else begin
      v = (int'(iter) <= fz) ? (word_t'(1) << (fz - int'(iter))) : '0;
    end
    e = replicate(prec, v);
  end

endmodule
