// fp_rec_cmp: combinational floating-point comparator on the 33-bit recoded format.
//
// Exactly one of lt (a < b), eq (a == b), gt (a > b) is set for ordered operands; for
// a NaN operand all three are clear and unordered is set, so every ordered relation
// reads false, as IEEE-754 requires and as the paper relies on for rays lying in a
// box face.  +0 and -0 compare equal.  Because the recoded exponent grows with the
// magnitude, the magnitudes are ordered by comparing {exp9, frac} as unsigned
// integers (zeros are forced to 0 first).
// Timing: purely combinational.
module fp_rec_cmp
  import rayflex_pkg::*;
(
  input  recfn_t a,
  input  recfn_t b,
  output logic   lt,
  output logic   eq,
  output logic   gt,
  output logic   unordered
);
  unpacked_t   ua, ub;
  logic [31:0] mag_a, mag_b;
  logic        both_zero, mag_lt, mag_eq;

  always_comb begin
    ua = rec_unpack(a);
    ub = rec_unpack(b);
    mag_a = ua.is_zero ? 32'd0 : a[31:0];
    mag_b = ub.is_zero ? 32'd0 : b[31:0];
    both_zero = ua.is_zero && ub.is_zero;
    mag_lt = mag_a < mag_b;
    mag_eq = mag_a == mag_b;
    unordered = ua.is_nan || ub.is_nan;
    eq = !unordered && (both_zero || (mag_eq && (ua.sign == ub.sign)));
    if (unordered || both_zero)      lt = 1'b0;
    else if (ua.sign != ub.sign)     lt = ua.sign;
    else if (ua.sign)                lt = !mag_lt && !mag_eq;
    else                             lt = mag_lt;
    gt = !unordered && !eq && !lt;
  end
endmodule
