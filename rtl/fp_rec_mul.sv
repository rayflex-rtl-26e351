// fp_rec_mul: combinational floating-point multiplier on the 33-bit recoded format.
//
// y = a * b, rounded to binary32 precision with round-to-nearest-even.  The two 24-bit
// significands (always normalized in the recoded format, subnormal inputs included)
// give a 48-bit product in [1, 4); it is normalized by at most one position and
// rounded by round_pack(), which also produces gradual underflow and overflow to
// infinity.  Special cases: NaN in, or infinity times zero, gives the default NaN
// (this is how a ray lying in a box face becomes a miss); an infinite operand gives
// infinity; a zero operand gives a signed zero.
//
// The pipeline rounds after every multiplication (as the paper describes); the
// multiplier circuit itself is this design's own.  Timing: purely combinational.
module fp_rec_mul
  import rayflex_pkg::*;
(
  input  recfn_t a,
  input  recfn_t b,
  output recfn_t y
);
  unpacked_t ua, ub;
  logic        sign;
  logic [47:0] prod;
  logic signed [11:0] pexp;
  logic [49:0] psig;

  always_comb begin
    ua   = rec_unpack(a);
    ub   = rec_unpack(b);
    sign = ua.sign ^ ub.sign;
    prod = ua.sig * ub.sig;
    if (prod[47]) begin
      pexp = ua.exp + ub.exp + 12'sd1;
      psig = {prod, 2'b00};
    end else begin
      pexp = ua.exp + ub.exp;
      psig = {prod[46:0], 3'b000};
    end

    if (ua.is_nan || ub.is_nan || (ua.is_inf && ub.is_zero) || (ua.is_zero && ub.is_inf))
      y = REC_NAN;
    else if (ua.is_inf || ub.is_inf)
      y = {sign, REC_POS_INF[31:0]};
    else if (ua.is_zero || ub.is_zero)
      y = {sign, 32'd0};
    else
      y = round_pack(sign, pexp, psig);
  end
endmodule
