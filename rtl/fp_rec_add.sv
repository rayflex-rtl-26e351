// fp_rec_add: combinational floating-point adder on the 33-bit recoded format.
//
// y = a + b, rounded to binary32 precision with round-to-nearest-even.  Subtraction is
// done by the caller by flipping the sign bit of b (rayflex_pkg::rec_neg).
// The larger-magnitude operand is kept, the smaller one is shifted right into a
// 28-bit window with guard, round and sticky bits, the two are added or subtracted,
// the sum is renormalized by a leading-zero count and rounded by round_pack().
// Special cases: NaN in or inf - inf gives the default NaN; an infinite operand gives
// that infinity; +0 + -0 gives +0; an exact cancellation gives +0.
//
// The pipeline rounds after every addition (as the paper describes); the adder
// circuit itself is this design's own, written in place of an external FP library.
// Timing: purely combinational.
module fp_rec_add
  import rayflex_pkg::*;
(
  input  recfn_t a,
  input  recfn_t b,
  output recfn_t y
);
  unpacked_t ua, ub, bg, sml;
  logic        swap, eff_sub;
  logic [11:0] diff;
  logic [27:0] bg_w, sml_w, sml_sh, sum;
  logic        sticky;
  logic [5:0]  lz;
  logic [27:0] norm;
  logic signed [11:0] rexp;

  always_comb begin
    ua = rec_unpack(a);
    ub = rec_unpack(b);
    swap  = (b[31:0] > a[31:0]);
    bg   = swap ? ub : ua;
    sml = swap ? ua : ub;
    eff_sub = bg.sign ^ sml.sign;
    diff  = 12'(bg.exp - sml.exp);
    bg_w   = {1'b0, bg.sig, 3'b000};
    sml_w = {1'b0, sml.sig, 3'b000};
    if (diff >= 12'd28) begin
      sml_sh = 28'd0;
      sticky   = 1'b1;
    end else begin
      sml_sh = sml_w >> diff[4:0];
      sticky   = |(sml_w & ((28'd1 << diff[4:0]) - 28'd1));
    end
    sml_sh = sml_sh | {27'd0, sticky};
    sum  = eff_sub ? (bg_w - sml_sh) : (bg_w + sml_sh);
    lz   = clz50({sum, 22'd0});
    norm = sum << lz;
    rexp = bg.exp + 12'sd1 - 12'($unsigned(lz));

    if (ua.is_nan || ub.is_nan || (ua.is_inf && ub.is_inf && (ua.sign != ub.sign)))
      y = REC_NAN;
    else if (ua.is_inf)
      y = {ua.sign, REC_POS_INF[31:0]};
    else if (ub.is_inf)
      y = {ub.sign, REC_POS_INF[31:0]};
    else if (ua.is_zero && ub.is_zero)
      y = {ua.sign & ub.sign, 32'd0};
    else if (ua.is_zero)
      y = b;
    else if (ub.is_zero)
      y = a;
    else if (sum == 28'd0)
      y = REC_ZERO;
    else
      y = round_pack(bg.sign, rexp, {norm, 22'd0});
  end
endmodule
