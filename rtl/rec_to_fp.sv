// rec_to_fp: 33-bit recoded -> binary32 converter (pipeline stage 11).
//
// Inverse of fp_to_rec.  Recoded values below the normal range (exp9 < 130) are
// denormalized by shifting the significand right; values produced by the rounding
// units are already on the subnormal grid, so this is exact.  NaN becomes the quiet
// NaN 0x7FC00000 with the sign kept.  The paper places these converters in the last
// pipeline stage; the encoding is this design's own.  Timing: combinational.
module rec_to_fp
  import rayflex_pkg::*;
(
  input  recfn_t x,
  output fp32_t  y
);
  unpacked_t   u;
  logic [23:0] den;
  logic [11:0] sh;

  always_comb begin
    u   = rec_unpack(x);
    sh  = 12'(-12'sd126 - u.exp);
    den = (sh >= 12'd24) ? 24'd0 : (u.sig >> sh[4:0]);
    if (u.is_nan)
      y = {x[32], 8'hFF, 23'h400000};
    else if (u.is_inf)
      y = {x[32], 8'hFF, 23'd0};
    else if (u.is_zero)
      y = {x[32], 31'd0};
    else if (u.exp < -12'sd126)
      y = {x[32], 8'd0, den[22:0]};
    else
      y = {x[32], 8'(u.exp + 12'sd127), x[22:0]};
  end
endmodule
