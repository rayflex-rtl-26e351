// fp_to_rec: binary32 -> 33-bit recoded format converter (pipeline stage 1).
//
// Normal numbers keep their fraction and get exp9 = exp + 129.  Subnormal numbers are
// normalized: the leading one of the fraction becomes the hidden bit and the exponent
// is lowered by the shift.  Zero maps to exp9 = 0, infinity to exp9 = 9'b110_000000,
// and every NaN to the default quiet NaN.  The conversion is exact.
// The paper places one bank of these converters in the first pipeline stage; the bit
// encoding is this design's own (see rayflex_pkg).  Timing: combinational.
module fp_to_rec
  import rayflex_pkg::*;
(
  input  fp32_t  x,
  output recfn_t y
);
  logic [7:0]  ex;
  logic [22:0] fr;
  logic [5:0]  lz;
  logic [22:0] fr_n;

  always_comb begin
    ex   = x[30:23];
    fr   = x[22:0];
    lz   = clz50({fr, 27'd0});           // 0..22 for a non-zero fraction
    fr_n = 23'({fr, 1'b0} << lz);        // drop the leading one
    if (ex == 8'hFF)
      y = (fr == 23'd0) ? {x[31], REC_POS_INF[31:0]} : REC_NAN;
    else if (ex == 8'd0 && fr == 23'd0)
      y = {x[31], 32'd0};
    else if (ex == 8'd0)
      y = {x[31], 9'(9'd129 - 9'($unsigned(lz))), fr_n};
    else
      y = {x[31], 9'({1'b0, ex} + 9'd129), fr};
  end
endmodule
