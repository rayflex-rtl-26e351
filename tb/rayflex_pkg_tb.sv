// rayflex_pkg_tb: self-checking testbench of the shared package rayflex_pkg.
//
// Checks the shared rounding function round_pack() against the double-precision
// reference over random signs, exponents from deep underflow to overflow and random
// 50-bit significands (the value sig * 2^(exp-49) is exact in double, so a single
// reference rounding is the correct result).  Also checks rec_unpack, rec_neg,
// clz50 and the widths of the IO structures.
module rayflex_pkg_tb;
  import rayflex_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 40000;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s", what);
    end
  endtask

  initial begin
    logic [49:0]        sig;
    logic signed [11:0] e;
    logic               s;
    real                r;
    bit [31:0]          x, want, got;
    unpacked_t          u;
    for (int i = 0; i < N; i++) begin
      @(posedge clk);
      s   = 1'($urandom);
      e   = 12'(int'($urandom % 340) - 190);
      sig = {1'b1, 17'($urandom), 32'($urandom)};
      if (i % 3 == 0) sig[24:0] = {1'b1, 24'd0} << ($urandom % 2);   // near ties
      r    = real'(sig) * $bitstoreal({1'b0, 11'(int'(e) - 49 + 1023), 52'd0});
      want = real_to_fp32(s ? -r : r);
      got  = from_rec(round_pack(s, e, sig));
      check(same32(got, want), $sformatf("round_pack(%0d, %0d, %h) = %h, want %h", s, e, sig, got, want));
    end
    for (int i = 0; i < 1000; i++) begin
      x = rand_normal(1, 254);
      u = rec_unpack(to_rec(x));
      check(!u.is_zero && !u.is_inf && !u.is_nan && u.sign == x[31] &&
            int'(u.exp) == int'(x[30:23]) - 127 && u.sig == {1'b1, x[22:0]}, "rec_unpack");
      check(from_rec(rec_neg(to_rec(x))) == {~x[31], x[30:0]}, "rec_neg");
    end
    check(rec_unpack(to_rec(32'h7F800000)).is_inf, "unpack inf");
    check(rec_unpack(to_rec(32'h7FC00000)).is_nan, "unpack nan");
    check(rec_unpack(to_rec(32'h80000000)).is_zero, "unpack zero");
    check(rec_is_nan(REC_NAN) && !rec_is_nan(REC_POS_INF), "rec_is_nan");
    for (int i = 0; i < 50; i++) check(clz50(50'd1 << i) == 6'(49 - i), "clz50");
    check(clz50('0) == 6'd50, "clz50 zero");
    check($bits(rayflex_in_t) == 1 + 13 * 32 + 6 + 24 * 32 + 9 * 32, "rayflex_in_t width");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
