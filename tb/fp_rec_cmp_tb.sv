// fp_rec_cmp_tb: self-checking testbench of fp_rec_cmp.
//
// Random binary32 pairs (with zeros of both signs, subnormals, infinities, NaNs and
// many equal pairs) are converted to recoded form and compared; lt, eq, gt and
// unordered are checked against double-precision comparisons.
module fp_rec_cmp_tb;
  import tb_fp_pkg::*;
  localparam int N = 40000;
  logic        clk = 1'b0;
  logic [32:0] a, b;
  logic        lt, eq, gt, un;
  int          checks = 0, failures = 0;
  bit   [31:0] fa, fb;

  fp_rec_cmp dut (.a(a), .b(b), .lt(lt), .eq(eq), .gt(gt), .unordered(un));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      fa = rand_fp();
      case (i % 4)
        0: fb = fa;
        1: fb = {fa[31:1], 1'($urandom)};
        2: fb = {~fa[31], fa[30:0]};
        default: fb = rand_fp();
      endcase
      a = to_rec(fa);
      b = to_rec(fb);
      @(posedge clk);
      checks++;
      if (lt !== g_lt(fa, fb) || eq !== g_eq(fa, fb) || gt !== g_gt(fa, fb) ||
          un !== (is_nan32(fa) || is_nan32(fb))) begin
        failures++;
        if (failures < 10) $display("MISMATCH %h vs %h: lt%0d eq%0d gt%0d un%0d", fa, fb, lt, eq, gt, un);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
