// fp_to_rec_tb: self-checking testbench of fp_to_rec.
//
// Random binary32 values (all classes) and every single-bit subnormal are converted;
// the result must equal the reference recoding computed through the double exponent
// (any recoded NaN is accepted for a NaN input).
module fp_to_rec_tb;
  import tb_fp_pkg::*;
  localparam int N = 40000;
  logic        clk = 1'b0;
  logic [31:0] x;
  logic [32:0] y;
  bit   [32:0] e;
  int          checks = 0, failures = 0;

  fp_to_rec dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit [31:0] v);
    x = v;
    @(posedge clk);
    e = to_rec(v);
    checks++;
    if (is_nan32(v) ? (y[31:29] !== 3'b111) : (y !== e)) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h: got %h expected %h", v, y, e);
    end
  endtask

  initial begin
    for (int i = 0; i < 23; i++) run(32'd1 << i);
    for (int i = 0; i < N; i++) run(rand_fp());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
