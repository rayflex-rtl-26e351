// rec_to_fp_tb: self-checking testbench of rec_to_fp.
//
// Random binary32 values (all classes) and every single-bit subnormal are recoded by
// the reference model and converted back by the unit; the binary32 value must come
// back unchanged (NaN must come back as a NaN).
module rec_to_fp_tb;
  import tb_fp_pkg::*;
  localparam int N = 40000;
  logic        clk = 1'b0;
  logic [32:0] x;
  logic [31:0] y;
  int          checks = 0, failures = 0;

  rec_to_fp dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit [31:0] v);
    x = to_rec(v);
    @(posedge clk);
    checks++;
    if (!same32(y, v)) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h: got %h", v, y);
    end
  endtask

  initial begin
    for (int i = 0; i < 23; i++) run(32'd1 << i);
    for (int i = 0; i < N; i++) run(rand_fp());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
