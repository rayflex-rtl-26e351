// fp_rec_add_tb: self-checking testbench of fp_rec_add.
//
// Drives 40000 operand pairs (random values from tb_fp_pkg::rand_fp, which include zeros,
// subnormals, infinities and NaNs, plus directed cases) through the combinational
// unit, one per clock, converts the recoded result back to binary32 and compares it
// bit-exactly with the double-precision reference g_add (NaN matches any NaN).
module fp_rec_add_tb;
  import tb_fp_pkg::*;
  logic        clk = 1'b0;
  logic [32:0] a, b, y;
  int          checks = 0, failures = 0;
  bit   [31:0] fa, fb, exp_y, got_y;

  fp_rec_add dut (.a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit [31:0] x, bit [31:0] z);
    fa = x;
    fb = z;
    a  = to_rec(x);
    b  = to_rec(z);
    @(posedge clk);
    exp_y = g_add(fa, fb);
    got_y = from_rec(y);
    checks++;
    if (!same32(got_y, exp_y)) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %h op %h: got %h expected %h", fa, fb, got_y, exp_y);
    end
  endtask

  initial begin
    bit [31:0] x;
    // directed: exact cancellation, overflow, underflow, signed zeros
    run(32'h3F800000, 32'hBF800000);
    run(32'h7F7FFFFF, 32'h7F7FFFFF);
    run(32'h00800000, 32'h80000001);
    run(32'h80000000, 32'h80000000);
    run(32'h00000001, 32'h3F000000);
    run(32'h3F800001, 32'h3F7FFFFF);
    run(32'h7F800000, 32'hFF800000);
    run(32'h7F800000, 32'h00000000);
    for (int i = 0; i < 40000; i++) begin
      x = rand_fp();
      if (i % 4 == 0) run(x, {~x[31], x[30:2], 2'($urandom)});   // near cancellation
      else            run(x, rand_fp());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
