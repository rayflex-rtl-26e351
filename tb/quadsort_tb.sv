// quadsort_tb: self-checking testbench of quadsort.
//
// Random key sets (many ties, +infinity keys for missed boxes, negative values) are
// sorted; the output keys must be non-decreasing and the output must be a
// permutation of the input entries with each key still paired with its index and
// hit flag.  All 24 input orders of four distinct keys are also checked.
module quadsort_tb;
  import tb_fp_pkg::*;
  localparam int N = 20000;
  logic             clk = 1'b0;
  logic [3:0][32:0] key_in, key_out;
  logic [3:0][1:0]  idx_in, idx_out;
  logic [3:0]       hit_in, hit_out;
  int               checks = 0, failures = 0;

  quadsort dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit [3:0][31:0] k);
    bit [3:0] used;
    bit       ok;
    for (int i = 0; i < 4; i++) begin
      key_in[i] = to_rec(k[i]);
      idx_in[i] = 2'(i);
      hit_in[i] = 1'($urandom);
    end
    @(posedge clk);
    ok   = 1;
    used = '0;
    for (int i = 0; i < 3; i++)
      if (g_lt(from_rec(key_out[i + 1]), from_rec(key_out[i]))) ok = 0;
    for (int i = 0; i < 4; i++) begin
      if (used[idx_out[i]]) ok = 0;
      used[idx_out[i]] = 1;
      if (key_out[i] != key_in[idx_out[i]] || hit_out[i] != hit_in[idx_out[i]]) ok = 0;
    end
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("MISMATCH keys %h %h %h %h", k[0], k[1], k[2], k[3]);
    end
  endtask

  initial begin
    bit [3:0][31:0] k;
    bit [31:0]      vals [4] = '{32'h3F800000, 32'h40000000, 32'h40400000, 32'h7F800000};
    int             perm [4];
    // all 24 orders of four distinct keys
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++)
      for (int c = 0; c < 4; c++) for (int d = 0; d < 4; d++)
        if (a != b && a != c && a != d && b != c && b != d && c != d) begin
          perm = '{a, b, c, d};
          for (int i = 0; i < 4; i++) k[i] = vals[perm[i]];
          run(k);
        end
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < 4; i++)
        case ($urandom % 4)
          0: k[i] = 32'h7F800000;                              // missed box
          1: k[i] = fp(real'($urandom % 4));                   // frequent ties
          default: k[i] = rand_normal(120, 135);
        endcase
      run(k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
