// skid_buffer_ctrl_tb: self-checking testbench of skid_buffer_ctrl.
//
// Drives random in_valid / out_ready and checks every cycle against an occupancy
// model: the buffer holds 0, 1 or 2 items; in_ready = (count < 2), out_valid =
// (count > 0), select = (count == 2); the output register must load exactly when an
// item moves into it and the skid register exactly when a second item arrives while
// the consumer stalls.  All three states and all five transitions are counted and
// each must occur.
module skid_buffer_ctrl_tb;
  localparam int N = 20000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_ready = 1'b0;
  logic in_ready, out_valid, select, load_out, load_skid;
  int   checks = 0, failures = 0;
  int   count = 0;
  bit   ifire, ofire;
  int   trans [5];

  skid_buffer_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("MISMATCH at count=%0d: %s", count, what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      // phases with mostly-stalled, mostly-flowing and random traffic
      in_valid  = ($urandom % 100) < ((i / 2000) % 2 ? 90 : 50);
      out_ready = ($urandom % 100) < ((i / 3000) % 2 ? 30 : 80);
      #1;
      ifire = in_valid && (count < 2);
      ofire = out_ready && (count > 0);
      check(in_ready == (count < 2), "in_ready");
      check(out_valid == (count > 0), "out_valid");
      check(select == (count == 2), "select");
      check(load_out == ((count == 0 && ifire) || (count == 1 && ifire && ofire) ||
                         (count == 2 && ofire)), "load_out");
      check(load_skid == (count == 1 && ifire && !ofire), "load_skid");
      if (count == 0 && ifire)            trans[0]++;   // EMPTY -> BUSY
      if (count == 1 && ifire && !ofire)  trans[1]++;   // BUSY  -> FULL
      if (count == 1 && !ifire && ofire)  trans[2]++;   // BUSY  -> EMPTY
      if (count == 2 && ofire)            trans[3]++;   // FULL  -> BUSY
      if (count == 1 && ifire && ofire)   trans[4]++;   // BUSY  -> BUSY, flowing
      count = count + int'(ifire) - int'(ofire);
    end
    foreach (trans[k]) check(trans[k] > 0, $sformatf("transition %0d never seen", k));
    $display("transitions: %p", trans);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
