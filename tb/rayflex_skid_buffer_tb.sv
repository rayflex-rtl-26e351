// rayflex_skid_buffer_tb: self-checking testbench of rayflex_skid_buffer.
//
// Instantiates the buffer with T = 16 bits and U = 18 bits and stage logic
// U = 3*T + 1 between logic_in and logic_out.  A random producer and a random
// consumer exchange 20000 items; a scoreboard checks that every item comes out once,
// in order, transformed.  A full-throughput phase checks one item per cycle and a
// one-cycle latency from input_fire to out_valid.
module rayflex_skid_buffer_tb;
  typedef logic [15:0] t_t;
  typedef logic [17:0] u_t;
  localparam int N = 20000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  t_t   in_data = '0, logic_in;
  u_t   out_data, logic_out;
  int   checks = 0, failures = 0;
  t_t   sent [$];
  int   nsent = 0, nrecv = 0, stalls = 0;
  int   pv = 50, pr = 50;
  bit   disable_random = 0;
  bit   took = 0;           // the item on in_data was taken at the last edge

  rayflex_skid_buffer #(.T(t_t), .U(u_t)) dut (.*);
  assign logic_out = 18'(logic_in) * 18'd3 + 18'd1;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (4 * N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard on the clock edge
  always @(posedge clk) if (rst_n) begin
    took = in_valid && in_ready;
    if (in_valid && in_ready) begin
      sent.push_back(in_data);
      nsent++;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (sent.size() == 0 || out_data != 18'(sent[0]) * 18'd3 + 18'd1) begin
        failures++;
        if (failures < 10) $display("MISMATCH item %0d: got %h", nrecv, out_data);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      nrecv++;
    end
    if (out_valid && !out_ready && in_valid && !in_ready) stalls++;
  end

  // producer / consumer drive on the falling edge
  always @(negedge clk) if (rst_n && !disable_random) begin
    if (!in_valid || took) begin
      in_valid <= (nsent < N) && (($urandom % 100) < pv);
      in_data  <= 16'($urandom);
    end
    out_ready <= ($urandom % 100) < pr;
  end

  initial begin
    int t0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // random phases
    for (int ph = 0; ph < 8; ph++) begin
      pv = 20 + 10 * ph;
      pr = 90 - 10 * ph;
      repeat (N / 4) @(posedge clk);
    end
    pv = 100;
    pr = 100;
    wait (nsent == N);
    repeat (10) @(posedge clk);
    checks++;
    if (nrecv != N || sent.size() != 0) begin
      failures++;
      $display("LOST items: sent %0d received %0d", nsent, nrecv);
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("no back-pressure reached the input");
    end
    // throughput and latency: 100 items with both sides always ready
    @(negedge clk);
    t0 = nrecv;
    disable_random = 1;
    in_valid = 1'b1;
    out_ready = 1'b1;
    in_data = 16'h1234;
    @(posedge clk);
    #1;
    checks++;
    if (!out_valid || out_data != 18'h1234 * 3 + 1) begin
      failures++;
      $display("latency is not one cycle");
    end
    repeat (99) @(posedge clk);
    #1;
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    checks++;
    if (nrecv - t0 != 100) begin
      failures++;
      $display("throughput: %0d items in 100 cycles", nrecv - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
