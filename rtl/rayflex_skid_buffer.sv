// rayflex_skid_buffer: the parameterized RayFlex Skid Buffer, building block of the
// elastic pipeline.
//
// A valid/ready stage that wraps a block of stage logic converting type T to type U:
//
//   in_data(T) --+------------------> mux(0) --> logic_in(T) ==> [stage logic] ==>
//                +--> skid reg(T) --> mux(1)                                     |
//   out_data(U) <-------------------- output reg(U) <-------------- logic_out(U) <+
//
// The stage logic sits outside this module and is connected through logic_in and
// logic_out, because SystemVerilog cannot pass a function as a parameter; the
// pipeline top wires each stage's logic between the two ports, so the buffer and
// its logic form one stage exactly as in the paper's diagram.  The controller
// (skid_buffer_ctrl) decides when the output register loads and when an incoming
// item must be parked in the skid register because the consumer stalled.
//
// Timing: one cycle from input_fire to out_valid; one item per cycle when the
// consumer is ready; in_ready is a registered signal.  Output data are held stable
// while out_valid && !out_ready (checked by an assertion).  The data registers are
// not reset (only the controller is), a common choice for wide datapaths.
module rayflex_skid_buffer #(
  parameter type T = logic [7:0],
  parameter type U = logic [7:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output U     out_data,
  output T     logic_in,   // to the stage logic
  input  U     logic_out   // from the stage logic
);
  logic select, load_out, load_skid;
  T     skid_q;
  U     out_q;

  skid_buffer_ctrl u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .out_valid, .out_ready,
    .select, .load_out, .load_skid
  );

  assign logic_in = select ? skid_q : in_data;
  assign out_data = out_q;

  always_ff @(posedge clk) begin
    if (load_skid) skid_q <= in_data;
    if (load_out)  out_q  <= logic_out;
  end

  // valid/ready rule: a stalled output keeps its valid and its data
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
             out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
