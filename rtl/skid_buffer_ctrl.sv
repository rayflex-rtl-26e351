// skid_buffer_ctrl: the three-state controller of a RayFlex skid buffer.
//
// States and outputs (as in the controller state diagram of the design):
//   EMPTY  in_ready=1 out_valid=0 select=0   nothing held
//   BUSY   in_ready=1 out_valid=1 select=0   output register holds one item
//   FULL   in_ready=0 out_valid=1 select=1   output register and skid register full
// Transitions: EMPTY -> BUSY on input_fire; BUSY -> FULL on input_fire && !output_fire;
// BUSY -> EMPTY on !input_fire && output_fire; FULL -> BUSY on output_fire.
// input_fire = in_valid & in_ready, output_fire = out_valid & out_ready.
//
// Register enables (this design's own derivation from the states): the output
// register loads on EMPTY->BUSY, on BUSY with both fires, and on FULL->BUSY (then from
// the skid register, select=1); the skid register loads on BUSY->FULL.  in_ready and
// out_valid depend only on the state, so no combinational path runs from out_ready to
// in_ready and a chain of buffers keeps full throughput with short timing paths.
// Reset: active-low asynchronous rst_n to EMPTY (own choice).
module skid_buffer_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  output logic out_valid,
  input  logic out_ready,
  output logic select,      // 1: feed the stage logic from the skid register
  output logic load_out,    // output register enable
  output logic load_skid    // skid register enable
);
  typedef enum logic [1:0] {EMPTY = 2'd0, BUSY = 2'd1, FULL = 2'd2} state_e;
  state_e state, state_nx;
  logic   in_fire, out_fire;

  always_comb begin
    in_ready  = (state != FULL);
    out_valid = (state != EMPTY);
    select    = (state == FULL);
    in_fire   = in_valid && in_ready;
    out_fire  = out_valid && out_ready;
    state_nx  = state;
    load_out  = 1'b0;
    load_skid = 1'b0;
    unique case (state)
      EMPTY: if (in_fire) begin
        state_nx = BUSY;
        load_out = 1'b1;
      end
      BUSY: begin
        if (in_fire && !out_fire) begin
          state_nx  = FULL;
          load_skid = 1'b1;
        end else if (!in_fire && out_fire) begin
          state_nx = EMPTY;
        end else if (in_fire && out_fire) begin
          load_out = 1'b1;
        end
      end
      FULL: if (out_fire) begin
        state_nx = BUSY;
        load_out = 1'b1;
      end
      default: state_nx = EMPTY;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) state <= EMPTY;
    else        state <= state_nx;
endmodule
