// rayflex: unified ray-tracing intersection datapath (top level).
//
// One operation enters per cycle on a valid/ready input and leaves 11 cycles later on
// a valid/ready output.  An operation is either a ray-box test of one ray against
// four child boxes, returning the boxes sorted by entry distance with their hit
// flags, or a watertight ray-triangle test with back-face culling, returning the hit
// flag and the distance as a numerator/denominator pair.
//
// Structure: a chain of 11 rayflex_skid_buffer stages.  Stage i's buffer feeds its
// selected input through rayflex_sNN_logic into its output register, so every
// stage is "skid buffer + custom logic":
//   1  reformat binary32 -> recoded             7  3 multipliers
//   2  24 adders                                8  2 adders
//   3  24 multipliers                           9  2 adders
//   4  40 comparators, 6 adders                10  QuadSort, 5 comparators
//   5  6 multipliers                           11  reformat recoded -> binary32
//   6  3 adders
// Stage 1 converts rayflex_in_t to the Shared RayFlex Data Structure (srfds_t), stages
// 2..10 carry srfds_t, stage 11 converts it to rayflex_out_t.  Functional units are
// shared between the two operations in each stage; ray-box stages 5..9 and the
// ray-triangle part of stage 4's comparators are pass-through for the other operation.
//
// Flow control is local: each buffer talks only to its neighbours (elastic pipeline),
// there is no global stall signal.  A stalled output fills the skid registers
// backwards one stage per cycle until in_ready drops.
//
// Follows the paper: the stage count and latency (11), throughput (1/cycle), the
// functional units per stage, the mapping of algorithm steps to stages, the
// elastic skid-buffer pipeline and the shared data structure.  Own choices: the
// reset (active-low, asynchronous, on the controllers only), the IO field layout.
module rayflex
  import rayflex_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  rayflex_in_t  in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output rayflex_out_t out_data
);
  localparam int unsigned NS = LATENCY;   // 11 stages

  // handshake between stage i-1 and stage i; index 0 is the pipeline input
  logic   [NS:0] v, r;
  srfds_t        st_q   [1:NS-1];   // stage outputs 1..10
  srfds_t        l_in   [2:NS];     // logic inputs of stages 2..11
  srfds_t        l_out  [1:NS-1];   // logic outputs of stages 1..10
  rayflex_in_t   s1_in;
  rayflex_out_t  s11_out;

  assign v[0]     = in_valid;
  assign in_ready = r[0];
  assign out_valid = v[NS];
  assign r[NS]    = out_ready;

  // ---- stage 1: input reformat
  rayflex_skid_buffer #(.T(rayflex_in_t), .U(srfds_t)) u_sb01 (
    .clk, .rst_n, .in_valid(v[0]), .in_ready(r[0]), .in_data(in_data),
    .out_valid(v[1]), .out_ready(r[1]), .out_data(st_q[1]),
    .logic_in(s1_in), .logic_out(l_out[1])
  );
  rayflex_s01_logic u_s01 (.d(s1_in), .q(l_out[1]));

  // ---- stages 2..10: srfds_t -> srfds_t
  for (genvar i = 2; i < NS; i++) begin : g_stage
    rayflex_skid_buffer #(.T(srfds_t), .U(srfds_t)) u_sb (
      .clk, .rst_n, .in_valid(v[i-1]), .in_ready(r[i-1]), .in_data(st_q[i-1]),
      .out_valid(v[i]), .out_ready(r[i]), .out_data(st_q[i]),
      .logic_in(l_in[i]), .logic_out(l_out[i])
    );
  end

  rayflex_s02_logic u_s02 (.d(l_in[2]),  .q(l_out[2]));
  rayflex_s03_logic u_s03 (.d(l_in[3]),  .q(l_out[3]));
  rayflex_s04_logic u_s04 (.d(l_in[4]),  .q(l_out[4]));
  rayflex_s05_logic u_s05 (.d(l_in[5]),  .q(l_out[5]));
  rayflex_s06_logic u_s06 (.d(l_in[6]),  .q(l_out[6]));
  rayflex_s07_logic u_s07 (.d(l_in[7]),  .q(l_out[7]));
  rayflex_s08_logic u_s08 (.d(l_in[8]),  .q(l_out[8]));
  rayflex_s09_logic u_s09 (.d(l_in[9]),  .q(l_out[9]));
  rayflex_s10_logic u_s10 (.d(l_in[10]), .q(l_out[10]));

  // ---- stage 11: output reformat
  rayflex_skid_buffer #(.T(srfds_t), .U(rayflex_out_t)) u_sb11 (
    .clk, .rst_n, .in_valid(v[NS-1]), .in_ready(r[NS-1]), .in_data(st_q[NS-1]),
    .out_valid(v[NS]), .out_ready(r[NS]), .out_data(out_data),
    .logic_in(l_in[NS]), .logic_out(s11_out)
  );
  rayflex_s11_logic u_s11 (.d(l_in[NS]), .q(s11_out));
endmodule
