// rayflex_s05_logic: stage 5 logic, 6 multipliers (ray-triangle step 6, products).
//
// With the sheared vertices A, B, C of stage 4 it forms the six products of the
// scaled barycentric coordinates of the watertight test:
//   p0 = Cx*By  p1 = Cy*Bx  p2 = Ax*Cy  p3 = Ay*Cx  p4 = Bx*Ay  p5 = By*Ax
// Ray-box operations leave the multipliers idle (inputs gated to zero) and pass
// through.  Combinational.
module rayflex_s05_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  recfn_t [5:0] a, b, y;
  logic         is_tri;

  for (genvar i = 0; i < 6; i++) begin : g_mul
    fp_rec_mul u_mul (.a(a[i]), .b(b[i]), .y(y[i]));
  end

  always_comb begin
    is_tri = (d.op == OP_TRIANGLE);
    // operand table: {vertex, axis} of each factor; A=0, B=1, C=2, x=0, y=1
    a[0] = d.tri_xyz[2][0];  b[0] = d.tri_xyz[1][1];
    a[1] = d.tri_xyz[2][1];  b[1] = d.tri_xyz[1][0];
    a[2] = d.tri_xyz[0][0];  b[2] = d.tri_xyz[2][1];
    a[3] = d.tri_xyz[0][1];  b[3] = d.tri_xyz[2][0];
    a[4] = d.tri_xyz[1][0];  b[4] = d.tri_xyz[0][1];
    a[5] = d.tri_xyz[1][1];  b[5] = d.tri_xyz[0][0];
    if (!is_tri) begin
      a = '0;
      b = '0;
    end
    q = d;
    if (is_tri) q.tri_prod = y;
  end
endmodule
