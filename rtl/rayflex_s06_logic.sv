// rayflex_s06_logic: stage 6 logic, 3 adders (ray-triangle step 6, differences).
//
//   U = p0 - p1 = Cx*By - Cy*Bx
//   V = p2 - p3 = Ax*Cy - Ay*Cx
//   W = p4 - p5 = Bx*Ay - By*Ax
// Inputs gated to zero for ray-box operations, which pass through.  Combinational.
module rayflex_s06_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  recfn_t [2:0] a, b, y;
  logic         is_tri;

  for (genvar i = 0; i < 3; i++) begin : g_add
    fp_rec_add u_add (.a(a[i]), .b(b[i]), .y(y[i]));
  end

  always_comb begin
    is_tri = (d.op == OP_TRIANGLE);
    for (int i = 0; i < 3; i++) begin
      a[i] = is_tri ? d.tri_prod[2*i] : REC_ZERO;
      b[i] = is_tri ? rec_neg(d.tri_prod[2*i + 1]) : REC_ZERO;
    end
    q = d;
    if (is_tri) q.tri_uvw = y;
  end
endmodule
