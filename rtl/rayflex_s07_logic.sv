// rayflex_s07_logic: stage 7 logic, 3 multipliers (ray-triangle step 8, products).
//
// Products of the barycentric coordinates with the sheared z of the vertices:
//   U*Az, V*Bz, W*Cz
// Inputs gated to zero for ray-box operations, which pass through.  Combinational.
module rayflex_s07_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  recfn_t [2:0] a, b, y;
  logic         is_tri;

  for (genvar i = 0; i < 3; i++) begin : g_mul
    fp_rec_mul u_mul (.a(a[i]), .b(b[i]), .y(y[i]));
  end

  always_comb begin
    is_tri = (d.op == OP_TRIANGLE);
    for (int i = 0; i < 3; i++) begin
      a[i] = is_tri ? d.tri_uvw[i]    : REC_ZERO;
      b[i] = is_tri ? d.tri_xyz[i][2] : REC_ZERO;
    end
    q = d;
    if (is_tri) q.tri_tprod = y;
  end
endmodule
