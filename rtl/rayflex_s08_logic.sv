// rayflex_s08_logic: stage 8 logic, 2 adders (ray-triangle steps 7 and 8 in parallel).
//
//   det_part = U + V                 (determinant, first addition)
//   t_part   = U*Az + V*Bz           (scaled hit distance, first addition)
// Inputs gated to zero for ray-box operations, which pass through.  Combinational.
module rayflex_s08_logic
  import rayflex_pkg::*;
(
  input  srfds_t d,
  output srfds_t q
);
  recfn_t [1:0] a, b, y;
  logic         is_tri;

  for (genvar i = 0; i < 2; i++) begin : g_add
    fp_rec_add u_add (.a(a[i]), .b(b[i]), .y(y[i]));
  end

  always_comb begin
    is_tri = (d.op == OP_TRIANGLE);
    a[0] = is_tri ? d.tri_uvw[0]   : REC_ZERO;
    b[0] = is_tri ? d.tri_uvw[1]   : REC_ZERO;
    a[1] = is_tri ? d.tri_tprod[0] : REC_ZERO;
    b[1] = is_tri ? d.tri_tprod[1] : REC_ZERO;
    q = d;
    if (is_tri) begin
      q.tri_det_part = y[0];
      q.tri_t_part   = y[1];
    end
  end
endmodule
